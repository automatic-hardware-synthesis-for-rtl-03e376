// xpla2_fast_module: one XPLA2 Fast Module, four logic blocks side by side.
//
// A Fast Module groups four logic blocks of 20 macrocells each; all of its
// inputs arrive through the global interconnect (xpla2_gzia), so the module
// itself only places the four blocks and collects their 80 macrocell outputs.
// The grouping follows the XPLA2 architecture; the flat bus layout is this
// design's choice: block b uses in[b] and drives mc[b].
// Timing: combinational.
module xpla2_fast_module
  import hybrid_pkg::*;
(
  input  lb_cfg_t [LB_PER_FM-1:0]                  cfg,
  input  logic    [LB_PER_FM-1:0][LB_INPUTS-1:0]   in,
  output logic    [LB_PER_FM-1:0][LB_MC-1:0]       mc
);

  for (genvar b = 0; b < LB_PER_FM; b++) begin : g_lb
    xpla2_logic_block u_lb (
      .cfg (cfg[b]),
      .in  (in[b]),
      .mc  (mc[b])
    );
  end

endmodule
