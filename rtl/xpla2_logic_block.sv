// xpla2_logic_block: one CoolRunner XPLA2 logic block, combinational.
//
// Thirty-six block inputs feed a programmable AND array in both polarities.
// Each of the 20 macrocells owns four dedicated (PAL) product terms; in
// addition, 32 shared (PLA) product terms reach every macrocell through a
// fully programmable OR array. A macrocell output is the OR of its four PAL
// terms and of the PLA terms its OR-array row selects. These numbers and the
// PAL/PLA split follow the XPLA2 architecture.
//
// Not modelled: the macrocell register, output polarity control and the
// 8 control product terms of the block, whose function is not specified here.
// Every macrocell is therefore purely combinational, which is all a
// functional unit that computes rd = f(rs, rt) within one cycle needs.
//
// Interface: `cfg` holds the block's AND/OR arrays (layout in hybrid_pkg),
// `in` the 36 inputs from the interconnect, `mc` the 20 macrocell outputs.
// Timing: no clock; output settles combinationally from `in` and `cfg`.
module xpla2_logic_block
  import hybrid_pkg::*;
(
  input  lb_cfg_t                cfg,
  input  logic [LB_INPUTS-1:0]   in,
  output logic [LB_MC-1:0]       mc
);

  // Both polarities of every input, interleaved as the connection bits are.
  logic [LIT_W-1:0] lit;
  always_comb begin
    for (int i = 0; i < LB_INPUTS; i++) begin
      lit[2*i]   = in[i];
      lit[2*i+1] = ~in[i];
    end
  end

  // A product term is 1 when every connected literal is 1.
  function automatic logic product_term(input pt_conn_t conn, input logic [LIT_W-1:0] l);
    return &(~conn | l);
  endfunction

  logic [PLA_PT-1:0] pla_pt;
  always_comb begin
    for (int p = 0; p < PLA_PT; p++) pla_pt[p] = product_term(cfg.pla_and[p], lit);
  end

  always_comb begin
    for (int m = 0; m < LB_MC; m++) begin
      logic pal_sum;
      pal_sum = 1'b0;
      for (int t = 0; t < PAL_PT_PER_MC; t++)
        pal_sum |= product_term(cfg.pal_and[m][t], lit);
      mc[m] = pal_sum | (|(pla_pt & cfg.pla_or[m]));
    end
  end

endmodule
