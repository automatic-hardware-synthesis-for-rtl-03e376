// xpla2_gzia: Global Zero Power Interconnect Array, a programmable crossbar.
//
// Every destination (a logic-block input or a result pin) picks any one of
// N_SRC source signals: the device's input pins and the macrocell outputs.
// The select is held in configuration memory outside this module. A select
// at or beyond N_SRC yields 0. The XPLA2 interconnect is a full crossbar of
// this kind from the outside; its internal structure is not modelled.
// Timing: combinational.
module xpla2_gzia #(
  parameter int unsigned N_SRC = 1024,
  parameter int unsigned N_DST = 36,
  localparam int unsigned SEL_W = (N_SRC > 1) ? $clog2(N_SRC) : 1
) (
  input  logic [N_SRC-1:0]            src,
  input  logic [N_DST-1:0][SEL_W-1:0] sel,
  output logic [N_DST-1:0]            dst
);

  always_comb begin
    for (int d = 0; d < N_DST; d++)
      dst[d] = (int'(sel[d]) < N_SRC) ? src[sel[d]] : 1'b0;
  end

endmodule
