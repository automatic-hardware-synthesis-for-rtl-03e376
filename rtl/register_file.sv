// register_file: 32 x 32-bit general-purpose register file of the MIPS core.
//
// Two combinational read ports supply the rs and rt operands to every
// functional unit (standard units and the CPLD-FU alike); one write port,
// written at the rising clock edge, takes the result back. Register 0 reads
// as zero and ignores writes, as in MIPS; this is what lets `cpld rd, rs, $0`
// feed a null second operand to a one-input circuit. A read in the same
// cycle as a write to that register returns the old value. Reset clears all
// registers (a choice of this design, so that simulation starts defined).
module register_file
  import hybrid_pkg::*;
#(
  parameter int unsigned N_REGS = NREG,
  parameter int unsigned WIDTH  = XLEN,
  localparam int unsigned AW    = $clog2(N_REGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AW-1:0]    ra1,
  output logic [WIDTH-1:0] rd1,
  input  logic [AW-1:0]    ra2,
  output logic [WIDTH-1:0] rd2,
  input  logic             we,
  input  logic [AW-1:0]    wa,
  input  logic [WIDTH-1:0] wd
);

  logic [WIDTH-1:0] regs [N_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REGS; r++) regs[r] <= '0;
    end else if (we && wa != '0) begin
      regs[wa] <= wd;
    end
  end

  assign rd1 = (ra1 == '0) ? '0 : regs[ra1];
  assign rd2 = (ra2 == '0) ? '0 : regs[ra2];

endmodule
