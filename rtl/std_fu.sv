// std_fu: the standard ALU and shifter of the MIPS core, reduced to the
// operations the assembly-to-hardware translator accepts: ADDU, SUBU, AND,
// OR, SLL, SRL, SRA and the immediate forms the assembler uses for them
// (ADDIU, ANDI, ORI, LUI; `li` assembles to one of these). The semantics are
// the MIPS ones: 32-bit wrap-around add/subtract, logical and arithmetic
// shifts of b by a 5-bit constant amount, LUI places b[15:0] in the upper
// half. The core's address adder and multiply/divide unit are not part of it.
// Interface: op selects the operation, a/b are the operands, shamt the shift
// amount; y is the result. Timing: combinational, one cycle in the core.
module std_fu
  import hybrid_pkg::*;
(
  input  alu_op_e          op,
  input  logic [XLEN-1:0]  a,
  input  logic [XLEN-1:0]  b,
  input  logic [4:0]       shamt,
  output logic [XLEN-1:0]  y
);

  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      ALU_AND: y = a & b;
      ALU_OR:  y = a | b;
      ALU_SLL: y = b << shamt;
      ALU_SRL: y = b >> shamt;
      ALU_SRA: y = XLEN'($signed(b) >>> shamt);
      ALU_LUI: y = {b[15:0], 16'h0000};
      default: y = '0;
    endcase
  end

endmodule
