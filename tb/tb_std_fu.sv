// tb_std_fu: every operation with random operands and shift amounts,
// compared with reference results written out bit by bit (shifts) or with
// plain integer arithmetic, plus the corner cases of shifts by 0 and 31.
module tb_std_fu;
  import hybrid_pkg::*;

  alu_op_e     op;
  logic [31:0] a, b, y;
  logic [4:0]  shamt;
  int checks = 0, failures = 0;

  std_fu dut (.op, .a, .b, .shamt, .y);

  function automatic logic [31:0] ref_model(alu_op_e o, logic [31:0] x, logic [31:0] z, int s);
    logic [31:0] r;
    r = '0;
    case (o)
      ALU_ADD: r = 32'(longint'(x) + longint'(z));
      ALU_SUB: r = 32'(longint'(x) - longint'(z));
      ALU_AND: for (int i = 0; i < 32; i++) r[i] = x[i] && z[i];
      ALU_OR:  for (int i = 0; i < 32; i++) r[i] = x[i] || z[i];
      ALU_SLL: for (int i = 0; i < 32; i++) r[i] = (i >= s) ? z[i - s] : 1'b0;
      ALU_SRL: for (int i = 0; i < 32; i++) r[i] = (i + s < 32) ? z[i + s] : 1'b0;
      ALU_SRA: for (int i = 0; i < 32; i++) r[i] = (i + s < 32) ? z[i + s] : z[31];
      ALU_LUI: for (int i = 16; i < 32; i++) r[i] = z[i - 16];
      default: r = '0;
    endcase
    return r;
  endfunction

  initial begin
    for (int v = 0; v < 4000; v++) begin
      op    = alu_op_e'(v % 8);
      a     = $urandom;
      b     = $urandom;
      shamt = (v % 17 == 0) ? 5'd0 : (v % 19 == 0) ? 5'd31 : 5'($urandom);
      #1;
      checks++;
      if (y !== ref_model(op, a, b, int'(shamt))) begin
        failures++;
        if (failures < 8) $display("op %s a=%h b=%h sh=%0d y=%h exp=%h", op.name(), a, b, shamt, y,
                                   ref_model(op, a, b, int'(shamt)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
