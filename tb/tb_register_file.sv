// tb_register_file: random writes and reads against a shadow array.
// Checks that register 0 stays zero, that a write lands at the next rising
// edge (a read in the write cycle still sees the old value) and that both
// read ports return independent registers.
module tb_register_file;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        we;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0, r0_writes = 0;

  register_file dut (.clk, .rst_n, .ra1, .rd1, .ra2, .rd2, .we, .wa, .wd);

  always #5 clk = ~clk;

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    for (int r = 0; r < 32; r++) shadow[r] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int v = 0; v < 3000; v++) begin
      @(negedge clk);
      we  = ($urandom % 4) != 0;
      wa  = 5'($urandom);
      if (v % 50 == 0) wa = '0;
      wd  = $urandom;
      ra1 = 5'($urandom);
      ra2 = (v % 3 == 0) ? wa : 5'($urandom);
      #1;
      check(rd1, shadow[ra1], "rd1");
      check(rd2, shadow[ra2], "rd2 (old value in write cycle)");
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
      if (we && wa == 0) r0_writes++;
    end
    checks++;
    if (r0_writes == 0) begin failures++; $display("no write to r0 tried"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
