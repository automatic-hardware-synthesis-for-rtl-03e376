// tb_cpld_fu: programs a two-Fast-Module CPLD-FU through its configuration
// port with the three example circuits (a one-input inversion, a byte swap
// that is pure rewiring, and a two-level decrement/shift/increment that
// feeds macrocells of Fast Module 0 into Fast Module 1) and compares the
// result with the original instruction sequences evaluated in software. It
// also checks the erased state after reset and the levelling rule: a block
// of Fast Module 0 that selects a macrocell of Fast Module 1 reads 0, while a
// result pin can read that macrocell directly.
module tb_cpld_fu;
  import hybrid_pkg::*;
  import tb_fabric_pkg::*;

  localparam int unsigned N_FM = 2;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        cfg_we = 1'b0;
  cfg_addr_t   cfg_addr;
  logic [31:0] cfg_wdata, op_a, op_b, result;
  int checks = 0, failures = 0;

  cpld_fu #(.N_FM(N_FM)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .op_a, .op_b, .result);

  always #5 clk = ~clk;

  task automatic cfg_write(input cfg_region_e region, input int lb, input int word, input logic [31:0] d);
    @(negedge clk);
    cfg_we    = 1'b1;
    cfg_addr  = '{region: region, lb: 8'(lb), word: 9'(word)};
    cfg_wdata = d;
    @(negedge clk);
    cfg_we    = 1'b0;
  endtask

  task automatic load(input image_t im);
    for (int k = 0; k < im.n_lb; k++) begin
      logic [LB_CFG_WORDS*32-1:0] bits;
      bits = (LB_CFG_WORDS*32)'(im.cfg[k]);
      for (int w = 0; w < LB_CFG_WORDS; w++)
        cfg_write(CFG_ARRAY, im.lb_idx[k], w, bits[32*w +: 32]);
      for (int i = 0; i < LB_INPUTS; i++)
        if (im.route[k][i] >= 0) cfg_write(CFG_GZIA, im.lb_idx[k], i, 32'(im.route[k][i]));
    end
    for (int j = 0; j < 32; j++)
      if (im.out_src[j] >= 0) cfg_write(CFG_OUT, 0, j, 32'h8000_0000 | 32'(im.out_src[j]));
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
  endtask

  task automatic expect_result(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (result !== e) begin
      failures++;
      if (failures < 10) $display("%s: a=%h b=%h result=%h exp=%h", what, op_a, op_b, result, e);
    end
  endtask

  initial begin
    op_a = 0; op_b = 0; cfg_addr = '0; cfg_wdata = 0;
    do_reset();
    // erased after reset
    for (int v = 0; v < 20; v++) begin
      op_a = $urandom; op_b = $urandom;
      expect_result(32'h0, "erased");
    end

    load(image_triangles1());
    for (int v = 0; v < 200; v++) begin
      op_a = $urandom; op_b = $urandom;
      expect_result(ref_triangles1(op_a), "triangles-1");
    end

    do_reset();
    load(image_endian());
    for (int v = 0; v < 200; v++) begin
      op_a = $urandom; op_b = $urandom;
      expect_result(ref_endian(op_a), "endian");
    end

    do_reset();
    load(image_life(LB_PER_FM));   // second level in Fast Module 1
    for (int v = 0; v < 512; v++) begin
      op_a = (v < 256) ? {$urandom, 8'(v)} >> 8 << 8 | 32'(v) : $urandom;
      op_b = $urandom;
      expect_result(ref_life(op_a), "life");
    end

    // levelling: block 0 (FM0) macrocell 0 = source "macrocell 0 of block 4"
    // (FM1), which is configured as constant 1 (a term with no literal).
    do_reset();
    begin
      lb_cfg_t c;
      logic [LB_CFG_WORDS*32-1:0] bits;
      c = LB_CFG_ERASED;
      c.pal_and[0][0] = '0;                      // block 4 macrocell 0 = 1
      bits = (LB_CFG_WORDS*32)'(c);
      for (int w = 0; w < LB_CFG_WORDS; w++) cfg_write(CFG_ARRAY, LB_PER_FM, w, bits[32*w +: 32]);
      c = LB_CFG_ERASED;
      c.pal_and[0][0] = '0;
      c.pal_and[0][0][0] = 1'b1;                 // block 0 macrocell 0 = input 0
      bits = (LB_CFG_WORDS*32)'(c);
      for (int w = 0; w < LB_CFG_WORDS; w++) cfg_write(CFG_ARRAY, 0, w, bits[32*w +: 32]);
      cfg_write(CFG_GZIA, 0, 0, 32'(mc_src(LB_PER_FM, 0)));
      cfg_write(CFG_OUT, 0, 0, 32'h8000_0000 | 32'(mc_src(0, 0)));
      cfg_write(CFG_OUT, 0, 1, 32'h8000_0000 | 32'(mc_src(LB_PER_FM, 0)));
      cfg_write(CFG_OUT, 0, 2, 32'h0000_0000 | 32'(mc_src(LB_PER_FM, 0))); // not driven
      expect_result(32'h0000_0002, "levelling");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
