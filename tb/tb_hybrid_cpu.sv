// tb_hybrid_cpu: end-to-end test of the hybrid datapath at its default size
// (one CPLD-FU of 12 Fast Modules).
//
// For each of the three example code segments the test
//   1. sets the input register with LUI/ORI,
//   2. runs the original MIPS sequence on the standard units and checks the
//      result against a software evaluation of the same sequence,
//   3. loads the segment's circuit into the CPLD-FU through the configuration
//      port (reprogramming it while the processor keeps its registers),
//   4. runs the single replacement instruction `cpld rd, rs, $0` and checks
//      that it gives the same value in one cycle where the sequence took one
//      cycle per instruction.
// It also checks that writes to $0 are dropped and that unsupported opcodes,
// and a cpld naming a missing unit, raise `illegal` and write nothing.
// Counters record how often each mechanism happened; one that never happened
// counts as a failure.
module tb_hybrid_cpu;
  import hybrid_pkg::*;
  import tb_fabric_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        instr_valid = 1'b0, illegal;
  logic [31:0] instr = '0;
  logic        cfg_we = 1'b0;
  logic [0:0]  cfg_fu = '0;
  cfg_addr_t   cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic        wb_valid;
  logic [4:0]  wb_rd;
  logic [31:0] wb_data;

  int checks = 0, failures = 0;
  int n_cpld = 0, n_std = 0, n_reconfig = 0, n_illegal = 0, n_r0 = 0;
  longint cycle = 0;

  hybrid_cpu dut (.clk, .rst_n, .instr_valid, .instr, .illegal, .cfg_we, .cfg_fu, .cfg_addr,
                  .cfg_wdata, .wb_valid, .wb_rd, .wb_data);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  // ----------------------------------------------------------- encoders
  function automatic logic [31:0] r_op(funct_e fn, int rd, int rs, int rt, int sh = 0);
    return {OP_SPECIAL, 5'(rs), 5'(rt), 5'(rd), 5'(sh), fn};
  endfunction
  function automatic logic [31:0] i_op(opcode_e op, int rt, int rs, logic [15:0] imm);
    return {op, 5'(rs), 5'(rt), imm};
  endfunction
  function automatic logic [31:0] cpld_op(int rd, int rs, int rt, int unit = 0);
    return {OP_CPLD, 5'(rs), 5'(rt), 5'(rd), 5'(unit), 6'h00};
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s (wb_valid=%b rd=%0d data=%h)", what, wb_valid, wb_rd, wb_data);
    end
  endtask

  // Issue a list of instructions back to back; returns the last write-back
  // value and the cycles from the first issue edge to the last write-back.
  task automatic run(input logic [31:0] prog [$], output logic [31:0] last, output int cycles);
    longint start;
    @(negedge clk);
    start = cycle;
    foreach (prog[k]) begin
      instr_valid = 1'b1;
      instr       = prog[k];
      @(posedge clk);
      #1;
      if (prog[k][31:26] == OP_CPLD) n_cpld++; else n_std++;
      @(negedge clk);
    end
    instr_valid = 1'b0;
    last   = wb_data;
    cycles = int'(cycle - start);
  endtask

  task automatic set_reg(input int r, input logic [31:0] v);
    logic [31:0] d;
    int c;
    run('{i_op(OP_LUI, r, 0, v[31:16]), i_op(OP_ORI, r, r, v[15:0])}, d, c);
    check(d == v, $sformatf("set $%0d", r));
  endtask

  task automatic read_reg(input int r, output logic [31:0] v);
    int c;
    run('{r_op(FN_OR, 1, r, 0)}, v, c);
  endtask

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
      cfg_write(CFG_OUT, 0, j, (im.out_src[j] >= 0) ? 32'h8000_0000 | 32'(im.out_src[j]) : 32'h0);
    n_reconfig++;
  endtask

  initial begin
    logic [31:0] v, got_seq, got_cpld, r0;
    int cyc_seq, cyc_cpld;

    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ------------------------------------------- $0 stays zero
    run('{i_op(OP_ADDIU, 0, 0, 16'h1234)}, v, cyc_seq);
    read_reg(0, r0);
    check(r0 == 32'h0, "$0 write dropped");
    n_r0++;

    // ------------------------------------------- illegal instructions
    @(negedge clk);
    instr_valid = 1'b1;
    instr = {6'h23, 5'd0, 5'd7, 16'h0};   // lw: not supported by this datapath
    #1 check(illegal, "lw flagged illegal");
    @(posedge clk); #1 check(!wb_valid, "lw writes nothing");
    if (illegal) n_illegal++;
    @(negedge clk);
    instr = cpld_op(7, 0, 0, 1);          // unit 1 does not exist
    #1 check(illegal, "cpld to missing unit flagged");
    @(posedge clk); #1 check(!wb_valid, "cpld to missing unit writes nothing");
    if (illegal) n_illegal++;
    @(negedge clk);
    instr_valid = 1'b0;

    // ------------------------------------------- triangles, segment 1
    load(image_triangles1());
    for (int t = 0; t < 16; t++) begin
      v = $urandom;
      set_reg(9, v);
      run('{i_op(OP_ANDI, 8, 9, 16'd1), i_op(OP_ADDIU, 10, 0, 16'd1),
            r_op(FN_SUBU, 11, 10, 8), r_op(FN_SLL, 12, 0, 11, 1)}, got_seq, cyc_seq);
      check(got_seq == ref_triangles1(v), "triangles-1 sequence");
      check(cyc_seq == 4, "triangles-1 sequence takes 4 cycles");
      run('{cpld_op(13, 9, 0)}, got_cpld, cyc_cpld);
      check(got_cpld == got_seq && wb_rd == 13, "triangles-1 cpld matches sequence");
      check(cyc_cpld == 1, "cpld takes 1 cycle");
    end

    // ------------------------------------------- triangles, segment 2 (endian)
    load(image_endian());
    for (int t = 0; t < 16; t++) begin
      v = $urandom;
      set_reg(24, v);
      run('{r_op(FN_SLL, 15, 0, 24, 24), i_op(OP_ANDI, 14, 24, 16'hff00),
            r_op(FN_SLL, 14, 0, 14, 8), r_op(FN_ADDU, 15, 15, 14),
            r_op(FN_SRL, 14, 0, 24, 8), i_op(OP_ANDI, 14, 14, 16'hff00),
            r_op(FN_ADDU, 15, 15, 14), r_op(FN_SRL, 24, 0, 24, 24),
            r_op(FN_ADDU, 24, 15, 24)}, got_seq, cyc_seq);
      check(got_seq == ref_endian(v), "endian sequence");
      check(cyc_seq == 9, "endian sequence takes 9 cycles");
      set_reg(24, v);
      run('{cpld_op(20, 24, 0)}, got_cpld, cyc_cpld);
      check(got_cpld == got_seq, "endian cpld matches sequence");
      check(cyc_cpld == 1, "cpld takes 1 cycle");
    end

    // ------------------------------------------- LIFE linker segment
    load(image_life(LB_PER_FM));
    for (int t = 0; t < 40; t++) begin
      v = (t < 4) ? 32'(t) : $urandom;    // include the wrap of x-1 at x = 0
      set_reg(5, v);
      run('{i_op(OP_ADDIU, 14, 5, 16'hffff), i_op(OP_ANDI, 15, 14, 16'd255),
            r_op(FN_SRA, 24, 0, 15, 3), i_op(OP_ADDIU, 25, 24, 16'd1)}, got_seq, cyc_seq);
      check(got_seq == ref_life(v), "life sequence");
      run('{cpld_op(21, 5, 0)}, got_cpld, cyc_cpld);
      check(got_cpld == got_seq, "life cpld matches sequence");
      check(cyc_cpld == 1, "cpld takes 1 cycle");
    end

    // ------------------------------------------- coverage of mechanisms
    check(n_cpld > 0, "cpld instruction executed");
    check(n_std > 0, "standard instruction executed");
    check(n_reconfig >= 3, "CPLD-FU reprogrammed");
    check(n_illegal == 2, "illegal instructions seen");
    check(n_r0 > 0, "$0 write tried");
    $display("mechanisms: cpld=%0d std=%0d reconfig=%0d illegal=%0d r0=%0d",
             n_cpld, n_std, n_reconfig, n_illegal, n_r0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
