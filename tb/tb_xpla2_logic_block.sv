// tb_xpla2_logic_block: random configurations and inputs against an
// independent sum-of-products model. Product terms are drawn sparse (a few
// literals each) so that outputs toggle; the model evaluates each literal
// with explicit if-statements rather than the vector form the block uses.
// Also checks the erased configuration (all outputs 0).
module tb_xpla2_logic_block;
  import hybrid_pkg::*;

  lb_cfg_t              cfg;
  logic [LB_INPUTS-1:0] in;
  logic [LB_MC-1:0]     mc;
  int checks = 0, failures = 0;

  xpla2_logic_block dut (.cfg(cfg), .in(in), .mc(mc));

  function automatic logic model_pt(input pt_conn_t c, input logic [LB_INPUTS-1:0] x);
    logic r;
    r = 1'b1;
    for (int i = 0; i < LB_INPUTS; i++) begin
      if (c[2*i]   && !x[i]) r = 1'b0;
      if (c[2*i+1] &&  x[i]) r = 1'b0;
    end
    return r;
  endfunction

  function automatic logic [LB_MC-1:0] model(input lb_cfg_t c, input logic [LB_INPUTS-1:0] x);
    logic [LB_MC-1:0] y;
    y = '0;
    for (int m = 0; m < LB_MC; m++) begin
      for (int t = 0; t < PAL_PT_PER_MC; t++) if (model_pt(c.pal_and[m][t], x)) y[m] = 1'b1;
      for (int p = 0; p < PLA_PT; p++)
        if (c.pla_or[m][p] && model_pt(c.pla_and[p], x)) y[m] = 1'b1;
    end
    return y;
  endfunction

  function automatic pt_conn_t rand_pt();
    pt_conn_t c;
    int n;
    c = '0;
    n = 1 + ($urandom % 3);
    for (int k = 0; k < n; k++) c[$urandom % LIT_W] = 1'b1;
    if ($urandom % 4 == 0) c = '1;   // an unused (erased) term
    return c;
  endfunction

  int pal_hits = 0, pla_hits = 0;

  initial begin
    // erased block
    cfg = LB_CFG_ERASED;
    for (int v = 0; v < 20; v++) begin
      in = {$urandom, $urandom};
      #1;
      checks++;
      if (mc !== '0) begin failures++; $display("erased: mc=%h", mc); end
    end
    for (int c = 0; c < 60; c++) begin
      cfg = LB_CFG_ERASED;
      for (int m = 0; m < LB_MC; m++)
        for (int t = 0; t < PAL_PT_PER_MC; t++)
          cfg.pal_and[m][t] = ($urandom % 2) ? rand_pt() : '1;
      for (int p = 0; p < PLA_PT; p++) cfg.pla_and[p] = rand_pt();
      for (int m = 0; m < LB_MC; m++) cfg.pla_or[m] = (c % 2) ? $urandom & $urandom : '0;
      // odd configurations: PLA only, so the shared array is exercised alone
      if (c % 2) for (int m = 0; m < LB_MC; m++) cfg.pal_and[m] = '1;
      for (int v = 0; v < 50; v++) begin
        in = {$urandom, $urandom};
        #1;
        checks++;
        if (mc !== model(cfg, in)) begin
          failures++;
          if (failures < 5) $display("cfg %0d: in=%h mc=%h exp=%h", c, in, mc, model(cfg, in));
        end
        if (c % 2) pla_hits += $countones(mc); else pal_hits += $countones(mc);
      end
    end
    checks++;
    if (pal_hits == 0 || pla_hits == 0) begin
      failures++;
      $display("coverage: pal_hits=%0d pla_hits=%0d", pal_hits, pla_hits);
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
