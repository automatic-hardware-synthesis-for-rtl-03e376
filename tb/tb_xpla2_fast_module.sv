// tb_xpla2_fast_module: each of the four logic blocks gets its own
// configuration (macrocell m of block b is input (m + 3*b) % 36 of that block,
// inverted for odd b), then random inputs are applied and every macrocell is
// compared with the expected literal. A block wired to the wrong inputs or
// configuration shows up as a mismatch.
module tb_xpla2_fast_module;
  import hybrid_pkg::*;

  lb_cfg_t [LB_PER_FM-1:0]                cfg;
  logic    [LB_PER_FM-1:0][LB_INPUTS-1:0] in;
  logic    [LB_PER_FM-1:0][LB_MC-1:0]     mc;
  int checks = 0, failures = 0;

  xpla2_fast_module dut (.cfg(cfg), .in(in), .mc(mc));

  initial begin
    for (int b = 0; b < LB_PER_FM; b++) begin
      cfg[b] = LB_CFG_ERASED;
      for (int m = 0; m < LB_MC; m++) begin
        int i;
        i = (m + 3 * b) % LB_INPUTS;
        cfg[b].pal_and[m][0] = '0;
        cfg[b].pal_and[m][0][2*i + (b % 2)] = 1'b1;
      end
    end
    for (int v = 0; v < 500; v++) begin
      for (int b = 0; b < LB_PER_FM; b++) in[b] = {$urandom, $urandom};
      #1;
      for (int b = 0; b < LB_PER_FM; b++)
        for (int m = 0; m < LB_MC; m++) begin
          logic e;
          e = in[b][(m + 3 * b) % LB_INPUTS] ^ logic'(b % 2);
          checks++;
          if (mc[b][m] !== e) begin
            failures++;
            if (failures < 5) $display("block %0d mc %0d got %b exp %b", b, m, mc[b][m], e);
          end
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
