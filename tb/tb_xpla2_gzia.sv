// tb_xpla2_gzia: random sources and selects, including selects past the
// last source (which must read 0), compared with a direct array look-up.
module tb_xpla2_gzia;
  localparam int unsigned N_SRC = 100;
  localparam int unsigned N_DST = 36;
  localparam int unsigned SEL_W = $clog2(N_SRC);

  logic [N_SRC-1:0]            src;
  logic [N_DST-1:0][SEL_W-1:0] sel;
  logic [N_DST-1:0]            dst;
  int checks = 0, failures = 0;

  xpla2_gzia #(.N_SRC(N_SRC), .N_DST(N_DST)) dut (.src(src), .sel(sel), .dst(dst));

  initial begin
    for (int v = 0; v < 2000; v++) begin
      logic expect_bit;
      src = {$urandom, $urandom, $urandom, $urandom};
      for (int d = 0; d < N_DST; d++) sel[d] = SEL_W'($urandom % (1 << SEL_W));
      #1;
      for (int d = 0; d < N_DST; d++) begin
        int s;
        s = int'(sel[d]);
        expect_bit = (s < N_SRC) ? src[s] : 1'b0;
        checks++;
        if (dst[d] !== expect_bit) begin
          failures++;
          if (failures < 5) $display("dst[%0d] sel=%0d got %b", d, s, dst[d]);
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
