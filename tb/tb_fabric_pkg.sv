// tb_fabric_pkg: helpers for testbenches that program the XPLA2 fabric.
//
// A sum-of-products function is written as sop_t: up to MAX_PT product terms
// of up to MAX_LIT literals; a literal is 2*source + negate, where source
// numbers follow the CPLD-FU convention (0..63 input pins, 64 + 20*lb + m for
// macrocell m of logic block lb). place_lb() fits up to 20 such functions into
// one logic block: it collects the distinct sources into the block's 36
// interconnect inputs, gives each function its 4 dedicated terms first and
// shares the 32 PLA terms for the rest. It reports failure when a block runs
// out of inputs or PLA terms.
package tb_fabric_pkg;
  import hybrid_pkg::*;

  localparam int MAX_PT  = 8;
  localparam int MAX_LIT = 8;

  typedef struct {
    int n_pt;
    int n_lit [MAX_PT];
    int lit   [MAX_PT][MAX_LIT];
  } sop_t;

  function automatic void sop_clear(ref sop_t f);
    f.n_pt = 0;
    for (int p = 0; p < MAX_PT; p++) f.n_lit[p] = 0;
  endfunction

  // Append a product term given as a list of literals (count n).
  function automatic void sop_add_pt(ref sop_t f, input int n, input int l [MAX_LIT]);
    f.n_lit[f.n_pt] = n;
    for (int i = 0; i < n; i++) f.lit[f.n_pt][i] = l[i];
    f.n_pt++;
  endfunction

  function automatic int lit(input int src, input bit neg);
    return 2 * src + int'(neg);
  endfunction

  // Place n_f functions into one logic block. route[i] is the source of
  // block input i (-1 = unused). Returns 1 on success.
  function automatic bit place_lb(input sop_t f [LB_MC], input int n_f,
                                  output lb_cfg_t cfg, output int route [LB_INPUTS]);
    int n_in, next_pla, slot;
    cfg = LB_CFG_ERASED;
    for (int i = 0; i < LB_INPUTS; i++) route[i] = -1;
    n_in = 0;
    next_pla = 0;
    for (int m = 0; m < n_f; m++) begin
      for (int p = 0; p < f[m].n_pt; p++) begin
        pt_conn_t conn;
        conn = '0;
        for (int k = 0; k < f[m].n_lit[p]; k++) begin
          int src, idx;
          bit neg;
          src = f[m].lit[p][k] / 2;
          neg = f[m].lit[p][k][0];
          idx = -1;
          for (int i = 0; i < n_in; i++) if (route[i] == src) idx = i;
          if (idx < 0) begin
            if (n_in == LB_INPUTS) return 1'b0;
            route[n_in] = src;
            idx = n_in;
            n_in++;
          end
          conn[2*idx + int'(neg)] = 1'b1;
        end
        if (p < PAL_PT_PER_MC) begin
          cfg.pal_and[m][p] = conn;
        end else begin
          if (next_pla == PLA_PT) return 1'b0;
          slot = next_pla++;
          cfg.pla_and[slot]    = conn;
          cfg.pla_or[m][slot]  = 1'b1;
        end
      end
    end
    return 1'b1;
  endfunction

  // ---------------------------------------------------------------------
  // A configuration image: up to four programmed logic blocks plus the
  // source of every result pin (-1 = pin not driven, reads 0).
  typedef struct {
    int      n_lb;
    int      lb_idx [4];
    lb_cfg_t cfg    [4];
    int      route  [4][LB_INPUTS];
    int      out_src [32];
  } image_t;

  localparam int PIN_RS = 0;    // source number of rs bit 0
  localparam int PIN_RT = 32;   // source number of rt bit 0

  function automatic int mc_src(input int lb, input int m);
    return 64 + LB_MC * lb + m;
  endfunction

  function automatic void image_clear(ref image_t im);
    im.n_lb = 0;
    for (int j = 0; j < 32; j++) im.out_src[j] = -1;
  endfunction

  function automatic bit image_add_lb(ref image_t im, input int lb, input sop_t f [LB_MC], input int n_f);
    lb_cfg_t c;
    int r [LB_INPUTS];
    bit ok;
    ok = place_lb(f, n_f, c, r);
    im.lb_idx[im.n_lb] = lb;
    im.cfg[im.n_lb]    = c;
    im.route[im.n_lb]  = r;
    im.n_lb++;
    return ok;
  endfunction

  // 'triangles' segment 1: and $8,$9,1; li $10,1; subu $11,$10,$8; sll $12,$11,1.
  // The whole segment reduces to result bit 1 = NOT rs bit 0, all else 0.
  function automatic image_t image_triangles1();
    image_t im;
    sop_t f [LB_MC];
    int l [MAX_LIT];
    image_clear(im);
    sop_clear(f[0]);
    l[0] = lit(PIN_RS + 0, 1'b1);
    sop_add_pt(f[0], 1, l);
    void'(image_add_lb(im, 0, f, 1));
    im.out_src[1] = mc_src(0, 0);
    return im;
  endfunction

  // 'triangles' segment 2 (endian conversion): pure rewiring, result byte k
  // = rs byte 3-k. Result bits 0..19 come from block 0, 20..31 from block 1.
  function automatic image_t image_endian();
    image_t im;
    sop_t f0 [LB_MC];
    sop_t f1 [LB_MC];
    int l [MAX_LIT];
    image_clear(im);
    for (int j = 0; j < 32; j++) begin
      int src;
      src = PIN_RS + 8 * (3 - j / 8) + j % 8;
      l[0] = lit(src, 1'b0);
      if (j < LB_MC) begin sop_clear(f0[j]); sop_add_pt(f0[j], 1, l); end
      else begin sop_clear(f1[j - LB_MC]); sop_add_pt(f1[j - LB_MC], 1, l); end
      im.out_src[j] = mc_src(j / LB_MC, j % LB_MC);
    end
    void'(image_add_lb(im, 0, f0, LB_MC));
    void'(image_add_lb(im, 1, f1, 32 - LB_MC));
    return im;
  endfunction

  // LIFE linker segment: addu $14,$5,-1; and $15,$14,255; sra $24,$15,3;
  // addu $25,$24,1. Two levels: block 0 (Fast Module 0) forms
  // t = ((rs - 1) mod 256) >> 3 bit by bit, d_i = x_i XOR (x[i-1:0] == 0);
  // block lb2 (a higher Fast Module) forms t + 1, r_j = t_j XOR (t[j-1:0] all 1).
  function automatic image_t image_life(input int lb2);
    image_t im;
    sop_t f0 [LB_MC];
    sop_t f1 [LB_MC];
    int l [MAX_LIT];
    image_clear(im);
    for (int k = 0; k < 5; k++) begin
      int i;
      i = k + 3;
      sop_clear(f0[k]);
      for (int b = 0; b < i; b++) begin
        l[0] = lit(PIN_RS + i, 1'b0);
        l[1] = lit(PIN_RS + b, 1'b0);
        sop_add_pt(f0[k], 2, l);
      end
      for (int b = 0; b <= i; b++) l[b] = lit(PIN_RS + b, 1'b1);
      sop_add_pt(f0[k], i + 1, l);
    end
    for (int j = 0; j < 5; j++) begin
      sop_clear(f1[j]);
      for (int b = 0; b < j; b++) begin
        l[0] = lit(mc_src(0, j), 1'b0);
        l[1] = lit(mc_src(0, b), 1'b1);
        sop_add_pt(f1[j], 2, l);
      end
      l[0] = lit(mc_src(0, j), 1'b1);
      for (int b = 0; b < j; b++) l[b + 1] = lit(mc_src(0, b), 1'b0);
      sop_add_pt(f1[j], j + 1, l);
    end
    sop_clear(f1[5]);
    for (int b = 0; b < 5; b++) l[b] = lit(mc_src(0, b), 1'b0);
    sop_add_pt(f1[5], 5, l);
    void'(image_add_lb(im, 0, f0, 5));
    void'(image_add_lb(im, lb2, f1, 6));
    for (int j = 0; j < 6; j++) im.out_src[j] = mc_src(lb2, j);
    return im;
  endfunction

  // Reference results, computed the way the original MIPS code does.
  function automatic logic [31:0] ref_triangles1(input logic [31:0] r9);
    logic [31:0] r8, r10, r11;
    r8  = r9 & 32'd1;
    r10 = 32'd1;
    r11 = r10 - r8;
    return r11 << 1;
  endfunction

  function automatic logic [31:0] ref_endian(input logic [31:0] r24);
    logic [31:0] r14, r15;
    r15 = r24 << 24;
    r14 = r24 & 32'hff00;
    r14 = r14 << 8;
    r15 = r15 + r14;
    r14 = r24 >> 8;
    r14 = r14 & 32'hff00;
    r15 = r15 + r14;
    return r15 + (r24 >> 24);
  endfunction

  function automatic logic [31:0] ref_life(input logic [31:0] r5);
    logic [31:0] r14, r15, r24;
    r14 = r5 + 32'hffff_ffff;
    r15 = r14 & 32'd255;
    r24 = 32'($signed(r15) >>> 3);
    return r24 + 32'd1;
  endfunction

endpackage
