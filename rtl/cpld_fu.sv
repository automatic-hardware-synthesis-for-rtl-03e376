// cpld_fu: CPLD-based functional unit (CPLD-FU) of the hybrid processor.
//
// The unit sits beside the standard functional units and computes
// result = f(op_a, op_b) for the custom instruction `cpld rd, rs, rt`, where f
// is whatever circuit has been loaded into its XPLA2 fabric. The fabric is
// N_FM Fast Modules (four logic blocks each) joined by the global
// interconnect. The 64 input pins carry the two register operands
// (pins 0..31 = rs, 32..63 = rt) and the 32 result pins drive rd, as in the
// generated example circuits where the first operand is rs and the second rt.
//
// Configuration is SRAM-like and written one 32-bit word at a time through
// cfg_we/cfg_addr/cfg_wdata (address map in hybrid_pkg::cfg_addr_t):
//   CFG_ARRAY  word w of logic block lb's AND/OR array image (lb_cfg_t)
//   CFG_GZIA   source of input `word` (0..35) of logic block lb
//   CFG_OUT    source of result pin `word`; bit 31 set = pin driven,
//              clear = pin reads 0
// A source number s < 64 is input pin s; s >= 64 is macrocell s-64, counted
// logic block by logic block (20 each). Reset erases the fabric: all product
// terms 0, every result pin 0.
//
// Design choice, not taken from the XPLA2 device: the interconnect is
// levelled. A logic block in Fast Module f may only take macrocells of Fast
// Modules below f (a later one reads as 0), so no configuration can close a
// combinational loop; multi-level circuits place each level in a higher Fast
// Module. The default of 12 Fast Modules (960 macrocells) is the size of a
// PZ3960 device; the paper gives the part but not its macrocell count.
//
// Timing: op_a/op_b to result is combinational, so a cpld instruction
// completes in the cycle it is issued; the clock only writes configuration.
module cpld_fu
  import hybrid_pkg::*;
#(
  parameter int unsigned N_FM      = 12,
  parameter int unsigned N_PIN_IN  = 2 * XLEN,
  parameter int unsigned N_PIN_OUT = XLEN
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration port
  input  logic              cfg_we,
  input  cfg_addr_t         cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // operands and result
  input  logic [XLEN-1:0]   op_a,
  input  logic [XLEN-1:0]   op_b,
  output logic [XLEN-1:0]   result
);

  localparam int unsigned N_LB   = N_FM * LB_PER_FM;
  localparam int unsigned FM_MC  = LB_PER_FM * LB_MC;
  localparam int unsigned N_SRC  = N_PIN_IN + N_LB * LB_MC;
  localparam int unsigned SEL_W  = $clog2(N_SRC);
  localparam int unsigned CFG_W  = LB_CFG_WORDS * 32;

  // ------------------------------------------------- configuration memory
  // One 32-bit register per configuration word (and per select), each with
  // its own decoded write enable.
  localparam logic [CFG_W-1:0] ERASED_IMAGE = CFG_W'(LB_CFG_ERASED);

  logic [LB_CFG_WORDS-1:0][31:0]   arr_q  [N_LB];
  logic [LB_INPUTS-1:0][SEL_W-1:0] gsel_q [N_LB];
  logic [N_PIN_OUT-1:0][SEL_W-1:0] osel_q;
  logic [N_PIN_OUT-1:0]            oen_q;

  for (genvar l = 0; l < N_LB; l++) begin : g_cfg_mem
    logic hit_arr, hit_gzia;
    assign hit_arr  = cfg_we && cfg_addr.region == CFG_ARRAY && cfg_addr.lb == 8'(l);
    assign hit_gzia = cfg_we && cfg_addr.region == CFG_GZIA  && cfg_addr.lb == 8'(l);

    for (genvar w = 0; w < LB_CFG_WORDS; w++) begin : g_word
      logic [31:0] q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                                 q <= ERASED_IMAGE[32*w +: 32];
        else if (hit_arr && cfg_addr.word == 9'(w)) q <= cfg_wdata;
      end
      assign arr_q[l][w] = q;
    end

    for (genvar i = 0; i < LB_INPUTS; i++) begin : g_sel
      logic [SEL_W-1:0] q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                                  q <= '0;
        else if (hit_gzia && cfg_addr.word == 9'(i)) q <= cfg_wdata[SEL_W-1:0];
      end
      assign gsel_q[l][i] = q;
    end
  end

  for (genvar j = 0; j < N_PIN_OUT; j++) begin : g_out_cfg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        osel_q[j] <= '0;
        oen_q[j]  <= 1'b0;
      end else if (cfg_we && cfg_addr.region == CFG_OUT && cfg_addr.word == 9'(j)) begin
        osel_q[j] <= cfg_wdata[SEL_W-1:0];
        oen_q[j]  <= cfg_wdata[31];
      end
    end
  end

  // ------------------------------------------------------------- fabric
  logic [N_PIN_IN-1:0] pins;
  assign pins = N_PIN_IN'({op_b, op_a});

  // g_fm[f].src: input pins plus the macrocells of Fast Modules 0..f-1.
  for (genvar f = 0; f < N_FM; f++) begin : g_fm
    logic [N_SRC-1:0]                          src;
    logic [LB_PER_FM-1:0][LB_INPUTS-1:0]       lb_in;
    logic [LB_PER_FM-1:0][LB_MC-1:0]           mc;
    logic [LB_PER_FM*LB_INPUTS-1:0][SEL_W-1:0] sel;
    lb_cfg_t [LB_PER_FM-1:0]                   cfg;

    if (f == 0) begin : g_first
      assign src = N_SRC'(pins);
    end else begin : g_next
      assign src = g_fm[f-1].src
                 | (N_SRC'(g_fm[f-1].mc) << (N_PIN_IN + (f - 1) * FM_MC));
    end

    for (genvar b = 0; b < LB_PER_FM; b++) begin : g_cfg
      logic [CFG_W-1:0] image;
      assign image  = arr_q[f*LB_PER_FM+b];
      assign cfg[b] = image[LB_CFG_BITS-1:0];
      for (genvar i = 0; i < LB_INPUTS; i++) begin : g_sel
        assign sel[b*LB_INPUTS+i] = gsel_q[f*LB_PER_FM+b][i];
      end
    end

    xpla2_gzia #(.N_SRC(N_SRC), .N_DST(LB_PER_FM * LB_INPUTS)) u_gzia (
      .src (src),
      .sel (sel),
      .dst (lb_in)
    );

    xpla2_fast_module u_fm (
      .cfg (cfg),
      .in  (lb_in),
      .mc  (mc)
    );
  end

  // Every macrocell of the device, for the result pins.
  logic [N_SRC-1:0] all_src;
  assign all_src = g_fm[N_FM-1].src
                 | (N_SRC'(g_fm[N_FM-1].mc) << (N_PIN_IN + (N_FM - 1) * FM_MC));

  logic [N_PIN_OUT-1:0] out_pins;
  xpla2_gzia #(.N_SRC(N_SRC), .N_DST(N_PIN_OUT)) u_out_route (
    .src (all_src),
    .sel (osel_q),
    .dst (out_pins)
  );

  assign result = XLEN'(out_pins & oen_q);

endmodule
