// hybrid_cpu: execute datapath of a MIPS-based processor with CPLD-based
// functional units (CPLD-FUs) placed in parallel with the standard units.
//
// An instruction arrives decoded-ready from the fetch stage (instr_valid,
// instr). Its rs and rt registers are read from the 32 x 32-bit register file
// and offered to every functional unit at once: the standard ALU/shifter
// (std_fu) and N_CPLD_FU reprogrammable units (cpld_fu). The unit named by the
// opcode produces the result, which is written back to the register file at
// the next rising edge and reported on the wb_* outputs. The custom
// instruction is the register-type `cpld rd, rs, rt`; it is encoded here as
// opcode 0x1C (unused in MIPS-II) with the shamt field selecting which
// CPLD-FU executes it, both choices of this design. Any instruction outside
// the supported set raises `illegal` and writes nothing.
//
// The pipeline registers of the host core (fetch, decode, memory access) are
// not modelled: each instruction takes one cycle from issue to write-back,
// which is also the cost of a cpld instruction whose circuit settles within
// the clock period. Configuration images for the CPLD-FUs are written through
// cfg_* (cfg_fu picks the unit), normally once after power-up.
module hybrid_cpu
  import hybrid_pkg::*;
#(
  parameter int unsigned N_CPLD_FU = 1,
  parameter int unsigned N_FM      = 12,
  localparam int unsigned FU_W     = (N_CPLD_FU > 1) ? $clog2(N_CPLD_FU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction issue
  input  logic              instr_valid,
  input  logic [31:0]       instr,
  output logic              illegal,
  // CPLD-FU configuration
  input  logic              cfg_we,
  input  logic [FU_W-1:0]   cfg_fu,
  input  cfg_addr_t         cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // write-back
  output logic              wb_valid,
  output logic [4:0]        wb_rd,
  output logic [XLEN-1:0]   wb_data
);

  // ----------------------------------------------------------- decode
  rtype_t      ir;
  logic [15:0] imm;
  alu_op_e     alu_op;
  logic        use_imm, imm_sext, use_cpld, legal;
  logic [4:0]  dest;

  assign ir  = rtype_t'(instr);
  assign imm = instr[15:0];

  always_comb begin
    alu_op   = ALU_ADD;
    use_imm  = 1'b0;
    imm_sext = 1'b0;
    use_cpld = 1'b0;
    legal    = 1'b1;
    dest     = ir.rd;
    unique case (ir.op)
      OP_SPECIAL: begin
        unique case (ir.funct)
          FN_ADDU: alu_op = ALU_ADD;
          FN_SUBU: alu_op = ALU_SUB;
          FN_AND:  alu_op = ALU_AND;
          FN_OR:   alu_op = ALU_OR;
          FN_SLL:  alu_op = ALU_SLL;
          FN_SRL:  alu_op = ALU_SRL;
          FN_SRA:  alu_op = ALU_SRA;
          default: legal  = 1'b0;
        endcase
      end
      OP_ADDIU: begin alu_op = ALU_ADD; use_imm = 1'b1; imm_sext = 1'b1; dest = ir.rt; end
      OP_ANDI:  begin alu_op = ALU_AND; use_imm = 1'b1; dest = ir.rt; end
      OP_ORI:   begin alu_op = ALU_OR;  use_imm = 1'b1; dest = ir.rt; end
      OP_LUI:   begin alu_op = ALU_LUI; use_imm = 1'b1; dest = ir.rt; end
      OP_CPLD:  begin
        use_cpld = 1'b1;
        legal    = int'(ir.shamt) < N_CPLD_FU;
      end
      default:  legal = 1'b0;
    endcase
  end

  assign illegal = instr_valid && !legal;

  // ---------------------------------------------------- register read
  logic [XLEN-1:0] rs_val, rt_val, wb_val;
  logic            rf_we;

  register_file u_rf (
    .clk   (clk),
    .rst_n (rst_n),
    .ra1   (ir.rs),
    .rd1   (rs_val),
    .ra2   (ir.rt),
    .rd2   (rt_val),
    .we    (rf_we),
    .wa    (dest),
    .wd    (wb_val)
  );

  // ------------------------------------------------ functional units
  logic [XLEN-1:0] std_b, std_y;
  assign std_b = !use_imm ? rt_val
               : imm_sext ? {{16{imm[15]}}, imm}
               :            {16'h0000, imm};

  std_fu u_std (
    .op    (alu_op),
    .a     (rs_val),
    .b     (std_b),
    .shamt (ir.shamt),
    .y     (std_y)
  );

  logic [N_CPLD_FU-1:0][XLEN-1:0] cpld_y;
  for (genvar u = 0; u < N_CPLD_FU; u++) begin : g_cpld
    cpld_fu #(.N_FM(N_FM)) u_cpld (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_we    (cfg_we && int'(cfg_fu) == u),
      .cfg_addr  (cfg_addr),
      .cfg_wdata (cfg_wdata),
      .op_a      (rs_val),
      .op_b      (rt_val),
      .result    (cpld_y[u])
    );
  end

  logic [XLEN-1:0] cpld_sel_y;
  always_comb begin
    cpld_sel_y = '0;
    for (int u = 0; u < N_CPLD_FU; u++)
      if (int'(ir.shamt) == u) cpld_sel_y = cpld_y[u];
  end

  assign wb_val = use_cpld ? cpld_sel_y : std_y;
  assign rf_we  = instr_valid && legal;

  // ------------------------------------------------------ write-back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0;
      wb_rd    <= '0;
      wb_data  <= '0;
    end else begin
      wb_valid <= rf_we;
      wb_rd    <= dest;
      wb_data  <= wb_val;
    end
  end

endmodule
