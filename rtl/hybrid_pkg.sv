// hybrid_pkg: types and constants shared by the hybrid RISC + CPLD design.
//
// The XPLA2 logic-block geometry (36 inputs, 20 macrocells, 4 dedicated PAL
// product terms per macrocell, 32 shared PLA product terms, 4 logic blocks
// per Fast Module) is the CoolRunner XPLA2 architecture. The register file is
// 32 x 32 bit as in the MIPS core. The bit layout of the configuration image,
// the configuration address map and the opcode chosen for the custom `cpld`
// instruction are this design's own choices; the remaining opcode and funct
// values are the standard MIPS-II encodings.
package hybrid_pkg;

  // ---------------------------------------------------------------- core
  parameter int unsigned XLEN = 32;   // data-path width
  parameter int unsigned NREG = 32;   // general-purpose registers (register_file default)

  // ------------------------------------------------------- XPLA2 fabric
  parameter int unsigned LB_INPUTS     = 36;  // inputs of one logic block
  parameter int unsigned LB_MC         = 20;  // macrocells per logic block
  parameter int unsigned PAL_PT_PER_MC = 4;   // dedicated product terms / macrocell
  parameter int unsigned PLA_PT        = 32;  // shared product terms / logic block
  parameter int unsigned LB_PER_FM     = 4;   // logic blocks per Fast Module
  localparam int unsigned LIT_W        = 2 * LB_INPUTS; // true + complement literal per input

  // One product term: bit 2*i connects input i, bit 2*i+1 connects its
  // complement. A term with no connection is 1; a term connecting both
  // polarities of one input is 0 (the erased state).
  typedef logic [LIT_W-1:0] pt_conn_t;

  // Configuration of one logic block.
  typedef struct packed {
    logic [LB_MC-1:0][PLA_PT-1:0]                  pla_or;   // macrocell m sums PLA term p
    logic [PLA_PT-1:0][LIT_W-1:0]                  pla_and;  // shared PLA terms
    logic [LB_MC-1:0][PAL_PT_PER_MC-1:0][LIT_W-1:0] pal_and; // dedicated PAL terms
  } lb_cfg_t;

  localparam int unsigned LB_CFG_BITS  = $bits(lb_cfg_t);
  localparam int unsigned LB_CFG_WORDS = (LB_CFG_BITS + 31) / 32;

  // Erased logic block: every product term 0, no PLA term summed.
  localparam lb_cfg_t LB_CFG_ERASED = '{pla_or: '0, pla_and: '1, pal_and: '1};

  // Configuration write address (32-bit data words).
  typedef enum logic [1:0] {
    CFG_ARRAY = 2'd0,  // word `word` of logic block `lb`'s AND/OR arrays
    CFG_GZIA  = 2'd1,  // source select of input `word` of logic block `lb`
    CFG_OUT   = 2'd2   // source select of result pin `word` (bit 31 = drive)
  } cfg_region_e;

  typedef struct packed {
    cfg_region_e region;
    logic [7:0]  lb;
    logic [8:0]  word;
  } cfg_addr_t;

  // ------------------------------------------------------ instructions
  typedef enum logic [5:0] {
    OP_SPECIAL = 6'h00,
    OP_ADDIU   = 6'h09,
    OP_ANDI    = 6'h0C,
    OP_ORI     = 6'h0D,
    OP_LUI     = 6'h0F,
    OP_CPLD    = 6'h1C   // custom three-operand register instruction
  } opcode_e;

  typedef enum logic [5:0] {
    FN_SLL  = 6'h00,
    FN_SRL  = 6'h02,
    FN_SRA  = 6'h03,
    FN_ADDU = 6'h21,
    FN_SUBU = 6'h23,
    FN_AND  = 6'h24,
    FN_OR   = 6'h25
  } funct_e;

  typedef struct packed {
    logic [5:0] op;
    logic [4:0] rs;
    logic [4:0] rt;
    logic [4:0] rd;
    logic [4:0] shamt;
    logic [5:0] funct;
  } rtype_t;

  typedef enum logic [2:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_SLL, ALU_SRL, ALU_SRA, ALU_LUI
  } alu_op_e;

endpackage
