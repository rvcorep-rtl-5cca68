// rvcorep_pkg: types and constants shared by the RVCoreP pipeline.
//
// RV32I opcodes, the one-hot control words that drive the XOR-select ALU,
// branch unit, load align/extend unit and store unit, and the struct that
// the If-stage partial decoder (decoder_if) hands down the pipeline.
// One-hot control words follow the RVCoreP idea that every selected value is
// gated by its own control bit and the gated values are XORed together, so
// exactly one bit of each word may be set (or none, which yields zero).
// The bit order of each word is this design's own choice.
package rvcorep_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  localparam logic [31:0] NOP = 32'h0000_0013;  // addi x0, x0, 0

  // ------------------------------------------------- ALU one-hot selection
  // Bit positions inside alu_ctrl_t.
  localparam int ALU_ADD   = 0;   // a + b
  localparam int ALU_SUB   = 1;   // a - b
  localparam int ALU_SLT   = 2;   // signed a < b
  localparam int ALU_SLTU  = 3;   // unsigned a < b
  localparam int ALU_XOR   = 4;
  localparam int ALU_OR    = 5;
  localparam int ALU_AND   = 6;
  localparam int ALU_SLL   = 7;
  localparam int ALU_SRL   = 8;
  localparam int ALU_SRA   = 9;
  localparam int ALU_IMM   = 10;  // imm (LUI)
  localparam int ALU_PCIMM = 11;  // pc + imm (AUIPC)
  localparam int ALU_LINK  = 12;  // pc + 4 (JAL, JALR)
  localparam int ALU_N     = 13;
  typedef logic [ALU_N-1:0] alu_ctrl_t;

  // ----------------------------------------- branch unit one-hot selection
  localparam int BRU_BEQ  = 0;
  localparam int BRU_BNE  = 1;
  localparam int BRU_BLT  = 2;
  localparam int BRU_BGE  = 3;
  localparam int BRU_BLTU = 4;
  localparam int BRU_BGEU = 5;
  localparam int BRU_JAL  = 6;   // always taken, target pc + imm
  localparam int BRU_JALR = 7;   // always taken, target (rs1 + imm) & ~1
  localparam int BRU_N    = 8;
  typedef logic [BRU_N-1:0] bru_ctrl_t;

  // -------------------------------------- load align/extend one-hot select
  localparam int LD_LB  = 0;
  localparam int LD_LH  = 1;
  localparam int LD_LW  = 2;
  localparam int LD_LBU = 3;
  localparam int LD_LHU = 4;
  localparam int LD_N   = 5;
  typedef logic [LD_N-1:0] ld_ctrl_t;

  // ------------------------------------------------ store width (one-hot)
  localparam int ST_SB = 0;
  localparam int ST_SH = 1;
  localparam int ST_SW = 2;
  localparam int ST_N  = 3;
  typedef logic [ST_N-1:0] st_ctrl_t;

  // ------------------------------------------- If-stage partial decode
  // What decoder_if extracts from a freshly fetched instruction.
  typedef struct packed {
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic [4:0] rd;
    logic       use_rs1;   // instruction reads rs1
    logic       use_rs2;   // instruction reads rs2
    logic       rf_we;     // writes the register file (rd != 0)
    logic       dm_we;     // writes the data memory (store)
    logic       is_load;   // reads the data memory
  } if_dec_t;

  // One-cycle event pulses of the pipeline, for performance counting.
  typedef struct packed {
    logic retire;      // an instruction left the Wb stage
    logic stall;       // load-use stall: bubble into IdEx, If/Id held
    logic bmis;        // misprediction flush from the Ma stage
    logic pred_taken;  // the If stage followed a predicted-taken BTB target
    logic pred_hit;    // valid BTB hit in the If stage (BHR shifted)
    logic fwd_ma;      // an Ex operand came from the Ma stage (ExMa_rslt)
    logic fwd_wb;      // an Ex operand came from the Wb stage (MaWb_rslt)
  } perf_t;

  // Two-bit saturating counter update used by the PHT.
  function automatic logic [1:0] sat_update(input logic [1:0] c, input logic taken);
    if (taken) return (c == 2'b11) ? 2'b11 : c + 2'd1;
    else       return (c == 2'b00) ? 2'b00 : c - 2'd1;
  endfunction

endpackage
