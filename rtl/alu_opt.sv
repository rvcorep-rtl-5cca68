// alu_opt: the optimized RV32I ALU of RVCoreP (ALU_opt), with its branch
// condition unit.
//
// How it works: every candidate result (sum, difference, comparisons,
// logic ops, shifts, LUI immediate, AUIPC sum, link address) is computed in
// parallel. Each candidate is ANDed with its own bit of the one-hot control
// word alu_ctrl, and the gated candidates are XORed together. With exactly
// one control bit set this equals the selected candidate; with none set the
// result is 0. This replaces the wide case-statement multiplexer of a
// conventional ALU, which the paper identifies as part of the critical path
// on an FPGA; the XOR reduction and the one-hot word are the paper's.
// The branch condition (b_rslt, "taken") is chosen from the six RV32I
// comparisons plus "always" for JAL/JALR in the same gated-XOR way.
//
// Interface: a and b are the (already forwarded) operands; for register-
// immediate instructions b already carries the immediate (chosen in the Id
// stage). pc and imm serve AUIPC, LUI and the link value pc+4.
// Timing: purely combinational, used in the Ex stage; the caller registers
// rslt and b_rslt into the ExMa pipeline register.
// This design's own choices: the bit order of the control words, the full
// 32-bit barrel shifter, and that the link value pc+4 is produced here.
module alu_opt
  import rvcorep_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] pc,
  input  logic [31:0] imm,
  input  alu_ctrl_t   alu_ctrl,
  input  bru_ctrl_t   bru_ctrl,
  output logic [31:0] rslt,
  output logic        b_rslt
);

  logic [31:0] cand [ALU_N];
  logic        eq, lt, ltu;

  always_comb begin
    eq  = (a == b);
    lt  = ($signed(a) < $signed(b));
    ltu = (a < b);

    cand[ALU_ADD]   = a + b;
    cand[ALU_SUB]   = a - b;
    cand[ALU_SLT]   = {31'd0, lt};
    cand[ALU_SLTU]  = {31'd0, ltu};
    cand[ALU_XOR]   = a ^ b;
    cand[ALU_OR]    = a | b;
    cand[ALU_AND]   = a & b;
    cand[ALU_SLL]   = a << b[4:0];
    cand[ALU_SRL]   = a >> b[4:0];
    cand[ALU_SRA]   = 32'($signed(a) >>> b[4:0]);
    cand[ALU_IMM]   = imm;
    cand[ALU_PCIMM] = pc + imm;
    cand[ALU_LINK]  = pc + 32'd4;

    // gated-XOR selection
    rslt = 32'd0;
    for (int i = 0; i < ALU_N; i++)
      rslt = rslt ^ (cand[i] & {32{alu_ctrl[i]}});

    b_rslt = (bru_ctrl[BRU_BEQ]  &  eq)
           ^ (bru_ctrl[BRU_BNE]  & ~eq)
           ^ (bru_ctrl[BRU_BLT]  &  lt)
           ^ (bru_ctrl[BRU_BGE]  & ~lt)
           ^ (bru_ctrl[BRU_BLTU] &  ltu)
           ^ (bru_ctrl[BRU_BGEU] & ~ltu)
           ^ bru_ctrl[BRU_JAL]
           ^ bru_ctrl[BRU_JALR];
  end

endmodule
