// decoder_id: the Id-stage instruction decoder of RVCoreP.
//
// It produces the control words that travel to the Ex and Ma stages through
// the IdEx register: the one-hot ALU control (Id_alu_ctrl), the one-hot
// branch-unit control (Id_bru_ctrl), the sign-extended immediate (Id_imm),
// the one-hot load type for align/extend, the one-hot store width, and the
// select of the Id-stage operand multiplexer that puts the immediate in
// place of rs2 for register-immediate ALU instructions. The paper shows only
// the block and its three named outputs; the encodings are this design's.
// FENCE, ECALL/EBREAK, CSR and unknown opcodes decode to all-zero controls,
// i.e. they act as no-ops (the paper does not describe a privileged part).
// Timing: combinational.
module decoder_id
  import rvcorep_pkg::*;
(
  input  logic [31:0] ir,
  output alu_ctrl_t   alu_ctrl,
  output bru_ctrl_t   bru_ctrl,
  output ld_ctrl_t    ld_ctrl,
  output st_ctrl_t    st_ctrl,
  output logic [31:0] imm,
  output logic        imm_b      // operand b is the immediate
);

  logic [6:0] op;
  logic [2:0] f3;
  logic       f7b5;

  always_comb begin
    op   = ir[6:0];
    f3   = ir[14:12];
    f7b5 = ir[30];
    alu_ctrl = '0;
    bru_ctrl = '0;
    ld_ctrl  = '0;
    st_ctrl  = '0;
    imm_b    = 1'b0;
    imm      = 32'd0;

    unique case (op)
      OP_LUI:    begin imm = {ir[31:12], 12'd0}; alu_ctrl[ALU_IMM] = 1'b1; end
      OP_AUIPC:  begin imm = {ir[31:12], 12'd0}; alu_ctrl[ALU_PCIMM] = 1'b1; end
      OP_JAL:    begin
        imm = {{12{ir[31]}}, ir[19:12], ir[20], ir[30:21], 1'b0};
        alu_ctrl[ALU_LINK] = 1'b1;
        bru_ctrl[BRU_JAL]  = 1'b1;
      end
      OP_JALR:   begin
        imm = {{20{ir[31]}}, ir[31:20]};
        alu_ctrl[ALU_LINK] = 1'b1;
        bru_ctrl[BRU_JALR] = 1'b1;
      end
      OP_BRANCH: begin
        imm = {{20{ir[31]}}, ir[7], ir[30:25], ir[11:8], 1'b0};
        unique case (f3)
          3'b000: bru_ctrl[BRU_BEQ]  = 1'b1;
          3'b001: bru_ctrl[BRU_BNE]  = 1'b1;
          3'b100: bru_ctrl[BRU_BLT]  = 1'b1;
          3'b101: bru_ctrl[BRU_BGE]  = 1'b1;
          3'b110: bru_ctrl[BRU_BLTU] = 1'b1;
          3'b111: bru_ctrl[BRU_BGEU] = 1'b1;
          default: ;
        endcase
      end
      OP_LOAD:   begin
        imm = {{20{ir[31]}}, ir[31:20]};
        unique case (f3)
          3'b000: ld_ctrl[LD_LB]  = 1'b1;
          3'b001: ld_ctrl[LD_LH]  = 1'b1;
          3'b010: ld_ctrl[LD_LW]  = 1'b1;
          3'b100: ld_ctrl[LD_LBU] = 1'b1;
          3'b101: ld_ctrl[LD_LHU] = 1'b1;
          default: ;
        endcase
      end
      OP_STORE:  begin
        imm = {{20{ir[31]}}, ir[31:25], ir[11:7]};
        unique case (f3)
          3'b000: st_ctrl[ST_SB] = 1'b1;
          3'b001: st_ctrl[ST_SH] = 1'b1;
          3'b010: st_ctrl[ST_SW] = 1'b1;
          default: ;
        endcase
      end
      OP_IMM:    begin
        imm   = {{20{ir[31]}}, ir[31:20]};
        imm_b = 1'b1;
        unique case (f3)
          3'b000: alu_ctrl[ALU_ADD]  = 1'b1;
          3'b010: alu_ctrl[ALU_SLT]  = 1'b1;
          3'b011: alu_ctrl[ALU_SLTU] = 1'b1;
          3'b100: alu_ctrl[ALU_XOR]  = 1'b1;
          3'b110: alu_ctrl[ALU_OR]   = 1'b1;
          3'b111: alu_ctrl[ALU_AND]  = 1'b1;
          3'b001: alu_ctrl[ALU_SLL]  = 1'b1;
          default: if (f7b5) alu_ctrl[ALU_SRA] = 1'b1;   // 3'b101
                   else      alu_ctrl[ALU_SRL] = 1'b1;
        endcase
      end
      OP_OP:     begin
        unique case (f3)
          3'b000: if (f7b5) alu_ctrl[ALU_SUB] = 1'b1;
                  else      alu_ctrl[ALU_ADD] = 1'b1;
          3'b010: alu_ctrl[ALU_SLT]  = 1'b1;
          3'b011: alu_ctrl[ALU_SLTU] = 1'b1;
          3'b100: alu_ctrl[ALU_XOR]  = 1'b1;
          3'b110: alu_ctrl[ALU_OR]   = 1'b1;
          3'b111: alu_ctrl[ALU_AND]  = 1'b1;
          3'b001: alu_ctrl[ALU_SLL]  = 1'b1;
          default: if (f7b5) alu_ctrl[ALU_SRA] = 1'b1;   // 3'b101
                   else      alu_ctrl[ALU_SRL] = 1'b1;
        endcase
      end
      default: ;
    endcase
  end

endmodule
