// tb_decoder_id: assembles random RV32I instructions and checks the Id
// decoder's one-hot ALU, branch, load and store controls, the operand
// select and the sign-extended immediate of every format.
module tb_decoder_id;
  import rvcorep_pkg::*;
  import rv_tb_pkg::*;

  logic [31:0] ir, imm;
  alu_ctrl_t   alu_ctrl;
  bru_ctrl_t   bru_ctrl;
  ld_ctrl_t    ld_ctrl;
  st_ctrl_t    st_ctrl;
  logic        imm_b;
  int checks = 0, failures = 0;

  decoder_id dut (.*);

  initial begin
    for (int n = 0; n < 6000; n++) begin
      int k, i12, sh;
      logic [31:0] e_imm;
      alu_ctrl_t   e_alu;
      bru_ctrl_t   e_bru;
      ld_ctrl_t    e_ld;
      st_ctrl_t    e_st;
      logic        e_ib;
      logic [19:0] u;
      i12 = $urandom_range(0, 4095) - 2048;
      sh = $urandom_range(0, 31);
      u = 20'($urandom);
      e_alu = '0; e_bru = '0; e_ld = '0; e_st = '0; e_ib = 0; e_imm = 0;
      k = $urandom_range(0, 27);
      case (k)
        0:  begin ir = ADD(1, 2, 3);  e_alu[ALU_ADD] = 1; end
        1:  begin ir = SUB(1, 2, 3);  e_alu[ALU_SUB] = 1; end
        2:  begin ir = SLT(1, 2, 3);  e_alu[ALU_SLT] = 1; end
        3:  begin ir = SLTU(1, 2, 3); e_alu[ALU_SLTU] = 1; end
        4:  begin ir = XOR(1, 2, 3);  e_alu[ALU_XOR] = 1; end
        5:  begin ir = OR(1, 2, 3);   e_alu[ALU_OR] = 1; end
        6:  begin ir = AND(1, 2, 3);  e_alu[ALU_AND] = 1; end
        7:  begin ir = SLL(1, 2, 3);  e_alu[ALU_SLL] = 1; end
        8:  begin ir = SRL(1, 2, 3);  e_alu[ALU_SRL] = 1; end
        9:  begin ir = SRA(1, 2, 3);  e_alu[ALU_SRA] = 1; end
        10: begin ir = ADDI(1, 2, i12); e_alu[ALU_ADD] = 1; e_ib = 1; e_imm = i12; end
        11: begin ir = SLTIU(1, 2, i12); e_alu[ALU_SLTU] = 1; e_ib = 1; e_imm = i12; end
        12: begin ir = SRAI(1, 2, sh); e_alu[ALU_SRA] = 1; e_ib = 1; e_imm = 32'h400 | sh; end
        13: begin ir = SLLI(1, 2, sh); e_alu[ALU_SLL] = 1; e_ib = 1; e_imm = sh; end
        14: begin ir = LUI(1, u);   e_alu[ALU_IMM] = 1;   e_imm = {u, 12'd0}; end
        15: begin ir = AUIPC(1, u); e_alu[ALU_PCIMM] = 1; e_imm = {u, 12'd0}; end
        16: begin ir = JAL(1, i12 * 512); e_alu[ALU_LINK] = 1; e_bru[BRU_JAL] = 1; e_imm = (i12 * 512) & ~1; end
        17: begin ir = JALR(1, 2, i12); e_alu[ALU_LINK] = 1; e_bru[BRU_JALR] = 1; e_imm = i12; end
        18: begin ir = BEQ(1, 2, i12 * 2);  e_bru[BRU_BEQ] = 1;  e_imm = i12 * 2; end
        19: begin ir = BNE(1, 2, i12 * 2);  e_bru[BRU_BNE] = 1;  e_imm = i12 * 2; end
        20: begin ir = BLT(1, 2, i12 * 2);  e_bru[BRU_BLT] = 1;  e_imm = i12 * 2; end
        21: begin ir = BGEU(1, 2, i12 * 2); e_bru[BRU_BGEU] = 1; e_imm = i12 * 2; end
        22: begin ir = LB(1, 2, i12);  e_ld[LD_LB] = 1;  e_imm = i12; end
        23: begin ir = LHU(1, 2, i12); e_ld[LD_LHU] = 1; e_imm = i12; end
        24: begin ir = LW(1, 2, i12);  e_ld[LD_LW] = 1;  e_imm = i12; end
        25: begin ir = SB(1, 2, i12);  e_st[ST_SB] = 1;  e_imm = i12; end
        26: begin ir = SH(1, 2, i12);  e_st[ST_SH] = 1;  e_imm = i12; end
        default: begin ir = SW(1, 2, i12); e_st[ST_SW] = 1; e_imm = i12; end
      endcase
      #1;
      checks++;
      if (alu_ctrl !== e_alu || bru_ctrl !== e_bru || ld_ctrl !== e_ld || st_ctrl !== e_st ||
          imm_b !== e_ib || imm !== e_imm) begin
        failures++;
        if (failures < 10)
          $display("FAIL kind %0d ir=%08x alu=%b bru=%b ld=%b st=%b imm=%08x (exp %08x) ib=%b",
                   k, ir, alu_ctrl, bru_ctrl, ld_ctrl, st_ctrl, imm, e_imm, imm_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
