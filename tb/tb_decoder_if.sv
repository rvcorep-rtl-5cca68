// tb_decoder_if: assembles random RV32I instructions of every format and
// checks the If-stage partial decode (register numbers, use flags, register
// file and data memory write enables, load flag) against what the
// generator knows about each instruction.
module tb_decoder_if;
  import rvcorep_pkg::*;
  import rv_tb_pkg::*;

  logic [31:0] ir;
  if_dec_t     dec;
  int checks = 0, failures = 0;

  decoder_if dut (.*);

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int rd, r1, r2, k, imm;
      logic u1, u2, wr, st, ld;
      rd = $urandom_range(0, 31); r1 = $urandom_range(0, 31); r2 = $urandom_range(0, 31);
      imm = $urandom_range(0, 4095) - 2048;
      k = $urandom_range(0, 9);
      u1 = 0; u2 = 0; wr = 0; st = 0; ld = 0;
      case (k)
        0: begin ir = ADD(rd, r1, r2);  u1 = 1; u2 = 1; wr = 1; end
        1: begin ir = ADDI(rd, r1, imm); u1 = 1; wr = 1; end
        2: begin ir = LW(rd, r1, imm);  u1 = 1; wr = 1; ld = 1; end
        3: begin ir = SW(r2, r1, imm);  u1 = 1; u2 = 1; st = 1; rd = imm & 31; end
        4: begin ir = BEQ(r1, r2, imm & ~1); u1 = 1; u2 = 1; end
        5: begin ir = JAL(rd, imm * 2); wr = 1; end
        6: begin ir = JALR(rd, r1, imm); u1 = 1; wr = 1; end
        7: begin ir = LUI(rd, $urandom); wr = 1; end
        8: begin ir = AUIPC(rd, $urandom); wr = 1; end
        default: begin ir = 32'h0000_0073; rd = 0; r1 = 0; end   // ECALL
      endcase
      #1;
      checks++;
      if (dec.use_rs1 !== u1 || dec.use_rs2 !== u2 || dec.rf_we !== (wr && rd != 0) ||
          dec.dm_we !== st || dec.is_load !== ld || dec.rd !== ir[11:7] ||
          (u1 && dec.rs1 !== 5'(r1)) || (u2 && dec.rs2 !== 5'(r2))) begin
        failures++;
        if (failures < 10) $display("FAIL kind %0d ir=%08x dec=%p", k, ir, dec);
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
