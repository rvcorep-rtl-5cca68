// tb_alu_opt: checks the XOR-select ALU and branch unit against a
// conventional case-statement reference on random and corner operands,
// for every one-hot control value (and the all-zero control, which must
// give 0 / not taken).
module tb_alu_opt;
  import rvcorep_pkg::*;

  logic [31:0] a, b, pc, imm, rslt;
  alu_ctrl_t   alu_ctrl;
  bru_ctrl_t   bru_ctrl;
  logic        b_rslt;
  int checks = 0, failures = 0;

  alu_opt dut (.*);

  function automatic logic [31:0] ref_alu(int op);
    case (op)
      ALU_ADD:   return a + b;
      ALU_SUB:   return a - b;
      ALU_SLT:   return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU:  return (a < b) ? 1 : 0;
      ALU_XOR:   return a ^ b;
      ALU_OR:    return a | b;
      ALU_AND:   return a & b;
      ALU_SLL:   return a << b[4:0];
      ALU_SRL:   return a >> b[4:0];
      ALU_SRA:   return 32'($signed(a) >>> b[4:0]);
      ALU_IMM:   return imm;
      ALU_PCIMM: return pc + imm;
      ALU_LINK:  return pc + 4;
      default:   return 0;
    endcase
  endfunction

  function automatic logic ref_bru(int op);
    case (op)
      BRU_BEQ:  return a == b;
      BRU_BNE:  return a != b;
      BRU_BLT:  return $signed(a) < $signed(b);
      BRU_BGE:  return $signed(a) >= $signed(b);
      BRU_BLTU: return a < b;
      BRU_BGEU: return a >= b;
      default:  return 1;   // JAL, JALR
    endcase
  endfunction

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'h7fff_ffff, 32'h8000_0000, 32'hffff_ffff, 32'h1f};
    for (int n = 0; n < 3000; n++) begin
      if (n < 36) begin a = corner[n % 6]; b = corner[n / 6]; end
      else begin a = $urandom; b = $urandom; if (n % 4 == 0) b = b & 32'h1f; if (n % 9 == 0) b = a; end
      pc = $urandom; imm = $urandom;
      for (int op = 0; op <= ALU_N; op++) begin
        alu_ctrl = (op == ALU_N) ? '0 : alu_ctrl_t'(1) << op;
        bru_ctrl = '0;
        #1;
        checks++;
        if (rslt !== ref_alu(op) || b_rslt !== 1'b0) begin
          failures++;
          if (failures < 10) $display("FAIL alu op %0d a=%08x b=%08x got %08x exp %08x", op, a, b, rslt, ref_alu(op));
        end
      end
      for (int op = 0; op <= BRU_N; op++) begin
        alu_ctrl = '0;
        bru_ctrl = (op == BRU_N) ? '0 : bru_ctrl_t'(1) << op;
        #1;
        checks++;
        if (b_rslt !== ((op == BRU_N) ? 1'b0 : ref_bru(op)) || rslt !== 32'd0) begin
          failures++;
          if (failures < 10) $display("FAIL bru op %0d a=%08x b=%08x got %0b", op, a, b, b_rslt);
        end
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
