// rv_tb_pkg: testbench helpers for the RVCoreP testbenches.
//
// - Instruction encoders for RV32I (a tiny assembler), so test programs are
//   written in the testbench itself.
// - rv_iss: an instruction-set simulator of RV32I written independently of
//   the RTL (one instruction per step, no pipeline). The core testbenches run
//   it in lockstep with the retire trace of the pipeline and compare PC,
//   instruction, destination register and written value of every retired
//   instruction.
package rv_tb_pkg;

  // ------------------------------------------------------------ encoders
  function automatic logic [31:0] r_t(input logic [6:0] f7, input int rs2, input int rs1,
                                      input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input int rs1, input logic [2:0] f3,
                                      input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(input int off, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADD (int rd, int a, int b); return r_t(7'h00, b, a, 3'd0, rd, 7'h33); endfunction
  function automatic logic [31:0] SUB (int rd, int a, int b); return r_t(7'h20, b, a, 3'd0, rd, 7'h33); endfunction
  function automatic logic [31:0] SLL (int rd, int a, int b); return r_t(7'h00, b, a, 3'd1, rd, 7'h33); endfunction
  function automatic logic [31:0] SLT (int rd, int a, int b); return r_t(7'h00, b, a, 3'd2, rd, 7'h33); endfunction
  function automatic logic [31:0] SLTU(int rd, int a, int b); return r_t(7'h00, b, a, 3'd3, rd, 7'h33); endfunction
  function automatic logic [31:0] XOR (int rd, int a, int b); return r_t(7'h00, b, a, 3'd4, rd, 7'h33); endfunction
  function automatic logic [31:0] SRL (int rd, int a, int b); return r_t(7'h00, b, a, 3'd5, rd, 7'h33); endfunction
  function automatic logic [31:0] SRA (int rd, int a, int b); return r_t(7'h20, b, a, 3'd5, rd, 7'h33); endfunction
  function automatic logic [31:0] OR  (int rd, int a, int b); return r_t(7'h00, b, a, 3'd6, rd, 7'h33); endfunction
  function automatic logic [31:0] AND (int rd, int a, int b); return r_t(7'h00, b, a, 3'd7, rd, 7'h33); endfunction
  function automatic logic [31:0] ADDI (int rd, int a, int i); return i_t(i, a, 3'd0, rd, 7'h13); endfunction
  function automatic logic [31:0] SLTI (int rd, int a, int i); return i_t(i, a, 3'd2, rd, 7'h13); endfunction
  function automatic logic [31:0] SLTIU(int rd, int a, int i); return i_t(i, a, 3'd3, rd, 7'h13); endfunction
  function automatic logic [31:0] XORI (int rd, int a, int i); return i_t(i, a, 3'd4, rd, 7'h13); endfunction
  function automatic logic [31:0] ORI  (int rd, int a, int i); return i_t(i, a, 3'd6, rd, 7'h13); endfunction
  function automatic logic [31:0] ANDI (int rd, int a, int i); return i_t(i, a, 3'd7, rd, 7'h13); endfunction
  function automatic logic [31:0] SLLI (int rd, int a, int s); return i_t(s & 31, a, 3'd1, rd, 7'h13); endfunction
  function automatic logic [31:0] SRLI (int rd, int a, int s); return i_t(s & 31, a, 3'd5, rd, 7'h13); endfunction
  function automatic logic [31:0] SRAI (int rd, int a, int s); return i_t((s & 31) | 32'h400, a, 3'd5, rd, 7'h13); endfunction
  function automatic logic [31:0] LB (int rd, int a, int i); return i_t(i, a, 3'd0, rd, 7'h03); endfunction
  function automatic logic [31:0] LH (int rd, int a, int i); return i_t(i, a, 3'd1, rd, 7'h03); endfunction
  function automatic logic [31:0] LW (int rd, int a, int i); return i_t(i, a, 3'd2, rd, 7'h03); endfunction
  function automatic logic [31:0] LBU(int rd, int a, int i); return i_t(i, a, 3'd4, rd, 7'h03); endfunction
  function automatic logic [31:0] LHU(int rd, int a, int i); return i_t(i, a, 3'd5, rd, 7'h03); endfunction
  function automatic logic [31:0] SB (int src, int a, int i); return s_t(i, src, a, 3'd0); endfunction
  function automatic logic [31:0] SH (int src, int a, int i); return s_t(i, src, a, 3'd1); endfunction
  function automatic logic [31:0] SW (int src, int a, int i); return s_t(i, src, a, 3'd2); endfunction
  function automatic logic [31:0] BEQ (int a, int b, int off); return b_t(off, b, a, 3'd0); endfunction
  function automatic logic [31:0] BNE (int a, int b, int off); return b_t(off, b, a, 3'd1); endfunction
  function automatic logic [31:0] BLT (int a, int b, int off); return b_t(off, b, a, 3'd4); endfunction
  function automatic logic [31:0] BGE (int a, int b, int off); return b_t(off, b, a, 3'd5); endfunction
  function automatic logic [31:0] BLTU(int a, int b, int off); return b_t(off, b, a, 3'd6); endfunction
  function automatic logic [31:0] BGEU(int a, int b, int off); return b_t(off, b, a, 3'd7); endfunction
  function automatic logic [31:0] LUI  (int rd, int imm20); return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20); return {20'(imm20), 5'(rd), 7'h17}; endfunction
  function automatic logic [31:0] JAL(int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'h6f};
  endfunction
  function automatic logic [31:0] JALR(int rd, int a, int i); return i_t(i, a, 3'd0, rd, 7'h67); endfunction

  // ----------------------------------------------------------------- ISS
  class rv_iss;
    logic [31:0] x [32];
    logic [31:0] pc;
    logic [7:0]  mem [int unsigned];   // byte memory, sparse
    // result of the last step
    logic [31:0] s_pc, s_ir, s_wd, s_st_addr, s_st_data;
    int          s_rd;                 // -1: no register write
    logic        s_store;

    function new();
      foreach (x[i]) x[i] = 0;
      pc = 0;
    endfunction

    function automatic logic [7:0] rb(logic [31:0] a);
      return mem.exists(a) ? mem[a] : 8'h00;
    endfunction
    function automatic logic [31:0] rw(logic [31:0] a);
      return {rb(a + 3), rb(a + 2), rb(a + 1), rb(a)};
    endfunction
    function automatic void ww(logic [31:0] a, logic [31:0] d);
      for (int i = 0; i < 4; i++) mem[a + i] = d[8*i +: 8];
    endfunction

    function automatic void step();
      logic [31:0] ir, a, b, imm_i, imm_s, imm_b, imm_u, imm_j, r, npc, ea;
      logic [2:0]  f3;
      logic        wr;
      ir = rw(pc);
      s_pc = pc; s_ir = ir; s_rd = -1; s_store = 0;
      a = x[ir[19:15]]; b = x[ir[24:20]]; f3 = ir[14:12];
      imm_i = {{20{ir[31]}}, ir[31:20]};
      imm_s = {{20{ir[31]}}, ir[31:25], ir[11:7]};
      imm_b = {{19{ir[31]}}, ir[31], ir[7], ir[30:25], ir[11:8], 1'b0};
      imm_u = {ir[31:12], 12'd0};
      imm_j = {{11{ir[31]}}, ir[31], ir[19:12], ir[20], ir[30:21], 1'b0};
      npc = pc + 4; wr = 0; r = 0;
      case (ir[6:0])
        7'h37: begin r = imm_u; wr = 1; end
        7'h17: begin r = pc + imm_u; wr = 1; end
        7'h6f: begin r = pc + 4; wr = 1; npc = pc + imm_j; end
        7'h67: begin r = pc + 4; wr = 1; npc = (a + imm_i) & ~32'd1; end
        7'h63: begin
          logic t;
          case (f3)
            3'd0: t = (a == b);
            3'd1: t = (a != b);
            3'd4: t = ($signed(a) < $signed(b));
            3'd5: t = ($signed(a) >= $signed(b));
            3'd6: t = (a < b);
            3'd7: t = (a >= b);
            default: t = 0;
          endcase
          if (t) npc = pc + imm_b;
        end
        7'h03: begin
          logic [31:0] w;
          ea = a + imm_i;
          w = rw({ea[31:2], 2'b00}) >> (8 * ea[1:0]);
          case (f3)
            3'd0: r = {{24{w[7]}}, w[7:0]};
            3'd1: r = {{16{w[15]}}, w[15:0]};
            3'd2: r = w;
            3'd4: r = {24'd0, w[7:0]};
            3'd5: r = {16'd0, w[15:0]};
            default: r = 0;
          endcase
          wr = 1;
        end
        7'h23: begin
          ea = a + imm_s;
          s_store = 1; s_st_addr = ea;
          case (f3)
            3'd0: begin mem[ea] = b[7:0]; s_st_data = {24'd0, b[7:0]}; end
            3'd1: begin mem[ea] = b[7:0]; mem[ea + 1] = b[15:8]; s_st_data = {16'd0, b[15:0]}; end
            default: begin ww(ea, b); s_st_data = b; end
          endcase
        end
        7'h13, 7'h33: begin
          logic [31:0] o;
          logic        reg_op;
          reg_op = (ir[6:0] == 7'h33);
          o = reg_op ? b : imm_i;
          case (f3)
            3'd0: r = (reg_op && ir[30]) ? a - o : a + o;
            3'd1: r = a << o[4:0];
            3'd2: r = {31'd0, $signed(a) < $signed(o)};
            3'd3: r = {31'd0, a < o};
            3'd4: r = a ^ o;
            3'd5: r = ir[30] ? 32'($signed(a) >>> o[4:0]) : a >> o[4:0];
            3'd6: r = a | o;
            default: r = a & o;
          endcase
          wr = 1;
        end
        default: ;   // FENCE, SYSTEM: no effect
      endcase
      if (wr && ir[11:7] != 0) begin
        x[ir[11:7]] = r;
        s_rd = int'(ir[11:7]);
        s_wd = r;
      end
      pc = npc;
    endfunction
  endclass

endpackage
