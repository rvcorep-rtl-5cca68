// rvcorep: the RVCoreP five-stage RV32I pipeline (If, Id, Ex, Ma, Wb).
//
// Stages and what they do here:
//   If  r_pc holds the PC of the instruction that the instruction memory
//       (addressed last cycle with w_npc) is delivering on i_in. decoder_if
//       partially decodes it and load_use compares its sources with a load
//       in Id. The next PC w_npc is chosen, highest priority first, from
//       Ma_pc_true (misprediction), r_pc (stall), the BTB target (w_btkn) and
//       r_pc+4. The pipelined gshare/BTB (bpred) supplies w_btkn.
//   Id  decoder_id builds the one-hot ALU/branch/load/store controls and the
//       immediate; the register file is read asynchronously; an operand
//       multiplexer puts the immediate in place of rs2 for register-immediate
//       ALU instructions. The forwarding selects for the Ex stage are worked
//       out here one cycle ahead, from the register numbers decoded in If.
//   Ex  two forwarding multiplexers (from Ma: ExMa_rslt, from Wb:
//       MaWb_rslt) feed ALU_opt; D_ADDR = rs1 + imm addresses the data
//       memory; the branch unit decides taken/not taken, the taken target is
//       computed, and the actual next PC is compared with the predicted one.
//       The comparison is registered in ExMa, as the paper describes.
//   Ma  a misprediction (w_bmis) redirects fetch to Ma_pc_true and flushes
//       If, Id and Ex (3-cycle penalty); the predictor tables are updated;
//       align_extend turns the memory word into the load result.
//   Wb  the register file is written.
// Load-use: the Load-use bit found in If is carried in IfId; when it is set
// (load in Ex, user in Id) the core inserts a bubble into IdEx and holds If
// and Id for one cycle (w_stall).
// Taken from the paper: the stage split, the three next-PC candidates and
// their priority, the two forwarding paths, the load-use detection in If with
// decoder_if, resolution in Ex with the redirect from Ma, the 3-cycle
// misprediction and 1-cycle load-use penalties, ALU_opt and align/extend.
// This design's own: JAL/JALR predicted through the BTB as well (no
// return-address stack), how stores are placed into byte lanes, the precomputed
// forwarding selects, the carried predictor state, the write-through register
// file, FENCE/SYSTEM as no-ops, no traps or CSRs, the retire trace and event
// outputs.
// Interface: instruction port (i_addr is w_npc, i_in arrives one cycle
// later); data port (d_addr/d_be/d_wdata at the Ex->Ma edge, d_in during
// Ma); a retire trace from the Wb stage and one-cycle event pulses.
// Timing: single clock, synchronous active-high reset; fetch starts at
// RESET_PC in the first cycle after reset.
module rvcorep
  import rvcorep_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter int unsigned PHT_ENTRIES = 8192,
  parameter int unsigned BTB_ENTRIES = 512,
  localparam int unsigned PW = $clog2(PHT_ENTRIES)
) (
  input  logic        clk,
  input  logic        rst,
  // instruction memory (m_imem)
  output logic [31:0] i_addr,
  input  logic [31:0] i_in,
  // data memory (m_dmem)
  output logic [31:0] d_addr,
  output logic [3:0]  d_be,
  output logic [31:0] d_wdata,
  input  logic [31:0] d_in,
  // retire trace (Wb stage)
  output logic        rt_valid,
  output logic [31:0] rt_pc,
  output logic [31:0] rt_ir,
  output logic        rt_we,
  output logic [4:0]  rt_rd,
  output logic [31:0] rt_data,
  // event pulses
  output perf_t       perf
);

  // ================================================================ If
  logic [31:0]   r_pc, w_npc, If_pnpc;
  logic          w_stall, w_bmis, hold;
  logic [31:0]   Ma_pc_true;
  if_dec_t       If_dec;
  logic          If_luse;
  logic          w_btkn, pred_hit;
  logic [31:0]   pred_target;
  logic [PW-1:0] pht_idx, bhr, bhr_fix;
  logic [1:0]    pht_cnt;
  logic          pht_we, btb_we;
  logic [1:0]    pht_wcnt;

  // IfId
  logic          IfId_v, IfId_luse;
  logic [31:0]   IfId_pc, IfId_ir, IfId_pnpc;
  if_dec_t       IfId_dec;
  logic [PW-1:0] IfId_pidx, IfId_bhr;
  logic [1:0]    IfId_pcnt;

  // IdEx
  logic          IdEx_v;
  logic [31:0]   IdEx_pc, IdEx_ir, IdEx_pnpc, IdEx_imm, IdEx_rrs1, IdEx_rrs2;
  if_dec_t       IdEx_dec;
  alu_ctrl_t     IdEx_alu_ctrl;
  bru_ctrl_t     IdEx_bru_ctrl;
  ld_ctrl_t      IdEx_ld_ctrl;
  st_ctrl_t      IdEx_st_ctrl;
  logic          IdEx_fa_ma, IdEx_fa_wb, IdEx_fb_ma, IdEx_fb_wb;
  logic [PW-1:0] IdEx_pidx, IdEx_bhr;
  logic [1:0]    IdEx_pcnt;

  // ExMa
  logic          ExMa_v, ExMa_rf_we, ExMa_is_load, ExMa_is_cbr, ExMa_b_rslt, ExMa_bmis;
  logic [31:0]   ExMa_pc, ExMa_ir, ExMa_rslt, ExMa_tkn_pc, ExMa_npc;
  logic [4:0]    ExMa_rd;
  logic [1:0]    ExMa_alo;
  ld_ctrl_t      ExMa_ld_ctrl;
  logic [PW-1:0] ExMa_pidx, ExMa_bhr;
  logic [1:0]    ExMa_pcnt;

  // MaWb
  logic          MaWb_v, MaWb_rf_we;
  logic [31:0]   MaWb_pc, MaWb_ir, MaWb_rslt;
  logic [4:0]    MaWb_rd;

  assign hold = w_stall && !w_bmis;

  decoder_if u_decoder_if (.ir(i_in), .dec(If_dec));

  load_use u_load_use (
    .id_valid(IfId_v), .id_is_load(IfId_dec.is_load), .id_rd(IfId_dec.rd),
    .if_dec(If_dec), .luse(If_luse)
  );

  bpred #(.PHT_ENTRIES(PHT_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES)) u_bpred (
    .clk, .rst,
    .w_npc, .r_pc, .stall(hold),
    .w_btkn, .pred_target, .pred_hit, .pht_idx, .pht_cnt, .bhr,
    .bmis(w_bmis), .bhr_fix,
    .pht_we, .pht_widx(ExMa_pidx), .pht_wcnt,
    .btb_we, .btb_cbr(ExMa_is_cbr), .btb_bpc(ExMa_pc), .btb_target(ExMa_tkn_pc)
  );

  // next-PC multiplexer, in the paper's priority order
  always_comb begin
    If_pnpc = w_btkn ? pred_target : r_pc + 32'd4;
    if (rst)          w_npc = RESET_PC;
    else if (w_bmis)  w_npc = Ma_pc_true;
    else if (w_stall) w_npc = r_pc;
    else              w_npc = If_pnpc;
  end
  assign i_addr = w_npc;

  always_ff @(posedge clk) r_pc <= w_npc;

  always_ff @(posedge clk) begin
    if (rst || w_bmis) begin
      IfId_v    <= 1'b0;
      IfId_luse <= 1'b0;
    end else if (w_stall) begin
      IfId_luse <= 1'b0;           // the stall lasts one cycle
    end else begin
      IfId_v    <= 1'b1;
      IfId_luse <= If_luse;
      IfId_pc   <= r_pc;
      IfId_ir   <= i_in;
      IfId_dec  <= If_dec;
      IfId_pnpc <= If_pnpc;
      IfId_pidx <= pht_idx;
      IfId_pcnt <= pht_cnt;
      IfId_bhr  <= bhr;
    end
  end

  assign w_stall = IfId_v && IfId_luse;

  // ================================================================ Id
  alu_ctrl_t   Id_alu_ctrl;
  bru_ctrl_t   Id_bru_ctrl;
  ld_ctrl_t    Id_ld_ctrl;
  st_ctrl_t    Id_st_ctrl;
  logic [31:0] Id_imm, Id_rrs1, Id_rrs2;
  logic        Id_imm_b;
  logic        Id_fa_ma, Id_fa_wb, Id_fb_ma, Id_fb_wb;

  decoder_id u_decoder_id (
    .ir(IfId_ir), .alu_ctrl(Id_alu_ctrl), .bru_ctrl(Id_bru_ctrl),
    .ld_ctrl(Id_ld_ctrl), .st_ctrl(Id_st_ctrl), .imm(Id_imm), .imm_b(Id_imm_b)
  );

  regfile u_regfile (
    .clk,
    .ra1(IfId_dec.rs1), .ra2(IfId_dec.rs2), .rd1(Id_rrs1), .rd2(Id_rrs2),
    .we(MaWb_v && MaWb_rf_we), .wa(MaWb_rd), .wd(MaWb_rslt)
  );

  // forwarding selects, one cycle ahead: the instruction now in Ex will be
  // in Ma, the one now in Ma will be in Wb, when this one reaches Ex
  always_comb begin
    Id_fa_ma = IfId_dec.use_rs1 && IdEx_v && IdEx_dec.rf_we && (IdEx_dec.rd == IfId_dec.rs1);
    Id_fa_wb = IfId_dec.use_rs1 && !Id_fa_ma && ExMa_v && ExMa_rf_we && (ExMa_rd == IfId_dec.rs1);
    Id_fb_ma = IfId_dec.use_rs2 && !Id_imm_b && IdEx_v && IdEx_dec.rf_we &&
               (IdEx_dec.rd == IfId_dec.rs2);
    Id_fb_wb = IfId_dec.use_rs2 && !Id_imm_b && !Id_fb_ma && ExMa_v && ExMa_rf_we &&
               (ExMa_rd == IfId_dec.rs2);
  end

  always_ff @(posedge clk) begin
    if (rst || w_bmis || w_stall) begin
      IdEx_v <= 1'b0;              // flush, or the load-use bubble
    end else begin
      IdEx_v        <= IfId_v;
      IdEx_pc       <= IfId_pc;
      IdEx_ir       <= IfId_ir;
      IdEx_dec      <= IfId_dec;
      IdEx_alu_ctrl <= Id_alu_ctrl;
      IdEx_bru_ctrl <= Id_bru_ctrl;
      IdEx_ld_ctrl  <= Id_ld_ctrl;
      IdEx_st_ctrl  <= Id_st_ctrl;
      IdEx_imm      <= Id_imm;
      IdEx_rrs1     <= Id_rrs1;
      IdEx_rrs2     <= Id_imm_b ? Id_imm : Id_rrs2;
      IdEx_fa_ma    <= Id_fa_ma;
      IdEx_fa_wb    <= Id_fa_wb;
      IdEx_fb_ma    <= Id_fb_ma;
      IdEx_fb_wb    <= Id_fb_wb;
      IdEx_pnpc     <= IfId_pnpc;
      IdEx_pidx     <= IfId_pidx;
      IdEx_pcnt     <= IfId_pcnt;
      IdEx_bhr      <= IfId_bhr;
    end
  end

  // ================================================================ Ex
  logic [31:0] Ex_rrs1, Ex_rrs2, Ex_rslt, Ex_tkn_pc, Ex_npc, Ex_true_npc;
  logic        Ex_b_rslt, Ex_is_cbr;

  always_comb begin
    Ex_rrs1 = IdEx_fa_ma ? ExMa_rslt : IdEx_fa_wb ? MaWb_rslt : IdEx_rrs1;
    Ex_rrs2 = IdEx_fb_ma ? ExMa_rslt : IdEx_fb_wb ? MaWb_rslt : IdEx_rrs2;
  end

  alu_opt u_alu_opt (
    .a(Ex_rrs1), .b(Ex_rrs2), .pc(IdEx_pc), .imm(IdEx_imm),
    .alu_ctrl(IdEx_alu_ctrl), .bru_ctrl(IdEx_bru_ctrl),
    .rslt(Ex_rslt), .b_rslt(Ex_b_rslt)
  );

  always_comb begin
    d_addr      = Ex_rrs1 + IdEx_imm;                       // D_ADDR
    Ex_tkn_pc   = IdEx_bru_ctrl[BRU_JALR] ? {d_addr[31:1], 1'b0}
                                          : IdEx_pc + IdEx_imm;
    Ex_npc      = IdEx_pc + 32'd4;
    Ex_true_npc = Ex_b_rslt ? Ex_tkn_pc : Ex_npc;
    Ex_is_cbr   = |IdEx_bru_ctrl[BRU_BGEU:BRU_BEQ];

    // store: byte-lane placement and enables
    d_wdata = ({4{Ex_rrs2[7:0]}}  & {32{IdEx_st_ctrl[ST_SB]}})
            ^ ({2{Ex_rrs2[15:0]}} & {32{IdEx_st_ctrl[ST_SH]}})
            ^ (Ex_rrs2            & {32{IdEx_st_ctrl[ST_SW]}});
    d_be = '0;
    if (IdEx_v && !w_bmis && !rst) begin
      if (IdEx_st_ctrl[ST_SB]) d_be = 4'b0001 << d_addr[1:0];
      if (IdEx_st_ctrl[ST_SH]) d_be = d_addr[1] ? 4'b1100 : 4'b0011;
      if (IdEx_st_ctrl[ST_SW]) d_be = 4'b1111;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || w_bmis) begin
      ExMa_v <= 1'b0;
    end else begin
      ExMa_v       <= IdEx_v;
      ExMa_pc      <= IdEx_pc;
      ExMa_ir      <= IdEx_ir;
      ExMa_rf_we   <= IdEx_dec.rf_we;
      ExMa_rd      <= IdEx_dec.rd;
      ExMa_is_load <= IdEx_dec.is_load;
      ExMa_ld_ctrl <= IdEx_ld_ctrl;
      ExMa_alo     <= d_addr[1:0];
      ExMa_rslt    <= Ex_rslt;
      ExMa_b_rslt  <= Ex_b_rslt;
      ExMa_tkn_pc  <= Ex_tkn_pc;
      ExMa_npc     <= Ex_npc;
      ExMa_bmis    <= (Ex_true_npc != IdEx_pnpc);
      ExMa_is_cbr  <= Ex_is_cbr;
      ExMa_pidx    <= IdEx_pidx;
      ExMa_pcnt    <= IdEx_pcnt;
      ExMa_bhr     <= IdEx_bhr;
    end
  end

  // ================================================================ Ma
  logic [31:0] Ma_ld, Ma_rslt;

  assign w_bmis     = ExMa_v && ExMa_bmis;
  assign Ma_pc_true = ExMa_b_rslt ? ExMa_tkn_pc : ExMa_npc;

  // predictor training and history repair
  always_comb begin
    pht_we   = ExMa_v && ExMa_is_cbr;
    pht_wcnt = sat_update(ExMa_pcnt, ExMa_b_rslt);
    btb_we   = ExMa_v && ExMa_b_rslt;   // taken conditional branch, JAL or JALR
    bhr_fix  = ExMa_is_cbr ? {ExMa_bhr[PW-2:0], ExMa_b_rslt} : ExMa_bhr;
  end

  align_extend u_align_extend (
    .d_in(d_in), .addr_lo(ExMa_alo), .ld_ctrl(ExMa_ld_ctrl), .rslt(Ma_ld)
  );

  assign Ma_rslt = ExMa_is_load ? Ma_ld : ExMa_rslt;

  always_ff @(posedge clk) begin
    if (rst) begin
      MaWb_v <= 1'b0;
    end else begin
      MaWb_v     <= ExMa_v;
      MaWb_pc    <= ExMa_pc;
      MaWb_ir    <= ExMa_ir;
      MaWb_rf_we <= ExMa_rf_we;
      MaWb_rd    <= ExMa_rd;
      MaWb_rslt  <= Ma_rslt;
    end
  end

  // ================================================================ Wb
  always_comb begin
    rt_valid = MaWb_v;
    rt_pc    = MaWb_pc;
    rt_ir    = MaWb_ir;
    rt_we    = MaWb_v && MaWb_rf_we;
    rt_rd    = MaWb_rd;
    rt_data  = MaWb_rslt;

    perf.retire     = MaWb_v;
    perf.stall      = hold;
    perf.bmis       = w_bmis;
    perf.pred_taken = w_btkn && !w_stall && !w_bmis && !rst;
    perf.pred_hit   = pred_hit && !w_stall && !w_bmis && !rst;
    perf.fwd_ma     = IdEx_v && (IdEx_fa_ma || IdEx_fb_ma);
    perf.fwd_wb     = IdEx_v && (IdEx_fa_wb || IdEx_fb_wb);
  end

endmodule
