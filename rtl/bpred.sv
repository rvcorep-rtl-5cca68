// bpred: the two-stage pipelined gshare branch predictor and branch target
// buffer (BTB) of RVCoreP.
//
// The paper's instruction-fetch optimization splits the single-cycle
// "BTB + PHT + select next PC" path into two cycles by inserting the
// registers r_btb and r_pcx:
//   preIf (cycle of PC P): the BTB block RAM, addressed by P, delivers its
//     entry; r_pcx (a copy of the PC register) XOR r_BHR forms the PHT index,
//     which addresses the PHT block RAM at the clock edge.
//   If (cycle of PC Q, the next PC): r_btb holds the BTB entry of P and the
//     PHT RAM output holds the counter of P^BHR. The 'comb' logic turns them
//     into the prediction w_btkn for the instruction at Q.
// A BTB entry therefore describes the branch at the address after the one it
// is indexed by: it is written at index (branch PC - 4), as the paper states.
// The prediction is valid only when the PC of the preIf cycle plus 4 equals
// the current PC (Fig. 3 of the paper); after a taken branch, a redirect or
// a stall it is dropped and the fetch falls through to PC+4.
// When the BTB hits (the fetched instruction is a known conditional branch)
// 'join' shifts the PHT prediction into r_BHR speculatively; on a
// misprediction r_BHR is reloaded with the corrected history supplied by the
// Ma stage. The PHT index and counter used for a prediction travel with the
// instruction and come back on the update port.
//
// Sizes (paper, Sec. 5.2): PHT of 8,192 two-bit counters, BTB of 512 entries.
// This design's own choices: BHR length = log2(PHT entries); the BTB is
// direct mapped with a tag of the remaining PC bits; it holds taken
// conditional branches and JAL/JALR, and a bit in each entry tells them
// apart (the paper speaks of an instruction "predicted as a conditional
// branch using the BTB"): a jump that hits is predicted taken without the
// PHT and does not shift the BHR; the PHT counter is updated from the value read
// at prediction time (no second read port); tables are initialised by
// `initial` (block-RAM init), not by reset; while the pipeline stalls the
// If-side registers hold so a stalled branch keeps its prediction and the
// BHR shifts only once.
// Timing: one clock, synchronous active-high reset of r_BHR and of the
// r_btb valid bit; tables are written at posedge.
module bpred
  import rvcorep_pkg::*;
#(
  parameter int unsigned PHT_ENTRIES = 8192,
  parameter int unsigned BTB_ENTRIES = 512,
  localparam int unsigned PW = $clog2(PHT_ENTRIES),   // PHT index / BHR bits
  localparam int unsigned BW = $clog2(BTB_ENTRIES),   // BTB index bits
  localparam int unsigned TW = 30 - BW                // BTB tag bits
) (
  input  logic          clk,
  input  logic          rst,
  // fetch side
  input  logic [31:0]   w_npc,      // next PC, the address fetched this edge
  input  logic [31:0]   r_pc,       // PC of the instruction in If
  input  logic          stall,      // hold the If stage
  output logic          w_btkn,     // predicted taken (BTB hit and PHT taken)
  output logic [31:0]   pred_target,// r_btb target
  output logic          pred_hit,   // valid BTB hit on a conditional branch: BHR shifted
  output logic [PW-1:0] pht_idx,    // PHT index used for this prediction
  output logic [1:0]    pht_cnt,    // counter read for this prediction
  output logic [PW-1:0] bhr,        // r_BHR before this instruction's shift
  // resolve side (Ma stage)
  input  logic          bmis,       // misprediction: restore BHR
  input  logic [PW-1:0] bhr_fix,    // corrected history
  input  logic          pht_we,     // conditional branch resolved
  input  logic [PW-1:0] pht_widx,
  input  logic [1:0]    pht_wcnt,   // new counter value
  input  logic          btb_we,     // taken conditional branch or jump resolved
  input  logic          btb_cbr,    // it is a conditional branch (else JAL/JALR)
  input  logic [31:0]   btb_bpc,    // PC of that branch
  input  logic [31:0]   btb_target
);

  typedef struct packed {
    logic          valid;
    logic          cbr;        // conditional branch (else JAL/JALR)
    logic [TW-1:0] tag;
    logic [29:0]   target;
  } btb_entry_t;

  btb_entry_t    m_btb [BTB_ENTRIES];
  logic [1:0]    m_pht [PHT_ENTRIES];

  initial begin
    for (int i = 0; i < BTB_ENTRIES; i++) m_btb[i] = '0;
    for (int i = 0; i < PHT_ENTRIES; i++) m_pht[i] = 2'b01;  // weakly not taken
  end

  btb_entry_t    btb_q;      // BTB RAM output (address = r_pcx)
  btb_entry_t    r_btb;      // inserted pipeline register
  logic [31:0]   r_pcx;      // copy of the PC register feeding the PHT index
  logic [31:0]   r_bpc;      // PC that r_btb and the PHT output belong to
  logic [PW-1:0] r_BHR;
  logic [PW-1:0] w_pidx;
  logic [1:0]    pht_q;
  logic [PW-1:0] r_pidx;
  logic [31:0]   upd_pc;
  logic          btb_hit;    // valid BTB hit in If (any type)

  // ------------------------------------------------------------- preIf
  assign w_pidx = r_pcx[PW+1:2] ^ r_BHR;

  always_ff @(posedge clk) begin
    btb_q <= m_btb[w_npc[BW+1:2]];
    r_pcx <= w_npc;
    if (rst) begin
      r_btb.valid <= 1'b0;
      r_bpc       <= '0;
    end else if (!stall) begin
      r_btb  <= btb_q;
      r_bpc  <= r_pcx;
      pht_q  <= m_pht[w_pidx];
      r_pidx <= w_pidx;
    end
  end

  // ------------------------------------------------------- If: 'comb'
  always_comb begin
    btb_hit     = r_btb.valid && (r_btb.tag == r_bpc[31:BW+2]) &&
                  (r_bpc + 32'd4 == r_pc);
    pred_hit    = btb_hit && r_btb.cbr;
    w_btkn      = btb_hit && (!r_btb.cbr || pht_q[1]);
    pred_target = {r_btb.target, 2'b00};
    pht_idx     = r_pidx;
    pht_cnt     = pht_q;
    bhr         = r_BHR;
  end

  // ------------------------------------------------ BHR with 'join'
  always_ff @(posedge clk) begin
    if (rst)               r_BHR <= '0;
    else if (bmis)         r_BHR <= bhr_fix;
    else if (!stall && pred_hit) r_BHR <= {r_BHR[PW-2:0], pht_q[1]};
  end

  // ------------------------------------------------------- updates
  assign upd_pc = btb_bpc - 32'd4;

  always_ff @(posedge clk) begin
    if (pht_we) m_pht[pht_widx] <= pht_wcnt;
    if (btb_we) m_btb[upd_pc[BW+1:2]] <= '{valid: 1'b1, cbr: btb_cbr, tag: upd_pc[31:BW+2],
                                           target: btb_target[31:2]};
  end

endmodule
