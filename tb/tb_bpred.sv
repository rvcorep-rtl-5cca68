// tb_bpred: drives the fetch side of the pipelined gshare/BTB the way the
// core does (r_pc follows w_npc every cycle) and replays the paper's
// example (Fig. 3): a branch at 0x104 with target 0x130, fetched after the
// instruction at 0x100. It checks that
//   - the prediction for 0x104 comes from the BTB entry written at index
//     0x104 - 4 and the PHT counter at (0x100 >> 2) XOR BHR;
//   - a prediction is dropped when the previous PC + 4 differs from the PC;
//   - a taken prediction shifts a 1 into the BHR exactly once, also across a
//     stall, and a not-taken PHT counter gives a hit that is not taken;
//   - a misprediction reloads the BHR with the corrected history;
//   - a jump held in the BTB is predicted taken without consulting the PHT
//     and without shifting the BHR.
module tb_bpred;
  import rvcorep_pkg::*;

  localparam int PHT = 8192, BTB = 512, PW = 13;

  logic          clk = 0, rst = 1;
  logic [31:0]   w_npc = 0, r_pc, pred_target, btb_bpc = 0, btb_target = 0;
  logic          stall = 0, w_btkn, pred_hit, bmis = 0, pht_we = 0, btb_we = 0,
                 btb_cbr = 1;
  logic [PW-1:0] pht_idx, bhr, bhr_fix = 0, pht_widx = 0;
  logic [1:0]    pht_cnt, pht_wcnt = 0;
  int checks = 0, failures = 0;

  bpred #(.PHT_ENTRIES(PHT), .BTB_ENTRIES(BTB)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) r_pc <= w_npc;

  task automatic chk(input bit ok, input string w);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, w);
    end
  endtask

  // present next PC a for the coming edge
  task automatic fetch(input logic [31:0] a);
    @(negedge clk);
    w_npc = a;
  endtask

  function automatic logic [PW-1:0] idx(input logic [31:0] pc, input logic [PW-1:0] h);
    return pc[PW+1:2] ^ h;
  endfunction

  initial begin
    logic [PW-1:0] h0;
    // reset
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    // nothing is predicted before training
    for (int a = 'h100; a < 'h140; a += 4) begin
      fetch(a);
      @(posedge clk); #1;
      chk(!pred_hit && !w_btkn, "untrained BTB hit");
    end
    // train: BTB entry for the branch at 0x104, PHT counter strongly taken
    h0 = bhr;
    @(negedge clk);
    btb_we = 1; btb_bpc = 32'h104; btb_target = 32'h130;
    pht_we = 1; pht_widx = idx(32'h100, h0); pht_wcnt = 2'b11;
    @(negedge clk);
    btb_we = 0; pht_we = 0;

    // sequential fetch 0xF8, 0xFC, 0x100, 0x104: predicted taken at 0x104
    fetch(32'hF8); fetch(32'hFC); fetch(32'h100);
    @(posedge clk); #1;
    chk(!w_btkn, "0x100 must not be predicted");
    fetch(32'h104);
    @(posedge clk); #1;
    chk(r_pc == 32'h104 && pred_hit && w_btkn, "0x104 must be predicted taken");
    chk(pred_target == 32'h130, $sformatf("target %08x exp 00000130", pred_target));
    chk(pht_idx == idx(32'h100, h0), "PHT index must be (0x100>>2)^BHR");
    chk(pht_cnt == 2'b11, "PHT counter read");
    chk(bhr == h0, "BHR before the shift");
    fetch(32'h130);            // follow the prediction
    @(posedge clk); #1;
    chk(bhr == {h0[PW-2:0], 1'b1}, "BHR must shift in a 1 after a taken prediction");
    chk(!pred_hit, "0x130 after a taken branch: prediction invalid");

    // non-sequential arrival at 0x104: previous PC + 4 != PC
    fetch(32'h200); fetch(32'h104);
    @(posedge clk); #1;
    chk(!pred_hit && !w_btkn, "prediction must be dropped when previous PC + 4 != PC");

    // stall while 0x104 is in If: prediction kept, BHR shifted once
    bmis = 1; bhr_fix = h0;                 // restore the history first
    fetch(32'h0FC);
    @(posedge clk); #1;
    bmis = 0;
    chk(bhr == h0, "BHR must be reloaded on a misprediction");
    fetch(32'h100); fetch(32'h104);
    @(posedge clk); #1;
    chk(w_btkn, "0x104 predicted before the stall");
    @(negedge clk); stall = 1; w_npc = 32'h104;   // hold
    @(posedge clk); #1;
    chk(w_btkn && pred_target == 32'h130, "prediction must survive a stall");
    chk(bhr == h0, "BHR must not shift while stalled");
    @(negedge clk); stall = 0; w_npc = 32'h130;
    @(posedge clk); #1;
    chk(bhr == {h0[PW-2:0], 1'b1}, "BHR must shift exactly once across a stall");

    // PHT not-taken counter: BTB hit but not taken, BHR shifts in a 0
    @(negedge clk);
    bmis = 1; bhr_fix = '0;
    @(negedge clk);
    bmis = 0;
    pht_we = 1; pht_widx = idx(32'h100, '0); pht_wcnt = 2'b00;
    @(negedge clk); pht_we = 0;
    fetch(32'h0FC); fetch(32'h100); fetch(32'h104);
    @(posedge clk); #1;
    chk(pred_hit && !w_btkn, "weak PHT counter: hit, not taken");
    fetch(32'h108);
    @(posedge clk); #1;
    chk(bhr == '0, "BHR shifts in a 0 for a not-taken prediction");

    // a jump (JAL/JALR) in the BTB: predicted taken whatever the PHT says,
    // and the BHR does not shift
    @(negedge clk);
    btb_we = 1; btb_cbr = 0; btb_bpc = 32'h304; btb_target = 32'h480;
    pht_we = 1; pht_widx = idx(32'h300, bhr); pht_wcnt = 2'b00;
    @(negedge clk);
    btb_we = 0; pht_we = 0; btb_cbr = 1;
    h0 = bhr;
    fetch(32'h2FC); fetch(32'h300); fetch(32'h304);
    @(posedge clk); #1;
    chk(w_btkn && !pred_hit && pred_target == 32'h480, "jump in the BTB: predicted taken");
    fetch(32'h480);
    @(posedge clk); #1;
    chk(bhr == h0, "a jump must not shift the BHR");

    // a reset clears the history
    @(negedge clk); bmis = 1; bhr_fix = 13'h1abc;
    @(negedge clk); bmis = 0; rst = 1;
    @(negedge clk); rst = 0;
    chk(bhr == '0, "reset clears the BHR");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
