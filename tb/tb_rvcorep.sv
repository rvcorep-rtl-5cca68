// tb_rvcorep: test of the RVCoreP pipeline on its own, with simple
// synchronous memories modelled in the testbench.
//
// Each directed program is checked in lockstep against the independent
// instruction-set simulator (rv_tb_pkg::rv_iss) and its retire timing is
// measured against the paper's pipeline behaviour:
//   - independent instructions retire one per cycle (IPC 1);
//   - a load followed by a dependent instruction costs one cycle (Fig. 5(b));
//   - a mispredicted branch costs three cycles (Fig. 5(a));
//   - a trained loop branch predicted taken through the pipelined BTB costs
//     nothing, except when it directly follows a taken branch (prediction
//     invalid because previous PC + 4 != PC, Fig. 3).
module tb_rvcorep;
  import rvcorep_pkg::*;
  import rv_tb_pkg::*;

  logic        clk = 0, rst = 1;
  logic [31:0] i_addr, i_in, d_addr, d_wdata, d_in;
  logic [3:0]  d_be;
  logic        rt_valid, rt_we;
  logic [31:0] rt_pc, rt_ir, rt_data;
  logic [4:0]  rt_rd;
  perf_t       perf;

  rvcorep #(.PHT_ENTRIES(256), .BTB_ENTRIES(64)) dut (
    .clk, .rst, .i_addr, .i_in, .d_addr, .d_be, .d_wdata, .d_in,
    .rt_valid, .rt_pc, .rt_ir, .rt_we, .rt_rd, .rt_data, .perf
  );

  // testbench memories: 4 KB each, registered read like block RAM
  logic [31:0] imem [1024];
  logic [31:0] dmem [1024];
  always_ff @(posedge clk) begin
    i_in <= imem[i_addr[11:2]];
    d_in <= dmem[d_addr[11:2]];
    for (int b = 0; b < 4; b++)
      if (d_be[b]) dmem[d_addr[11:2]][8*b +: 8] <= d_wdata[8*b +: 8];
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] prog [$];
  int          rcyc [$];     // cycle of each retirement
  logic [31:0] rpc  [$];     // pc of each retirement
  int          n_stall, n_bmis, n_ptkn;

  // run prog from address 0 until the self-jump at halt_pc retires
  task automatic run(input logic [31:0] halt_pc, input int max_cycles);
    rv_iss iss = new();
    int    t = 0;
    rst <= 1'b1;
    foreach (imem[i]) imem[i] = NOP;
    foreach (dmem[i]) dmem[i] = 32'd0;
    foreach (prog[i]) begin
      imem[i] = prog[i];
      iss.ww(32'(i * 4), prog[i]);
    end
    rcyc.delete(); rpc.delete();
    n_stall = 0; n_bmis = 0; n_ptkn = 0;
    repeat (3) @(posedge clk);
    // registers keep their values across runs: start the model from them
    for (int r = 1; r < 32; r++) iss.x[r] = dut.u_regfile.mem[r];
    rst <= 1'b0;
    forever begin
      @(posedge clk);
      t++;
      if (perf.stall)      n_stall++;
      if (perf.bmis)       n_bmis++;
      if (perf.pred_taken) n_ptkn++;
      if (rt_valid) begin
        iss.step();
        check(rt_pc == iss.s_pc, $sformatf("retire pc %08x exp %08x", rt_pc, iss.s_pc));
        if (iss.s_rd >= 0)
          check(rt_we && rt_rd == 5'(iss.s_rd) && rt_data == iss.s_wd,
                $sformatf("pc %08x: x%0d=%08x exp x%0d=%08x", rt_pc, rt_rd, rt_data,
                          iss.s_rd, iss.s_wd));
        else
          check(!rt_we, $sformatf("pc %08x: unexpected register write", rt_pc));
        rcyc.push_back(cyc);
        rpc.push_back(rt_pc);
        if (rt_pc == halt_pc) break;
      end
      if (t > max_cycles) begin
        check(0, "program did not halt");
        break;
      end
    end
  endtask

  // index of the n-th retirement of address a
  function automatic int find(input logic [31:0] a, input int n);
    int k = 0;
    foreach (rpc[i]) if (rpc[i] == a) begin
      if (k == n) return i;
      k++;
    end
    return -1;
  endfunction

  initial begin
    int i0, i1, l;

    // ---------------- A: 20 independent instructions, one per cycle
    prog.delete();
    for (int i = 0; i < 20; i++) prog.push_back(ADDI(1 + i % 8, 0, i));
    prog.push_back(JAL(0, 0));
    run(32'd80, 200);
    check(rcyc.size() >= 21, "A: retired count");
    if (rcyc.size() >= 20)
      check(rcyc[19] - rcyc[0] == 19, $sformatf("A: 20 instructions took %0d cycles, exp 19",
                                                rcyc[19] - rcyc[0] + 1));
    check(n_stall == 0 && n_bmis == 1, "A: no stall, one flush (the halting jump) expected");

    // ---------------- B: load-use costs one cycle, forwarding otherwise
    prog.delete();
    prog.push_back(ADDI(1, 0, 123));
    prog.push_back(SW(1, 0, 256));
    prog.push_back(LW(2, 0, 256));
    prog.push_back(ADD(3, 2, 2));      // load-use: 1 bubble
    prog.push_back(ADD(4, 3, 3));      // Ma->Ex forward
    prog.push_back(ADD(5, 3, 4));      // Wb->Ex and Ma->Ex forward
    prog.push_back(ADD(6, 3, 0));      // 3 apart: register file write-through
    prog.push_back(LW(7, 0, 256));
    prog.push_back(ADDI(8, 0, 1));
    prog.push_back(ADD(9, 7, 8));      // load two ahead: no stall
    prog.push_back(JAL(0, 0));
    run(32'd40, 200);
    i0 = find(32'd8, 0); i1 = find(32'd12, 0);
    check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 2,
          "B: load-use must cost exactly one cycle");
    i0 = find(32'd28, 0); i1 = find(32'd36, 0);
    check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 2,
          "B: load two ahead must not stall");
    check(n_stall == 1, $sformatf("B: %0d stalls, exp 1", n_stall));

    // ---------------- C: a mispredicted taken branch costs three cycles
    prog.delete();
    prog.push_back(ADDI(1, 0, 5));
    prog.push_back(BEQ(0, 0, 12));     // 0x04 -> 0x10, BTB empty: mispredicted
    prog.push_back(ADDI(2, 0, 1));     // wrong path
    prog.push_back(ADDI(3, 0, 1));     // wrong path
    prog.push_back(ADDI(4, 0, 7));     // 0x10
    prog.push_back(JAL(0, 0));         // 0x14
    run(32'h14, 200);
    i0 = find(32'h4, 0); i1 = find(32'h10, 0);
    check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 4,
          $sformatf("C: misprediction penalty %0d cycles, exp 3",
                    (i0 >= 0 && i1 >= 0) ? rcyc[i1] - rcyc[i0] - 1 : -1));
    check(n_bmis == 2, "C: two flushes (branch, halting jump) expected");
    check(find(32'h8, 0) < 0, "C: wrong-path instruction retired");

    // ---------------- D: trained loop branch predicted through the BTB
    prog.delete();
    prog.push_back(ADDI(1, 0, 0));     // 0x00
    prog.push_back(ADDI(2, 0, 40));    // 0x04
    l = prog.size();
    prog.push_back(ADDI(3, 3, 2));     // 0x08 loop body
    prog.push_back(ADDI(1, 1, 1));     // 0x0c
    prog.push_back(BNE(1, 2, -8));     // 0x10 -> 0x08
    prog.push_back(JAL(0, 0));         // 0x14
    run(32'h14, 1000);
    // iteration 30: branch at 0x10 to body at 0x08 without a bubble
    i0 = find(32'h10, 30); i1 = find(32'h08, 31);
    check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 1,
          "D: trained taken branch must cost no cycle");
    check(n_ptkn >= 30, $sformatf("D: only %0d predicted-taken fetches", n_ptkn));
    // gshare warms up while the global history fills with 'taken'; after
    // that the loop branch is never mispredicted
    for (int k = 25; k < 38; k++) begin
      i0 = find(32'h10, k); i1 = find(32'h08, k + 1);
      check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 1,
            $sformatf("D: iteration %0d of the trained loop lost cycles", k));
    end
    check(n_bmis <= 12, $sformatf("D: %0d mispredictions in a simple loop", n_bmis));
    if (l < 0) $display("unreachable");

    // ---------------- E: a branch right after a taken jump is not predicted
    prog.delete();
    prog.push_back(ADDI(1, 0, 0));     // 0x00
    prog.push_back(ADDI(2, 0, 20));    // 0x04
    prog.push_back(ADDI(1, 1, 1));     // 0x08 loop head
    prog.push_back(JAL(0, 8));         // 0x0c -> 0x14 (always mispredicted: JAL not in BTB)
    prog.push_back(NOP);               // 0x10
    prog.push_back(BNE(1, 2, -12));    // 0x14 -> 0x08: previous PC + 4 != PC
    prog.push_back(JAL(0, 0));         // 0x18
    run(32'h18, 2000);
    // the branch is fetched right after the redirect of the jump, so its
    // (trained) prediction is dropped and it costs the full 3-cycle penalty
    for (int k = 10; k < 18; k++) begin
      i0 = find(32'h14, k); i1 = find(32'h08, k + 1);
      check(i0 >= 0 && i1 >= 0 && rcyc[i1] - rcyc[i0] == 4,
            $sformatf("E: iteration %0d: branch after redirect took %0d cycles, exp 4", k,
                      (i0 >= 0 && i1 >= 0) ? rcyc[i1] - rcyc[i0] : -1));
    end
    check(n_ptkn > 0, "E: the branch was never predicted on the wrong path");

    // ---------------- F: Ma and Wb both hold a write to the same register:
    // the younger value (from Ma) must win
    prog.delete();
    for (int i = 1; i <= 8; i++) begin
      prog.push_back(ADDI(10, 0, i));
      prog.push_back(ADDI(10, 10, 100 * i));
      prog.push_back(ADD(11, 10, 10));
      prog.push_back(SUB(12, 11, 10));
    end
    prog.push_back(JAL(0, 0));
    run(32'd128, 400);
    check(dut.u_regfile.mem[12] == 32'd808, "F: x12 after the last group, exp 808");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
