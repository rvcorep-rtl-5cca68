// tb_dhrystone: runs the Dhrystone benchmark on the RVCoreP evaluation
// system at its default sizes (32 KB memories, 8,192-entry PHT, 512-entry
// BTB), as in the IPC evaluation of RVCoreP.
//
// The program image tb/dhrystone.hex is the riscv-tests Dhrystone
// (NUMBER_OF_RUNS = 2000) compiled for RV32I with gcc -O2, linked at
// address 0 with a small start-up routine (stack at the top of the 32 KB data
// memory, .bss cleared). Multiplication and division come from software
// routines, the benchmark's timer reads are replaced by a software counter
// (the core has no CSRs) and its printouts are removed. After the benchmark
// a check routine compares the benchmark's global variables with their
// expected final values and prints "DHRYSTONE OK\n" (or "DHRYSTONE FAIL\n")
// through the serial transmitter, then the program jumps to itself.
//
// The testbench loads the image through the system's load port, runs it, and
// checks every retired instruction in lockstep with the independent RV32I
// instruction-set simulator, and the printed text. It then reports the
// executed instructions, cycles, IPC and the conditional-branch prediction
// hits and misses, the quantities the RVCoreP IPC evaluation reports, and
// checks that the IPC is in the range such a pipeline must give
// (0.80 to 1.0) and that the pipeline stalled exactly once for every
// load immediately followed by a user of its result.
// The benchmark is run twice: first loaded through the load port, then
// received over the serial line (uart_rx and the program loader), as on the
// board, with the same checks and the same instruction count required.
// The predictor tables are not reset, so the second run starts with them
// trained and its cycle count may differ slightly.
// Timing: about 1.1 M clock cycles per run plus 3.1 M for the serial
// transfer; the watchdog stops at 10 M.
module tb_dhrystone;
  import rvcorep_pkg::*;
  import rv_tb_pkg::*;

  localparam int          CPB     = 100;            // the top's default bit time
  localparam logic [31:0] TX_ADDR = 32'h4000_0000;  // the top's default
  localparam int          WORDS   = 1024;           // room for the image

  logic        clk = 0, rst = 1;
  logic        ld_we = 0;
  logic [31:0] ld_addr = 0, ld_data = 0;
  logic        txd, tx_busy;
  logic        boot_serial = 0, rxd = 1;
  logic        rt_valid, rt_we;
  logic [31:0] rt_pc, rt_ir, rt_data;
  logic [4:0]  rt_rd;
  perf_t       perf;

  rvcorep_system dut (
    .clk, .rst, .ld_we, .ld_addr, .ld_data, .boot_serial, .rxd, .txd, .tx_busy,
    .rt_valid, .rt_pc, .rt_ir, .rt_we, .rt_rd, .rt_data, .perf
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, mism = 0;
  longint n_jmp = 0, n_luse = 0, n_ret = 0, cycles = 0, n_cbr = 0, n_cbr_miss = 0, n_bmis = 0, n_stall = 0;
  logic [31:0] image [WORDS];
  logic [7:0]  exp_chars [$];
  logic [7:0]  got_chars [$];
  rv_iss       iss;
  bit          running = 0, done = 0;
  int          n_words;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  logic [4:0] prev_ld_rd = 0;

  // checks and statistics of one run, started when the core left reset
  task automatic end_of_run(input string how);
    string txt;
    wait (done);
    while (tx_busy) @(posedge clk);
    repeat (2 * CPB) @(posedge clk);
    txt = "";
    foreach (got_chars[i]) txt = {txt, string'(got_chars[i])};
    check(txt == "DHRYSTONE OK\n", $sformatf("%s: printed \"%s\"", how, txt));
    check(got_chars.size() == exp_chars.size(), "printed count differs from the model");
    foreach (exp_chars[i])
      if (i < got_chars.size()) check(got_chars[i] == exp_chars[i], "printed char differs");
    check(mism == 0, $sformatf("%s: %0d retired instructions differ from the model", how, mism));
    check(n_cbr > 0 && n_stall > 0 && n_bmis > 0, "mechanisms not exercised");
    check(n_stall == n_luse, "load-use stalls differ from the load-use pairs in the program");
    check(real'(n_ret) / real'(cycles) >= 0.80 && n_ret <= cycles,
          $sformatf("IPC %0.3f outside 0.80..1.0", real'(n_ret) / real'(cycles)));
    $display("Dhrystone, %s: instructions=%0d cycles=%0d IPC=%0.3f", how, n_ret, cycles,
             real'(n_ret) / real'(cycles));
    $display("  conditional branches=%0d prediction hit=%0d miss=%0d hit rate=%0.3f",
             n_cbr, n_cbr - n_cbr_miss, n_cbr_miss, real'(n_cbr - n_cbr_miss) / real'(n_cbr));
    $display("  branches and jumps=%0d prediction hit=%0d miss=%0d hit rate=%0.3f",
             n_cbr + n_jmp, n_cbr + n_jmp - n_bmis, n_bmis,
             real'(n_cbr + n_jmp - n_bmis) / real'(n_cbr + n_jmp));
    $display("  all flushes=%0d load-use stalls=%0d (load-use pairs in program order %0d)",
             n_bmis, n_stall, n_luse);
  endtask

  task automatic clear_counts();
    running = 0; done = 0; mism = 0; prev_ld_rd = 0;
    n_jmp = 0; n_luse = 0; n_ret = 0; cycles = 0; n_cbr = 0; n_cbr_miss = 0; n_bmis = 0;
    n_stall = 0;
    exp_chars.delete(); got_chars.delete();
  endtask

  // serial line driver: a queue of bits, each held for CPB clocks
  bit bit_q [$];
  int bit_left = 0;
  always @(posedge clk) begin
    if (bit_left > 1) bit_left <= bit_left - 1;
    else if (bit_q.size() != 0) begin
      rxd      <= bit_q.pop_front();
      bit_left <= CPB;
    end else begin
      rxd      <= 1'b1;
      bit_left <= 0;
    end
  end
  task automatic send_word(input logic [31:0] w);
    for (int i = 0; i < 4; i++) begin
      bit_q.push_back(1'b0);
      for (int b = 0; b < 8; b++) bit_q.push_back(w[8*i + b]);
      bit_q.push_back(1'b1);
    end
  endtask

  initial begin
    longint n_ret1;
    iss = new();
    foreach (image[i]) image[i] = 32'h0000_006f;   // unused words: jal x0, 0
    $readmemh("tb/dhrystone.hex", image);
    n_words = 0;
    foreach (image[i]) if (image[i] != 32'h0000_006f) n_words = i + 1;
    check(n_words > 100, "program image not read");

    // ---- run 1: image written through the load port while reset is held
    repeat (3) @(posedge clk);
    for (int i = 0; i < n_words; i++) begin
      ld_we   <= 1'b1;
      ld_addr <= 32'(i * 4);
      ld_data <= image[i];
      iss.ww(32'(i * 4), image[i]);
      @(posedge clk);
    end
    // the rest of memory reads as zero, as in the model (the benchmark copies
    // uninitialised structure padding)
    for (int i = n_words; i < 8192; i++) begin
      ld_we   <= 1'b1;
      ld_addr <= 32'(i * 4);
      ld_data <= 32'd0;
      @(posedge clk);
    end
    ld_we <= 1'b0;
    @(posedge clk);
    // registers are not reset: start the model from their contents
    for (int r = 1; r < 32; r++) iss.x[r] = dut.u_core.u_regfile.mem[r];
    rst <= 1'b0;
    running = 1;
    end_of_run("load port");
    n_ret1 = n_ret;

    // ---- run 2: the same image received over the serial line, as on the
    // board; the core must stay in reset until the last word is written
    clear_counts();
    @(posedge clk);
    rst <= 1'b1; boot_serial <= 1'b1;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    send_word(32'(n_words));
    for (int i = 0; i < n_words; i++) send_word(image[i]);
    @(posedge clk);
    wait (!dut.core_rst);
    check(bit_q.size() == 0, "core released before the image was received");
    for (int i = 0; i < n_words; i++)
      check(dut.u_imem.mem[i] == image[i] && dut.u_dmem.mem[i] == image[i],
            $sformatf("serial load: word %0d wrong", i));
    // the model starts from the memory and registers as the core finds them
    iss = new();
    for (int i = 0; i < 8192; i++) iss.ww(32'(i * 4), dut.u_dmem.mem[i]);
    for (int r = 1; r < 32; r++) iss.x[r] = dut.u_core.u_regfile.mem[r];
    running = 1;
    end_of_run("serial boot");
    check(n_ret == n_ret1, $sformatf("serial boot executed %0d instructions, load port %0d",
                                     n_ret, n_ret1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // nothing may retire while the serial image is being received
  always @(posedge clk) if (boot_serial && !running && rt_valid) check(0, "retire during the serial load");

  // does instruction ir read register r
  function automatic bit uses(input logic [31:0] ir, input logic [4:0] r);
    bit u1, u2;
    u1 = !(ir[6:0] inside {OP_LUI, OP_AUIPC, OP_JAL});
    u2 = ir[6:0] inside {OP_BRANCH, OP_STORE, OP_OP};
    return (u1 && ir[19:15] == r) || (u2 && ir[24:20] == r);
  endfunction

  // lockstep comparison with the instruction-set simulator
  always @(posedge clk) begin
    if (running && !done) begin
      cycles++;
      if (perf.stall) n_stall++;
      if (perf.bmis) begin
        n_bmis++;
        if (dut.u_core.ExMa_is_cbr) n_cbr_miss++;
      end
      if (rt_valid) begin
        bit ok;
        n_ret++;
        iss.step();
        ok = rt_pc == iss.s_pc && rt_ir == iss.s_ir &&
             (iss.s_rd >= 0 ? (rt_we && rt_rd == 5'(iss.s_rd) && rt_data == iss.s_wd) : !rt_we);
        if (!ok) begin
          mism++;
          if (mism < 10)
            $display("FAIL: pc %08x ir %08x x%0d=%08x, model pc %08x x%0d=%08x",
                     rt_pc, rt_ir, rt_rd, rt_data, iss.s_pc, iss.s_rd, iss.s_wd);
        end
        if (rt_ir[6:0] == OP_BRANCH) n_cbr++;
        if (rt_ir[6:0] inside {OP_JAL, OP_JALR}) n_jmp++;
        if (prev_ld_rd != 0 && uses(rt_ir, prev_ld_rd)) n_luse++;
        prev_ld_rd = (rt_ir[6:0] == OP_LOAD) ? rt_ir[11:7] : 5'd0;
        if (iss.s_store && iss.s_st_addr == TX_ADDR) exp_chars.push_back(iss.s_st_data[7:0]);
        // halt: a jump to itself
        if (rt_ir == 32'h0000_006f) done = 1;
      end
    end
  end

  // serial line decoder (8N1)
  initial begin
    forever begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      if (txd == 1'b0) begin
        logic [7:0] c;
        for (int b = 0; b < 8; b++) begin
          repeat (CPB) @(posedge clk);
          c[b] = txd;
        end
        repeat (CPB) @(posedge clk);
        got_chars.push_back(c);
      end
    end
  end

  // watchdog
  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
