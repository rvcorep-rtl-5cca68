// tb_rvcorep_system: end-to-end test of the RVCoreP evaluation system at
// its default sizes (32 KB memories, 8,192-entry PHT, 512-entry BTB).
//
// A test program is assembled here, loaded through the load port into both
// memories while reset is held, and run. An independent RV32I instruction-
// set simulator (rv_tb_pkg::rv_iss) runs in lockstep with the retire trace:
// PC, instruction word, destination register and written value of every
// retired instruction are compared. The characters the program prints are
// decoded from the serial line and compared with the simulator's stores to
// the transmit address. The program contains a fill loop, a load-use
// summation loop, a loop with data-dependent branches (mispredictions), a
// call/return pair, byte/halfword stores and loads, and a block of random
// dependent ALU instructions; the test counts each pipeline mechanism
// (load-use stall, misprediction flush, predicted-taken fetch, Ma->Ex and
// Wb->Ex forwarding, serial output) and fails if one never happened.
// A second phase resets the system with boot_serial high, sends a small
// program over the serial receive line (word count, then the words) and
// checks that the core stays in reset until the image is complete and that
// the program then prints its text.
module tb_rvcorep_system;
  import rvcorep_pkg::*;
  import rv_tb_pkg::*;

  localparam int          CPB     = 100;            // the top's default bit time
  localparam logic [31:0] TX_ADDR = 32'h4000_0000;  // the top's default

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

  int checks = 0, failures = 0;
  int n_stall = 0, n_bmis = 0, n_ptkn = 0, n_phit = 0, n_fma = 0, n_fwb = 0;
  int n_ret = 0, cycles = 0, n_serial_words = 0;

  // send one byte on rxd (8N1, LSB first)
  task automatic send_byte(input logic [7:0] b);
    rxd <= 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rxd <= b[i];
      repeat (CPB) @(posedge clk);
    end
    rxd <= 1'b1;
    repeat (CPB) @(posedge clk);
  endtask
  task automatic send_word(input logic [31:0] w);
    for (int i = 0; i < 4; i++) send_byte(w[8*i +: 8]);
  endtask
  logic [31:0] prog [$];
  logic [7:0]  exp_chars [$];
  logic [7:0]  got_chars [$];
  logic [31:0] halt_pc;
  rv_iss       iss;
  bit          running = 0, done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int here(); return prog.size(); endfunction
  function automatic int boff(int target); return (target - prog.size()) * 4; endfunction

  // ------------------------------------------------------ test program
  task automatic build_program();
    int l1, l2, l3, f1, f2, fcall, func, lp, fx;
    prog.delete();
    prog.push_back(LUI(1, 32'h40000));          // x1 = TX_ADDR
    prog.push_back(LUI(2, 32'h2));              // x2 = 0x2000 data base
    prog.push_back(ADDI(3, 0, 0));
    prog.push_back(ADDI(4, 0, 50));             // N = 50
    prog.push_back(ADDI(5, 0, 0));
    for (int r = 12; r < 22; r++) prog.push_back(ADDI(r, 0, r * 37 - 300));
    // fill a[i] = 3*i - 7
    prog.push_back(ADDI(6, 2, 0));
    prog.push_back(ADDI(7, 0, -7));
    l1 = here();
    prog.push_back(SW(7, 6, 0));
    prog.push_back(ADDI(7, 7, 3));
    prog.push_back(ADDI(6, 6, 4));
    prog.push_back(ADDI(3, 3, 1));
    prog.push_back(BNE(3, 4, boff(l1)));
    // sum with a load-use dependency
    prog.push_back(ADDI(6, 2, 0));
    prog.push_back(ADDI(3, 0, 0));
    l2 = here();
    prog.push_back(LW(8, 6, 0));
    prog.push_back(ADD(5, 5, 8));
    prog.push_back(ADDI(6, 6, 4));
    prog.push_back(ADDI(3, 3, 1));
    prog.push_back(BLT(3, 4, boff(l2)));
    // data-dependent branches
    prog.push_back(ADDI(6, 2, 0));
    prog.push_back(ADDI(3, 0, 0));
    prog.push_back(ADDI(9, 0, 0));
    l3 = here();
    prog.push_back(LB(8, 6, 0));
    prog.push_back(ANDI(10, 3, 1));
    f1 = here(); prog.push_back(0);
    prog.push_back(ADDI(9, 9, 1));
    prog[f1] = BEQ(10, 0, (here() - f1) * 4);
    prog.push_back(LHU(11, 6, 2));
    prog.push_back(XOR(9, 9, 11));
    f2 = here(); prog.push_back(0);
    prog.push_back(SUB(9, 9, 8));
    prog[f2] = BGE(8, 0, (here() - f2) * 4);
    prog.push_back(ADDI(6, 6, 4));
    prog.push_back(ADDI(3, 3, 1));
    prog.push_back(BNE(3, 4, boff(l3)));
    // call a function through JAL, return through JALR
    fcall = here(); prog.push_back(0);
    // random dependent ALU block (forwarding from Ma and Wb)
    for (int i = 0; i < 120; i++) begin
      int rd, ra, rb, k;
      rd = 12 + $urandom_range(0, 7);
      ra = 12 + $urandom_range(0, 7);
      rb = 12 + $urandom_range(0, 7);
      k  = $urandom_range(0, 15);
      case (k)
        0: prog.push_back(ADD(rd, ra, rb));
        1: prog.push_back(SUB(rd, ra, rb));
        2: prog.push_back(SLL(rd, ra, rb));
        3: prog.push_back(SLT(rd, ra, rb));
        4: prog.push_back(SLTU(rd, ra, rb));
        5: prog.push_back(XOR(rd, ra, rb));
        6: prog.push_back(SRL(rd, ra, rb));
        7: prog.push_back(SRA(rd, ra, rb));
        8: prog.push_back(OR(rd, ra, rb));
        9: prog.push_back(AND(rd, ra, rb));
        10: prog.push_back(ADDI(rd, ra, $urandom_range(0, 4095) - 2048));
        11: prog.push_back(XORI(rd, ra, $urandom_range(0, 4095) - 2048));
        12: prog.push_back(SRAI(rd, ra, $urandom_range(0, 31)));
        13: prog.push_back(LUI(rd, $urandom));
        14: prog.push_back(AUIPC(rd, $urandom_range(0, 1023)));
        default: prog.push_back(SLTIU(rd, ra, $urandom_range(0, 4095) - 2048));
      endcase
    end
    // byte/halfword stores, then print the message "RVCoreP\n" from memory
    prog.push_back(ADDI(6, 2, 512));            // x6 = 0x2200
    begin
      string msg = "RVCoreP\n";
      for (int i = 0; i < msg.len(); i++) begin
        prog.push_back(ADDI(12, 0, int'(msg[i])));
        prog.push_back(SB(12, 6, i));
      end
      prog.push_back(ADDI(13, 0, msg.len()));
    end
    prog.push_back(SH(9, 6, 16));
    prog.push_back(LH(14, 6, 16));
    prog.push_back(ADD(15, 14, 5));
    prog.push_back(ADDI(3, 0, 0));
    lp = here();
    prog.push_back(ADD(16, 6, 3));
    prog.push_back(LBU(17, 16, 0));
    prog.push_back(SB(17, 1, 0));               // to the serial transmitter
    prog.push_back(ADDI(3, 3, 1));
    prog.push_back(BNE(3, 13, boff(lp)));
    prog.push_back(SW(5, 2, 1024));             // results to memory
    prog.push_back(SW(9, 2, 1028));
    halt_pc = here() * 4;
    prog.push_back(JAL(0, 0));                  // halt: jump to self
    // the function: x20 = x5 + x9, returns
    func = here();
    prog.push_back(ADD(20, 5, 9));
    prog.push_back(SLTI(21, 20, 100));
    prog.push_back(JALR(0, 31, 0));
    prog[fcall] = JAL(31, (func - fcall) * 4);
    fx = fcall;
    if (fx < 0) $display("unreachable");
  endtask

  // --------------------------------------------------------- stimulus
  initial begin
    iss = new();
    build_program();
    // load
    repeat (3) @(posedge clk);
    foreach (prog[i]) begin
      ld_we   <= 1'b1;
      ld_addr <= 32'(i * 4);
      ld_data <= prog[i];
      iss.ww(32'(i * 4), prog[i]);
      @(posedge clk);
    end
    ld_we <= 1'b0;
    @(posedge clk);
    rst <= 1'b0;
    running = 1;
    wait (done);
    // let the serial line drain
    while (tx_busy) @(posedge clk);
    repeat (2 * CPB) @(posedge clk);
    check(got_chars.size() == exp_chars.size(),
          $sformatf("printed %0d chars, expected %0d", got_chars.size(), exp_chars.size()));
    foreach (exp_chars[i])
      if (i < got_chars.size())
        check(got_chars[i] == exp_chars[i],
              $sformatf("char %0d: got %02x exp %02x", i, got_chars[i], exp_chars[i]));
    // every mechanism must have happened
    check(n_stall > 0, "no load-use stall");
    check(n_bmis  > 0, "no misprediction flush");
    check(n_ptkn  > 0, "no predicted-taken fetch");
    check(n_phit  > 0, "no BTB hit");
    check(n_fma   > 0, "no Ma->Ex forwarding");
    check(n_fwb   > 0, "no Wb->Ex forwarding");
    check(got_chars.size() > 0, "no serial output");
    // ---------------------------------------- phase 2: boot over the serial line
    begin
      logic [31:0] sp [$];
      string       msg2 = "SERIAL\n";
      string       txt;
      int          ret_while_loading = 0;
      logic [31:0] first_pc = '1, first_ir = '0;
      sp.push_back(LUI(1, 32'h40000));
      for (int i = 0; i < msg2.len(); i++) begin
        sp.push_back(ADDI(2, 0, int'(msg2[i])));
        sp.push_back(SB(2, 1, 0));
      end
      sp.push_back(JAL(0, 0));
      got_chars.delete();
      @(posedge clk);
      rst <= 1'b1; boot_serial <= 1'b1;
      repeat (3) @(posedge clk);
      rst <= 1'b0;
      fork
        begin
          send_word(32'(sp.size()));
          foreach (sp[i]) send_word(sp[i]);
        end
        // the core must stay in reset until the image is complete
        begin
          while (dut.u_loader.busy || ret_while_loading < 0) begin
            @(posedge clk);
            if (rt_valid) ret_while_loading++;
          end
          while (!rt_valid) @(posedge clk);
          first_pc = rt_pc;
          first_ir = rt_ir;
        end
      join
      n_serial_words = sp.size();
      check(ret_while_loading == 0, "instructions retired while the image was loading");
      // the first instruction must be the image's first word
      check(first_pc == 32'd0 && first_ir == sp[0],
            $sformatf("first instruction after the serial boot: pc %08x ir %08x", first_pc,
                      first_ir));
      repeat (20) @(posedge clk);
      while (tx_busy) @(posedge clk);
      repeat (2 * CPB) @(posedge clk);
      txt = "";
      foreach (got_chars[i]) txt = {txt, string'(got_chars[i])};
      check(txt == msg2, $sformatf("serial boot printed \"%s\"", txt));
      check(n_serial_words > 0, "no serial program load");
    end
    $display("retired=%0d cycles=%0d IPC=%0.3f stalls=%0d mispredictions=%0d predicted-taken=%0d btb-hits=%0d fwd-Ma=%0d fwd-Wb=%0d chars=%0d serial-boot-words=%0d",
             n_ret, cycles, real'(n_ret) / real'(cycles), n_stall, n_bmis, n_ptkn, n_phit,
             n_fma, n_fwb, got_chars.size(), n_serial_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ lockstep comparison
  always @(posedge clk) begin
    if (running && !done) begin
      cycles++;
      if (perf.stall)      n_stall++;
      if (perf.bmis)       n_bmis++;
      if (perf.pred_taken) n_ptkn++;
      if (perf.pred_hit)   n_phit++;
      if (perf.fwd_ma)     n_fma++;
      if (perf.fwd_wb)     n_fwb++;
      if (rt_valid) begin
        n_ret++;
        iss.step();
        check(rt_pc == iss.s_pc, $sformatf("retire pc %08x exp %08x", rt_pc, iss.s_pc));
        check(rt_ir == iss.s_ir, $sformatf("pc %08x ir %08x exp %08x", rt_pc, rt_ir, iss.s_ir));
        if (iss.s_rd >= 0)
          check(rt_we && rt_rd == 5'(iss.s_rd) && rt_data == iss.s_wd,
                $sformatf("pc %08x: x%0d=%08x (we=%0b) exp x%0d=%08x", rt_pc, rt_rd, rt_data,
                          rt_we, iss.s_rd, iss.s_wd));
        else
          check(!rt_we, $sformatf("pc %08x: unexpected write x%0d", rt_pc, rt_rd));
        if (iss.s_store && iss.s_st_addr == TX_ADDR) exp_chars.push_back(iss.s_st_data[7:0]);
        if (rt_pc == halt_pc) done = 1;

      end
    end
  end

  // ------------------------------------------- serial line decoder (8N1)
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
        check(txd == 1'b1, "serial stop bit");
        got_chars.push_back(c);
      end
    end
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
