// tb_prog_loader: checks the serial program loader together with the
// serial receiver (uart_rx) that feeds it, at a short bit time.
//
// The testbench drives rxd with 8N1 frames (LSB first, CLKS_PER_BIT clocks
// per bit) carrying a word count and random image words, and compares every
// write on the load port with the image: one write per word, in order, at
// addresses 0, 4, 8, ..., with the word assembled least significant byte
// first. It checks that busy covers every write including the last, stays
// high one cycle more (the core's first fetch happens in that cycle) and
// then falls, that boot_serial low leaves the loader idle, that a
// zero word count ends the load at once, that a low glitch shorter than half
// a bit is not taken as a start bit, and that a frame whose stop bit is 0
// is dropped.
module tb_prog_loader;

  localparam int CPB = 16;

  logic        clk = 0, rst = 1, boot_serial = 1, rxd = 1;
  logic        rx_valid, ld_we, busy;
  logic [7:0]  rx_data;
  logic [31:0] ld_addr, ld_data;

  uart_rx #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rst, .rxd, .valid(rx_valid), .data(rx_data));
  prog_loader dut (.clk, .rst, .boot_serial, .rx_valid, .rx_data, .ld_we, .ld_addr, .ld_data,
                   .busy);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // line driver: plays a queue of (level, length in clocks) segments, so
  // every bit lasts exactly its number of clocks
  int unsigned seg_q [$];                  // {level, 16-bit length}
  int          seg_left = 0;
  always @(posedge clk) begin
    if (seg_left > 1) seg_left <= seg_left - 1;
    else if (seg_q.size() != 0) begin
      int unsigned s;
      s = seg_q.pop_front();
      rxd      <= s[16];
      seg_left <= int'(s[15:0]);
    end else begin
      rxd      <= 1'b1;
      seg_left <= 0;
    end
  end
  task automatic seg(input bit level, input int len);
    seg_q.push_back({15'd0, level, 16'(len)});
  endtask
  task automatic send_byte(input logic [7:0] b, input bit stop = 1'b1);
    seg(1'b0, CPB);
    for (int i = 0; i < 8; i++) seg(b[i], CPB);
    seg(stop, CPB);
    if (!stop) seg(1'b1, 2 * CPB);
  endtask
  task automatic send_word(input logic [31:0] w);
    for (int i = 0; i < 4; i++) send_byte(w[8*i +: 8]);
  endtask
  // wait until the line has been played out and is idle
  task automatic drain();
    while (seg_q.size() != 0 || seg_left > 1) @(posedge clk);
    repeat (CPB) @(posedge clk);
  endtask

  // monitor: every write against the expected image
  logic [31:0] img [$];
  int          n_wr = 0;
  int          after_last = 0;   // cycles since the last write
  always @(posedge clk) begin
    if (!rst && ld_we) begin
      check(busy, "busy low during a write");
      check(n_wr < img.size(), "more writes than words");
      if (n_wr < img.size())
        check(ld_addr == 32'(n_wr * 4) && ld_data == img[n_wr],
              $sformatf("write %0d: [%08x]=%08x exp [%08x]=%08x", n_wr, ld_addr, ld_data,
                        n_wr * 4, img[n_wr]));
      n_wr++;
      after_last = (n_wr == img.size()) ? 1 : 0;
    end else if (after_last == 1) begin
      check(busy, "busy must stay high in the cycle after the last write");
      after_last = 2;
    end else if (after_last == 2) begin
      check(!busy, "busy must fall one cycle after the last write");
      after_last = 0;
    end
  end

  task automatic do_reset(input bit serial);
    @(posedge clk);
    rst <= 1'b1; boot_serial <= serial;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    // ---- a 40-word image
    img.delete(); n_wr = 0;
    for (int i = 0; i < 40; i++) img.push_back($urandom);
    do_reset(1'b1);
    check(busy, "busy after reset with boot_serial");
    send_word(32'd40);
    foreach (img[i]) begin
      send_word(img[i]);
      drain();
      if (i < 39) check(busy, "busy while the image is incomplete");
    end
    repeat (5) @(posedge clk);
    check(n_wr == 40, $sformatf("%0d writes, exp 40", n_wr));
    check(!busy, "busy after the image");

    // ---- boot_serial low: idle
    img.delete(); n_wr = 0;
    do_reset(1'b0);
    check(!busy, "busy without boot_serial");
    send_word(32'd3);
    send_word(32'h1234_5678);
    drain();
    repeat (5) @(posedge clk);
    check(n_wr == 0, "writes without boot_serial");

    // ---- zero word count
    do_reset(1'b1);
    send_word(32'd0);
    drain();
    repeat (5) @(posedge clk);
    check(!busy && n_wr == 0, "zero word count must end the load");

    // ---- glitch and broken stop bit are ignored
    img.delete(); n_wr = 0;
    img.push_back(32'hcafe_f00d);
    do_reset(1'b1);
    seg(1'b0, CPB / 4);                // glitch: shorter than half a bit
    seg(1'b1, 2 * CPB);
    send_byte(8'h55, 1'b0);            // framing error: dropped
    send_word(32'd1);
    send_word(32'hcafe_f00d);
    drain();
    repeat (5) @(posedge clk);
    check(n_wr == 1 && !busy, "glitch or framing error was taken as data");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
