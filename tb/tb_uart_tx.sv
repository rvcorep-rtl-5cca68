// tb_uart_tx: pushes a burst of characters into the transmit buffer
// faster than the line can send them, decodes the serial line, and checks
// the characters, their order, the start/stop bits and the bit time
// (CLKS_PER_BIT cycles per bit, 10 bits per character).
module tb_uart_tx;
  localparam int CPB = 16, DEPTH = 8;

  logic       clk = 0, rst = 1, we = 0, full, busy, txd;
  logic [7:0] wdata = 0;
  logic [7:0] sent [$], got [$];
  int checks = 0, failures = 0;
  longint t_first = -1, t_last = 0;

  uart_tx #(.CLKS_PER_BIT(CPB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string w);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", w);
    end
  endtask

  // decoder: samples each bit in its middle
  initial begin
    forever begin
      @(negedge txd);
      if (t_first < 0) t_first = $time;
      repeat (CPB / 2) @(posedge clk);
      chk(txd == 1'b0, "start bit");
      begin
        logic [7:0] c;
        for (int b = 0; b < 8; b++) begin
          repeat (CPB) @(posedge clk);
          c[b] = txd;
        end
        repeat (CPB) @(posedge clk);
        chk(txd == 1'b1, "stop bit");
        got.push_back(c);
        t_last = $time;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    chk(txd == 1'b1 && !busy, "idle line is high");
    // 30 characters, pushed whenever the buffer has room
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      while (full) @(negedge clk);
      we = 1; wdata = 8'($urandom); sent.push_back(wdata);
      @(negedge clk); we = 0;
    end
    wait (!busy);
    repeat (2 * CPB) @(posedge clk);
    chk(got.size() == sent.size(), $sformatf("received %0d of %0d", got.size(), sent.size()));
    foreach (sent[i]) if (i < got.size())
      chk(got[i] == sent[i], $sformatf("char %0d got %02x exp %02x", i, got[i], sent[i]));
    // back-to-back frames: 30 frames of 10 bits, measured from the first
    // falling edge to the middle of the last stop bit
    chk(t_last - t_first == longint'((30 * 10 - 1) * CPB * 10 + CPB / 2 * 10),
        $sformatf("line time %0d", t_last - t_first));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30 * 10 * CPB * 2) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
