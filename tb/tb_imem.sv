// tb_imem: writes random words to the instruction memory and reads them
// back, checking the one-cycle read latency and read-before-write on a
// simultaneous write.
module tb_imem;
  logic        clk = 0, we;
  logic [31:0] addr, wdata, rdata;
  logic [31:0] model [1024];
  int checks = 0, failures = 0;

  imem #(.BYTES(4096)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; addr = 32'(i * 4); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 4000; n++) begin
      int a;
      logic [31:0] exp;
      @(negedge clk);
      a = $urandom_range(0, 1023);
      addr = 32'(a * 4) | 32'($urandom_range(0, 3));
      we = (n % 7 == 0); wdata = $urandom;
      exp = model[a];
      @(posedge clk);
      if (we) model[a] = wdata;
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL addr %08x got %08x exp %08x", addr, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
