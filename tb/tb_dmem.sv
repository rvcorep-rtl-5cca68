// tb_dmem: random byte-enabled writes and reads of the data memory against
// a byte-array model, checking the one-cycle read latency and that only the
// enabled byte lanes change.
module tb_dmem;
  logic        clk = 0;
  logic [3:0]  be;
  logic [31:0] addr, wdata, rdata;
  logic [7:0]  model [4096];
  int checks = 0, failures = 0;

  dmem #(.BYTES(4096)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); be = 4'hf; addr = 32'(i * 4); wdata = $urandom;
      for (int b = 0; b < 4; b++) model[i * 4 + b] = wdata[8*b +: 8];
    end
    for (int n = 0; n < 6000; n++) begin
      int a;
      logic [31:0] exp;
      @(negedge clk);
      a = $urandom_range(0, 1023);
      addr = 32'(a * 4);
      be = (n % 2 == 0) ? 4'($urandom) : 4'h0;
      wdata = $urandom;
      for (int b = 0; b < 4; b++) exp[8*b +: 8] = model[a * 4 + b];
      @(posedge clk);
      for (int b = 0; b < 4; b++) if (be[b]) model[a * 4 + b] = wdata[8*b +: 8];
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL addr %08x got %08x exp %08x", addr, rdata, exp);
      end
    end
    // read everything back
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); be = 0; addr = 32'(i * 4);
      @(posedge clk); #1;
      checks++;
      if (rdata !== {model[i*4+3], model[i*4+2], model[i*4+1], model[i*4]}) failures++;
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
