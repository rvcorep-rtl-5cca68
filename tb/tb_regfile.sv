// tb_regfile: random writes and reads of the 32 x 32 register file against
// a model array; checks that x0 reads zero, that reads are combinational,
// and that a read of the register being written returns the new value.
module tb_regfile;
  logic        clk = 0;
  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        we;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string w);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %08x exp %08x", w, got, exp);
    end
  endtask

  initial begin
    we = 0; ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    // fill every register
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we = 1; wa = 5'(r); wd = $urandom; model[r] = (r == 0) ? 0 : wd;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = (n % 3 == 0) ? wa : 5'($urandom);
      #1;
      chk(rd1, (we && wa == ra1 && ra1 != 0) ? wd : model[ra1], "rd1");
      chk(rd2, (we && wa == ra2 && ra2 != 0) ? wd : model[ra2], "rd2");
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
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
