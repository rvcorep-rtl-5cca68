// tb_align_extend: checks the one-hot/XOR load align and extend unit
// against a reference written with shifts, for every load type, every
// byte offset and random data.
module tb_align_extend;
  import rvcorep_pkg::*;

  logic [31:0] d_in, rslt, w;
  logic [1:0]  addr_lo;
  ld_ctrl_t    ld_ctrl;
  int checks = 0, failures = 0;

  align_extend dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] exp;
      d_in = $urandom;
      if (n % 5 == 0) d_in = d_in | 32'h8080_8080;
      for (int off = 0; off < 4; off++) begin
        addr_lo = 2'(off);
        w = d_in >> (8 * off);
        for (int op = 0; op <= LD_N; op++) begin
          ld_ctrl = (op == LD_N) ? '0 : ld_ctrl_t'(1) << op;
          case (op)
            LD_LB:  exp = {{24{w[7]}}, w[7:0]};
            LD_LBU: exp = {24'd0, w[7:0]};
            LD_LH:  exp = (off[1] ? {{16{d_in[31]}}, d_in[31:16]} : {{16{d_in[15]}}, d_in[15:0]});
            LD_LHU: exp = (off[1] ? {16'd0, d_in[31:16]} : {16'd0, d_in[15:0]});
            LD_LW:  exp = d_in;
            default: exp = 0;
          endcase
          #1;
          checks++;
          if (rslt !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL op %0d off %0d d=%08x got %08x exp %08x", op, off, d_in, rslt, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
