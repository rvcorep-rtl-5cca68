// tb_load_use: exhaustive check of the If-stage load-use detector over
// the destination of the Id-stage load and the two sources of the If-stage
// instruction, with random validity and use flags.
module tb_load_use;
  import rvcorep_pkg::*;

  logic       id_valid, id_is_load, luse;
  logic [4:0] id_rd;
  if_dec_t    if_dec;
  int checks = 0, failures = 0;

  load_use dut (.*);

  initial begin
    for (int rd = 0; rd < 32; rd++)
      for (int rs1 = 0; rs1 < 32; rs1++)
        for (int k = 0; k < 8; k++) begin
          logic exp;
          id_rd = 5'(rd);
          if_dec = if_dec_t'($urandom);
          if_dec.rs1 = 5'(rs1);
          if_dec.rs2 = (k == 3) ? 5'(rd) : 5'($urandom);
          id_valid = $urandom_range(0, 3) != 0;
          id_is_load = $urandom_range(0, 3) != 0;
          #1;
          exp = id_valid && id_is_load && rd != 0 &&
                ((if_dec.use_rs1 && rs1 == rd) || (if_dec.use_rs2 && if_dec.rs2 == 5'(rd)));
          checks++;
          if (luse !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL rd=%0d rs1=%0d rs2=%0d got %0b", rd, rs1, if_dec.rs2, luse);
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
