// decoder_if: the partial instruction decoder that RVCoreP places in the
// If stage.
//
// It decodes only what hazard detection needs, straight from the fetched
// instruction word: the two source register numbers, the destination
// register number, whether each source is really read, and the write enables
// of the register file and the data memory. Having these one stage early lets
// the load-use check (load_use) and the forwarding selection be computed a
// cycle in advance, which is the paper's point. The paper names the outputs
// (rs1, rs2, rd, register-file and data-memory write signals); the extra
// use_rs1/use_rs2/is_load flags are this design's own, so that an immediate
// field that happens to look like a register number never causes a stall.
// Timing: combinational. Unknown opcodes decode as "no effect".
module decoder_if
  import rvcorep_pkg::*;
(
  input  logic [31:0] ir,
  output if_dec_t     dec
);

  logic [6:0] op;

  always_comb begin
    op = ir[6:0];
    dec.rs1 = ir[19:15];
    dec.rs2 = ir[24:20];
    dec.rd  = ir[11:7];
    dec.use_rs1 = (op == OP_JALR) || (op == OP_BRANCH) || (op == OP_LOAD) ||
                  (op == OP_STORE) || (op == OP_IMM) || (op == OP_OP);
    dec.use_rs2 = (op == OP_BRANCH) || (op == OP_STORE) || (op == OP_OP);
    dec.rf_we   = ((op == OP_LUI) || (op == OP_AUIPC) || (op == OP_JAL) ||
                   (op == OP_JALR) || (op == OP_LOAD) || (op == OP_IMM) ||
                   (op == OP_OP)) && (ir[11:7] != 5'd0);
    dec.dm_we   = (op == OP_STORE);
    dec.is_load = (op == OP_LOAD);
  end

endmodule
