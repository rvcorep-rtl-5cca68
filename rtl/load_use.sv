// load_use: the If-stage load-use dependency detector of RVCoreP (the
// Load-use block).
//
// The paper moves load-use detection from the Id stage to the If stage:
// while a load sits in the Id stage (IfId register), the instruction just
// fetched is partially decoded (decoder_if) and its source registers are
// compared with the load's destination. The result (IfId_luse) is registered
// with the fetched instruction; one cycle later, when the load is in Ex and
// the dependent instruction in Id, that registered bit is the stall signal:
// the core inserts a bubble into IdEx and holds the If and Id stages for one
// cycle (a one-cycle penalty, Fig. 5(b) of the paper).
// Only sources that the instruction really reads are compared, and a load
// to x0 never matches (this design's choice).
// Timing: combinational.
module load_use
  import rvcorep_pkg::*;
(
  input  logic       id_valid,    // Id stage holds a live instruction
  input  logic       id_is_load,  // ... which is a load
  input  logic [4:0] id_rd,       // ... with this destination
  input  if_dec_t    if_dec,      // partial decode of the If instruction
  output logic       luse
);

  always_comb begin
    luse = id_valid && id_is_load && (id_rd != 5'd0) &&
           ((if_dec.use_rs1 && if_dec.rs1 == id_rd) ||
            (if_dec.use_rs2 && if_dec.rs2 == id_rd));
  end

endmodule
