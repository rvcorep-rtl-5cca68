// align_extend: load-data alignment and sign/zero extension of RVCoreP
// (the align/extend unit of the Ma stage), in its optimized form.
//
// How it works: the 32-bit word read from the data memory is shifted right
// by 0, 8, 16 or 24 bits according to the low address bits (byte) or by 0
// or 16 bits (halfword) with small multiplexers. The five candidate results
// (LB, LH, LW, LBU, LHU) are then formed in parallel, each gated by its bit
// of the one-hot control word ld_ctrl, and XORed together. The paper applies
// the same one-hot/XOR scheme it uses for the ALU to this unit; that is
// followed here. The candidate set and the bit order are this design's own.
//
// Interface: d_in is the memory word, addr_lo the byte offset of the load,
// ld_ctrl the one-hot load type (all zero gives 0).
// Timing: combinational, in the Ma stage between the block RAM output and
// the MaWb pipeline register. Misaligned accesses are not detected; a
// halfword load uses addr_lo[1] only.
module align_extend
  import rvcorep_pkg::*;
(
  input  logic [31:0] d_in,
  input  logic [1:0]  addr_lo,
  input  ld_ctrl_t    ld_ctrl,
  output logic [31:0] rslt
);

  logic [7:0]  byte_v;
  logic [15:0] half_v;

  always_comb begin
    // alignment: small multiplexers on the address offset
    unique case (addr_lo)
      2'd0: byte_v = d_in[7:0];
      2'd1: byte_v = d_in[15:8];
      2'd2: byte_v = d_in[23:16];
      default: byte_v = d_in[31:24];
    endcase
    half_v = addr_lo[1] ? d_in[31:16] : d_in[15:0];

    // extension and gated-XOR selection
    rslt = ({{24{byte_v[7]}},  byte_v} & {32{ld_ctrl[LD_LB]}})
         ^ ({{16{half_v[15]}}, half_v} & {32{ld_ctrl[LD_LH]}})
         ^ (d_in                       & {32{ld_ctrl[LD_LW]}})
         ^ ({24'd0,            byte_v} & {32{ld_ctrl[LD_LBU]}})
         ^ ({16'd0,            half_v} & {32{ld_ctrl[LD_LHU]}});
  end

endmodule
