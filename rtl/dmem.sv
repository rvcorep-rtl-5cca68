// dmem: the data memory of RVCoreP (m_dmem), one block-RAM port with byte
// write enables.
//
// The Ex stage presents the effective address (D_ADDR) at the clock edge
// that moves the load or store into the Ma stage; a load's word is then
// available as rdata (D_IN) during Ma, where align_extend picks the bytes.
// A store writes the lanes selected by be; the data must already be placed
// in its byte lanes (the core replicates the byte or halfword).
// Size: 32 KB by default (the paper's benchmark simulation size; 4 KB on its
// FPGA). Addresses wrap modulo the memory size.
// Timing: posedge clk, read-first (a load never shares a cycle with a store
// in this single-port use).
module dmem #(
  parameter int unsigned BYTES = 32768,
  localparam int unsigned AW = $clog2(BYTES / 4)
) (
  input  logic        clk,
  input  logic [31:0] addr,   // byte address, bits [1:0] ignored
  input  logic [3:0]  be,     // byte write enables
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);

  logic [31:0] mem [BYTES / 4];

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++)
      if (be[i]) mem[addr[AW+1:2]][8*i +: 8] <= wdata[8*i +: 8];
    rdata <= mem[addr[AW+1:2]];
  end

endmodule
