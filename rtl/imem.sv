// imem: the instruction memory of RVCoreP (m_imem), one block-RAM port.
//
// A word-wide memory with a registered (synchronous) read, as block RAM on
// an FPGA provides. The core presents the next PC (w_npc) as the address, so
// the instruction appears on rdata in the following cycle, together with the
// PC register that latched the same address. The write port is used only to
// load the program before the core leaves reset (this design's choice; the
// paper loads the binary either in simulation or over a serial link but does
// not describe the port).
// Size: 32 KB by default, the size the paper uses for benchmark simulation
// (its FPGA build uses 4 KB). Addresses wrap modulo the memory size.
// Timing: read and write at posedge clk; read returns the old word on a
// simultaneous write.
module imem #(
  parameter int unsigned BYTES = 32768,
  localparam int unsigned AW = $clog2(BYTES / 4)
) (
  input  logic        clk,
  input  logic [31:0] addr,   // byte address, bits [1:0] ignored
  input  logic        we,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);

  logic [31:0] mem [BYTES / 4];

  always_ff @(posedge clk) begin
    if (we) mem[addr[AW+1:2]] <= wdata;
    rdata <= mem[addr[AW+1:2]];
  end

endmodule
