// regfile: the 32 x 32-bit integer register file of RVCoreP.
//
// Two read ports are read asynchronously, as the paper states (on an FPGA
// this maps to distributed LUT RAM). One write port is written at the rising
// clock edge from the Wb stage. Register x0 always reads as zero and is never
// written.
// Write-through: when the Wb stage writes the register that the Id stage is
// reading in the same cycle, the read port returns the value being written.
// The paper's two forwarding paths (Ma->Ex and Wb->Ex) do not cover an
// instruction that is three positions behind its producer, so this bypass is
// this design's own choice to make that case correct.
// Timing: reads combinational, write at posedge clk. No reset: the register
// contents are undefined until written, as in RV32I.
module regfile (
  input  logic        clk,
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);

  logic [31:0] mem [1:31];

  always_ff @(posedge clk)
    if (we && wa != 5'd0) mem[wa] <= wd;

  always_comb begin
    if (ra1 == 5'd0)             rd1 = 32'd0;
    else if (we && wa == ra1)    rd1 = wd;
    else                         rd1 = mem[ra1];
    if (ra2 == 5'd0)             rd2 = 32'd0;
    else if (we && wa == ra2)    rd2 = wd;
    else                         rd2 = mem[ra2];
  end

endmodule
