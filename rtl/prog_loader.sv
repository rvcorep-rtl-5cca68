// prog_loader: loads a program image received over the serial line into
// the instruction and data memories of the RVCoreP system, and holds the
// processor in reset until the image is complete.
//
// The paper's FPGA system receives the same binary that the simulation
// reads, through the serial communication module; it does not describe the
// transfer. This design uses the simplest format that does the job:
//   4 bytes   N, the number of 32-bit words, least significant byte first
//   4N bytes  the words of the image from address 0, each least
//             significant byte first (the memory order of RV32I)
// Every completed word is written, for one cycle, through the same load
// port that the simulation uses (ld_we/ld_addr/ld_data), into both memories.
// Operation is chosen when rst is released: with boot_serial high the
// loader waits for the header and keeps busy high until the cycle after
// the last write (the core makes its first fetch in its last reset cycle,
// which therefore must not be a write cycle); with boot_serial low it is idle (the image was loaded through
// the external load port) and busy stays low. N = 0 ends at once.
// Interface: rx_valid/rx_data from uart_rx. Timing: single clock,
// synchronous active-high reset; ld_we is registered.
module prog_loader (
  input  logic        clk,
  input  logic        rst,
  input  logic        boot_serial,  // load over the serial line after reset
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  output logic        ld_we,        // write one word into both memories
  output logic [31:0] ld_addr,
  output logic [31:0] ld_data,
  output logic        busy          // image not complete: keep the core in reset
);

  typedef enum logic [1:0] {L_DONE, L_HDR, L_DATA} state_t;

  state_t      state;
  logic [1:0]  bcnt;      // byte within the current word
  logic [31:0] sh;        // word being assembled
  logic [31:0] left;      // words still to receive
  logic [31:0] word;
  logic        wr_tail;   // the cycle after a write

  // busy covers the last write and one more cycle: the core fetches its
  // first word in its last reset cycle, which must not be a write cycle
  assign busy = (state != L_DONE) || ld_we || wr_tail;
  assign word = {rx_data, sh[31:8]};

  always_ff @(posedge clk) begin
    ld_we <= 1'b0;
    if (rst) begin
      state   <= boot_serial ? L_HDR : L_DONE;
      bcnt    <= '0;
      ld_addr <= '0;
      ld_we   <= 1'b0;
    end else if (rx_valid && state != L_DONE) begin
      sh   <= word;
      bcnt <= bcnt + 2'd1;
      if (bcnt == 2'd3) begin
        if (state == L_HDR) begin
          left    <= word;
          ld_addr <= '0;
          state   <= (word == 32'd0) ? L_DONE : L_DATA;
        end else begin
          ld_we   <= 1'b1;
          ld_data <= word;
          left    <= left - 32'd1;
          if (left == 32'd1) state <= L_DONE;
        end
      end
    end
    // advance the address after each write
    if (!rst && ld_we) ld_addr <= ld_addr + 32'd4;
    wr_tail <= !rst && ld_we;
  end

endmodule
