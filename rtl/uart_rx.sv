// uart_rx: RS-232C serial receiver (8N1), the receive side of the serial
// communication module through which the RVCoreP system takes its program
// binary on the FPGA board.
//
// How it works: rxd is synchronised with two flip-flops. A falling edge in
// the idle state starts a frame; the start bit is checked half a bit time
// later, then each of the eight data bits (LSB first) is sampled one full
// bit time after the previous sample, i.e. in the middle of the bit. The
// stop bit is sampled the same way; the byte is delivered only if it is 1
// (a frame with a broken stop bit is dropped).
// The paper only says that the binary is received through the serial
// module; the frame format and bit time are this design's choices and match
// uart_tx.
// Interface: valid is a one-cycle pulse with the received byte on data.
// Timing: single clock, synchronous active-high reset; valid comes about
// 9.5 bit times after the falling edge of the start bit.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 100
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,     // serial line, idle high
  output logic       valid,   // byte received (one cycle)
  output logic [7:0] data
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;

  state_t      state;
  logic        rx_m, rx;              // synchroniser
  logic [31:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_m  <= 1'b1;
      rx    <= 1'b1;
      state <= S_IDLE;
      cnt   <= '0;
      bitn  <= '0;
      valid <= 1'b0;
    end else begin
      rx_m  <= rxd;
      rx    <= rx_m;
      valid <= 1'b0;
      case (state)
        S_IDLE:
          if (!rx) begin
            state <= S_START;
            cnt   <= '0;
          end
        S_START:
          if (cnt == 32'(CLKS_PER_BIT / 2 - 1)) begin
            cnt   <= '0;
            bitn  <= '0;
            state <= rx ? S_IDLE : S_DATA;   // a glitch is not a start bit
          end else cnt <= cnt + 1;
        S_DATA:
          if (cnt == 32'(CLKS_PER_BIT - 1)) begin
            cnt <= '0;
            sh  <= {rx, sh[7:1]};
            if (bitn == 3'd7) state <= S_STOP;
            bitn <= bitn + 3'd1;
          end else cnt <= cnt + 1;
        default:   // S_STOP
          if (cnt == 32'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            valid <= rx;
            data  <= sh;
            state <= S_IDLE;
          end else cnt <= cnt + 1;
      endcase
    end
  end

endmodule
