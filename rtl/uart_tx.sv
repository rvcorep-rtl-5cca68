// uart_tx: RS-232C serial transmitter with a communication buffer, the
// output side of the system in which RVCoreP is evaluated.
//
// The processor writes characters into a FIFO (the communication buffer);
// the transmitter takes them out one at a time and sends each as an 8N1
// frame on txd: one start bit (0), eight data bits LSB first, one stop bit
// (1), each bit CLKS_PER_BIT clock cycles long. txd idles high.
// The paper only names these modules (serial communication with a buffer);
// the frame format, the buffer depth, the bit time and the drop-when-full
// behaviour are this design's own choices.
// Interface: we/wdata push a character (ignored when full is high);
// busy is high while a frame is being sent or the buffer is not empty.
// Timing: single clock, synchronous active-high reset.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 100,
  parameter int unsigned DEPTH        = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       we,
  input  logic [7:0] wdata,
  output logic       full,
  output logic       busy,
  output logic       txd
);

  // ------------------------------------------------ communication buffer
  logic [7:0]  buf_q [DEPTH];
  logic [AW:0] wp, rp;
  logic        empty, pop;

  assign empty = (wp == rp);
  assign full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (we && !full) begin
        buf_q[wp[AW-1:0]] <= wdata;
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
    end
  end

  // ------------------------------------------------------ transmitter
  // shreg holds the frame bits still to send, shreg[0] being on the line.
  logic [9:0]  shreg;     // {stop, data[7:0], start}
  logic [3:0]  nbits;     // bits of the frame left, the current one included
  logic [$clog2(CLKS_PER_BIT)-1:0] cnt;
  logic        bit_end, frame_end;

  assign bit_end   = (32'(cnt) == CLKS_PER_BIT - 1);
  assign frame_end = (nbits == 4'd0) || (bit_end && nbits == 4'd1);
  assign pop       = frame_end && !empty;
  assign busy      = (nbits != 4'd0) || !empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg <= '1;
      nbits <= '0;
      cnt   <= '0;
      txd   <= 1'b1;
    end else if (frame_end) begin
      // idle, or the stop bit is over: start the next frame at once
      cnt <= '0;
      if (!empty) begin
        shreg <= {1'b1, buf_q[rp[AW-1:0]], 1'b0};
        nbits <= 4'd10;
        txd   <= 1'b0;
      end else begin
        nbits <= 4'd0;
        txd   <= 1'b1;
      end
    end else if (bit_end) begin
      cnt   <= '0;
      shreg <= {1'b1, shreg[9:1]};
      txd   <= shreg[1];
      nbits <= nbits - 4'd1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  // a character is never pushed into a full buffer by a correct caller
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) we |-> !full)
    else $warning("uart_tx: character dropped, buffer full");

endmodule
