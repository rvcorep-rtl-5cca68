// rvcorep_system: the evaluation system around the RVCoreP processor:
// the core, its instruction memory (m_imem), its data memory (m_dmem) and
// RS-232C serial communication: a transmitter with a communication buffer
// for program output and a receiver with a program loader.
//
// Program loading, two ways:
//  - external load port: while rst is high, each ld_we cycle writes ld_data
//    at ld_addr into both memories (the simulation path); ld_we must be
//    low in the last reset cycle, in which the core fetches its first word;
//  - serial line: with boot_serial high when rst is released, uart_rx and
//    prog_loader receive a word count and the image over rxd, write each
//    word into both memories and keep the core in reset until one cycle
//    after the last write (the FPGA path, where the paper's board receives the same
//    binary through the serial module).
// Writing one image into both memories lets a linked RISC-V binary (code and
// initialised data together) run from separate instruction and data
// memories. The load port and the serial format are this design's choices.
// Output: a store to TX_ADDR sends its low byte to the serial transmitter.
// Stores to the I/O region (address bits [31:28] equal to TX_ADDR[31:28])
// do not reach the data memory; loads from that region return unspecified
// data. The address map is this design's choice.
// Sizes: 32 KB instruction and data memory (the paper's benchmark
// simulation size), PHT 8,192 entries, BTB 512 entries (the paper's).
// Interface: see the ports; the retire trace and event pulses of the core
// are brought out for observation.
// Timing: one clock, synchronous active-high reset.
module rvcorep_system
  import rvcorep_pkg::*;
#(
  parameter int unsigned IMEM_BYTES   = 32768,
  parameter int unsigned DMEM_BYTES   = 32768,
  parameter int unsigned PHT_ENTRIES  = 8192,
  parameter int unsigned BTB_ENTRIES  = 512,
  parameter int unsigned CLKS_PER_BIT = 100,
  parameter int unsigned TXBUF_DEPTH  = 64,
  parameter logic [31:0] TX_ADDR      = 32'h4000_0000
) (
  input  logic        clk,
  input  logic        rst,
  // program load port, used while rst is high
  input  logic        ld_we,
  input  logic [31:0] ld_addr,
  input  logic [31:0] ld_data,
  // serial line: program input (used when boot_serial is high) and output
  input  logic        boot_serial,
  input  logic        rxd,
  output logic        txd,
  output logic        tx_busy,
  // observation
  output logic        rt_valid,
  output logic [31:0] rt_pc,
  output logic [31:0] rt_ir,
  output logic        rt_we,
  output logic [4:0]  rt_rd,
  output logic [31:0] rt_data,
  output perf_t       perf
);

  logic [31:0] i_addr, i_in, d_addr, d_wdata, d_in;
  logic [3:0]  d_be;
  logic [31:0] im_addr, dm_addr, dm_wdata;
  logic [3:0]  dm_be;
  logic        io_sel, tx_we, tx_full;
  logic        core_rst;                   // rst, or serial image incomplete
  logic        rx_valid, sl_we, sl_busy, w_sel;
  logic [7:0]  rx_data;
  logic [31:0] sl_addr, sl_data, w_addr, w_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_rx (
    .clk, .rst, .rxd, .valid(rx_valid), .data(rx_data)
  );

  prog_loader u_loader (
    .clk, .rst, .boot_serial, .rx_valid, .rx_data,
    .ld_we(sl_we), .ld_addr(sl_addr), .ld_data(sl_data), .busy(sl_busy)
  );

  assign core_rst = rst || sl_busy;

  rvcorep #(.PHT_ENTRIES(PHT_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES)) u_core (
    .clk, .rst(core_rst),
    .i_addr, .i_in,
    .d_addr, .d_be, .d_wdata, .d_in,
    .rt_valid, .rt_pc, .rt_ir, .rt_we, .rt_rd, .rt_data,
    .perf
  );

  always_comb begin
    io_sel   = (d_addr[31:28] == TX_ADDR[31:28]);
    // image words come from the external load port (during rst) or from
    // the serial loader (after rst, while it is busy)
    w_sel    = (rst && ld_we) || sl_we;
    w_addr   = rst ? ld_addr : sl_addr;
    w_data   = rst ? ld_data : sl_data;
    im_addr  = w_sel ? w_addr : i_addr;
    dm_addr  = core_rst ? w_addr : d_addr;
    dm_wdata = core_rst ? w_data : d_wdata;
    dm_be    = core_rst ? {4{w_sel}} : (io_sel ? 4'b0000 : d_be);
    tx_we    = !core_rst && (d_addr == TX_ADDR) && d_be[0];
  end

  imem #(.BYTES(IMEM_BYTES)) u_imem (
    .clk, .addr(im_addr), .we(w_sel), .wdata(w_data), .rdata(i_in)
  );

  dmem #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk, .addr(dm_addr), .be(dm_be), .wdata(dm_wdata), .rdata(d_in)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT), .DEPTH(TXBUF_DEPTH)) u_uart_tx (
    .clk, .rst, .we(tx_we), .wdata(d_wdata[7:0]), .full(tx_full), .busy(tx_busy), .txd
  );

endmodule
