// muon_daq_top: FPGA readout for an RPC muon-tomography test stand.
//
// Two NINO boards discriminate the 8 X strips and 8 Y strips of a
// resistive plate chamber; each output is a pulse whose width is the
// charge-dependent time over threshold. This top samples all 16 pulses at
// 500 MHz into a circular buffer, and when the scintillator trigger marks
// a muon it freezes a DEPTH-sample window around it and ships the window
// to a PC over a UART. The PC finds the hit strips and the pulse widths
// (count of '1' samples x 2 ns) from the raw samples.
//
// The three blocks and their connections are those of the source's FPGA
// dataflow: NINO data and the 500 MHz clock into the buffer (capture_fifo);
// the 50 MHz clock and the muon trigger into the controller
// (daq_controller), which drives "trigger to save data" to the buffer and
// "trigger to send data" to the transmitter (uart_tx); buffer data into
// the transmitter, serial data out to the PC.
//
// Outside this top: the NINO boards and LVDS receivers (nino_in is the
// single-ended result, bits [7:0] first board, [15:8] second), the PLL that
// makes clk_fast from clk_50 (pll_locked holds both domains in reset), and
// the scintillator coincidence that drives muon_trigger. All these inputs
// may be asynchronous to both clocks.
//
// Reset: rst_n low or pll_locked low resets both domains at once; each
// domain leaves reset on its own clock (reset_sync). After reset the buffer
// needs DEPTH-POST_TRIG fast cycles to arm; a trigger before that, or during
// the readout of an earlier event, is counted in missed_count.
// Sizes (DEPTH, POST_TRIG, BAUD) are this design's choices.
module muon_daq_top
  import daq_pkg::*;
#(
  parameter int unsigned CHANNELS  = daq_pkg::NUM_CHANNELS,
  parameter int unsigned DEPTH     = 256,
  parameter int unsigned POST_TRIG = 192,
  parameter int unsigned CLK_HZ    = 50_000_000,
  parameter int unsigned BAUD      = 115_200
) (
  input  logic                clk_50,
  input  logic                clk_fast,
  input  logic                pll_locked,
  input  logic                rst_n,
  input  logic [CHANNELS-1:0] nino_in,
  input  logic                muon_trigger,
  output logic                uart_txd,
  output logic                busy,
  output logic [15:0]         event_count,
  output logic [15:0]         missed_count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic                arst_n;
  logic                rst_slow_n, rst_fast_n;
  logic                save_req, frozen, armed, send_start, tx_busy;
  logic [AW-1:0]       start_addr, rd_addr;
  logic [CHANNELS-1:0] rd_data;
  logic [15:0]         event_id;

  assign arst_n = rst_n && pll_locked;

  reset_sync u_rst_slow (.clk(clk_50),   .arst_n(arst_n), .rst_n(rst_slow_n));
  reset_sync u_rst_fast (.clk(clk_fast), .arst_n(arst_n), .rst_n(rst_fast_n));

  capture_fifo #(
    .CHANNELS(CHANNELS), .DEPTH(DEPTH), .POST_TRIG(POST_TRIG)
  ) u_fifo (
    .clk_fast   (clk_fast),
    .rst_fast_n (rst_fast_n),
    .nino_in    (nino_in),
    .save_req   (save_req),
    .armed      (armed),
    .frozen     (frozen),
    .start_addr (start_addr),
    .clk_slow   (clk_50),
    .rd_addr    (rd_addr),
    .rd_data    (rd_data)
  );

  daq_controller u_ctrl (
    .clk          (clk_50),
    .rst_n        (rst_slow_n),
    .muon_trigger (muon_trigger),
    .save_req     (save_req),
    .fifo_frozen  (frozen),
    .fifo_armed   (armed),
    .send_start   (send_start),
    .tx_busy      (tx_busy),
    .event_id     (event_id),
    .event_count  (event_count),
    .missed_count (missed_count),
    .busy         (busy)
  );

  // start_addr crosses from clk_fast unsynchronised: it is written before
  // `frozen` rises and holds while it is high, and send_start comes only
  // after the controller has seen `frozen` through two flops.
  uart_tx #(
    .CLK_HZ(CLK_HZ), .BAUD(BAUD), .CHANNELS(CHANNELS), .DEPTH(DEPTH)
  ) u_tx (
    .clk        (clk_50),
    .rst_n      (rst_slow_n),
    .send_start (send_start),
    .start_addr (start_addr),
    .event_id   (event_id),
    .rd_addr    (rd_addr),
    .rd_data    (rd_data),
    .busy       (tx_busy),
    .txd        (uart_txd)
  );

endmodule
