// tb_muon_daq_top: end-to-end test of the muon readout.
//
// The testbench plays the detector, the scintillator trigger, the PLL and
// the PC. For each simulated muon it picks a hit cluster of 1-3 adjacent
// strips in each plane (X on NINO board 1, channels 0-7; Y on board 2,
// channels 8-15), gives every hit strip a TOT pulse of random width
// (6-40 cycles of 2 ns) with a small random arrival jitter, and raises the
// scintillator trigger a little later. The UART line is decoded into
// frames; each frame must carry the next event number and, per channel,
// exactly the pulse width sent (count of '1' samples) with the leading
// edges in the right order. Mechanisms exercised and counted:
//   - reset held by a PLL that is not yet locked;
//   - a trigger arriving before the buffer has armed (dropped, counted);
//   - normal capture and transfer of an event;
//   - a trigger arriving during the UART transfer (dead time: dropped,
//     counted, no frame);
//   - a window that wraps around the end of the circular buffer.
// Each mechanism must happen at least once.
//
// The UART runs at 5 Mbaud here so that many events fit in a short
// simulation; all other sizes are the defaults.
module tb_muon_daq_top;
  localparam int unsigned CH      = 16;
  localparam int unsigned DEPTH   = 256;
  localparam int unsigned POST    = 192;
  localparam int unsigned CLK_HZ  = 50_000_000;
  localparam int unsigned BAUD    = 5_000_000;
  localparam int unsigned DIV     = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned FRAME   = 4 + 2 * DEPTH;
  localparam int          NEVENTS = 6;

  logic clk_50 = 0, clk_fast = 0;
  always #10ns clk_50 = ~clk_50;
  always #1ns clk_fast = ~clk_fast;

  logic          pll_locked = 0, rst_n = 0;
  logic [CH-1:0] nino_in = '0;
  logic          muon_trigger = 0;
  logic          uart_txd, busy;
  logic [15:0]   event_count, missed_count;

  muon_daq_top #(.BAUD(BAUD)) dut (
    .clk_50, .clk_fast, .pll_locked, .rst_n, .nino_in, .muon_trigger,
    .uart_txd, .busy, .event_count, .missed_count
  );

`include "tb_muon_daq_body.svh"

endmodule
