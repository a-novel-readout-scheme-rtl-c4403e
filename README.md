# A 500 MHz sampling readout for an RPC muon-tracking stand

A muon-tomography station finds where cosmic muons cross a resistive plate
chamber (RPC). The RPC has two layers of pick-up strips, X and Y, at a pitch of
3.2 cm. Each strip feeds one channel of a NINO discriminator. A NINO output is a
pulse that starts when the strip signal crosses threshold. Its width, the time
over threshold (TOT), grows with the charge. So a muon produces a few short
pulses on neighbouring X strips and neighbouring Y strips. Which strips fired
gives the position. The pulse widths let the analysis weight the strips in a
cluster and spot streamer events.

The FPGA logic here records those pulses much as a digital oscilloscope would.
All 16 NINO outputs are sampled together every 2 ns into a circular buffer. A
separate scintillator trigger marks that a muon went through. When it fires,
the logic freezes a 512 ns window around the trigger and streams it to a PC
over a UART. The PC then counts '1' samples per channel to get each TOT to
within 2 ns. The FPGA does no hit finding itself.

```
             clk_fast (500 MHz, from PLL)                 clk_50 (board oscillator)
                      |                                          |
 nino_in[15:0] ->  capture_fifo  --- rd_data (FIFO data) --->  uart_tx  ---> uart_txd (to PC)
                   ^   |   |                                   ^   |
        save_req   |   |   | frozen, armed                     |   | busy
   ("trigger to    |   v   v                     send_start     |   v
    save data")   daq_controller  ------------------------------+
                        ^              ("trigger to send data")
                 muon_trigger (scintillators)
```

The three blocks and the signals between them match the dataflow this readout
was described with. These parts are this design's own choices: the buffer
size, the trigger position in the window, the clock-crossing handshake, the
reset scheme, the baud rate and the frame format. They are marked below and
in each file's header.

## Signal chain and clock domains

| Input | Source outside this RTL | Notes |
|---|---|---|
| `nino_in[7:0]` | NINO board 1 (one strip plane) via LVDS receivers | asynchronous levels |
| `nino_in[15:8]` | NINO board 2 (orthogonal plane) | asynchronous levels |
| `clk_fast` | FPGA PLL, 500 MHz | sampling clock |
| `pll_locked` | FPGA PLL | both domains held in reset while low |
| `clk_50` | 50 MHz board oscillator | controller and UART |
| `muon_trigger` | scintillator coincidence | asynchronous; must stay high longer than one 50 MHz period (20 ns) |
| `rst_n` | board reset | asynchronous, active low |

There are two clock domains. The sample buffer's write side runs at 500 MHz.
Everything else runs at 50 MHz. The buffer memory is the only structure
clocked by both: it is written at 500 MHz and read at 50 MHz. Reads happen only
while writing is stopped.

On a MAX10 the differential NINO inputs use the device's LVDS input buffers.
The 500 MHz clock comes from the device PLL. Both are vendor primitives, so
the top takes their outputs as plain ports.

## The sample buffer (`capture_fifo`)

This block is the core of the design. It works like an oscilloscope with a
fixed pre-trigger depth.

* **Sampling.** Each NINO input first passes a two-flop synchroniser. The
  sampled 16-bit word is then written to `mem[wr_ptr]` on every `clk_fast`
  edge, and `wr_ptr` wraps modulo `DEPTH`. Every channel goes through the
  same two flops, so the offsets between channels and all pulse widths are
  kept exactly.
* **Window.** A window is `DEPTH = 256` samples (512 ns). `POST_TRIG = 192`
  of them are taken after the trigger request arrives, and
  `PRE = DEPTH - POST_TRIG = 64` (128 ns) come before it.
* **States.**
  * `FILL`: after reset or after each readout, the buffer first writes `PRE`
    new samples. This makes sure the pre-trigger part never holds data from
    an earlier event.
  * `RUN`: writing continues and `armed` is high.
  * `POST`: entered when the synchronised `save_req` is seen. The buffer
    writes `POST_TRIG` more samples.
  * `FROZEN`: writing stops. `start_addr` gets the next write address, which
    is the oldest sample of the window, and `frozen` goes high.
* **Release.** Dropping `save_req` returns the buffer to `FILL`. If
  `save_req` is already high during `FILL`, the buffer goes straight to
  `POST` once the fill completes. No request is lost, but the window then
  holds at least `PRE` samples before the request.
* **Handshake.** `save_req` and `frozen` form a four-phase handshake across
  the two clocks. `armed` is low while frozen. This way, `frozen` rising and
  `armed` falling never matter to the controller in the same cycle. Each
  flag crosses through its own synchroniser, and the controller only ever
  waits on one flag at a time.
* **Start address.** `start_addr` crosses without a synchroniser. That is
  safe because it is written together with `frozen` and then holds still.
  The controller sees `frozen` only two or three 50 MHz edges later.

**Where the pulse lands in the window.** The delay from the trigger edge to
the first post-trigger sample is:

* 2–3 cycles at 50 MHz for the trigger synchroniser,
* 1 cycle for the `save_req` register,
* 2–3 cycles at 500 MHz for the request synchroniser.

That is about 60–100 ns in total. So a strip pulse that arrives with the
trigger sits roughly 30–50 samples before sample 64 of the window. If the
scintillator signal arrives much later than the RPC signal, increase
`DEPTH - POST_TRIG`.

## The controller (`daq_controller`)

One event goes through five states:

1. **IDLE.** Wait for a rising edge of the synchronised trigger while the
   buffer reports `armed` and not `frozen`. Then copy the event counter into
   `event_id`, increment `event_count` and raise `save_req`.
2. **SAVE.** Wait for the synchronised `frozen`.
3. **LAUNCH.** Pulse `send_start` for one cycle.
4. **TX.** Wait for the transmitter's `busy` to fall, then lower `save_req`.
5. **RELEASE.** Wait for `frozen` to fall, then return to IDLE.

A trigger edge is not taken if it comes in any other state, or in IDLE while
the buffer is not armed. Such triggers only increment `missed_count`. This is
the dead time of the system. At the default baud rate it is about 45 ms per
event. The top brings `busy`, `event_count` and `missed_count` out so that
dead time can be measured.

Assertions check the protocol:

* `send_start` occurs only with `save_req` high and the window frozen.
* `save_req` stays high for the whole transfer.
* The buffer's write pointer and `start_addr` do not move while it is frozen.
* `armed` and `frozen` are never high together.

## The UART transmitter and the event frame (`uart_tx`)

The line runs 8N1: a start bit, 8 data bits LSB first, one stop bit, idle
high. The bit period is `round(CLK_HZ / BAUD)` cycles, which is 434 at 50 MHz
and 115200 baud. Each event is sent as one frame:

| Byte | Content |
|---|---|
| 0 | `0xA5` |
| 1 | `0x5A` |
| 2 | event number bits 15..8 |
| 3 | event number bits 7..0 |
| 4 + 2k | sample k, channels 15..8 (plane 2) |
| 5 + 2k | sample k, channels 7..0 (plane 1) |

Here k runs from 0 to `DEPTH-1`, oldest sample first. Sample k = 64 is the
first one written after the trigger request. A frame is `4 + 2*DEPTH` = 516
bytes, which takes 44.8 ms at 115200 baud.

To decode a frame on the host:

* The TOT of a channel is (number of 1s in its bit column) × 2 ns.
* The strips hit in a plane are the channels with a non-zero count.
* The event number lets the host detect lost frames. Together with
  `missed_count`, it accounts for every trigger.

Inside the block, a byte source walks the frame. For each sample it puts
`start_addr + k` (mod `DEPTH`) on `rd_addr`. It then waits one cycle for the
buffer's registered read and hands the selected byte to a 10-bit shift
register. The gap between consecutive bytes is at most one clock cycle.

## Sizes and how they relate

| Parameter | Default | Origin |
|---|---|---|
| `CHANNELS` | 16 | two NINO boards of 8 channels (test setup) |
| sample clock | 500 MHz | source; gives 2 ns TOT resolution |
| `CLK_HZ` | 50 000 000 | source (board clock) |
| `DEPTH` | 256 | this design (power of two required) |
| `POST_TRIG` | 192 | this design |
| `BAUD` | 115 200 | this design |

At the defaults the buffer holds 4 kbit, half of one MAX10 9-kbit RAM block.
Coarse synthesis gives about 200 flip-flops. The bottleneck is the UART.
Suppose the rate through a 25 cm × 35 cm scintillator overlap is around 15 Hz
(roughly 1 muon/cm²/min at sea level). Then about 40 % of triggers arrive
during a transfer. A faster baud rate, or a smaller `DEPTH` for narrow NINO
pulses, cuts the dead time in proportion.

## Where this RTL departs from, or adds to, the described system

* **Language.** The original firmware was VHDL. This is a SystemVerilog
  rewrite from the block-level description, not a translation.
* **Raw samples, not TOT numbers.** The text says the data holds strip hits
  and pulse widths. It also says the buffer stores the NINO input directly,
  oscilloscope-style. This design follows the buffer description: it ships
  raw samples and leaves TOT extraction to the host. An on-chip TOT counter
  would be an addition of one's own.
* **Not specified in the source, chosen here.** Buffer depth and trigger
  position; the two-flop synchronisers and the four-phase save/frozen
  handshake; dropping and counting triggers during dead time; the reset
  scheme; the baud rate; the frame layout and sync bytes.
* **Not in the RTL.** The NINO boards, the LVDS connector board, the PLL,
  the scintillator coincidence and the PC software. Their signals are ports
  of `muon_daq_top`.

## Files

| File | Contents |
|---|---|
| `rtl/daq_pkg.sv` | channel counts, frame constants, state enums |
| `rtl/sync_2ff.sv` | two-flop synchroniser |
| `rtl/reset_sync.sv` | asynchronous-assert, synchronous-release reset |
| `rtl/capture_fifo.sv` | 500 MHz circular sample buffer with trigger window |
| `rtl/daq_controller.sv` | per-event sequencing, dead-time counters |
| `rtl/uart_tx.sv` | frame builder and 8N1 serialiser |
| `rtl/muon_daq_top.sv` | top level |
| `tb/uart_rx_monitor.sv` | 8N1 receiver, plays the PC |
| `tb/tb_capture_fifo.sv` | window contiguity, trigger position, widths, refill request |
| `tb/tb_daq_controller.sv` | handshake order, event ids, dropped-trigger counts |
| `tb/tb_uart_tx.sv` | byte-exact frames, wrapped window, bit period, frame time |
| `tb/tb_muon_daq_body.svh` | shared end-to-end stimulus and checks |
| `tb/tb_muon_daq_top.sv` | end to end, 6 events at 5 Mbaud |
| `tb/tb_muon_daq_full.sv` | end to end, all defaults (115200 baud), 2 events |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. The
end-to-end tests generate random muon clusters. They check every channel's
sample count and leading-edge order in every frame. They also count the
mechanisms they exercise and fail if one never happens:

* reset while the PLL is unlocked,
* a trigger before the buffer is armed,
* a capture,
* a trigger during a transfer,
* a window that wraps around the buffer.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb -Itb +libext+.sv rtl/daq_pkg.sv tb/tb_muon_daq_top.sv \
  --top-module tb_muon_daq_top -Mdir obj_top
./obj_top/Vtb_muon_daq_top
```

Replace the testbench name to run the others. The package must be listed
first. Everything else is found through `-y`. The 5 Mbaud end-to-end test
runs in a couple of seconds. The full-size one simulates 90 ms and takes
about 20 s. For a lint pass, use
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/daq_pkg.sv rtl/muon_daq_top.sv`.
The top lints without warnings. If you lint a lower module on its own, it
reports the package constants that module does not use.

To change the window, set `DEPTH` (a power of two) and `POST_TRIG` on
`muon_daq_top`. To change the line rate, set `BAUD`. The frame length and the
host decoder follow from `DEPTH` and `CHANNELS`.
