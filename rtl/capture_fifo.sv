// capture_fifo: oscilloscope-style sample buffer for the NINO outputs.
//
// Every edge of the 500 MHz clock the CHANNELS NINO levels are sampled and
// written, as one word, into a circular buffer of DEPTH words. A sample
// period of 2 ns sets the time-over-threshold (TOT) resolution: the pulse
// width of a channel is the number of consecutive '1' samples times 2 ns.
// Storing raw samples and streaming them out is what the source describes
// (a temporary FIFO holding the NINO input, the FPGA working like an
// oscilloscope, a 500 MHz clock for TOT).
//
// Operation, 500 MHz side (clk_fast):
//   FILL    after reset or release, write DEPTH-POST_TRIG samples so the
//           pre-trigger part of the window holds fresh data; then
//   RUN     keep writing, wrapping around; `armed` is high. When the
//           synchronised save request is seen, go to
//   POST    write POST_TRIG more samples, then
//   FROZEN  stop writing, record `start_addr` (the oldest sample of the
//           window, i.e. the next write address) and raise `frozen`.
//   A save request already high while in FILL is served as soon as the
//   fill completes. When the save request drops, FROZEN returns to FILL.
//
// 50 MHz side (clk_slow): `rd_data` returns mem[rd_addr] one clk_slow
// edge after `rd_addr`. Reads are valid only while `frozen` is high; the
// write side does not touch the memory then, so the two clocks never use
// the same word at once.
//
// Clock crossing: save_req (from the 50 MHz controller) is synchronised
// here; `armed` and `frozen` are flip-flop outputs that the reader must
// synchronise. They follow a four-phase handshake: save_req up -> frozen
// up -> save_req down -> frozen down. `armed` is low while frozen, so
// neither flag ever changes in the same cycle as the other one's change
// that the controller waits for. start_addr is stable for as long as
// frozen is high.
//
// NINO inputs pass a two-flop synchroniser, so stored samples lag the pins
// by two clk_fast cycles; all channels lag equally, widths are unchanged.
// Window length, trigger position and the handshake are this design's
// choices; the source gives no buffer size.
module capture_fifo
  import daq_pkg::*;
#(
  parameter int unsigned CHANNELS  = daq_pkg::NUM_CHANNELS,
  parameter int unsigned DEPTH     = 256,  // samples in the window (power of two)
  parameter int unsigned POST_TRIG = 192,  // samples stored after the trigger
  localparam int unsigned AW = $clog2(DEPTH)
) (
  // 500 MHz write side
  input  logic                clk_fast,
  input  logic                rst_fast_n,
  input  logic [CHANNELS-1:0] nino_in,     // asynchronous TOT levels
  input  logic                save_req,    // asynchronous level from controller
  output logic                armed,
  output logic                frozen,
  output logic [AW-1:0]       start_addr,
  // 50 MHz read side
  input  logic                clk_slow,
  input  logic [AW-1:0]       rd_addr,
  output logic [CHANNELS-1:0] rd_data
);

  localparam int unsigned PRE_TRIG = DEPTH - POST_TRIG;

  logic [CHANNELS-1:0] mem [DEPTH];

  logic [CHANNELS-1:0] sample;
  logic                save_s;
  cap_state_t          state;
  logic [AW-1:0]       wr_ptr;
  logic [AW:0]         cnt;      // counts PRE_TRIG fill or POST_TRIG samples
  logic                writing;

  sync_2ff #(.WIDTH(CHANNELS)) u_sync_nino (
    .clk(clk_fast), .rst_n(rst_fast_n), .d(nino_in), .q(sample)
  );

  sync_2ff #(.WIDTH(1)) u_sync_save (
    .clk(clk_fast), .rst_n(rst_fast_n), .d(save_req), .q(save_s)
  );

  assign writing = (state != CAP_FROZEN);

  always_ff @(posedge clk_fast) begin
    if (writing) mem[wr_ptr] <= sample;
  end

  always_ff @(posedge clk_fast) begin
    if (!rst_fast_n) begin
      state      <= CAP_FILL;
      wr_ptr     <= '0;
      cnt        <= '0;
      armed      <= 1'b0;
      frozen     <= 1'b0;
      start_addr <= '0;
    end else begin
      if (writing) wr_ptr <= wr_ptr + 1'b1;
      unique case (state)
        CAP_FILL: begin
          if (cnt == (AW+1)'(PRE_TRIG - 1)) begin
            cnt <= '0;
            if (save_s) begin
              state <= CAP_POST;
            end else begin
              state <= CAP_RUN;
              armed <= 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CAP_RUN: begin
          if (save_s) state <= CAP_POST;
        end
        CAP_POST: begin
          if (cnt == (AW+1)'(POST_TRIG - 1)) begin
            cnt        <= '0;
            state      <= CAP_FROZEN;
            armed      <= 1'b0;
            frozen     <= 1'b1;
            start_addr <= wr_ptr + 1'b1;  // oldest sample once this write lands
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CAP_FROZEN: begin
          if (!save_s) begin
            state  <= CAP_FILL;
            frozen <= 1'b0;
          end
        end
        default: state <= CAP_FILL;
      endcase
    end
  end

  always_ff @(posedge clk_slow) begin
    rd_data <= mem[rd_addr];
  end

  // The window arithmetic relies on natural wrap of the address.
  initial begin
    assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");
    assert (POST_TRIG >= 1 && POST_TRIG < DEPTH) else $error("POST_TRIG out of range");
  end

  // While frozen nothing is written and the window origin does not move.
  property p_frozen_stable;
    @(posedge clk_fast) disable iff (!rst_fast_n)
      (frozen && $past(frozen)) |-> ($stable(start_addr) && $stable(wr_ptr));
  endproperty
  assert property (p_frozen_stable);

  // armed and frozen are never high together.
  assert property (@(posedge clk_fast) disable iff (!rst_fast_n) !(armed && frozen));

endmodule
