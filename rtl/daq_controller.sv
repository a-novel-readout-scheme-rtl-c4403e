// daq_controller: event controller of the readout, 50 MHz domain.
//
// For each muon trigger it first raises the "trigger to save data"
// (save_req) towards the sample buffer, then, once the buffer reports the
// window frozen, gives the UART transmitter a one-cycle "trigger to send
// data" (send_start). These two outputs and their destinations are the
// ones drawn in the source's FPGA dataflow; how they are sequenced is this
// design's choice:
//
//   IDLE    wait for a rising edge of the synchronised muon trigger while
//           the buffer is armed; latch the event number, raise save_req
//   SAVE    wait for the synchronised `fifo_frozen`
//   LAUNCH  send_start high for one cycle
//   TX      wait until the transmitter drops tx_busy; then lower save_req
//   RELEASE wait for `fifo_frozen` to fall (buffer refilling), then IDLE
//
// A trigger edge seen in any state but IDLE, or in IDLE while the buffer
// is not armed, is not taken: it is counted in missed_count (dead time).
// event_count counts accepted triggers; event_id is the number of the event
// in progress (0 for the first), carried in the UART frame header.
//
// Timing: muon_trigger, fifo_frozen and fifo_armed are asynchronous and
// pass two-flop synchronisers, so save_req rises 3 to 4 clk edges after the
// trigger edge. tx_busy must rise on the edge that samples send_start.
module daq_controller
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        muon_trigger,
  output logic        save_req,
  input  logic        fifo_frozen,
  input  logic        fifo_armed,
  output logic        send_start,
  input  logic        tx_busy,
  output logic [15:0] event_id,
  output logic [15:0] event_count,
  output logic [15:0] missed_count,
  output logic        busy
);

  logic       trig_s, trig_d, trig_edge;
  logic       frozen_s, armed_s;
  ctl_state_t state;

  sync_2ff #(.WIDTH(3)) u_sync (
    .clk(clk), .rst_n(rst_n),
    .d({muon_trigger, fifo_frozen, fifo_armed}),
    .q({trig_s, frozen_s, armed_s})
  );

  always_ff @(posedge clk) begin
    if (!rst_n) trig_d <= 1'b0;
    else        trig_d <= trig_s;
  end

  assign trig_edge = trig_s && !trig_d;
  assign busy      = (state != CTL_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= CTL_IDLE;
      save_req     <= 1'b0;
      send_start   <= 1'b0;
      event_id     <= '0;
      event_count  <= '0;
      missed_count <= '0;
    end else begin
      send_start <= 1'b0;
      if (trig_edge && !(state == CTL_IDLE && armed_s && !frozen_s))
        missed_count <= missed_count + 1'b1;
      unique case (state)
        CTL_IDLE: begin
          if (trig_edge && armed_s && !frozen_s) begin
            save_req    <= 1'b1;
            event_id    <= event_count;
            event_count <= event_count + 1'b1;
            state       <= CTL_SAVE;
          end
        end
        CTL_SAVE: begin
          if (frozen_s) begin
            send_start <= 1'b1;
            state      <= CTL_LAUNCH;
          end
        end
        CTL_LAUNCH: state <= CTL_TX;
        CTL_TX: begin
          if (!tx_busy) begin
            save_req <= 1'b0;
            state    <= CTL_RELEASE;
          end
        end
        CTL_RELEASE: begin
          if (!frozen_s) state <= CTL_IDLE;
        end
        default: state <= CTL_IDLE;
      endcase
    end
  end

  // The send trigger is only given for a frozen window that was requested.
  assert property (@(posedge clk) disable iff (!rst_n) send_start |-> (save_req && frozen_s));
  // save_req is held for the whole transfer.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == CTL_TX || state == CTL_LAUNCH) |-> save_req);

endmodule
