// tb_daq_controller: self-checking test of the event controller.
//
// The buffer and the transmitter are modelled here: the buffer raises
// `frozen` a fixed time after save_req and lowers it after save_req falls;
// `armed` follows the refill time. The transmitter holds tx_busy for a
// fixed time after each send_start. The test checks the order of the
// handshake (save before send, one send per event, save held through the
// transfer), the event numbering, the counting of triggers lost to dead
// time and to a not-yet-armed buffer, and the trigger-to-save latency.
module tb_daq_controller;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  logic        muon_trigger = 0;
  logic        save_req, send_start, busy;
  logic        fifo_frozen = 0, fifo_armed = 0, tx_busy = 0;
  logic [15:0] event_id, event_count, missed_count;

  int checks = 0, failures = 0;

  daq_controller dut (
    .clk, .rst_n, .muon_trigger, .save_req, .fifo_frozen, .fifo_armed,
    .send_start, .tx_busy, .event_id, .event_count, .missed_count, .busy
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- buffer model ----
  localparam int FREEZE_DLY = 25;   // cycles from save_req to frozen
  localparam int REARM_DLY  = 8;    // cycles from frozen low to armed
  initial begin
    repeat (20) @(posedge clk);
    fifo_armed <= 1;
    forever begin
      @(posedge clk iff save_req);
      repeat (FREEZE_DLY) @(posedge clk);
      fifo_armed  <= 0;
      fifo_frozen <= 1;
      @(posedge clk iff !save_req);
      repeat (3) @(posedge clk);
      fifo_frozen <= 0;
      repeat (REARM_DLY) @(posedge clk);
      fifo_armed <= 1;
    end
  end

  // ---- transmitter model ----
  localparam int TX_CYCLES = 200;
  int sends = 0;
  logic [15:0] ids [$];
  initial begin
    forever begin
      @(posedge clk iff send_start);
      sends++;
      ids.push_back(event_id);
      check(save_req && fifo_frozen, "send_start without a frozen, requested window");
      tx_busy = 1;
      repeat (TX_CYCLES) @(posedge clk);
      @(negedge clk);
      tx_busy = 0;
    end
  end

  // save_req must stay high while the transmitter works.
  always @(posedge clk) if (rst_n && tx_busy && !save_req) begin
    failures++;
    $display("FAIL save_req dropped during transfer");
  end

  task automatic pulse_trigger();
    @(negedge clk);
    muon_trigger = 1;
    repeat (3) @(negedge clk);
    muon_trigger = 0;
  endtask

  int t0, lat;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    // Trigger before the buffer is armed: must be dropped and counted.
    pulse_trigger();
    repeat (30) @(posedge clk);
    check(missed_count == 1 && event_count == 0 && !save_req,
          "trigger before arming was not dropped");

    // Three normal events with a trigger inside the dead time of the second.
    for (int e = 0; e < 3; e++) begin
      @(negedge clk);
      muon_trigger = 1;
      t0 = 0;
      while (!save_req) begin @(posedge clk); t0++; end
      lat = t0;
      check(lat >= 2 && lat <= 4, $sformatf("save_req %0d cycles after trigger", lat));
      check(busy, "busy not set during event");
      repeat (2) @(negedge clk);
      muon_trigger = 0;
      if (e == 1) begin
        repeat (60) @(posedge clk);
        pulse_trigger();   // lost: transfer in progress
      end
      while (busy) @(posedge clk);
      check(!save_req, "save_req still high after the event");
      repeat (REARM_DLY + 5) @(posedge clk);
    end
    check(sends == 3, $sformatf("%0d send triggers for 3 events", sends));
    check(event_count == 3, $sformatf("event_count %0d", event_count));
    check(missed_count == 2, $sformatf("missed_count %0d, expected 2", missed_count));
    for (int i = 0; i < 3 && i < ids.size(); i++)
      check(ids[i] == 16'(i), $sformatf("event %0d carried id %0d", i, ids[i]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
