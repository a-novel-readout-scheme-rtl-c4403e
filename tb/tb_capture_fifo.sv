// tb_capture_fifo: self-checking test of the 500 MHz sample buffer.
//
// Clocks: clk_fast 500 MHz (2 ns), clk_slow 50 MHz, as in the readout.
// Three captures at the default 256-sample window, 192 after the trigger:
//  1. The inputs carry a running count of clk_fast cycles, so each stored
//     word names the cycle it was sampled in. The window must be DEPTH
//     consecutive samples, the trigger must fall PRE_TRIG samples in, and
//     the arming and freezing delays must match the window sizes.
//  2. Each channel gets one pulse of a random width (1..60 cycles) at a
//     random offset. The number of '1' samples per channel must equal the
//     width (2 ns TOT resolution) and the leading edges must keep their
//     offsets.
//  3. The save request is raised while the buffer is still refilling after
//     a release; the capture must still complete once armed, with a
//     contiguous window.
module tb_capture_fifo;
  localparam int unsigned CH    = 16;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned POST  = 192;
  localparam int unsigned PRE   = DEPTH - POST;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk_fast = 0, clk_slow = 0;
  always #1ns clk_fast = ~clk_fast;
  always #10ns clk_slow = ~clk_slow;

  logic          rst_fast_n = 0;
  logic [CH-1:0] nino_in = '0;
  logic          save_req = 0;
  logic          armed, frozen;
  logic [AW-1:0] start_addr, rd_addr = '0;
  logic [CH-1:0] rd_data;

  int checks = 0, failures = 0;

  capture_fifo #(.CHANNELS(CH), .DEPTH(DEPTH), .POST_TRIG(POST)) dut (
    .clk_fast, .rst_fast_n, .nino_in, .save_req, .armed, .frozen, .start_addr,
    .clk_slow, .rd_addr, .rd_data
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Free-running count of clk_fast cycles; input pattern changes on the
  // falling edge, away from the sampling edge.
  int unsigned fcyc = 0;
  bit counter_mode = 1;
  always @(posedge clk_fast) fcyc <= fcyc + 1;
  always @(negedge clk_fast) if (counter_mode) nino_in <= CH'(fcyc);

  logic [CH-1:0] win [DEPTH];

  task automatic read_window();
    for (int i = 0; i < DEPTH; i++) begin
      @(posedge clk_slow);
      rd_addr <= start_addr + AW'(i);
      @(posedge clk_slow);
      #1ns;
      win[i] = rd_data;
    end
  endtask

  task automatic wait_frozen(output int unsigned cycles);
    int unsigned t0 = fcyc;
    while (!frozen && fcyc - t0 < 4 * DEPTH) @(posedge clk_fast);
    cycles = fcyc - t0;
  endtask

  task automatic release_and_wait_armed(output int unsigned cycles);
    int unsigned t0;
    @(posedge clk_slow);
    save_req <= 0;
    while (frozen) @(posedge clk_fast);
    t0 = fcyc;
    while (!armed && fcyc - t0 < 4 * DEPTH) @(posedge clk_fast);
    cycles = fcyc - t0;
  endtask

  task automatic check_contiguous(input string tag);
    bit ok = 1;
    for (int i = 1; i < DEPTH; i++) if (win[i] != CH'(win[0] + i)) ok = 0;
    check(ok, {tag, ": window is not DEPTH consecutive samples"});
  endtask

  int unsigned t_arm, t_frz, trig_cyc;
  int          width [CH];
  int          offs  [CH];

  initial begin
    repeat (5) @(posedge clk_fast);
    rst_fast_n <= 1;
    check(!armed && !frozen, "flags not clear at reset");

    // --- 1: arming delay, window position ---
    begin
      int unsigned t0;
      t0 = fcyc;
      while (!armed) @(posedge clk_fast);
      t_arm = fcyc - t0;
      check(t_arm >= PRE && t_arm <= PRE + 2, $sformatf("armed after %0d cycles, expected %0d", t_arm, PRE));
    end
    repeat (300) @(posedge clk_slow);
    @(posedge clk_slow);
    save_req <= 1;
    trig_cyc = fcyc;
    wait_frozen(t_frz);
    // 2 synchroniser stages, 1 cycle to enter POST, POST_TRIG writes.
    check(t_frz >= POST + 2 && t_frz <= POST + 5, $sformatf("frozen %0d cycles after request", t_frz));
    check(!armed, "armed while frozen");
    read_window();
    check_contiguous("capture 1");
    begin
      // Sample PRE is the first post-trigger sample. Its input value was
      // driven about 2-4 cycles before the request was seen (input
      // synchroniser plus request synchroniser).
      int d;
      d = int'(win[PRE]) - int'(CH'(trig_cyc));
      check(d >= -1 && d <= 3, $sformatf("trigger sample offset %0d", d));
    end
    // Frozen buffer must not change while held.
    repeat (200) @(posedge clk_fast);
    begin
      logic [CH-1:0] again [DEPTH];
      bit same;
      same  = 1;
      again = win;
      read_window();
      foreach (win[i]) if (win[i] != again[i]) same = 0;
      check(same, "frozen window changed while held");
    end
    release_and_wait_armed(t_arm);
    check(t_arm >= PRE - 1 && t_arm <= PRE + 2, $sformatf("re-armed after %0d cycles", t_arm));

    // --- 2: pulse widths and edge positions ---
    counter_mode = 0;
    @(negedge clk_fast);
    nino_in = '0;
    repeat (DEPTH + 8) @(posedge clk_fast);   // flush counter samples
    for (int c = 0; c < CH; c++) begin
      width[c] = 1 + int'($urandom_range(59));
      offs[c]  = int'($urandom_range(40));
    end
    fork
      begin
        for (int t = 0; t < 120; t++) begin
          @(negedge clk_fast);
          for (int c = 0; c < CH; c++) nino_in[c] = (t >= offs[c] && t < offs[c] + width[c]);
        end
      end
      begin
        repeat (3) @(posedge clk_slow);
        save_req <= 1;
      end
    join
    wait_frozen(t_frz);
    read_window();
    for (int c = 0; c < CH; c++) begin
      int n, first;
      n = 0;
      first = -1;
      for (int i = 0; i < DEPTH; i++) if (win[i][c]) begin n++; if (first < 0) first = i; end
      check(n == width[c], $sformatf("ch %0d: %0d samples high, width %0d", c, n, width[c]));
      if (c > 0) begin
        int f0;
        f0 = -1;
        for (int i = 0; i < DEPTH; i++) if (win[i][0] && f0 < 0) f0 = i;
        check(first - f0 == offs[c] - offs[0], $sformatf("ch %0d: leading edge misplaced", c));
      end
    end
    release_and_wait_armed(t_arm);

    // --- 3: request raised while refilling ---
    counter_mode = 1;
    @(posedge clk_slow);
    save_req <= 1;
    wait_frozen(t_frz);
    @(posedge clk_slow);
    save_req <= 0;
    while (frozen) @(posedge clk_fast);
    @(posedge clk_slow);
    save_req <= 1;            // buffer is refilling now
    @(posedge clk_fast);
    check(!armed, "armed too early after release");
    wait_frozen(t_frz);
    check(frozen, "request made during refill was lost");
    // Refill (PRE) and post-trigger (POST) samples both had to be written.
    check(t_frz >= DEPTH - 12 && t_frz <= DEPTH + 4, $sformatf("refill capture took %0d cycles", t_frz));
    read_window();
    check_contiguous("capture 3");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk_fast);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
