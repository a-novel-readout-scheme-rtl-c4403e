// Shared stimulus and checking for the end-to-end testbenches of
// muon_daq_top. The including module declares CH, DEPTH, POST, DIV, FRAME,
// NEVENTS, the clocks, the top's ports and the instance `dut`.

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- PC side: UART decoder and frame collector ----------------
  logic       rx_valid, rx_err;
  logic [7:0] rx_data;
  uart_rx_monitor #(.BIT_CYCLES(DIV)) u_rx (
    .clk(clk_50), .rxd(uart_txd), .valid(rx_valid), .data(rx_data), .frame_err(rx_err)
  );

  logic [7:0] rx_bytes [$];
  int         rx_errors = 0;
  always @(posedge clk_50) if (rx_valid) begin
    rx_bytes.push_back(rx_data);
    if (rx_err) rx_errors++;
  end

  // ---------------- mechanism counters ----------------
  int n_pll_reset = 0, n_unarmed_drop = 0, n_captured = 0, n_busy_drop = 0, n_wrap = 0;

  always @(posedge clk_50) if (dut.send_start && dut.start_addr != '0) n_wrap++;

  // ---------------- detector side ----------------
  int width [CH];
  int arrive [CH];

  // One muon: cluster in each plane, pulses on clk_fast falling edges,
  // trigger 10 ns after the earliest pulse for 40 ns.
  task automatic muon();
    int x0, y0, nx, ny;
    x0 = $urandom_range(7); nx = 1 + $urandom_range(2);
    y0 = $urandom_range(7); ny = 1 + $urandom_range(2);
    for (int c = 0; c < CH; c++) begin
      width[c]  = 0;
      arrive[c] = 0;
    end
    for (int i = 0; i < nx && x0 + i < 8; i++) begin
      width[x0 + i]  = 6 + $urandom_range(34);
      arrive[x0 + i] = $urandom_range(5);
    end
    for (int i = 0; i < ny && y0 + i < 8; i++) begin
      width[8 + y0 + i]  = 6 + $urandom_range(34);
      arrive[8 + y0 + i] = $urandom_range(5);
    end
    fork
      for (int t = 0; t < 60; t++) begin
        @(negedge clk_fast);
        for (int c = 0; c < CH; c++)
          nino_in[c] = (width[c] > 0) && (t >= arrive[c]) && (t < arrive[c] + width[c]);
      end
      begin
        #10ns;
        muon_trigger = 1;
        #40ns;
        muon_trigger = 0;
      end
    join
  endtask

  // Check one received frame against the muon that produced it.
  task automatic check_frame(input int base, input int exp_id);
    int id, n, first, ref_ch, ref_first;
    logic [15:0] s;
    check(rx_bytes[base] == 8'hA5 && rx_bytes[base + 1] == 8'h5A, "frame sync bytes wrong");
    id = int'({rx_bytes[base + 2], rx_bytes[base + 3]});
    check(id == exp_id, $sformatf("frame carries event %0d, expected %0d", id, exp_id));
    ref_ch = -1; ref_first = 0;
    for (int c = 0; c < CH; c++) begin
      n = 0; first = -1;
      for (int i = 0; i < DEPTH; i++) begin
        s = {rx_bytes[base + 4 + 2 * i], rx_bytes[base + 5 + 2 * i]};
        if (s[c]) begin n++; if (first < 0) first = i; end
      end
      check(n == width[c], $sformatf("event %0d ch %0d: TOT %0d samples, sent %0d", exp_id, c, n, width[c]));
      if (width[c] > 0) begin
        check(first > 0 && first + width[c] < DEPTH, $sformatf("ch %0d pulse not inside window", c));
        if (ref_ch < 0) begin ref_ch = c; ref_first = first; end
        else check(first - ref_first == arrive[c] - arrive[ref_ch],
                   $sformatf("ch %0d leading edge misplaced", c));
      end
    end
  endtask

  task automatic wait_idle();
    int guard = 0;
    while (busy && guard < 50 * FRAME * DIV) begin @(posedge clk_50); guard++; end
    repeat (4 * DIV) @(posedge clk_50);
  endtask

  initial begin
    int expected_frames, exp_missed, base;
    // PLL not locked: both domains held in reset even with rst_n high.
    repeat (5) @(posedge clk_50);
    rst_n = 1;
    repeat (5) @(posedge clk_50);
    check(dut.rst_slow_n == 1'b0 && dut.rst_fast_n == 1'b0, "reset not held while PLL unlocked");
    if (dut.rst_slow_n == 1'b0) n_pll_reset++;
    @(negedge clk_50);
    pll_locked = 1;

    // Trigger right after reset, before the pre-trigger part is filled.
    repeat (2) @(posedge clk_50);
    #2ns;
    muon_trigger = 1;
    #40ns;
    muon_trigger = 0;
    repeat (30) @(posedge clk_50);
    check(missed_count == 1 && event_count == 0, "early trigger was not dropped");
    if (missed_count == 1) n_unarmed_drop++;
    exp_missed = 1;
    repeat (20 * DIV) @(posedge clk_50);
    check(rx_bytes.size() == 0, "frame sent for a dropped trigger");

    expected_frames = 0;
    for (int e = 0; e < NEVENTS; e++) begin
      base = rx_bytes.size();
      // Vary the time between events so the window lands anywhere.
      repeat ($urandom_range(200)) @(posedge clk_fast);
      muon();
      expected_frames++;
      if (e == 1) begin
        // A second muon during the transfer must be dropped.
        repeat (FRAME * DIV / 2) @(posedge clk_50);
        check(busy, "not busy during transfer");
        muon_trigger = 1;
        #40ns;
        muon_trigger = 0;
        repeat (10) @(posedge clk_50);
        exp_missed++;
        check(missed_count == 16'(exp_missed), "trigger during transfer not counted");
        if (missed_count == 16'(exp_missed)) n_busy_drop++;
      end
      wait_idle();
      check(rx_bytes.size() == base + FRAME,
            $sformatf("event %0d: %0d bytes received, expected %0d", e, rx_bytes.size() - base, FRAME));
      if (rx_bytes.size() == base + FRAME) begin
        check_frame(base, e);
        n_captured++;
      end
    end

    check(rx_errors == 0, $sformatf("%0d UART framing errors", rx_errors));
    check(event_count == 16'(NEVENTS), $sformatf("event_count %0d", event_count));
    check(missed_count == 16'(exp_missed), $sformatf("missed_count %0d, expected %0d", missed_count, exp_missed));
    $display("mechanisms: pll_reset=%0d unarmed_drop=%0d captured=%0d busy_drop=%0d window_wrap=%0d",
             n_pll_reset, n_unarmed_drop, n_captured, n_busy_drop, n_wrap);
    check(n_pll_reset > 0, "PLL-unlocked reset never exercised");
    check(n_unarmed_drop > 0, "trigger before arming never exercised");
    check(n_captured > 0, "no event captured");
    check(n_busy_drop > 0, "dead-time drop never exercised");
    check(n_wrap > 0, "window never wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NEVENTS + 4) * FRAME * 10 * DIV + 20000) @(posedge clk_50);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
