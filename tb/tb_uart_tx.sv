// tb_uart_tx: self-checking test of the event transmitter.
//
// A behavioural buffer (random 16-bit words, one-cycle read latency) feeds
// the transmitter. Two frames are sent, the second with a window that
// wraps around the end of the buffer. A serial receiver decodes the line;
// every byte is compared with the frame layout computed here from the
// buffer contents, the start address and the event number. The bit period
// and the total frame time are checked in clock cycles, and so is `busy`.
module tb_uart_tx;
  localparam int unsigned CLK_HZ = 50_000_000;
  localparam int unsigned BAUD   = 5_000_000;   // 10 cycles per bit
  localparam int unsigned DIV    = 10;
  localparam int unsigned DEPTH  = 16;
  localparam int unsigned CH     = 16;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned FRAME  = 4 + 2 * DEPTH;

  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  logic          send_start = 0;
  logic [AW-1:0] start_addr = '0, rd_addr;
  logic [15:0]   event_id = '0;
  logic [CH-1:0] rd_data;
  logic          busy, txd;
  logic [CH-1:0] mem [DEPTH];

  int checks = 0, failures = 0;

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD), .CHANNELS(CH), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .send_start, .start_addr, .event_id, .rd_addr, .rd_data, .busy, .txd
  );

  always_ff @(posedge clk) rd_data <= mem[rd_addr];

  logic       rx_valid, rx_err;
  logic [7:0] rx_data;
  uart_rx_monitor #(.BIT_CYCLES(DIV)) u_rx (.clk, .rxd(txd), .valid(rx_valid), .data(rx_data), .frame_err(rx_err));

  logic [7:0] got [$];
  always @(posedge clk) if (rx_valid) begin
    got.push_back(rx_data);
    checks++;
    if (rx_err) begin failures++; $display("FAIL framing error on byte %0d", got.size()-1); end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Send one frame from start address sa and check every received byte.
  task automatic send_frame(input logic [AW-1:0] sa, input logic [15:0] id);
    logic [7:0] exp [$];
    int t0, t1, cyc;
    got.delete();
    for (int i = 0; i < DEPTH; i++) mem[i] = 16'($urandom);
    exp.push_back(8'hA5); exp.push_back(8'h5A);
    exp.push_back(id[15:8]); exp.push_back(id[7:0]);
    for (int i = 0; i < DEPTH; i++) begin
      logic [15:0] w;
      w = mem[(int'(sa) + i) % DEPTH];
      exp.push_back(w[15:8]); exp.push_back(w[7:0]);
    end
    @(posedge clk);
    start_addr <= sa; event_id <= id; send_start <= 1;
    @(posedge clk);
    send_start <= 0; start_addr <= '0; event_id <= '1;  // must have been latched
    #1;
    check(busy == 1'b1, "busy not raised after send_start");
    cyc = 0;
    while (busy) begin @(posedge clk); cyc++; end
    repeat (3) @(posedge clk);
    check(got.size() == FRAME, $sformatf("got %0d bytes, expected %0d", got.size(), FRAME));
    for (int i = 0; i < FRAME && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("byte %0d: got %02x expected %02x", i, got[i], exp[i]));
    // 10 bits per byte; gaps between bytes are only a few cycles.
    check(cyc >= FRAME * 10 * DIV && cyc <= FRAME * (10 * DIV + 4) + 4,
          $sformatf("frame took %0d cycles, expected about %0d", cyc, FRAME * 10 * DIV));
    check(txd == 1'b1, "line not idle after frame");
  endtask

  // Bit period check: length of the start bit of the next frame.
  int fall_t = -1, bitlen = -1, cyc_ctr = 0;
  logic txd_d = 1;
  always @(posedge clk) begin
    cyc_ctr <= cyc_ctr + 1;
    txd_d   <= txd;
    if (rst_n && txd_d && !txd && fall_t < 0) fall_t <= cyc_ctr;
    if (!txd_d && txd && fall_t >= 0 && bitlen < 0) bitlen <= cyc_ctr - fall_t;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4 * DIV) @(posedge clk);
    check(txd == 1'b1 && busy == 1'b0, "not idle after reset");
    send_frame(4'd0, 16'h1234);
    // First byte 0xA5 = 1010_0101: start bit then LSB '1', so the first
    // low stretch is exactly one bit long.
    check(bitlen == DIV, $sformatf("start bit lasted %0d cycles, expected %0d", bitlen, DIV));
    send_frame(4'd11, 16'hBEEF);   // window wraps at the end of the buffer
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
