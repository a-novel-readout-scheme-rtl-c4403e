// uart_rx_monitor: testbench receiver for an 8N1 serial line.
//
// Plays the part of the PC's COM port. In idle it waits for `rxd` low,
// checks the start bit half a bit later, samples eight data bits (LSB
// first) one bit period apart (after power-up a start is only taken once
// the line has been high for a whole bit period), then checks the stop bit. For each
// character it pulses `valid` for one clk cycle with the byte on `data`
// and `frame_err` set if the start or stop bit was wrong. BIT_CYCLES is
// the bit period in clk cycles; the testbench passes the value it expects,
// independently of the transmitter's own arithmetic.
module uart_rx_monitor #(
  parameter int unsigned BIT_CYCLES = 434
) (
  input  logic       clk,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);

  int         cnt   = 0;   // cycles until the next sample point
  int         nbit  = -1;  // -1 idle, 0 start, 1..8 data, 9 stop
  logic [7:0] shift = '0;
  logic       err   = 1'b0;
  int         idle  = 0;   // consecutive high cycles seen while idle

  initial begin
    valid     = 1'b0;
    data      = '0;
    frame_err = 1'b0;
  end

  always @(posedge clk) begin
    valid <= 1'b0;
    if (nbit < 0) begin
      if (idle < BIT_CYCLES) idle <= rxd ? idle + 1 : 0;
      if (!rxd && idle >= BIT_CYCLES) begin
        nbit <= 0;
        cnt  <= BIT_CYCLES / 2 - 1;
        err  <= 1'b0;
      end
    end else if (cnt > 0) begin
      cnt <= cnt - 1;
    end else begin
      cnt <= BIT_CYCLES - 1;
      if (nbit == 0) begin
        if (rxd) err <= 1'b1;
        nbit <= 1;
      end else if (nbit <= 8) begin
        shift <= {rxd, shift[7:1]};
        nbit  <= nbit + 1;
      end else begin
        data      <= shift;
        frame_err <= err || !rxd;
        valid     <= 1'b1;
        nbit      <= -1;
      end
    end
  end

endmodule
