// uart_tx: sends one captured event window to the PC over an 8N1 UART.
//
// The source sends the stored NINO data to the computer with a UART
// transmitter clocked at 50 MHz and started by the controller's "trigger
// to send data". Baud rate and frame layout are not given; this design
// uses, per event:
//
//   byte 0      0xA5            sync
//   byte 1      0x5A            sync
//   byte 2..3   event number, high byte first
//   then DEPTH samples, oldest first; each sample is BPS = ceil(CHANNELS/8)
//   bytes, most significant byte first (channels 15..8, then 7..0 at the
//   default of 16 channels).
//
// Each byte goes out as a start bit (0), eight data bits LSB first and a
// stop bit (1); a bit lasts DIV = round(CLK_HZ/BAUD) clk cycles (434 at
// 50 MHz and 115200 baud). The line idles high.
//
// Structure: a byte source walks the frame (TX_ADDR puts the next sample
// address on rd_addr, TX_READ waits for the buffer's one-cycle read,
// TX_LOAD hands the selected byte to the bit serialiser once it is free);
// the serialiser shifts the ten-bit character out. Sample addresses are
// start_addr + n modulo DEPTH, so the window may wrap around the buffer.
//
// Interface: send_start is a one-cycle pulse; start_addr and event_id are
// latched on it. busy rises on the edge that samples send_start and falls
// after the last stop bit has been sent. send_start while busy is ignored.
module uart_tx
  import daq_pkg::*;
#(
  parameter int unsigned CLK_HZ   = 50_000_000,
  parameter int unsigned BAUD     = 115_200,
  parameter int unsigned CHANNELS = daq_pkg::NUM_CHANNELS,
  parameter int unsigned DEPTH    = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                send_start,
  input  logic [AW-1:0]       start_addr,
  input  logic [15:0]         event_id,
  output logic [AW-1:0]       rd_addr,
  input  logic [CHANNELS-1:0] rd_data,
  output logic                busy,
  output logic                txd
);

  localparam int unsigned DIV = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned DW  = (DIV > 1) ? $clog2(DIV) : 1;
  localparam int unsigned BPS = bytes_per_sample(CHANNELS);
  localparam int unsigned BW  = (BPS > 1) ? $clog2(BPS) : 1;

  // ---------------- byte source ----------------
  tx_state_t           state;
  logic [2:0]          hdr_idx;     // 0..HDR_BYTES while in header
  logic                in_hdr;
  logic [AW:0]         smp_idx;     // sample number within the window
  logic [BW-1:0]       sub_idx;     // byte number within the sample
  logic [AW-1:0]       base;
  logic [15:0]         evt;
  logic [BPS*8-1:0]    word;
  logic [7:0]          next_byte;

  // ---------------- bit serialiser ----------------
  logic [8:0]          shreg;      // stop bit and data, LSB next
  logic [3:0]          bits_left;
  logic [DW-1:0]       baud_cnt;
  logic                ser_busy;
  logic                ser_load;

  assign ser_busy = (bits_left != 0);
  assign busy     = (state != TX_IDLE) || ser_busy;
  assign word     = (BPS*8)'(rd_data);

  always_comb begin
    if (in_hdr) begin
      unique case (hdr_idx[1:0])
        2'd0:    next_byte = SYNC0;
        2'd1:    next_byte = SYNC1;
        2'd2:    next_byte = evt[15:8];
        default: next_byte = evt[7:0];
      endcase
    end else begin
      next_byte = word[(BPS - 1 - int'(sub_idx)) * 8 +: 8];
    end
  end

  assign ser_load = (state == TX_LOAD) && !ser_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= TX_IDLE;
      hdr_idx <= '0;
      in_hdr  <= 1'b0;
      smp_idx <= '0;
      sub_idx <= '0;
      base    <= '0;
      evt     <= '0;
      rd_addr <= '0;
    end else begin
      unique case (state)
        TX_IDLE: begin
          if (send_start) begin
            base    <= start_addr;
            evt     <= event_id;
            hdr_idx <= '0;
            in_hdr  <= 1'b1;
            smp_idx <= '0;
            sub_idx <= '0;
            state   <= TX_LOAD;
          end
        end
        TX_ADDR: begin
          rd_addr <= base + smp_idx[AW-1:0];
          state   <= TX_READ;
        end
        TX_READ: state <= TX_LOAD;
        TX_LOAD: begin
          if (!ser_busy) begin
            if (in_hdr) begin
              if (hdr_idx == 3'(HDR_BYTES - 1)) begin
                in_hdr <= 1'b0;
                state  <= TX_ADDR;
              end else begin
                hdr_idx <= hdr_idx + 1'b1;
              end
            end else if (sub_idx == BW'(BPS - 1)) begin
              sub_idx <= '0;
              smp_idx <= smp_idx + 1'b1;
              state   <= (smp_idx == (AW+1)'(DEPTH - 1)) ? TX_IDLE : TX_ADDR;
            end else begin
              sub_idx <= sub_idx + 1'b1;
            end
          end
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      baud_cnt  <= '0;
      txd       <= 1'b1;
    end else if (ser_load) begin
      shreg     <= {1'b1, next_byte};
      bits_left <= 4'd10;
      baud_cnt  <= DW'(DIV - 1);
      txd       <= 1'b0;  // start bit
    end else if (ser_busy) begin
      if (baud_cnt == 0) begin
        baud_cnt  <= DW'(DIV - 1);
        bits_left <= bits_left - 1'b1;
        shreg     <= {1'b1, shreg[8:1]};
        txd       <= (bits_left == 4'd1) ? 1'b1 : shreg[0];
      end else begin
        baud_cnt <= baud_cnt - 1'b1;
      end
    end
  end

  initial begin
    assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");
    assert (DIV >= 2) else $error("BAUD too high for CLK_HZ");
  end

  // The line is high whenever no character is being sent.
  assert property (@(posedge clk) disable iff (!rst_n) !ser_busy |-> txd);

endmodule
