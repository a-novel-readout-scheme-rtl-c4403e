// daq_pkg: constants and state types shared by the muon-readout FPGA logic.
//
// The readout serves two NINO discriminator boards of eight channels each,
// so one sample of all inputs is a 16-bit word: bits [7:0] come from the
// first board (one readout plane), bits [15:8] from the second (the
// orthogonal plane). The channel counts follow the described test setup;
// the UART framing bytes and the state encodings are this design's own.
package daq_pkg;

  // Front end: eight channels per NINO board, two boards (X and Y planes).
  localparam int unsigned CH_PER_NINO = 8;
  localparam int unsigned NINO_BOARDS = 2;
  localparam int unsigned NUM_CHANNELS = CH_PER_NINO * NINO_BOARDS;

  // Event frame sent over the UART: two sync bytes, a 16-bit event number
  // (high byte first), then the captured samples, oldest first.
  localparam logic [7:0] SYNC0      = 8'hA5;
  localparam logic [7:0] SYNC1      = 8'h5A;
  localparam int unsigned HDR_BYTES = 4;

  // Number of whole bytes needed for one sample word of `ch` channels.
  function automatic int unsigned bytes_per_sample(int unsigned ch);
    return (ch + 7) / 8;
  endfunction

  // Sample-buffer states (500 MHz domain).
  typedef enum logic [1:0] {
    CAP_FILL   = 2'd0,  // refilling the pre-trigger part after reset/release
    CAP_RUN    = 2'd1,  // armed: circular recording, waiting for the trigger
    CAP_POST   = 2'd2,  // recording the post-trigger samples
    CAP_FROZEN = 2'd3   // window held for readout
  } cap_state_t;

  // Controller states (50 MHz domain).
  typedef enum logic [2:0] {
    CTL_IDLE    = 3'd0,  // waiting for a muon trigger
    CTL_SAVE    = 3'd1,  // trigger-to-save raised, waiting for the frozen window
    CTL_LAUNCH  = 3'd2,  // trigger-to-send pulse to the UART transmitter
    CTL_TX      = 3'd3,  // waiting for the transmitter to finish
    CTL_RELEASE = 3'd4   // save request dropped, waiting for the buffer to re-arm
  } ctl_state_t;

  // UART transmitter byte-source states.
  typedef enum logic [1:0] {
    TX_IDLE = 2'd0,  // no frame in progress
    TX_ADDR = 2'd1,  // present the read address of the next sample
    TX_READ = 2'd2,  // buffer read in flight
    TX_LOAD = 2'd3   // hand the next byte to the bit serialiser
  } tx_state_t;

endpackage
