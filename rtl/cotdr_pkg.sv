// Shared constants and types of the Correlation-OTDR logic.
//
// The probing frame is a 512-bit Golay sequence followed by a fill pattern,
// sent at 2.5 Gbit/s; the echo is sliced to 1 bit and sampled at 10 GS/s
// (4-fold oversampling). Those three numbers come from the paper. The rest
// (16-bit transmit words, hence a 156.25 MHz fabric clock and 64 receive
// samples per clock; a 4096-bit frame; 16-bit sums) are this design's choices.
package cotdr_pkg;
  localparam int unsigned GOLAY_LEN  = 512;   // bits of the Golay sequence
  localparam int unsigned OVERSAMPLE = 4;     // 10 GS/s over 2.5 Gbit/s
  localparam int unsigned TX_W       = 16;    // transmit bits per clock
  localparam int unsigned FRAME_BITS = 4096;  // bits per frame, Golay + fill
  localparam int unsigned SUM_W      = 16;    // width of one time-slot sum
  localparam int unsigned RX_W       = OVERSAMPLE * TX_W;     // samples per clock
  localparam int unsigned FRAME_WORDS = FRAME_BITS / TX_W;    // clocks per frame

  // Measurement sequencer states.
  typedef enum logic [2:0] {
    ST_IDLE,      // waiting for start
    ST_ARM,       // waiting for the next frame boundary
    ST_ACCUM,     // summing whole frames
    ST_READOUT,   // sums are being sent to the processor
    ST_DONE       // one-cycle completion state
  } meas_state_e;
endpackage
