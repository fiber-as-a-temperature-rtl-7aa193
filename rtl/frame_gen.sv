// Probing frame generator.
//
// Free-running: every FRAME_BITS/TX_W clocks it sends one frame, made of the
// GOLAY_LEN-bit Golay sequence followed by FILL_WORD repeated to the end of
// the frame. One TX_W-bit word per clock goes to the transmit serializer
// (bit 0 first); at 16 bits and 156.25 MHz that is the paper's 2.5 Gbit/s.
// The word counter is also output: the receive side uses the same counter
// to place its samples, which is how transmit and receive frame clocks are
// kept phase aligned.
//
// From the paper: 512-bit Golay sequence plus fill pattern, frames longer
// than the fiber round trip. This design's choices: the frame length of 4096
// bits, an all-zero fill (the lab setup sends a burst followed by zeros), and
// a registered output (tx_data and word_cnt change together, one clock after
// reset is released).
module frame_gen
#(
  parameter int unsigned GOLAY_LEN  = cotdr_pkg::GOLAY_LEN,
  parameter int unsigned TX_W       = cotdr_pkg::TX_W,
  parameter int unsigned FRAME_BITS = cotdr_pkg::FRAME_BITS,
  parameter logic [TX_W-1:0] FILL_WORD = '0,
  localparam int unsigned WORDS = FRAME_BITS / TX_W,
  localparam int unsigned CNT_W = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [TX_W-1:0]  tx_data,
  output logic [CNT_W-1:0] word_cnt,
  output logic             frame_start
);
  localparam int unsigned GWORDS = GOLAY_LEN / TX_W;
  localparam int unsigned GIDX_W = $clog2(GWORDS);

  initial begin
    assert (FRAME_BITS > GOLAY_LEN) else $error("frame must be longer than the Golay sequence");
    assert (FRAME_BITS % TX_W == 0) else $error("FRAME_BITS must be a multiple of TX_W");
    assert (WORDS == (1 << CNT_W)) else $error("FRAME_BITS/TX_W must be a power of two");
  end

  logic [CNT_W-1:0]  next_cnt;
  logic [TX_W-1:0]   golay_bits;

  assign next_cnt = word_cnt + 1'b1;

  golay_gen #(.GOLAY_LEN(GOLAY_LEN), .TX_W(TX_W)) u_golay (
    .word_idx (GIDX_W'(next_cnt)),
    .bits     (golay_bits)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      word_cnt <= '1;          // so the first word after reset is word 0
      tx_data  <= '0;
    end else begin
      word_cnt <= next_cnt;
      tx_data  <= (next_cnt < CNT_W'(GWORDS)) ? golay_bits : FILL_WORD;
    end
  end

  assign frame_start = (word_cnt == '0);
endmodule
