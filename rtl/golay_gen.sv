// Golay sequence generator.
//
// Returns TX_W consecutive bits of a binary Golay sequence of length
// GOLAY_LEN (a power of two), selected by a word index. The sequence is the
// "A" member of the usual recursive pair a' = a|b, b' = a|-b grown from
// a = b = [+1]; element n of it is +1 exactly when the binary form of n holds
// an even number of adjacent "11" pairs, so no table is stored. A '1' bit
// stands for +1 (light on), a '0' for -1 (light off).
//
// The paper specifies a 512-bit Golay sequence; which member of the pair,
// and the bit order (bit 0 of the word is the earliest bit), are this
// design's choices. Combinational, no latency.
module golay_gen #(
  parameter int unsigned GOLAY_LEN = cotdr_pkg::GOLAY_LEN,
  parameter int unsigned TX_W      = cotdr_pkg::TX_W,
  localparam int unsigned IDX_W    = $clog2(GOLAY_LEN / TX_W)
) (
  input  logic [IDX_W-1:0] word_idx,
  output logic [TX_W-1:0]  bits
);
  localparam int unsigned N_W = $clog2(GOLAY_LEN);

  initial begin
    assert (GOLAY_LEN == (1 << N_W)) else $error("GOLAY_LEN must be a power of two");
    assert (GOLAY_LEN % TX_W == 0) else $error("GOLAY_LEN must be a multiple of TX_W");
  end

  always_comb begin
    logic [N_W-1:0] n;
    for (int unsigned k = 0; k < TX_W; k++) begin
      n = N_W'(word_idx * TX_W + k);
      bits[k] = ~(^(n & (n >> 1)));
    end
  end
endmodule
