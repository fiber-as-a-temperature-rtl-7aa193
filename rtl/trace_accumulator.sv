// Trace accumulation memory.
//
// Holds one SUM_W-bit sum for every 10 GS/s time slot of a frame, arranged as
// ROWS rows of SPR sums; row r, lane j is time slot r*SPR + j. Each clock with
// acc_en the SPR one-bit samples of row acc_row are added to that row's sums
// (acc_first: the samples are written instead, which clears the previous
// measurement). This is a read-modify-write: the row is read in the cycle of
// acc_en and written back in the next, so the same row must not be
// accumulated in two consecutive cycles (an assertion checks it; the
// sequencer steps one row per clock through frames of many rows).
//
// The single read port is shared with the readout: rd_en/rd_row return the
// row of sums on rd_sums one clock later. acc_en has priority; the sequencer
// never asserts both. The paper says only that the sliced samples are put
// into memory and accumulated; the row layout, the overwrite-on-first-trace
// clearing and the one-cycle read latency are this design's choices. Sums
// wrap at 2^SUM_W: the sequencer limits the trace count to 2^SUM_W-1.
module trace_accumulator #(
  parameter int unsigned ROWS  = cotdr_pkg::FRAME_WORDS,
  parameter int unsigned SPR   = cotdr_pkg::RX_W,
  parameter int unsigned SUM_W = cotdr_pkg::SUM_W,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // accumulate port
  input  logic                 acc_en,
  input  logic                 acc_first,
  input  logic [ROW_W-1:0]     acc_row,
  input  logic [SPR-1:0]       rx_row,
  // readout port
  input  logic                 rd_en,
  input  logic [ROW_W-1:0]     rd_row,
  output logic [SPR*SUM_W-1:0] rd_sums
);
  logic [SPR*SUM_W-1:0] mem [ROWS];

  logic                 wr_pending;   // second half of a read-modify-write
  logic                 first_d;
  logic [ROW_W-1:0]     row_d;
  logic [SPR-1:0]       samp_d;
  logic [SPR*SUM_W-1:0] rdata;
  logic [SPR*SUM_W-1:0] wdata;

  // Read port (registered output, as a block RAM).
  always_ff @(posedge clk) begin
    if (acc_en)     rdata <= mem[acc_row];
    else if (rd_en) rdata <= mem[rd_row];
  end

  assign rd_sums = rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) wr_pending <= 1'b0;
    else        wr_pending <= acc_en;
  end

  always_ff @(posedge clk) begin
    first_d <= acc_first;
    row_d   <= acc_row;
    samp_d  <= rx_row;
  end

  // Add the registered samples to the row read one cycle earlier.
  always_comb begin
    for (int unsigned j = 0; j < SPR; j++) begin
      if (first_d) wdata[j*SUM_W +: SUM_W] = SUM_W'(samp_d[j]);
      else         wdata[j*SUM_W +: SUM_W] = rdata[j*SUM_W +: SUM_W] + SUM_W'(samp_d[j]);
    end
  end

  // Write port.
  always_ff @(posedge clk) begin
    if (wr_pending) mem[row_d] <= wdata;
  end

  // The row being written back must not be read again in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (acc_en && wr_pending) |-> (acc_row != row_d))
    else $error("trace_accumulator: same row accumulated in consecutive cycles");
endmodule
