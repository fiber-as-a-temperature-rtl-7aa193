// Correlation-OTDR acquisition core (programmable-logic part).
//
// A fiber is probed with a periodic frame: a 512-bit Golay sequence plus a
// fill pattern at 2.5 Gbit/s. Every reflection along the fiber returns a
// delayed copy of the frame. The receiver slices the echo to one bit and
// samples it at 10 GS/s. Because transmit and receive share one frame
// counter, sample slot s of every frame sees the same fiber position, so
// summing many frames slot by slot recovers the echo amplitude from the
// 1-bit samples. The processor then correlates the summed trace with the
// Golay sequence to locate the reflection peaks.
//
//   frame_gen  --tx_data-->  transmit serializer (2.5 Gbit/s) -> SFP -> fiber
//   fiber -> SFP slicer -> receive deserializer (10 GS/s) --rx_data-->
//   trace_accumulator (row = frame word counter) -> sum_readout -> m_*
//   meas_ctrl sequences start, num_traces frames of accumulation, readout.
//
// Interface: one clock, clk = 2.5 GHz / TX_W = 156.25 MHz; tx_data bit 0 is
// sent first, rx_data bit 0 is the earliest sample. Software pulses start
// with num_traces set, waits for done (busy drops) and receives
// FRAME_BITS*OVERSAMPLE sums on the m_* stream, slot 0 first.
//
// From the paper: Golay length, 2.5 Gbit/s, 10 GS/s, 1-bit samples,
// phase-aligned frames, summation in memory, transfer of the sums to the
// processor. This design's choices: word widths, frame length, sum width,
// control handshake and stream format. The transceivers, the SFP and the
// processor software are outside this module.
module cotdr_top
#(
  parameter int unsigned GOLAY_LEN  = cotdr_pkg::GOLAY_LEN,
  parameter int unsigned OVERSAMPLE = cotdr_pkg::OVERSAMPLE,
  parameter int unsigned TX_W       = cotdr_pkg::TX_W,
  parameter int unsigned FRAME_BITS = cotdr_pkg::FRAME_BITS,
  parameter int unsigned SUM_W      = cotdr_pkg::SUM_W,
  localparam int unsigned RX_W  = OVERSAMPLE * TX_W,
  localparam int unsigned ROWS  = FRAME_BITS / TX_W,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // to / from the high-speed transceivers
  output logic [TX_W-1:0]   tx_data,
  input  logic [RX_W-1:0]   rx_data,
  output logic              frame_start,
  // processor control
  input  logic              start,
  input  logic [SUM_W-1:0]  num_traces,
  output logic              busy,
  output logic              done,
  output cotdr_pkg::meas_state_e meas_state,
  // sums to the processor
  output logic              m_valid,
  input  logic              m_ready,
  output logic [SUM_W-1:0]  m_data,
  output logic              m_last
);
  logic [ROW_W-1:0]      word_cnt;
  logic                  acc_en, acc_first;
  logic                  ro_start, ro_done;
  logic                  rd_en;
  logic [ROW_W-1:0]      rd_row;
  logic [RX_W*SUM_W-1:0] rd_sums;

  frame_gen #(
    .GOLAY_LEN (GOLAY_LEN),
    .TX_W      (TX_W),
    .FRAME_BITS(FRAME_BITS)
  ) u_frame (
    .clk, .rst_n,
    .tx_data,
    .word_cnt,
    .frame_start
  );

  meas_ctrl #(.ROWS(ROWS), .CNT_W(SUM_W)) u_ctrl (
    .clk, .rst_n,
    .start, .num_traces,
    .word_cnt,
    .acc_en, .acc_first,
    .ro_start, .ro_done,
    .busy, .done,
    .state (meas_state)
  );

  trace_accumulator #(.ROWS(ROWS), .SPR(RX_W), .SUM_W(SUM_W)) u_acc (
    .clk, .rst_n,
    .acc_en, .acc_first,
    .acc_row (word_cnt),
    .rx_row (rx_data),
    .rd_en, .rd_row, .rd_sums
  );

  sum_readout #(.ROWS(ROWS), .SPR(RX_W), .SUM_W(SUM_W)) u_ro (
    .clk, .rst_n,
    .start (ro_start),
    .rd_en, .rd_row, .rd_sums,
    .m_valid, .m_ready, .m_data, .m_last,
    .done  (ro_done)
  );
endmodule
