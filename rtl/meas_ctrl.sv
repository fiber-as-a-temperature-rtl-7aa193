// Measurement sequencer.
//
// A start pulse arms the sequencer; at the next frame boundary of the shared
// frame word counter it enables accumulation for num_traces whole frames
// (the first frame overwrites the memory, the rest add to it), row k of the
// receive memory being filled while transmit word k is sent (the word
// counter itself addresses the memory). It then starts
// the readout and holds busy until the readout reports the last sum sent,
// when done pulses for one clock. start is ignored while busy.
//
// From the paper: traces are summed over whole, phase-aligned frames and the
// sums are then passed to the processor. The start/busy/done handshake,
// treating num_traces = 0 as 1 and the frame-boundary arming are this
// design's choices. Timing: acc_en rises with word_cnt == 0 and falls after
// word ROWS-1 of the last frame, so a measurement of N traces takes N*ROWS
// clocks of accumulation after the wait for the frame boundary.
module meas_ctrl
#(
  parameter int unsigned ROWS  = cotdr_pkg::FRAME_WORDS,
  parameter int unsigned CNT_W = cotdr_pkg::SUM_W,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] num_traces,
  input  logic [ROW_W-1:0] word_cnt,
  output logic             acc_en,
  output logic             acc_first,
  output logic             ro_start,
  input  logic             ro_done,
  output logic             busy,
  output logic             done,
  output cotdr_pkg::meas_state_e state
);
  logic [CNT_W-1:0] traces_left;   // frames still to accumulate, this one included
  logic             first_frame;
  logic             last_word;

  assign last_word = (word_cnt == ROW_W'(ROWS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= cotdr_pkg::ST_IDLE;
      traces_left <= '0;
      first_frame <= 1'b0;
      ro_start    <= 1'b0;
      done        <= 1'b0;
    end else begin
      ro_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        cotdr_pkg::ST_IDLE: if (start) begin
          state       <= cotdr_pkg::ST_ARM;
          traces_left <= (num_traces == '0) ? CNT_W'(1) : num_traces;
        end
        // The next clock's word_cnt is 0: accumulation begins with it.
        cotdr_pkg::ST_ARM: if (last_word) begin
          state       <= cotdr_pkg::ST_ACCUM;
          first_frame <= 1'b1;
        end
        cotdr_pkg::ST_ACCUM: if (last_word) begin
          first_frame <= 1'b0;
          traces_left <= traces_left - 1'b1;
          if (traces_left == CNT_W'(1)) begin
            state    <= cotdr_pkg::ST_READOUT;
            ro_start <= 1'b1;
          end
        end
        cotdr_pkg::ST_READOUT: if (ro_done) begin
          state <= cotdr_pkg::ST_DONE;
          done  <= 1'b1;
        end
        cotdr_pkg::ST_DONE: state <= cotdr_pkg::ST_IDLE;
        default: state <= cotdr_pkg::ST_IDLE;
      endcase
    end
  end

  assign acc_en    = (state == cotdr_pkg::ST_ACCUM);
  assign acc_first = first_frame;
  assign busy      = (state != cotdr_pkg::ST_IDLE);

  // Accumulation starts only on a frame boundary.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $rose(acc_en) |-> (word_cnt == '0))
    else $error("meas_ctrl: accumulation did not start at a frame boundary");
endmodule
