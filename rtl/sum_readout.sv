// Readout of the accumulated sums.
//
// After a start pulse, reads the ROWS rows of the trace memory in order and
// sends their sums one per beat, time slot 0 first, on a valid/ready stream
// towards the processor (in a system, a DMA engine that writes them to
// processor memory). m_last marks the final sum of the frame; done pulses
// for one clock after it has been accepted.
//
// Each row is fetched with rd_en, captured one clock later into a row
// buffer and then sent in SPR beats, so a row costs SPR + 2 clocks when
// m_ready stays high. The stream follows the AXI4-Stream rule that valid,
// once raised, holds with stable data until ready. The paper only says the
// sums for each time slot are transferred to the processor; the stream
// format and the one-sum-per-beat width are this design's choices.
module sum_readout #(
  parameter int unsigned ROWS  = cotdr_pkg::FRAME_WORDS,
  parameter int unsigned SPR   = cotdr_pkg::RX_W,
  parameter int unsigned SUM_W = cotdr_pkg::SUM_W,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned LANE_W = $clog2(SPR)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // memory read port
  output logic                 rd_en,
  output logic [ROW_W-1:0]     rd_row,
  input  logic [SPR*SUM_W-1:0] rd_sums,
  // stream to the processor
  output logic                 m_valid,
  input  logic                 m_ready,
  output logic [SUM_W-1:0]     m_data,
  output logic                 m_last,
  output logic                 done
);
  typedef enum logic [1:0] {RO_IDLE, RO_FETCH, RO_LOAD, RO_SEND} ro_state_e;

  ro_state_e            st;
  logic [ROW_W-1:0]     row;
  logic [LANE_W-1:0]    lane;
  logic [SPR*SUM_W-1:0] row_buf;
  logic                 last_lane;
  logic                 last_row;

  assign last_lane = (lane == LANE_W'(SPR - 1));
  assign last_row  = (row == ROW_W'(ROWS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= RO_IDLE;
      row  <= '0;
      lane <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        RO_IDLE: if (start) begin
          st  <= RO_FETCH;
          row <= '0;
        end
        RO_FETCH: st <= RO_LOAD;
        RO_LOAD: begin
          st   <= RO_SEND;
          lane <= '0;
        end
        RO_SEND: if (m_ready) begin
          lane <= lane + 1'b1;
          if (last_lane) begin
            if (last_row) begin
              st   <= RO_IDLE;
              done <= 1'b1;
            end else begin
              st  <= RO_FETCH;
              row <= row + 1'b1;
            end
          end
        end
        default: st <= RO_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == RO_LOAD) row_buf <= rd_sums;
  end

  assign rd_en   = (st == RO_FETCH);
  assign rd_row  = row;
  assign m_valid = (st == RO_SEND);
  assign m_data  = row_buf[lane*SUM_W +: SUM_W];
  assign m_last  = m_valid && last_lane && last_row;

  // Stream rule: a beat that is offered stays offered, unchanged, until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (m_valid && !m_ready) |=> (m_valid && $stable(m_data) && $stable(m_last)))
    else $error("sum_readout: stream beat withdrawn or changed before it was taken");
endmodule
