// Testbench for sum_readout at a reduced size (4 rows of 4 sums of 8 bits).
// A memory model answers rd_en one clock later. The stream sink drops
// m_ready at random; every sum must arrive once, in slot order, with m_last
// on the final one only and done one clock after it. Two transfers are run.
module tb_sum_readout;
  localparam int ROWS = 4, SPR = 4, SUM_W = 8;
  logic clk = 0, rst_n = 0, start = 0, m_ready = 0;
  logic rd_en, m_valid, m_last, done;
  logic [1:0] rd_row;
  logic [SPR*SUM_W-1:0] rd_sums = '0;
  logic [SUM_W-1:0] m_data;
  logic [SUM_W-1:0] mem [ROWS*SPR];
  int checks = 0, failures = 0, stalls = 0;

  sum_readout #(.ROWS(ROWS), .SPR(SPR), .SUM_W(SUM_W)) dut (
    .clk, .rst_n, .start, .rd_en, .rd_row, .rd_sums, .m_valid, .m_ready, .m_data, .m_last, .done);

  always #5 clk = ~clk;

  always_ff @(posedge clk)
    if (rd_en) for (int j = 0; j < SPR; j++) rd_sums[j*SUM_W +: SUM_W] <= mem[rd_row*SPR + j];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic transfer();
    int got = 0, t = 0;
    bit seen_done = 0;
    for (int i = 0; i < ROWS*SPR; i++) mem[i] = SUM_W'($urandom);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!seen_done && t < 1000) begin
      m_ready = ($urandom % 3) != 0;
      @(posedge clk); t++;
      if (m_valid && !m_ready) stalls++;
      if (m_valid && m_ready) begin
        checks++;
        if (m_data != mem[got]) begin failures++; $display("slot %0d: got %0d expected %0d", got, m_data, mem[got]); end
        checks++;
        if (m_last != (got == ROWS*SPR-1)) begin failures++; $display("m_last wrong at slot %0d", got); end
        got++;
      end
      #1;
      if (done) begin
        seen_done = 1;
        checks++;
        if (got != ROWS*SPR) begin failures++; $display("done after %0d sums", got); end
      end
      @(negedge clk);
    end
    checks++;
    if (!seen_done) begin failures++; $display("no done"); end
    m_ready = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    transfer();
    repeat (4) @(posedge clk);
    transfer();
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
