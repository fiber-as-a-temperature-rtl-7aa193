// Testbench for trace_accumulator at a reduced size (16 rows of 8 sums of
// 10 bits). Sends random one-bit rows frame by frame, one row per clock,
// the first frame with acc_first, keeps its own sums, then reads every
// row back through the readout port (result one clock after rd_en) and
// compares. A second measurement checks that acc_first clears the old sums.
module tb_trace_accumulator;
  localparam int ROWS = 16, SPR = 8, SUM_W = 10;
  logic clk = 0, rst_n = 0;
  logic acc_en = 0, acc_first = 0, rd_en = 0;
  logic [$clog2(ROWS)-1:0] acc_row = '0, rd_row = '0;
  logic [SPR-1:0] rx_row = '0;
  logic [SPR*SUM_W-1:0] rd_sums;
  int model [ROWS][SPR];
  int checks = 0, failures = 0;

  trace_accumulator #(.ROWS(ROWS), .SPR(SPR), .SUM_W(SUM_W)) dut (
    .clk, .rst_n, .acc_en, .acc_first, .acc_row, .rx_row, .rd_en, .rd_row, .rd_sums);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int frames);
    for (int f = 0; f < frames; f++)
      for (int r = 0; r < ROWS; r++) begin
        logic [SPR-1:0] s;
        s = SPR'($urandom);
        @(negedge clk);
        acc_en = 1; acc_first = (f == 0); acc_row = r[$clog2(ROWS)-1:0]; rx_row = s;
        for (int j = 0; j < SPR; j++) model[r][j] = ((f == 0) ? 0 : model[r][j]) + int'(s[j]);
      end
    @(negedge clk);
    acc_en = 0; acc_first = 0;
  endtask

  task automatic check_all();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      rd_en = 1; rd_row = r[$clog2(ROWS)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < SPR; j++) begin
        checks++;
        if (rd_sums[j*SUM_W +: SUM_W] != SUM_W'(model[r][j])) begin
          failures++;
          if (failures < 10) $display("row %0d slot %0d: got %0d expected %0d", r, j,
                                      rd_sums[j*SUM_W +: SUM_W], model[r][j]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    measure(20);
    check_all();
    measure(3);       // new measurement must not include the old sums
    check_all();
    measure(1);       // a single trace
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
