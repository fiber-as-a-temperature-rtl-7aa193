// Testbench for meas_ctrl with 8-row frames and a free-running word
// counter. Starts measurements in the middle of a frame and checks that
// accumulation begins at word 0, lasts exactly num_traces*ROWS clocks, that
// acc_first covers only the first frame, that the readout is started once and that done follows ro_done.
// Also checks that start is ignored while busy and that 0 traces means 1.
module tb_meas_ctrl;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0, start = 0, ro_done = 0;
  logic [15:0] num_traces = '0;
  logic [2:0] word_cnt = '0;
  logic acc_en, acc_first, ro_start, busy, done;
  cotdr_pkg::meas_state_e state;
  int checks = 0, failures = 0;

  meas_ctrl #(.ROWS(ROWS), .CNT_W(16)) dut (
    .clk, .rst_n, .start, .num_traces, .word_cnt, .acc_en, .acc_first,
    .ro_start, .ro_done, .busy, .done, .state);

  always #5 clk = ~clk;
  always_ff @(posedge clk) word_cnt <= word_cnt + 1'b1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int n, input int expect_frames, input int ro_delay);
    int en_cycles = 0, first_cycles = 0, ro_starts = 0, t = 0, first_en = -1;
    @(negedge clk);
    num_traces = 16'(n); start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    while (!ro_start && t < 2000) begin
      @(posedge clk); #1; t++;
      if (acc_en) begin
        if (first_en < 0) begin
          first_en = t;
          check(word_cnt == 0, "accumulation begins at word 0");
        end
        en_cycles++;
        if (acc_first) first_cycles++;
      end
      if (t == 3) begin   // start while busy must do nothing
        num_traces = 16'd99; start = 1;
        @(negedge clk); start = 0;
      end
    end
    ro_starts = ro_start;
    check(en_cycles == expect_frames * ROWS, $sformatf("accumulated %0d clocks, expected %0d", en_cycles, expect_frames*ROWS));
    check(first_cycles == ROWS, $sformatf("acc_first for %0d clocks", first_cycles));
    repeat (ro_delay) begin
      @(posedge clk); #1;
      check(!acc_en && busy && !done, "waits for the readout");
      if (ro_start) ro_starts++;
    end
    check(ro_starts == 1, "one readout start");
    @(negedge clk); ro_done = 1;
    @(negedge clk); ro_done = 0;
    check(done, "done after ro_done");
    @(negedge clk);
    check(!done, "done is one clock");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    run(3, 3, 5);
    repeat (5) @(posedge clk);
    run(1, 1, 2);
    run(0, 1, 1);
    run(7, 7, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
