// End-to-end testbench of cotdr_top at its default size, closing the loop
// through fiber_loop_model: a reference reflection, two partially
// reflecting connectors 4 m and 14 m further, and an open end at 39 m
// (the 4 m + 10 m + 25 m cascade, about 97.9 samples of round trip per
// meter at 10 GS/s).
//
// Measurement 1 sums 3 traces, measurement 2 sums 4000 (the averaging
// used for one temperature reading). For both, the testbench adds up the
// receive samples it fed in, slot by slot, and compares every one of the
// 16384 sums that come out of the stream. For measurement 2 it also
// correlates the summed trace with the oversampled Golay sequence, as the
// processor software would, and checks that each reflection gives a peak at
// its delay. It checks that accumulation takes exactly num_traces frames of
// 256 clocks, and counts the mechanisms: waiting for a frame boundary,
// overwriting old sums with a new measurement, stream back-pressure and a
// start ignored while busy.
module tb_cotdr_top;
  localparam int TX_W = 16, RX_W = 64, FRAME_BITS = 4096, L = 512;
  localparam int SLOTS = FRAME_BITS * 4, WORDS = FRAME_BITS / TX_W;
  localparam int NR = 4;
  localparam int DELAY [NR] = '{200, 592, 1571, 4019};
  localparam int AMP   [NR] = '{100, 60, 60, 80};
  localparam int NOISE = 400;

  logic clk = 0, rst_n = 0;
  logic [TX_W-1:0] tx_data;
  logic [RX_W-1:0] rx_data;
  logic frame_start, start = 0, busy, done, m_valid, m_ready = 0, m_last;
  logic [15:0] num_traces = '0, m_data;
  cotdr_pkg::meas_state_e meas_state;

  int expect_sum [SLOTS];
  int got_sum [SLOTS];
  int checks = 0, failures = 0;
  int n_arm_wait = 0, n_overwrite = 0, n_stall = 0, n_ignored_start = 0;
  bit collecting = 0;
  int frames_seen = 0, acc_clocks = 0;

  cotdr_top dut (
    .clk, .rst_n, .tx_data, .rx_data, .frame_start,
    .start, .num_traces, .busy, .done, .meas_state,
    .m_valid, .m_ready, .m_data, .m_last);

  fiber_loop_model #(.NR(NR), .DELAY(DELAY), .AMP(AMP), .NOISE(NOISE)) u_loop (
    .clk, .tx_data, .rx_data);

  always #3.2 clk = ~clk;   // 156.25 MHz

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // Reference model of the accumulation: a frame is summed while the core
  // is in its accumulate state, slot = word counter * 64 + lane.
  always @(posedge clk) begin
    if (rst_n && meas_state == cotdr_pkg::ST_ACCUM) begin
      int w;
      w = int'(dut.u_frame.word_cnt);
      if (w == 0) frames_seen++;
      acc_clocks++;
      for (int j = 0; j < RX_W; j++)
        expect_sum[w*RX_W + j] = ((frames_seen == 1) ? 0 : expect_sum[w*RX_W + j]) + int'(rx_data[j]);
    end
  end

  task automatic measure(input int n);
    int got, t, cyc;
    frames_seen = 0; acc_clocks = 0;
    @(negedge clk);
    num_traces = 16'(n); start = 1;
    @(negedge clk);
    start = 0;
    if (meas_state == cotdr_pkg::ST_ARM && !frame_start) n_arm_wait++;
    // a second start while busy must change nothing
    repeat (5) @(negedge clk);
    num_traces = 16'd7; start = 1;
    @(negedge clk);
    start = 0;
    if (busy) n_ignored_start++;
    got = 0; t = 0;
    while (busy && t < 3_000_000) begin
      m_ready = ($urandom % 4) != 0;
      @(posedge clk); t++;
      if (m_valid && !m_ready) n_stall++;
      if (m_valid && m_ready) begin
        if (got < SLOTS) got_sum[got] = int'(m_data);
        check(m_last == (got == SLOTS-1), $sformatf("m_last at sum %0d", got));
        got++;
      end
      @(negedge clk);
    end
    m_ready = 0;
    check(got == SLOTS, $sformatf("received %0d sums, expected %0d", got, SLOTS));
    check(frames_seen == n, $sformatf("accumulated %0d frames, expected %0d", frames_seen, n));
    check(acc_clocks == n * WORDS, $sformatf("accumulation took %0d clocks, expected %0d", acc_clocks, n*WORDS));
    for (int s = 0; s < SLOTS; s++)
      check(got_sum[s] == expect_sum[s], $sformatf("slot %0d: sum %0d expected %0d", s, got_sum[s], expect_sum[s]));
  endtask

  // Correlate the summed trace with the oversampled Golay sequence (+1/-1,
  // built by recursive concatenation) and check a peak at each reflection.
  task automatic check_peaks(input int n);
    int a [L], b [L], ta [L], tb_ [L];
    int len;
    real mean, corr, expect_peak;
    real c [SLOTS];
    a[0] = 1; b[0] = 1; len = 1;
    while (len < L) begin
      for (int i = 0; i < len; i++) begin
        ta[i] = a[i]; ta[len+i] = b[i]; tb_[i] = a[i]; tb_[len+i] = -b[i];
      end
      for (int i = 0; i < 2*len; i++) begin a[i] = ta[i]; b[i] = tb_[i]; end
      len *= 2;
    end
    mean = 0;
    for (int s = 0; s < SLOTS; s++) mean += got_sum[s];
    mean /= SLOTS;
    for (int d = 0; d < SLOTS; d++) begin
      corr = 0;
      for (int j = 0; j < 4*L; j++)
        corr += a[j/4] * (got_sum[(d + j) % SLOTS] - mean);
      c[d] = corr;
    end
    for (int i = 0; i < NR; i++) begin
      int best, pos;
      // one clock of loop latency: the core registers tx_data, the model rx_data
      pos = DELAY[i] + RX_W;
      best = pos - 8;
      for (int d = pos - 8; d <= pos + 8; d++) if (c[d] > c[best]) best = d;
      // level step of one reflection: AMP/NOISE of the slicer's output range
      expect_peak = real'(n) * AMP[i] / (2.0 * NOISE) * 4 * L;
      $display("reflection %0d: expected at %0d, peak at %0d, height %0.0f (linear estimate %0.0f)",
               i, pos, best, c[best], expect_peak);
      check(best >= pos - 1 && best <= pos + 1, $sformatf("peak %0d at %0d", i, best));
      check(c[pos] > 0.6 * expect_peak, $sformatf("peak %0d too low", i));
    end
    // away from the reflections only sidelobes and noise remain
    begin
      real worst;
      worst = 0;
      for (int d = 0; d < SLOTS; d++) begin
        bit near;
        near = 0;
        for (int i = 0; i < NR; i++) if (d > DELAY[i] + RX_W - 16 && d < DELAY[i] + RX_W + 16) near = 1;
        if (!near && c[d] > worst) worst = c[d];
      end
      expect_peak = real'(n) * AMP[1] / (2.0 * NOISE) * 4 * L;
      $display("largest correlation away from the reflections: %0.0f", worst);
      check(worst < 0.4 * expect_peak, "spurious correlation peak");
    end
  endtask

  initial begin
    repeat (5) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (1000) @(posedge clk);   // loop filled, mid-frame
    measure(3);
    repeat (77) @(posedge clk);
    measure(4000);
    n_overwrite++;                  // measurement 2 started on top of measurement 1
    check_peaks(4000);
    $display("mechanisms: arm_wait=%0d overwrite=%0d stall=%0d ignored_start=%0d",
             n_arm_wait, n_overwrite, n_stall, n_ignored_start);
    check(n_arm_wait > 0, "never waited for a frame boundary");
    check(n_overwrite > 0, "never overwrote an old measurement");
    check(n_stall > 0, "stream back-pressure never happened");
    check(n_ignored_start > 0, "start while busy never tried");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
