// Testbench for frame_gen at its default size. Over three frames it checks
// every transmitted bit against a Golay reference built by recursive
// concatenation followed by the zero fill, checks that the word counter
// steps once per clock and that frame_start recurs exactly every
// FRAME_BITS/16 clocks (16 bits per clock is 2.5 Gbit/s at 156.25 MHz).
module tb_frame_gen;
  localparam int L = 512, W = 16, F = 4096, WORDS = F / W;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] tx_data;
  logic [$clog2(WORDS)-1:0] word_cnt;
  logic frame_start;
  int a [L], ta [L], bb [L], tbb [L];
  int checks = 0, failures = 0;

  frame_gen dut (.clk, .rst_n, .tx_data, .word_cnt, .frame_start);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, pos, last_start, nstarts;
    logic exp_bit;
    a[0] = 1; bb[0] = 1; len = 1;
    while (len < L) begin
      for (int i = 0; i < len; i++) begin
        ta[i] = a[i]; ta[len+i] = bb[i]; tbb[i] = a[i]; tbb[len+i] = -bb[i];
      end
      for (int i = 0; i < 2*len; i++) begin a[i] = ta[i]; bb[i] = tbb[i]; end
      len *= 2;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // first word after reset is word 0
    @(posedge clk); #1;
    checks++;
    if (word_cnt != 0 || !frame_start) begin failures++; $display("first word is not word 0"); end
    pos = 0; last_start = 0; nstarts = 0;
    for (int c = 0; c < 3*WORDS; c++) begin
      checks++;
      if (word_cnt != c % WORDS) begin failures++; $display("cycle %0d word_cnt %0d", c, word_cnt); end
      if (frame_start) begin
        checks++;
        if (c % WORDS != 0) begin failures++; $display("frame_start at cycle %0d", c); end
        if (nstarts > 0) begin
          checks++;
          if (c - last_start != WORDS) begin failures++; $display("frame period %0d clocks", c - last_start); end
        end
        last_start = c; nstarts++;
      end
      for (int k = 0; k < W; k++) begin
        int bi;
        bi = (c % WORDS) * W + k;
        exp_bit = (bi < L) ? (a[bi] > 0) : 1'b0;
        checks++;
        if (tx_data[k] != exp_bit) begin
          failures++;
          if (failures < 10) $display("frame bit %0d: got %0b expected %0b", bi, tx_data[k], exp_bit);
        end
      end
      @(posedge clk); #1;
    end
    checks++;
    if (nstarts != 3) begin failures++; $display("%0d frame starts in 3 frames", nstarts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
