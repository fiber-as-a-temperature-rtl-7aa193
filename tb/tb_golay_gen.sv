// Testbench for golay_gen. Builds the 512-element Golay pair by the
// recursive concatenation a' = a|b, b' = a|-b, checks that it is
// complementary (the two aperiodic autocorrelations add to zero off the
// main peak), then compares every word the generator returns with the
// A sequence. Combinational block: checked after a small settling delay.
module tb_golay_gen;
  localparam int L = 512;
  localparam int W = 16;
  int a [L], b [L], ta [L], tb_ [L];
  int checks = 0, failures = 0;
  logic [$clog2(L/W)-1:0] idx;
  logic [W-1:0] bits;

  golay_gen #(.GOLAY_LEN(L), .TX_W(W)) dut (.word_idx(idx), .bits(bits));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    a[0] = 1; b[0] = 1; len = 1;
    while (len < L) begin
      for (int i = 0; i < len; i++) begin
        ta[i] = a[i]; ta[len+i] = b[i];
        tb_[i] = a[i]; tb_[len+i] = -b[i];
      end
      for (int i = 0; i < 2*len; i++) begin a[i] = ta[i]; b[i] = tb_[i]; end
      len *= 2;
    end
    // complementary property of the reference pair
    for (int k = 0; k < L; k++) begin
      int s;
      s = 0;
      for (int i = 0; i + k < L; i++) s += a[i]*a[i+k] + b[i]*b[i+k];
      checks++;
      if (s != ((k == 0) ? 2*L : 0)) begin
        failures++; $display("reference pair not complementary at shift %0d: %0d", k, s);
      end
    end
    for (int w = 0; w < L/W; w++) begin
      idx = w[$clog2(L/W)-1:0];
      #1;
      for (int k = 0; k < W; k++) begin
        checks++;
        if (bits[k] != (a[w*W+k] > 0)) begin
          failures++;
          if (failures < 10) $display("word %0d bit %0d: got %0b expected %0d", w, k, bits[k], a[w*W+k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
