// tb_pmf_monitor: random amplitude words with a skewed distribution in
// 64-QAM mode (16 bins of 4 bits) and 16-QAM mode (4 bins of 2 bits, two per
// 4-bit word); checks every bin against counts kept by the testbench, and
// that the totals equal 101 (64-QAM) or 202 (16-QAM) amplitudes per word.
// N_AMP = 101, CW = 48; watchdog after 10000 clocks. The PMF monitor at the
// shaping encoder output is the original's; bin layout is this design's.
module tb_pmf_monitor;
  logic clk = 0, rst = 1, clr = 0, qam16 = 0, valid = 0;
  logic [403:0] a = '0;
  logic [15:0][47:0] hist;
  always #2 clk = ~clk;

  pmf_monitor #(.N_AMP(101)) dut (.clk, .rst, .clr, .qam16, .valid, .a, .hist);

  int checks = 0, failures = 0;

  task automatic run(bit q16, int words);
    longint cnt[16];
    longint tot = 0;
    foreach (cnt[b]) cnt[b] = 0;
    @(negedge clk);
    qam16 = q16; clr = 1;
    @(negedge clk) clr = 0;
    for (int k = 0; k < words; k++) begin
      for (int j = 0; j < 101; j++) begin
        logic [3:0] v;
        v = ($urandom_range(3) == 0) ? 4'($urandom_range(15)) : 4'($urandom_range(3));
        a[4*j +: 4] = v;
        if (q16) begin
          cnt[v[1:0]]++;
          cnt[v[3:2]]++;
        end else cnt[v]++;
      end
      valid = (k % 5 != 4);
      if (!valid) begin
        // undo: this word is not counted
        for (int j = 0; j < 101; j++) begin
          if (q16) begin
            cnt[a[4*j +: 2]]--;
            cnt[a[4*j + 2 +: 2]]--;
          end else cnt[a[4*j +: 4]]--;
        end
      end
      @(negedge clk);
    end
    valid = 0;
    @(negedge clk);
    for (int b = 0; b < 16; b++) begin
      checks++;
      tot += longint'(hist[b]);
      if (hist[b] != 48'(cnt[b])) begin
        failures++; $display("bin %0d: %0d expected %0d", b, hist[b], cnt[b]);
      end
    end
    checks++;
    if (tot != longint'(words - words / 5) * (q16 ? 202 : 101)) begin failures++; $display("total"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(0, 200);
    run(1, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
