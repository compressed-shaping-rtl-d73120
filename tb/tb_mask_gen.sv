// tb_mask_gen: checks the mask window against the published example for
// P_S(1) = 0.4 (ratio 16): at clock cycle index c the zero window covers the
// four groups 19-c, 18-c, 17-c, 16-c (mod 20). For every other ratio it
// checks the number and value of forced groups per clock, that every group is
// forced equally often over 20 clocks, and that the implied mark ratio
// equals ratio/40.
// N_GROUPS = 20 as in the original; watchdog after 5000 clocks. The
// P_S(1) = 0.4 example is the original's; the rule for other ratios and the
// ratio/40 encoding are this design's.
module tb_mask_gen;
  logic clk = 0, rst = 1, en = 0;
  logic [5:0] ratio = 6'd16;
  logic [19:0][1:0] mask;
  logic [4:0] cidx;
  always #2 clk = ~clk;

  mask_gen #(.N_GROUPS(20)) dut (.clk, .rst, .en, .ratio, .mask, .cycle_idx(cidx));

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // ---- published example, 40 clocks (two window turns)
    en = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      for (int g = 0; g < 20; g++) begin
        bit in_win;
        in_win = 0;
        for (int k = 0; k < 4; k++) if (g == ((19 - k - (n % 20)) + 40) % 20) in_win = 1;
        checks++;
        if (mask[g] != (in_win ? 2'd0 : 2'd1)) begin
          failures++;
          if (failures < 5) $display("c=%0d g=%0d mask=%0d", n % 20, g, mask[g]);
        end
      end
      checks++;
      if (cidx != 5'(n % 20)) begin failures++; $display("cycle index"); end
    end
    // ---- all ratios
    for (int r = 0; r <= 40; r++) begin
      int forced_cnt[20];
      int ones_x2;
      @(negedge clk);
      ratio = 6'(r);
      @(negedge clk);
      foreach (forced_cnt[g]) forced_cnt[g] = 0;
      ones_x2 = 0;
      for (int n = 0; n < 20; n++) begin
        int nf;
        @(negedge clk);
        nf = 0;
        for (int g = 0; g < 20; g++) begin
          if (mask[g] != 2'd1) begin
            nf++;
            forced_cnt[g]++;
            checks++;
            if (mask[g] != ((r <= 20) ? 2'd0 : 2'd2)) failures++;
          end
          ones_x2 += (mask[g] == 2'd2) ? 2 : (mask[g] == 2'd1) ? 1 : 0;
        end
        checks++;
        if (nf != ((r <= 20) ? 20 - r : r - 20)) begin
          failures++; $display("ratio %0d: %0d forced groups", r, nf);
        end
      end
      for (int g = 0; g < 20; g++) begin
        checks++;
        if (forced_cnt[g] != ((r <= 20) ? 20 - r : r - 20)) failures++;
      end
      // mean ones fraction = ones_x2 / (2 * 400) must equal r / 40
      checks++;
      if (ones_x2 * 40 != r * 800) begin failures++; $display("ratio %0d mean", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
