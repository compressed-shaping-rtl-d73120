// tb_source_gen: checks every source bit against an independent model - a
// bit-serial PRBS31 and the mask rule recomputed from the reported window
// position - for several target mark ratios below, at and above 0.5, and
// checks the measured mark ratio against ratio/40.
// Full 640-bit width, one clock; watchdog after 10000 clocks. The three
// source choices (0, PRBS, 1) and the 20 x 32 grouping are the original's;
// the window rule for other ratios is this design's.
module tb_source_gen;
  localparam logic [30:0] SEED = 31'h5A3C_96E1;
  logic clk = 0, rst = 1, en = 0;
  logic [5:0] ratio = 6'd20;
  logic [639:0] src;
  logic src_valid;
  logic [4:0] cidx;
  always #2 clk = ~clk;

  source_gen dut (.clk, .rst, .en, .ratio, .src, .src_valid, .cycle_idx(cidx));

  int checks = 0, failures = 0;
  bit hist[$];

  function automatic bit next_bit();
    bit b;
    b = hist[hist.size() - 31] ^ hist[hist.size() - 28];
    hist.push_back(b);
    return b;
  endfunction

  initial begin
    int ratios[6] = '{16, 20, 28, 0, 40, 2};
    for (int i = 0; i < 31; i++) hist.push_back(SEED[i]);
    repeat (2) @(negedge clk);
    rst = 0;
    foreach (ratios[k]) begin
      longint ones, total;
      ones = 0; total = 0;
      ratio = 6'(ratios[k]);
      for (int n = 0; n < 400; n++) begin
        logic [639:0] expw;
        int z;
        en = 1;
        @(negedge clk);
        z = (ratios[k] <= 20) ? 20 - ratios[k] : ratios[k] - 20;
        for (int g = 0; g < 20; g++)
          for (int b = 0; b < 32; b++) begin
            bit p;
            p = next_bit();
            if (((g + int'(cidx)) % 20) >= 20 - z) expw[32*g + b] = (ratios[k] > 20);
            else expw[32*g + b] = p;
          end
        checks++;
        if (!src_valid || src !== expw) begin
          failures++;
          if (failures < 4) $display("ratio %0d word %0d mismatch", ratios[k], n);
        end
        // skip the first word after a ratio change (mask registered)
        if (n > 0) begin
          ones  += $countones(src);
          total += 640;
        end
      end
      checks++;
      if ((real'(ones) / total - ratios[k] / 40.0) > 0.01 ||
          (real'(ones) / total - ratios[k] / 40.0) < -0.01) begin
        failures++;
        $display("ratio %0d: measured %f", ratios[k], real'(ones) / total);
      end
    end
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
