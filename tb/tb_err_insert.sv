// tb_err_insert: with interval N the inserted errors must sit exactly at the
// absolute bit positions N-1, 2N-1, ... of the stream (words of W bits, word
// bit 0 first). Checks data, positions, counts for two intervals, the
// pass-through with en low, and the one-clock latency.
// W = 404 as in the original (errors before the shaping decoder); watchdog
// after 10000 clocks. Evenly spaced errors are this design's reading of
// "sparse errors".
module tb_err_insert;
  localparam int W = 404;
  logic clk = 0, rst = 1, en = 0, din_valid = 0, dout_valid, err_now;
  logic [63:0] interval = 64'd1000, n_err;
  logic [W-1:0] din = '0, dout;
  always #2 clk = ~clk;

  err_insert #(.W(W)) dut (.clk, .rst, .en, .interval, .din_valid, .din,
                           .dout_valid, .dout, .err_now, .n_err);

  int checks = 0, failures = 0;

  task automatic run(longint n_int, int words, bit enable);
    longint base = 0;
    int exp_errs = 0;
    logic [63:0] e0;
    logic [W-1:0] w, pat;
    @(negedge clk);
    en = 0; interval = 64'(n_int); din_valid = 0;
    @(negedge clk);
    e0 = n_err;
    en = enable;
    for (int k = 0; k < words; k++) begin
      for (int i = 0; i < W; i++) w[i] = 1'($urandom_range(1));
      pat = '0;
      if (enable)
        for (int i = 0; i < W; i++)
          if ((base + i + 1) % n_int == 0) begin pat[i] = 1'b1; exp_errs++; end
      din = w; din_valid = (k >= 0);
      @(negedge clk);
      checks++;
      if (!dout_valid || dout !== (w ^ pat) || err_now != (pat != 0)) begin
        failures++;
        if (failures < 5) $display("word %0d: error pattern differs", k);
      end
      base += W;
    end
    din_valid = 0;
    @(negedge clk);
    checks++;
    if (n_err - e0 != 64'(exp_errs)) begin
      failures++; $display("count %0d expected %0d", n_err - e0, exp_errs);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(1000, 300, 1);
    run(404 * 3, 100, 1);
    run(777, 100, 0);
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
