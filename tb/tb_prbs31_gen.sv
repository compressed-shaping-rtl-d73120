// tb_prbs31_gen: compares the parallel PRBS31 generator, word by word, with
// a bit-serial shift-register model of x^31 + x^28 + 1 started from the same
// seed, including clocks with en low (output must hold).
// W = 640 as in the original source (20 x 32 bits); watchdog after 5000
// clocks. The sequence length 2^31 - 1 is the original's; polynomial and
// seed are this design's.
module tb_prbs31_gen;
  localparam int W = 640;
  localparam logic [30:0] SEED = 31'h5A3C_96E1;
  logic clk = 0, rst = 1, en = 0;
  logic [W-1:0] dout;
  always #2 clk = ~clk;

  prbs31_gen #(.W(W)) dut (.clk, .rst, .en, .dout);

  int checks = 0, failures = 0;
  bit hist[$];            // serial model: all bits so far
  logic [W-1:0] expw, last;

  function automatic bit next_bit();
    bit b;
    b = hist[hist.size() - 31] ^ hist[hist.size() - 28];
    hist.push_back(b);
    return b;
  endfunction

  initial begin
    for (int i = 0; i < 31; i++) hist.push_back(SEED[i]);   // same seed as the RTL default
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      en = (n % 7 != 3);
      last = dout;
      @(negedge clk);
      checks++;
      if (en) begin
        for (int i = 0; i < W; i++) expw[i] = next_bit();
        if (dout !== expw) begin
          failures++;
          if (failures < 4) $display("word %0d mismatch", n);
        end
      end else if (dout !== last) begin
        failures++;
        $display("output moved without en");
      end
      en = 0;
    end
    // balance: about half ones over the run
    checks++;
    begin
      int ones = 0;
      foreach (hist[i]) ones += hist[i];
      if (ones < hist.size() * 45 / 100 || ones > hist.size() * 55 / 100) begin
        failures++; $display("unbalanced");
      end
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
