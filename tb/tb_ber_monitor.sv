// tb_ber_monitor: random words with a known number of inverted bits (0..3)
// per word; checks the error, bit and errored-word counts and clear.
// Runs with W = 473 (the 64-QAM system word) and nbits alternating between
// W and 404. The running totals are checked one clock after every word. A
// single clock; a watchdog ends the run after 10000 clocks. The counted quantities are the two BER monitors of the
// original demonstrator; the word-count output and the test data are this
// testbench's own.
module tb_ber_monitor;
  localparam int W = 473;
  logic clk = 0, rst = 1, clr = 0, valid = 0;
  logic [W-1:0] r = '0, x = '0;
  logic [63:0] errs, bits, err_words;
  logic [$clog2(W+1)-1:0] nbits = '0;
  always #2 clk = ~clk;

  ber_monitor #(.W(W)) dut (.clk, .rst, .clr, .valid, .ref_bits(r), .rcv_bits(x), .nbits,
                            .errs, .bits, .err_words);

  int checks = 0, failures = 0;

  initial begin
    longint e = 0, ew = 0, nb = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 500; k++) begin
      int ne;
      for (int i = 0; i < W; i++) r[i] = 1'($urandom_range(1));
      x = r;
      ne = k % 4;
      for (int j = 0; j < ne; j++) x[(k * 37 + j * 101) % W] ^= 1'b1;
      valid = (k % 7 != 0);
      nbits = (k % 3 == 0) ? $bits(nbits)'(404) : $bits(nbits)'(W);
      if (valid) begin
        e += ne; nb += nbits; ew += (ne != 0);
      end
      @(negedge clk);
      // running totals, one clock after each word
      checks++;
      if (errs != 64'(e) || bits != 64'(nb) || err_words != 64'(ew)) begin
        failures++;
        $display("word %0d: errs %0d/%0d bits %0d/%0d words %0d/%0d", k, errs, e, bits, nb, err_words, ew);
      end
    end
    valid = 0;
    @(negedge clk);
    checks += 3;
    if (errs != 64'(e)) begin failures++; $display("errs %0d exp %0d", errs, e); end
    if (bits != 64'(nb)) failures++;
    if (err_words != 64'(ew)) failures++;
    clr = 1;
    @(negedge clk) clr = 0;
    checks++;
    if (errs != 0 || bits != 0 || err_words != 0) failures++;
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
