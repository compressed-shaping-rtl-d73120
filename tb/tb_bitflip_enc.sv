// tb_bitflip_enc: random words of densities 0..1, and the edge cases of
// exactly K/2 and K/2 + 1 ones. Checks parity, data, the guarantee that the
// output never has more ones than zeros, and the one-clock latency.
// K = 372 as in the original; watchdog after 10000 clocks. The flip rule
// (flip when ones outnumber zeros) is the original one; not flipping on a
// tie is this design's reading of it and is checked explicitly.
module tb_bitflip_enc;
  localparam int K = 372;
  logic clk = 0, rst = 1, s_valid = 0, f_valid;
  logic [K-1:0] s = '0;
  logic [K:0] f;
  always #2 clk = ~clk;

  bitflip_enc #(.K(K)) dut (.clk, .rst, .s_valid, .s, .f_valid, .f);

  int checks = 0, failures = 0, n_flip = 0;

  task automatic check(logic [K-1:0] w);
    bit fl;
    @(negedge clk);
    s = w; s_valid = 1;
    @(negedge clk);
    s_valid = 0;
    fl = ($countones(w) > K / 2);
    n_flip += fl;
    checks += 3;
    if (!f_valid) failures++;
    if (f !== {fl, fl ? ~w : w}) begin
      failures++;
      $display("ones=%0d parity=%0d", $countones(w), f[K]);
    end
    if ($countones(f[K-1:0]) > K / 2) failures++;
  endtask

  initial begin
    logic [K-1:0] w;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < K; i++) w[i] = ($urandom_range(99) < (n % 101));
      check(w);
    end
    w = '0; for (int i = 0; i < K / 2; i++) w[2*i] = 1'b1;      // tie: 186 ones
    check(w);
    w[1] = 1'b1;                                                 // 187 ones
    check(w);
    checks++;
    if (n_flip < 100 || n_flip > 300) begin failures++; $display("flips %0d", n_flip); end
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
