// tb_bitflip_dec: random words with both parity values; checks that the
// parity bit is dropped, the data inverted exactly when it is 1, and the
// one-clock latency with back-to-back words.
// K = 372 as in the original; checker samples on the falling clock edge;
// watchdog after 10000 clocks. The flip rule is the original one.
module tb_bitflip_dec;
  localparam int K = 372;
  logic clk = 0, rst = 1, f_valid = 0, s_valid;
  logic [K:0] f = '0;
  logic [K-1:0] s;
  logic [K-1:0] exp_q[$];
  always #2 clk = ~clk;

  bitflip_dec #(.K(K)) dut (.clk, .rst, .f_valid, .f, .s_valid, .s);

  int checks = 0, failures = 0, n_out = 0;

  always @(negedge clk) if (s_valid) begin
    checks++;
    n_out++;
    if (s !== exp_q[0]) begin failures++; $display("mismatch at %0d", n_out); end
    void'(exp_q.pop_front());
  end

  initial begin
    logic [K:0] w;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i <= K; i++) w[i] = $urandom_range(1);
      @(negedge clk);
      f = w; f_valid = 1;
      exp_q.push_back(w[K] ? ~w[K-1:0] : w[K-1:0]);
    end
    @(negedge clk) f_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != 500) begin failures++; $display("n_out %0d", n_out); end
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
