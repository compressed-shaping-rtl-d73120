// tb_bit_scrambler: a scrambler and a descrambler with the same seed in
// series. Checks the scrambled words against a bit-serial PRBS31 model, that
// an all-zero input comes out balanced, and that the descrambler restores
// every word, also with gaps in the valid stream.
// One clock, default W = 101, seeds as in the RTL; watchdog after 10000
// clocks. The XOR-with-PRBS scrambling of the sign bits is the original
// scheme; the PRBS polynomial and seed checked here are this design's.
module tb_bit_scrambler;
  localparam int W = 101;
  localparam logic [30:0] SEED = 31'h2AAA_5555;
  logic clk = 0, rst = 1, v0 = 0, v1, v2;
  logic [W-1:0] d0 = '0, d1, d2;
  always #2 clk = ~clk;

  bit_scrambler #(.W(W), .SEED(SEED)) u_s (.clk, .rst, .din_valid(v0), .din(d0), .dout_valid(v1), .dout(d1));
  bit_scrambler #(.W(W), .SEED(SEED)) u_d (.clk, .rst, .din_valid(v1), .din(d1), .dout_valid(v2), .dout(d2));

  int checks = 0, failures = 0;
  bit hist[$];
  logic [W-1:0] in_q[$], scr_q[$];
  longint ones = 0, zin_bits = 0;

  function automatic bit next_bit();
    bit b;
    b = hist[hist.size() - 31] ^ hist[hist.size() - 28];
    hist.push_back(b);
    return b;
  endfunction

  always @(negedge clk) begin
    if (v1) begin
      checks++;
      if (d1 !== scr_q[0]) failures++;
      void'(scr_q.pop_front());
    end
    if (v2) begin
      checks++;
      if (d2 !== in_q[0]) failures++;
      void'(in_q.pop_front());
    end
  end

  initial begin
    logic [W-1:0] w, k;
    for (int i = 0; i < 31; i++) hist.push_back(SEED[i]);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n % 5 == 2) begin
        v0 = 0;
      end else begin
        for (int i = 0; i < W; i++) begin
          w[i] = (n < 300) ? 1'b0 : 1'($urandom_range(1));
          k[i] = next_bit();
        end
        v0 = 1; d0 = w;
        in_q.push_back(w);
        scr_q.push_back(w ^ k);
        if (n < 300) begin
          ones += $countones(w ^ k);
          zin_bits += W;
        end
      end
    end
    @(negedge clk) v0 = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (in_q.size() != 0 || real'(ones) / zin_bits < 0.47 || real'(ones) / zin_bits > 0.53) begin
      failures++; $display("balance %f", real'(ones) / zin_bits);
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
