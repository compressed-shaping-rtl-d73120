// err_insert: error insertion between the shaping encoder and decoder.
//
// Stands in for the residual errors of an FEC decoder at a chosen post-FEC
// bit error rate. The rate is given as an interval: one bit of every
// 'interval' bits is inverted (BER = 1/interval). Errors are sparse and
// isolated, the case that the paper reports as the worst for the output BER
// behind a hierarchical DM decoder. A down-counter holds the number of bits
// left before the next error; each valid word of W bits either inverts bit
// 'cnt' (when cnt < W) and reloads cnt + interval - W, or subtracts W. The
// error positions therefore walk through the word whenever interval is not a
// multiple of W. Counting scheme and interval encoding are this design's
// choice; the paper gives only the function and the BER setting.
//
// Interface: interval must be at least W (at most one error per word).
// With en low the data pass unchanged and the counter is re-armed.
// Timing: one clock of latency; n_err counts inserted errors.
module err_insert #(
  parameter int W = 404
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [63:0]  interval,
  input  logic         din_valid,
  input  logic [W-1:0] din,
  output logic         dout_valid,
  output logic [W-1:0] dout,
  output logic         err_now,     // an error was inserted in dout
  output logic [63:0]  n_err
);

  logic [63:0]  cnt;
  logic         hit;
  logic [W-1:0] pattern;

  always_comb begin
    hit     = en && din_valid && (cnt < 64'(W));
    pattern = '0;
    if (hit) pattern[cnt[$clog2(W)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt        <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      err_now    <= 1'b0;
      n_err      <= '0;
    end else begin
      dout_valid <= din_valid;
      dout       <= din ^ pattern;
      err_now    <= hit;
      if (hit) n_err <= n_err + 1'b1;
      if (!en)            cnt <= interval - 64'd1;
      else if (din_valid) cnt <= hit ? cnt + interval - 64'(W) : cnt - 64'(W);
    end
  end

  // the interval must leave at least one word between errors
  a_interval : assert property (@(posedge clk) disable iff (rst)
                                en |-> interval >= 64'(W));

endmodule
