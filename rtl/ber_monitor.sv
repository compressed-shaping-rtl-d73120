// ber_monitor: bit error counter.
//
// Used twice in the demonstrator: behind the error insertion (the "assumed
// post-FEC BER", comparing against the shaping encoder output) and behind the
// bit-flipping decoder (the system output BER, comparing against the source).
// Each valid clock it adds the number of differing bits between ref and rcv
// to errs and nbits (the number of bits of the word that are in use, W when
// all are) to bits; BER = errs / bits. Bits outside the used ones must be
// equal in ref and rcv. err_words counts words with at least one error. clr
// restarts the count. Counter widths and the nbits input are this design's.
//
// Timing: counters update one clock after valid.
module ber_monitor #(
  parameter int W = 404
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clr,
  input  logic         valid,
  input  logic [W-1:0] ref_bits,
  input  logic [W-1:0] rcv_bits,
  input  logic [$clog2(W+1)-1:0] nbits,   // bits of this word in use
  output logic [63:0]  errs,
  output logic [63:0]  bits,
  output logic [63:0]  err_words
);

  logic [$clog2(W+1)-1:0] n;
  logic [W-1:0]           diff;

  always_comb begin
    diff = ref_bits ^ rcv_bits;
    n    = '0;
    for (int i = 0; i < W; i++) n += $bits(n)'(diff[i]);
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      errs      <= '0;
      bits      <= '0;
      err_words <= '0;
    end else if (valid) begin
      errs <= errs + 64'(n);
      bits <= bits + 64'(nbits);
      if (n != 0) err_words <= err_words + 1'b1;
    end
  end

endmodule
