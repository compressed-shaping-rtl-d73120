// bitflip_enc: bit-flipping encoder in front of the shaping encoder.
//
// Compressed shaping wants more zeros than ones at the shaping encoder input,
// because zero-heavy words are mapped to low-energy amplitudes. A source that
// is mostly ones (for example an alarm indication signal) is therefore
// inverted: the encoder counts the ones of the K-bit word and, when they
// outnumber the zeros, outputs the inverted word with a parity bit 1 on top;
// otherwise it outputs the word unchanged with parity 0. The output has at
// least as many zeros as ones among its K data bits. A tie is not flipped.
// This follows the paper; the parity bit's position (MSB, f[K]) is this
// design's choice.
//
// Timing: one clock of latency; f_valid follows s_valid.
module bitflip_enc #(
  parameter int K = 372
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         s_valid,
  input  logic [K-1:0] s,
  output logic         f_valid,
  output logic [K:0]   f
);

  logic [$clog2(K+1)-1:0] ones;
  logic                   flip;

  // population count with an adder chain (synthesises to an adder tree)
  always_comb begin
    ones = '0;
    for (int i = 0; i < K; i++) ones += $bits(ones)'(s[i]);
    flip = (int'(ones) * 2 > K);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      f_valid <= 1'b0;
      f       <= '0;
    end else begin
      f_valid <= s_valid;
      f       <= {flip, flip ? ~s : s};
    end
  end

endmodule
