// bit_scrambler: sign-bit scrambler (and, as a second instance, descrambler).
//
// Compressed shaping leaves the amplitude bits unscrambled, so that their
// nonuniformity survives into the shaping encoder, but the sign bits are
// XORed with a PRBS to keep the numbers of zeros and ones equal (DC balance
// and clock recovery of bipolar QAM signalling). Each valid word of W bits is
// XORed with the next W bits of a PRBS31 sequence. Applying the same module
// with the same seed to the scrambled words, word for word, restores them, so
// one module serves both ends. The PRBS and its seed are this design's choice
// (the paper says only "a PRBS").
//
// Timing: one clock of latency; dout_valid follows din_valid. The PRBS moves
// only on valid words, so transmitter and receiver instances stay aligned as
// long as they see the same number of words after reset.
module bit_scrambler #(
  parameter int          W    = 101,
  parameter logic [30:0] SEED = 31'h2AAA_5555
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         din_valid,
  input  logic [W-1:0] din,
  output logic         dout_valid,
  output logic [W-1:0] dout
);

  logic [30:0]   state;
  logic [W+30:0] seq;

  always_comb begin
    seq = '0;
    seq[30:0] = state;
    for (int n = 31; n < W + 31; n++)
      seq[n] = seq[n-31] ^ seq[n-28];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= SEED;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= din_valid;
      if (din_valid) begin
        state <= seq[W+30:W];
        dout  <= din ^ seq[W+30:31];
      end
    end
  end

endmodule
