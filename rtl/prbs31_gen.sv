// prbs31_gen: parallel generator of the PRBS of length 2^31 - 1 that drives
// the source generator (and, with another seed, the sign-bit scrambler).
//
// The sequence obeys b[n] = b[n-31] xor b[n-28] (polynomial x^31 + x^28 + 1,
// the usual PRBS31). The 31-bit state holds the last 31 bits, oldest in bit 0.
// Each clock with en high the next W bits are computed by unrolling the
// recurrence and registered on dout, first bit in dout[0]; the state moves on
// by W bits. The paper names only "a PRBS of length 2^31 - 1"; the polynomial,
// the bit order and the seed are this design's choice.
//
// Timing: dout changes one clock after en. Synchronous active-high reset loads
// SEED (which must not be zero) and clears dout.
module prbs31_gen #(
  parameter int          W    = 640,
  parameter logic [30:0] SEED = 31'h5A3C_96E1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  output logic [W-1:0] dout
);

  logic [30:0]     state;
  logic [W+30:0]   seq;

  always_comb begin
    seq = '0;
    seq[30:0] = state;
    for (int n = 31; n < W + 31; n++)
      seq[n] = seq[n-31] ^ seq[n-28];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= SEED;
      dout  <= '0;
    end else if (en) begin
      state <= seq[W+30:W];
      dout  <= seq[W+30:31];
    end
  end

endmodule
