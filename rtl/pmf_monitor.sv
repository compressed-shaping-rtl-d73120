// pmf_monitor: histogram of the two-dimensional amplitudes at the shaping
// encoder output, from which the amplitude PMF and its entropy H(A_c) are
// computed.
//
// 64-QAM: the N_AMP 4-bit words of the input are 2D amplitudes {aQ, aI}
// (A = 2a + 1), counted in hist 0..15. 16-QAM: every 4-bit word holds two 2D
// amplitudes of 2 bits {aQ, aI} (A = 2a + 1), counted in hist 0..3, twice as
// many per word. Each valid clock all amplitudes of the word are added at
// once; clr restarts. Bin order and counter width are this design's.
//
// Timing: counters update one clock after valid. qam16 is quasi-static.
module pmf_monitor #(
  parameter int N_AMP = 101,
  parameter int CW    = 48
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     qam16,
  input  logic                     valid,
  input  logic [4*N_AMP-1:0]       a,
  output logic [15:0][CW-1:0]      hist
);

  localparam int NW = $clog2(2 * N_AMP + 1);
  logic [15:0][NW-1:0] inc;

  always_comb begin
    inc = '0;
    for (int j = 0; j < N_AMP; j++) begin
      if (qam16) begin
        inc[a[4*j +: 2]]     += NW'(1);
        inc[a[4*j + 2 +: 2]] += NW'(1);
      end else begin
        inc[a[4*j +: 4]]     += NW'(1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) hist <= '0;
    else if (valid)
      for (int b = 0; b < 16; b++) hist[b] <= hist[b] + CW'(inc[b]);
  end

endmodule
