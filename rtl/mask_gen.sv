// mask_gen: mask signal of the source generator.
//
// The source word is cut into N_GROUPS groups. Each group gets a 2-bit mask
// code: 0 forces its bits to logic 0, 1 passes the PRBS, 2 forces logic 1.
// The target mark ratio is given in steps of 1/(2*N_GROUPS): P_S(1) =
// ratio / (2*N_GROUPS), ratio = 0 .. 2*N_GROUPS (0..40, steps of 0.025 for 20
// groups). For P_S(1) <= 0.5, Z = N_GROUPS - ratio groups get code 0 and the
// rest code 1, which gives (N_GROUPS - Z)/2 ones per N_GROUPS bits on average;
// for P_S(1) > 0.5, Z = ratio - N_GROUPS groups get code 2. The forced groups
// form a window that slides by one group every clock: at cycle index c
// (0 .. N_GROUPS-1) group g is forced when (g + c) mod N_GROUPS >= N_GROUPS - Z.
// For ratio = 16 (P_S(1) = 0.4) this reproduces the paper's example table
// (groups 16..19 forced to 0 at cycle 0, 15..18 at cycle 1, ...). The window
// rule for other ratios and the ratio encoding are this design's reading.
//
// Timing: mask is registered; it advances with en. Synchronous reset.
module mask_gen #(
  parameter int N_GROUPS = 20
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      en,
  input  logic [5:0]                ratio,     // target P_S(1) * 2 * N_GROUPS
  output logic [N_GROUPS-1:0][1:0]  mask,
  output logic [$clog2(N_GROUPS)-1:0] cycle_idx  // index c of the mask on 'mask'
);

  localparam int CW = $clog2(N_GROUPS);

  logic [CW-1:0]             c_q;
  logic [N_GROUPS-1:0][1:0]  mask_d;
  int                        z;
  logic [1:0]                forced;

  always_comb begin
    int r;
    r = (int'(ratio) > 2 * N_GROUPS) ? 2 * N_GROUPS : int'(ratio);
    if (r <= N_GROUPS) begin
      z      = N_GROUPS - r;
      forced = 2'd0;
    end else begin
      z      = r - N_GROUPS;
      forced = 2'd2;
    end
    for (int g = 0; g < N_GROUPS; g++)
      mask_d[g] = (((g + int'(c_q)) % N_GROUPS) >= N_GROUPS - z) ? forced : 2'd1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      c_q       <= '0;
      mask      <= '0;
      cycle_idx <= '0;
    end else if (en) begin
      mask      <= mask_d;
      cycle_idx <= c_q;
      c_q       <= (int'(c_q) == N_GROUPS - 1) ? '0 : c_q + 1'b1;
    end
  end

endmodule
