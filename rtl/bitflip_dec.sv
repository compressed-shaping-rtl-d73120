// bitflip_dec: bit-flipping decoder behind the shaping decoder.
//
// Undoes bitflip_enc: the top bit f[K] is the parity bit; when it is 1 the K
// data bits are inverted, and the parity bit is dropped in either case.
// Follows the paper; the parity position (MSB) matches bitflip_enc.
//
// Timing: one clock of latency; s_valid follows f_valid.
module bitflip_dec #(
  parameter int K = 372
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         f_valid,
  input  logic [K:0]   f,
  output logic         s_valid,
  output logic [K-1:0] s
);

  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid <= 1'b0;
      s       <= '0;
    end else begin
      s_valid <= f_valid;
      s       <= f[K] ? ~f[K-1:0] : f[K-1:0];
    end
  end

endmodule
