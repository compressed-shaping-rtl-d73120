// hidm_dec: hierarchical DM decoder, the shaping decoder of compressed
// shaping.
//
// Inverts hidm_enc layer by layer, starting at the amplitudes. Each layer-1
// inverse LUT turns a 4-bit amplitude word back into {r1, s1}; the r1 bits of
// five neighbours form the address of a layer-2 inverse LUT, which returns
// {r2, s2}; and so on up to the top LUT, which returns the last source bit.
// Upper-layer inverse LUTs also hold an entry for every word that the encoder
// never sends, so a bit error is decoded to the nearest codeword instead of
// propagating arbitrarily: an error in one amplitude mostly corrupts only that
// LUT's own source bits, which keeps the error multiplication of the decoder
// small. The paper gives the principle and the low error multiplication; the
// nearest-codeword fill of unused entries is this design's choice.
//
// Timing: one codeword per clock; f follows a by DEC_LAT = 4 clocks (one
// block-RAM read per layer). Source bits of lower layers are delayed to
// leave together with the top layer's. RAMs are written through wr (wclk).
module hidm_dec
  import cs_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                a_valid,
  input  logic [DM_OUT_W-1:0] a,
  output logic                f_valid,
  output logic [K_F-1:0]      f,
  input  logic                wclk,
  input  lut_wr_t             wr
);

  logic [DEC_LAT-1:0] v_pipe;
  always_ff @(posedge clk) begin
    if (rst) v_pipe <= '0;
    else     v_pipe <= {v_pipe[DEC_LAT-2:0], a_valid};
  end
  assign f_valid = v_pipe[DEC_LAT-1];

  // ---------------------------------------------------------------- layer 1
  logic [T1-1:0][3:0] l1_out;     // {r1, s1[2:0]}, LUT 100: s[3:0]
  for (genvar j = 0; j < T1; j++) begin : g_l1
    dm_lut_ram #(.AW(4), .DW(4)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd0), .waddr(wr.addr[3:0]),
      .wdata(wr.data[3:0]), .rclk(clk), .raddr(a[4*j +: 4]), .rdata(l1_out[j])
    );
  end

  // ---------------------------------------------------------------- layer 2
  logic [T2-1:0][3:0] l2_out;     // {r2, s2[2:0]}
  for (genvar j = 0; j < T2; j++) begin : g_l2
    logic [4:0] raddr;
    for (genvar b = 0; b < 5; b++) begin : g_b
      assign raddr[b] = l1_out[5*j + b][S1];
    end
    dm_lut_ram #(.AW(5), .DW(1 + S2)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd1), .waddr(wr.addr),
      .wdata(wr.data[S2:0]), .rclk(clk), .raddr(raddr), .rdata(l2_out[j])
    );
  end

  // ---------------------------------------------------------------- layer 3
  logic [T3-1:0][2:0] l3_out;     // {r3, s3[1:0]}
  for (genvar j = 0; j < T3; j++) begin : g_l3
    logic [4:0] raddr;
    for (genvar b = 0; b < 5; b++) begin : g_b
      assign raddr[b] = l2_out[5*j + b][S2];
    end
    dm_lut_ram #(.AW(5), .DW(1 + S3)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd2), .waddr(wr.addr),
      .wdata(wr.data[S3:0]), .rclk(clk), .raddr(raddr), .rdata(l3_out[j])
    );
  end

  // ---------------------------------------------------------------- layer 4
  logic [T3-1:0] r3;
  logic [S4-1:0] s4;
  for (genvar b = 0; b < T3; b++) begin : g_r3
    assign r3[b] = l3_out[b][S3];
  end
  dm_lut_ram #(.AW(T3), .DW(S4)) u_l4 (
    .wclk, .we(wr.we && wr.layer == 2'd3), .waddr(wr.addr[T3-1:0]),
    .wdata(wr.data[S4-1:0]), .rclk(clk), .raddr(r3), .rdata(s4)
  );

  // ---------------------------------------------------------------- delay adjustment
  logic [OFF2-1:0]        s1_d1, s1_d2, s1_d3;   // layer-1 source bits
  logic [OFF3-OFF2-1:0]   s2_d1, s2_d2;
  logic [OFF4-OFF3-1:0]   s3_d1;
  logic [OFF2-1:0]        s1_now;
  logic [OFF3-OFF2-1:0]   s2_now;
  logic [OFF4-OFF3-1:0]   s3_now;

  always_comb begin
    for (int j = 0; j < T1 - 1; j++) s1_now[S1*j +: S1] = l1_out[j][S1-1:0];
    s1_now[S1*(T1-1) +: S1_LAST] = l1_out[T1-1];
    for (int j = 0; j < T2; j++) s2_now[S2*j +: S2] = l2_out[j][S2-1:0];
    for (int j = 0; j < T3; j++) s3_now[S3*j +: S3] = l3_out[j][S3-1:0];
  end

  always_ff @(posedge clk) begin
    s1_d1 <= s1_now;  s1_d2 <= s1_d1;  s1_d3 <= s1_d2;
    s2_d1 <= s2_now;  s2_d2 <= s2_d1;
    s3_d1 <= s3_now;
  end

  assign f = {s4, s3_d1, s2_d2, s1_d3};

endmodule
