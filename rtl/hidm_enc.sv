// hidm_enc: hierarchical distribution matching (DM) encoder, the shaping
// encoder of compressed shaping.
//
// A 373-bit word F (372 source amplitude bits, mostly zeros after bit
// flipping, plus the flip parity bit) becomes 404 amplitude bits: 101 two-
// dimensional 64-QAM amplitudes of 4 bits, or 202 16-QAM amplitudes of 2 bits,
// depending on the layer-1 LUT contents. The LUTs are arranged in four layers
// (see cs_pkg for the sizes). The single top LUT (layer 4) reads one source
// bit and emits one r bit for each layer-3 LUT; each LUT of a lower layer reads
// {r, s} - one r bit from its parent and s source bits - and emits one r bit for
// each of its children, until layer 1 emits the amplitudes. Because every LUT
// maps frequent (zero-heavy) input words to low-energy outputs, a source with
// few ones yields low-energy amplitudes: shaping and compression in one
// fixed-length to fixed-length mapping. The paper fixes the principle, the
// sorting rule of the LUT contents and the 373/404 sizes; the layer sizes and
// bit assignment are this design's.
//
// Timing: fully pipelined, one codeword per clock. Each layer is one block-RAM
// read, so a_out follows f_in by ENC_LAT = 4 clocks; the source bits of the
// lower layers are delayed to meet their parents' r bits ("delay adjustment").
// LUT RAMs are written through wr in the wclk (control) domain.
module hidm_enc
  import cs_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                f_valid,
  input  logic [K_F-1:0]      f,
  output logic                a_valid,
  output logic [DM_OUT_W-1:0] a,
  input  logic                wclk,
  input  lut_wr_t             wr
);

  logic [OFF4-1:0] f_d1;   // bits still needed after layer 4
  logic [OFF3-1:0] f_d2;   // after layer 3
  logic [OFF2-1:0] f_d3;   // after layer 2
  logic [ENC_LAT-1:0] v_pipe;

  always_ff @(posedge clk) begin
    f_d1 <= f[OFF4-1:0];
    f_d2 <= f_d1[OFF3-1:0];
    f_d3 <= f_d2[OFF2-1:0];
    if (rst) v_pipe <= '0;
    else     v_pipe <= {v_pipe[ENC_LAT-2:0], f_valid};
  end
  assign a_valid = v_pipe[ENC_LAT-1];

  // ---------------------------------------------------------------- layer 4
  logic [T3-1:0] r3;
  dm_lut_ram #(.AW(1), .DW(T3)) u_l4 (
    .wclk, .we(wr.we && wr.layer == 2'd3), .waddr(wr.addr[0:0]),
    .wdata(wr.data[T3-1:0]), .rclk(clk), .raddr(f[OFF4 +: S4]), .rdata(r3)
  );

  // ---------------------------------------------------------------- layer 3
  logic [T3-1:0][4:0] l3_out;
  for (genvar j = 0; j < T3; j++) begin : g_l3
    dm_lut_ram #(.AW(1 + S3), .DW(5)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd2), .waddr(wr.addr[S3:0]),
      .wdata(wr.data), .rclk(clk),
      .raddr({r3[j], f_d1[OFF3 + S3*j +: S3]}), .rdata(l3_out[j])
    );
  end

  // ---------------------------------------------------------------- layer 2
  logic [T2-1:0][4:0] l2_out;
  for (genvar j = 0; j < T2; j++) begin : g_l2
    dm_lut_ram #(.AW(1 + S2), .DW(5)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd1), .waddr(wr.addr[S2:0]),
      .wdata(wr.data), .rclk(clk),
      .raddr({l3_out[j/5][j%5], f_d2[OFF2 + S2*j +: S2]}), .rdata(l2_out[j])
    );
  end

  // ---------------------------------------------------------------- layer 1
  for (genvar j = 0; j < T1; j++) begin : g_l1
    logic [3:0] raddr;
    if (j < T1 - 1) begin : g_child
      assign raddr = {l2_out[j/5][j%5], f_d3[OFF1 + S1*j +: S1]};
    end else begin : g_last
      assign raddr = f_d3[OFF1 + S1*j +: S1_LAST];
    end
    dm_lut_ram #(.AW(4), .DW(4)) u_ram (
      .wclk, .we(wr.we && wr.layer == 2'd0), .waddr(wr.addr[3:0]),
      .wdata(wr.data[3:0]), .rclk(clk), .raddr(raddr), .rdata(a[4*j +: 4])
    );
  end

endmodule
