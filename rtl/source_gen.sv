// source_gen: nonuniform test source of the compressed shaping demonstrator.
//
// Every clock with en high it emits GROUP_W * N_GROUPS source bits (640). Each
// bit is picked by a three-way selector from logic 0 (mask code 0), a PRBS31
// bit (code 1) or logic 1 (code 2); the mask code is shared by the GROUP_W bits
// of a group and comes from mask_gen, whose window of forced groups slides by
// one group per clock. The mean fraction of ones is ratio / (2 * N_GROUPS).
// Structure (PRBS generator, mask generator, 3:1 selector) follows the paper;
// the group-to-bit assignment (group g = bits [GROUP_W*g +: GROUP_W]) is this
// design's choice.
//
// Timing: PRBS and mask are both registered one clock after en, so the
// selector output src is valid (src_valid) one clock after en; src is
// combinational from those registers.
module source_gen #(
  parameter int N_GROUPS = 20,
  parameter int GROUP_W  = 32
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          en,
  input  logic [5:0]                    ratio,
  output logic [N_GROUPS*GROUP_W-1:0]   src,
  output logic                          src_valid,
  output logic [$clog2(N_GROUPS)-1:0]   cycle_idx   // window position of src
);

  localparam int W = N_GROUPS * GROUP_W;

  logic [W-1:0]              prbs;
  logic [N_GROUPS-1:0][1:0]  mask;

  prbs31_gen #(.W(W)) u_prbs (.clk, .rst, .en, .dout(prbs));

  mask_gen #(.N_GROUPS(N_GROUPS)) u_mask (
    .clk, .rst, .en, .ratio, .mask, .cycle_idx
  );

  always_comb begin
    for (int g = 0; g < N_GROUPS; g++)
      for (int b = 0; b < GROUP_W; b++)
        unique case (mask[g])
          2'd0:    src[g*GROUP_W+b] = 1'b0;
          2'd2:    src[g*GROUP_W+b] = 1'b1;
          default: src[g*GROUP_W+b] = prbs[g*GROUP_W+b];
        endcase
  end

  always_ff @(posedge clk) begin
    if (rst) src_valid <= 1'b0;
    else     src_valid <= en;
  end

endmodule
