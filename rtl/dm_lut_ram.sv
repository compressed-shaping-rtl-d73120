// dm_lut_ram: one look-up table of the hierarchical distribution matcher.
//
// The paper's DM LUTs are block RAMs. This is a simple dual-port RAM with two
// clocks: the write port belongs to the control clock domain (the LUT
// contents are loaded and periodically refreshed from a register copy by
// dm_ctrl), the read port to the data clock domain. Reads are synchronous
// (registered output), as in an FPGA block RAM, and happen every data clock.
// Contents are not reset; they are undefined until the first refresh sweep.
//
// Timing: rdata = mem[raddr] one rclk after raddr; a write lands on the wclk
// edge with we high.
module dm_lut_ram #(
  parameter int AW = 4,
  parameter int DW = 4
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          rclk,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge wclk)
    if (we) mem[waddr] <= wdata;

  always_ff @(posedge rclk)
    rdata <= mem[raddr];

endmodule
