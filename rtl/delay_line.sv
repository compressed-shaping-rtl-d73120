// delay_line: D-stage register pipeline of a W-bit word (D = 0: wire).
// Used for the delay adjustment between the parallel paths of the
// transmitter, the receiver and the monitors. A synchronous rst clears all
// stages, so a valid flag carried inside the word starts low.
// The paper lists delay adjustment among the transmitter and receiver
// functions without details; this plain register chain is this design's.
// Timing: dout = din delayed by D clocks.
module delay_line #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_pipe
    logic [W-1:0] st [D];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < D; i++) st[i] <= '0;
      end else begin
        st[0] <= din;
        for (int i = 1; i < D; i++) st[i] <= st[i-1];
      end
    end
    assign dout = st[D-1];
  end

endmodule
