// pipe_delay -- fixed D-cycle delay line for a W-bit word (helper used to
// keep side data in step with pipelined processing elements). D = 0 is a
// wire. No reset: the data path carries no control.
module pipe_delay #(
  parameter int unsigned W = 8,
  parameter int unsigned D = 2
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_pipe
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      r[0] <= din;
      for (int i = 1; i < D; i++) r[i] <= r[i-1];
    end
    assign dout = r[D-1];
  end
endmodule
