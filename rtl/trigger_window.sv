// trigger_window -- widens each 125 ns data window to a 250 ns trigger
// window by keeping every TC of the previous data window.
//
// The TCs of the current window are stored (by beat and lane) while they
// pass; on output each TC slot shows the current TC if it is hit and
// otherwise the stored TC of the previous window. The front-end modules
// send a TC at most once per 250 ns, so a slot is never hit in both
// windows; should it happen anyway, the current TC wins (this
// implementation's rule). TC times are passed unchanged. Latency 1 cycle.
module trigger_window
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = IN_LANES,
  parameter int unsigned BEATS = IN_BEATS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_last,
  input  tc_t [LANES-1:0]  in_tc,
  output logic             out_valid,
  output logic             out_last,
  output tc_t [LANES-1:0]  out_tc
);
  localparam int unsigned BW = $clog2(BEATS);
  logic [BW-1:0] beat;
  tc_t [LANES-1:0] prev [BEATS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat <= '0; out_valid <= 1'b0; out_last <= 1'b0;
      for (int b = 0; b < BEATS; b++)
        for (int l = 0; l < LANES; l++) prev[b][l].hit <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        beat       <= in_last ? '0 : beat + 1'b1;
        prev[beat] <= in_tc;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      out_tc[l] <= in_tc[l].hit ? in_tc[l] : prev[beat][l];
  end
endmodule
