// hard_sigmoid -- sigmoid activation PE with the linear approximation used
// by the published network: y = 0.1875*x + 0.5, clipped to [0, 1].
//
// N features per node, P nodes per cycle, Q6.10 in and out. 0.1875 = 3/16,
// so y = floor(3x/16) + 0.5. Latency 1 cycle, no back-pressure. The clip to
// [0, 1] is that of the hls4ml hard sigmoid the paper names.
module hard_sigmoid
  import gnn_pkg::*;
#(
  parameter int unsigned N = 1,
  parameter int unsigned P = P_PAR
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic [P-1:0]         in_nvalid,
  input  act_t [P-1:0][N-1:0]  in_data,
  output logic                 out_valid,
  output logic                 out_last,
  output logic [P-1:0]         out_nvalid,
  output act_t [P-1:0][N-1:0]  out_data
);
  localparam int ONE = 1 << ACT_F;

  function automatic act_t hsig(input act_t x);
    logic signed [31:0] y;
    y = ((32'(x) * 3) >>> 4) + ONE / 2;
    if (y < 0)   y = 0;
    if (y > ONE) y = ONE;
    return act_t'(y);
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      for (int n = 0; n < N; n++)
        out_data[p][n] <= hsig(in_data[p][n]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; out_nvalid <= '0;
    end else begin
      out_valid <= in_valid; out_last <= in_last & in_valid; out_nvalid <= in_nvalid;
    end
  end
endmodule
