// energy_mult -- the "mult" PE: turns the network's energy scale factor into
// a calibrated cluster energy in GeV.
//
// The network input energy feature is the TC energy divided by 8 (Q4.12), so
// energy[GeV] = factor * feature * 8. The factor is Q6.10, the product has
// 22 fractional bits; the result is floored to Q6.10 and saturated.
// P nodes per cycle, latency 1 cycle.
module energy_mult
  import gnn_pkg::*;
#(
  parameter int unsigned P = P_PAR
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_last,
  input  logic [P-1:0]  in_nvalid,
  input  act_t [P-1:0]  in_factor,   // Q6.10
  input  act_t [P-1:0]  in_efeat,    // Q4.12, E/8
  output logic          out_valid,
  output logic          out_last,
  output logic [P-1:0]  out_nvalid,
  output act_t [P-1:0]  out_e        // GeV, Q6.10
);
  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      // *8 means three fewer fractional bits: 22 - 3 = 19
      out_e[p] <= requant(64'(in_factor[p]) * 64'(in_efeat[p]), ACT_F + IN_F - 3, 6, 10);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; out_nvalid <= '0;
    end else begin
      out_valid <= in_valid; out_last <= in_last & in_valid; out_nvalid <= in_nvalid;
    end
  end
endmodule
