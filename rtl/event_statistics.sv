// event_statistics -- finds the most energetic TC of each trigger window and
// its time, used as the time reference of the event.
//
// Per beat the LANES TCs are reduced to the highest-energy hit TC (equal
// energies: the lower TC address wins, a rule of this implementation); the
// beat winners are compared with the running maximum. It sees all TCs of
// the window, also those the compaction drops. After the last beat
// out_valid pulses (latency 1) with energy, time and address of the
// winner; out_any = 0 if no TC was hit.
module event_statistics
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = IN_LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_last,
  input  tc_t [LANES-1:0]   in_tc,
  output logic              out_valid,
  output logic              out_any,
  output logic [TC_E_W-1:0] out_max_e,
  output logic signed [TC_T_W-1:0] out_max_t,
  output logic [TC_ID_W-1:0] out_max_id
);
  tc_t  best, best_n;
  logic any, any_n;

  always_comb begin
    best_n = best;
    any_n  = any;
    for (int l = 0; l < LANES; l++) begin
      if (in_tc[l].hit &&
          (!any_n || in_tc[l].e > best_n.e || (in_tc[l].e == best_n.e && in_tc[l].id < best_n.id))) begin
        best_n = in_tc[l];
        any_n  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best <= '0; any <= 1'b0; out_valid <= 1'b0; out_any <= 1'b0;
      out_max_e <= '0; out_max_t <= '0; out_max_id <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          out_valid  <= 1'b1;
          out_any    <= any_n;
          out_max_e  <= any_n ? best_n.e : '0;
          out_max_t  <= any_n ? best_n.t : '0;
          out_max_id <= any_n ? best_n.id : '0;
          best <= '0;
          any  <= 1'b0;
        end else begin
          best <= best_n;
          any  <= any_n;
        end
      end
    end
  end
endmodule
