// event_calibration -- builds the network input features of each node.
//
// For every row of the compacted event:
//   t feature = (t_TC - t_max) / 256 (Q4.12), t_max = time of the most
//               energetic TC of the trigger window (time calibration);
//   E feature = E / 8 GeV in Q4.12, from the TC energy in MeV:
//               E_MeV * E_MUL / 2^16 with E_MUL = 0.512 * 2^16, saturated;
//   x, y, z   = TC centre, read from a position table indexed by TC id.
// The table (576 x 3 words, already normalised to [-1, 1] in Q4.12) is a
// RAM written over the cfg bus, target TGT_POS_LUT, address
// {coordinate[1:0], tc_id[9:0]}; the published design keeps these
// positions in memory as well, but their values are detector geometry and
// not part of the RTL. The units of the incoming energy and time and the
// time scale are this implementation's assumptions; moving the input
// scaling into this stage follows the published design.
//
// After in_valid the N_MAX rows are sent as N_MAX/P beats of P nodes, one
// beat per cycle, starting 1 cycle later, with out_last on the final beat
// and the TC id of each node on out_id. Rows with hit = 0 give nvalid = 0
// and zero features. A new event may arrive every N_MAX/P cycles.
module event_calibration
  import gnn_pkg::*;
#(
  parameter int unsigned NMAX    = N_MAX,
  parameter int unsigned P       = P_PAR,
  parameter int unsigned E_MUL   = 33554,  // 0.512 in Q0.16
  parameter int unsigned T_SHIFT = 4       // t/256 in Q4.12 = t << 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_bus_t                  cfg,
  input  logic                      in_valid,
  input  tc_t [NMAX-1:0]            in_rows,
  input  logic signed [TC_T_W-1:0]  in_max_t,
  output logic                      out_valid,
  output logic                      out_last,
  output logic [P-1:0]              out_nvalid,
  output act_t [P-1:0][F_IN-1:0]    out_data,
  output logic [P-1:0][TC_ID_W-1:0] out_id,
  output tc_t [P-1:0]               out_tc
);
  localparam int unsigned NB = NMAX / P;
  localparam int unsigned BW = $clog2(NB) > 0 ? $clog2(NB) : 1;

  act_t pos [3][N_TC];
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.tgt == TGT_POS_LUT && cfg.addr[11:10] != 2'd3 &&
        int'(cfg.addr[9:0]) < N_TC)
      pos[cfg.addr[11:10]][cfg.addr[9:0]] <= act_t'(cfg.data);
  end

  tc_t [NMAX-1:0]           rows;
  logic signed [TC_T_W-1:0] tmax;
  logic [BW-1:0]            beat;
  logic                     run;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; beat <= '0; out_valid <= 1'b0; out_last <= 1'b0; out_nvalid <= '0;
    end else begin
      out_valid <= run;
      out_last  <= run && beat == BW'(NB - 1);
      for (int p = 0; p < P; p++) out_nvalid[p] <= run && rows[int'(beat)*P + p].hit;
      if (run) begin
        if (beat == BW'(NB - 1)) run <= 1'b0;
        beat <= beat + 1'b1;
      end
      if (in_valid) begin
        run  <= 1'b1;
        beat <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      rows <= in_rows;
      tmax <= in_max_t;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      tc_t r;
      logic [31:0] ef;
      logic signed [15:0] tr;
      r  = rows[int'(beat)*P + p];
      ef = (32'(r.e) * E_MUL) >> 16;
      tr = (16'(r.t) - 16'(tmax)) <<< T_SHIFT;
      out_id[p] <= r.id;
      out_tc[p] <= r;
      if (r.hit) begin
        out_data[p][0] <= pos[0][r.id];
        out_data[p][1] <= pos[1][r.id];
        out_data[p][2] <= pos[2][r.id];
        out_data[p][3] <= (ef > 32'd32767) ? act_t'(32767) : act_t'(ef);
        out_data[p][4] <= act_t'(tr);
      end else begin
        out_data[p] <= '0;
      end
    end
  end

  a_event_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (!run || beat == BW'(NB - 1)));
endmodule
