// preprocessing -- preprocessing stage: from the raw TC stream of the
// upstream trigger module to the graph nodes of the network.
//
//   Address Generation -> Trigger Window -+-> Stream Compaction --+-> Event Calibration -> nodes
//                                         +-> Event Statistics ---+
//
// Input: one 125 ns data window = IN_BEATS beats of IN_LANES raw TCs.
// Output: per window N_MAX/P beats of P nodes with the five Q4.12 features
// (x, y, z, E/8, t_rel), the TC id of each node and its raw TC (for the
// postprocessing and readout). Also reported per window: number of hit TCs
// and whether more than N_MAX had to be dropped. The published stage runs at
// twice the system clock; here it shares the system clock, with one input
// beat per cycle (16 cycles per window, the system's I_init).
// Latency: last input beat to first output beat = 5 cycles.
module preprocessing
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = IN_LANES,
  parameter int unsigned BEATS = IN_BEATS,
  parameter int unsigned NMAX  = N_MAX,
  parameter int unsigned P     = P_PAR
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_bus_t                  cfg,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  tc_raw_t [LANES-1:0]       in_tc,
  output logic                      out_valid,
  output logic                      out_last,
  output logic [P-1:0]              out_nvalid,
  output act_t [P-1:0][F_IN-1:0]    out_data,
  output logic [P-1:0][TC_ID_W-1:0] out_id,
  output tc_t [P-1:0]               out_tc,
  output logic                      ev_valid,      // per window statistics
  output logic [TC_ID_W:0]          ev_nhits,
  output logic                      ev_overflow
);
  logic ag_valid, ag_last; tc_t [LANES-1:0] ag_tc;
  address_generation #(.LANES(LANES), .BEATS(BEATS)) u_addr (
    .clk, .rst_n, .in_valid, .in_last, .in_tc,
    .out_valid(ag_valid), .out_last(ag_last), .out_tc(ag_tc));

  logic tw_valid, tw_last; tc_t [LANES-1:0] tw_tc;
  trigger_window #(.LANES(LANES), .BEATS(BEATS)) u_tw (
    .clk, .rst_n, .in_valid(ag_valid), .in_last(ag_last), .in_tc(ag_tc),
    .out_valid(tw_valid), .out_last(tw_last), .out_tc(tw_tc));

  logic sc_valid; tc_t [NMAX-1:0] sc_rows; logic [$clog2(NMAX):0] unused_count;
  stream_compaction #(.LANES(LANES), .NMAX(NMAX)) u_sc (
    .clk, .rst_n, .in_valid(tw_valid), .in_last(tw_last), .in_tc(tw_tc),
    .out_valid(sc_valid), .out_rows(sc_rows), .out_count(unused_count),
    .out_nhits(ev_nhits), .out_overflow(ev_overflow));

  logic es_valid, unused_any; logic [TC_E_W-1:0] unused_e; logic [TC_ID_W-1:0] unused_id; logic signed [TC_T_W-1:0] es_t;
  event_statistics #(.LANES(LANES)) u_es (
    .clk, .rst_n, .in_valid(tw_valid), .in_last(tw_last), .in_tc(tw_tc),
    .out_valid(es_valid), .out_any(unused_any), .out_max_e(unused_e), .out_max_t(es_t), .out_max_id(unused_id));

  assign ev_valid = sc_valid;

  event_calibration #(.NMAX(NMAX), .P(P)) u_cal (
    .clk, .rst_n, .cfg, .in_valid(sc_valid), .in_rows(sc_rows), .in_max_t(es_t),
    .out_valid, .out_last, .out_nvalid, .out_data, .out_id, .out_tc);

  a_stats_with_rows: assert property (@(posedge clk) disable iff (!rst_n) sc_valid == es_valid);
endmodule
