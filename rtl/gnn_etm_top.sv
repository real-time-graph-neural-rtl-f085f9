// gnn_etm_top -- graph-neural-network calorimeter trigger module: finds
// clusters (photon candidates) in the calorimeter trigger cells of every
// 125 ns data window with a GNN and object condensation.
//
//   icn_* (576 TCs per window, 16 beats x 36)
//     -> preprocessing  (addresses, 250 ns trigger window, compaction to
//                        <= 32 nodes, time reference, x/y/z/E/t features)
//     -> gnn_accelerator (2 GravNet blocks, skip concat, DL2, heads,
//                        condensation point selection)
//     -> postprocessing (clusters tied to TC ids)  -> clu_* output
//   b2l_subsystem records the node TC stream (channel 0) and the output
//   stream (channel 1) for every trigger on trig_in and sends packets on b2l_*.
//
// Throughput: one data window every 16 cycles (I_init = 16, P_par = 2 at the
// 127.216 MHz system clock gives the required ~7.95 M windows/s). No
// back-pressure anywhere; the stages are statically scheduled.
// Configuration (weights, TC position table, readout delays) uses the
// cfg write bus, which stands in for the board's slow-control interface.
// The serial links, clocking and the Belle2Link physical layer of the real
// board are not part of this RTL; their streams are ports.
module gnn_etm_top
  import gnn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_bus_t                  cfg,
  // TC stream from the upstream trigger module
  input  logic                      icn_valid,
  input  logic                      icn_last,
  input  tc_raw_t [IN_LANES-1:0]    icn_tc,
  // cluster output (towards the global decision logic)
  output logic                      clu_valid,
  output logic                      clu_last,
  output out_rec_t [P_PAR-1:0]      clu_rec,
  output logic [$clog2(N_MAX):0]    clu_ncl,
  // per-window status
  output logic                      ev_valid,
  output logic [TC_ID_W:0]          ev_nhits,
  output logic                      ev_overflow,
  // readout
  input  logic                      trig_in,
  output logic                      b2l_valid,
  output logic                      b2l_sop,
  output logic                      b2l_eop,
  output logic [2*$bits(out_rec_t)*P_PAR-1:0] b2l_data,
  output logic                      b2l_synced,
  output logic [15:0]               b2l_n_events,
  output logic [15:0]               b2l_n_dropped
);
  localparam int unsigned CH_W = $bits(out_rec_t) * P_PAR;

  logic pp_valid, pp_last; logic [P_PAR-1:0] pp_nv;
  act_t [P_PAR-1:0][F_IN-1:0] pp_data;
  tc_t [P_PAR-1:0] pp_tc;
  logic [P_PAR-1:0][TC_ID_W-1:0] unused_pp_id;

  preprocessing u_pre (
    .clk, .rst_n, .cfg, .in_valid(icn_valid), .in_last(icn_last), .in_tc(icn_tc),
    .out_valid(pp_valid), .out_last(pp_last), .out_nvalid(pp_nv), .out_data(pp_data),
    .out_id(unused_pp_id), .out_tc(pp_tc), .ev_valid, .ev_nhits, .ev_overflow);

  logic ac_valid; logic [N_MAX-1:0] ac_nv, ac_cps; clu_par_t [N_MAX-1:0] ac_par;
  gnn_accelerator u_acc (
    .clk, .rst_n, .cfg, .in_valid(pp_valid), .in_last(pp_last), .in_nvalid(pp_nv),
    .in_data(pp_data), .out_valid(ac_valid), .out_nvalid(ac_nv), .out_cps(ac_cps), .out_par(ac_par));

  postprocessing u_post (
    .clk, .rst_n, .id_valid(pp_valid), .id_tc(pp_tc),
    .cps_valid(ac_valid), .cps_nvalid(ac_nv), .cps_mask(ac_cps), .cps_par(ac_par),
    .out_valid(clu_valid), .out_last(clu_last), .out_rec(clu_rec), .out_nclusters(clu_ncl));

  logic [1:0]           ch_valid;
  logic [1:0][CH_W-1:0] ch_data;
  assign ch_valid = {clu_valid, pp_valid};
  assign ch_data  = {CH_W'(clu_rec), CH_W'(pp_tc)};

  b2l_subsystem #(.N_CH(2), .CH_W(CH_W)) u_b2l (
    .clk, .rst_n, .cfg, .ch_valid, .ch_data, .trig_in,
    .b2l_valid, .b2l_sop, .b2l_eop, .b2l_data,
    .synced(b2l_synced), .n_events(b2l_n_events), .n_dropped(b2l_n_dropped));

  // the node ids travel beside the network; they must agree with the nodes
  a_id_hit: assert property (@(posedge clk) disable iff (!rst_n)
    pp_valid |-> (pp_nv == {pp_tc[1].hit, pp_tc[0].hit}));
endmodule
