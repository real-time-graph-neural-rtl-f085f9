// gnn_accelerator -- CaloClusterNet dataflow accelerator with the
// condensation point selection: graph nodes in, clusters out.
//
//   in (x,y,z,E/8,t, Q4.12) -+-> GravNet block 1 -+-> GravNet block 2 --+
//                            |                    +-> FIFO -------------+
//                            +-> scaling layer (Q3.5) -> FIFO ----------+-> concat (69)
//   concat -> DL2 (dense, ReLU, 16) -> linear heads:
//        energy factor (1) -> mult (x input energy x 8)  = cluster energy, GeV
//        position (3), CCoords (3)
//        signal (1) -> hard sigmoid,  beta (1) -> hard sigmoid
//   -> CPS (candidate/isolation, bitonic sort, CPCS) -> out
//
// Each layer is a processing element with P = 2 node lanes; an event is
// N/P = 16 beats and a new event may start every 16 cycles (I_init = 16,
// P_par = 2 as published). The skip paths (scaled inputs and the block-1
// output, concatenated with the block-2 output before DL2) are kept in step
// by FIFOs, which never stall. Layer widths and formats follow the
// published network (Table-2 hyperparameters, Q4.12 inputs, Q3.5 block
// outputs, 16-bit internals, Q6.10 outputs); trained weights are not part of
// the RTL and are written over the cfg bus (see dense_pe, targets in
// gnn_pkg).
//
// Output: out_valid pulses once per event with, for all N nodes, whether the
// node holds a TC, whether it is a condensation point, and its cluster
// parameters. Latency from the first input beat of an event to out_valid:
// see the testbench; about 2 + 2*26 + 16 + 2+2+1 + 34 cycles.
module gnn_accelerator
  import gnn_pkg::*;
#(
  parameter int unsigned N = N_MAX,
  parameter int unsigned P = P_PAR
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_bus_t                cfg,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [P-1:0]            in_nvalid,
  input  act_t [P-1:0][F_IN-1:0]  in_data,     // Q4.12
  output logic                    out_valid,
  output logic [N-1:0]            out_nvalid,
  output logic [N-1:0]            out_cps,
  output clu_par_t [N-1:0]        out_par
);
  localparam int unsigned E_IDX = 3;            // feature index of E/8

  // ---------------- skip scaling layer ----------------
  logic sc_valid, unused_sc_last; logic [P-1:0] unused_sc_nv; act_t [P-1:0][F_IN-1:0] sc;
  dense_pe #(.IN_N(F_IN), .OUT_N(F_IN), .P(P), .X_F(IN_F), .RELU(1'b0),
             .QI(3), .QF(5), .TGT(TGT_SCALE)) u_scale (
    .clk, .rst_n, .cfg, .in_valid, .in_last, .in_nvalid, .in_data,
    .out_valid(sc_valid), .out_last(unused_sc_last), .out_nvalid(unused_sc_nv), .out_data(sc));

  act_t [P-1:0] efeat_in, efeat_sc;
  always_comb for (int p = 0; p < P; p++) efeat_in[p] = in_data[p][E_IDX];
  pipe_delay #(.W(P*ACT_W), .D(2)) u_edly0 (.clk, .din(efeat_in), .dout(efeat_sc));

  // ---------------- GravNet blocks ----------------
  logic b1_valid, b1_last; logic [P-1:0] b1_nv; act_t [P-1:0][DLOUT_W-1:0] b1;
  gravnet_block #(.IN_N(F_IN), .X_F(IN_F), .P(P), .N(N),
                  .T_DL1(TGT_B1_DL1), .T_S(TGT_B1_S), .T_F(TGT_B1_F), .T_OUT(TGT_B1_OUT)) u_blk1 (
    .clk, .rst_n, .cfg, .in_valid, .in_last, .in_nvalid, .in_data,
    .out_valid(b1_valid), .out_last(b1_last), .out_nvalid(b1_nv), .out_data(b1));

  logic b2_valid, b2_last; logic [P-1:0] b2_nv; act_t [P-1:0][DLOUT_W-1:0] b2;
  gravnet_block #(.IN_N(DLOUT_W), .X_F(ACT_F), .P(P), .N(N),
                  .T_DL1(TGT_B2_DL1), .T_S(TGT_B2_S), .T_F(TGT_B2_F), .T_OUT(TGT_B2_OUT)) u_blk2 (
    .clk, .rst_n, .cfg, .in_valid(b1_valid), .in_last(b1_last), .in_nvalid(b1_nv), .in_data(b1),
    .out_valid(b2_valid), .out_last(b2_last), .out_nvalid(b2_nv), .out_data(b2));

  // ---------------- skip FIFOs ----------------
  typedef struct packed {
    act_t [P-1:0][F_IN-1:0] sc;
    act_t [P-1:0]           efeat;
  } skip_a_t;
  skip_a_t fa_in, fa_out;
  logic    fa_empty, fb_empty, unused_fa_full, unused_fb_full;
  logic [6:0] unused_fa_cnt, unused_fb_cnt;
  act_t [P-1:0][DLOUT_W-1:0] fb_out;

  assign fa_in = '{sc: sc, efeat: efeat_sc};
  stream_fifo #(.W($bits(skip_a_t)), .DEPTH(64)) u_fifo_a (
    .clk, .rst_n, .push(sc_valid), .din(fa_in), .pop(b2_valid), .dout(fa_out),
    .empty(fa_empty), .full(unused_fa_full), .count(unused_fa_cnt));
  stream_fifo #(.W(P*DLOUT_W*ACT_W), .DEPTH(64)) u_fifo_b (
    .clk, .rst_n, .push(b1_valid), .din(b1), .pop(b2_valid), .dout(fb_out),
    .empty(fb_empty), .full(unused_fb_full), .count(unused_fb_cnt));

  act_t [P-1:0][CAT_W-1:0] cat;
  always_comb begin
    for (int p = 0; p < P; p++) begin
      for (int i = 0; i < F_IN; i++)    cat[p][i]                  = fa_out.sc[p][i];
      for (int i = 0; i < DLOUT_W; i++) cat[p][F_IN + i]           = fb_out[p][i];
      for (int i = 0; i < DLOUT_W; i++) cat[p][F_IN + DLOUT_W + i] = b2[p][i];
    end
  end

  // ---------------- DL2 ----------------
  logic d2_valid, d2_last; logic [P-1:0] d2_nv; act_t [P-1:0][DL2_W-1:0] d2;
  dense_pe #(.IN_N(CAT_W), .OUT_N(DL2_W), .P(P), .X_F(ACT_F), .RELU(1'b1),
             .QI(6), .QF(10), .TGT(TGT_DL2)) u_dl2 (
    .clk, .rst_n, .cfg, .in_valid(b2_valid), .in_last(b2_last), .in_nvalid(b2_nv), .in_data(cat),
    .out_valid(d2_valid), .out_last(d2_last), .out_nvalid(d2_nv), .out_data(d2));

  act_t [P-1:0] efeat_d2, efeat_o;
  pipe_delay #(.W(P*ACT_W), .D(2)) u_edly1 (.clk, .din(fa_out.efeat), .dout(efeat_d2));
  pipe_delay #(.W(P*ACT_W), .D(2)) u_edly2 (.clk, .din(efeat_d2), .dout(efeat_o));

  // ---------------- output heads ----------------
  logic o_valid, o_last; logic [P-1:0] o_nv;
  act_t [P-1:0][0:0] o_e, o_sig, o_beta;
  act_t [P-1:0][2:0] o_pos, o_cc;
  logic [4:0] hv_valid; logic hv_last; logic [P-1:0] hv_nv;
  logic [4:1] unused_hv_last; logic [4:1][P-1:0] unused_hv_nv;

  dense_pe #(.IN_N(DL2_W), .OUT_N(1), .P(P), .X_F(ACT_F), .RELU(1'b0), .QI(6), .QF(10), .TGT(TGT_O_E)) u_o_e (
    .clk, .rst_n, .cfg, .in_valid(d2_valid), .in_last(d2_last), .in_nvalid(d2_nv), .in_data(d2),
    .out_valid(hv_valid[0]), .out_last(hv_last), .out_nvalid(hv_nv), .out_data(o_e));
  dense_pe #(.IN_N(DL2_W), .OUT_N(3), .P(P), .X_F(ACT_F), .RELU(1'b0), .QI(6), .QF(10), .TGT(TGT_O_POS)) u_o_pos (
    .clk, .rst_n, .cfg, .in_valid(d2_valid), .in_last(d2_last), .in_nvalid(d2_nv), .in_data(d2),
    .out_valid(hv_valid[1]), .out_last(unused_hv_last[1]), .out_nvalid(unused_hv_nv[1]), .out_data(o_pos));
  dense_pe #(.IN_N(DL2_W), .OUT_N(1), .P(P), .X_F(ACT_F), .RELU(1'b0), .QI(6), .QF(10), .TGT(TGT_O_SIG)) u_o_sig (
    .clk, .rst_n, .cfg, .in_valid(d2_valid), .in_last(d2_last), .in_nvalid(d2_nv), .in_data(d2),
    .out_valid(hv_valid[2]), .out_last(unused_hv_last[2]), .out_nvalid(unused_hv_nv[2]), .out_data(o_sig));
  dense_pe #(.IN_N(DL2_W), .OUT_N(3), .P(P), .X_F(ACT_F), .RELU(1'b0), .QI(6), .QF(10), .TGT(TGT_O_CC)) u_o_cc (
    .clk, .rst_n, .cfg, .in_valid(d2_valid), .in_last(d2_last), .in_nvalid(d2_nv), .in_data(d2),
    .out_valid(hv_valid[3]), .out_last(unused_hv_last[3]), .out_nvalid(unused_hv_nv[3]), .out_data(o_cc));
  dense_pe #(.IN_N(DL2_W), .OUT_N(1), .P(P), .X_F(ACT_F), .RELU(1'b0), .QI(6), .QF(10), .TGT(TGT_O_BETA)) u_o_beta (
    .clk, .rst_n, .cfg, .in_valid(d2_valid), .in_last(d2_last), .in_nvalid(d2_nv), .in_data(d2),
    .out_valid(hv_valid[4]), .out_last(unused_hv_last[4]), .out_nvalid(unused_hv_nv[4]), .out_data(o_beta));

  assign o_valid = hv_valid[0];
  assign o_last  = hv_last;
  assign o_nv    = hv_nv;

  // ---------------- activations and energy ----------------
  logic sg_valid, sg_last; logic [P-1:0] sg_nv; act_t [P-1:0][1:0] sg_in, sg_out;
  always_comb for (int p = 0; p < P; p++) begin
    sg_in[p][0] = o_sig[p][0];
    sg_in[p][1] = o_beta[p][0];
  end
  hard_sigmoid #(.N(2), .P(P)) u_sig (
    .clk, .rst_n, .in_valid(o_valid), .in_last(o_last), .in_nvalid(o_nv), .in_data(sg_in),
    .out_valid(sg_valid), .out_last(sg_last), .out_nvalid(sg_nv), .out_data(sg_out));

  act_t [P-1:0] o_fac, e_gev;
  logic em_valid, em_last; logic [P-1:0] em_nv;
  always_comb for (int p = 0; p < P; p++) o_fac[p] = o_e[p][0];
  energy_mult #(.P(P)) u_mult (
    .clk, .rst_n, .in_valid(o_valid), .in_last(o_last), .in_nvalid(o_nv),
    .in_factor(o_fac), .in_efeat(efeat_o),
    .out_valid(em_valid), .out_last(em_last), .out_nvalid(em_nv), .out_e(e_gev));

  act_t [P-1:0][2:0] pos_d, cc_d;
  pipe_delay #(.W(P*3*ACT_W), .D(1)) u_pdly (.clk, .din(o_pos), .dout(pos_d));
  pipe_delay #(.W(P*3*ACT_W), .D(1)) u_cdly (.clk, .din(o_cc),  .dout(cc_d));

  clu_par_t [P-1:0] par;
  act_t [P-1:0] beta;
  always_comb for (int p = 0; p < P; p++) begin
    par[p] = '{e: e_gev[p], x: pos_d[p][0], y: pos_d[p][1], z: pos_d[p][2], sig: sg_out[p][0]};
    beta[p] = sg_out[p][1];
  end

  // ---------------- condensation point selection ----------------
  cps #(.N(N), .P(P)) u_cps (
    .clk, .rst_n, .in_valid(sg_valid), .in_last(sg_last), .in_nvalid(sg_nv),
    .in_beta(beta), .in_cc(cc_d), .in_par(par),
    .out_valid, .out_nvalid, .out_cps, .out_par);

  a_heads_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (&hv_valid || ~|hv_valid) && (em_valid == sg_valid) && (em_nv == sg_nv) && (em_last == sg_last));
  a_skip_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    b2_valid |-> (!fa_empty && !fb_empty));
endmodule
