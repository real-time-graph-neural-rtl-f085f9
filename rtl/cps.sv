// cps -- Condensation Point Selection: turns the per-node network outputs of
// one event into the set of condensation points, i.e. the clusters.
//
// Steps (as in the published CPS operator):
//   collect  the node stream (P nodes per beat) into an event buffer;
//   ANN + Isolation Selection + Candidate Selection
//            (cps_candidate_isolation): beta > t_beta flags, latent-space
//            isolation masks, 1 cycle;
//   Bitonic Sort of the node ids by descending beta (bitonic_sort, 15 cycles
//            for N = 32); invalid nodes get the lowest key;
//   CPCS     (cpcs, Algorithm 1), I_init = 16 cycles.
// The cluster parameters of each node (energy, position, signal
// probability) ride along in hold registers and are output with the cps
// mask: out_valid pulses once per event with out_cps (one bit per node),
// out_nvalid and out_par for all N nodes.
//
// Latency: last input beat to out_valid = 1 + 1 + 15 + 17 = 34 cycles
// for N = 32, P = 2. Events may follow every N/P cycles; the hold registers
// are sized for exactly that spacing (checked by assertions in cpcs).
module cps
  import gnn_pkg::*;
#(
  parameter int unsigned N = N_MAX,
  parameter int unsigned P = P_PAR
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_last,
  input  logic [P-1:0]                 in_nvalid,
  input  act_t [P-1:0]                 in_beta,
  input  act_t [P-1:0][N_LS-1:0]       in_cc,
  input  clu_par_t [P-1:0]             in_par,
  output logic                         out_valid,
  output logic [N-1:0]                 out_nvalid,
  output logic [N-1:0]                 out_cps,
  output clu_par_t [N-1:0]             out_par
);
  localparam int unsigned NB = N / P;
  localparam int unsigned BW = $clog2(NB) > 0 ? $clog2(NB) : 1;
  localparam int unsigned IW = $clog2(N);

  // ---------------- collect ----------------
  logic [N-1:0]            c_nv;
  act_t [N-1:0]            c_beta;
  act_t [N-1:0][N_LS-1:0]  c_cc;
  clu_par_t [N-1:0]        c_par;
  logic [BW-1:0]           wbeat;
  logic                    ev_done;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (wbeat == '0) c_nv <= '0;
      for (int p = 0; p < P; p++) begin
        c_nv  [int'(wbeat)*P + p] <= in_nvalid[p];
        c_beta[int'(wbeat)*P + p] <= in_beta[p];
        c_cc  [int'(wbeat)*P + p] <= in_cc[p];
        c_par [int'(wbeat)*P + p] <= in_par[p];
      end
    end
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin wbeat <= '0; ev_done <= 1'b0; end
    else begin
      ev_done <= in_valid && in_last;
      if (in_valid) wbeat <= in_last ? '0 : wbeat + 1'b1;
    end
  end

  // ---------------- candidates and isolation ----------------
  logic                 ci_valid;
  logic [N-1:0]         ci_cand;
  logic [N-1:0][N-1:0]  ci_iso;
  cps_candidate_isolation #(.N(N), .D(N_LS)) u_ci (
    .clk, .rst_n, .in_valid(ev_done), .in_nvalid(c_nv), .in_beta(c_beta), .in_cc(c_cc),
    .out_valid(ci_valid), .out_cand(ci_cand), .out_iso(ci_iso));

  // priority keys: invalid nodes sort last
  logic [N-1:0][ACT_W-1:0] keys;
  logic [N-1:0][ACT_W-1:0] keys_q;
  logic [N-1:0]            nv_h1, nv_h2;
  clu_par_t [N-1:0]        par_h1, par_h2;
  always_ff @(posedge clk) begin
    if (ev_done) begin
      for (int q = 0; q < N; q++)
        keys_q[q] <= c_nv[q] ? ACT_W'(c_beta[q]) : {1'b1, {(ACT_W-1){1'b0}}};
      nv_h1  <= c_nv;
      par_h1 <= c_par;
    end
  end
  assign keys = keys_q;

  // ---------------- sort ----------------
  logic                   s_valid;
  logic [N-1:0][IW-1:0]   s_ids;
  logic [N-1:0][ACT_W-1:0] unused_keys;
  bitonic_sort #(.N(N), .KEY_W(ACT_W)) u_sort (
    .clk, .rst_n, .in_valid(ci_valid), .in_keys(keys),
    .out_valid(s_valid), .out_ids(s_ids), .out_keys(unused_keys));

  logic [N-1:0]         cand_h;
  logic [N-1:0][N-1:0]  iso_h;
  always_ff @(posedge clk) begin
    if (ci_valid) begin cand_h <= ci_cand; iso_h <= ci_iso; end
    if (s_valid)  begin nv_h2 <= nv_h1; par_h2 <= par_h1; end
  end

  // ---------------- CPCS ----------------
  logic [N-1:0] cps_mask;
  logic         cpcs_done, cpcs_last, unused_busy;
  logic [N-1:0] nv_h3;
  clu_par_t [N-1:0] par_h3;
  cpcs #(.N(N), .P(P)) u_cpcs (
    .clk, .rst_n, .start(s_valid), .isolations(iso_h), .candidates(cand_h), .ids(s_ids),
    .cps(cps_mask), .done(cpcs_done), .busy(unused_busy), .last_iter(cpcs_last));

  always_ff @(posedge clk) begin
    if (cpcs_last) begin nv_h3 <= nv_h2; par_h3 <= par_h2; end
  end

  assign out_valid  = cpcs_done;
  assign out_cps    = cps_mask;
  assign out_nvalid = nv_h3;
  assign out_par    = par_h3;
endmodule
