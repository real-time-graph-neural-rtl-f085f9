// cps_candidate_isolation -- first PEs of the condensation point selection
// (ANN, Isolation Selection, Candidate Selection) for one event.
//
// For the N nodes of an event it computes
//   cand[q]   = node q holds a TC and beta_q > T_BETA      (candidate flag)
//   iso[q][j] = L1 distance of q and j in the latent (CCoords) space >= T_D
// iso[q] is the mask that Algorithm 1 (cpcs) ANDs into the remaining
// candidate flags once q has been visited, so a node is never isolated
// from itself. All N*N distances are formed in parallel (3 dimensions, L1
// norm as in the published design). t_beta = 0.04 and t_d = 0.3 are the
// published working points, here in Q6.10. "Removed if r < t_d" is used for
// the boundary case. Latency 1 cycle from in_valid to out_valid.
module cps_candidate_isolation
  import gnn_pkg::*;
#(
  parameter int unsigned N     = N_MAX,
  parameter int unsigned D     = N_LS,
  parameter int          TBETA = T_BETA,
  parameter int          TD    = T_D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0]        in_nvalid,
  input  act_t [N-1:0]        in_beta,
  input  act_t [N-1:0][D-1:0] in_cc,
  output logic                out_valid,
  output logic [N-1:0]        out_cand,
  output logic [N-1:0][N-1:0] out_iso
);
  for (genvar q = 0; q < N; q++) begin : g_q
    always_ff @(posedge clk) out_cand[q] <= in_nvalid[q] && (int'(in_beta[q]) > TBETA);
    for (genvar j = 0; j < N; j++) begin : g_j
      always_ff @(posedge clk) begin
        int acc;
        acc = 0;
        for (int i = 0; i < D; i++) begin
          int df;
          df  = int'(in_cc[q][i]) - int'(in_cc[j][i]);
          acc += (df < 0) ? -df : df;
        end
        out_iso[q][j] <= (acc >= TD);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
