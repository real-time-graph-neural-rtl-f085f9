// postprocessing -- merges the TC side stream and the cluster result of the
// accelerator into one output stream in coordinate-offset form: every record
// carries the unique TC id it belongs to.
//
// The TC ids and raw TCs of each event, as the preprocessing sent them into
// the accelerator (P per beat, N/P beats per event), wait in a FIFO. When
// the accelerator reports an event (cps_valid: condensation-point mask,
// node-valid mask and cluster parameters of all N nodes), the module sends
// N/P beats of P records {valid, TC id, TC energy, TC time, is_cp, cluster
// parameters}, popping one FIFO beat per output beat, so each cluster is
// tied to the TC id of its condensation point. The record layout is this
// implementation's choice; the published design fixes only the principle.
// Output starts 1 cycle after cps_valid, one beat per cycle; the next
// cps_valid may come in the cycle of the final beat. ID_DEPTH must cover the
// accelerator latency in beats (overflow is asserted in stream_fifo).
module postprocessing
  import gnn_pkg::*;
#(
  parameter int unsigned N        = N_MAX,
  parameter int unsigned P        = P_PAR,
  parameter int unsigned ID_DEPTH = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // TC side stream from the preprocessing
  input  logic                 id_valid,
  input  tc_t [P-1:0]          id_tc,
  // accelerator result
  input  logic                 cps_valid,
  input  logic [N-1:0]         cps_nvalid,
  input  logic [N-1:0]         cps_mask,
  input  clu_par_t [N-1:0]     cps_par,
  // merged output
  output logic                 out_valid,
  output logic                 out_last,
  output out_rec_t [P-1:0]     out_rec,
  output logic [$clog2(N):0]   out_nclusters   // clusters of the event, valid with out_last
);
  localparam int unsigned NB = N / P;
  localparam int unsigned BW = $clog2(NB) > 0 ? $clog2(NB) : 1;

  tc_t [P-1:0] f_out;
  logic f_empty, f_pop, unused_full;
  logic [$clog2(ID_DEPTH):0] unused_cnt;
  stream_fifo #(.W($bits(tc_t) * P), .DEPTH(ID_DEPTH)) u_ids (
    .clk, .rst_n, .push(id_valid), .din(id_tc), .pop(f_pop), .dout(f_out),
    .empty(f_empty), .full(unused_full), .count(unused_cnt));

  logic [N-1:0]     nv_q, cp_q;
  clu_par_t [N-1:0] par_q;
  logic [BW-1:0]    beat;
  logic             run;
  logic [$clog2(N):0] ncl;

  assign f_pop = run;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; beat <= '0; out_valid <= 1'b0; out_last <= 1'b0; ncl <= '0;
      out_nclusters <= '0;
    end else begin
      out_valid <= run;
      out_last  <= run && beat == BW'(NB - 1);
      if (run) begin
        logic [$clog2(N):0] c;
        c = ncl;
        for (int p = 0; p < P; p++)
          if (nv_q[int'(beat)*P + p] && cp_q[int'(beat)*P + p]) c = c + 1'b1;
        ncl <= c;
        if (beat == BW'(NB - 1)) begin
          run <= 1'b0;
          out_nclusters <= c;
        end
        beat <= beat + 1'b1;
      end
      if (cps_valid) begin
        run  <= 1'b1;
        beat <= '0;
        ncl  <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cps_valid) begin
      nv_q <= cps_nvalid; cp_q <= cps_mask; par_q <= cps_par;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      int n;
      n = int'(beat) * P + p;
      out_rec[p] <= '{valid: nv_q[n], id: f_out[p].id, tc_e: f_out[p].e, tc_t: f_out[p].t,
                      is_cp: nv_q[n] & cp_q[n], par: par_q[n]};
    end
  end

  a_ids_available: assert property (@(posedge clk) disable iff (!rst_n) run |-> !f_empty);
  a_event_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    cps_valid |-> (!run || beat == BW'(NB - 1)));
endmodule
