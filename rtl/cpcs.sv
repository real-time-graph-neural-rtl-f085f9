// cpcs -- Condensation Point Candidate Selection (Algorithm 1 of the
// published design).
//
//   cps   <- 0
//   flags <- candidates
//   for i in 0 .. I_init-1:            (one cycle each)
//     for p in 0 .. P-1:               (unrolled, in order, within the cycle)
//       id         <- ids.pop()
//       cps[id]    <- flags[id]
//       flags      <- flags & isolations[id]
//
// ids lists the nodes by descending beta, so a node becomes a condensation
// point if no node visited before it has cleared its flag. The algorithm is
// implemented as printed: the mask of every visited node is applied, whether
// or not that node was selected. P nodes are visited per cycle, so an event
// takes I_init = ceil(N/P) cycles (16 for N = 32, P = 2) after the start
// cycle; done pulses in the cycle after the last visit and cps holds the
// result until the next done. last_iter marks the cycle of the last visits;
// the next start may already come in that cycle, so events can follow every
// I_init cycles.
module cpcs #(
  parameter int unsigned N = 32,
  parameter int unsigned P = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [N-1:0][N-1:0]          isolations,
  input  logic [N-1:0]                 candidates,
  input  logic [N-1:0][$clog2(N)-1:0]  ids,
  output logic [N-1:0]                 cps,
  output logic                         done,
  output logic                         busy,
  output logic                         last_iter
);
  localparam int unsigned IW    = $clog2(N);
  localparam int unsigned IINIT = (N + P - 1) / P;
  localparam int unsigned CW    = $clog2(IINIT + 1);

  logic [N-1:0][N-1:0]  iso_q;
  logic [N-1:0][IW-1:0] ids_q;
  logic [N-1:0]         flags, work;
  logic [CW-1:0]        cnt;

  assign last_iter = busy && (cnt == CW'(IINIT - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; cps <= '0; work <= '0; flags <= '0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        logic [N-1:0] f, c;
        f = flags;
        c = work;
        for (int p = 0; p < P; p++) begin
          int pos;
          pos = int'(cnt) * P + p;
          if (pos < N) begin
            c[ids_q[pos]] = f[ids_q[pos]];
            f = f & iso_q[ids_q[pos]];
          end
        end
        flags <= f;
        work  <= c;
        cnt   <= cnt + 1'b1;
        if (last_iter) begin
          busy <= 1'b0;
          done <= 1'b1;
          cps  <= c;
        end
      end
      // a new event may be loaded while the last visits of the previous one
      // are being made
      if (start) begin
        iso_q <= isolations;
        ids_q <= ids;
        flags <= candidates;
        work  <= '0;
        cnt   <= '0;
        busy  <= 1'b1;
      end
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy || last_iter));
endmodule
