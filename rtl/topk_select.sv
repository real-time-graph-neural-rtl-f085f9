// topk_select -- picks the K smallest of N distances (graph building step of
// GravNetConv: each node's K nearest neighbours).
//
// Each element counts how many elements precede it in the order
// (distance, index); an element with rank r < K lands in output slot r.
// The result is therefore sorted by ascending distance, ties broken by the
// lower index. This is an N*N comparator array evaluated in one step; the
// published design uses a hierarchical Top-K sorter instead, which gives the
// same set up to tie order. Purely combinational.
module topk_select #(
  parameter int unsigned N   = 32,
  parameter int unsigned K   = 8,
  parameter int unsigned D_W = 20
) (
  input  logic [N-1:0][D_W-1:0]        dists,
  output logic [K-1:0][$clog2(N)-1:0]  idx,
  output logic [K-1:0][D_W-1:0]        kd
);
  localparam int unsigned IW = $clog2(N);
  logic [IW:0] rank [N];

  always_comb begin
    for (int j = 0; j < N; j++) begin
      rank[j] = '0;
      for (int l = 0; l < N; l++)
        if ((dists[l] < dists[j]) || (dists[l] == dists[j] && l < j))
          rank[j] = rank[j] + 1'b1;
    end
    idx = '0;
    kd  = '0;
    for (int j = 0; j < N; j++)
      for (int s = 0; s < K; s++)
        if (rank[j] == (IW+1)'(s)) begin
          idx[s] = IW'(j);
          kd[s]  = dists[j];
        end
  end
endmodule
