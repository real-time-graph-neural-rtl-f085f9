// bitonic_sort -- pipelined bitonic sorting network that orders node ids by
// descending priority key (the Bitonic Sort PE of the condensation point
// selection: candidates with higher beta are visited first).
//
// N must be a power of two. The network has log2(N)*(log2(N)+1)/2 compare
// stages (15 for N = 32), each followed by a register, so the latency is
// that many cycles and a new set of keys can enter every cycle. Like the
// published sorter it is not stable: equal keys leave in an order fixed by
// the network, not by their ids.
module bitonic_sort #(
  parameter int unsigned N     = 32,
  parameter int unsigned KEY_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N-1:0][KEY_W-1:0]       in_keys,   // signed keys
  output logic                          out_valid,
  output logic [N-1:0][$clog2(N)-1:0]   out_ids,   // out_ids[0] has the largest key
  output logic [N-1:0][KEY_W-1:0]       out_keys
);
  localparam int unsigned LG  = $clog2(N);
  localparam int unsigned NST = LG * (LG + 1) / 2;
  localparam int unsigned IW  = LG;

  // (k, j) of compare stage s in the classic bitonic schedule
  function automatic int stage_k(input int s);
    int c; c = 0;
    for (int k = 2; k <= N; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return k;
        c++;
      end
    return 0;
  endfunction
  function automatic int stage_j(input int s);
    int c; c = 0;
    for (int k = 2; k <= N; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return j;
        c++;
      end
    return 0;
  endfunction

  logic [N-1:0][KEY_W-1:0] key [NST+1];
  logic [N-1:0][IW-1:0]    id  [NST+1];
  logic [NST:0]            vld;

  always_comb begin
    key[0] = in_keys;
    for (int i = 0; i < N; i++) id[0][i] = IW'(i);
    vld[0] = in_valid;
  end

  for (genvar s = 0; s < NST; s++) begin : g_stage
    localparam int KK = stage_k(s);
    localparam int JJ = stage_j(s);
    always_ff @(posedge clk) begin
      for (int i = 0; i < N; i++) begin
        int l;
        l = i ^ JJ;
        if (l > i) begin
          logic desc, swap;
          desc = ((i & KK) == 0);   // this sub-sequence ends up descending
          swap = desc ? ($signed(key[s][i]) < $signed(key[s][l]))
                      : ($signed(key[s][i]) > $signed(key[s][l]));
          key[s+1][i] <= swap ? key[s][l] : key[s][i];
          key[s+1][l] <= swap ? key[s][i] : key[s][l];
          id[s+1][i]  <= swap ? id[s][l]  : id[s][i];
          id[s+1][l]  <= swap ? id[s][i]  : id[s][l];
        end
      end
    end
    always_ff @(posedge clk) begin
      if (!rst_n) vld[s+1] <= 1'b0;
      else        vld[s+1] <= vld[s];
    end
  end

  assign out_valid = vld[NST];
  assign out_ids   = id[NST];
  assign out_keys  = key[NST];
endmodule
