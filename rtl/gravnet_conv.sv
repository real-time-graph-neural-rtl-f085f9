// gravnet_conv -- GravNetConv operator: dynamic graph building and message
// passing over the nodes of one event.
//
// Input stream: P nodes per beat, N/P beats per event (in_last on the final
// beat). Per node: h (H features, the block's dense-layer output), s (the
// S_DIM-dimensional learned spatial coordinates) and f (the F_DIM learned
// features). The event is written into one bank of a ping-pong buffer while
// the previous event is processed out of the other bank.
//
// Processing, for P query nodes per cycle:
//   A  L1 distance from the query to every node in s-space (invalid,
//      zero-padded nodes get the maximum distance);
//   B  the K nearest nodes (the query itself included, distance 0); their
//      features and valid bits are copied out of the bank here, because an
//      event arriving two events later may already refill that bank;
//   C  messages m = f_neighbour * exp(-F_EXP * d) with the 8-bit table of
//      exp_lut (message forced to 0 for an invalid neighbour);
//   D  aggregation by max and by sum over the K messages; the output node is
//      [h, max, sum] (H + 2*F_DIM features, Q6.10, sum saturated).
// Output beats follow the input order. Latency: last input beat to first
// output beat 5 cycles; first input beat to first output beat
// N/P + 4 cycles. A new event may start every N/P cycles (I_init = 16 for
// N = 32, P = 2). The structure (all-nearest-neighbour distances, top-K,
// exp, mult, max/sum reduce, ping-pong buffers) follows the published PE;
// L1 instead of L2 distance also follows it. Treating padded nodes as
// absent is this implementation's choice.
module gravnet_conv
  import gnn_pkg::*;
#(
  parameter int unsigned N     = N_MAX,
  parameter int unsigned P     = P_PAR,
  parameter int unsigned K     = K_NN,
  parameter int unsigned H     = DL1_W,
  parameter int unsigned S     = S_DIM,
  parameter int unsigned F     = FLR_DIM,
  parameter int unsigned FEXP  = F_EXP
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_last,
  input  logic [P-1:0]               in_nvalid,
  input  act_t [P-1:0][H-1:0]        in_h,
  input  act_t [P-1:0][S-1:0]        in_s,
  input  act_t [P-1:0][F-1:0]        in_f,
  output logic                       out_valid,
  output logic                       out_last,
  output logic [P-1:0]               out_nvalid,
  output act_t [P-1:0][H+2*F-1:0]    out_data
);
  localparam int unsigned NB  = N / P;          // beats per event
  localparam int unsigned BW  = $clog2(NB) > 0 ? $clog2(NB) : 1;
  localparam int unsigned IW  = $clog2(N);
  localparam int unsigned D_W = 20;

  // ---------------- ping-pong buffer ----------------
  act_t       bh [2][N][H];
  act_t       bs [2][N][S];
  act_t       bf [2][N][F];
  logic [N-1:0] bv [2];
  logic       wsel, rsel;
  logic [BW-1:0] wbeat, rbeat;
  logic       running;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (wbeat == '0) bv[wsel] <= '0;
      for (int p = 0; p < P; p++) begin
        bv[wsel][int'(wbeat)*P + p] <= in_nvalid[p];
        for (int i = 0; i < H; i++) bh[wsel][int'(wbeat)*P + p][i] <= in_h[p][i];
        for (int i = 0; i < S; i++) bs[wsel][int'(wbeat)*P + p][i] <= in_s[p][i];
        for (int i = 0; i < F; i++) bf[wsel][int'(wbeat)*P + p][i] <= in_f[p][i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wsel <= 1'b0; rsel <= 1'b0; wbeat <= '0; rbeat <= '0; running <= 1'b0;
    end else begin
      if (in_valid) begin
        if (in_last) begin
          wbeat   <= '0;
          wsel    <= ~wsel;
          rsel    <= wsel;
          rbeat   <= '0;
          running <= 1'b1;
        end else begin
          wbeat <= wbeat + 1'b1;
        end
      end
      if (running && !(in_valid && in_last)) begin
        if (rbeat == BW'(NB-1)) running <= 1'b0;
        else                    rbeat   <= rbeat + 1'b1;
      end
    end
  end

  a_event_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_last) |-> (!running || rbeat == BW'(NB-1)))
    else $error("gravnet_conv: new event before the previous one was processed");

  // ---------------- stage A: distances ----------------
  logic              a_valid, a_last;
  logic [P-1:0]      a_nv;
  logic [IW-1:0]     a_q   [P];
  logic [N-1:0][D_W-1:0] a_d [P];
  logic              a_sel;

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      logic [IW-1:0] q;
      q = IW'(int'(rbeat)*P + p);
      a_q[p]  <= q;
      a_nv[p] <= bv[rsel][q];
      for (int j = 0; j < N; j++) begin
        logic [D_W-1:0] acc;
        acc = '0;
        for (int i = 0; i < S; i++) begin
          logic signed [ACT_W:0] df;
          logic [ACT_W:0]        ad;
          df  = (ACT_W+1)'(bs[rsel][q][i]) - (ACT_W+1)'(bs[rsel][j][i]);
          ad  = df < 0 ? -df : df;
          acc = acc + D_W'(ad);
        end
        a_d[p][j] <= bv[rsel][j] ? acc : '1;
      end
    end
    a_sel <= rsel;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin a_valid <= 1'b0; a_last <= 1'b0; end
    else begin
      a_valid <= running;
      a_last  <= running && rbeat == BW'(NB-1);
    end
  end

  // ---------------- stage B: K nearest ----------------
  logic [K-1:0][IW-1:0]  b_idx_c [P];
  logic [K-1:0][D_W-1:0] b_kd_c  [P];
  logic [K-1:0][D_W-1:0] b_kd    [P];
  logic [IW-1:0]         b_q     [P];
  logic [P-1:0]          b_nv;
  logic                  b_valid, b_last, b_sel;

  for (genvar p = 0; p < P; p++) begin : g_topk
    topk_select #(.N(N), .K(K), .D_W(D_W)) u_topk (
      .dists(a_d[p]), .idx(b_idx_c[p]), .kd(b_kd_c[p]));
  end

  // the neighbour features are fetched here: two cycles later the next-but-
  // one event may already be overwriting this bank
  act_t       b_nf  [P][K][F];
  logic       b_nbv [P][K];
  always_ff @(posedge clk) begin
    b_kd <= b_kd_c; b_q <= a_q; b_nv <= a_nv; b_sel <= a_sel;
    for (int p = 0; p < P; p++)
      for (int k = 0; k < K; k++) begin
        b_nbv[p][k] <= bv[a_sel][b_idx_c[p][k]];
        for (int i = 0; i < F; i++) b_nf[p][k][i] <= bf[a_sel][b_idx_c[p][k]][i];
      end
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin b_valid <= 1'b0; b_last <= 1'b0; end
    else begin b_valid <= a_valid; b_last <= a_last; end
  end

  // ---------------- stage C: exp-weighted messages ----------------
  logic [7:0] c_w_c [P][K];
  act_t       c_msg [P][K][F];
  logic [IW-1:0] c_q [P];
  logic [P-1:0]  c_nv;
  logic          c_valid, c_last, c_sel;

  for (genvar p = 0; p < P; p++) begin : g_lane
    for (genvar k = 0; k < K; k++) begin : g_k
      exp_lut #(.D_W(D_W), .FEXP(FEXP)) u_exp (.d(b_kd[p][k]), .w(c_w_c[p][k]));
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      for (int k = 0; k < K; k++)
        for (int i = 0; i < F; i++) begin
          logic signed [31:0] m;
          m = 32'(b_nf[p][k][i]) * $signed({1'b0, c_w_c[p][k]});
          c_msg[p][k][i] <= b_nbv[p][k] ? act_t'(m >>> 7) : '0;
        end
    c_q <= b_q; c_nv <= b_nv; c_sel <= b_sel;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin c_valid <= 1'b0; c_last <= 1'b0; end
    else begin c_valid <= b_valid; c_last <= b_last; end
  end

  // ---------------- stage D: max / sum reduce, concatenate ----------------
  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      for (int i = 0; i < H; i++) out_data[p][i] <= bh[c_sel][c_q[p]][i];
      for (int i = 0; i < F; i++) begin
        act_t mx;
        logic signed [31:0] sm;
        mx = c_msg[p][0][i];
        sm = '0;
        for (int k = 0; k < K; k++) begin
          if (c_msg[p][k][i] > mx) mx = c_msg[p][k][i];
          sm = sm + 32'(c_msg[p][k][i]);
        end
        out_data[p][H + i]     <= mx;
        out_data[p][H + F + i] <= requant(64'(sm), ACT_F, 6, 10);
      end
    end
    out_nvalid <= c_nv;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin out_valid <= 1'b0; out_last <= 1'b0; end
    else begin out_valid <= c_valid; out_last <= c_last; end
  end
endmodule
