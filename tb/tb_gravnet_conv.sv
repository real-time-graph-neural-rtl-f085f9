// tb_gravnet_conv -- checks the GravNet aggregation operator at its default
// size (32 nodes, 2 lanes, k = 8, 16 h features, 6-d learned space, 8
// message features).
// Six events with random coordinates, features and padded (invalid) nodes
// are streamed back to back, one event every 16 cycles. A reference model
// computes, for every node, the L1 distances in the learned space (padded
// nodes infinitely far), the 8 nearest nodes (ties to the lower index),
// the messages f * w >> 7 with w read from the exponential table (checked
// on its own by tb_exp_lut; 0 for padded neighbours), and their maximum and
// saturated sum. The output must equal [h, max, sum] for every node, keep
// the 16-cycle event rate and start 5 cycles after the last input beat.
module tb_gravnet_conv;
  import gnn_pkg::*;
  localparam int N = 32, P = 2, K = 8, H = 16, S = 6, F = 8, NB = N / P, NEV = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [P-1:0] in_nvalid = '0;
  act_t [P-1:0][H-1:0] in_h = '0;
  act_t [P-1:0][S-1:0] in_s = '0;
  act_t [P-1:0][F-1:0] in_f = '0;
  logic out_valid, out_last;
  logic [P-1:0] out_nvalid;
  act_t [P-1:0][H+2*F-1:0] out_data;
  gravnet_conv #(.N(N), .P(P), .K(K), .H(H), .S(S), .F(F)) dut (.*);

  int checks = 0, failures = 0;
  act_t hh [NEV][N][H];
  act_t ss [NEV][N][S];
  act_t ff [NEV][N][F];
  bit   vv [NEV][N];
  act_t exp_o [NEV][N][H+2*F];
  int cyc = 0, last_in_cyc [NEV];
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int wlut(int d);
    return (d >= 512) ? 0 : int'(dut.g_lane[0].g_k[0].u_exp.LUT[d / 2]);
  endfunction

  task automatic reference(int ev);
    for (int q = 0; q < N; q++) begin
      int d [N];
      bit used [N];
      int sm [F];
      act_t mx [F];
      for (int j = 0; j < N; j++) begin
        d[j] = 0;
        for (int i = 0; i < S; i++) begin
          int df;
          df = int'(ss[ev][q][i]) - int'(ss[ev][j][i]);
          d[j] += (df < 0) ? -df : df;
        end
        if (!vv[ev][j]) d[j] = (1 << 20) - 1;
        used[j] = 1'b0;
      end
      for (int i = 0; i < F; i++) sm[i] = 0;
      for (int k = 0; k < K; k++) begin
        int b;
        b = -1;
        for (int j = 0; j < N; j++) if (!used[j] && (b < 0 || d[j] < d[b])) b = j;
        used[b] = 1'b1;
        for (int i = 0; i < F; i++) begin
          act_t m;
          m = vv[ev][b] ? act_t'((int'(ff[ev][b][i]) * wlut(d[b])) >>> 7) : act_t'(0);
          if (k == 0 || m > mx[i]) mx[i] = m;
          sm[i] += int'(m);
        end
      end
      for (int i = 0; i < H; i++) exp_o[ev][q][i] = hh[ev][q][i];
      for (int i = 0; i < F; i++) begin
        exp_o[ev][q][H + i]     = mx[i];
        exp_o[ev][q][H + F + i] = act_t'(sm[i] > 32767 ? 32767 : sm[i] < -32768 ? -32768 : sm[i]);
      end
    end
  endtask

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      for (int n = 0; n < N; n++) begin
        vv[ev][n] = (n < 4) || ($urandom_range(0, 4) != 0);
        for (int i = 0; i < H; i++) hh[ev][n][i] = act_t'($urandom_range(0, 4000) - 2000);
        for (int i = 0; i < S; i++) ss[ev][n][i] = act_t'($urandom_range(0, 120) - 60);
        for (int i = 0; i < F; i++) ff[ev][n][i] = act_t'($urandom_range(0, 8000) - 4000);
      end
      reference(ev);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int ev = 0; ev < NEV; ev++)
      for (int b = 0; b < NB; b++) begin
        in_valid <= 1'b1;
        in_last  <= (b == NB - 1);
        for (int p = 0; p < P; p++) begin
          in_nvalid[p] <= vv[ev][b * P + p];
          for (int i = 0; i < H; i++) in_h[p][i] <= hh[ev][b * P + p][i];
          for (int i = 0; i < S; i++) in_s[p][i] <= ss[ev][b * P + p][i];
          for (int i = 0; i < F; i++) in_f[p][i] <= ff[ev][b * P + p][i];
        end
        if (b == NB - 1) last_in_cyc[ev] = cyc;
        @(posedge clk);
      end
    in_valid <= 1'b0; in_last <= 1'b0;
  end

  int oev = 0, obeat = 0;
  always @(posedge clk) if (rst_n && out_valid && oev < NEV) begin
    if (obeat == 0) begin
      checks++;
      // first output beat 5 cycles after the last input beat was sampled
      if (cyc - last_in_cyc[oev] != 6) begin   // 5 after sampling, 6 from driving
        failures++;
        $display("event %0d: output after %0d cycles", oev, cyc - last_in_cyc[oev]);
      end
    end
    for (int p = 0; p < P; p++) begin
      int n;
      n = obeat * P + p;
      checks++;
      if (out_nvalid[p] != vv[oev][n]) failures++;
      for (int i = 0; i < H + 2 * F; i++) begin
        checks++;
        if (out_data[p][i] != exp_o[oev][n][i]) begin
          failures++;
          if (failures < 8) $display("ev %0d node %0d out %0d: got %0d want %0d",
                                     oev, n, i, out_data[p][i], exp_o[oev][n][i]);
        end
      end
    end
    checks++;
    if (out_last != (obeat == NB - 1)) failures++;
    if (obeat == NB - 1) begin obeat = 0; oev++; end
    else obeat++;
  end

  initial begin
    wait (oev == NEV);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
