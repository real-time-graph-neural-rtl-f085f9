// tb_gravnet_block -- checks one GravNet block (block 1: 5 inputs in
// Q4.12, 32 outputs in Q3.5) with its dense layers.
// The weights are written over the configuration bus so that every layer
// is a plain selection: DL1 passes the 5 inputs (ReLU, Q6.10), the S layer
// takes the first 6 DL1 outputs as learned coordinates, the F layer the
// first 8 as message features, and DL_out passes its 32 inputs. The
// reference is then the GravNet aggregation of those values (distances,
// 8 nearest, table weights read from the block's own exponential table,
// max and sum) followed by the Q3.5 floor-and-saturate of DL_out. Six
// events with random inputs and padded nodes are streamed back to back,
// one every 16 cycles; the output must also keep that rate.
module tb_gravnet_block;
  import gnn_pkg::*;
  localparam int N = 32, P = 2, K = 8, H = 16, S = 6, F = 8, NB = N / P, NEV = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  cfg_bus_t cfg = '0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [P-1:0] in_nvalid = '0;
  act_t [P-1:0][F_IN-1:0] in_data = '0;
  logic out_valid, out_last;
  logic [P-1:0] out_nvalid;
  act_t [P-1:0][DLOUT_W-1:0] out_data;
  gravnet_block dut (.*);

  act_t xx [NEV][N][F_IN];

  task automatic wr(input int tg, input int ad, input int dt);
    cfg_bus_t c;
    c.we = 1'b1; c.tgt = CFG_TGT_W'(tg); c.addr = 12'(ad); c.data = 16'(dt);
    cfg <= c;
    @(posedge clk);
  endtask

  function automatic act_t q35(int v);
    int q;
    q = (v < 0 ? 0 : v) >>> 5;
    if (q > 127) q = 127;
    return act_t'(q * 32);
  endfunction
  int checks = 0, failures = 0;
  act_t hh [NEV][N][H];
  act_t ss [NEV][N][S];
  act_t ff [NEV][N][F];
  bit   vv [NEV][N];
  act_t exp_o [NEV][N][H+2*F];
  int cyc = 0, last_in_cyc [NEV];
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int wlut(int d);
    return (d >= 512) ? 0 : int'(dut.u_conv.g_lane[0].g_k[0].u_exp.LUT[d / 2]);
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
      for (int i = 0; i < H; i++) exp_o[ev][q][i] = q35(int'(hh[ev][q][i]));
      for (int i = 0; i < F; i++) begin
        exp_o[ev][q][H + i]     = q35(int'(mx[i]));
        exp_o[ev][q][H + F + i] = q35(sm[i] > 32767 ? 32767 : sm[i] < -32768 ? -32768 : sm[i]);
      end
    end
  endtask

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      for (int n = 0; n < N; n++) begin
        vv[ev][n] = (n < 4) || ($urandom_range(0, 4) != 0);
        for (int i = 0; i < F_IN; i++) xx[ev][n][i] = act_t'($urandom_range(0, 12000) - 4000);
        for (int i = 0; i < H; i++) hh[ev][n][i] = (i < F_IN && xx[ev][n][i] > 0) ? act_t'(xx[ev][n][i] >>> 2) : act_t'(0);
        for (int i = 0; i < S; i++) ss[ev][n][i] = hh[ev][n][i];
        for (int i = 0; i < F; i++) ff[ev][n][i] = hh[ev][n][i];
      end
      reference(ev);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = TGT_B1_DL1; t <= TGT_B1_OUT; t++)
      for (int a = 0; a < 1056; a++) wr(t, a, 0);
    for (int i = 0; i < F_IN; i++)    wr(TGT_B1_DL1, i * F_IN + i, 1024);
    for (int i = 0; i < S; i++)       wr(TGT_B1_S, i * H + i, 1024);
    for (int i = 0; i < F; i++)       wr(TGT_B1_F, i * H + i, 1024);
    for (int i = 0; i < DLOUT_W; i++) wr(TGT_B1_OUT, i * DLOUT_W + i, 1024);
    cfg <= '0;
    repeat (2) @(posedge clk);
    for (int ev = 0; ev < NEV; ev++)
      for (int b = 0; b < NB; b++) begin
        in_valid <= 1'b1;
        in_last  <= (b == NB - 1);
        for (int p = 0; p < P; p++) begin
          in_nvalid[p] <= vv[ev][b * P + p];
          for (int i = 0; i < F_IN; i++) in_data[p][i] <= xx[ev][b * P + p][i];
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
      // dense 2 + S/F 2 + aggregation 5 + DL_out 2 cycles after the last beat
      if (cyc - last_in_cyc[oev] != 12) begin   // 11 after sampling, 12 from driving
        failures++;
        $display("event %0d: output after %0d cycles", oev, cyc - last_in_cyc[oev]);
      end
    end
    for (int p = 0; p < P; p++) begin
      int n;
      n = obeat * P + p;
      checks++;
      if (out_nvalid[p] != vv[oev][n]) failures++;
      for (int i = 0; i < DLOUT_W; i++) begin
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
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
