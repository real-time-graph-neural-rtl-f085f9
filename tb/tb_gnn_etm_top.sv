// tb_gnn_etm_top -- end-to-end test of the whole trigger module at its
// default size (576 TCs, 32 nodes, 2 lanes, 16 cycles per window).
//
// The network weights are chosen so that the result can be predicted:
//   * position table: x = (id mod 24)/8, y = (id div 24 mod 24)/8, z = 0
//   * skip scaling layer = identity, DL2 passes relu(+-x), relu(+-y),
//     relu(+-z) of the scaled inputs, the position and CCoords heads rebuild
//     x, y, z from them, the energy head is the constant 1.0 and the
//     signal/beta heads are 0 (hard sigmoid 0.5, every node a candidate).
//   * both GravNet blocks get small random weights: they run, but DL2 does
//     not look at their outputs, so the checked values do not depend on them.
// A reference model of the trigger window and the compaction predicts the
// node list of every window. Checked per window and node: valid flag, TC id,
// energy and time, cluster energy (= E feature x 8), position and signal
// score. The condensation points are checked for the properties of the
// greedy selection: each is a valid node, any two are at least t_d apart
// (L1), and every window with a hit has at least one.
// Timing: windows are fed back to back, the output must come as 16-beat
// bursts, one per window, 16 cycles apart; the latency is printed.
// Mechanisms counted (each must occur): overflow beyond 32 hits, trigger-
// window merge from the previous window, suppression of a candidate by the
// selection, readout packet sent, readout trigger dropped (both buffers
// busy), two buffers competing at the readout arbiter.
module tb_gnn_etm_top;
  import gnn_pkg::*;

  localparam int NEV = 40;
  localparam int NB  = N_MAX / P_PAR;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;   // ~125 MHz (127.216 MHz in the system)

  cfg_bus_t cfg;
  logic icn_valid, icn_last, trig_in;
  tc_raw_t [IN_LANES-1:0] icn_tc;
  logic clu_valid, clu_last, ev_valid, ev_overflow;
  out_rec_t [P_PAR-1:0] clu_rec;
  logic [$clog2(N_MAX):0] clu_ncl;
  logic [TC_ID_W:0] ev_nhits;
  logic b2l_valid, b2l_sop, b2l_eop, b2l_synced;
  logic [2*$bits(out_rec_t)*P_PAR-1:0] b2l_data;
  logic [15:0] b2l_n_events, b2l_n_dropped;

  gnn_etm_top dut (.*);

  int checks = 0, failures = 0;
  int n_overflow = 0, n_merge = 0, n_suppress = 0, n_packets = 0, n_contention = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference model ----------------
  tc_raw_t raw   [NEV][N_TC];
  tc_raw_t prevw [N_TC];
  int      exp_n [NEV];
  int      exp_id[NEV][N_MAX];
  int      exp_e [NEV][N_MAX];
  int      exp_t [NEV][N_MAX];
  int      exp_hits[NEV];

  function automatic int xpos(int id); return (id % 24) * 128; endfunction
  function automatic int ypos(int id); return ((id / 24) % 24) * 128; endfunction
  // cluster energy for energy factor 1.0: E feature x 8, Q6.10, saturated
  function automatic int esat(int e);
    int v; v = efeat(e) * 2; return v > 32767 ? 32767 : v;
  endfunction
  function automatic int efeat(int e);
    int f; f = (e * 33554) >>> 16; return f > 32767 ? 32767 : f;
  endfunction

  initial begin
    for (int i = 0; i < N_TC; i++) prevw[i] = '0;
    for (int ev = 0; ev < NEV; ev++) begin
      int nh;
      nh = (ev % 5 == 3) ? 45 : 2 + $urandom_range(0, 14);
      for (int i = 0; i < N_TC; i++) raw[ev][i] = '0;
      for (int h = 0; h < nh; h++) begin
        int id;
        id = $urandom_range(0, N_TC - 1);
        raw[ev][id].hit = 1'b1;
        raw[ev][id].e   = 16'($urandom_range(100, 60000));
        raw[ev][id].t   = 8'($urandom_range(0, 100));
      end
      exp_n[ev] = 0; exp_hits[ev] = 0;
      for (int i = 0; i < N_TC; i++) begin
        tc_raw_t m;
        m = raw[ev][i].hit ? raw[ev][i] : prevw[i];
        if (m.hit) begin
          if (!raw[ev][i].hit) n_merge++;
          exp_hits[ev]++;
          if (exp_n[ev] < N_MAX) begin
            exp_id[ev][exp_n[ev]] = i; exp_e[ev][exp_n[ev]] = int'(m.e);
            exp_t[ev][exp_n[ev]] = int'(m.t);
            exp_n[ev]++;
          end
        end
      end
      if (exp_hits[ev] > N_MAX) n_overflow++;
      for (int i = 0; i < N_TC; i++) prevw[i] = raw[ev][i];
    end
  end

  // ---------------- configuration ----------------
  task automatic wr(input int tg, input int ad, input int dt);
    cfg_bus_t c;
    c.we = 1'b1; c.tgt = CFG_TGT_W'(tg); c.addr = 12'(ad); c.data = 16'(dt);
    cfg <= c;
    @(posedge clk);
  endtask

  task automatic configure();
    for (int c = 0; c < 3; c++)
      for (int id = 0; id < 1024; id++)
        wr(TGT_POS_LUT, c * 1024 + id, c == 0 ? (id % 24) * 512 : c == 1 ? ((id / 24) % 24) * 512 : 0);
    for (int t = TGT_B1_DL1; t <= TGT_O_BETA; t++)
      for (int a = 0; a < 1200; a++)
        wr(t, a, (t <= TGT_B2_OUT) ? $urandom_range(0, 64) - 32 : 0);
    for (int i = 0; i < F_IN; i++) wr(TGT_SCALE, i * F_IN + i, 1024);
    for (int c = 0; c < 3; c++) begin
      wr(TGT_DL2, (2 * c) * CAT_W + c, 1024);
      wr(TGT_DL2, (2 * c + 1) * CAT_W + c, -1024);
      wr(TGT_O_POS, c * DL2_W + 2 * c, 1024);
      wr(TGT_O_POS, c * DL2_W + 2 * c + 1, -1024);
      wr(TGT_O_CC, c * DL2_W + 2 * c, 1024);
      wr(TGT_O_CC, c * DL2_W + 2 * c + 1, -1024);
    end
    wr(TGT_O_E, DL2_W, 1024);   // bias 1.0
    cfg <= '0;
  endtask

  // ---------------- stimulus ----------------
  longint t_first_in[NEV];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cfg = '0; icn_valid = 1'b0; icn_last = 1'b0; icn_tc = '0; trig_in = 1'b0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    configure();
    repeat (5) @(posedge clk);
    for (int ev = 0; ev < NEV; ev++) begin
      for (int b = 0; b < IN_BEATS; b++) begin
        if (b == 0) t_first_in[ev] = cyc;
        icn_valid <= 1'b1;
        icn_last  <= (b == IN_BEATS - 1);
        for (int l = 0; l < IN_LANES; l++) icn_tc[l] <= raw[ev][b * IN_LANES + l];
        // readout triggers: one alone, then three close together
        trig_in <= (ev == 12 && b == 0) || (ev == 25 && (b == 0 || b == 3 || b == 6));
        @(posedge clk);
      end
    end
    icn_valid <= 1'b0; icn_last <= 1'b0; trig_in <= 1'b0;
  end

  // ---------------- output checks ----------------
  int out_ev = 0, beat = 0, last_cyc = -1, ncp;
  int cpx[N_MAX], cpy[N_MAX], cpz[N_MAX];
  always @(posedge clk) if (rst_n && clu_valid && out_ev < NEV) begin
    if (beat == 0) begin
      ncp = 0;
      if (out_ev == 0) $display("latency first input beat -> first cluster beat: %0d cycles",
                                cyc - t_first_in[0]);
    end
    for (int p = 0; p < P_PAR; p++) begin
      int n;
      out_rec_t r;
      n = beat * P_PAR + p;
      r = clu_rec[p];
      check(r.valid == (n < exp_n[out_ev]), $sformatf("valid ev%0d n%0d", out_ev, n));
      if (r.valid && n < exp_n[out_ev]) begin
        check(int'(r.id) == exp_id[out_ev][n], $sformatf("id ev%0d n%0d", out_ev, n));
        check(int'(r.tc_e) == exp_e[out_ev][n] && int'(r.tc_t) == exp_t[out_ev][n], "tc e/t");
        check(int'(r.par.e) == esat(exp_e[out_ev][n]), $sformatf("cluster E ev%0d n%0d got %0d exp %0d", out_ev, n, int'(r.par.e), esat(exp_e[out_ev][n])));
        check(int'(r.par.x) == xpos(exp_id[out_ev][n]) && int'(r.par.y) == ypos(exp_id[out_ev][n])
              && int'(r.par.z) == 0, $sformatf("pos ev%0d n%0d got %0d %0d %0d id %0d", out_ev, n, int'(r.par.x), int'(r.par.y), int'(r.par.z), exp_id[out_ev][n]));
        check(int'(r.par.sig) == 512, "signal score");
        if (r.is_cp) begin
          for (int j = 0; j < ncp; j++) begin
            int d;
            d = (int'(r.par.x) > cpx[j] ? int'(r.par.x) - cpx[j] : cpx[j] - int'(r.par.x))
              + (int'(r.par.y) > cpy[j] ? int'(r.par.y) - cpy[j] : cpy[j] - int'(r.par.y))
              + (int'(r.par.z) > cpz[j] ? int'(r.par.z) - cpz[j] : cpz[j] - int'(r.par.z));
            check(d >= T_D, $sformatf("isolation ev%0d n%0d", out_ev, n));
          end
          cpx[ncp] = int'(r.par.x); cpy[ncp] = int'(r.par.y); cpz[ncp] = int'(r.par.z);
          ncp++;
        end else n_suppress++;
      end else check(!r.is_cp, "cp on empty node");
    end
    check(clu_last == (beat == NB - 1), "burst length");
    if (beat == NB - 1) begin
      check(int'(clu_ncl) == ncp, "cluster count");
      check((exp_n[out_ev] == 0) || ncp > 0, "at least one cluster");
      if (last_cyc >= 0) check(cyc - last_cyc == NB, $sformatf("window spacing %0d", cyc - last_cyc));
      last_cyc = cyc;
      out_ev++; beat = 0;
    end else beat++;
  end

  // overflow flag of the preprocessing against the model
  int st_ev = 0;
  always @(posedge clk) if (rst_n && ev_valid && st_ev < NEV) begin
    check(ev_overflow == (exp_hits[st_ev] > N_MAX), "overflow flag");
    check(int'(ev_nhits) == exp_hits[st_ev], "hit count");
    st_ev++;
  end

  // ---------------- readout ----------------
  int pk_words = 0;
  logic [15:0] last_evno = 16'hffff;
  always @(posedge clk) if (rst_n) begin
    if ((dut.u_b2l.req & ~dut.u_b2l.grant) != '0 && dut.u_b2l.grant != '0) n_contention++;  // a buffer waits
    if (b2l_valid) begin
      pk_words++;
      if (b2l_sop) begin
        check(pk_words == 1, "sop first");
        check(b2l_data[15:0] == 16'd32, "header window length");
        check(b2l_data[39:24] != last_evno, "header event number");
        last_evno = b2l_data[39:24];
      end
      if (b2l_eop) begin
        check(pk_words == 33, $sformatf("packet length %0d", pk_words));
        n_packets++; pk_words = 0;
      end
    end
  end

  // ---------------- end ----------------
  initial begin
    wait (out_ev == NEV);
    repeat (400) @(posedge clk);
    check(b2l_synced, "readout channels aligned");
    check(int'(b2l_n_events) + int'(b2l_n_dropped) == 4, "readout triggers seen");
    check(int'(b2l_n_events) == n_packets, "one packet per accepted trigger");
    $display("mechanisms: overflow=%0d merge=%0d suppress=%0d packets=%0d dropped=%0d contention=%0d",
             n_overflow, n_merge, n_suppress, n_packets, b2l_n_dropped, n_contention);
    check(n_overflow > 0, "overflow happened");
    check(n_merge > 0, "trigger-window merge happened");
    check(n_suppress > 0, "suppression happened");
    check(n_packets > 0, "packet sent");
    check(b2l_n_dropped > 0, "trigger dropped");
    check(n_contention > 0, "arbiter contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
