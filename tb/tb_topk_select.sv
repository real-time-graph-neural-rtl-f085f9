// tb_topk_select -- checks the k-nearest-neighbour selector (N = 32, k = 8).
// Random distance vectors, half of them with heavy ties, are applied; the
// reference sorts (distance, index) pairs with a stable selection and the
// block must return the same k indices and distances in the same order
// (ties resolved towards the lower index). The block is combinational.
module tb_topk_select;
  localparam int N = 32, K = 8, DW = 20;
  logic [N-1:0][DW-1:0] dists;
  logic [K-1:0][4:0]    idx;
  logic [K-1:0][DW-1:0] kd;
  topk_select #(.N(N), .K(K), .D_W(DW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      bit used [N];
      for (int i = 0; i < N; i++) begin
        dists[i] = (t % 2) ? DW'($urandom_range(0, 5)) : DW'($urandom);
        used[i] = 1'b0;
      end
      #1;
      for (int k = 0; k < K; k++) begin
        int best;
        best = -1;
        for (int i = 0; i < N; i++)
          if (!used[i] && (best < 0 || dists[i] < dists[best])) best = i;
        used[best] = 1'b1;
        checks++;
        if (int'(idx[k]) != best || kd[k] != dists[best]) begin
          failures++;
          if (failures < 5) $display("set %0d rank %0d: got %0d want %0d", t, k, idx[k], best);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
