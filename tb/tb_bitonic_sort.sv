// tb_bitonic_sort -- checks the 32-key bitonic sorting network.
// Random signed keys (with many repeats) go in back to back, one set per
// cycle; every output set must be in descending key order, its ids must be
// a permutation of 0..N-1, and each id must carry its own input key. The
// pipeline latency must equal the number of compare-exchange stages,
// log2(N)*(log2(N)+1)/2 = 15 for N = 32 (16 counted from the driving cycle).
module tb_bitonic_sort;
  localparam int N = 32, KW = 16, LG = 5, NST = LG * (LG + 1) / 2, NSET = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  logic in_valid = 1'b0;
  logic [N-1:0][KW-1:0] in_keys = '0;
  logic out_valid;
  logic [N-1:0][LG-1:0] out_ids;
  logic [N-1:0][KW-1:0] out_keys;
  bitonic_sort #(.N(N), .KEY_W(KW)) dut (.*);

  int checks = 0, failures = 0;
  logic [N-1:0][KW-1:0] sent [NSET];
  int in_cyc [NSET];
  int cyc = 0, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int s = 0; s < NSET; s++) begin
      for (int i = 0; i < N; i++)
        sent[s][i] = (s % 3 == 0) ? KW'($urandom_range(0, 3)) : KW'($urandom);
      in_keys  <= sent[s];
      in_valid <= 1'b1;
      in_cyc[s] = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
  end

  always @(posedge clk) if (out_valid) begin
    bit seen [N];
    checks++;
    if (cyc - in_cyc[nout] != NST + 1)  // counted from the cycle the keys are driven
      begin failures++; $display("latency %0d", cyc - in_cyc[nout]); end
    for (int i = 0; i < N; i++) seen[i] = 1'b0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (out_keys[i] != sent[nout][out_ids[i]] || seen[out_ids[i]]) failures++;
      seen[out_ids[i]] = 1'b1;
      if (i > 0) begin
        checks++;
        if ($signed(out_keys[i]) > $signed(out_keys[i-1])) failures++;
      end
    end
    nout++;
  end

  initial begin
    wait (nout == NSET);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
