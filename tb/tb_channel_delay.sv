// tb_channel_delay -- checks the programmable readout channel delay.
// For several delay settings (1, 2, 3, 17, 255) a random stream with random
// valid gaps is sent; every output word and valid bit must equal the input
// exactly `delay` cycles earlier.
module tb_channel_delay;
  localparam int W = 16, DEPTH = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  logic [7:0] delay = 8'd1;
  logic in_valid = 1'b0, out_valid;
  logic [W-1:0] in_data = '0, out_data;
  channel_delay #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [W:0] hist [$];
  initial begin
    int dl [5] = '{1, 2, 3, 17, 255};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    foreach (dl[k]) begin
      delay <= 8'(dl[k]);
      hist.delete();
      // flush with the new setting
      repeat (DEPTH + 2) begin in_valid <= 1'b0; @(posedge clk); end
      for (int c = 0; c < 600; c++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        in_data  = W'($urandom);
        hist.push_front({in_valid, in_data});
        @(posedge clk);
        #1;
        if (hist.size() >= dl[k]) begin
          logic [W:0] e;
          e = hist[dl[k] - 1];
          checks++;
          if (out_valid != e[W] || (e[W] && out_data != e[W-1:0])) begin
            failures++;
            if (failures < 5) $display("delay %0d cycle %0d mismatch", dl[k], c);
          end
        end
      end
    end
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
