// tb_trigger_delay -- checks the programmable trigger delay.
// For delays 1, 2, 5, 100 and 1024 random trigger pulses are sent; the
// output must repeat the input exactly `delay` cycles later.
module tb_trigger_delay;
  localparam int DEPTH = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  logic [10:0] delay = 11'd1;
  logic trig_in = 1'b0, trig_out;
  trigger_delay #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  bit hist [$];
  initial begin
    int dl [5] = '{1, 2, 5, 100, 1024};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    foreach (dl[k]) begin
      @(negedge clk);
      delay = 11'(dl[k]);
      trig_in = 1'b0;
      hist.delete();
      repeat (DEPTH + 2) @(negedge clk);
      for (int c = 0; c < 1500; c++) begin
        @(negedge clk);
        trig_in = ($urandom_range(0, 9) == 0);
        hist.push_front(trig_in);
        @(posedge clk);
        #1;
        if (hist.size() >= dl[k]) begin
          checks++;
          if (trig_out != hist[dl[k] - 1]) begin
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
