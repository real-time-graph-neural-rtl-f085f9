// tb_exp_lut -- checks the distance-to-weight table of the GravNet layers.
// For every distance code below the table range (Q.10, 0 .. 0.5) the weight
// must be round(128 * exp(-f_exp * floor(d/2) * 2 / 1024)) with f_exp = 10,
// computed here with the real-valued exp; at and beyond 0.5 it must be 0.
// One LSB of difference is accepted (the table is computed with a
// truncated series). The block is combinational.
module tb_exp_lut;
  localparam int DW = 20;
  logic [DW-1:0] d;
  logic [7:0]    w;
  exp_lut #(.D_W(DW), .FEXP(10)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int v = 0; v < 700; v++) begin
      int ref_w;
      d = DW'(v);
      #1;
      ref_w = (v >= 512) ? 0 : int'($floor(128.0 * $exp(-10.0 * real'((v / 2) * 2) / 1024.0) + 0.5));
      checks++;
      if (int'(w) - ref_w > 1 || ref_w - int'(w) > 1) begin
        failures++;
        if (failures < 5) $display("d=%0d w=%0d ref=%0d", v, w, ref_w);
      end
    end
    d = '1; #1; checks++; if (w != 0) failures++;
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
