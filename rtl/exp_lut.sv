// exp_lut -- edge weight of the GravNet message passing, w = exp(-F_EXP * d).
//
// d is an L1 distance with ACT_F (= 10) fractional bits. The published
// design generates an 8-bit table for the exponential at design time that
// covers d in [0, 0.5] and maps larger distances to zero; this module does
// the same with 256 entries: entry i = round(128 * exp(-F_EXP * i / 512)),
// indexed by d[8:1], with outputs in unsigned Q1.7 so that the maximum,
// exp(0) = 1.0, is exactly 128. The table is computed at elaboration by a
// fixed-point recurrence (v_i = v_{i-1} * exp(-F_EXP/512) in Q2.30, the
// factor from a 6-term Taylor series), so no data file is needed.
// Purely combinational.
module exp_lut
  import gnn_pkg::*;
#(
  parameter int unsigned D_W  = 20,
  parameter int unsigned FEXP = F_EXP
) (
  input  logic [D_W-1:0] d,
  output logic [7:0]     w
);
  typedef logic [7:0] lut_t [256];

  function automatic lut_t build_lut();
    lut_t t;
    longint one, y, r, term, v;
    one  = 64'sd1 <<< 30;
    y    = (longint'(FEXP) <<< 30) / 512;
    // exp(-y) = sum_k (-y)^k / k!
    r    = one;
    term = one;
    for (int k = 1; k <= 6; k++) begin
      term = -((term * y) >>> 30) / longint'(k);
      r    = r + term;
    end
    v = one;
    for (int i = 0; i < 256; i++) begin
      t[i] = 8'((v * 128 + (one >>> 1)) >>> 30);
      v    = (v * r) >>> 30;
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  always_comb begin
    if (d >= D_W'(512)) w = 8'd0;
    else                w = LUT[d[8:1]];
  end
endmodule
