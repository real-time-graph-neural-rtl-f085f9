// dense_pe -- one dense (or linear) layer of the network as a pipelined
// processing element.
//
// Every cycle each of the P lanes presents one graph node (IN_N features);
// the PE computes y = W x + b for that node, applies ReLU if RELU = 1, floors
// the result onto the Q(QI).(QF) grid of the layer and saturates it. The
// matrix-vector product, activation and rescaling are fused into one
// module, as in the published accelerator. Linear layers are the same PE
// with RELU = 0.
//
// Weights and biases are registers loaded through the configuration bus:
// target TGT, address o*IN_N+i for W[o][i] and OUT_N*IN_N+o for b[o], data
// a signed 16-bit value with WGT_F fractional bits. (The published design
// compiles trained, pruned weights into the bitstream; loading them at run
// time is a choice of this implementation. Pruned weights are just zeros.)
//
// Timing: latency LAT = 2 cycles (products/sum registered, then requantise),
// one node per lane per cycle, no back-pressure. Flooring instead of
// rounding follows the published hardware; saturation follows the QKeras
// quantisers the network was trained with.
module dense_pe
  import gnn_pkg::*;
#(
  parameter int unsigned IN_N  = 16,
  parameter int unsigned OUT_N = 16,
  parameter int unsigned P     = P_PAR,
  parameter int unsigned X_F   = ACT_F,    // fractional bits of the input
  parameter bit          RELU  = 1'b1,
  parameter int unsigned QI    = 6,        // output integer bits (incl. sign)
  parameter int unsigned QF    = 10,       // output fractional bits (<= ACT_F)
  parameter logic [CFG_TGT_W-1:0] TGT = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cfg_bus_t cfg,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [P-1:0]            in_nvalid,
  input  act_t [P-1:0][IN_N-1:0]  in_data,
  output logic                    out_valid,
  output logic                    out_last,
  output logic [P-1:0]            out_nvalid,
  output act_t [P-1:0][OUT_N-1:0] out_data
);
  localparam int unsigned ACC_W = 48;
  localparam int unsigned PF    = X_F + WGT_F;   // fractional bits of a product

  wgt_t w [OUT_N][IN_N];
  wgt_t b [OUT_N];

  // configuration writes
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.tgt == TGT) begin
      for (int o = 0; o < OUT_N; o++) begin
        for (int i = 0; i < IN_N; i++)
          if (int'(cfg.addr) == o*IN_N + i) w[o][i] <= wgt_t'(cfg.data);
        if (int'(cfg.addr) == OUT_N*IN_N + o) b[o] <= wgt_t'(cfg.data);
      end
    end
  end

  // stage 1: matrix-vector product plus bias
  logic signed [ACC_W-1:0] acc_q [P][OUT_N];
  logic s1_valid, s1_last;
  logic [P-1:0] s1_nvalid;

  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      for (int o = 0; o < OUT_N; o++) begin
        logic signed [ACC_W-1:0] s;
        s = ACC_W'(b[o]) <<< X_F;
        for (int i = 0; i < IN_N; i++)
          s += ACC_W'(in_data[p][i]) * ACC_W'(w[o][i]);
        acc_q[p][o] <= s;
      end
  end

  // stage 2: activation, floor, saturate
  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      for (int o = 0; o < OUT_N; o++) begin
        logic signed [ACC_W-1:0] a;
        a = acc_q[p][o];
        if (RELU && a < 0) a = '0;
        out_data[p][o] <= requant(64'(a), PF, QI, QF);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_last <= 1'b0; s1_nvalid <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_nvalid <= '0;
    end else begin
      s1_valid <= in_valid; s1_last <= in_last & in_valid; s1_nvalid <= in_nvalid;
      out_valid <= s1_valid; out_last <= s1_last; out_nvalid <= s1_nvalid;
    end
  end
endmodule
