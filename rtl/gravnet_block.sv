// gravnet_block -- one GravNet block of the network.
//
//   x --DL1 (dense, ReLU, 16)--> h --+--linear S (6)----+
//                                    +--linear F_LR (8)-+--> GravNetConv --> [h,max,sum] (32)
//                                    +--(delay)---------+
//   [h,max,sum] --DL_out (dense, ReLU, 32, Q3.5)--> block output
//
// The widths (DL1 = 16, S = 6, F_LR = 8, DL_out = 32, k = 8, f_exp = 10) are
// the published hyperparameters. All arithmetic inside the block is 16-bit
// Q6.10; the block output is quantised to Q3.5 as in the published network.
// X_F is the number of fractional bits of the block input (12 for the Q4.12
// network inputs of the first block, 10 for the second block).
//
// Stream: P nodes per beat, N/P beats per event, no back-pressure.
// Latency: 2 (DL1) + 2 (S/F) + GravNetConv + 2 (DL_out) cycles; a new event
// every N/P cycles. Weight targets: T_DL1, T_S, T_F, T_OUT on the cfg bus.
module gravnet_block
  import gnn_pkg::*;
#(
  parameter int unsigned IN_N  = F_IN,
  parameter int unsigned X_F   = IN_F,
  parameter int unsigned P     = P_PAR,
  parameter int unsigned N     = N_MAX,
  parameter logic [CFG_TGT_W-1:0] T_DL1 = TGT_B1_DL1,
  parameter logic [CFG_TGT_W-1:0] T_S   = TGT_B1_S,
  parameter logic [CFG_TGT_W-1:0] T_F   = TGT_B1_F,
  parameter logic [CFG_TGT_W-1:0] T_OUT = TGT_B1_OUT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_bus_t                  cfg,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic [P-1:0]              in_nvalid,
  input  act_t [P-1:0][IN_N-1:0]    in_data,
  output logic                      out_valid,
  output logic                      out_last,
  output logic [P-1:0]              out_nvalid,
  output act_t [P-1:0][DLOUT_W-1:0] out_data
);
  localparam int unsigned GW = DL1_W + 2*FLR_DIM;   // GravNetConv output width

  logic h_valid, h_last; logic [P-1:0] h_nv; act_t [P-1:0][DL1_W-1:0] h;
  dense_pe #(.IN_N(IN_N), .OUT_N(DL1_W), .P(P), .X_F(X_F), .RELU(1'b1),
             .QI(6), .QF(10), .TGT(T_DL1)) u_dl1 (
    .clk, .rst_n, .cfg, .in_valid, .in_last, .in_nvalid, .in_data,
    .out_valid(h_valid), .out_last(h_last), .out_nvalid(h_nv), .out_data(h));

  logic s_valid, s_last; logic [P-1:0] s_nv; act_t [P-1:0][S_DIM-1:0] s;
  dense_pe #(.IN_N(DL1_W), .OUT_N(S_DIM), .P(P), .X_F(ACT_F), .RELU(1'b0),
             .QI(6), .QF(10), .TGT(T_S)) u_lin_s (
    .clk, .rst_n, .cfg, .in_valid(h_valid), .in_last(h_last), .in_nvalid(h_nv), .in_data(h),
    .out_valid(s_valid), .out_last(s_last), .out_nvalid(s_nv), .out_data(s));

  logic f_valid, f_last; logic [P-1:0] f_nv; act_t [P-1:0][FLR_DIM-1:0] f;
  dense_pe #(.IN_N(DL1_W), .OUT_N(FLR_DIM), .P(P), .X_F(ACT_F), .RELU(1'b0),
             .QI(6), .QF(10), .TGT(T_F)) u_lin_f (
    .clk, .rst_n, .cfg, .in_valid(h_valid), .in_last(h_last), .in_nvalid(h_nv), .in_data(h),
    .out_valid(f_valid), .out_last(f_last), .out_nvalid(f_nv), .out_data(f));

  act_t [P-1:0][DL1_W-1:0] h_d;
  pipe_delay #(.W(P*DL1_W*ACT_W), .D(2)) u_hdly (.clk, .din(h), .dout(h_d));

  logic g_valid, g_last; logic [P-1:0] g_nv; act_t [P-1:0][GW-1:0] g;
  gravnet_conv #(.N(N), .P(P), .K(K_NN), .H(DL1_W), .S(S_DIM), .F(FLR_DIM), .FEXP(F_EXP)) u_conv (
    .clk, .rst_n, .in_valid(s_valid), .in_last(s_last), .in_nvalid(s_nv),
    .in_h(h_d), .in_s(s), .in_f(f),
    .out_valid(g_valid), .out_last(g_last), .out_nvalid(g_nv), .out_data(g));

  dense_pe #(.IN_N(GW), .OUT_N(DLOUT_W), .P(P), .X_F(ACT_F), .RELU(1'b1),
             .QI(3), .QF(5), .TGT(T_OUT)) u_dlout (
    .clk, .rst_n, .cfg, .in_valid(g_valid), .in_last(g_last), .in_nvalid(g_nv), .in_data(g),
    .out_valid, .out_last, .out_nvalid, .out_data);

  // the S and F_LR layers run in lock step
  a_sf_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid == f_valid) && (s_last == f_last) && (s_nv == f_nv));
endmodule
