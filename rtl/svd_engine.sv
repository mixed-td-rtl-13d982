// svd_engine: convolution layer whose weights are SVD-decomposed.
//
// The 4-d kernel W[o][c][kh][kw] is reshaped to a C_OUT x (C*K*K) matrix and
// approximated as U_r * V_r with rank R. The engine computes the two
// contractions back to back: the input buffer (sliding_window) forms the
// K x K x C window of each output pixel, stage V contracts it with V_r to R
// values, the intermediate buffer holds those R values and stage U
// contracts them with U_r to C_OUT outputs. Both stages broadcast their
// inputs to all of their MAC units (inner products only).
//
// Interface: in_* carries P_IN_V channels of one input pixel per beat, in
// (row, column, channel) order; out_* carries P_OUT_U output channels per
// beat, in (row, column, channel) order. Weights are preloaded through ld_*:
// ld_sel = 0 writes V_r, stored as V[r][i] at r*(C*K*K)+i where
// i = ((c/P_IN_V)*K*K + kh*K + kw)*P_IN_V + c%P_IN_V; ld_sel = 1 writes U_r,
// stored as U[o][r] at o*R+r.
// Timing: stage V needs (R/P_OUT_V)*(C*K*K/P_IN_V) cycles per output pixel
// and stage U (C_OUT/P_OUT_U)*(R/P_OUT_V); the slower one sets the rate.
// The two-stage structure, the broadcast dataflow and p_out,V = p_in,U
// follow the engine diagram; the window order, weight layout and
// requantisation shifts are this design's choices.
module svd_engine
  import mtd_pkg::*;
#(
  parameter int unsigned H       = 56,
  parameter int unsigned W       = 56,
  parameter int unsigned C       = 64,
  parameter int unsigned C_OUT   = 64,
  parameter int unsigned K       = 3,
  parameter int unsigned S       = 1,
  parameter int unsigned PAD     = 1,
  parameter int unsigned R       = 32,
  parameter int unsigned P_IN_V  = 8,
  parameter int unsigned P_OUT_V = 8,
  parameter int unsigned P_OUT_U = 8,
  parameter int unsigned SHIFT_V = 7,
  parameter int unsigned SHIFT_U = 7,
  parameter int unsigned AW      = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_data [P_IN_V],
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_data [P_OUT_U],
  input  logic          ld_we,
  input  logic [1:0]    ld_sel,
  input  logic [AW-1:0] ld_addr,
  input  word_t         ld_data
);
  localparam int unsigned KK = K * K;

  logic  win_valid, win_ready, v_valid, v_ready;
  word_t win_data [KK*P_IN_V];
  word_t v_data   [P_OUT_V];

  sliding_window #(
    .H(H), .W(W), .C(C), .K(K), .S(S), .PAD(PAD), .P(P_IN_V)
  ) u_inbuf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  td_stage #(
    .MODE(MODE_INNER), .L_IN(C*KK), .WCH(KK*P_IN_V), .NI(C*KK), .L_OUT(R),
    .R(R), .P_IN(P_IN_V), .P_OUT(P_OUT_V), .SHIFT(SHIFT_V), .AW(AW)
  ) u_stage_v (
    .clk, .rst_n,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data),
    .ld_we(ld_we && ld_sel == 2'd0), .ld_addr, .ld_data
  );

  td_stage #(
    .MODE(MODE_INNER), .L_IN(R), .WCH(P_OUT_V), .NI(R), .L_OUT(C_OUT),
    .R(R), .P_IN(P_OUT_V), .P_OUT(P_OUT_U), .SHIFT(SHIFT_U), .AW(AW)
  ) u_stage_u (
    .clk, .rst_n,
    .in_valid(v_valid), .in_ready(v_ready), .in_data(v_data),
    .out_valid, .out_ready, .out_data,
    .ld_we(ld_we && ld_sel == 2'd1), .ld_addr, .ld_data
  );
endmodule
