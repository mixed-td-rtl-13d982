// cpd_engine: convolution layer whose weights are CPD-decomposed.
//
// The 4-d kernel is approximated by a sum of R rank-one terms,
// W[o][c][kh][kw] = sum_r a1[o][r] * a2[c][r] * a3[kh][r] * a4[kw][r], and
// the convolution becomes four contractions in a row:
//   stage a2 (inner products, broadcast): for every window position (kh,kw)
//            t[kh][kw][r] = sum_c a2[c][r] * x[kh][kw][c]
//   stage a3 (per-rank, scatter):  u[kw][r] = sum_kh a3[kh][r] * t[kh][kw][r]
//   stage a4 (per-rank, scatter):  v[r]     = sum_kw a4[kw][r] * u[kw][r]
//   stage a1 (inner products, broadcast): y[o] = sum_r a1[o][r] * v[r]
// An input buffer (sliding_window) forms each K x K window; every later
// stage has its own intermediate buffer. In stages a3 and a4 each MAC unit
// receives different data (its own rank channel) instead of a copy of the
// same inputs.
//
// Interface: in_* carries P_IN_2 input channels per beat, out_* carries
// P_OUT_1 output channels per beat, both in (row, column, channel) order.
// ld_sel selects the factor being preloaded: 0 = a1 stored [o][r] at o*R+r,
// 1 = a2 stored [r][c] at r*C+c, 2 = a3 stored [kh][r] at kh*R+r,
// 3 = a4 stored [kw][r] at kw*R+r.
// Timing per output pixel: a2 (K*K*R/P_OUT_2)*(C/P_IN_2), a3
// (K*R/P_OUT_3)*(K/P_OUT_2), a4 (R/P_OUT_4)*(K/P_OUT_3), a1
// (C_OUT/P_OUT_1)*(R/P_OUT_4) cycles; the slowest stage sets the rate.
// P_OUT_2 and P_OUT_3 must divide K.
// The four stages in the order a2, a3, a4, a1, the broadcast/scatter split
// and p_out(k) = p_in(k+1) follow the engine diagram. Applying a2 to every
// window position (rather than once per input pixel) is this design's
// reading of that diagram, which places the only input buffer before a2;
// address orders and requantisation shifts are also this design's choices.
module cpd_engine
  import mtd_pkg::*;
#(
  parameter int unsigned H       = 56,
  parameter int unsigned W       = 56,
  parameter int unsigned C       = 64,
  parameter int unsigned C_OUT   = 64,
  parameter int unsigned K       = 3,
  parameter int unsigned S       = 1,
  parameter int unsigned PAD     = 1,
  parameter int unsigned R       = 16,
  parameter int unsigned P_IN_2  = 8,
  parameter int unsigned P_OUT_2 = 3,
  parameter int unsigned P_OUT_3 = 3,
  parameter int unsigned P_OUT_4 = 4,
  parameter int unsigned P_OUT_1 = 8,
  parameter int unsigned SHIFT_2 = 7,
  parameter int unsigned SHIFT_3 = 2,
  parameter int unsigned SHIFT_4 = 2,
  parameter int unsigned SHIFT_1 = 5,
  parameter int unsigned AW      = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_data [P_IN_2],
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_data [P_OUT_1],
  input  logic          ld_we,
  input  logic [1:0]    ld_sel,
  input  logic [AW-1:0] ld_addr,
  input  word_t         ld_data
);
  localparam int unsigned KK = K * K;

  logic  win_valid, win_ready, s2_valid, s2_ready, s3_valid, s3_ready, s4_valid, s4_ready;
  word_t win_data [KK*P_IN_2];
  word_t s2_data  [P_OUT_2];
  word_t s3_data  [P_OUT_3];
  word_t s4_data  [P_OUT_4];

  sliding_window #(
    .H(H), .W(W), .C(C), .K(K), .S(S), .PAD(PAD), .P(P_IN_2)
  ) u_inbuf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  td_stage #(
    .MODE(MODE_BLOCK), .L_IN(C*KK), .WCH(KK*P_IN_2), .NI(C), .L_OUT(KK*R),
    .R(R), .BK(KK), .WP(P_IN_2), .P_IN(P_IN_2), .P_OUT(P_OUT_2),
    .SHIFT(SHIFT_2), .AW(AW)
  ) u_stage_a2 (
    .clk, .rst_n,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_data(s2_data),
    .ld_we(ld_we && ld_sel == 2'd1), .ld_addr, .ld_data
  );

  td_stage #(
    .MODE(MODE_DIAG), .L_IN(KK*R), .WCH(P_OUT_2), .NI(K), .L_OUT(K*R),
    .R(R), .P_IN(P_OUT_2), .P_OUT(P_OUT_3), .SHIFT(SHIFT_3), .AW(AW)
  ) u_stage_a3 (
    .clk, .rst_n,
    .in_valid(s2_valid), .in_ready(s2_ready), .in_data(s2_data),
    .out_valid(s3_valid), .out_ready(s3_ready), .out_data(s3_data),
    .ld_we(ld_we && ld_sel == 2'd2), .ld_addr, .ld_data
  );

  td_stage #(
    .MODE(MODE_DIAG), .L_IN(K*R), .WCH(P_OUT_3), .NI(K), .L_OUT(R),
    .R(R), .P_IN(P_OUT_3), .P_OUT(P_OUT_4), .SHIFT(SHIFT_4), .AW(AW)
  ) u_stage_a4 (
    .clk, .rst_n,
    .in_valid(s3_valid), .in_ready(s3_ready), .in_data(s3_data),
    .out_valid(s4_valid), .out_ready(s4_ready), .out_data(s4_data),
    .ld_we(ld_we && ld_sel == 2'd3), .ld_addr, .ld_data
  );

  td_stage #(
    .MODE(MODE_INNER), .L_IN(R), .WCH(P_OUT_4), .NI(R), .L_OUT(C_OUT),
    .R(R), .P_IN(P_OUT_4), .P_OUT(P_OUT_1), .SHIFT(SHIFT_1), .AW(AW)
  ) u_stage_a1 (
    .clk, .rst_n,
    .in_valid(s4_valid), .in_ready(s4_ready), .in_data(s4_data),
    .out_valid, .out_ready, .out_data,
    .ld_we(ld_we && ld_sel == 2'd0), .ld_addr, .ld_data
  );
endmodule
