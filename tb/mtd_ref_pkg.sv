// mtd_ref_pkg: reference arithmetic for the testbenches.
//
// Computes decomposed convolutions directly from their definitions, written
// independently of the RTL's address orders and counters:
//   SVD: t[r] = q(sum_{c,kh,kw} V[r][c][kh][kw] * x[iy][ix][c], shV),
//        y[o] = q(sum_r U[o][r] * t[r], shU)
//   CPD: t[kh][kw][r] = q(sum_c a2[c][r] * x[iy][ix][c], sh2)
//        u[kw][r] = q(sum_kh a3[kh][r] * t[kh][kw][r], sh3)
//        v[r]     = q(sum_kw a4[kw][r] * u[kw][r], sh4)
//        y[o]     = q(sum_r a1[o][r] * v[r], sh1)
// with iy = oy*S-PAD+kh, ix = ox*S-PAD+kw, zero outside the map, and q()
// an arithmetic right shift followed by saturation to [-128, 127].
// Feature maps are flat arrays indexed ((y*W)+x)*C+c.
package mtd_ref_pkg;

  function automatic int q8(input longint a, input int sh);
    longint s;
    s = a >>> sh;
    if (s > 127)  return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  function automatic int sat8(input int a);
    if (a > 127)  return 127;
    if (a < -128) return -128;
    return a;
  endfunction

  function automatic int rnd8();
    return int'($urandom_range(255)) - 128;
  endfunction

  function automatic int xin(const ref int x[], input int H, input int W, input int C,
                             input int iy, input int ix, input int c);
    if (iy < 0 || iy >= H || ix < 0 || ix >= W) return 0;
    return x[(iy*W + ix)*C + c];
  endfunction

  // The two convolutions are static class methods so that simulators
  // compile each once instead of expanding it at every call.
  class conv_ref;

  // V is indexed [r][c][kh][kw], U is [o][r].
  static function automatic void svd_conv(input int x[], input int V[], input int U[],
                                   input int H, input int W, input int C, input int CO,
                                   input int K, input int S, input int PAD, input int R,
                                   input int shV, input int shU, output int y[]);
    int HO, WO;
    int t[];
    HO = (H + 2*PAD - K)/S + 1;
    WO = (W + 2*PAD - K)/S + 1;
    y = new[HO*WO*CO];
    t = new[R];
    for (int oy = 0; oy < HO; oy++)
      for (int ox = 0; ox < WO; ox++) begin
        for (int r = 0; r < R; r++) begin
          longint acc = 0;
          for (int c = 0; c < C; c++)
            for (int kh = 0; kh < K; kh++)
              for (int kw = 0; kw < K; kw++)
                acc += longint'(V[((r*C + c)*K + kh)*K + kw]) *
                       xin(x, H, W, C, oy*S-PAD+kh, ox*S-PAD+kw, c);
          t[r] = q8(acc, shV);
        end
        for (int o = 0; o < CO; o++) begin
          longint acc = 0;
          for (int r = 0; r < R; r++) acc += longint'(U[o*R + r]) * t[r];
          y[(oy*WO + ox)*CO + o] = q8(acc, shU);
        end
      end
  endfunction

  // a1 [o][r], a2 [c][r], a3 [kh][r], a4 [kw][r].
  static function automatic void cpd_conv(input int x[], input int a1[], input int a2[],
                                   input int a3[], input int a4[],
                                   input int H, input int W, input int C, input int CO,
                                   input int K, input int S, input int PAD, input int R,
                                   input int sh2, input int sh3, input int sh4, input int sh1,
                                   output int y[]);
    int HO, WO;
    int t[], u[], v[];
    HO = (H + 2*PAD - K)/S + 1;
    WO = (W + 2*PAD - K)/S + 1;
    y = new[HO*WO*CO];
    t = new[K*K*R]; u = new[K*R]; v = new[R];
    for (int oy = 0; oy < HO; oy++)
      for (int ox = 0; ox < WO; ox++) begin
        for (int kh = 0; kh < K; kh++)
          for (int kw = 0; kw < K; kw++)
            for (int r = 0; r < R; r++) begin
              longint acc = 0;
              for (int c = 0; c < C; c++)
                acc += longint'(a2[c*R + r]) * xin(x, H, W, C, oy*S-PAD+kh, ox*S-PAD+kw, c);
              t[(kh*K + kw)*R + r] = q8(acc, sh2);
            end
        for (int kw = 0; kw < K; kw++)
          for (int r = 0; r < R; r++) begin
            longint acc = 0;
            for (int kh = 0; kh < K; kh++) acc += longint'(a3[kh*R + r]) * t[(kh*K + kw)*R + r];
            u[kw*R + r] = q8(acc, sh3);
          end
        for (int r = 0; r < R; r++) begin
          longint acc = 0;
          for (int kw = 0; kw < K; kw++) acc += longint'(a4[kw*R + r]) * u[kw*R + r];
          v[r] = q8(acc, sh4);
        end
        for (int o = 0; o < CO; o++) begin
          longint acc = 0;
          for (int r = 0; r < R; r++) acc += longint'(a1[o*R + r]) * v[r];
          y[(oy*WO + ox)*CO + o] = q8(acc, sh1);
        end
      end
  endfunction

  endclass

endpackage
