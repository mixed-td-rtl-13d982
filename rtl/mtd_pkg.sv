// mtd_pkg: types and helpers shared by the Mixed-TD accelerator.
//
// Activations and weights are 8-bit signed mantissas, as in the 8-bit block
// floating point (W8A8) models the accelerator runs. Every block of a stage
// shares one exponent, which is fixed at design time; here that exponent is
// the right shift applied by requant() when a 32-bit accumulator is brought
// back to 8 bits between stages. That shift-and-saturate step is this
// design's own choice: the exponent handling itself is not specified in
// detail by the method.
//
// stage_mode_e selects how a contraction stage (td_stage) addresses its input
// vector and its weights:
//   MODE_INNER : y[o]     = sum_i W[o][i] * x[i]             (broadcast)
//   MODE_BLOCK : y[b*R+r] = sum_c W[r][c] * x[window b, ch c] (broadcast per
//                window position; first CPD stage a2)
//   MODE_DIAG  : y[o]     = sum_i W[i][o % R] * x[i*L_OUT+o]  (scatter; CPD
//                stages a3 and a4)
package mtd_pkg;

  localparam int unsigned WORD_W = 8;   // BFP-W8A8 mantissa width
  localparam int unsigned ACC_W  = 32;  // accumulator width

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {
    MODE_INNER = 2'd0,
    MODE_BLOCK = 2'd1,
    MODE_DIAG  = 2'd2
  } stage_mode_e;

  typedef enum logic {
    ENGINE_SVD = 1'b0,
    ENGINE_CPD = 1'b1
  } engine_type_e;

  // Arithmetic right shift then saturate to the 8-bit word range.
  function automatic word_t requant(input acc_t a, input int unsigned shift);
    acc_t s;
    s = a >>> shift;
    if (s > acc_t'(127))       return word_t'(127);
    else if (s < acc_t'(-128)) return word_t'(-128);
    else                       return word_t'(s[WORD_W-1:0]);
  endfunction

  // Saturating 8-bit addition (sum of channel-group partial outputs).
  function automatic word_t sat_add(input word_t a, input word_t b);
    logic signed [WORD_W:0] s;
    s = {a[WORD_W-1], a} + {b[WORD_W-1], b};
    if (s > 9'sd127)       return word_t'(127);
    else if (s < -9'sd128) return word_t'(-128);
    else                   return word_t'(s[WORD_W-1:0]);
  endfunction

  function automatic int unsigned gcd(input int unsigned a, input int unsigned b);
    int unsigned x, y, t;
    x = a; y = b;
    while (y != 0) begin
      t = x % y; x = y; y = t;
    end
    return x;
  endfunction

  function automatic int unsigned lcm(input int unsigned a, input int unsigned b);
    return (a / gcd(a, b)) * b;
  endfunction

endpackage
