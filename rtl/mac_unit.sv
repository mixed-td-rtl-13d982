// mac_unit: one MAC unit of a Mixed-TD contraction stage.
//
// A row of P_IN multipliers forms the products x[j]*w[j]; a binary adder
// tree reduces them to a single 32-bit partial sum. The unit is purely
// combinational; the register that follows it sits in accum_unit, as in the
// engine diagram (multipliers -> ADD -> accumulator -> register).
//
// Interface: x and w are P_IN signed 8-bit words, sum is the signed dot
// product. Timing: zero cycles (the result is valid in the same cycle).
// The multiplier array and adder tree follow the described structure; the
// explicit tree layout (pairwise, padded with zeros to a power of two) is
// this design's choice.
module mac_unit
  import mtd_pkg::*;
#(
  parameter int unsigned P_IN = 8
) (
  input  word_t x [P_IN],
  input  word_t w [P_IN],
  output acc_t  sum
);
  localparam int unsigned LEVELS = (P_IN <= 1) ? 0 : $clog2(P_IN);
  localparam int unsigned NPAD   = 1 << LEVELS;

  // tree[l] holds NPAD>>l nodes; level 0 are the products.
  acc_t tree [LEVELS+1][NPAD];

  always_comb begin
    for (int l = 0; l <= int'(LEVELS); l++)
      for (int n = 0; n < int'(NPAD); n++)
        tree[l][n] = '0;
    for (int n = 0; n < int'(P_IN); n++)
      tree[0][n] = acc_t'(x[n]) * acc_t'(w[n]);
    for (int l = 1; l <= int'(LEVELS); l++)
      for (int n = 0; n < int'(NPAD >> l); n++)
        tree[l][n] = tree[l-1][2*n] + tree[l-1][2*n+1];
  end

  assign sum = tree[LEVELS][0];
endmodule
