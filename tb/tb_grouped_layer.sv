// tb_grouped_layer: an SVD layer split into 2 x 2 channel groups (four
// engines, partial outputs of the two input groups summed) and a CPD layer
// with 2 input groups, each run for two frames against the grouped
// reference computed in gl_harness.
module tb_grouped_layer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int c0, f0, c1, f1;
  logic d0, d1;

  always #5 clk = !clk;

  gl_harness #(.TYPE(0), .G1(2), .G2(2), .H(4), .W(4), .C(4), .CO(4), .R(2),
               .P_IN_V(2), .P_OUT_V(2), .P_OUT_U(2)) u_svd (
    .clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  gl_harness #(.TYPE(1), .G1(1), .G2(2), .H(4), .W(3), .C(4), .CO(4), .R(3),
               .P_IN_2(2), .P_OUT_2(3), .P_OUT_3(3), .P_OUT_4(3), .P_OUT_1(2)) u_cpd (
    .clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1; failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
