// tb_cpd_engine: two CPD engines, 3x3 stride 1 with padding and 3x3
// stride 2 without, each run for two frames against the reference CPD
// convolution (see eng_harness).
module tb_cpd_engine;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int c0, f0, c1, f1;
  logic d0, d1;

  always #5 clk = !clk;

  eng_harness #(.TYPE(1), .H(5), .W(4), .C(4), .CO(4), .K(3), .S(1), .PAD(1), .R(4),
                .PI(2), .PA(3), .PB(3), .PC(2), .PO(2), .SH0(7), .SH1(7), .SH2(7), .SH3(7)) u_a (
    .clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  eng_harness #(.TYPE(1), .H(7), .W(5), .C(2), .CO(6), .K(3), .S(2), .PAD(0), .R(3),
                .PI(1), .PA(1), .PB(3), .PC(3), .PO(3), .SH0(7), .SH1(7), .SH2(7), .SH3(7)) u_b (
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
