// tb_sliding_window: runs two sliding_window configurations, 3x3 stride 1
// with padding 1 (P = 2 channels per beat) and 3x3 stride 2 without padding
// (P = 1), two frames each, and checks every window word against windows
// cut from the frames in the testbench, plus the input rate at frame start.
module tb_sliding_window;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int ca, fa, cb, fb;
  logic da, db;

  always #5 clk = !clk;

  sw_harness #(.H(5), .W(6), .C(4), .K(3), .S(1), .PAD(1), .P(2), .NF(2), .FREE(1)) u_a (
    .clk, .rst_n, .checks(ca), .failures(fa), .done(da));
  sw_harness #(.H(7), .W(7), .C(2), .K(3), .S(2), .PAD(0), .P(1), .NF(2), .FREE(0)) u_b (
    .clk, .rst_n, .checks(cb), .failures(fb), .done(db));

  initial begin
    repeat (100000) @(posedge clk);
    failures = fa + fb + 1;
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (da && db);
    checks = ca + cb; failures = fa + fb;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
