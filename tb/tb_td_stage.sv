// tb_td_stage: one td_stage per dataflow mode. INNER (broadcast inner
// products) and BLOCK (the CPD a2 stage's per-window-position products) run
// at full rate and have their initiation interval checked; DIAG (scatter,
// per-rank products) runs under heavy output back-pressure, which must
// stall its input. All outputs are checked against sums computed in the harness.
module tb_td_stage;
  import mtd_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int c [3], f [3];
  logic d [3];

  always #5 clk = !clk;

  ts_harness #(.MODE(MODE_INNER), .L_IN(12), .WCH(4), .NI(12), .L_OUT(6), .R(6),
               .P_IN(4), .P_OUT(2), .SHIFT(3), .RATE(1)) u_inner (
    .clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  ts_harness #(.MODE(MODE_BLOCK), .L_IN(16), .WCH(8), .NI(4), .L_OUT(12), .R(3),
               .BK(4), .WP(2), .P_IN(2), .P_OUT(3), .SHIFT(3), .RATE(1)) u_block (
    .clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  ts_harness #(.MODE(MODE_DIAG), .L_IN(24), .WCH(3), .NI(3), .L_OUT(8), .R(4),
               .P_IN(3), .P_OUT(2), .SHIFT(3), .RATE(0)) u_diag (
    .clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2], f[0]+f[1]+f[2]+1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    checks = c[0] + c[1] + c[2];
    failures = f[0] + f[1] + f[2];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
