// tb_accum_unit: checks that accum_unit restarts on `first`, adds on `en`
// and holds otherwise, against a running sum kept in the testbench. The
// registered result is checked one clock after each step.
module tb_accum_unit;
  import mtd_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  acc_t psum = '0, acc;
  longint model = 0;

  accum_unit dut (.clk, .rst_n, .en, .first, .psum, .acc);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    checks++;
    if (acc != 0) begin failures++; $display("not reset: %0d", acc); end
    for (int t = 0; t < 2000; t++) begin
      en    <= ($urandom_range(3) != 0);
      first <= ($urandom_range(5) == 0);
      psum  <= acc_t'(int'($urandom_range(20000)) - 10000);
      @(posedge clk);
      #1;
      if (en) model = (first ? 0 : model) + longint'(psum);
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 5) $display("t=%0d acc %0d expected %0d", t, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
