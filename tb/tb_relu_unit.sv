// tb_relu_unit: streams random words through relu_unit under random
// input gaps and output back-pressure; every output must equal max(0, x) of
// the input in order, and the unit must sustain one word per cycle when
// both sides are always ready.
module tb_relu_unit;
  import mtd_pkg::*;
  import mtd_ref_pkg::*;

  localparam int N = 2000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;
  int src [N];
  int nin = 0, nout = 0;
  bit free_run = 0;
  int t_first, t_last;

  relu_unit dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) nin <= nin + 1;
      if (out_valid && out_ready) begin
        int e;
        e = (src[nout] < 0) ? 0 : src[nout];
        checks++;
        if (int'(out_data) != e) begin
          failures++;
          if (failures < 5) $display("word %0d: %0d expected %0d", nout, out_data, e);
        end
        if (nout == N/2) t_first = $time;
        if (nout == N-1) t_last = $time;
        nout <= nout + 1;
      end
    end
  end

  always @(negedge clk) begin
    in_valid  = (nin < N) && (free_run || $urandom_range(3) != 0);
    in_data   = word_t'(src[nin < N ? nin : 0]);
    out_ready = free_run || ($urandom_range(3) != 0);
  end

  initial begin
    for (int i = 0; i < N; i++) src[i] = rnd8();
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (nin >= N/2);
    free_run = 1;
    wait (nout == N);
    checks++;
    // N/2 - 1 words in a free-running stream take that many 10-unit cycles
    if ((t_last - t_first) != (N/2 - 1) * 10) begin
      failures++;
      $display("rate: %0d time units for %0d words", t_last - t_first, N/2 - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
