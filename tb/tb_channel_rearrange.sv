// tb_channel_rearrange: feeds pixels whose words carry their channel
// number in the layout (C/GA) x GA and checks that they leave in the layout
// (C/GB) x GB, for GA=2 -> GB=3 (LCM 6) and GA=4 -> GB=2 (LCM 4), under
// random input gaps and output back-pressure. Group g of a split into G
// groups holds channels g*C/G .. (g+1)*C/G-1, so word n of a pixel in
// layout G carries channel (n % G)*(C/G) + n/G.
module tb_channel_rearrange;
  import mtd_pkg::*;

  localparam int C = 12, NPIX = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  always #5 clk = !clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int chan(input int n, input int G);
    return (n % G) * (C / G) + n / G;
  endfunction

  logic  iv [2], ir [2], ov [2], orr [2];
  word_t id [2], od [2];
  int    nin [2], nout [2];
  int    done = 0;

  channel_rearrange #(.C(C), .GA(2), .GB(3)) dut_a (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]));
  channel_rearrange #(.C(C), .GA(4), .GB(2)) dut_b (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]));

  localparam int GA [2] = '{2, 4};
  localparam int GB [2] = '{3, 2};

  // handshakes are counted on the clock edge they complete on
  always @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      if (rst_n) begin
        if (iv[d] && ir[d]) nin[d]++;
        if (ov[d] && orr[d]) begin
          int e;
          // pixel number in the upper bits, channel in the lower four
          e = ((nout[d] / C) % 8) * 16 + chan(nout[d] % C, GB[d]);
          checks++;
          if (int'(od[d]) != e) begin
            failures++;
            if (failures < 8) $display("dut%0d word %0d: %0d expected %0d", d, nout[d], od[d], e);
          end
          nout[d]++;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int d = 0; d < 2; d++) begin
      iv[d]  = rst_n && (nin[d] < NPIX*C) && ($urandom_range(3) != 0);
      id[d]  = word_t'(((nin[d] / C) % 8) * 16 + chan(nin[d] % C, GA[d]));
      orr[d] = ($urandom_range(2) != 0);
    end
  end

  initial begin
    nin = '{0, 0}; nout = '{0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nout[0] == NPIX*C && nout[1] == NPIX*C);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
