// tb_vector_buffer: writes a sequence of random vectors into the ping-pong
// vector_buffer with random gaps while a reader with random delays reads
// each completed bank through all ports and releases it. Checks every word
// read, that both banks fill up (wr_ready drops) when the reader is slow,
// and that rd_avail only appears after a whole vector has been written.
module tb_vector_buffer;
  import mtd_pkg::*;
  import mtd_ref_pkg::*;

  localparam int L = 12, WCH = 4, NRD = 3, AW = 8, NV = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, rd_avail, rd_release = 0;
  word_t wr_data [WCH];
  logic [AW-1:0] rd_addr [NRD];
  word_t rd_data [NRD];
  int vec [NV][L];
  int wv = 0, wpos = 0, blocked = 0;

  vector_buffer #(.L(L), .WCH(WCH), .NRD(NRD), .AW(AW)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer: accepted beats counted on the clock edge, new beat driven after
  always @(posedge clk) begin
    if (rst_n) begin
      if (wr_valid && wr_ready) begin
        wpos += WCH;
        if (wpos == L) begin wpos = 0; wv++; end
      end
      if (!wr_ready && wr_valid) blocked++;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      wr_valid = (wv < NV) && ($urandom_range(3) != 0);
      for (int j = 0; j < WCH; j++) wr_data[j] = word_t'(vec[wv < NV ? wv : 0][wpos + j]);
    end
  end

  initial begin
    for (int v = 0; v < NV; v++) for (int i = 0; i < L; i++) vec[v][i] = rnd8();
    for (int k = 0; k < NRD; k++) rd_addr[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < NV; v++) begin
      // a slow reader for the first vectors lets both banks fill
      do @(posedge clk); while (!rd_avail);
      checks++;
      if (wv < v + 1) begin failures++; $display("bank %0d readable before written", v); end
      if (v < 4) repeat (30) @(posedge clk);
      for (int i = 0; i < L; i += NRD) begin
        #1;
        for (int k = 0; k < NRD; k++) rd_addr[k] = AW'(i + k);
        #1;
        for (int k = 0; k < NRD; k++) begin
          checks++;
          if (int'(rd_data[k]) != vec[v][i+k]) begin
            failures++;
            if (failures < 5) $display("vec %0d word %0d: %0d expected %0d", v, i+k, rd_data[k], vec[v][i+k]);
          end
        end
      end
      rd_release <= 1;
      @(posedge clk);
      rd_release <= 0;
    end
    checks++;
    if (blocked == 0) begin failures++; $display("writer was never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
