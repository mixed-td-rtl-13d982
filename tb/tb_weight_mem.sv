// tb_weight_mem: preloads random words through the load port of weight_mem,
// then reads every address back through all read ports (each port seeing
// a different address) and checks out-of-range reads return 0.
module tb_weight_mem;
  import mtd_pkg::*;
  import mtd_ref_pkg::*;

  localparam int DEPTH = 100, NRD = 4, AW = 8;
  int checks = 0, failures = 0;
  logic clk = 0, ld_we = 0;
  logic [AW-1:0] ld_addr = '0;
  word_t ld_data = '0;
  logic [AW-1:0] rd_addr [NRD];
  word_t rd_data [NRD];
  int model [DEPTH];

  weight_mem #(.DEPTH(DEPTH), .NRD(NRD), .AW(AW)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NRD; k++) rd_addr[k] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = rnd8();
      ld_we <= 1; ld_addr <= AW'(a); ld_data <= word_t'(model[a]);
      @(posedge clk);
    end
    // a write past the end must be ignored
    ld_addr <= AW'(DEPTH + 3); ld_data <= 8'sd55;
    @(posedge clk);
    ld_we <= 0;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      for (int k = 0; k < NRD; k++) rd_addr[k] = AW'((a + 17*k) % DEPTH);
      #1;
      for (int k = 0; k < NRD; k++) begin
        checks++;
        if (int'(rd_data[k]) != model[(a + 17*k) % DEPTH]) begin
          failures++;
          if (failures < 5) $display("addr %0d read %0d expected %0d", (a+17*k)%DEPTH, rd_data[k], model[(a+17*k)%DEPTH]);
        end
      end
    end
    rd_addr[0] = AW'(DEPTH + 3);
    #1;
    checks++;
    if (rd_data[0] != 0) begin failures++; $display("out-of-range read %0d", rd_data[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
