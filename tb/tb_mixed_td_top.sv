// tb_mixed_td_top: end-to-end test of the accelerator pipeline at a reduced
// feature-map size (4 x 4 x 32 instead of 56 x 56 x 64; unroll factors,
// ranks and groups as in the default design). Three frames pass through
// SVD layer -> ReLU -> channel regrouping -> CPD layer -> ReLU with random
// input gaps and output back-pressure; every output word and tlast is
// checked by top_driver. The testbench also counts how often each
// mechanism of the design acted and fails any that never did: SVD and CPD
// engine outputs, padded (border) windows, broadcast of one input beat to
// several engines, summing of input-group partial results, the FIFO array
// regrouping words, ReLU zeroing negative values, back-pressure stalling
// the input, and frame counting on both AXI-Stream sides.
module tb_mixed_td_top;
  import mtd_pkg::*;

  localparam int H = 4, W = 4, C = 32, NF = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [7:0] s_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [7:0] m_axis_tdata;
  logic ld_we, ld_layer;
  logic [7:0] ld_eng;
  logic [1:0] ld_sel;
  logic [19:0] ld_addr;
  logic [7:0] ld_data;
  logic [31:0] frames_in, frames_out;
  int dchecks, dfailures, cycles_stream;
  logic ddone;

  mixed_td_top #(.H(H), .W(W), .C(C)) dut (.*);

  top_driver #(.H(H), .W(W), .C(C), .NF(NF), .GAPS(1)) u_drv (
    .clk, .rst_n, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast,
    .ld_we, .ld_layer, .ld_eng, .ld_sel, .ld_addr, .ld_data,
    .checks(dchecks), .failures(dfailures), .done(ddone), .cycles_stream);

  always #5 clk = !clk;

  // mechanism counters
  int n_svd = 0, n_cpd = 0, n_pad = 0, n_bcast = 0, n_sum = 0, n_regroup = 0;
  int n_relu0 = 0, n_stall_in = 0, n_stall_out = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_layer1.g_out_grp[0].g_in_grp[0].g_svd.u_eng.out_valid &&
          dut.u_layer1.g_out_grp[0].g_in_grp[0].g_svd.u_eng.out_ready) n_svd++;
      if (dut.u_layer2.g_out_grp[0].g_in_grp[3].g_cpd.u_eng.out_valid &&
          dut.u_layer2.g_out_grp[0].g_in_grp[3].g_cpd.u_eng.out_ready) n_cpd++;
      if (dut.u_layer1.g_out_grp[0].g_in_grp[0].g_svd.u_eng.u_inbuf.emit &&
          dut.u_layer1.g_out_grp[0].g_in_grp[0].g_svd.u_eng.u_inbuf.oy == 0) n_pad++;
      if (dut.u_layer1.pk_take[0]) n_bcast++;       // one beat to both output-group engines
      if (dut.u_layer2.join_fire[0]) n_sum++;       // four input-group results summed
      if (dut.g_rearrange.u_rearrange.out_valid && dut.g_rearrange.u_rearrange.out_ready) n_regroup++;
      if (dut.u_relu1.in_valid && dut.u_relu1.in_ready && dut.u_relu1.in_data < 0) n_relu0++;
      if (s_axis_tvalid && !s_axis_tready) n_stall_in++;
      if (m_axis_tvalid && !m_axis_tready) n_stall_out++;
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + dchecks, failures + dfailures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ddone);
    repeat (5) @(posedge clk);
    need("SVD engine output beats", n_svd);
    need("CPD engine output beats", n_cpd);
    need("windows touching padding", n_pad);
    need("beats broadcast to engines", n_bcast);
    need("input-group sums", n_sum);
    need("words regrouped by FIFOs", n_regroup);
    need("negative words zeroed", n_relu0);
    need("input stalled", n_stall_in);
    need("output back-pressure", n_stall_out);
    checks++;
    if (frames_in != NF || frames_out != NF) begin
      failures++;
      $display("frame counters in %0d out %0d, expected %0d", frames_in, frames_out, NF);
    end
    checks += dchecks; failures += dfailures;
    $display("stream cycles for %0d frames: %0d", NF, cycles_stream);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
