// tb_mixed_td_top_full: full-size end-to-end test of mixed_td_top.
//
// The accelerator is instantiated with its default parameters (56 x 56 x 64
// feature maps, an SVD layer of 2 output groups and a CPD layer of 4 input
// groups, rank 16 each). top_driver preloads random decomposed weights,
// streams one frame with no input gaps and checks every output word and
// tlast against the reference pipeline. The testbench also checks the frame
// counters and reports the streaming cycles of the frame.
module tb_mixed_td_top_full;
  import mtd_pkg::*;

  localparam int NF = 1;
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

  mixed_td_top dut (.*);

  top_driver #(.H(56), .W(56), .C(64), .NF(NF), .GAPS(0)) u_drv (
    .clk, .rst_n, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast,
    .ld_we, .ld_layer, .ld_eng, .ld_sel, .ld_addr, .ld_data,
    .checks(dchecks), .failures(dfailures), .done(ddone), .cycles_stream);

  always #5 clk = !clk;

  initial begin
    repeat (20000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + dchecks, failures + dfailures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ddone);
    repeat (5) @(posedge clk);
    checks++;
    if (frames_in != NF || frames_out != NF) begin
      failures++;
      $display("frame counters in %0d out %0d, expected %0d", frames_in, frames_out, NF);
    end
    checks += dchecks; failures += dfailures;
    $display("stream cycles for %0d frame: %0d", NF, cycles_stream);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
