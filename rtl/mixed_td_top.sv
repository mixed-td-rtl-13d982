// mixed_td_top: a Mixed-TD dataflow accelerator pipeline.
//
// Every layer of the network has its own engine and the engines are chained
// so that all layers work at once on successive pixels (inter-layer
// pipeline) while each engine is itself pipelined. Convolution weights are
// compressed by tensor decomposition, chosen per layer: this pipeline holds
// two 3x3 convolutional layers, shaped like a ResNet-18 conv2_x layer
// (56 x 56 x 64 -> 64), followed by ReLU each:
//
//   s_axis -> layer 1: SVD, G1 = 2 output groups, G1*G2 = 2 engines
//          -> ReLU
//          -> channel_rearrange (2 groups -> 4 groups, LCM = 4 FIFOs)
//          -> layer 2: CPD, G2 = 4 input groups, 4 engines
//          -> ReLU -> m_axis
//
// Interface: s_axis_* is the AXI-Stream input from DDR, one 8-bit
// activation per beat, a frame in (row, column, channel) order with the
// channels interleaved for layer 1's input groups (one group here, so plain
// channel order); s_axis_tlast marks the last word of a frame and is counted
// in frames_in. m_axis_* returns the result the same way, with
// m_axis_tlast on the frame's last word. ld_* preloads all weights before
// inference: ld_layer picks the layer, ld_eng the engine within it, ld_sel
// the decomposed factor, ld_addr the word (layouts in svd_engine and
// cpd_engine). Timing: the slowest engine stage sets the frame rate; the
// pipeline may hold parts of several frames and drains between batches
// only because the input stops.
// The per-layer engines, preloaded on-chip weights, AXI-Stream in and out
// and the FIFO rearrangement between differently grouped layers follow the
// described architecture. The choice of layers, ranks, groups and unroll
// factors is this design's own: the per-layer settings of the published
// ResNet-18 and RepVGG-A0 designs are not given.
module mixed_td_top
  import mtd_pkg::*;
#(
  parameter int unsigned H     = 56,
  parameter int unsigned W     = 56,
  parameter int unsigned C     = 64,
  // layer 1: SVD engines
  parameter int unsigned L1_G1 = 2,
  parameter int unsigned L1_G2 = 1,
  parameter int unsigned L1_R  = 16,
  // layer 2: CPD engines
  parameter int unsigned L2_G1 = 1,
  parameter int unsigned L2_G2 = 4,
  parameter int unsigned L2_R  = 16,
  parameter int unsigned AW    = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI-Stream in
  input  logic          s_axis_tvalid,
  output logic          s_axis_tready,
  input  logic [7:0]    s_axis_tdata,
  input  logic          s_axis_tlast,
  // AXI-Stream out
  output logic          m_axis_tvalid,
  input  logic          m_axis_tready,
  output logic [7:0]    m_axis_tdata,
  output logic          m_axis_tlast,
  // weight preload
  input  logic          ld_we,
  input  logic          ld_layer,
  input  logic [7:0]    ld_eng,
  input  logic [1:0]    ld_sel,
  input  logic [AW-1:0] ld_addr,
  input  logic [7:0]    ld_data,
  // status
  output logic [31:0]   frames_in,
  output logic [31:0]   frames_out
);
  localparam int unsigned FRAME_WORDS = H * W * C;  // K=3, S=1, PAD=1 keep H x W

  logic  l1_valid, l1_ready, r1_valid, r1_ready, x_valid, x_ready;
  logic  l2_valid, l2_ready, r2_valid;
  word_t l1_data, r1_data, x_data, l2_data, r2_data;

  grouped_layer #(
    .TYPE(ENGINE_SVD), .G1(L1_G1), .G2(L1_G2), .H(H), .W(W), .C(C), .C_OUT(C),
    .K(3), .S(1), .PAD(1), .R(L1_R), .AW(AW)
  ) u_layer1 (
    .clk, .rst_n,
    .in_valid(s_axis_tvalid), .in_ready(s_axis_tready), .in_data(word_t'(s_axis_tdata)),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_data(l1_data),
    .ld_we(ld_we && !ld_layer), .ld_eng, .ld_sel, .ld_addr, .ld_data(word_t'(ld_data))
  );

  relu_unit u_relu1 (
    .clk, .rst_n,
    .in_valid(l1_valid), .in_ready(l1_ready), .in_data(l1_data),
    .out_valid(r1_valid), .out_ready(r1_ready), .out_data(r1_data)
  );

  if (L1_G1 != L2_G2) begin : g_rearrange
    channel_rearrange #(.C(C), .GA(L1_G1), .GB(L2_G2)) u_rearrange (
      .clk, .rst_n,
      .in_valid(r1_valid), .in_ready(r1_ready), .in_data(r1_data),
      .out_valid(x_valid), .out_ready(x_ready), .out_data(x_data)
    );
  end else begin : g_direct
    assign x_valid  = r1_valid;
    assign r1_ready = x_ready;
    assign x_data   = r1_data;
  end

  grouped_layer #(
    .TYPE(ENGINE_CPD), .G1(L2_G1), .G2(L2_G2), .H(H), .W(W), .C(C), .C_OUT(C),
    .K(3), .S(1), .PAD(1), .R(L2_R), .AW(AW)
  ) u_layer2 (
    .clk, .rst_n,
    .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_data(l2_data),
    .ld_we(ld_we && ld_layer), .ld_eng, .ld_sel, .ld_addr, .ld_data(word_t'(ld_data))
  );

  relu_unit u_relu2 (
    .clk, .rst_n,
    .in_valid(l2_valid), .in_ready(l2_ready), .in_data(l2_data),
    .out_valid(r2_valid), .out_ready(m_axis_tready), .out_data(r2_data)
  );

  // Output framing: tlast on the last word of each frame.
  logic [31:0] out_cnt;

  assign m_axis_tvalid = r2_valid;
  assign m_axis_tdata  = r2_data;
  assign m_axis_tlast  = (out_cnt == FRAME_WORDS - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_cnt    <= '0;
      frames_in  <= '0;
      frames_out <= '0;
    end else begin
      if (s_axis_tvalid && s_axis_tready && s_axis_tlast) frames_in <= frames_in + 1;
      if (m_axis_tvalid && m_axis_tready) begin
        if (m_axis_tlast) begin
          out_cnt    <= '0;
          frames_out <= frames_out + 1;
        end else begin
          out_cnt <= out_cnt + 1;
        end
      end
    end
  end
endmodule
