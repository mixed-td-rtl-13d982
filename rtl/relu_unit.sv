// relu_unit: ReLU layer engine on the inter-layer word stream.
//
// In the dataflow accelerator every layer, activation layers included, has
// its own engine in the pipeline. This one replaces negative words by zero.
// It is a single register stage with a valid-ready handshake on both sides.
//
// Interface: in_* and out_* carry one signed 8-bit word per beat.
// Timing: one word per cycle, one cycle of latency. Mapping ReLU to its own
// pipeline engine follows the described architecture; the one-word stream
// width is this design's choice. The output keeps the signed word type of
// the stream, so its sign bit is always 0: synthesis reports that bit as a
// constant output, which is expected.
module relu_unit
  import mtd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data[WORD_W-1] ? word_t'(0) : in_data;
    end
  end
endmodule
