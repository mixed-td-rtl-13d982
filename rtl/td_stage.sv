// td_stage: one stage of tensor contraction inside an SVD or CPD engine.
//
// A decomposed convolution is computed as a chain of contractions; each
// link of that chain is one td_stage: a vector_buffer holding the stage's
// input vector (one output pixel's worth), a weight_mem holding the stage's
// factor, P_OUT MAC units of P_IN multipliers each, and P_OUT accumulators.
// For every output pixel the stage produces L_OUT values, each a dot product
// of length NI. It computes P_OUT outputs at a time; for each group of P_OUT
// outputs it steps through the NI inputs P_IN at a time, so one vector
// takes (L_OUT/P_OUT)*(NI/P_IN) cycles. This is the initiation interval
// that the unroll factors p_in and p_out trade against multipliers.
//
// MODE picks the dataflow (see mtd_pkg):
//   MODE_INNER  every MAC unit sees the same P_IN inputs (broadcast);
//               weights W[o][i] at o*NI+i.
//   MODE_BLOCK  the same, applied to each of BK window positions of the
//               input window; the window arrives in chunks of WP channels
//               ordered (channel block, kh, kw, channel); weights W[r][c]
//               at r*NI+c. Output o = b*R + r.
//   MODE_DIAG   each MAC unit sees its own inputs (scatter): output o reads
//               x[i*L_OUT+o]; weights W[i][o%R] at i*R + o%R.
//
// Interface: in_* is a valid-ready stream of WCH words written in order
// into the buffer; out_* is a valid-ready stream of P_OUT words (outputs
// o = g*P_OUT .. g*P_OUT+P_OUT-1, g ascending); ld_* preloads the weights.
// Timing: the first output group appears NI/P_IN+1 cycles after the vector
// is complete; a stalled output holds the whole stage.
// The buffer / MAC / accumulator structure, broadcast against scatter, and
// the chaining p_out(k) = p_in(k+1) follow the engine description. The
// address orders, the requantisation shift and the handshakes are this
// design's choices.
module td_stage
  import mtd_pkg::*;
#(
  parameter stage_mode_e MODE  = MODE_INNER,
  parameter int unsigned L_IN  = 16,
  parameter int unsigned WCH   = 4,
  parameter int unsigned NI    = 16,
  parameter int unsigned L_OUT = 8,
  parameter int unsigned R     = 8,
  parameter int unsigned BK    = 1,
  parameter int unsigned WP    = 1,
  parameter int unsigned P_IN  = 4,
  parameter int unsigned P_OUT = 2,
  parameter int unsigned SHIFT = 0,
  parameter int unsigned AW    = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_data [WCH],
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_data [P_OUT],
  input  logic          ld_we,
  input  logic [AW-1:0] ld_addr,
  input  word_t         ld_data
);
  localparam int unsigned NOG    = L_OUT / P_OUT;
  localparam int unsigned NIG    = NI / P_IN;
  localparam int unsigned NRD    = P_OUT * P_IN;
  localparam int unsigned WDEPTH = (MODE == MODE_INNER) ? L_OUT * NI : R * NI;

  if (NI % P_IN != 0) begin : g_chk_ni
    $error("td_stage: NI must be a multiple of P_IN");
  end
  if (L_OUT % P_OUT != 0) begin : g_chk_lout
    $error("td_stage: L_OUT must be a multiple of P_OUT");
  end
  if (L_IN % WCH != 0) begin : g_chk_lin
    $error("td_stage: L_IN must be a multiple of WCH");
  end

  logic          rd_avail, rd_release, advance;
  logic [AW-1:0] xa [NRD];
  logic [AW-1:0] wa [NRD];
  word_t         xd [NRD];
  word_t         wd [NRD];
  logic [$clog2(NOG+1)-1:0] og;
  logic [$clog2(NIG+1)-1:0] ig;
  logic          last_ig, last_og;
  acc_t          psum [P_OUT];
  acc_t          acc  [P_OUT];

  vector_buffer #(.L(L_IN), .WCH(WCH), .NRD(NRD), .AW(AW)) u_buf (
    .clk, .rst_n,
    .wr_valid(in_valid), .wr_ready(in_ready), .wr_data(in_data),
    .rd_avail, .rd_addr(xa), .rd_data(xd), .rd_release
  );

  weight_mem #(.DEPTH(WDEPTH), .NRD(NRD), .AW(AW)) u_wmem (
    .clk, .ld_we, .ld_addr, .ld_data, .rd_addr(wa), .rd_data(wd)
  );

  // Input-vector and weight addresses of every multiplier for (og, ig).
  always_comb begin
    for (int m = 0; m < int'(P_OUT); m++) begin
      for (int j = 0; j < int'(P_IN); j++) begin
        int o, i;
        o = int'(og) * int'(P_OUT) + m;
        i = int'(ig) * int'(P_IN) + j;
        unique case (MODE)
          MODE_INNER: begin
            xa[m*P_IN+j] = AW'(i);
            wa[m*P_IN+j] = AW'(o * int'(NI) + i);
          end
          MODE_BLOCK: begin
            xa[m*P_IN+j] = AW'((i / int'(WP)) * int'(BK * WP) + (o / int'(R)) * int'(WP) + (i % int'(WP)));
            wa[m*P_IN+j] = AW'((o % int'(R)) * int'(NI) + i);
          end
          default: begin  // MODE_DIAG
            xa[m*P_IN+j] = AW'(i * int'(L_OUT) + o);
            wa[m*P_IN+j] = AW'(i * int'(R) + (o % int'(R)));
          end
        endcase
      end
    end
  end

  for (genvar m = 0; m < int'(P_OUT); m++) begin : g_mac
    word_t xs [P_IN];
    word_t ws [P_IN];
    for (genvar j = 0; j < int'(P_IN); j++) begin : g_sel
      assign xs[j] = xd[m*P_IN + j];
      assign ws[j] = wd[m*P_IN + j];
    end
    mac_unit #(.P_IN(P_IN)) u_mac (.x(xs), .w(ws), .sum(psum[m]));
    accum_unit u_acc (
      .clk, .rst_n, .en(advance), .first(ig == '0), .psum(psum[m]), .acc(acc[m])
    );
    assign out_data[m] = requant(acc[m], SHIFT);
  end

  assign last_ig    = (32'(ig) == NIG - 1);
  assign last_og    = (32'(og) == NOG - 1);
  assign advance    = rd_avail && (!out_valid || out_ready);
  assign rd_release = advance && last_ig && last_og;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      og        <= '0;
      ig        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (advance) begin
        if (last_ig) begin
          ig        <= '0;
          out_valid <= 1'b1;
          og        <= last_og ? '0 : og + 1'b1;
        end else begin
          ig <= ig + 1'b1;
        end
      end
    end
  end

  // An output group is never overwritten before it has been accepted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           (out_valid && !out_ready) |=> out_valid && $stable(og));
endmodule
