// sliding_window: the input buffer of an SVD or CPD engine.
//
// It applies the sliding-window function of a convolution (padding and
// striding) to a feature map that arrives as a stream in (row, column,
// channel) order, channel innermost. P words (P consecutive channels of one
// pixel, one word per line buffer) are accepted per beat. The last NROWS =
// K+S rows are kept in a row ring; once every input row a window needs is
// complete, the window for output position (oy, ox) and channel block cb is
// emitted as K*K*P words ordered (kh, kw, channel), zeros where the window
// covers padding. Output order is oy, ox, cb. A new frame starts once the
// previous one has been fully read in and every window of it emitted.
//
// Interface: in_* valid-ready, P words per beat; out_* valid-ready,
// K*K*P words per beat. Timing: one window per cycle when not stalled; the
// writer may run ahead by NROWS-K rows, which lets the next rows stream in
// while windows of the current output row are produced.
// The p_in line buffers fetching one word each per cycle and dispatching
// k x k windows follow the described input buffer; the row-ring size, zero
// padding value and frame handshake are this design's choices.
module sliding_window
  import mtd_pkg::*;
#(
  parameter int unsigned H   = 8,
  parameter int unsigned W   = 8,
  parameter int unsigned C   = 4,
  parameter int unsigned K   = 3,
  parameter int unsigned S   = 1,
  parameter int unsigned PAD = 1,
  parameter int unsigned P   = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data [P],
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data [K*K*P]
);
  localparam int unsigned HO    = (H + 2*PAD - K) / S + 1;
  localparam int unsigned WO    = (W + 2*PAD - K) / S + 1;
  localparam int unsigned NCB   = C / P;
  localparam int unsigned NROWS = K + S;
  localparam int unsigned DEPTH = NROWS * W * C;
  localparam int unsigned IW    = $clog2(DEPTH);

  if (C % P != 0) begin : g_chk_c
    $error("sliding_window: C must be a multiple of P");
  end

  word_t lb [DEPTH];

  logic [15:0] wy, wx, wcb, wslot;
  logic        wdone;
  logic [15:0] oy, ox, ocb;
  logic        rdone;
  logic        emit, wr_fire;
  int          rows_done, need_row, first_row;

  always_comb begin
    first_row = int'(oy) * int'(S) - int'(PAD);
    need_row  = first_row + int'(K) - 1;
    if (need_row > int'(H) - 1) need_row = int'(H) - 1;
    rows_done = wdone ? int'(H) : int'(wy);
  end

  assign in_ready = !wdone && (rdone || (int'(wy) < first_row + int'(NROWS)));
  assign wr_fire  = in_valid && in_ready;
  assign emit     = !rdone && (rows_done > need_row) && (!out_valid || out_ready);

  // Writer: store P channels of pixel (wy, wx) in row slot wslot.
  always_ff @(posedge clk) begin
    if (wr_fire)
      for (int j = 0; j < int'(P); j++)
        lb[IW'((int'(wslot) * int'(W) + int'(wx)) * int'(C) + int'(wcb) * int'(P) + j)] <= in_data[j];
  end

  // Reader: gather the window of (oy, ox, ocb) from the row ring.
  always_ff @(posedge clk) begin
    if (emit) begin
      for (int kh = 0; kh < int'(K); kh++) begin
        for (int kw = 0; kw < int'(K); kw++) begin
          for (int j = 0; j < int'(P); j++) begin
            int iy, ix;
            iy = int'(oy) * int'(S) - int'(PAD) + kh;
            ix = int'(ox) * int'(S) - int'(PAD) + kw;
            if (iy < 0 || iy >= int'(H) || ix < 0 || ix >= int'(W))
              out_data[(kh*int'(K) + kw)*int'(P) + j] <= word_t'(0);
            else
              out_data[(kh*int'(K) + kw)*int'(P) + j] <=
                lb[IW'(((iy % int'(NROWS)) * int'(W) + ix) * int'(C) + int'(ocb) * int'(P) + j)];
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wy <= '0; wx <= '0; wcb <= '0; wslot <= '0; wdone <= 1'b0;
      oy <= '0; ox <= '0; ocb <= '0; rdone <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      // writer counters
      if (wr_fire) begin
        if (32'(wcb) == NCB - 1) begin
          wcb <= '0;
          if (32'(wx) == W - 1) begin
            wx    <= '0;
            wy    <= wy + 1'b1;
            wslot <= (32'(wslot) == NROWS - 1) ? '0 : wslot + 1'b1;
            if (32'(wy) == H - 1) wdone <= 1'b1;
          end else begin
            wx <= wx + 1'b1;
          end
        end else begin
          wcb <= wcb + 1'b1;
        end
      end
      // reader counters
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (emit) begin
        out_valid <= 1'b1;
        if (32'(ocb) == NCB - 1) begin
          ocb <= '0;
          if (32'(ox) == WO - 1) begin
            ox <= '0;
            if (32'(oy) == HO - 1) begin
              oy    <= '0;
              rdone <= 1'b1;
            end else begin
              oy <= oy + 1'b1;
            end
          end else begin
            ox <= ox + 1'b1;
          end
        end else begin
          ocb <= ocb + 1'b1;
        end
      end
      // frame boundary
      if (wdone && rdone) begin
        wy <= '0; wx <= '0; wcb <= '0; wslot <= '0;
        wdone <= 1'b0; rdone <= 1'b0;
      end
    end
  end
endmodule
