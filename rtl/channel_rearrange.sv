// channel_rearrange: reorders channel groups between two grouped layers.
//
// A layer split into GA output-channel groups emits each pixel's C channels
// interleaved as (C/GA) x GA, group index innermost; group g holds the
// contiguous channels g*C/GA .. (g+1)*C/GA-1. The next layer, split into GB
// input groups, wants (C/GB) x GB. When GA != GB the words are reordered
// through an array of L = LCM(GA, GB) FIFOs. FIFO s holds the channel slice
// s*C/L .. (s+1)*C/L-1, which lies inside one group of either split, so
// each FIFO is written in the input order and read in the output order of
// its channels. Both sides visit the FIFOs round-robin across groups:
// input word (c', g) goes to FIFO g*(L/GA) + c'/(C/L), output word (c'', h)
// comes from FIFO h*(L/GB) + c''/(C/L).
//
// Interface: in_* and out_* carry one word per beat, C beats per pixel.
// Timing: one word per cycle each side; DEPTH >= C/L avoids deadlock.
// The FIFO array of width LCM(g1, g2) with round-robin access follows the
// description; slice assignment, depth and stream width are this design's
// choices.
module channel_rearrange
  import mtd_pkg::*;
#(
  parameter int unsigned C     = 64,
  parameter int unsigned GA    = 2,
  parameter int unsigned GB    = 4,
  parameter int unsigned L     = lcm(GA, GB),
  parameter int unsigned DEPTH = 2 * C / L
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);
  localparam int unsigned SL = C / L;  // channels per FIFO and pixel
  localparam int unsigned SW = (L > 1) ? $clog2(L) : 1;

  if (C % L != 0) begin : g_chk_c
    $error("channel_rearrange: C must be a multiple of LCM(GA, GB)");
  end
  if (DEPTH < SL) begin : g_chk_depth
    $error("channel_rearrange: DEPTH must be at least C/LCM(GA, GB)");
  end

  logic [15:0] wc, wg, rc, rg;     // (c', g) write and (c'', h) read position
  logic [SW-1:0] ws, rs;           // FIFO selected by each side
  logic  [L-1:0] full, empty, push, pop;
  word_t         dout [L];

  assign ws = SW'(int'(wg) * int'(L / GA) + int'(wc) / int'(SL));
  assign rs = SW'(int'(rg) * int'(L / GB) + int'(rc) / int'(SL));

  assign in_ready  = !full[ws];
  assign out_valid = !empty[rs];
  assign out_data  = dout[rs];

  for (genvar s = 0; s < int'(L); s++) begin : g_fifo
    assign push[s] = in_valid && in_ready && (int'(ws) == s);
    assign pop[s]  = out_valid && out_ready && (int'(rs) == s);
    sync_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(push[s]), .din(in_data), .full(full[s]),
      .pop(pop[s]), .dout(dout[s]), .empty(empty[s])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wc <= '0; wg <= '0; rc <= '0; rg <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (32'(wg) == GA - 1) begin
          wg <= '0;
          wc <= (32'(wc) == C / GA - 1) ? '0 : wc + 1'b1;
        end else begin
          wg <= wg + 1'b1;
        end
      end
      if (out_valid && out_ready) begin
        if (32'(rg) == GB - 1) begin
          rg <= '0;
          rc <= (32'(rc) == C / GB - 1) ? '0 : rc + 1'b1;
        end else begin
          rg <= rg + 1'b1;
        end
      end
    end
  end
endmodule
