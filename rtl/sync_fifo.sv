// sync_fifo: single-clock FIFO of 8-bit words, one FIFO of the channel
// rearrangement array.
//
// A circular buffer of DEPTH words with separate read and write pointers
// and an occupancy counter. Push and pop may happen in the same cycle.
//
// Interface: push/din write when !full, or when full together with a pop;
// pop/dout read when !empty (dout shows the oldest word
// combinationally). Timing: a pushed word can be
// popped the next cycle. The FIFO itself is named by the description; its
// organisation is this design's choice.
module sync_fifo
  import mtd_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  word_t din,
  output logic  full,
  input  logic  pop,
  output word_t dout,
  output logic  empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t         mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          do_push, do_pop;

  assign full    = (32'(cnt) == DEPTH);
  assign empty   = (cnt == '0);
  assign do_push = push && (!full || do_pop);
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop);
endmodule
