// accum_unit: accumulation module behind one MAC unit.
//
// A 2:1 multiplexer chooses either the register's own value or the constant
// 0, and an adder adds the MAC unit's partial sum to it; the result is
// registered. Asserting `first` starts a new sum (mux selects 0), so a full
// dot product of length NI is built over NI/P_IN consecutive enabled cycles.
//
// Interface: en advances the accumulator, first restarts it, psum is the MAC
// output, acc is the registered sum. Timing: acc shows the sum one clock
// after the enabled cycle. The mux/adder/register structure is the one drawn
// for the accumulation module; the synchronous active-low reset to zero is
// this design's choice.
module accum_unit
  import mtd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic first,
  input  acc_t psum,
  output acc_t acc
);
  acc_t base;

  always_comb base = first ? acc_t'(0) : acc;

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= base + psum;
  end
endmodule
