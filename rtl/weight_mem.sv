// weight_mem: on-chip weight store of one contraction stage.
//
// All decomposed weights (V_r, U_r or one CPD factor a_{k,r}) stay on chip
// and are written once, through the load port, before inference starts.
// During inference the stage reads NRD words per cycle, one per multiplier,
// at addresses it computes itself; on an FPGA this is a partitioned block
// RAM, here it is an array with NRD combinational read ports.
//
// Interface: ld_we/ld_addr/ld_data write one word per clock (preload);
// rd_addr[k] -> rd_data[k] is combinational. Addresses at or above DEPTH
// are ignored on writes and read as 0. Keeping weights on chip and
// preloading them follows the described architecture; the load port
// (one word per clock, flat addressing) is this design's choice.
module weight_mem
  import mtd_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned NRD   = 8,
  parameter int unsigned AW    = 20
) (
  input  logic          clk,
  input  logic          ld_we,
  input  logic [AW-1:0] ld_addr,
  input  word_t         ld_data,
  input  logic [AW-1:0] rd_addr [NRD],
  output word_t         rd_data [NRD]
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_we && (32'(ld_addr) < DEPTH)) mem[ld_addr[IW-1:0]] <= ld_data;
  end

  always_comb begin
    for (int k = 0; k < int'(NRD); k++)
      rd_data[k] = (32'(rd_addr[k]) < DEPTH) ? mem[rd_addr[k][IW-1:0]] : word_t'(0);
  end
endmodule
