// vector_buffer: the input/intermediate buffer in front of a contraction stage.
//
// A stage needs its whole input vector (one output pixel's worth: L words)
// for every group of P_OUT outputs it computes, so the vector is held here
// while the MAC units sweep over it. Two banks are used in ping-pong: the
// producer fills one bank, WCH consecutive words per accepted beat, while
// the stage reads the other; a bank is handed to the reader when its last
// word is written and given back when the reader pulses rd_release.
//
// Interface: wr_valid/wr_ready/wr_data is a valid-ready write stream;
// rd_avail says a full bank is ready; rd_addr[k] -> rd_data[k] are NRD
// combinational read ports into that bank; rd_release frees it. Timing: a
// bank becomes readable the cycle after its last beat is accepted.
// The buffer's place in the engine follows the described architecture; the
// double-banking and the handshake are this design's choices.
module vector_buffer
  import mtd_pkg::*;
#(
  parameter int unsigned L   = 16,
  parameter int unsigned WCH = 4,
  parameter int unsigned NRD = 4,
  parameter int unsigned AW  = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  word_t         wr_data [WCH],
  output logic          rd_avail,
  input  logic [AW-1:0] rd_addr [NRD],
  output word_t         rd_data [NRD],
  input  logic          rd_release
);
  localparam int unsigned IW = (L > 1) ? $clog2(L) : 1;

  word_t mem [2][L];
  logic [1:0]    full;
  logic          wr_bank, rd_bank;
  logic [AW-1:0] wr_ptr;

  assign wr_ready = !full[wr_bank];
  assign rd_avail = full[rd_bank];

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready)
      for (int j = 0; j < int'(WCH); j++)
        mem[wr_bank][32'(wr_ptr) + j] <= wr_data[j];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full    <= '0;
      wr_bank <= 1'b0;
      rd_bank <= 1'b0;
      wr_ptr  <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        if (32'(wr_ptr) + WCH >= L) begin
          wr_ptr        <= '0;
          full[wr_bank] <= 1'b1;
          wr_bank       <= !wr_bank;
        end else begin
          wr_ptr <= wr_ptr + AW'(WCH);
        end
      end
      if (rd_release && rd_avail) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NRD); k++)
      rd_data[k] = (32'(rd_addr[k]) < L) ? mem[rd_bank][rd_addr[k][IW-1:0]] : word_t'(0);
  end

  // The bank being written is never the bank being read.
  a_banks: assert property (@(posedge clk) disable iff (!rst_n)
                            (full[wr_bank] == 1'b0) || !(wr_valid && wr_ready));
endmodule
