// grouped_layer: one decomposed convolutional layer built from G1*G2 engines.
//
// With channel grouping the kernel W[C_OUT][C][K][K] is cut into G1 slices
// along the output channels and G2 slices along the input channels, and each
// of the G1*G2 chunks is decomposed, and mapped to an engine, on its own.
// All engines of a layer are of one type, SVD (TYPE = ENGINE_SVD) or CPD.
//
//  * Split: the input stream carries each pixel's C channels as (C/G2) x G2,
//    group index innermost. Word n of a pixel belongs to input group n%G2.
//    Each group has a packer that gathers the engine's input width (P_IN_V
//    or P_IN_2 words) and hands the beat to all G1 engines of that group at
//    once.
//  * Engines: engine e = g1*G2 + g2 sees C/G2 input channels (slice g2) and
//    produces C_OUT/G1 output channels (slice g1).
//  * Reduce: the G2 engines sharing an output slice g1 each hold a partial
//    result over their input slice; their outputs are added (saturating)
//    when all of them are valid.
//  * Merge: each output slice has an unpacker; the output stream takes one
//    word from each slice in turn, giving (C_OUT/G1) x G1, group innermost.
//
// Interface: in_* and out_* carry one 8-bit word per beat, pixels in
// (row, column) order. Weights are preloaded through ld_*: ld_eng selects
// the engine e, ld_sel the stage of that engine (see svd_engine and
// cpd_engine for the address layout of each factor).
// Timing: set by the slowest engine stage; packing and merging add a few
// cycles of latency and run at one word per cycle.
// The engine count, split into G2 groups and the (c/g, g) stream layouts
// follow the channel-grouping description. Summing the G2 partial outputs
// after each engine's requantisation, the packers and the one-word stream
// are this design's choices: the description does not say how the
// partial results of the input groups are combined.
module grouped_layer
  import mtd_pkg::*;
#(
  parameter engine_type_e TYPE    = ENGINE_SVD,
  parameter int unsigned  G1      = 2,
  parameter int unsigned  G2      = 1,
  parameter int unsigned  H       = 56,
  parameter int unsigned  W       = 56,
  parameter int unsigned  C       = 64,
  parameter int unsigned  C_OUT   = 64,
  parameter int unsigned  K       = 3,
  parameter int unsigned  S       = 1,
  parameter int unsigned  PAD     = 1,
  parameter int unsigned  R       = 16,
  // SVD engine unroll factors and shifts
  parameter int unsigned  P_IN_V  = 8,
  parameter int unsigned  P_OUT_V = 8,
  parameter int unsigned  P_OUT_U = 8,
  parameter int unsigned  SHIFT_V = 7,
  parameter int unsigned  SHIFT_U = 6,
  // CPD engine unroll factors and shifts
  parameter int unsigned  P_IN_2  = 8,
  parameter int unsigned  P_OUT_2 = 3,
  parameter int unsigned  P_OUT_3 = 3,
  parameter int unsigned  P_OUT_4 = 4,
  parameter int unsigned  P_OUT_1 = 8,
  parameter int unsigned  SHIFT_2 = 7,
  parameter int unsigned  SHIFT_3 = 2,
  parameter int unsigned  SHIFT_4 = 2,
  parameter int unsigned  SHIFT_1 = 5,
  parameter int unsigned  AW      = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_data,
  input  logic          ld_we,
  input  logic [7:0]    ld_eng,
  input  logic [1:0]    ld_sel,
  input  logic [AW-1:0] ld_addr,
  input  word_t         ld_data
);
  localparam int unsigned NE   = G1 * G2;
  localparam int unsigned CE   = C / G2;       // input channels per engine
  localparam int unsigned COE  = C_OUT / G1;   // output channels per engine
  localparam int unsigned EPI  = (TYPE == ENGINE_SVD) ? P_IN_V  : P_IN_2;
  localparam int unsigned EPO  = (TYPE == ENGINE_SVD) ? P_OUT_U : P_OUT_1;
  localparam int unsigned G2W  = (G2 > 1) ? $clog2(G2) : 1;
  localparam int unsigned G1W  = (G1 > 1) ? $clog2(G1) : 1;
  localparam int unsigned PIW  = (EPI > 1) ? $clog2(EPI) : 1;
  localparam int unsigned POW  = (EPO > 1) ? $clog2(EPO) : 1;

  if (C % G2 != 0 || C_OUT % G1 != 0) begin : g_chk_groups
    $error("grouped_layer: channel counts must divide into the groups");
  end

  // ---------------- split: packers, one per input group ----------------
  logic [G2W-1:0] gin;
  word_t          pk_data [G2][EPI];
  logic [PIW-1:0] pk_cnt  [G2];
  logic [G2-1:0]  pk_full;
  logic [G2-1:0]  pk_take;               // all engines of the group accept

  logic  e_in_ready  [NE];
  logic  e_out_valid [NE];
  logic  e_out_ready [NE];
  word_t e_out_data  [NE][EPO];

  assign in_ready = !pk_full[gin];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) pk_data[gin][pk_cnt[gin]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gin     <= '0;
      pk_full <= '0;
      for (int g = 0; g < int'(G2); g++) pk_cnt[g] <= '0;
    end else begin
      for (int g = 0; g < int'(G2); g++)
        if (pk_take[g]) pk_full[g] <= 1'b0;
      if (in_valid && in_ready) begin
        gin <= (32'(gin) == G2 - 1) ? '0 : gin + 1'b1;
        if (32'(pk_cnt[gin]) == EPI - 1) begin
          pk_cnt[gin]  <= '0;
          pk_full[gin] <= 1'b1;
        end else begin
          pk_cnt[gin] <= pk_cnt[gin] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int g = 0; g < int'(G2); g++) begin
      pk_take[g] = pk_full[g];
      for (int h = 0; h < int'(G1); h++)
        pk_take[g] = pk_take[g] && e_in_ready[h*G2 + g];
    end
  end

  // ---------------- engines ----------------
  for (genvar h = 0; h < int'(G1); h++) begin : g_out_grp
    for (genvar g = 0; g < int'(G2); g++) begin : g_in_grp
      localparam int unsigned E = h * G2 + g;
      logic ld_here;
      assign ld_here = ld_we && (32'(ld_eng) == E);
      if (TYPE == ENGINE_SVD) begin : g_svd
        svd_engine #(
          .H(H), .W(W), .C(CE), .C_OUT(COE), .K(K), .S(S), .PAD(PAD), .R(R),
          .P_IN_V(P_IN_V), .P_OUT_V(P_OUT_V), .P_OUT_U(P_OUT_U),
          .SHIFT_V(SHIFT_V), .SHIFT_U(SHIFT_U), .AW(AW)
        ) u_eng (
          .clk, .rst_n,
          .in_valid(pk_take[g]), .in_ready(e_in_ready[E]), .in_data(pk_data[g]),
          .out_valid(e_out_valid[E]), .out_ready(e_out_ready[E]), .out_data(e_out_data[E]),
          .ld_we(ld_here), .ld_sel, .ld_addr, .ld_data
        );
      end else begin : g_cpd
        cpd_engine #(
          .H(H), .W(W), .C(CE), .C_OUT(COE), .K(K), .S(S), .PAD(PAD), .R(R),
          .P_IN_2(P_IN_2), .P_OUT_2(P_OUT_2), .P_OUT_3(P_OUT_3), .P_OUT_4(P_OUT_4),
          .P_OUT_1(P_OUT_1), .SHIFT_2(SHIFT_2), .SHIFT_3(SHIFT_3), .SHIFT_4(SHIFT_4),
          .SHIFT_1(SHIFT_1), .AW(AW)
        ) u_eng (
          .clk, .rst_n,
          .in_valid(pk_take[g]), .in_ready(e_in_ready[E]), .in_data(pk_data[g]),
          .out_valid(e_out_valid[E]), .out_ready(e_out_ready[E]), .out_data(e_out_data[E]),
          .ld_we(ld_here), .ld_sel, .ld_addr, .ld_data
        );
      end
    end
  end

  // ---------------- reduce over input groups, unpack, merge ----------------
  logic [G1W-1:0] gout;
  word_t          up_data [G1][EPO];
  logic [POW-1:0] up_cnt  [G1];
  logic [G1-1:0]  up_full;
  logic [G1-1:0]  join_fire;
  word_t          red     [G1][EPO];

  always_comb begin
    for (int h = 0; h < int'(G1); h++) begin
      join_fire[h] = !up_full[h];
      for (int g = 0; g < int'(G2); g++)
        join_fire[h] = join_fire[h] && e_out_valid[h*G2 + g];
      for (int g = 0; g < int'(G2); g++)
        e_out_ready[h*G2 + g] = join_fire[h];
      for (int m = 0; m < int'(EPO); m++) begin
        red[h][m] = e_out_data[h*G2][m];
        for (int g = 1; g < int'(G2); g++)
          red[h][m] = sat_add(red[h][m], e_out_data[h*G2 + g][m]);
      end
    end
  end

  assign out_valid = up_full[gout];
  assign out_data  = up_data[gout][up_cnt[gout]];

  always_ff @(posedge clk) begin
    for (int h = 0; h < int'(G1); h++)
      if (join_fire[h]) up_data[h] <= red[h];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gout    <= '0;
      up_full <= '0;
      for (int h = 0; h < int'(G1); h++) up_cnt[h] <= '0;
    end else begin
      for (int h = 0; h < int'(G1); h++)
        if (join_fire[h]) up_full[h] <= 1'b1;
      if (out_valid && out_ready) begin
        gout <= (32'(gout) == G1 - 1) ? '0 : gout + 1'b1;
        if (32'(up_cnt[gout]) == EPO - 1) begin
          up_cnt[gout]  <= '0;
          up_full[gout] <= 1'b0;
        end else begin
          up_cnt[gout] <= up_cnt[gout] + 1'b1;
        end
      end
    end
  end
endmodule
