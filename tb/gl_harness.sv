// gl_harness: drives one grouped_layer. Every engine (h, g) gets its own
// random decomposed weights; its reference output is the reference
// convolution of input-channel slice g, and the layer's reference output
// channel h*COE + o' is the saturating sum over g of the engines' results.
// Frames are streamed one word per beat in the (C/G2) x G2 layout and the
// output is expected in the (C_OUT/G1) x G1 layout, both group innermost.
module gl_harness
  import mtd_pkg::*;
  import mtd_ref_pkg::*;
#(
  parameter int TYPE = 0, G1 = 2, G2 = 2,
  parameter int H = 4, W = 4, C = 4, CO = 4, K = 3, S = 1, PAD = 1, R = 2,
  parameter int P_IN_V = 2, P_OUT_V = 2, P_OUT_U = 2, SHIFT_V = 7, SHIFT_U = 7,
  parameter int P_IN_2 = 2, P_OUT_2 = 3, P_OUT_3 = 3, P_OUT_4 = 3, P_OUT_1 = 2,
  parameter int SHIFT_2 = 7, SHIFT_3 = 7, SHIFT_4 = 7, SHIFT_1 = 7,
  parameter int NF = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int HO = (H + 2*PAD - K)/S + 1;
  localparam int WO = (W + 2*PAD - K)/S + 1;
  localparam int CE = C / G2, COE = CO / G1, NE = G1 * G2;
  localparam int AW = 16;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;
  logic ld_we = 0;
  logic [7:0] ld_eng = '0;
  logic [1:0] ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  word_t ld_data = '0;

  int x [NF][];
  int y [NF][];
  int wa [NE][], wb [NE][], wc [NE][], wd [NE][];
  int nin = 0, nout = 0, loaded = 0;

  grouped_layer #(
    .TYPE(engine_type_e'(TYPE)), .G1(G1), .G2(G2), .H(H), .W(W), .C(C), .C_OUT(CO),
    .K(K), .S(S), .PAD(PAD), .R(R),
    .P_IN_V(P_IN_V), .P_OUT_V(P_OUT_V), .P_OUT_U(P_OUT_U), .SHIFT_V(SHIFT_V), .SHIFT_U(SHIFT_U),
    .P_IN_2(P_IN_2), .P_OUT_2(P_OUT_2), .P_OUT_3(P_OUT_3), .P_OUT_4(P_OUT_4), .P_OUT_1(P_OUT_1),
    .SHIFT_2(SHIFT_2), .SHIFT_3(SHIFT_3), .SHIFT_4(SHIFT_4), .SHIFT_1(SHIFT_1), .AW(AW)
  ) dut (.*);

  task automatic load(input int e, input int sel, input int addr, input int val);
    @(negedge clk);
    ld_we = 1; ld_eng = 8'(e); ld_sel = 2'(sel); ld_addr = AW'(addr); ld_data = word_t'(val);
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int e = 0; e < NE; e++) begin
      if (TYPE == 0) begin
        wa[e] = new[R*CE*K*K]; wb[e] = new[COE*R]; wc[e] = new[1]; wd[e] = new[1];
      end else begin
        wa[e] = new[COE*R]; wb[e] = new[CE*R]; wc[e] = new[K*R]; wd[e] = new[K*R];
      end
      foreach (wa[e][i]) wa[e][i] = rnd8();
      foreach (wb[e][i]) wb[e][i] = rnd8();
      foreach (wc[e][i]) wc[e][i] = rnd8();
      foreach (wd[e][i]) wd[e][i] = rnd8();
    end
    for (int f = 0; f < NF; f++) begin
      x[f] = new[H*W*C];
      y[f] = new[HO*WO*CO];
      foreach (x[f][i]) x[f][i] = rnd8();
      foreach (y[f][i]) y[f][i] = 0;
      for (int g = 0; g < G2; g++) begin
        int xs [];
        xs = new[H*W*CE];
        for (int p = 0; p < H*W; p++)
          for (int c = 0; c < CE; c++) xs[p*CE + c] = x[f][p*C + g*CE + c];
        for (int h = 0; h < G1; h++) begin
          int ye [];
          int e;
          e = h*G2 + g;
          if (TYPE == 0) conv_ref::svd_conv(xs, wa[e], wb[e], H, W, CE, COE, K, S, PAD, R, SHIFT_V, SHIFT_U, ye);
          else conv_ref::cpd_conv(xs, wa[e], wb[e], wc[e], wd[e], H, W, CE, COE, K, S, PAD, R,
                        SHIFT_2, SHIFT_3, SHIFT_4, SHIFT_1, ye);
          for (int p = 0; p < HO*WO; p++)
            for (int o = 0; o < COE; o++)
              y[f][p*CO + h*COE + o] = (g == 0) ? ye[p*COE + o]
                                                : sat8(y[f][p*CO + h*COE + o] + ye[p*COE + o]);
        end
      end
    end
    wait (rst_n);
    for (int e = 0; e < NE; e++) begin
      if (TYPE == 0) begin
        for (int r = 0; r < R; r++)
          for (int c = 0; c < CE; c++)
            for (int kh = 0; kh < K; kh++)
              for (int kw = 0; kw < K; kw++)
                load(e, 0, r*CE*K*K + ((c/P_IN_V)*K*K + kh*K + kw)*P_IN_V + c%P_IN_V,
                     wa[e][((r*CE + c)*K + kh)*K + kw]);
        for (int i = 0; i < COE*R; i++) load(e, 1, i, wb[e][i]);
      end else begin
        for (int i = 0; i < COE*R; i++) load(e, 0, i, wa[e][i]);
        for (int c = 0; c < CE; c++) for (int r = 0; r < R; r++) load(e, 1, r*CE + c, wb[e][c*R + r]);
        for (int i = 0; i < K*R; i++) load(e, 2, i, wc[e][i]);
        for (int i = 0; i < K*R; i++) load(e, 3, i, wd[e][i]);
      end
    end
    @(negedge clk);
    ld_we = 0;
    loaded = 1;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int f, p, n, e;
      f = nout / (HO*WO*CO); p = (nout / CO) % (HO*WO); n = nout % CO;
      e = y[f][p*CO + (n % G1)*COE + n / G1];
      checks++;
      if (int'(out_data) != e) begin
        failures++;
        if (failures < 5) $display("layer type %0d frame %0d pixel %0d word %0d: %0d expected %0d",
                                   TYPE, f, p, n, out_data, e);
      end
      nout++;
      if (nout == NF*HO*WO*CO) done = 1;
    end
    if (rst_n && in_valid && in_ready) nin++;
  end

  always @(negedge clk) begin
    in_valid = loaded && (nin < NF*H*W*C);
    if (loaded != 0 && nin < NF*H*W*C) begin
      int f, p, n;
      f = nin / (H*W*C); p = (nin / C) % (H*W); n = nin % C;
      in_data = word_t'(x[f][p*C + (n % G2)*CE + n / G2]);
    end
    out_ready = ($urandom_range(3) != 0);
  end
endmodule
