// eng_harness: drives one svd_engine (TYPE = 0) or cpd_engine (TYPE = 1).
// It draws random decomposed weights in their logical index order, preloads
// them at the addresses each engine documents, streams NF random frames
// (PI channels per beat) and checks every output word against the
// reference convolution of mtd_ref_pkg. The output side applies random
// back-pressure, which must propagate back and stall the input.
module eng_harness
  import mtd_pkg::*;
  import mtd_ref_pkg::*;
#(
  parameter int TYPE = 0,
  parameter int H = 5, W = 4, C = 4, CO = 6, K = 3, S = 1, PAD = 1, R = 4,
  // SVD: PI = P_IN_V, PA = P_OUT_V, PO = P_OUT_U
  // CPD: PI = P_IN_2, PA = P_OUT_2, PB = P_OUT_3, PC = P_OUT_4, PO = P_OUT_1
  parameter int PI = 2, PA = 2, PB = 3, PC = 2, PO = 3,
  parameter int SH0 = 8, SH1 = 7, SH2 = 7, SH3 = 7,
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
  localparam int NB = H*W*C/PI;
  localparam int NO = HO*WO*CO/PO;
  localparam int AW = 16;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data [PI];
  word_t out_data [PO];
  logic ld_we = 0;
  logic [1:0] ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  word_t ld_data = '0;

  int x [NF][];
  int y [NF][];
  int wa [], wb [], wc [], wd [];
  int nin = 0, nout = 0, loaded = 0, stalls = 0;

  if (TYPE == 0) begin : g_svd
    svd_engine #(.H(H), .W(W), .C(C), .C_OUT(CO), .K(K), .S(S), .PAD(PAD), .R(R),
                 .P_IN_V(PI), .P_OUT_V(PA), .P_OUT_U(PO), .SHIFT_V(SH0), .SHIFT_U(SH1),
                 .AW(AW)) dut (.*);
  end else begin : g_cpd
    cpd_engine #(.H(H), .W(W), .C(C), .C_OUT(CO), .K(K), .S(S), .PAD(PAD), .R(R),
                 .P_IN_2(PI), .P_OUT_2(PA), .P_OUT_3(PB), .P_OUT_4(PC), .P_OUT_1(PO),
                 .SHIFT_2(SH0), .SHIFT_3(SH1), .SHIFT_4(SH2), .SHIFT_1(SH3),
                 .AW(AW)) dut (.*);
  end

  task automatic load(input int sel, input int addr, input int val);
    @(negedge clk);
    ld_we = 1; ld_sel = 2'(sel); ld_addr = AW'(addr); ld_data = word_t'(val);
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    if (TYPE == 0) begin
      wa = new[R*C*K*K]; wb = new[CO*R];
      foreach (wa[i]) wa[i] = rnd8();
      foreach (wb[i]) wb[i] = rnd8();
    end else begin
      wa = new[CO*R]; wb = new[C*R]; wc = new[K*R]; wd = new[K*R];
      foreach (wa[i]) wa[i] = rnd8();
      foreach (wb[i]) wb[i] = rnd8();
      foreach (wc[i]) wc[i] = rnd8();
      foreach (wd[i]) wd[i] = rnd8();
    end
    for (int f = 0; f < NF; f++) begin
      x[f] = new[H*W*C];
      foreach (x[f][i]) x[f][i] = rnd8();
      if (TYPE == 0) conv_ref::svd_conv(x[f], wa, wb, H, W, C, CO, K, S, PAD, R, SH0, SH1, y[f]);
      else conv_ref::cpd_conv(x[f], wa, wb, wc, wd, H, W, C, CO, K, S, PAD, R, SH0, SH1, SH2, SH3, y[f]);
    end
    wait (rst_n);
    if (TYPE == 0) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          for (int kh = 0; kh < K; kh++)
            for (int kw = 0; kw < K; kw++)
              load(0, r*C*K*K + ((c/PI)*K*K + kh*K + kw)*PI + c%PI, wa[((r*C + c)*K + kh)*K + kw]);
      for (int o = 0; o < CO; o++)
        for (int r = 0; r < R; r++) load(1, o*R + r, wb[o*R + r]);
    end else begin
      for (int o = 0; o < CO; o++) for (int r = 0; r < R; r++) load(0, o*R + r, wa[o*R + r]);
      for (int c = 0; c < C; c++)  for (int r = 0; r < R; r++) load(1, r*C + c, wb[c*R + r]);
      for (int k = 0; k < K; k++)  for (int r = 0; r < R; r++) load(2, k*R + r, wc[k*R + r]);
      for (int k = 0; k < K; k++)  for (int r = 0; r < R; r++) load(3, k*R + r, wd[k*R + r]);
    end
    @(negedge clk);
    ld_we = 0;
    loaded = 1;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) nin++;
      if (in_valid && !in_ready) stalls++;
      if (out_valid && out_ready) begin
        int f, n;
        f = nout / NO; n = nout % NO;
        for (int m = 0; m < PO; m++) begin
          checks++;
          if (int'(out_data[m]) != y[f][n*PO + m]) begin
            failures++;
            if (failures < 5) $display("engine type %0d frame %0d word %0d: %0d expected %0d",
                                       TYPE, f, n*PO+m, out_data[m], y[f][n*PO+m]);
          end
        end
        nout++;
        if (nout == NF*NO) begin
          checks++;
          if (stalls == 0) begin failures++; $display("engine input never stalled"); end
          done = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    in_valid = loaded && (nin < NF*NB);
    for (int j = 0; j < PI; j++)
      in_data[j] = (loaded != 0) ? word_t'(x[(nin / NB) % NF][((nin % NB)*PI + j)]) : word_t'(0);
    out_ready = ($urandom_range(3) != 0);
  end
endmodule
