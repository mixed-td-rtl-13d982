// top_driver: host side of mixed_td_top for the end-to-end testbenches.
//
// It draws random decomposed weights for every engine of both layers,
// preloads them through the load port, streams NF random frames on the
// AXI-Stream input (tlast on each frame's last word) and checks every word
// and every tlast on the AXI-Stream output against a reference of the whole
// pipeline: layer 1 (SVD, G1 output groups) -> ReLU -> layer 2 (CPD, G2
// input groups, partial results summed with saturation) -> ReLU. Channel
// regrouping between the layers changes only word order, so the reference
// works on channel-indexed arrays. Weight ranges are kept small so that
// values pass through the requantisation shifts without saturating.
// With GAPS = 1 the input has random gaps and the output random
// back-pressure; otherwise both run freely after a short output stall.
module top_driver
  import mtd_pkg::*;
  import mtd_ref_pkg::*;
#(
  parameter int H = 4, W = 4, C = 32,
  parameter int L1_G1 = 2, L1_R = 16, L2_G2 = 4, L2_R = 16,
  parameter int P_IN_V = 8,
  parameter int SHIFT_V = 7, SHIFT_U = 6,
  parameter int SHIFT_2 = 7, SHIFT_3 = 2, SHIFT_4 = 2, SHIFT_1 = 5,
  parameter int NF = 2, GAPS = 1, AW = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          s_axis_tvalid,
  input  logic          s_axis_tready,
  output logic [7:0]    s_axis_tdata,
  output logic          s_axis_tlast,
  input  logic          m_axis_tvalid,
  output logic          m_axis_tready,
  input  logic [7:0]    m_axis_tdata,
  input  logic          m_axis_tlast,
  output logic          ld_we,
  output logic          ld_layer,
  output logic [7:0]    ld_eng,
  output logic [1:0]    ld_sel,
  output logic [AW-1:0] ld_addr,
  output logic [7:0]    ld_data,
  output int            checks,
  output int            failures,
  output logic          done,
  output int            cycles_stream
);
  localparam int K = 3, S = 1, PAD = 1;
  localparam int CE1 = C, COE1 = C / L1_G1;
  localparam int CE2 = C / L2_G2, COE2 = C;
  localparam int FW = H * W * C;

  int x [NF][];
  int y [NF][];
  int v1 [L1_G1][], u1 [L1_G1][];
  int a1 [L2_G2][], a2 [L2_G2][], a3 [L2_G2][], a4 [L2_G2][];
  int nin = 0, nout = 0, loaded = 0, cyc = 0, t_start = 0;

  typedef struct {
    int layer, eng, sel, addr, val;
  } ld_t;
  ld_t ldq [$];

  function automatic int rndw(input int w);
    return int'($urandom_range(2*w - 1)) - w;
  endfunction

  task automatic load(input int layer, input int e, input int sel, input int addr, input int val);
    @(negedge clk);
    ld_we = 1; ld_layer = layer[0]; ld_eng = 8'(e); ld_sel = 2'(sel);
    ld_addr = AW'(addr); ld_data = 8'(val);
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; cycles_stream = 0;
    ld_we = 0; ld_layer = 0; ld_eng = '0; ld_sel = '0; ld_addr = '0; ld_data = '0;
    for (int e = 0; e < L1_G1; e++) begin
      v1[e] = new[L1_R*CE1*K*K]; u1[e] = new[COE1*L1_R];
      foreach (v1[e][i]) v1[e][i] = rndw(8);
      foreach (u1[e][i]) u1[e][i] = rndw(16);
    end
    for (int e = 0; e < L2_G2; e++) begin
      a1[e] = new[COE2*L2_R]; a2[e] = new[CE2*L2_R]; a3[e] = new[K*L2_R]; a4[e] = new[K*L2_R];
      foreach (a1[e][i]) a1[e][i] = rndw(32);
      foreach (a2[e][i]) a2[e][i] = rndw(32);
      foreach (a3[e][i]) a3[e][i] = rndw(4);
      foreach (a4[e][i]) a4[e][i] = rndw(4);
    end
    // reference of the whole pipeline
    for (int f = 0; f < NF; f++) begin
      int m1 [];
      x[f] = new[FW];
      y[f] = new[FW];
      m1 = new[FW];
      foreach (x[f][i]) x[f][i] = rnd8();
      for (int e = 0; e < L1_G1; e++) begin
        int ye [];
        conv_ref::svd_conv(x[f], v1[e], u1[e], H, W, CE1, COE1, K, S, PAD, L1_R, SHIFT_V, SHIFT_U, ye);
        for (int p = 0; p < H*W; p++)
          for (int o = 0; o < COE1; o++)
            m1[p*C + e*COE1 + o] = (ye[p*COE1 + o] < 0) ? 0 : ye[p*COE1 + o];
      end
      for (int g = 0; g < L2_G2; g++) begin
        int xs [], ye [];
        xs = new[H*W*CE2];
        for (int p = 0; p < H*W; p++)
          for (int c = 0; c < CE2; c++) xs[p*CE2 + c] = m1[p*C + g*CE2 + c];
        conv_ref::cpd_conv(xs, a1[g], a2[g], a3[g], a4[g], H, W, CE2, COE2, K, S, PAD, L2_R,
                 SHIFT_2, SHIFT_3, SHIFT_4, SHIFT_1, ye);
        for (int i = 0; i < FW; i++) y[f][i] = (g == 0) ? ye[i] : sat8(y[f][i] + ye[i]);
      end
      for (int i = 0; i < FW; i++) if (y[f][i] < 0) y[f][i] = 0;
    end
    // Build the list of weight writes first, then issue it one word per
    // clock. Walking runtime-sized arrays keeps the issue loop compact.
    for (int e = 0; e < L1_G1; e++) begin
      foreach (v1[e][i]) begin
        int r, c, kh, kw;
        kw = i % K; kh = (i / K) % K; c = (i / (K*K)) % CE1; r = i / (K*K*CE1);
        ldq.push_back('{0, e, 0, r*CE1*K*K + ((c/P_IN_V)*K*K + kh*K + kw)*P_IN_V + c%P_IN_V, v1[e][i]});
      end
      foreach (u1[e][i]) ldq.push_back('{0, e, 1, i, u1[e][i]});
    end
    for (int e = 0; e < L2_G2; e++) begin
      foreach (a1[e][i]) ldq.push_back('{1, e, 0, i, a1[e][i]});
      foreach (a2[e][i]) ldq.push_back('{1, e, 1, (i % L2_R)*CE2 + i / L2_R, a2[e][i]});
      foreach (a3[e][i]) ldq.push_back('{1, e, 2, i, a3[e][i]});
      foreach (a4[e][i]) ldq.push_back('{1, e, 3, i, a4[e][i]});
    end
    wait (rst_n);
    foreach (ldq[k]) load(ldq[k].layer, ldq[k].eng, ldq[k].sel, ldq[k].addr, ldq[k].val);
    @(negedge clk);
    ld_we = 0;
    loaded = 1;
    t_start = cyc;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && s_axis_tvalid && s_axis_tready) nin++;
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      int f, n, e;
      f = nout / FW; n = nout % FW;
      // layer 2 has one output group: plain channel order
      e = y[f][n];
      checks++;
      if (int'(signed'(m_axis_tdata)) != e) begin
        failures++;
        if (failures < 5) $display("top frame %0d word %0d: %0d expected %0d", f, n,
                                   signed'(m_axis_tdata), e);
      end
      checks++;
      if (m_axis_tlast != (n == FW - 1)) begin
        failures++;
        if (failures < 5) $display("top frame %0d word %0d: tlast %0b", f, n, m_axis_tlast);
      end
      nout++;
      if (nout == NF*FW) begin
        cycles_stream = cyc - t_start;
        done = 1;
      end
    end
  end

  always @(negedge clk) begin
    s_axis_tvalid = (loaded != 0) && (nin < NF*FW) && (GAPS == 0 || $urandom_range(7) != 0);
    s_axis_tdata  = (loaded != 0 && nin < NF*FW) ? 8'(x[nin / FW][nin % FW]) : 8'h00;
    s_axis_tlast  = (nin % FW) == FW - 1;
    if (GAPS != 0) m_axis_tready = ($urandom_range(3) != 0);
    else           m_axis_tready = !(nout >= 10 && nout < 14 && cyc % 50 < 40);
  end
endmodule
