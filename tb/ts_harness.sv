// ts_harness: drives one td_stage instance. It preloads random weights,
// streams NV random input vectors in WCH-word beats and checks every output
// group against the stage's defining sum, evaluated here from the logical
// indices of the chosen mode:
//   INNER  y[o]     = q(sum_i W[o*NI+i] * x[i])
//   BLOCK  y[b*R+r] = q(sum_c W[r*NI+c] * x[(c/WP)*BK*WP + b*WP + c%WP])
//   DIAG   y[o]     = q(sum_i W[i*R+o%R] * x[i*L_OUT+o])
// The input is always offered. With RATE = 1 the output is always ready,
// and the spacing of consecutive vectors' first output groups must be the
// initiation interval (L_OUT/P_OUT)*(NI/P_IN) cycles; with RATE = 0 the
// output is rarely ready and the input must be seen to stall.
module ts_harness
  import mtd_pkg::*;
  import mtd_ref_pkg::*;
#(
  parameter stage_mode_e MODE = MODE_INNER,
  parameter int L_IN = 12, WCH = 4, NI = 12, L_OUT = 6, R = 6, BK = 1, WP = 1,
  parameter int P_IN = 4, P_OUT = 2, SHIFT = 3, NV = 12, RATE = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int WD  = (MODE == MODE_INNER) ? L_OUT*NI : R*NI;
  localparam int AW  = 16;
  localparam int NOG = L_OUT / P_OUT;
  localparam int II  = NOG * (NI / P_IN);

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data [WCH];
  word_t out_data [P_OUT];
  logic ld_we = 0;
  logic [AW-1:0] ld_addr = '0;
  word_t ld_data = '0;
  int wt [WD];
  int x [NV][L_IN];
  int nin = 0, ngrp = 0, cyc = 0, t_prev = -1, loaded = 0, stalls = 0;

  td_stage #(.MODE(MODE), .L_IN(L_IN), .WCH(WCH), .NI(NI), .L_OUT(L_OUT), .R(R),
             .BK(BK), .WP(WP), .P_IN(P_IN), .P_OUT(P_OUT), .SHIFT(SHIFT), .AW(AW)) dut (.*);

  function automatic int expect_out(input int v, input int o);
    longint acc = 0;
    for (int i = 0; i < NI; i++) begin
      unique case (MODE)
        MODE_INNER: acc += longint'(wt[o*NI + i]) * x[v][i];
        MODE_BLOCK: acc += longint'(wt[(o % R)*NI + i]) *
                           x[v][(i/WP)*BK*WP + (o/R)*WP + i%WP];
        default:    acc += longint'(wt[i*R + o % R]) * x[v][i*L_OUT + o];
      endcase
    end
    return q8(acc, SHIFT);
  endfunction

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int a = 0; a < WD; a++) wt[a] = rnd8();
    for (int v = 0; v < NV; v++) for (int i = 0; i < L_IN; i++) x[v][i] = rnd8();
    wait (rst_n);
    for (int a = 0; a < WD; a++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = AW'(a); ld_data = word_t'(wt[a]);
    end
    @(negedge clk);
    ld_we = 0;
    loaded = 1;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (in_valid && in_ready) nin++;
      if (in_valid && !in_ready) stalls++;
      if (out_valid && out_ready) begin
        int v, g;
        v = ngrp / NOG; g = ngrp % NOG;
        for (int m = 0; m < P_OUT; m++) begin
          int e;
          e = expect_out(v, g*P_OUT + m);
          checks++;
          if (int'(out_data[m]) != e) begin
            failures++;
            if (failures < 5) $display("stage mode %0d vec %0d out %0d: %0d expected %0d",
                                       MODE, v, g*P_OUT+m, out_data[m], e);
          end
        end
        if (RATE != 0 && g == 0) begin
          if (t_prev >= 0 && v >= 2) begin
            checks++;
            if (cyc - t_prev != II) begin
              failures++;
              $display("stage mode %0d: vector interval %0d cycles, expected %0d", MODE, cyc - t_prev, II);
            end
          end
          t_prev = cyc;
        end
        ngrp++;
        if (ngrp == NV*NOG) begin
          if (RATE == 0) begin
            checks++;
            if (stalls == 0) begin failures++; $display("input never stalled"); end
          end
          done = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    in_valid = loaded && (nin < NV*L_IN/WCH);
    for (int j = 0; j < WCH; j++)
      in_data[j] = word_t'(x[(nin*WCH/L_IN) % NV][(nin*WCH + j) % L_IN]);
    out_ready = (RATE != 0) || ($urandom_range(4) == 0);
  end
endmodule
