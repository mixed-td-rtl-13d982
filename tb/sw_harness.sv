// sw_harness: drives one sliding_window instance with NF random frames and
// checks every emitted window against windows cut from the stored frames
// (zero outside the map). Input is always offered when FREE = 1, otherwise
// with random gaps; the output side applies random back-pressure. With
// FREE = 1 it also checks that the first two rows are accepted at one beat
// per cycle. Results are reported through checks/failures/done.
module sw_harness
  import mtd_pkg::*;
  import mtd_ref_pkg::*;
#(
  parameter int H = 5, W = 6, C = 4, K = 3, S = 1, PAD = 1, P = 2, NF = 2, FREE = 0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int HO = (H + 2*PAD - K)/S + 1;
  localparam int WO = (W + 2*PAD - K)/S + 1;
  localparam int NB = H*W*C/P;          // input beats per frame
  localparam int NW = HO*WO*(C/P);      // windows per frame

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data [P];
  word_t out_data [K*K*P];
  int frame [NF][H*W*C];
  int nin = 0, nout = 0, t0 = -1, t1 = -1, cyc = 0;

  sliding_window #(.H(H), .W(W), .C(C), .K(K), .S(S), .PAD(PAD), .P(P)) dut (.*);

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int f = 0; f < NF; f++) for (int i = 0; i < H*W*C; i++) frame[f][i] = rnd8();
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        if (nin == 0) t0 = cyc;
        if (nin == 2*W*C/P - 1) t1 = cyc;
        nin++;
      end
      if (out_valid && out_ready) begin
        int f, n, oy, ox, cb;
        f  = nout / NW; n = nout % NW;
        cb = n % (C/P); ox = (n / (C/P)) % WO; oy = n / ((C/P)*WO);
        for (int kh = 0; kh < K; kh++)
          for (int kw = 0; kw < K; kw++)
            for (int j = 0; j < P; j++) begin
              int e;
              e = (oy*S-PAD+kh < 0 || oy*S-PAD+kh >= H || ox*S-PAD+kw < 0 || ox*S-PAD+kw >= W) ? 0 :
                  frame[f][((oy*S-PAD+kh)*W + ox*S-PAD+kw)*C + cb*P+j];
              checks++;
              if (int'(out_data[(kh*K+kw)*P+j]) != e) begin
                failures++;
                if (failures < 5)
                  $display("sw(H%0d S%0d) frame %0d win (%0d,%0d,%0d) k(%0d,%0d,%0d): %0d expected %0d",
                           H, S, f, oy, ox, cb, kh, kw, j, out_data[(kh*K+kw)*P+j], e);
              end
            end
        nout++;
        if (nout == NF*NW) begin
          if (FREE) begin
            checks++;
            if (t1 - t0 != 2*W*C/P - 1) begin
              failures++;
              $display("first two rows took %0d cycles for %0d beats", t1 - t0 + 1, 2*W*C/P);
            end
          end
          done = 1;
        end
      end
    end
  end

  always @(negedge clk) begin
    in_valid  = rst_n && (nin < NF*NB) && (FREE != 0 || $urandom_range(3) != 0);
    for (int j = 0; j < P; j++)
      in_data[j] = word_t'(frame[(nin / NB) % NF][((nin % NB)*P + j) % (H*W*C)]);
    out_ready = (FREE != 0 && cyc < 30) ? 1'b0 : ($urandom_range(3) != 0);
  end
endmodule
