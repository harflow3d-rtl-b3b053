// tb_pool3d: self-checking test of the pooling node (2 lanes, kernel up to 3x3x3).
// Runs max pooling 2x2x2 stride 2, max pooling 1x3x3 stride (1,2,2) with padding 1, and
// average pooling 3x3x3 with padding 1, and max pooling 3x3x3 stride 2 with padding on
// all-negative data (so the border value matters), against a loop-nest reference
// (padding counts as -32768 for max and 0 for average; the average divides by the kernel
// size and truncates toward zero). Random input gaps and output back-pressure; the cycle
// count is checked to be within a small factor of the input size.
module tb_pool3d;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; shape_t shape; win_t win; pool_e ptype;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, out_data;

  pool3d #(.LANES(L), .KD(3), .KH(3), .KW(3), .W_MAX(8), .D_MAX(8), .CW_MAX(4)) dut (.*);

  int x [8][8][8][8];
  int expv [4096];
  int nexp, ngot;
  logic [L-1:0][DATA_W-1:0] in_q [$];

  int bias = 0;   // shifts the input range; 2000 makes every value negative
  task automatic run_case(int H, int W, int D, int C, int kd, int kh, int kw, int jd, int jh,
                          int jw, int pd, int ph, int pw, pool_e t, string name);
    int Ho, Wo, Do, t0, cyc;
    Ho = (H + 2*ph - kh) / jh + 1; Wo = (W + 2*pw - kw) / jw + 1; Do = (D + 2*pd - kd) / jd + 1;
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) x[h][w][d][c] = int'($urandom_range(0, 4000)) - 2000 - bias;
    nexp = 0;
    for (int ho = 0; ho < Ho; ho++) for (int wo = 0; wo < Wo; wo++) for (int od = 0; od < Do; od++)
      for (int c = 0; c < C; c++) begin
        int m, s, v;
        m = -32768; s = 0;
        for (int a = 0; a < kd; a++) for (int b = 0; b < kh; b++) for (int e = 0; e < kw; e++) begin
          int ih, iw, id;
          ih = ho*jh + b - ph; iw = wo*jw + e - pw; id = od*jd + a - pd;
          if (ih >= 0 && ih < H && iw >= 0 && iw < W && id >= 0 && id < D) v = x[ih][iw][id][c];
          else v = (t == POOL_MAX) ? -32768 : 0;
          if (v > m) m = v;
          s += v;
        end
        expv[nexp++] = (t == POOL_MAX) ? m : s / (kd*kh*kw);
      end
    in_q.delete();
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int cw = 0; cw < C/L; cw++) begin
        logic [L-1:0][DATA_W-1:0] bt;
        for (int l = 0; l < L; l++) bt[l] = DATA_W'(x[h][w][d][cw*L+l]);
        in_q.push_back(bt);
      end
    shape = '{h: DIM_W'(H), w: DIM_W'(W), d: DIM_W'(D), c: DIM_W'(C)};
    win = '{kd: 4'(kd), kh: 4'(kh), kw: 4'(kw), jd: 3'(jd), jh: 3'(jh), jw: 3'(jw),
            pds: 3'(pd), pde: 3'(pd), phs: 3'(ph), phe: 3'(ph), pws: 3'(pw), pwe: 3'(pw)};
    ptype = t;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10; ngot = 0;
    fork
      begin
        while (in_q.size() > 0) begin
          in_valid <= ($urandom_range(0, 3) != 0); in_data <= in_q[0];
          @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin
        while (!done) begin
          out_ready <= ($urandom_range(0, 4) != 0);
          @(posedge clk);
          if (out_valid && out_ready)
            for (int l = 0; l < L; l++) begin
              checks++;
              if ($signed(out_data[l]) != expv[ngot]) begin
                failures++;
                if (failures < 10) $display("%s: word %0d got %0d exp %0d", name, ngot, $signed(out_data[l]), expv[ngot]);
              end
              ngot++;
            end
        end
        out_ready <= 0;
      end
    join
    cyc = $time / 10 - t0;
    checks++; if (ngot != nexp) begin failures++; $display("%s: count %0d/%0d", name, ngot, nexp); end
    checks++; if (cyc > 4 * (H+2*ph)*(W+2*pw)*(D+2*pd)*C/L + 50) begin failures++; $display("%s: slow %0d", name, cyc); end
    $display("%s: %0d outputs in %0d cycles", name, ngot, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(4, 6, 4, 4, 2, 2, 2, 2, 2, 2, 0, 0, 0, POOL_MAX, "max2x2x2");
    run_case(5, 6, 3, 2, 1, 3, 3, 1, 2, 2, 0, 1, 1, POOL_MAX, "max1x3x3_pad");
    run_case(3, 4, 3, 4, 3, 3, 3, 1, 1, 1, 1, 1, 1, POOL_AVG, "avg3x3x3_pad");
    bias = 2000;
    run_case(3, 3, 3, 2, 3, 3, 3, 2, 2, 2, 1, 1, 1, POOL_MAX, "max3x3x3_pad_negative");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
