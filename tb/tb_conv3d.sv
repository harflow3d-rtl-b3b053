// tb_conv3d: self-checking test of the convolution node. Small compile-time sizes
// (2 lanes, kernel up to 3x3x3, 4 multipliers per lane pair so that a 27-element kernel
// needs 7 folds with one multiplier bypassed in the last). Four invocations of the same
// node with different runtime parameters: a full 3x3x3 convolution with padding, a
// spatial 1x3x3 convolution with stride 2, a depth-wise temporal 3x1x1 convolution with
// partial-sum input, and a point-wise 1x1x1 convolution. Expected outputs come from a
// direct loop-nest convolution in the testbench. Input, weight and psum streams have
// random gaps and the output random back-pressure. Each run's cycle count is checked
// against the n_win*cw*fg*folds compute bound.
module tb_conv3d;
  import harflow_pkg::*;
  localparam int L = 2, KD = 3, KH = 3, KW = 3, FINE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic start = 0;
  shape_t shape; win_t win;
  logic [DIM_W-1:0] filters; logic depthwise, use_psum;
  logic in_valid = 0, in_ready, wt_valid = 0, wt_ready, ps_valid = 0, ps_ready;
  logic out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, wt_data, ps_data, out_data;

  conv3d #(.LANES(L), .KD(KD), .KH(KH), .KW(KW), .FINE(FINE),
           .W_MAX(8), .D_MAX(8), .CW_MAX(4), .FG_MAX(4)) dut (.*);

  // test data
  int x [8][8][8][8];          // [h][w][d][c]
  int wt [8][8][3][3][3];      // [f][c][kd][kh][kw]
  int ps [512][8];
  int expv [4096];
  int nexp, ngot, nin_words, nwt_beats, nps;
  logic [L-1:0][DATA_W-1:0] wt_q [$];
  logic [L-1:0][DATA_W-1:0] in_q [$];
  logic [L-1:0][DATA_W-1:0] ps_q [$];

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run_case(int H, int W, int D, int C, int F, int kd, int kh, int kw,
                          int jd, int jh, int jw, int pd, int ph, int pw, bit dw, bit psm,
                          string name);
    int Ho, Wo, Do, ksz, folds, cwn, fgn, t0, cyc, nwin, bound;
    Ho = (H + 2*ph - kh) / jh + 1; Wo = (W + 2*pw - kw) / jw + 1; Do = (D + 2*pd - kd) / jd + 1;
    ksz = kd*kh*kw; folds = (ksz + FINE - 1) / FINE; cwn = C / L; fgn = dw ? 1 : F / L;
    if (dw) F = C;
    // random data
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) x[h][w][d][c] = int'($urandom_range(0, 1023)) - 512;
    for (int f = 0; f < F; f++) for (int c = 0; c < C; c++)
      for (int a = 0; a < kd; a++) for (int b = 0; b < kh; b++) for (int e = 0; e < kw; e++)
        wt[f][c][a][b][e] = int'($urandom_range(0, 255)) - 128;
    // expected output, order (ho, wo, do, f)
    nexp = 0; nps = 0;
    for (int ho = 0; ho < Ho; ho++) for (int wo = 0; wo < Wo; wo++) for (int od = 0; od < Do; od++)
      for (int f = 0; f < F; f++) begin
        longint acc = 0;
        int p;
        for (int c = 0; c < C; c++) begin
          if (dw && c != f) continue;
          for (int a = 0; a < kd; a++) for (int b = 0; b < kh; b++) for (int e = 0; e < kw; e++) begin
            int ih, iw, id;
            ih = ho*jh + b - ph; iw = wo*jw + e - pw; id = od*jd + a - pd;
            if (ih >= 0 && ih < H && iw >= 0 && iw < W && id >= 0 && id < D)
              acc += longint'(x[ih][iw][id][c]) * longint'(wt[f][c][a][b][e]);
          end
        end
        p = psm ? int'($urandom_range(0, 2047)) - 1024 : 0;
        ps[nexp / L][nexp % L] = p;
        expv[nexp++] = sat((acc >>> FRAC_W) + p);
      end
    // streams
    wt_q.delete(); in_q.delete(); ps_q.delete();
    for (int cw = 0; cw < cwn; cw++) for (int fg = 0; fg < fgn; fg++)
      for (int fo = 0; fo < folds; fo++) for (int o = 0; o < L; o++) for (int i = 0; i < FINE; i++) begin
        logic [L-1:0][DATA_W-1:0] bt;
        int e, f, a, b, ee;
        e = fo*FINE + i; f = dw ? cw*L + o : fg*L + o;
        a = e % kd; ee = (e / kd) % kw; b = e / (kd*kw);
        for (int l = 0; l < L; l++)
          bt[l] = (e < ksz && (!dw || l == o)) ? DATA_W'(wt[f][cw*L+l][a][b][ee]) : '0;
        wt_q.push_back(bt);
      end
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int cw = 0; cw < cwn; cw++) begin
        logic [L-1:0][DATA_W-1:0] bt;
        for (int l = 0; l < L; l++) bt[l] = DATA_W'(x[h][w][d][cw*L+l]);
        in_q.push_back(bt);
      end
    if (psm) for (int k = 0; k < nexp / L; k++) begin
      logic [L-1:0][DATA_W-1:0] bt;
      for (int l = 0; l < L; l++) bt[l] = DATA_W'(ps[k][l]);
      ps_q.push_back(bt);
    end
    // configure and start
    shape = '{h: DIM_W'(H), w: DIM_W'(W), d: DIM_W'(D), c: DIM_W'(C)};
    win = '{kd: 4'(kd), kh: 4'(kh), kw: 4'(kw), jd: 3'(jd), jh: 3'(jh), jw: 3'(jw),
            pds: 3'(pd), pde: 3'(pd), phs: 3'(ph), phe: 3'(ph), pws: 3'(pw), pwe: 3'(pw)};
    filters = DIM_W'(F); depthwise = dw; use_psum = psm;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10; ngot = 0;
    fork
      begin : drive_wt
        while (wt_q.size() > 0) begin
          wt_valid <= ($urandom_range(0, 3) != 0); wt_data <= wt_q[0];
          @(posedge clk);
          if (wt_valid && wt_ready) void'(wt_q.pop_front());
        end
        wt_valid <= 0;
      end
      begin : drive_in
        while (in_q.size() > 0) begin
          in_valid <= ($urandom_range(0, 3) != 0); in_data <= in_q[0];
          @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin : drive_ps
        while (ps_q.size() > 0) begin
          ps_valid <= ($urandom_range(0, 3) != 0); ps_data <= ps_q[0];
          @(posedge clk);
          if (ps_valid && ps_ready) void'(ps_q.pop_front());
        end
        ps_valid <= 0;
      end
      begin : collect
        while (!done) begin
          out_ready <= ($urandom_range(0, 4) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            for (int l = 0; l < L; l++) begin
              checks++;
              if ($signed(out_data[l]) != expv[ngot]) begin
                failures++;
                if (failures < 10) $display("%s: word %0d got %0d exp %0d", name, ngot,
                                            $signed(out_data[l]), expv[ngot]);
              end
              ngot++;
            end
          end
        end
        out_ready <= 0;
      end
    join
    cyc = $time / 10 - t0;
    nwin = Ho * Wo * Do;
    bound = nwin * cwn * fgn * folds;
    checks++;
    if (ngot != nexp) begin
      failures++; $display("%s: got %0d words, expected %0d", name, ngot, nexp);
    end
    checks++;
    if (cyc < bound || cyc > 3 * (bound + nwt_beats_f(cwn, fgn, folds) + H*W*D*cwn) + 200) begin
      failures++; $display("%s: %0d cycles outside bound %0d", name, cyc, bound);
    end
    $display("%s: %0d outputs, %0d cycles (compute bound %0d)", name, ngot, cyc, bound);
  endtask

  function automatic int nwt_beats_f(int cwn, int fgn, int folds);
    return cwn * fgn * folds * L * FINE;
  endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(4, 5, 3, 4, 4, 3, 3, 3, 1, 1, 1, 1, 1, 1, 0, 0, "full3x3x3");
    run_case(6, 7, 2, 2, 4, 1, 3, 3, 1, 2, 2, 0, 1, 1, 0, 0, "spatial1x3x3_s2");
    run_case(3, 3, 5, 4, 4, 3, 1, 1, 1, 1, 1, 1, 0, 0, 1, 1, "depthwise3x1x1_psum");
    run_case(2, 3, 2, 4, 2, 1, 1, 1, 1, 1, 1, 0, 0, 0, 0, 0, "pointwise");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
