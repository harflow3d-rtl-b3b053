// tb_conv_param_ctrl: checks the derived limits (output windows, channel words, filter
// groups, kernel size, folds) and every map-table entry for three configurations (3x3x3
// pad 1, 1x3x3 stride 2, 2x1x1 depth-wise), and that 'go' follows start after one cycle per
// kernel element plus one.
module tb_conv_param_ctrl;
  import harflow_pkg::*;
  localparam int KD = 3, KH = 3, KW = 3, FINE = 4, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; shape_t shape; win_t win; logic [DIM_W-1:0] filters; logic depthwise;
  shape_t shape_q; win_t win_q; logic depthwise_q;
  logic [31:0] n_win; logic [DIM_W-1:0] cw_n, fg_n; logic [8:0] ksize; logic [7:0] folds;
  logic [4:0] map [27];
  logic go;
  conv_param_ctrl #(.LANES(L), .KD(KD), .KH(KH), .KW(KW), .FINE(FINE)) dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic run_case(int H, int W, int D, int C, int F, int kd, int kh, int kw,
                          int jd, int jh, int jw, int p, bit dw);
    int cyc, ksz;
    shape = '{h: DIM_W'(H), w: DIM_W'(W), d: DIM_W'(D), c: DIM_W'(C)};
    win = '{kd: 4'(kd), kh: 4'(kh), kw: 4'(kw), jd: 3'(jd), jh: 3'(jh), jw: 3'(jw),
            pds: 3'(p), pde: 3'(p), phs: 3'(p), phe: 3'(p), pws: 3'(p), pwe: 3'(p)};
    filters = DIM_W'(F); depthwise = dw;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    cyc = 0;
    while (!go) begin @(posedge clk); cyc++; end
    ksz = kd*kh*kw;
    chk(cyc, ksz + 1, "cycles to go");
    chk(int'(n_win), ((H+2*p-kh)/jh+1) * ((W+2*p-kw)/jw+1) * ((D+2*p-kd)/jd+1), "n_win");
    chk(int'(cw_n), C / L, "cw_n");
    chk(int'(fg_n), dw ? 1 : F / L, "fg_n");
    chk(int'(ksize), ksz, "ksize");
    chk(int'(folds), (ksz + FINE - 1) / FINE, "folds");
    for (int b = 0; b < kh; b++) for (int e = 0; e < kw; e++) for (int a = 0; a < kd; a++)
      chk(int'(map[(b*kw + e)*kd + a]), ((kd-1-a)*KW + (kw-1-e))*KH + (kh-1-b), "map");
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    run_case(8, 8, 4, 6, 8, 3, 3, 3, 1, 1, 1, 1, 0);
    run_case(9, 7, 3, 4, 4, 1, 3, 3, 1, 2, 2, 0, 0);
    run_case(4, 4, 6, 8, 8, 2, 1, 1, 2, 1, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
