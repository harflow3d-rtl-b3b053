// tb_sliding_window: feeds random feature-maps (2 lanes) and checks every emitted window
// pixel by pixel against the padded input: for window n the pixel s depths, q columns and
// r rows before the newest must equal the input at the corresponding position (or the pad
// value). Three configurations: 3x3x3 pad 1 stride 1, 2x3x2 stride (2,1,2) without padding,
// 1x1x3 pad on depth only; random input gaps and output back-pressure.
module tb_sliding_window;
  import harflow_pkg::*;
  localparam int L = 2, KD = 3, KH = 3, KW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; shape_t shape; win_t win; data_t pad_value;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [L-1:0][DATA_W-1:0] in_data;
  logic [KD-1:0][KW-1:0][KH-1:0][L-1:0][DATA_W-1:0] out_data;
  sliding_window #(.LANES(L), .KD(KD), .KH(KH), .KW(KW), .W_MAX(10), .D_MAX(10), .CW_MAX(4)) dut (.*);

  int x [8][8][8][8];
  logic [L-1:0][DATA_W-1:0] in_q [$];

  function automatic int px(int h, int w, int d, int c, int H, int W, int D, int ph, int pw, int pd);
    int ih, iw, id;
    ih = h - ph; iw = w - pw; id = d - pd;
    if (ih < 0 || ih >= H || iw < 0 || iw >= W || id < 0 || id >= D) return int'(pad_value);
    return x[ih][iw][id][c];
  endfunction

  task automatic run_case(int H, int W, int D, int C, int kd, int kh, int kw, int jd, int jh,
                          int jw, int pd, int ph, int pw);
    int Ho, Wo, Do, n, total;
    Ho = (H + 2*ph - kh) / jh + 1; Wo = (W + 2*pw - kw) / jw + 1; Do = (D + 2*pd - kd) / jd + 1;
    total = Ho * Wo * Do * (C / L);
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int c = 0; c < C; c++) x[h][w][d][c] = int'($urandom_range(0, 30000)) - 15000;
    in_q.delete();
    for (int h = 0; h < H; h++) for (int w = 0; w < W; w++) for (int d = 0; d < D; d++)
      for (int cw = 0; cw < C/L; cw++) begin
        logic [L-1:0][DATA_W-1:0] b;
        for (int l = 0; l < L; l++) b[l] = DATA_W'(x[h][w][d][cw*L+l]);
        in_q.push_back(b);
      end
    shape = '{h: DIM_W'(H), w: DIM_W'(W), d: DIM_W'(D), c: DIM_W'(C)};
    win = '{kd: 4'(kd), kh: 4'(kh), kw: 4'(kw), jd: 3'(jd), jh: 3'(jh), jw: 3'(jw),
            pds: 3'(pd), pde: 3'(pd), phs: 3'(ph), phe: 3'(ph), pws: 3'(pw), pwe: 3'(pw)};
    pad_value = data_t'($urandom_range(0, 100));
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    n = 0;
    fork
      begin
        while (in_q.size() > 0) begin
          in_valid <= ($urandom_range(0, 3) != 0); in_data <= in_q[0]; @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin
        while (n < total) begin
          out_ready <= ($urandom_range(0, 3) != 0); @(posedge clk);
          if (out_valid && out_ready) begin
            int pos, cw, od, wo, ho;
            cw = n % (C/L); pos = n / (C/L);
            od = pos % Do; wo = (pos / Do) % Wo; ho = pos / (Do * Wo);
            for (int s = 0; s < kd; s++) for (int q = 0; q < kw; q++) for (int r = 0; r < kh; r++)
              for (int l = 0; l < L; l++) begin
                int e;
                e = px(ho*jh + kh-1-r, wo*jw + kw-1-q, od*jd + kd-1-s, cw*L+l, H, W, D, ph, pw, pd);
                checks++;
                if ($signed(out_data[s][q][r][l]) != e) begin
                  failures++;
                  if (failures < 10) $display("win %0d [%0d][%0d][%0d][%0d]: got %0d exp %0d", n, s, q, r, l, $signed(out_data[s][q][r][l]), e);
                end
              end
            n++;
          end
        end
        out_ready <= 0;
      end
    join
    repeat (20) @(posedge clk);
    checks++; if (out_valid) begin failures++; $display("extra window"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    run_case(4, 5, 4, 4, 3, 3, 3, 1, 1, 1, 1, 1, 1);
    run_case(5, 6, 6, 2, 2, 3, 2, 2, 1, 2, 0, 0, 0);
    run_case(3, 3, 4, 2, 3, 1, 1, 1, 1, 1, 1, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
