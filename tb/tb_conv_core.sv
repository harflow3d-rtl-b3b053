// tb_conv_core: drives conv_core directly (2 lanes, 4 kernel slots, 2 multipliers per lane,
// so 2 folds) with random windows, weights and partial sums, and compares every output word
// with a reference dot product. Kernel size 3 < 4 slots with random data in the unused slot
// and random weights beyond the kernel checks the runtime bypass. Cases: standard with
// psum, standard without psum (more filter groups), depth-wise with psum.
module tb_conv_core;
  import harflow_pkg::*;
  localparam int L = 2, KMAX = 4, FINE = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic go = 0; logic [31:0] n_win; logic [DIM_W-1:0] cw_n, fg_n; logic [8:0] ksize;
  logic [7:0] folds; logic [1:0] map [KMAX]; logic depthwise, use_psum;
  logic win_valid = 0, win_ready, wt_valid = 0, wt_ready, ps_valid = 0, ps_ready;
  logic out_valid, out_ready = 0, done;
  logic [KMAX-1:0][L-1:0][DATA_W-1:0] win_data;
  logic [L-1:0][DATA_W-1:0] wt_data, ps_data, out_data;
  conv_core #(.LANES(L), .FINE(FINE), .KMAX(KMAX), .CW_MAX(4), .FG_MAX(4)) dut (.*);

  typedef logic [KMAX-1:0][L-1:0][DATA_W-1:0] win_t2;
  typedef logic [L-1:0][DATA_W-1:0] word_t;
  win_t2 wq [$]; word_t tq [$], pq [$], eq [$];
  int done_seen;

  function automatic int rnd(int m); return int'($urandom_range(0, 2*m)) - m; endfunction

  task automatic run_case(int NW, int CW, int FG, int KS, bit dw, bit ps);
    int w [4][4][2][2][2];   // [cw][fg][fold][o][i] -> lanes packed below
    word_t wb [4][4][2][2][2];
    win_t2 wins [16][4];
    word_t psw [16][4];
    int nout;
    wq.delete(); tq.delete(); pq.delete(); eq.delete();
    for (int cw = 0; cw < CW; cw++) for (int fg = 0; fg < FG; fg++) for (int f = 0; f < 2; f++)
      for (int o = 0; o < L; o++) for (int i = 0; i < FINE; i++) begin
        for (int l = 0; l < L; l++) wb[cw][fg][f][o][i][l] = DATA_W'(rnd(400));
        tq.push_back(wb[cw][fg][f][o][i]);
      end
    for (int n = 0; n < NW; n++) for (int cw = 0; cw < CW; cw++) begin
      for (int e = 0; e < KMAX; e++) for (int l = 0; l < L; l++) wins[n][cw][e][l] = DATA_W'(rnd(2000));
      wq.push_back(wins[n][cw]);
    end
    nout = NW * (dw ? CW : FG);
    for (int n = 0; n < NW; n++) for (int g = 0; g < (dw ? CW : FG); g++) begin
      word_t e;
      for (int l = 0; l < L; l++) psw[n][g][l] = DATA_W'(rnd(3000));
      if (ps) pq.push_back(psw[n][g]);
      for (int o = 0; o < L; o++) begin
        longint acc = 0;
        for (int k = 0; k < KS; k++) begin
          int f, i;
          f = k / FINE; i = k % FINE;
          if (dw)
            acc += longint'($signed(wins[n][g][k][o])) * $signed(wb[g][0][f][o][i][o]);
          else
            for (int cw = 0; cw < CW; cw++) for (int l = 0; l < L; l++)
              acc += longint'($signed(wins[n][cw][k][l])) * $signed(wb[cw][g][f][o][i][l]);
        end
        acc = (acc >>> FRAC_W) + (ps ? longint'($signed(psw[n][g][o])) : 0);
        if (acc > 32767) acc = 32767;
        if (acc < -32768) acc = -32768;
        e[o] = DATA_W'(acc);
      end
      eq.push_back(e);
    end
    n_win = NW; cw_n = CW; fg_n = dw ? 1 : FG; ksize = KS; folds = (KS + FINE - 1) / FINE;
    depthwise = dw; use_psum = ps;
    for (int e = 0; e < KMAX; e++) map[e] = 2'(e);
    done_seen = 0;
    @(posedge clk); go <= 1; @(posedge clk); go <= 0;
    fork
      while (tq.size() > 0) begin
        wt_valid <= ($urandom_range(0, 3) != 0); wt_data <= tq[0]; @(posedge clk);
        if (wt_valid && wt_ready) void'(tq.pop_front());
      end
      while (wq.size() > 0) begin
        win_valid <= ($urandom_range(0, 3) != 0); win_data <= wq[0]; @(posedge clk);
        if (win_valid && win_ready) void'(wq.pop_front());
      end
      while (pq.size() > 0) begin
        ps_valid <= ($urandom_range(0, 2) != 0); ps_data <= pq[0]; @(posedge clk);
        if (ps_valid && ps_ready) void'(pq.pop_front());
      end
      while (eq.size() > 0) begin
        out_ready <= ($urandom_range(0, 3) != 0); @(posedge clk);
        if (done) done_seen++;
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != eq[0]) begin
            failures++;
            if (failures < 10) $display("out: got %h exp %h", out_data, eq[0]);
          end
          void'(eq.pop_front());
        end
      end
    join
    wt_valid <= 0; win_valid <= 0; ps_valid <= 0; out_ready <= 0;
    repeat (5) begin @(posedge clk); if (done) done_seen++; end
    checks++; if (done_seen != 1) begin failures++; $display("done pulses %0d", done_seen); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    run_case(6, 2, 2, 3, 0, 1);
    run_case(5, 3, 4, 4, 0, 0);
    run_case(7, 4, 1, 3, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
