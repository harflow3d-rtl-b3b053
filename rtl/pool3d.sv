// pool3d: the 3D pooling node (POOL), max or average chosen at runtime.
// parameter controller -> sliding window -> reduction. For every window the node reduces the
// Kd*Kh*Kw pixels of the runtime kernel per lane: the maximum, or the sum divided by
// Kd*Kh*Kw (padded pixels count, and are zero for average and -32768 for max pooling).
// Kernel, stride, padding and shape are runtime; KD x KH x KW, W_MAX, D_MAX and CW_MAX are
// the compile-time maxima. One window per cycle is reduced (combinationally, registered at
// the output), so a layer takes about |S_in|/LANES cycles, the paper's L_Pool = |S_in|/c.
// 'start' latches the configuration; 'done' pulses after the last output word
// (Hout*Wout*Dout*C/LANES words). The reduction and pad values are this design's.
module pool3d
  import harflow_pkg::*;
#(
  parameter int LANES  = 1,
  parameter int KD     = 3,
  parameter int KH     = 3,
  parameter int KW     = 3,
  parameter int W_MAX  = 32,
  parameter int D_MAX  = 16,
  parameter int CW_MAX = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  shape_t                       shape,
  input  win_t                         win,
  input  pool_e                        ptype,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                         done
);
  localparam int KMAX = KD * KH * KW;
  localparam int IW   = (KMAX > 1) ? $clog2(KMAX) : 1;

  shape_t           shape_q;
  win_t             win_q;
  pool_e            ptype_q;
  logic             go, dw_unused;
  logic [31:0]      n_win, out_total, out_cnt;
  logic [DIM_W-1:0] cw_n, fg_unused;
  logic [8:0]       ksize;
  logic [7:0]       folds_unused;
  logic [IW-1:0]    map_unused [KMAX];
  logic             run;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ptype_q <= POOL_MAX;
    else if (start) ptype_q <= ptype;

  conv_param_ctrl #(.LANES(LANES), .KD(KD), .KH(KH), .KW(KW), .FINE(1)) u_ctrl (
    .clk, .rst_n, .start, .shape, .win, .filters(DIM_W'(0)), .depthwise(1'b0),
    .shape_q, .win_q, .depthwise_q(dw_unused), .n_win, .cw_n, .fg_n(fg_unused), .ksize,
    .folds(folds_unused), .map(map_unused), .go
  );

  logic w_valid, w_ready;
  logic [KD-1:0][KW-1:0][KH-1:0][LANES-1:0][DATA_W-1:0] w_data;

  sliding_window #(.LANES(LANES), .KD(KD), .KH(KH), .KW(KW),
                   .W_MAX(W_MAX), .D_MAX(D_MAX), .CW_MAX(CW_MAX)) u_sw (
    .clk, .rst_n, .start(go), .shape(shape_q), .win(win_q),
    .pad_value(ptype_q == POOL_MAX ? data_t'(16'sh8000) : data_t'(0)),
    .in_valid, .in_ready, .in_data,
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  data_t red [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc_t  s;
      data_t m;
      s = '0; m = data_t'(16'sh8000);
      for (int a = 0; a < KD; a++)
        for (int q = 0; q < KW; q++)
          for (int r = 0; r < KH; r++)
            if (a < int'(win_q.kd) && q < int'(win_q.kw) && r < int'(win_q.kh)) begin
              s = s + acc_t'($signed(w_data[a][q][r][l]));
              if ($signed(w_data[a][q][r][l]) > m) m = w_data[a][q][r][l];
            end
      red[l] = (ptype_q == POOL_MAX) ? m : sat16(s / acc_t'(ksize));
    end
  end

  assign w_ready   = run && (!out_valid || out_ready);
  assign out_total = n_win * 32'(cw_n);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_cnt <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        run <= 1'b1; out_cnt <= '0;
      end
      if (w_valid && w_ready) begin
        out_valid <= 1'b1;
        for (int l = 0; l < LANES; l++) out_data[l] <= red[l];
      end else if (out_ready) out_valid <= 1'b0;
      if (out_valid && out_ready) begin
        out_cnt <= out_cnt + 1;
        if (out_cnt == out_total - 1) begin
          run <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
