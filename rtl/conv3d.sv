// conv3d: the runtime-parameterised 3D convolution node (CONV).
// parameter controller -> sliding window -> conv_core. One node executes full
// (Kd x Kh x Kw), spatial (1 x Kh x Kw), temporal (Kd x 1 x 1), point-wise (1 x 1 x 1)
// and depth-wise convolutions, with feature-map shape, kernel, stride, padding, filter
// count, depth-wise mode and partial-sum accumulation all chosen per invocation; the
// compile-time parameters fix the maxima (kernel KD x KH x KW, padded width W_MAX and depth
// D_MAX, CW_MAX channel words, FG_MAX filter groups) and the parallelism: LANES input and
// output streams (c_in = c_out) and FINE multipliers per stream pair (f), i.e.
// LANES*LANES*FINE DSPs.
// Interface: 'start' latches shape/win/filters/depthwise/use_psum; the node then reads
// its weights from wt_*, then the input feature-map (H, W, D, C order) from in_*, and
// writes the output feature-map (Hout, Wout, Dout, F order) to out_*, reading one psum
// word per output word when use_psum is set. 'done' pulses after the last output word.
// Padding inserts zeros. The default sizes are this design's (the paper leaves them to
// its optimiser); the kernel maximum 5x7x7 covers the models the paper evaluates.
module conv3d
  import harflow_pkg::*;
#(
  parameter int LANES  = 1,
  parameter int KD     = 5,
  parameter int KH     = 7,
  parameter int KW     = 7,
  parameter int FINE   = 35,
  parameter int W_MAX  = 32,
  parameter int D_MAX  = 16,
  parameter int CW_MAX = 64,
  parameter int FG_MAX = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  shape_t                       shape,
  input  win_t                         win,
  input  logic [DIM_W-1:0]             filters,
  input  logic                         depthwise,
  input  logic                         use_psum,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  input  logic                         wt_valid,
  output logic                         wt_ready,
  input  logic [LANES-1:0][DATA_W-1:0] wt_data,
  input  logic                         ps_valid,
  output logic                         ps_ready,
  input  logic [LANES-1:0][DATA_W-1:0] ps_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                         done
);
  localparam int KMAX = KD * KH * KW;
  localparam int IW   = (KMAX > 1) ? $clog2(KMAX) : 1;

  shape_t           shape_q;
  win_t             win_q;
  logic             dw_q, psum_q, go;
  logic [31:0]      n_win;
  logic [DIM_W-1:0] cw_n, fg_n;
  logic [8:0]       ksize;
  logic [7:0]       folds;
  logic [IW-1:0]    map [KMAX];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) psum_q <= 1'b0;
    else if (start) psum_q <= use_psum;

  conv_param_ctrl #(.LANES(LANES), .KD(KD), .KH(KH), .KW(KW), .FINE(FINE)) u_ctrl (
    .clk, .rst_n, .start, .shape, .win, .filters, .depthwise,
    .shape_q, .win_q, .depthwise_q(dw_q), .n_win, .cw_n, .fg_n, .ksize, .folds, .map, .go
  );

  logic                                         w_valid, w_ready;
  logic [KD-1:0][KW-1:0][KH-1:0][LANES-1:0][DATA_W-1:0] w_data;

  sliding_window #(.LANES(LANES), .KD(KD), .KH(KH), .KW(KW),
                   .W_MAX(W_MAX), .D_MAX(D_MAX), .CW_MAX(CW_MAX)) u_sw (
    .clk, .rst_n, .start(go), .shape(shape_q), .win(win_q), .pad_value('0),
    .in_valid, .in_ready, .in_data,
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  conv_core #(.LANES(LANES), .FINE(FINE), .KMAX(KMAX), .CW_MAX(CW_MAX),
              .FG_MAX(FG_MAX), .IW(IW)) u_core (
    .clk, .rst_n, .go, .n_win, .cw_n, .fg_n, .ksize, .folds, .map,
    .depthwise(dw_q), .use_psum(psum_q),
    .win_valid(w_valid), .win_ready(w_ready), .win_data(w_data),
    .wt_valid, .wt_ready, .wt_data, .ps_valid, .ps_ready, .ps_data,
    .out_valid, .out_ready, .out_data, .done
  );
endmodule
