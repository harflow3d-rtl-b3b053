// sliding_window: turns a feature-map stream (H, W, D, C order, channel words fastest)
// into 3D windows of up to KD x KH x KW pixels, with the kernel size, stride, padding and
// feature-map shape all set at runtime.
// Structure (after the paper's sliding-window resource model): the padded stream passes a
// cascade of three circular buffers whose lengths are runtime counters -
//   row buffer    : Wp*Dp*CW entries of (KH-1) pixel words  (the line buffers),
//   column buffer : Dp*CW    entries of KH*(KW-1) words,
//   depth buffer  : CW       entries of KH*KW*(KD-1) words,
// so that with each incoming padded word the full window whose newest corner is that word
// is available. A window is emitted when the word's row, column and depth are at least the
// kernel size minus one and on the stride grid. Runtime kernels smaller than the compile-
// time maximum use the newest entries only; the consumer masks the rest.
// Output layout win_data[s][q][r][lane]: the pixel s depths, q columns and r rows before the
// newest one. Sizes W_MAX and D_MAX bound the padded width and depth, CW_MAX the number
// of channel words (C / LANES). One padded word is taken per cycle when the output is free;
// the output register holds one window (valid/ready). The runtime shape and window are
// latched on 'start'. The padded-stream formulation and memory layout are this design's.
module sliding_window
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
  input  data_t                        pad_value,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [KD-1:0][KW-1:0][KH-1:0][LANES-1:0][DATA_W-1:0] out_data
);
  typedef logic [LANES-1:0][DATA_W-1:0] word_t;

  shape_t           s_q;
  win_t             w_q;
  data_t            pad_q;
  logic [DIM_W-1:0] hp, wp, dp, cw;
  logic [31:0]      len_r, len_c;

  assign hp = s_q.h + DIM_W'(w_q.phs) + DIM_W'(w_q.phe);
  assign wp = s_q.w + DIM_W'(w_q.pws) + DIM_W'(w_q.pwe);
  assign dp = s_q.d + DIM_W'(w_q.pds) + DIM_W'(w_q.pde);
  assign cw = s_q.c / DIM_W'(LANES);
  assign len_r = 32'(wp) * 32'(dp) * 32'(cw);
  assign len_c = 32'(dp) * 32'(cw);

  logic go;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; w_q <= '0; pad_q <= '0; go <= 1'b0;
    end else begin
      go <= start;
      if (start) begin
        s_q <= shape; w_q <= win; pad_q <= pad_value;
      end
    end
  end

  // padded stream
  logic  p_valid, p_ready;
  word_t p_data;
  fm_pad #(.LANES(LANES)) u_pad (
    .clk, .rst_n, .start(go),
    .hp, .wp, .dp, .cw,
    .phs(w_q.phs), .pws(w_q.pws), .pds(w_q.pds),
    .h(s_q.h), .w(s_q.w), .d(s_q.d),
    .pad_value(pad_q),
    .in_valid, .in_ready, .in_data,
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data),
    .done()
  );

  // window assembly
  localparam int RA = $clog2(W_MAX * D_MAX * CW_MAX);
  localparam int CA = $clog2(D_MAX * CW_MAX);
  localparam int DA = (CW_MAX > 1) ? $clog2(CW_MAX) : 1;

  word_t                      col_vec [KH];        // r rows ago, same (w, d, c)
  word_t                      plane   [KW][KH];    // q columns ago
  word_t                      cube    [KD][KW][KH];
  logic [RA-1:0]              ar;
  logic [CA-1:0]              ac;
  logic [DA-1:0]              ad;
  logic                       accept;

  assign p_ready = !out_valid || out_ready;
  assign accept  = p_valid && p_ready;

  // row buffer
  if (KH > 1) begin : g_row
    word_t mem_r [W_MAX*D_MAX*CW_MAX][KH-1];
    always_comb begin
      col_vec[0] = p_data;
      for (int r = 1; r < KH; r++) col_vec[r] = mem_r[ar][r-1];
    end
    always_ff @(posedge clk)
      if (accept) for (int r = 0; r < KH-1; r++) mem_r[ar][r] <= col_vec[r];
  end else begin : g_norow
    always_comb col_vec[0] = p_data;
  end

  // column buffer
  if (KW > 1) begin : g_col
    word_t mem_c [D_MAX*CW_MAX][KW-1][KH];
    always_comb begin
      for (int r = 0; r < KH; r++) plane[0][r] = col_vec[r];
      for (int q = 1; q < KW; q++)
        for (int r = 0; r < KH; r++) plane[q][r] = mem_c[ac][q-1][r];
    end
    always_ff @(posedge clk)
      if (accept)
        for (int q = 0; q < KW-1; q++)
          for (int r = 0; r < KH; r++) mem_c[ac][q][r] <= plane[q][r];
  end else begin : g_nocol
    always_comb for (int r = 0; r < KH; r++) plane[0][r] = col_vec[r];
  end

  // depth buffer
  if (KD > 1) begin : g_dep
    word_t mem_d [CW_MAX][KD-1][KW][KH];
    always_comb begin
      for (int q = 0; q < KW; q++)
        for (int r = 0; r < KH; r++) cube[0][q][r] = plane[q][r];
      for (int s = 1; s < KD; s++)
        for (int q = 0; q < KW; q++)
          for (int r = 0; r < KH; r++) cube[s][q][r] = mem_d[ad][s-1][q][r];
    end
    always_ff @(posedge clk)
      if (accept)
        for (int s = 0; s < KD-1; s++)
          for (int q = 0; q < KW; q++)
            for (int r = 0; r < KH; r++) mem_d[ad][s][q][r] <= cube[s][q][r];
  end else begin : g_nodep
    always_comb
      for (int q = 0; q < KW; q++)
        for (int r = 0; r < KH; r++) cube[0][q][r] = plane[q][r];
  end

  // coordinates of the padded word and stride phases
  logic [DIM_W-1:0] ch, cc, ccw, cd;
  logic [2:0]       ph_h, ph_w, ph_d;
  logic             is_win;
  logic             end_c, end_d, end_w;

  assign is_win = (ch  >= DIM_W'(w_q.kh) - 1'b1) && (ph_h == 3'd0) &&
                  (ccw >= DIM_W'(w_q.kw) - 1'b1) && (ph_w == 3'd0) &&
                  (cd  >= DIM_W'(w_q.kd) - 1'b1) && (ph_d == 3'd0);
  assign end_c = (cc == cw - 1'b1);
  assign end_d = end_c && (cd == dp - 1'b1);
  assign end_w = end_d && (ccw == wp - 1'b1);

  function automatic logic [2:0] phase_next(logic [2:0] ph, logic [DIM_W-1:0] pos,
                                            logic [3:0] k, logic [2:0] st);
    if (pos < DIM_W'(k) - 1'b1) return 3'd0;
    return (ph == st - 1'b1) ? 3'd0 : ph + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch <= '0; cc <= '0; ccw <= '0; cd <= '0;
      ph_h <= '0; ph_w <= '0; ph_d <= '0;
      ar <= '0; ac <= '0; ad <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (go) begin
        ch <= '0; cc <= '0; ccw <= '0; cd <= '0;
        ph_h <= '0; ph_w <= '0; ph_d <= '0;
        ar <= '0; ac <= '0; ad <= '0;
      end else if (accept) begin
        ar <= (32'(ar) == len_r - 1) ? '0 : ar + 1'b1;
        ac <= (32'(ac) == len_c - 1) ? '0 : ac + 1'b1;
        ad <= (DIM_W'(ad) == cw - 1'b1) ? '0 : ad + 1'b1;
        if (!end_c) cc <= cc + 1'b1;
        else begin
          cc <= '0;
          if (!end_d) begin
            cd <= cd + 1'b1;
            ph_d <= phase_next(ph_d, cd, w_q.kd, w_q.jd);
          end else begin
            cd <= '0; ph_d <= '0;
            if (!end_w) begin
              ccw <= ccw + 1'b1;
              ph_w <= phase_next(ph_w, ccw, w_q.kw, w_q.jw);
            end else begin
              ccw <= '0; ph_w <= '0;
              ch <= ch + 1'b1;
              ph_h <= phase_next(ph_h, ch, w_q.kh, w_q.jh);
            end
          end
        end
      end
      if (accept) begin
        out_valid <= is_win;
        for (int s = 0; s < KD; s++)
          for (int q = 0; q < KW; q++)
            for (int r = 0; r < KH; r++) out_data[s][q][r] <= cube[s][q][r];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
