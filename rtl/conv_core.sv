// conv_core: the compute half of the convolution hardware, shared by the Conv and FC nodes.
// It holds the weights on chip, takes one window per channel word, broadcasts it to LANES
// (= c_out) vector-dot units of LANES*FINE (= c_in * f) multipliers each, and accumulates
// their sums over kernel folds and over the channel words of a pixel in the accumulator
// buffer. After the last channel word of a pixel the LANES sums of a filter group leave as
// one output word (rounded back to Q8.8, optionally plus a partial-sum word read from the
// psum stream, then saturated).
// Sequence: 'go' starts a weight-load phase that reads cw_n*fg_n*folds*LANES*FINE beats
// from the weight stream, then the run phase, which ends ('done' pulse) with the last
// output word. Weight beat order: channel word, filter group, fold, output lane o,
// multiplier i; a beat holds the LANES input-lane weights of filter (group*LANES+o) and
// kernel element (fold*FINE+i) (zero beyond the kernel). In depth-wise mode fg_n is 1,
// lane l only feeds output lane l and each window yields one output word.
// Timing: a window occupies the unit for fg_n*folds cycles (one fold per cycle), so a layer
// takes n_win*cw_n*fg_n*folds cycles plus pipeline and stall cycles, the paper's
// L_Conv = |S_out| * F * |K| / (c_in * c_out * f).
// The weights are single-buffered and loaded before the run (the paper double-buffers them);
// the partial-sum input follows the paper's psum stream; groups other than 1 and C are not
// supported. These are this design's choices.
module conv_core
  import harflow_pkg::*;
#(
  parameter int LANES    = 1,
  parameter int FINE     = 9,
  parameter int KMAX     = 27,
  parameter int CW_MAX   = 64,
  parameter int FG_MAX   = 64,
  parameter int FOLD_MAX = (KMAX + FINE - 1) / FINE,
  parameter int IW       = (KMAX > 1) ? $clog2(KMAX) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   go,
  input  logic [31:0]                            n_win,
  input  logic [DIM_W-1:0]                       cw_n,
  input  logic [DIM_W-1:0]                       fg_n,
  input  logic [8:0]                             ksize,
  input  logic [7:0]                             folds,
  input  logic [IW-1:0]                          map [KMAX],
  input  logic                                   depthwise,
  input  logic                                   use_psum,
  input  logic                                   win_valid,
  output logic                                   win_ready,
  input  logic [KMAX-1:0][LANES-1:0][DATA_W-1:0] win_data,
  input  logic                                   wt_valid,
  output logic                                   wt_ready,
  input  logic [LANES-1:0][DATA_W-1:0]           wt_data,
  input  logic                                   ps_valid,
  output logic                                   ps_ready,
  input  logic [LANES-1:0][DATA_W-1:0]           ps_data,
  output logic                                   out_valid,
  input  logic                                   out_ready,
  output logic [LANES-1:0][DATA_W-1:0]           out_data,
  output logic                                   done
);
  localparam int WDEPTH = CW_MAX * FG_MAX * FOLD_MAX;
  localparam int WA     = $clog2(WDEPTH);
  localparam int ADEPTH = (CW_MAX > FG_MAX) ? CW_MAX : FG_MAX;
  localparam int AA     = (ADEPTH > 1) ? $clog2(ADEPTH) : 1;
  localparam int N      = LANES * FINE;

  typedef logic [LANES-1:0][LANES-1:0][FINE-1:0][DATA_W-1:0] wword_t;  // [o][l][i]
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_e;

  state_e state;
  wword_t wmem [WDEPTH];
  wword_t wbuf;

  // ---------------- weight load ----------------
  logic [31:0]      ld_total, ld_cnt;
  logic [WA-1:0]    ld_addr;
  int unsigned      bo, bi;
  assign ld_total = 32'(cw_n) * 32'(fg_n) * 32'(folds) * 32'(LANES * FINE);
  assign wt_ready = (state == S_LOAD);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && wt_valid) begin
      for (int l = 0; l < LANES; l++) wbuf[bo][l][bi] <= wt_data[l];
      if (bo == LANES-1 && bi == FINE-1) begin
        wword_t w;
        w = wbuf;
        for (int l = 0; l < LANES; l++) w[bo][l][bi] = wt_data[l];
        wmem[ld_addr] <= w;
      end
    end
  end

  // ---------------- run ----------------
  logic [KMAX-1:0][LANES-1:0][DATA_W-1:0] win_q;
  logic             have_win;
  logic [DIM_W-1:0] cw, fg;
  logic [7:0]       fold;
  logic [WA-1:0]    waddr;
  logic [31:0]      pix, out_cnt, out_total;
  logic             first, last, step, out_free;
  wword_t           wcur;

  logic [LANES-1:0][FINE-1:0][DATA_W-1:0] sel;
  acc_t dot [LANES];
  acc_t sum [LANES];

  kernel_xbar #(.LANES(LANES), .KMAX(KMAX), .FINE(FINE), .IW(IW), .FW(8)) u_xbar (
    .win(win_q), .map, .fold, .ksize, .sel
  );

  assign wcur = wmem[waddr];
  for (genvar o = 0; o < LANES; o++) begin : g_dot
    logic [N-1:0][DATA_W-1:0] va, vb;
    always_comb
      for (int l = 0; l < LANES; l++)
        for (int i = 0; i < FINE; i++) begin
          va[l*FINE+i] = sel[l][i];
          vb[l*FINE+i] = (depthwise && l != o) ? '0 : wcur[o][l][i];
        end
    vector_dot #(.N(N)) u_dot (.a(va), .b(vb), .sum(dot[o]));
  end

  assign first    = (fold == 8'd0) && (depthwise || cw == '0);
  assign last     = (fold == folds - 1'b1) && (depthwise || cw == cw_n - 1'b1);
  assign out_free = !out_valid || out_ready;
  assign step     = (state == S_RUN) && have_win &&
                    (!last || (out_free && (!use_psum || ps_valid)));
  assign ps_ready = step && last && use_psum;
  assign win_ready = (state == S_RUN) && !have_win;
  assign out_total = n_win * 32'(depthwise ? cw_n : fg_n);

  accumulator #(.LANES(LANES), .DEPTH(ADEPTH), .AW(AA)) u_acc (
    .clk, .valid(step), .first,
    .idx(depthwise ? AA'(cw) : AA'(fg)),
    .in(dot), .sum
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ld_cnt <= '0; ld_addr <= '0; bo <= 0; bi <= 0;
      have_win <= 1'b0; win_q <= '0; cw <= '0; fg <= '0; fold <= '0; waddr <= '0;
      pix <= '0; out_cnt <= '0; out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (go) begin
          state <= S_LOAD; ld_cnt <= '0; ld_addr <= '0; bo <= 0; bi <= 0;
          have_win <= 1'b0; cw <= '0; fg <= '0; fold <= '0; waddr <= '0;
          pix <= '0; out_cnt <= '0;
        end
        S_LOAD: if (wt_valid) begin
          ld_cnt <= ld_cnt + 1;
          if (bi == FINE-1) begin
            bi <= 0;
            if (bo == LANES-1) begin
              bo <= 0; ld_addr <= ld_addr + 1'b1;
            end else bo <= bo + 1;
          end else bi <= bi + 1;
          if (ld_cnt == ld_total - 1) state <= S_RUN;
        end
        S_RUN: begin
          if (win_valid && win_ready) begin
            win_q <= win_data; have_win <= 1'b1;
          end
          if (step) begin
            if (fold != folds - 1'b1) begin
              fold <= fold + 1'b1; waddr <= waddr + 1'b1;
            end else begin
              fold <= '0;
              if (fg != fg_n - 1'b1) begin
                fg <= fg + 1'b1; waddr <= waddr + 1'b1;
              end else begin
                fg <= '0; have_win <= 1'b0;
                if (cw != cw_n - 1'b1) begin
                  cw <= cw + 1'b1; waddr <= waddr + 1'b1;
                end else begin
                  cw <= '0; waddr <= '0; pix <= pix + 1;
                end
              end
            end
          end
          if (out_valid && out_ready) begin
            out_cnt <= out_cnt + 1;
            if (out_cnt == out_total - 1) begin
              state <= S_IDLE; done <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
      // output register
      if (step && last) begin
        out_valid <= 1'b1;
        for (int o = 0; o < LANES; o++)
          out_data[o] <= sat16((sum[o] >>> FRAC_W) +
                               (use_psum ? acc_t'($signed(ps_data[o])) : acc_t'(0)));
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // a window is never overwritten while it is in use
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) step && last |-> out_free);
endmodule
