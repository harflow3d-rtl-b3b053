// conv_param_ctrl: the parameter controller of a convolution or pooling node.
// On 'start' it latches the node's runtime parameters (this is the second copy of the
// double-buffered configuration: the AXI-Lite registers can be rewritten while the node
// runs) and derives from them the counter limits the datapath uses:
//   output windows n_win = Hout*Wout*Dout with Hout = (H+Phs+Phe-Kh)/Sh + 1 (likewise
//   W, D), channel words cw_n = C/LANES, filter groups fg_n = F/LANES (depth-wise: one
//   group per channel word), kernel size ksize = Kd*Kh*Kw and folds = ceil(ksize/FINE).
// It then writes the kernel crossbar's map table, one entry per cycle in (kh, kw, kd)
// order: map[e] is the window position (s*KW + q)*KH + r of kernel element e, where
// s = Kd-1-kd, q = Kw-1-kw, r = Kh-1-kh (the sliding window's newest pixel is the
// kernel's last element). When the table is done, 'go' pulses for one cycle; the node's
// datapath starts with it. The table and counter encoding are this design's.
module conv_param_ctrl
  import harflow_pkg::*;
#(
  parameter int LANES = 1,
  parameter int KD    = 3,
  parameter int KH    = 3,
  parameter int KW    = 3,
  parameter int FINE  = 9,
  parameter int KMAX  = KD*KH*KW,
  parameter int IW    = (KMAX > 1) ? $clog2(KMAX) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  shape_t           shape,
  input  win_t             win,
  input  logic [DIM_W-1:0] filters,
  input  logic             depthwise,
  output shape_t           shape_q,
  output win_t             win_q,
  output logic             depthwise_q,
  output logic [31:0]      n_win,
  output logic [DIM_W-1:0] cw_n,
  output logic [DIM_W-1:0] fg_n,
  output logic [8:0]       ksize,
  output logic [7:0]       folds,
  output logic [IW-1:0]    map [KMAX],
  output logic             go
);
  logic [DIM_W-1:0] ho, wo, dout;
  logic [DIM_W-1:0] f_q;
  logic             busy;
  logic [3:0]       mkh, mkw, mkd;

  assign ho   = (shape_q.h + DIM_W'(win_q.phs) + DIM_W'(win_q.phe) - DIM_W'(win_q.kh)) / DIM_W'(win_q.jh) + 1'b1;
  assign wo   = (shape_q.w + DIM_W'(win_q.pws) + DIM_W'(win_q.pwe) - DIM_W'(win_q.kw)) / DIM_W'(win_q.jw) + 1'b1;
  assign dout = (shape_q.d + DIM_W'(win_q.pds) + DIM_W'(win_q.pde) - DIM_W'(win_q.kd)) / DIM_W'(win_q.jd) + 1'b1;
  assign n_win = 32'(ho) * 32'(wo) * 32'(dout);
  assign cw_n  = shape_q.c / DIM_W'(LANES);
  assign fg_n  = depthwise_q ? DIM_W'(1) : f_q / DIM_W'(LANES);
  assign ksize = 9'(win_q.kd) * 9'(win_q.kh) * 9'(win_q.kw);
  assign folds = 8'((ksize + 9'(FINE - 1)) / 9'(FINE));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shape_q <= '0; win_q <= '0; f_q <= '0; depthwise_q <= 1'b0;
      busy <= 1'b0; go <= 1'b0; mkh <= '0; mkw <= '0; mkd <= '0;
    end else begin
      go <= 1'b0;
      if (start) begin
        shape_q <= shape; win_q <= win; f_q <= filters; depthwise_q <= depthwise;
        busy <= 1'b1; mkh <= '0; mkw <= '0; mkd <= '0;
      end else if (busy) begin
        if (mkd != win_q.kd - 1'b1) mkd <= mkd + 1'b1;
        else begin
          mkd <= '0;
          if (mkw != win_q.kw - 1'b1) mkw <= mkw + 1'b1;
          else begin
            mkw <= '0;
            if (mkh != win_q.kh - 1'b1) mkh <= mkh + 1'b1;
            else begin
              busy <= 1'b0; go <= 1'b1;
            end
          end
        end
      end
    end
  end

  // map table write
  always_ff @(posedge clk) begin
    if (busy && !start) begin
      int e, s, q, r;
      e = (int'(mkh) * int'(win_q.kw) + int'(mkw)) * int'(win_q.kd) + int'(mkd);
      s = int'(win_q.kd) - 1 - int'(mkd);
      q = int'(win_q.kw) - 1 - int'(mkw);
      r = int'(win_q.kh) - 1 - int'(mkh);
      if (e < KMAX) map[e] <= IW'((s * KW + q) * KH + r);
    end
  end
endmodule
