// fc: the fully-connected node (FC). It is the convolution's conv_core without a sliding
// window, as the paper has it: each input word (LANES channels) is a one-element window,
// the kernel is 1x1x1 and there is no fine folding (f = 1), so it uses LANES*LANES DSPs
// and takes (C/LANES)*(F/LANES) cycles, the paper's L_FC = C*F/(c_in*c_out).
// 'start' latches C, F and use_psum; the node loads (C/LANES)*(F/LANES)*LANES weight beats
// (order: channel word, filter group, output lane; each beat holds the LANES input-lane
// weights of one filter), then reads C/LANES input words and writes F/LANES output words.
module fc
  import harflow_pkg::*;
#(
  parameter int LANES  = 1,
  parameter int CW_MAX = 512,
  parameter int FG_MAX = 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [DIM_W-1:0]             channels,
  input  logic [DIM_W-1:0]             filters,
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
  logic [DIM_W-1:0] cw_n, fg_n;
  logic             psum_q, go;
  logic [0:0]       map [1];

  assign map[0] = 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cw_n <= '0; fg_n <= '0; psum_q <= 1'b0; go <= 1'b0;
    end else begin
      go <= start;
      if (start) begin
        cw_n <= channels / DIM_W'(LANES);
        fg_n <= filters / DIM_W'(LANES);
        psum_q <= use_psum;
      end
    end
  end

  conv_core #(.LANES(LANES), .FINE(1), .KMAX(1), .CW_MAX(CW_MAX), .FG_MAX(FG_MAX), .IW(1)) u_core (
    .clk, .rst_n, .go, .n_win(32'd1), .cw_n, .fg_n, .ksize(9'd1), .folds(8'd1), .map,
    .depthwise(1'b0), .use_psum(psum_q),
    .win_valid(in_valid), .win_ready(in_ready), .win_data(in_data),
    .wt_valid, .wt_ready, .wt_data, .ps_valid, .ps_ready, .ps_data,
    .out_valid, .out_ready, .out_data, .done
  );
endmodule
