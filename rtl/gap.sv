// gap: the global average pooling node. For every channel it sums the values over all
// n_pix = H*W*D pixels of the feature-map and outputs the sum divided by n_pix (truncated
// toward zero, saturated), C/LANES output words in channel order. A buffer of CW_MAX
// channel-word sums is the only storage, which is why the paper gives global pooling its
// own hardware instead of a pooling window the size of the frame. One input word per
// cycle; during the last pixel every input word directly produces its output word, so the
// node takes about |S_in|/LANES cycles. 'start' latches n_pix and C; 'done' pulses after
// the last output word.
module gap
  import harflow_pkg::*;
#(
  parameter int LANES  = 1,
  parameter int CW_MAX = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [31:0]                  n_pix,
  input  logic [DIM_W-1:0]             channels,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                         done
);
  localparam int AW = (CW_MAX > 1) ? $clog2(CW_MAX) : 1;
  acc_t             sums [CW_MAX][LANES];
  logic [31:0]      npix_q, pix;
  logic [DIM_W-1:0] cw_n, cw;
  logic             run, fire, last_pix, last_word;
  acc_t             nsum [LANES];

  assign last_pix  = (pix == npix_q - 1);
  assign last_word = last_pix && (cw == cw_n - 1'b1);
  assign in_ready  = run && (!last_pix || !out_valid || out_ready);
  assign fire      = in_valid && in_ready;

  always_comb
    for (int l = 0; l < LANES; l++)
      nsum[l] = ((pix == '0) ? acc_t'(0) : sums[AW'(cw)][l]) + acc_t'($signed(in_data[l]));

  always_ff @(posedge clk) if (fire) for (int l = 0; l < LANES; l++) sums[AW'(cw)][l] <= nsum[l];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      npix_q <= '0; cw_n <= '0; pix <= '0; cw <= '0; run <= 1'b0; done <= 1'b0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        npix_q <= n_pix; cw_n <= channels / DIM_W'(LANES); pix <= '0; cw <= '0; run <= 1'b1;
      end else if (fire) begin
        if (cw == cw_n - 1'b1) begin
          cw <= '0; pix <= pix + 1;
        end else cw <= cw + 1'b1;
        if (last_word) run <= 1'b0;
      end
      if (fire && last_pix) begin
        out_valid <= 1'b1;
        for (int l = 0; l < LANES; l++) out_data[l] <= sat16(nsum[l] / acc_t'(npix_q));
      end else if (out_ready) out_valid <= 1'b0;
      if (out_valid && out_ready && !run && !(fire && last_pix)) done <= 1'b1;
    end
  end
endmodule
