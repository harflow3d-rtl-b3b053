// eltwise: the element-wise node (ELTW): out = a + b or out = a * b (Q8.8, saturated),
// the operation chosen at runtime. In default mode a and b are two streams of n_words
// words consumed in lock-step. In broadcast mode b is a per-channel vector (C/LANES words,
// e.g. the output of a global pooling and a squeeze-excitation branch): it is read first
// into a buffer of CW_MAX words and then applied to every pixel of a. One output word per
// cycle, L_EltWise = |S_in|/c. 'start' latches n_words (words of a), C, type and mode;
// 'done' pulses after the last output word. The buffer-first broadcast is this design's.
module eltwise
  import harflow_pkg::*;
#(
  parameter int LANES  = 1,
  parameter int CW_MAX = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [31:0]                  n_words,
  input  logic [DIM_W-1:0]             channels,
  input  eltw_e                        etype,
  input  logic                         bcast,
  input  logic                         a_valid,
  output logic                         a_ready,
  input  logic [LANES-1:0][DATA_W-1:0] a_data,
  input  logic                         b_valid,
  output logic                         b_ready,
  input  logic [LANES-1:0][DATA_W-1:0] b_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                         done
);
  localparam int AW = (CW_MAX > 1) ? $clog2(CW_MAX) : 1;
  typedef logic [LANES-1:0][DATA_W-1:0] word_t;

  word_t            bbuf [CW_MAX];
  eltw_e            t_q;
  logic             bc_q, run, loading, fire;
  logic [31:0]      n_q, in_cnt, out_cnt;
  logic [DIM_W-1:0] cw_n, cw, ld;
  word_t            bsel;

  assign bsel    = bc_q ? bbuf[AW'(cw)] : b_data;
  assign fire    = run && !loading && (in_cnt != n_q) && a_valid && (bc_q || b_valid) &&
                   (!out_valid || out_ready);
  assign a_ready = fire;
  assign b_ready = bc_q ? (run && loading) : fire;

  always_ff @(posedge clk)
    if (run && loading && b_valid) bbuf[AW'(ld)] <= b_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= ELTW_ADD; bc_q <= 1'b0; run <= 1'b0; loading <= 1'b0; n_q <= '0;
      in_cnt <= '0; out_cnt <= '0; cw_n <= '0; cw <= '0; ld <= '0;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        t_q <= etype; bc_q <= bcast; n_q <= n_words; cw_n <= channels / DIM_W'(LANES);
        run <= 1'b1; loading <= bcast; in_cnt <= '0; out_cnt <= '0; cw <= '0; ld <= '0;
      end
      if (run && loading && b_valid) begin
        ld <= ld + 1'b1;
        if (ld == cw_n - 1'b1) loading <= 1'b0;
      end
      if (fire) begin
        in_cnt <= in_cnt + 1;
        cw <= (cw == cw_n - 1'b1) ? '0 : cw + 1'b1;
        out_valid <= 1'b1;
        for (int l = 0; l < LANES; l++)
          out_data[l] <= (t_q == ELTW_ADD)
                         ? sat16(acc_t'($signed(a_data[l])) + acc_t'($signed(bsel[l])))
                         : qmul(data_t'(a_data[l]), data_t'(bsel[l]));
      end else if (out_ready) out_valid <= 1'b0;
      if (out_valid && out_ready) begin
        out_cnt <= out_cnt + 1;
        if (out_cnt == n_q - 1) begin
          run <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
