// act: the activation node (ACT). Per lane and per word it applies, as chosen at runtime,
// ReLU (max(x, 0)), sigmoid, or swish (x * sigmoid(x)). Sigmoid is a piecewise-linear
// approximation with power-of-two slopes (see harflow_pkg::sigmoid_q), swish one Q8.8
// multiply of x by it. One word per cycle through an output register (valid/ready), so a
// layer takes |S_in|/LANES cycles, the paper's L_Act. 'start' latches the type and the
// number of words n_words; 'done' pulses after the last output word. The sigmoid
// approximation is this design's choice: the paper names the functions only.
module act
  import harflow_pkg::*;
#(
  parameter int LANES = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [31:0]                  n_words,
  input  act_e                         atype,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                         done
);
  act_e        t_q;
  logic [31:0] n_q, in_cnt, out_cnt;
  logic        run;

  assign in_ready = run && (in_cnt != n_q) && (!out_valid || out_ready);

  function automatic data_t f_act(act_e t, data_t x);
    case (t)
      ACT_RELU:    return x[DATA_W-1] ? data_t'(0) : x;
      ACT_SIGMOID: return sigmoid_q(x);
      ACT_SWISH:   return qmul(x, sigmoid_q(x));
      default:     return x;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= ACT_RELU; n_q <= '0; in_cnt <= '0; out_cnt <= '0; run <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        t_q <= atype; n_q <= n_words; in_cnt <= '0; out_cnt <= '0; run <= 1'b1;
      end
      if (in_valid && in_ready) begin
        in_cnt <= in_cnt + 1;
        out_valid <= 1'b1;
        for (int l = 0; l < LANES; l++) out_data[l] <= f_act(t_q, data_t'(in_data[l]));
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
