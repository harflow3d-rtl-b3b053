// fm_pad: inserts the runtime zero (or pad-value) border around a feature-map stream.
// The input arrives in H, W, D, C order (channel words fastest, CW = C / LANES words per
// pixel). The module walks the padded coordinates (H+phs+phe) x (W+pws+pwe) x (D+pds+pde)
// x CW; at a border coordinate it emits pad_value on every lane without consuming input,
// elsewhere it passes the input word through (combinational valid/ready). 'start' latches
// nothing itself: the shape and padding inputs must stay stable while the frame runs
// (the node's parameter controller holds them). 'done' pulses after the last padded word.
// Padding of a feature-map at the sliding-window input is how the fpgaConvNet-style blocks
// that the paper builds on handle P; the separate module is this design's choice.
module fm_pad
  import harflow_pkg::*;
#(
  parameter int LANES = 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [DIM_W-1:0]            hp, wp, dp, cw,      // padded sizes, channel words
  input  logic [2:0]                  phs, pws, pds,       // leading pad
  input  logic [DIM_W-1:0]            h, w, d,             // unpadded sizes
  input  data_t                       pad_value,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LANES-1:0][DATA_W-1:0] in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LANES-1:0][DATA_W-1:0] out_data,
  output logic                        done
);
  logic [DIM_W-1:0] ch, cwi, cd, cc;   // padded row, column, depth, channel word
  logic             run, in_frame, fire, last;

  assign in_frame = (ch >= DIM_W'(phs)) && (ch < DIM_W'(phs) + h) &&
                  (cwi >= DIM_W'(pws)) && (cwi < DIM_W'(pws) + w) &&
                  (cd >= DIM_W'(pds)) && (cd < DIM_W'(pds) + d);
  assign out_valid = run && (in_frame ? in_valid : 1'b1);
  assign in_ready  = run && in_frame && out_ready;
  assign out_data  = in_frame ? in_data : {LANES{pad_value}};
  assign fire      = out_valid && out_ready;
  assign last      = (cc == cw - 1'b1) && (cd == dp - 1'b1) && (cwi == wp - 1'b1) && (ch == hp - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ch <= '0; cwi <= '0; cd <= '0; cc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1; ch <= '0; cwi <= '0; cd <= '0; cc <= '0;
      end else if (fire) begin
        if (last) begin
          run <= 1'b0; done <= 1'b1;
        end
        if (cc != cw - 1'b1) cc <= cc + 1'b1;
        else begin
          cc <= '0;
          if (cd != dp - 1'b1) cd <= cd + 1'b1;
          else begin
            cd <= '0;
            if (cwi != wp - 1'b1) cwi <= cwi + 1'b1;
            else begin
              cwi <= '0;
              ch  <= ch + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
