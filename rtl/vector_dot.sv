// vector_dot: the multiplier array and adder tree of a convolution (or fully-connected)
// vector-dot unit. N pairs of 16-bit signed words are multiplied (one DSP each, 16x16 as
// the paper states) and the products summed by a binary adder tree of ceil(log2 N) levels.
// Combinational: the result is valid in the cycle its operands are. In the convolution
// node N = c_in * f, so the DSP count of a node with c_out of these units is
// c_in * c_out * f, the paper's DSP model. The tree padding to a power of two is this
// design's.
module vector_dot
  import harflow_pkg::*;
#(
  parameter int N = 4
) (
  input  logic [N-1:0][DATA_W-1:0] a,
  input  logic [N-1:0][DATA_W-1:0] b,
  output acc_t                     sum
);
  localparam int P = (N > 1) ? (1 << $clog2(N)) : 1;
  acc_t t [2*P];

  always_comb begin
    for (int i = 0; i < P; i++)
      t[P+i] = (i < N) ? acc_t'($signed(a[i]) * $signed(b[i])) : '0;
    for (int i = P-1; i >= 1; i--)
      t[i] = t[2*i] + t[2*i+1];
    t[0] = '0;
  end
  assign sum = t[1];
endmodule
