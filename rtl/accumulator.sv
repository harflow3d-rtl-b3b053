// accumulator: the accumulator adder and accumulator buffer of the convolution hardware.
// LANES running sums (one per output stream) are kept for each of up to DEPTH entries
// (filter groups). When 'valid' is high, entry 'idx' becomes (first ? 0 : old) + in, and
// 'sum' shows that new value in the same cycle, so the caller can emit it on the last
// fold. The number of entries in use is set by the caller's runtime filter count - the
// runtime-depth accumulation buffer of the paper's figure. Buffer as a register array,
// a write per cycle; the read is combinational.
module accumulator
  import harflow_pkg::*;
#(
  parameter int LANES = 1,
  parameter int DEPTH = 64,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  valid,
  input  logic                  first,
  input  logic [AW-1:0]         idx,
  input  acc_t                  in  [LANES],
  output acc_t                  sum [LANES]
);
  acc_t buf_q [DEPTH][LANES];

  always_comb
    for (int o = 0; o < LANES; o++)
      sum[o] = (first ? acc_t'(0) : buf_q[idx][o]) + in[o];

  always_ff @(posedge clk)
    if (valid)
      for (int o = 0; o < LANES; o++) buf_q[idx][o] <= sum[o];
endmodule
