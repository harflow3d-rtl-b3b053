// axis_xbar: runtime-configured stream crossbar (the X-BAR blocks). Each of N_DST outputs
// takes its beats from the source selected by sel[d] (value N_SRC or above: unconnected).
// A source may feed at most one destination at a time (an assertion checks it); its ready
// is the ready of the destination that selects it. Purely combinational routing; sel comes
// from the control registers and changes only between operations. Two of these form the
// paper's sandwich: node inputs behind one, node outputs in front of the other, the second
// feeding back into the first. The one-source-per-destination rule is this design's.
module axis_xbar #(
  parameter int N_SRC = 3,
  parameter int N_DST = 11,
  parameter int W     = 16,
  parameter int SW    = $clog2(N_SRC + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [SW-1:0]               sel       [N_DST],
  input  logic [N_SRC-1:0]            src_valid,
  output logic [N_SRC-1:0]            src_ready,
  input  logic [N_SRC-1:0][W-1:0]     src_data,
  output logic [N_DST-1:0]            dst_valid,
  input  logic [N_DST-1:0]            dst_ready,
  output logic [N_DST-1:0][W-1:0]     dst_data
);
  always_comb begin
    src_ready = '0;
    for (int d = 0; d < N_DST; d++) begin
      dst_valid[d] = 1'b0;
      dst_data[d]  = '0;
      for (int s = 0; s < N_SRC; s++)
        if (int'(sel[d]) == s) begin
          dst_valid[d] = src_valid[s];
          dst_data[d]  = src_data[s];
          src_ready[s] = src_ready[s] | dst_ready[d];
        end
    end
  end

  // no source is routed to two destinations
  for (genvar d = 0; d < N_DST; d++) begin : g_chk
    for (genvar e = d + 1; e < N_DST; e++) begin : g_pair
      a_one_dst: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(int'(sel[d]) < N_SRC && sel[d] == sel[e]));
    end
  end
endmodule
