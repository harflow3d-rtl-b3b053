// stream_fifo: first-in first-out buffer for a valid/ready stream.
// Used as a register slice on the crossbar loop-back (so that a node routed onto its own
// input forms no combinational ready path) and as the burst buffer of the DMAs.
// in_ready depends only on the fill level register, never on out_ready, so the FIFO breaks
// every combinational path between its two sides. A word written in one cycle can be read in
// the next. 'level' is the number of words held. Sizes are this design's choice.
module stream_fifo #(
  parameter int W     = 16,
  parameter int DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign in_ready  = (level != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      level <= level + $bits(level)'(do_wr) - $bits(level)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= in_data;
endmodule
