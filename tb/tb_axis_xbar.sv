// tb_axis_xbar: random one-to-one routes (some outputs unrouted) between 3 sources and 5
// destinations with random valid, ready and data; every cycle each destination must carry
// exactly its selected source's valid and data (or nothing), and each source's ready must be
// the ready of the destination that selected it.
module tb_axis_xbar;
  localparam int NS = 3, ND = 5, W = 8, SW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [SW-1:0] sel [ND];
  logic [NS-1:0] src_valid, src_ready;
  logic [NS-1:0][W-1:0] src_data;
  logic [ND-1:0] dst_valid, dst_ready;
  logic [ND-1:0][W-1:0] dst_data;
  axis_xbar #(.N_SRC(NS), .N_DST(ND), .W(W), .SW(SW)) dut (.*);

  initial begin
    for (int d = 0; d < ND; d++) sel[d] = '1;
    src_valid = '0; src_data = '0; dst_ready = '0;
    repeat (3) @(posedge clk); rst_n <= 1;
    repeat (50) begin
      int perm [ND];
      // random one-to-one route: shuffle destinations, give the first NS sources or none
      for (int d = 0; d < ND; d++) perm[d] = d;
      perm.shuffle();
      @(negedge clk);
      for (int d = 0; d < ND; d++) sel[d] = '1;
      for (int s = 0; s < NS; s++) if ($urandom_range(0, 3) != 0) sel[perm[s]] = SW'(s);
      repeat (20) begin
        @(negedge clk);
        src_valid = NS'($urandom); dst_ready = ND'($urandom);
        for (int s = 0; s < NS; s++) src_data[s] = W'($urandom);
        #1;
        for (int d = 0; d < ND; d++) begin
          bit ev; logic [W-1:0] ed;
          ev = (sel[d] < NS) ? src_valid[sel[d]] : 1'b0;
          ed = (sel[d] < NS) ? src_data[sel[d]] : '0;
          checks++;
          if (dst_valid[d] != ev || (ev && dst_data[d] != ed)) begin
            failures++; $display("dst %0d: valid %b data %h, exp %b %h", d, dst_valid[d], dst_data[d], ev, ed);
          end
        end
        for (int s = 0; s < NS; s++) begin
          bit er;
          er = 0;
          for (int d = 0; d < ND; d++) if (sel[d] == SW'(s)) er = dst_ready[d];
          checks++;
          if (src_ready[s] != er) begin failures++; if (failures < 4) $display("src %0d ready %b exp %b sel %p dr %b sv %b", s, src_ready[s], er, sel, dst_ready, src_valid); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
