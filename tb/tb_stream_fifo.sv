// tb_stream_fifo: pushes 500 random words through a 4-deep FIFO with random input gaps and
// random output back-pressure and checks order, count, the fill level and that a full FIFO
// refuses input.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data, out_data;
  logic [2:0] level;
  stream_fifo #(.W(16), .DEPTH(4)) dut (.*);
  logic [15:0] q [$];
  int sent = 0, got = 0, sawfull = 0;
  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    while (got < 500) begin
      in_valid <= (sent < 500) && ($urandom_range(0, 2) != 0);
      in_data  <= 16'($urandom);
      out_ready <= ($urandom_range(0, 2) == 0);
      @(posedge clk);
      checks++;
      if (int'(level) != q.size()) begin failures++; $display("level %0d vs %0d", level, q.size()); end
      if (level == 3'd4) begin
        sawfull++; checks++; if (in_ready) failures++;
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("got %h exp %h", out_data, q[0]); end
        void'(q.pop_front()); got++;
      end
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
    end
    checks++; if (sawfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
