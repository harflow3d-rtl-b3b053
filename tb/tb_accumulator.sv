// tb_accumulator: random accumulate sequences into 8 entries of 2 lanes; 'first' restarts an
// entry. The sum shown with each write and the stored sums are checked against a model.
module tb_accumulator;
  import harflow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid = 0, first = 0;
  logic [2:0] idx;
  acc_t in [2];
  acc_t sum [2];
  accumulator #(.LANES(2), .DEPTH(8), .AW(3)) dut (.*);
  longint model [8][2];
  bit init [8];
  initial begin
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      idx = 3'($urandom_range(0, 7));
      first = !init[idx] || ($urandom_range(0, 5) == 0);
      valid = ($urandom_range(0, 3) != 0);
      for (int o = 0; o < 2; o++) in[o] = acc_t'(int'($urandom) >>> 4);
      #1;
      for (int o = 0; o < 2; o++) begin
        longint e;
        e = (first ? 0 : model[idx][o]) + longint'(in[o]);
        checks++;
        if (longint'(sum[o]) != e) begin failures++; $display("t=%0d o=%0d got %0d exp %0d", t, o, sum[o], e); end
        if (valid) model[idx][o] = e;
      end
      if (valid) init[idx] = 1;
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
