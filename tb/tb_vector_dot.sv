// tb_vector_dot: 300 random vectors (including extreme values) through a 6-input dot
// product (non-power-of-two tree) compared with a sum of products computed here.
module tb_vector_dot;
  import harflow_pkg::*;
  int checks = 0, failures = 0;
  logic [5:0][15:0] a, b;
  acc_t sum;
  vector_dot #(.N(6)) dut (.*);
  initial begin
    for (int t = 0; t < 300; t++) begin
      longint e;
      e = 0;
      for (int i = 0; i < 6; i++) begin
        a[i] = (t < 10) ? 16'h8000 : 16'($urandom);
        b[i] = (t < 5) ? 16'h8000 : 16'($urandom);
        e += longint'($signed(a[i])) * longint'($signed(b[i]));
      end
      #1;
      checks++;
      if (longint'(sum) != e) begin failures++; $display("dot %0d got %0d exp %0d", t, sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
