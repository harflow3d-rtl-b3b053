// tb_kernel_xbar: a 12-pixel, 2-lane window and a random permutation map; for runtime
// kernel sizes 12, 7 and 3 and every fold, multiplier i must carry window[map[fold*5+i]]
// when that element is inside the kernel and zero (bypassed) otherwise.
module tb_kernel_xbar;
  import harflow_pkg::*;
  localparam int K = 12, F = 5, L = 2;
  int checks = 0, failures = 0;
  logic [K-1:0][L-1:0][15:0] win;
  logic [3:0] map [K];
  logic [7:0] fold;
  logic [8:0] ksize;
  logic [L-1:0][F-1:0][15:0] sel;
  kernel_xbar #(.LANES(L), .KMAX(K), .FINE(F), .IW(4), .FW(8)) dut (.*);
  int perm [K];
  initial begin
    for (int i = 0; i < K; i++) perm[i] = i;
    for (int i = K-1; i > 0; i--) begin
      int j, t; j = $urandom_range(0, i); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < K; i++) map[i] = 4'(perm[i]);
    for (int i = 0; i < K; i++) for (int l = 0; l < L; l++) win[i][l] = 16'($urandom_range(1, 60000));
    foreach (perm[ks]) if (ks == 3 || ks == 7 || ks == 11) begin
      ksize = 9'(ks + 1);
      for (int fo = 0; fo < (ks + F) / F; fo++) begin
        fold = 8'(fo); #1;
        for (int i = 0; i < F; i++) for (int l = 0; l < L; l++) begin
          int e; logic [15:0] ex;
          e = fo*F + i;
          ex = (e <= ks) ? win[perm[e]][l] : 16'd0;
          checks++;
          if (sel[l][i] != ex) begin failures++; $display("k=%0d f=%0d i=%0d l=%0d got %h exp %h", ks+1, fo, i, l, sel[l][i], ex); end
        end
      end
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
