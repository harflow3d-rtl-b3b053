// tb_gap: self-checking test of global average pooling (2 lanes). Two runs (12 pixels x 6
// channels, then 5 pixels x 4 channels) with random data, input gaps and output
// back-pressure; expected value per channel: sum over pixels divided by the pixel count,
// truncated toward zero. The cycle count must not exceed a small multiple of the input size.
module tb_gap;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [31:0] n_pix; logic [DIM_W-1:0] channels;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, out_data;
  gap #(.LANES(L), .CW_MAX(8)) dut (.*);

  int x [64][16]; int expv [16];
  logic [L-1:0][DATA_W-1:0] in_q [$];

  task automatic run_case(int P, int C);
    int ngot, t0, cyc;
    for (int c = 0; c < C; c++) begin
      int s = 0;
      for (int p = 0; p < P; p++) begin x[p][c] = int'($urandom_range(0, 8000)) - 4000; s += x[p][c]; end
      expv[c] = s / P;
    end
    in_q.delete();
    for (int p = 0; p < P; p++) for (int cw = 0; cw < C/L; cw++) begin
      logic [L-1:0][DATA_W-1:0] b;
      for (int l = 0; l < L; l++) b[l] = DATA_W'(x[p][cw*L+l]);
      in_q.push_back(b);
    end
    n_pix = P; channels = DIM_W'(C);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10; ngot = 0;
    fork
      begin
        while (in_q.size() > 0) begin
          in_valid <= ($urandom_range(0, 3) != 0); in_data <= in_q[0]; @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin
        while (!done) begin
          out_ready <= ($urandom_range(0, 2) != 0); @(posedge clk);
          if (out_valid && out_ready) for (int l = 0; l < L; l++) begin
            checks++;
            if ($signed(out_data[l]) != expv[ngot]) begin
              failures++; $display("gap: ch %0d got %0d exp %0d", ngot, $signed(out_data[l]), expv[ngot]);
            end
            ngot++;
          end
        end
        out_ready <= 0;
      end
    join
    cyc = $time / 10 - t0;
    checks++; if (ngot != C) begin failures++; $display("gap: %0d of %0d channels", ngot, C); end
    checks++; if (cyc > 3 * P * C / L + 20) begin failures++; $display("gap: slow %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(12, 6);
    run_case(5, 4);
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
