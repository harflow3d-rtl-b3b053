// tb_act: self-checking test of the activation node (2 lanes). For ReLU, sigmoid and swish
// it streams 200 words of random Q8.8 values (plus the segment boundaries of the sigmoid
// approximation) and compares with a reference written independently here: ReLU exact,
// sigmoid and swish against the real functions with a tolerance of 0.025 (the
// approximation error of about 0.019 plus rounding). Checks one word per cycle when never stalled.
module tb_act;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [31:0] n_words; act_e atype;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, out_data;
  act #(.LANES(L)) dut (.*);

  int xs [512];
  logic [L-1:0][DATA_W-1:0] in_q [$];

  task automatic run_case(act_e t, int N, bit stall);
    int ngot, t0, cyc;
    for (int i = 0; i < N*L; i++) begin
      if (i < 10) xs[i] = (i - 5) * 256 + ((i % 2) ? 96 : 0);
      else xs[i] = int'($urandom_range(0, 4096)) - 2048;
    end
    in_q.delete();
    for (int i = 0; i < N; i++) begin
      logic [L-1:0][DATA_W-1:0] b;
      for (int l = 0; l < L; l++) b[l] = DATA_W'(xs[i*L+l]);
      in_q.push_back(b);
    end
    n_words = N; atype = t;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10; ngot = 0;
    fork
      begin
        while (in_q.size() > 0) begin
          in_valid <= stall ? ($urandom_range(0, 2) != 0) : 1'b1; in_data <= in_q[0]; @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin
        while (!done) begin
          out_ready <= stall ? ($urandom_range(0, 2) != 0) : 1'b1; @(posedge clk);
          if (out_valid && out_ready) for (int l = 0; l < L; l++) begin
            real xr, yr, er, gr;
            xr = real'(xs[ngot]) / 256.0;
            gr = real'($signed(out_data[l])) / 256.0;
            case (t)
              ACT_RELU:    er = (xs[ngot] > 0) ? xr : 0.0;
              ACT_SIGMOID: er = 1.0 / (1.0 + $exp(-xr));
              default:     er = xr / (1.0 + $exp(-xr));
            endcase
            yr = (t == ACT_SWISH) ? 0.025 * ((xr < 0 ? -xr : xr) + 1.0) : 0.025;
            if (t == ACT_RELU) yr = 0.0;
            checks++;
            if ((gr - er > yr) || (er - gr > yr)) begin
              failures++;
              if (failures < 10) $display("act %0d: x=%f got %f exp %f", t, xr, gr, er);
            end
            ngot++;
          end
        end
        out_ready <= 0;
      end
    join
    cyc = $time / 10 - t0;
    checks++; if (ngot != N*L) begin failures++; $display("act: %0d words", ngot); end
    if (!stall) begin
      checks++; if (cyc > N + 4) begin failures++; $display("act: %0d cycles for %0d words", cyc, N); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(ACT_RELU, 100, 0);
    run_case(ACT_SIGMOID, 100, 1);
    run_case(ACT_SWISH, 100, 1);
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
