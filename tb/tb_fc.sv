// tb_fc: self-checking test of the fully-connected node (2 lanes): C=12 inputs, F=6
// outputs, then C=8, F=4 with partial-sum input. Expected values from a dot-product loop
// in the testbench; random stream gaps and back-pressure. The cycle count must be at least
// (C/2)*(F/2), the compute bound C*F/(c_in*c_out).
module tb_fc;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [DIM_W-1:0] channels, filters; logic use_psum;
  logic in_valid = 0, in_ready, wt_valid = 0, wt_ready, ps_valid = 0, ps_ready;
  logic out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, wt_data, ps_data, out_data;

  fc #(.LANES(L), .CW_MAX(16), .FG_MAX(8)) dut (.*);

  int x [32]; int w [16][32]; int p [16]; int expv [16];
  logic [L-1:0][DATA_W-1:0] in_q [$], wt_q [$], ps_q [$];

  task automatic run_case(int C, int F, bit psm);
    int ngot, t0, cyc;
    for (int c = 0; c < C; c++) x[c] = int'($urandom_range(0, 2047)) - 1024;
    for (int f = 0; f < F; f++) begin
      longint acc = 0;
      p[f] = psm ? int'($urandom_range(0, 511)) - 256 : 0;
      for (int c = 0; c < C; c++) begin
        w[f][c] = int'($urandom_range(0, 511)) - 256;
        acc += longint'(x[c]) * w[f][c];
      end
      acc = (acc >>> 8) + p[f];
      expv[f] = acc > 32767 ? 32767 : (acc < -32768 ? -32768 : int'(acc));
    end
    in_q.delete(); wt_q.delete(); ps_q.delete();
    for (int cw = 0; cw < C/L; cw++) begin
      logic [L-1:0][DATA_W-1:0] b;
      for (int l = 0; l < L; l++) b[l] = DATA_W'(x[cw*L+l]);
      in_q.push_back(b);
      for (int fg = 0; fg < F/L; fg++) for (int o = 0; o < L; o++) begin
        for (int l = 0; l < L; l++) b[l] = DATA_W'(w[fg*L+o][cw*L+l]);
        wt_q.push_back(b);
      end
    end
    for (int fg = 0; fg < F/L; fg++) begin
      logic [L-1:0][DATA_W-1:0] b;
      for (int l = 0; l < L; l++) b[l] = DATA_W'(p[fg*L+l]);
      ps_q.push_back(b);
    end
    if (!psm) ps_q.delete();
    channels = DIM_W'(C); filters = DIM_W'(F); use_psum = psm;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10; ngot = 0;
    fork
      begin
        while (wt_q.size() > 0) begin
          wt_valid <= ($urandom_range(0, 3) != 0); wt_data <= wt_q[0]; @(posedge clk);
          if (wt_valid && wt_ready) void'(wt_q.pop_front());
        end
        wt_valid <= 0;
      end
      begin
        while (in_q.size() > 0) begin
          in_valid <= ($urandom_range(0, 3) != 0); in_data <= in_q[0]; @(posedge clk);
          if (in_valid && in_ready) void'(in_q.pop_front());
        end
        in_valid <= 0;
      end
      begin
        while (ps_q.size() > 0) begin
          ps_valid <= ($urandom_range(0, 1) != 0); ps_data <= ps_q[0]; @(posedge clk);
          if (ps_valid && ps_ready) void'(ps_q.pop_front());
        end
        ps_valid <= 0;
      end
      begin
        while (!done) begin
          out_ready <= ($urandom_range(0, 3) != 0); @(posedge clk);
          if (out_valid && out_ready) for (int l = 0; l < L; l++) begin
            checks++;
            if ($signed(out_data[l]) != expv[ngot]) begin
              failures++; $display("fc: out %0d got %0d exp %0d", ngot, $signed(out_data[l]), expv[ngot]);
            end
            ngot++;
          end
        end
        out_ready <= 0;
      end
    join
    cyc = $time / 10 - t0;
    checks++; if (ngot != F) begin failures++; $display("fc: %0d outputs, expected %0d", ngot, F); end
    checks++; if (cyc < (C/L)*(F/L)) begin failures++; $display("fc: %0d cycles too few", cyc); end
    $display("fc C=%0d F=%0d: %0d cycles", C, F, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(12, 6, 0);
    run_case(8, 4, 1);
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
