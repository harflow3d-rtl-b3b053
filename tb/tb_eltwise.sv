// tb_eltwise: self-checking test of the element-wise node (2 lanes): add of two streams,
// multiply of two streams, and broadcast multiply of a feature-map by a per-channel
// vector (6 channels). References computed here (saturating Q8.8 add and multiply).
module tb_eltwise;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [31:0] n_words; logic [DIM_W-1:0] channels; eltw_e etype; logic bcast;
  logic a_valid = 0, a_ready, b_valid = 0, b_ready, out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] a_data, b_data, out_data;
  eltwise #(.LANES(L), .CW_MAX(8)) dut (.*);

  int av [512], bv [512], expv [512];
  logic [L-1:0][DATA_W-1:0] a_q [$], b_q [$];

  function automatic int sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  task automatic run_case(eltw_e t, bit bc, int N, int C);
    int ngot;
    for (int i = 0; i < N*L; i++) begin
      av[i] = int'($urandom_range(0, 40000)) - 20000;
      bv[i] = int'($urandom_range(0, 2000)) - 1000;
    end
    for (int i = 0; i < N*L; i++) begin
      int b;
      b = bc ? bv[i % C] : bv[i];
      expv[i] = (t == ELTW_ADD) ? sat(longint'(av[i]) + b) : sat((longint'(av[i]) * b) >>> 8);
    end
    a_q.delete(); b_q.delete();
    for (int i = 0; i < N; i++) begin
      logic [L-1:0][DATA_W-1:0] x;
      for (int l = 0; l < L; l++) x[l] = DATA_W'(av[i*L+l]);
      a_q.push_back(x);
      for (int l = 0; l < L; l++) x[l] = DATA_W'(bv[i*L+l]);
      if (!bc || i < C/L) b_q.push_back(x);
    end
    n_words = N; channels = DIM_W'(C); etype = t; bcast = bc;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    ngot = 0;
    fork
      begin
        while (a_q.size() > 0) begin
          a_valid <= ($urandom_range(0, 3) != 0); a_data <= a_q[0]; @(posedge clk);
          if (a_valid && a_ready) void'(a_q.pop_front());
        end
        a_valid <= 0;
      end
      begin
        while (b_q.size() > 0) begin
          b_valid <= ($urandom_range(0, 3) != 0); b_data <= b_q[0]; @(posedge clk);
          if (b_valid && b_ready) void'(b_q.pop_front());
        end
        b_valid <= 0;
      end
      begin
        while (!done) begin
          out_ready <= ($urandom_range(0, 3) != 0); @(posedge clk);
          if (out_valid && out_ready) for (int l = 0; l < L; l++) begin
            checks++;
            if ($signed(out_data[l]) != expv[ngot]) begin
              failures++;
              if (failures < 10) $display("eltw %0d/%0d: %0d got %0d exp %0d", t, bc, ngot, $signed(out_data[l]), expv[ngot]);
            end
            ngot++;
          end
        end
        out_ready <= 0;
      end
    join
    checks++; if (ngot != N*L) begin failures++; $display("eltw: %0d words", ngot); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    run_case(ELTW_ADD, 0, 50, 6);
    run_case(ELTW_MUL, 0, 50, 6);
    run_case(ELTW_MUL, 1, 60, 6);
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
