// tb_fm_pad: the padding stage alone. Random feature-maps (2 lanes) with asymmetric
// padding on each axis are streamed in with random gaps and read with random back-pressure;
// the output must be the padded feature-map in H, W, D, C order (pad value at the border),
// followed by one 'done' pulse, with every input word consumed exactly once.
module tb_fm_pad;
  import harflow_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [DIM_W-1:0] hp, wp, dp, cw, h, w, d; logic [2:0] phs, pws, pds;
  data_t pad_value;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, done;
  logic [L-1:0][DATA_W-1:0] in_data, out_data;
  fm_pad #(.LANES(L)) dut (.*);

  typedef logic [L-1:0][DATA_W-1:0] word_t;
  task automatic run_case(int H, int W, int D, int CW, int ph0, int ph1, int pw0, int pw1,
                          int pd0, int pd1);
    word_t iq [$], eq [$], x [int];
    int dn = 0;
    for (int i = 0; i < H*W*D*CW; i++) begin
      word_t v;
      v = word_t'({$urandom, $urandom});
      iq.push_back(v); x[i] = v;
    end
    pad_value = data_t'($urandom);
    for (int a = 0; a < H+ph0+ph1; a++) for (int b = 0; b < W+pw0+pw1; b++)
      for (int c = 0; c < D+pd0+pd1; c++) for (int k = 0; k < CW; k++) begin
        int ih, iw, id;
        ih = a - ph0; iw = b - pw0; id = c - pd0;
        if (ih < 0 || ih >= H || iw < 0 || iw >= W || id < 0 || id >= D) eq.push_back({L{pad_value}});
        else eq.push_back(x[((ih*W + iw)*D + id)*CW + k]);
      end
    h = H; w = W; d = D; cw = CW; hp = H+ph0+ph1; wp = W+pw0+pw1; dp = D+pd0+pd1;
    phs = 3'(ph0); pws = 3'(pw0); pds = 3'(pd0);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    fork
      begin
        while (iq.size() > 0) begin
          in_valid <= ($urandom_range(0, 2) != 0); in_data <= iq[0]; @(posedge clk);
          if (in_valid && in_ready) void'(iq.pop_front());
        end
        in_valid <= 0;
      end
      while (eq.size() > 0) begin
        out_ready <= ($urandom_range(0, 3) != 0); @(posedge clk);
        if (done) dn++;
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != eq[0]) begin failures++; if (failures < 8) $display("got %h exp %h", out_data, eq[0]); end
          void'(eq.pop_front());
        end
      end
    join
    out_ready <= 0;
    repeat (5) begin @(posedge clk); if (done) dn++; end
    checks++; if (dn != 1) begin failures++; $display("done pulses %0d", dn); end
    checks++; if (out_valid) begin failures++; $display("extra output"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    run_case(3, 4, 2, 2, 1, 1, 2, 0, 0, 1);
    run_case(2, 2, 3, 1, 0, 0, 0, 0, 0, 0);
    run_case(4, 3, 3, 3, 3, 2, 1, 3, 2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
