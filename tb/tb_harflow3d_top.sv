// tb_harflow3d_top: end-to-end test of the accelerator at its default (full-size)
// parameters. A host model programs the AXI-Lite registers and polls STATUS; an AXI memory
// model with random handshake delays stands in for the DDR. It runs a small 3D CNN made of
// the layer types of the target models, each result checked word by word against a
// reference model, the next layer reading the accelerator's own output from memory:
//   L0  1x7x7 stride (1,2,2) pad (0,3,3) convolution (the stem shape), swish fused through
//       the loop-back
//   L1  3x3x3 pad 1 convolution, ReLU fused through the loop-back
//   L2  3x3x3 stride 2 pad 1 max pooling
//   L3  depth-wise 3x1x1 convolution with a residual added through the partial-sum input
//       (weights loaded in a first phase, then the routes are switched)
//   L4  3x3x3 pad 1 average pooling
//   L5  global average pooling
//   L6  fully connected with bias (partial-sum input), sigmoid fused through the loop-back
//   L7  point-wise convolution fused through the loop-back with a broadcast element-wise
//       multiply by L6's vector (squeeze-and-excitation)
//   L8  element-wise addition of two full feature-maps
// While L3 runs the host already writes L7's convolution parameters (double-buffered
// runtime parameters). Monitors count each mechanism (back-pressure stalls, loop-back
// beats, kernel-size bypass, runtime mode switches of every node, partial sums, depth-wise,
// broadcast, each activation and pooling type, multi-burst DMA transfers, route switches
// during a layer, parameter writes during a run); any mechanism that never happened is a
// failure.
module tb_harflow3d_top;
  import harflow_pkg::*;
  localparam int KMAX = 5 * 7 * 7, FINE = 35;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata; logic [3:0] s_wstrb = 4'hf; logic [1:0] s_bresp, s_rresp;
  logic [1:0][31:0] rd_araddr; logic [1:0][7:0] rd_arlen; logic [1:0][2:0] rd_arsize;
  logic [1:0][1:0] rd_arburst; logic [1:0] rd_arvalid, rd_arready, rd_rlast, rd_rvalid, rd_rready;
  logic [1:0][15:0] rd_rdata;
  logic [31:0] wr_awaddr; logic [7:0] wr_awlen; logic [2:0] wr_awsize; logic [1:0] wr_awburst;
  logic wr_awvalid, wr_awready, wr_wlast, wr_wvalid, wr_wready, wr_bvalid, wr_bready;
  logic [15:0] wr_wdata; logic [1:0] wr_wstrb, wr_bresp;
  logic [N_UNITS-1:0] done_irq;

  harflow3d_top dut (.*);

  axi_mem_model #(.DW(16), .NRD(2), .WORDS(65536)) mem (
    .clk, .rst_n, .araddr(rd_araddr), .arlen(rd_arlen), .arburst(rd_arburst),
    .arvalid(rd_arvalid), .arready(rd_arready), .rdata(rd_rdata), .rlast(rd_rlast),
    .rvalid(rd_rvalid), .rready(rd_rready), .awaddr(wr_awaddr), .awlen(wr_awlen),
    .awburst(wr_awburst), .awvalid(wr_awvalid), .awready(wr_awready), .wdata(wr_wdata),
    .wlast(wr_wlast), .wvalid(wr_wvalid), .wready(wr_wready), .bresp(wr_bresp),
    .bvalid(wr_bvalid), .bready(wr_bready));

  // ------------------------------------------------------------ mechanism monitors
  int n_stall, n_loop, n_psum, n_fc_psum, n_dw, n_bypass, n_conv_modes, n_bcast, n_eltw_add;
  int n_act [3], n_pool [2], n_gap, n_fc, n_act_modes, n_pool_modes, n_reroute, n_param_wr;
  int n_long_dma;
  logic [9:0] prev_conv_mode; act_e prev_act; pool_e prev_pool;
  initial begin
    n_stall = 0; n_loop = 0; n_psum = 0; n_fc_psum = 0; n_dw = 0; n_bypass = 0;
    n_conv_modes = 0; n_bcast = 0; n_eltw_add = 0; n_act = '{0, 0, 0}; n_pool = '{0, 0};
    n_gap = 0; n_fc = 0; n_act_modes = 0; n_pool_modes = 0; n_reroute = 0; n_param_wr = 0;
    n_long_dma = 0; prev_conv_mode = '0; prev_act = ACT_RELU; prev_pool = POOL_MAX;
  end
  always @(posedge clk) if (rst_n) begin
    if (|(dut.xi_dv & ~dut.xi_dr) || |(dut.xo_dv & ~dut.xo_dr)) n_stall++;
    if (dut.xo_dv[XO_LOOP] && dut.xo_dr[XO_LOOP]) n_loop++;
    if (dut.xi_dv[XI_CONV_PS] && dut.xi_dr[XI_CONV_PS]) n_psum++;
    if (dut.xi_dv[XI_FC_PS] && dut.xi_dr[XI_FC_PS]) n_fc_psum++;
    if (dut.u_conv.go) begin
      if (dut.u_conv.ksize < 9'(KMAX)) n_bypass++;
      if ({dut.u_conv.ksize, dut.u_conv.dw_q} != prev_conv_mode) n_conv_modes++;
      prev_conv_mode = {dut.u_conv.ksize, dut.u_conv.dw_q};
    end
    if (dut.u_conv.out_valid && dut.u_conv.out_ready && dut.u_conv.dw_q) n_dw++;
    if (dut.u_eltw.out_valid && dut.u_eltw.out_ready) begin
      if (dut.u_eltw.bc_q) n_bcast++;
      if (dut.u_eltw.t_q == ELTW_ADD) n_eltw_add++;
    end
    if (dut.u_act.out_valid && dut.u_act.out_ready) begin
      n_act[dut.u_act.t_q]++;
      if (dut.u_act.t_q != prev_act) n_act_modes++;
      prev_act = dut.u_act.t_q;
    end
    if (dut.u_pool.out_valid && dut.u_pool.out_ready) begin
      n_pool[dut.u_pool.ptype_q]++;
      if (dut.u_pool.ptype_q != prev_pool) n_pool_modes++;
      prev_pool = dut.u_pool.ptype_q;
    end
    if (dut.u_gap.out_valid && dut.u_gap.out_ready) n_gap++;
    if (dut.u_fc.out_valid && dut.u_fc.out_ready) n_fc++;
  end

  // ------------------------------------------------------------ host (AXI-Lite master)
  task automatic axil_wr(int idx, logic [31:0] v);
    @(negedge clk); s_awaddr = 8'(idx * 4); s_wdata = v; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axil_rd(int idx, output logic [31:0] v);
    @(negedge clk); s_araddr = 8'(idx * 4); s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  task automatic wait_done(logic [N_UNITS-1:0] mask);
    logic [31:0] st;
    do begin repeat (20) @(posedge clk); axil_rd(REG_STATUS, st); end
    while ((st[N_UNITS-1:0] & mask) != mask);
  endtask

  logic [31:0] xin_cur, xout_cur;
  function automatic logic [31:0] route_in(int dst0, int src0, int dst1 = -1, int src1 = 0,
                                           int dst2 = -1, int src2 = 0);
    logic [31:0] r = '1;
    r[2*dst0 +: 2] = 2'(src0);
    if (dst1 >= 0) r[2*dst1 +: 2] = 2'(src1);
    if (dst2 >= 0) r[2*dst2 +: 2] = 2'(src2);
    return r;
  endfunction
  function automatic logic [31:0] route_out(int wr_src, int loop_src = 7);
    logic [31:0] r = '1;
    r[3*XO_WR +: 3] = 3'(wr_src); r[3*XO_LOOP +: 3] = 3'(loop_src);
    return r;
  endfunction

  // start units with the given routes; counts a route switch while a unit keeps running
  task automatic launch(logic [31:0] xin, logic [31:0] xout, logic [N_UNITS-1:0] mask);
    logic [31:0] st;
    axil_wr(REG_XBAR_IN, xin); axil_wr(REG_XBAR_OUT, xout);
    axil_rd(REG_STATUS, st);
    if (st[16 +: N_UNITS] != 0 && xin != xin_cur) n_reroute++;
    xin_cur = xin; xout_cur = xout;
    axil_wr(REG_START, 32'(mask));
  endtask

  task automatic dma(int k, int word_addr, int n);
    int ra;
    ra = (k == 0) ? REG_RD0_ADDR : (k == 1) ? REG_RD1_ADDR : REG_WR_ADDR;
    axil_wr(ra, 32'(word_addr * 2)); axil_wr(ra + 1, 32'(n));
    if (n > 16) n_long_dma++;
  endtask

  // ------------------------------------------------------------ tensors and reference models
  typedef int tensor_t [];
  int next_free = 0;
  function automatic int alloc(int n);
    int a = next_free;
    next_free += n + 16;
    return a;
  endfunction
  task automatic put(int a, tensor_t t);
    foreach (t[i]) mem.mem[a + i] = 16'(t[i]);
  endtask
  function automatic tensor_t rnd_tensor(int n, int lo, int hi);
    tensor_t t = new[n];
    foreach (t[i]) t[i] = int'($urandom_range(0, hi - lo)) + lo;
    return t;
  endfunction
  function automatic int s16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  task automatic check(string name, int a, tensor_t e);
    int bad = 0;
    foreach (e[i]) begin
      checks++;
      if (int'($signed(mem.mem[a + i])) != e[i]) begin
        failures++; bad++;
        if (bad < 6) $display("%s: word %0d got %0d exp %0d", name, i, $signed(mem.mem[a + i]), e[i]);
      end
    end
    $display("%s: %0d words checked, %0d wrong (t=%0d cycles)", name, e.size(), bad, $time / 10);
  endtask

  // convolution, symmetric padding; weights [f][c][a][b][e] (depth-wise: [c][0][a][b][e])
  function automatic tensor_t conv_ref(tensor_t x, int H, int W, int D, int C, tensor_t wt, int F,
                                       int kd, int kh, int kw, int jd, int jh, int jw,
                                       int pd, int ph, int pw, bit dw, tensor_t ps, bit use_ps);
    int Ho, Wo, Do, n;
    tensor_t y;
    Ho = (H + 2*ph - kh) / jh + 1; Wo = (W + 2*pw - kw) / jw + 1; Do = (D + 2*pd - kd) / jd + 1;
    y = new[Ho * Wo * Do * F]; n = 0;
    for (int ho = 0; ho < Ho; ho++) for (int wo = 0; wo < Wo; wo++) for (int od = 0; od < Do; od++)
      for (int f = 0; f < F; f++) begin
        longint acc;
        acc = 0;
        for (int c = 0; c < C; c++) begin
          if (dw && c != f) continue;
          for (int a = 0; a < kd; a++) for (int b = 0; b < kh; b++) for (int e = 0; e < kw; e++) begin
            int ih, iw, id, widx;
            ih = ho*jh + b - ph; iw = wo*jw + e - pw; id = od*jd + a - pd;
            widx = ((((dw ? f : f*C + c)) * kd + a) * kh + b) * kw + e;
            if (ih >= 0 && ih < H && iw >= 0 && iw < W && id >= 0 && id < D)
              acc += longint'(x[((ih*W + iw)*D + id)*C + c]) * longint'(wt[widx]);
          end
        end
        y[n] = s16((acc >>> FRAC_W) + (use_ps ? ps[n] : 0)); n++;
      end
    return y;
  endfunction

  // weight stream in the order the convolution node loads it (one lane)
  function automatic tensor_t conv_wt_stream(tensor_t wt, int F, int C, int kd, int kh, int kw, bit dw);
    int ksz, folds, n;
    tensor_t s;
    ksz = kd*kh*kw; folds = (ksz + FINE - 1) / FINE;
    s = new[C * (dw ? 1 : F) * folds * FINE]; n = 0;
    for (int c = 0; c < C; c++) for (int g = 0; g < (dw ? 1 : F); g++)
      for (int fo = 0; fo < folds; fo++) for (int i = 0; i < FINE; i++) begin
        int e, a, b, ee, f;
        e = fo*FINE + i; f = dw ? c : g;
        a = e % kd; ee = (e / kd) % kw; b = e / (kd*kw);
        s[n++] = (e < ksz) ? wt[((((dw ? f : f*C + c)) * kd + a) * kh + b) * kw + ee] : 0;
      end
    return s;
  endfunction

  function automatic tensor_t pool_ref(tensor_t x, int H, int W, int D, int C, int k, int s, int p, bit avg);
    int Ho, Wo, Do, n;
    tensor_t y;
    Ho = (H + 2*p - k) / s + 1; Wo = (W + 2*p - k) / s + 1; Do = (D + 2*p - k) / s + 1;
    y = new[Ho * Wo * Do * C]; n = 0;
    for (int ho = 0; ho < Ho; ho++) for (int wo = 0; wo < Wo; wo++) for (int od = 0; od < Do; od++)
      for (int c = 0; c < C; c++) begin
        longint acc; int m;
        acc = 0; m = -32768;
        for (int a = 0; a < k; a++) for (int b = 0; b < k; b++) for (int e = 0; e < k; e++) begin
          int ih, iw, id, v;
          ih = ho*s + b - p; iw = wo*s + e - p; id = od*s + a - p;
          v = (ih >= 0 && ih < H && iw >= 0 && iw < W && id >= 0 && id < D)
              ? x[((ih*W + iw)*D + id)*C + c] : (avg ? 0 : -32768);
          acc += v; if (v > m) m = v;
        end
        y[n++] = avg ? s16(acc / (k*k*k)) : m;
      end
    return y;
  endfunction

  function automatic tensor_t act_ref(tensor_t x, act_e t);
    tensor_t y = new[x.size()];
    foreach (x[i]) begin
      data_t v = data_t'(x[i]);
      y[i] = int'($signed((t == ACT_RELU) ? ((v < 0) ? 16'sd0 : v)
                         : (t == ACT_SIGMOID) ? sigmoid_q(v) : qmul(v, sigmoid_q(v))));
    end
    return y;
  endfunction

  // ------------------------------------------------------------ the network
  function automatic logic [31:0] kreg(int kd, int kh, int kw, int jd, int jh, int jw);
    return 32'(kd | (kh << 4) | (kw << 8) | (jd << 12) | (jh << 15) | (jw << 18));
  endfunction
  function automatic logic [31:0] preg(int pd, int ph, int pw);
    return 32'(pd | (pd << 3) | (ph << 6) | (ph << 9) | (pw << 12) | (pw << 15));
  endfunction

  task automatic conv_regs(int H, int W, int D, int C, int F, int kd, int kh, int kw,
                           int jd, int jh, int jw, int pd, int ph, int pw, bit dw, bit ps);
    axil_wr(REG_CONV_HW, 32'((H << 16) | W)); axil_wr(REG_CONV_DC, 32'((D << 16) | C));
    axil_wr(REG_CONV_F, 32'(F | (int'(dw) << 16) | (int'(ps) << 17)));
    axil_wr(REG_CONV_K, kreg(kd, kh, kw, jd, jh, jw)); axil_wr(REG_CONV_P, preg(pd, ph, pw));
  endtask

  localparam logic [N_UNITS-1:0] M_RD0 = 1 << U_RD0, M_RD1 = 1 << U_RD1, M_WR = 1 << U_WR,
    M_CONV = 1 << U_CONV, M_FC = 1 << U_FC, M_POOL = 1 << U_POOL, M_GAP = 1 << U_GAP,
    M_ACT = 1 << U_ACT, M_ELTW = 1 << U_ELTW;

  initial begin
    tensor_t x0, w0, y0, w1, y1, y2, w3, y3, y4, g5, w6, b6, f6, y6, w7, c7, y7, r8, y8;
    int a_x0, a_w0, a_y0, a_w1, a_y1, a_y2, a_w3, a_y3, a_y4, a_g5, a_w6, a_b6, a_y6, a_w7,
        a_y7, a_r8, a_y8;
    tensor_t none;
    none = new[1];
    xin_cur = '1; xout_cur = '1;
    repeat (3) @(posedge clk); rst_n <= 1;
    repeat (3) @(posedge clk);

    // L0: stem 1x7x7 / (1,2,2), pad (0,3,3): 8x8x4x2 -> 4x4x4x4, swish via loop-back
    x0 = rnd_tensor(8*8*4*2, -512, 511); w0 = rnd_tensor(4*2*49, -128, 127);
    y0 = act_ref(conv_ref(x0, 8, 8, 4, 2, w0, 4, 1, 7, 7, 1, 2, 2, 0, 3, 3, 0, none, 0), ACT_SWISH);
    a_x0 = alloc(x0.size()); put(a_x0, x0);
    a_w0 = alloc(1200); put(a_w0, conv_wt_stream(w0, 4, 2, 1, 7, 7, 0));
    a_y0 = alloc(y0.size());
    conv_regs(8, 8, 4, 2, 4, 1, 7, 7, 1, 2, 2, 0, 3, 3, 0, 0);
    axil_wr(REG_ACT_N, y0.size()); axil_wr(REG_ACT_T, ACT_SWISH);
    dma(0, a_x0, x0.size()); dma(1, a_w0, conv_wt_stream(w0, 4, 2, 1, 7, 7, 0).size());
    dma(2, a_y0, y0.size());
    launch(route_in(XI_CONV, XI_SRC_RD0, XI_CONV_WT, XI_SRC_RD1, XI_ACT, XI_SRC_LOOP),
           route_out(XO_SRC_ACT, XO_SRC_CONV), M_RD0 | M_RD1 | M_WR | M_CONV | M_ACT);
    wait_done(M_RD0 | M_RD1 | M_WR | M_CONV | M_ACT);
    check("L0 conv1x7x7+swish", a_y0, y0);

    // L1: 3x3x3 pad 1, 4x4x4x4 -> 4x4x4x4, ReLU via loop-back
    w1 = rnd_tensor(4*4*27, -128, 127);
    y1 = act_ref(conv_ref(y0, 4, 4, 4, 4, w1, 4, 3, 3, 3, 1, 1, 1, 1, 1, 1, 0, none, 0), ACT_RELU);
    a_w1 = alloc(1000); put(a_w1, conv_wt_stream(w1, 4, 4, 3, 3, 3, 0));
    a_y1 = alloc(y1.size());
    conv_regs(4, 4, 4, 4, 4, 3, 3, 3, 1, 1, 1, 1, 1, 1, 0, 0);
    axil_wr(REG_ACT_N, y1.size()); axil_wr(REG_ACT_T, ACT_RELU);
    dma(0, a_y0, y0.size()); dma(1, a_w1, conv_wt_stream(w1, 4, 4, 3, 3, 3, 0).size());
    dma(2, a_y1, y1.size());
    launch(route_in(XI_CONV, XI_SRC_RD0, XI_CONV_WT, XI_SRC_RD1, XI_ACT, XI_SRC_LOOP),
           route_out(XO_SRC_ACT, XO_SRC_CONV), M_RD0 | M_RD1 | M_WR | M_CONV | M_ACT);
    wait_done(M_RD0 | M_RD1 | M_WR | M_CONV | M_ACT);
    check("L1 conv3x3x3+relu", a_y1, y1);

    // L2: max pool 3x3x3 / 2, pad 1: 4x4x4x4 -> 2x2x2x4
    y2 = pool_ref(y1, 4, 4, 4, 4, 3, 2, 1, 0);
    a_y2 = alloc(y2.size());
    axil_wr(REG_POOL_HW, (4 << 16) | 4); axil_wr(REG_POOL_DC, (4 << 16) | 4);
    axil_wr(REG_POOL_K, kreg(3, 3, 3, 2, 2, 2)); axil_wr(REG_POOL_P, preg(1, 1, 1));
    axil_wr(REG_POOL_T, POOL_MAX);
    dma(0, a_y1, y1.size()); dma(2, a_y2, y2.size());
    launch(route_in(XI_POOL, XI_SRC_RD0), route_out(XO_SRC_POOL), M_RD0 | M_WR | M_POOL);
    wait_done(M_RD0 | M_WR | M_POOL);
    check("L2 maxpool", a_y2, y2);

    // L3: depth-wise 3x1x1 pad (1,0,0) with the input added back as partial sums
    w3 = rnd_tensor(4*3, -256, 255);
    y3 = conv_ref(y2, 2, 2, 2, 4, w3, 4, 3, 1, 1, 1, 1, 1, 1, 0, 0, 1, y2, 1);
    a_w3 = alloc(200); put(a_w3, conv_wt_stream(w3, 4, 4, 3, 1, 1, 1));
    a_y3 = alloc(y3.size());
    conv_regs(2, 2, 2, 4, 4, 3, 1, 1, 1, 1, 1, 1, 0, 0, 1, 1);
    dma(1, a_w3, conv_wt_stream(w3, 4, 4, 3, 1, 1, 1).size());
    launch(route_in(XI_CONV_WT, XI_SRC_RD1), route_out(XO_SRC_CONV), M_RD1 | M_CONV);
    wait_done(M_RD1);
    dma(0, a_y2, y2.size()); dma(1, a_y2, y2.size()); dma(2, a_y3, y3.size());
    launch(route_in(XI_CONV, XI_SRC_RD0, XI_CONV_PS, XI_SRC_RD1), route_out(XO_SRC_CONV),
           M_RD0 | M_RD1 | M_WR);
    // L7's convolution parameters, written while L3 still runs
    begin
      logic [31:0] st;
      axil_rd(REG_STATUS, st);
      conv_regs(2, 2, 2, 4, 8, 1, 1, 1, 1, 1, 1, 0, 0, 0, 0, 0);
      if (st[16 + U_CONV]) n_param_wr++;
    end
    wait_done(M_RD0 | M_RD1 | M_WR | M_CONV);
    check("L3 depthwise3x1x1+psum", a_y3, y3);

    // L4: average pool 3x3x3 / 1 pad 1: 2x2x2x4 -> 2x2x2x4
    y4 = pool_ref(y3, 2, 2, 2, 4, 3, 1, 1, 1);
    a_y4 = alloc(y4.size());
    axil_wr(REG_POOL_HW, (2 << 16) | 2); axil_wr(REG_POOL_DC, (2 << 16) | 4);
    axil_wr(REG_POOL_K, kreg(3, 3, 3, 1, 1, 1)); axil_wr(REG_POOL_P, preg(1, 1, 1));
    axil_wr(REG_POOL_T, POOL_AVG);
    dma(0, a_y3, y3.size()); dma(2, a_y4, y4.size());
    launch(route_in(XI_POOL, XI_SRC_RD0), route_out(XO_SRC_POOL), M_RD0 | M_WR | M_POOL);
    wait_done(M_RD0 | M_WR | M_POOL);
    check("L4 avgpool", a_y4, y4);

    // L5: global average pooling over the 8 pixels
    g5 = new[4];
    for (int c = 0; c < 4; c++) begin
      longint s;
      s = 0;
      for (int p = 0; p < 8; p++) s += y4[p*4 + c];
      g5[c] = s16(s / 8);
    end
    a_g5 = alloc(4);
    axil_wr(REG_GAP_N, 8); axil_wr(REG_GAP_C, 4);
    dma(0, a_y4, y4.size()); dma(2, a_g5, 4);
    launch(route_in(XI_GAP, XI_SRC_RD0), route_out(XO_SRC_GAP), M_RD0 | M_WR | M_GAP);
    wait_done(M_RD0 | M_WR | M_GAP);
    check("L5 gap", a_g5, g5);

    // L6: fully connected 4 -> 8 with bias, sigmoid via loop-back
    w6 = rnd_tensor(8*4, -512, 511); b6 = rnd_tensor(8, -256, 255);
    f6 = new[8];
    for (int f = 0; f < 8; f++) begin
      longint s;
      s = 0;
      for (int c = 0; c < 4; c++) s += longint'(g5[c]) * w6[f*4 + c];
      f6[f] = s16((s >>> FRAC_W) + b6[f]);
    end
    y6 = act_ref(f6, ACT_SIGMOID);
    a_w6 = alloc(32); a_b6 = alloc(8); a_y6 = alloc(8);
    for (int c = 0; c < 4; c++) for (int f = 0; f < 8; f++) mem.mem[a_w6 + c*8 + f] = 16'(w6[f*4 + c]);
    put(a_b6, b6);
    axil_wr(REG_FC_CF, (4 << 16) | 8); axil_wr(REG_FC_FLAG, 1);
    axil_wr(REG_ACT_N, 8); axil_wr(REG_ACT_T, ACT_SIGMOID);
    dma(1, a_w6, 32);
    launch(route_in(XI_FC_WT, XI_SRC_RD1), route_out(XO_SRC_ACT, XO_SRC_FC), M_RD1 | M_FC);
    wait_done(M_RD1);
    dma(0, a_g5, 4); dma(1, a_b6, 8); dma(2, a_y6, 8);
    launch(route_in(XI_FC, XI_SRC_RD0, XI_FC_PS, XI_SRC_RD1, XI_ACT, XI_SRC_LOOP),
           route_out(XO_SRC_ACT, XO_SRC_FC), M_RD0 | M_RD1 | M_WR | M_ACT);
    wait_done(M_RD0 | M_RD1 | M_WR | M_ACT | M_FC);
    check("L6 fc+bias+sigmoid", a_y6, y6);

    // L7: point-wise conv 4 -> 8 (parameters written during L3) fused with a broadcast multiply
    w7 = rnd_tensor(8*4, -256, 255);
    c7 = conv_ref(y4, 2, 2, 2, 4, w7, 8, 1, 1, 1, 1, 1, 1, 0, 0, 0, 0, none, 0);
    y7 = new[c7.size()];
    foreach (c7[i]) y7[i] = int'($signed(qmul(data_t'(c7[i]), data_t'(y6[i % 8]))));
    a_w7 = alloc(2000); put(a_w7, conv_wt_stream(w7, 8, 4, 1, 1, 1, 0));
    a_y7 = alloc(y7.size());
    dma(1, a_w7, conv_wt_stream(w7, 8, 4, 1, 1, 1, 0).size());
    launch(route_in(XI_CONV_WT, XI_SRC_RD1), route_out(XO_SRC_ELTW, XO_SRC_CONV), M_RD1 | M_CONV);
    wait_done(M_RD1);
    axil_wr(REG_ELTW_N, y7.size()); axil_wr(REG_ELTW_CT, 8 | (ELTW_MUL << 16) | (1 << 17));
    dma(0, a_y4, y4.size()); dma(1, a_y6, 8); dma(2, a_y7, y7.size());
    launch(route_in(XI_CONV, XI_SRC_RD0, XI_ELTW_B, XI_SRC_RD1, XI_ELTW_A, XI_SRC_LOOP),
           route_out(XO_SRC_ELTW, XO_SRC_CONV), M_RD0 | M_RD1 | M_WR | M_ELTW);
    wait_done(M_RD0 | M_RD1 | M_WR | M_ELTW | M_CONV);
    check("L7 pointwise+bcast-mul", a_y7, y7);

    // L8: element-wise addition of L7's output and another feature-map
    r8 = rnd_tensor(y7.size(), -20000, 20000);
    y8 = new[y7.size()];
    foreach (y8[i]) y8[i] = s16(longint'(y7[i]) + r8[i]);
    a_r8 = alloc(r8.size()); put(a_r8, r8); a_y8 = alloc(y8.size());
    axil_wr(REG_ELTW_N, y8.size()); axil_wr(REG_ELTW_CT, 8 | (ELTW_ADD << 16));
    dma(0, a_y7, y7.size()); dma(1, a_r8, r8.size()); dma(2, a_y8, y8.size());
    launch(route_in(XI_ELTW_A, XI_SRC_RD0, XI_ELTW_B, XI_SRC_RD1), route_out(XO_SRC_ELTW),
           M_RD0 | M_RD1 | M_WR | M_ELTW);
    wait_done(M_RD0 | M_RD1 | M_WR | M_ELTW);
    check("L8 add", a_y8, y8);

    // ---------------- mechanism coverage
    begin
      string names [$]; int counts [$];
      names = '{"stall", "loopback", "conv_psum", "fc_psum", "depthwise", "kernel_bypass",
                "conv_mode_switch", "broadcast", "eltwise_add", "act_relu", "act_sigmoid",
                "act_swish", "act_mode_switch", "pool_max", "pool_avg", "pool_mode_switch",
                "gap", "fc", "reroute_mid_layer", "param_write_during_run", "multi_burst_dma",
                "axi_read_gaps", "axi_bursts"};
      counts = '{n_stall, n_loop, n_psum, n_fc_psum, n_dw, n_bypass, n_conv_modes, n_bcast,
                 n_eltw_add, n_act[ACT_RELU], n_act[ACT_SIGMOID], n_act[ACT_SWISH], n_act_modes,
                 n_pool[POOL_MAX], n_pool[POOL_AVG], n_pool_modes, n_gap, n_fc, n_reroute,
                 n_param_wr, n_long_dma, mem.stalls, mem.rd_bursts + mem.wr_bursts};
      foreach (names[i]) begin
        checks++;
        $display("mechanism %-24s %0d", names[i], counts[i]);
        if (counts[i] == 0) begin failures++; $display("mechanism %s never happened", names[i]); end
      end
      checks++;
      if (mem.errors != 0) begin failures++; $display("AXI protocol errors: %0d", mem.errors); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
