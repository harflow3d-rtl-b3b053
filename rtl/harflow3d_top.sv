// harflow3d_top: one accelerator instance - the sandwich of two stream crossbars with the
// hardware nodes (CONV, FC, POOL, global average pooling, ACT, ELTW) between them, DMAs to
// and from off-chip memory, and an AXI-Lite control block for the host CPU.
//   read DMAs -> input crossbar -> node inputs      (11 destinations, see harflow_pkg)
//   node outputs -> output crossbar -> write DMA
//                                   -> loop-back FIFO -> input crossbar
// The loop-back lets one node's output feed another node directly, e.g. a convolution
// fused with its activation, without a round trip through memory. Every node and DMA is
// started by the host through REG_START and reports done in REG_STATUS.
// External ports: the AXI-Lite slave (s_*), two AXI4 read masters (rd0_*, rd1_*) and one
// AXI4 write master (wr_*), all with DW = LANES*16 bit data, for a memory controller.
// The paper's figure shows one read DMA; this instance has two so that the second operand
// of an element-wise layer, a convolution's partial sums or a residual branch can be read
// while the main feature-map streams (this design's choice). All nodes share LANES
// parallel streams (c_in = c_out = c = LANES).
module harflow3d_top
  import harflow_pkg::*;
#(
  parameter int LANES       = 1,
  parameter int CONV_KD     = 5,
  parameter int CONV_KH     = 7,
  parameter int CONV_KW     = 7,
  parameter int CONV_FINE   = 35,
  parameter int CONV_W_MAX  = 32,
  parameter int CONV_D_MAX  = 16,
  parameter int CONV_CW_MAX = 64,
  parameter int CONV_FG_MAX = 64,
  parameter int POOL_K      = 3,
  parameter int POOL_W_MAX  = 64,
  parameter int POOL_D_MAX  = 16,
  parameter int POOL_CW_MAX = 64,
  parameter int FC_CW_MAX   = 512,
  parameter int FC_FG_MAX   = 128,
  parameter int GAP_CW_MAX  = 512,
  parameter int ELTW_CW_MAX = 512,
  parameter int BURST       = 16,
  parameter int DW          = LANES * DATA_W
) (
  input  logic            clk,
  input  logic            rst_n,
  // AXI-Lite control
  input  logic [7:0]      s_awaddr,
  input  logic            s_awvalid,
  output logic            s_awready,
  input  logic [31:0]     s_wdata,
  input  logic [3:0]      s_wstrb,
  input  logic            s_wvalid,
  output logic            s_wready,
  output logic [1:0]      s_bresp,
  output logic            s_bvalid,
  input  logic            s_bready,
  input  logic [7:0]      s_araddr,
  input  logic            s_arvalid,
  output logic            s_arready,
  output logic [31:0]     s_rdata,
  output logic [1:0]      s_rresp,
  output logic            s_rvalid,
  input  logic            s_rready,
  // AXI4 read masters (index 0: rd0, 1: rd1)
  output logic [1:0][31:0]   rd_araddr,
  output logic [1:0][7:0]    rd_arlen,
  output logic [1:0][2:0]    rd_arsize,
  output logic [1:0][1:0]    rd_arburst,
  output logic [1:0]         rd_arvalid,
  input  logic [1:0]         rd_arready,
  input  logic [1:0][DW-1:0] rd_rdata,
  input  logic [1:0]         rd_rlast,
  input  logic [1:0]         rd_rvalid,
  output logic [1:0]         rd_rready,
  // AXI4 write master
  output logic [31:0]     wr_awaddr,
  output logic [7:0]      wr_awlen,
  output logic [2:0]      wr_awsize,
  output logic [1:0]      wr_awburst,
  output logic            wr_awvalid,
  input  logic            wr_awready,
  output logic [DW-1:0]   wr_wdata,
  output logic [DW/8-1:0] wr_wstrb,
  output logic            wr_wlast,
  output logic            wr_wvalid,
  input  logic            wr_wready,
  input  logic [1:0]      wr_bresp,
  input  logic            wr_bvalid,
  output logic            wr_bready,
  output logic [N_UNITS-1:0] done_irq   // done pulses, for an interrupt controller
);
  logic [31:0]        regs [NREGS];
  logic [31:0]        xin_q, xout_q;
  logic [N_UNITS-1:0] start, done;

  assign done_irq = done;

  ctrl_regs #(.AW(8)) u_ctrl (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .regs, .xbar_in_q(xin_q), .xbar_out_q(xout_q), .start, .unit_done(done)
  );

  // ---------------- input crossbar ----------------
  logic [XI_NSRC-1:0]         xi_sv, xi_sr;
  logic [XI_NSRC-1:0][DW-1:0] xi_sd;
  logic [XI_NDST-1:0]         xi_dv, xi_dr;
  logic [XI_NDST-1:0][DW-1:0] xi_dd;
  logic [1:0]                 xi_sel [XI_NDST];
  for (genvar d = 0; d < XI_NDST; d++) begin : g_xis
    assign xi_sel[d] = xin_q[2*d +: 2];
  end

  axis_xbar #(.N_SRC(XI_NSRC), .N_DST(XI_NDST), .W(DW), .SW(2)) u_xbar_in (
    .clk, .rst_n, .sel(xi_sel), .src_valid(xi_sv), .src_ready(xi_sr), .src_data(xi_sd),
    .dst_valid(xi_dv), .dst_ready(xi_dr), .dst_data(xi_dd)
  );

  // ---------------- output crossbar ----------------
  logic [XO_NSRC-1:0]         xo_sv, xo_sr;
  logic [XO_NSRC-1:0][DW-1:0] xo_sd;
  logic [XO_NDST-1:0]         xo_dv, xo_dr;
  logic [XO_NDST-1:0][DW-1:0] xo_dd;
  logic [2:0]                 xo_sel [XO_NDST];
  for (genvar d = 0; d < XO_NDST; d++) begin : g_xos
    assign xo_sel[d] = xout_q[3*d +: 3];
  end

  axis_xbar #(.N_SRC(XO_NSRC), .N_DST(XO_NDST), .W(DW), .SW(3)) u_xbar_out (
    .clk, .rst_n, .sel(xo_sel), .src_valid(xo_sv), .src_ready(xo_sr), .src_data(xo_sd),
    .dst_valid(xo_dv), .dst_ready(xo_dr), .dst_data(xo_dd)
  );

  // loop-back: output crossbar -> register FIFO -> input crossbar
  stream_fifo #(.W(DW), .DEPTH(4)) u_loop (
    .clk, .rst_n,
    .in_valid(xo_dv[XO_LOOP]), .in_ready(xo_dr[XO_LOOP]), .in_data(xo_dd[XO_LOOP]),
    .out_valid(xi_sv[XI_SRC_LOOP]), .out_ready(xi_sr[XI_SRC_LOOP]),
    .out_data(xi_sd[XI_SRC_LOOP]), .level()
  );

  // ---------------- DMAs ----------------
  for (genvar k = 0; k < 2; k++) begin : g_rd
    localparam int RA = (k == 0) ? REG_RD0_ADDR : REG_RD1_ADDR;
    dma_rd #(.DW(DW), .AW(32), .BURST(BURST)) u_dma (
      .clk, .rst_n, .start(start[k]), .addr(regs[RA]), .n_words(regs[RA+1]),
      .m_araddr(rd_araddr[k]), .m_arlen(rd_arlen[k]), .m_arsize(rd_arsize[k]),
      .m_arburst(rd_arburst[k]), .m_arvalid(rd_arvalid[k]), .m_arready(rd_arready[k]),
      .m_rdata(rd_rdata[k]), .m_rlast(rd_rlast[k]), .m_rvalid(rd_rvalid[k]),
      .m_rready(rd_rready[k]),
      .out_valid(xi_sv[k]), .out_ready(xi_sr[k]), .out_data(xi_sd[k]), .done(done[k])
    );
  end

  dma_wr #(.DW(DW), .AW(32), .BURST(BURST)) u_dma_wr (
    .clk, .rst_n, .start(start[U_WR]), .addr(regs[REG_WR_ADDR]), .n_words(regs[REG_WR_LEN]),
    .in_valid(xo_dv[XO_WR]), .in_ready(xo_dr[XO_WR]), .in_data(xo_dd[XO_WR]),
    .m_awaddr(wr_awaddr), .m_awlen(wr_awlen), .m_awsize(wr_awsize), .m_awburst(wr_awburst),
    .m_awvalid(wr_awvalid), .m_awready(wr_awready), .m_wdata(wr_wdata), .m_wstrb(wr_wstrb),
    .m_wlast(wr_wlast), .m_wvalid(wr_wvalid), .m_wready(wr_wready),
    .m_bresp(wr_bresp), .m_bvalid(wr_bvalid), .m_bready(wr_bready), .done(done[U_WR])
  );

  // ---------------- hardware nodes ----------------
  conv3d #(.LANES(LANES), .KD(CONV_KD), .KH(CONV_KH), .KW(CONV_KW), .FINE(CONV_FINE),
           .W_MAX(CONV_W_MAX), .D_MAX(CONV_D_MAX), .CW_MAX(CONV_CW_MAX),
           .FG_MAX(CONV_FG_MAX)) u_conv (
    .clk, .rst_n, .start(start[U_CONV]),
    .shape(regs2shape(regs[REG_CONV_HW], regs[REG_CONV_DC])),
    .win(regs2win(regs[REG_CONV_K], regs[REG_CONV_P])),
    .filters(regs[REG_CONV_F][15:0]), .depthwise(regs[REG_CONV_F][16]),
    .use_psum(regs[REG_CONV_F][17]),
    .in_valid(xi_dv[XI_CONV]), .in_ready(xi_dr[XI_CONV]), .in_data(xi_dd[XI_CONV]),
    .wt_valid(xi_dv[XI_CONV_WT]), .wt_ready(xi_dr[XI_CONV_WT]), .wt_data(xi_dd[XI_CONV_WT]),
    .ps_valid(xi_dv[XI_CONV_PS]), .ps_ready(xi_dr[XI_CONV_PS]), .ps_data(xi_dd[XI_CONV_PS]),
    .out_valid(xo_sv[XO_SRC_CONV]), .out_ready(xo_sr[XO_SRC_CONV]),
    .out_data(xo_sd[XO_SRC_CONV]), .done(done[U_CONV])
  );

  fc #(.LANES(LANES), .CW_MAX(FC_CW_MAX), .FG_MAX(FC_FG_MAX)) u_fc (
    .clk, .rst_n, .start(start[U_FC]),
    .channels(regs[REG_FC_CF][31:16]), .filters(regs[REG_FC_CF][15:0]),
    .use_psum(regs[REG_FC_FLAG][0]),
    .in_valid(xi_dv[XI_FC]), .in_ready(xi_dr[XI_FC]), .in_data(xi_dd[XI_FC]),
    .wt_valid(xi_dv[XI_FC_WT]), .wt_ready(xi_dr[XI_FC_WT]), .wt_data(xi_dd[XI_FC_WT]),
    .ps_valid(xi_dv[XI_FC_PS]), .ps_ready(xi_dr[XI_FC_PS]), .ps_data(xi_dd[XI_FC_PS]),
    .out_valid(xo_sv[XO_SRC_FC]), .out_ready(xo_sr[XO_SRC_FC]),
    .out_data(xo_sd[XO_SRC_FC]), .done(done[U_FC])
  );

  pool3d #(.LANES(LANES), .KD(POOL_K), .KH(POOL_K), .KW(POOL_K), .W_MAX(POOL_W_MAX),
           .D_MAX(POOL_D_MAX), .CW_MAX(POOL_CW_MAX)) u_pool (
    .clk, .rst_n, .start(start[U_POOL]),
    .shape(regs2shape(regs[REG_POOL_HW], regs[REG_POOL_DC])),
    .win(regs2win(regs[REG_POOL_K], regs[REG_POOL_P])),
    .ptype(pool_e'(regs[REG_POOL_T][0])),
    .in_valid(xi_dv[XI_POOL]), .in_ready(xi_dr[XI_POOL]), .in_data(xi_dd[XI_POOL]),
    .out_valid(xo_sv[XO_SRC_POOL]), .out_ready(xo_sr[XO_SRC_POOL]),
    .out_data(xo_sd[XO_SRC_POOL]), .done(done[U_POOL])
  );

  gap #(.LANES(LANES), .CW_MAX(GAP_CW_MAX)) u_gap (
    .clk, .rst_n, .start(start[U_GAP]),
    .n_pix(regs[REG_GAP_N]), .channels(regs[REG_GAP_C][15:0]),
    .in_valid(xi_dv[XI_GAP]), .in_ready(xi_dr[XI_GAP]), .in_data(xi_dd[XI_GAP]),
    .out_valid(xo_sv[XO_SRC_GAP]), .out_ready(xo_sr[XO_SRC_GAP]),
    .out_data(xo_sd[XO_SRC_GAP]), .done(done[U_GAP])
  );

  act #(.LANES(LANES)) u_act (
    .clk, .rst_n, .start(start[U_ACT]),
    .n_words(regs[REG_ACT_N]), .atype(act_e'(regs[REG_ACT_T][1:0])),
    .in_valid(xi_dv[XI_ACT]), .in_ready(xi_dr[XI_ACT]), .in_data(xi_dd[XI_ACT]),
    .out_valid(xo_sv[XO_SRC_ACT]), .out_ready(xo_sr[XO_SRC_ACT]),
    .out_data(xo_sd[XO_SRC_ACT]), .done(done[U_ACT])
  );

  eltwise #(.LANES(LANES), .CW_MAX(ELTW_CW_MAX)) u_eltw (
    .clk, .rst_n, .start(start[U_ELTW]),
    .n_words(regs[REG_ELTW_N]), .channels(regs[REG_ELTW_CT][15:0]),
    .etype(eltw_e'(regs[REG_ELTW_CT][16])), .bcast(regs[REG_ELTW_CT][17]),
    .a_valid(xi_dv[XI_ELTW_A]), .a_ready(xi_dr[XI_ELTW_A]), .a_data(xi_dd[XI_ELTW_A]),
    .b_valid(xi_dv[XI_ELTW_B]), .b_ready(xi_dr[XI_ELTW_B]), .b_data(xi_dd[XI_ELTW_B]),
    .out_valid(xo_sv[XO_SRC_ELTW]), .out_ready(xo_sr[XO_SRC_ELTW]),
    .out_data(xo_sd[XO_SRC_ELTW]), .done(done[U_ELTW])
  );
endmodule
