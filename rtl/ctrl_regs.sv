// ctrl_regs: the AXI-Lite control block through which the host CPU drives the accelerator
// like a set of custom instructions. It holds NREGS 32-bit registers (map in harflow_pkg):
// crossbar routes, DMA descriptors and the runtime parameters of every node. Writing a bit
// mask to REG_START pulses 'start' for those units and copies the crossbar routes into the
// active route registers; the nodes latch their own parameters on their start pulse, so the
// host may write the next layer's parameters while the current one runs (double
// buffering, as the paper describes for the runtime parameters). REG_STATUS reads the
// sticky done flags [15:0] (cleared for a unit when it is started) and busy flags [31:16].
// AXI-Lite: a write is taken when AWVALID and WVALID are both high, answered with OKAY; one
// read at a time. Byte strobes are ignored (full-word writes). Register map and handshake
// policy are this design's.
module ctrl_regs
  import harflow_pkg::*;
#(
  parameter int AW = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [AW-1:0]       s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [AW-1:0]       s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [31:0]         regs [NREGS],
  output logic [31:0]         xbar_in_q,
  output logic [31:0]         xbar_out_q,
  output logic [N_UNITS-1:0]  start,
  input  logic [N_UNITS-1:0]  unit_done
);
  logic [N_UNITS-1:0] done_q, busy_q;
  logic               wr;
  logic [AW-3:0]      widx, ridx;
  localparam int RI = $clog2(NREGS);

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr        = s_awready;
  assign widx      = s_awaddr[AW-1:2];
  assign ridx      = s_araddr[AW-1:2];
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      xbar_in_q <= '1; xbar_out_q <= '1;
      start <= '0; done_q <= '0; busy_q <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
    end else begin
      start <= '0;
      if (wr) begin
        s_bvalid <= 1'b1;
        if (int'(widx) == REG_START) begin
          start      <= s_wdata[N_UNITS-1:0];
          xbar_in_q  <= regs[REG_XBAR_IN];
          xbar_out_q <= regs[REG_XBAR_OUT];
        end else if (int'(widx) < NREGS && int'(widx) != REG_STATUS) begin
          regs[RI'(widx)] <= s_wdata;
        end
      end else if (s_bvalid && s_bready) s_bvalid <= 1'b0;

      for (int u = 0; u < N_UNITS; u++) begin
        if (start[u]) begin
          busy_q[u] <= 1'b1; done_q[u] <= 1'b0;
        end
        if (unit_done[u]) begin
          busy_q[u] <= 1'b0; done_q[u] <= 1'b1;
        end
      end

      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (int'(ridx) == REG_STATUS)  s_rdata <= {16'(busy_q), 16'(done_q)};
        else if (int'(ridx) < NREGS)   s_rdata <= regs[RI'(ridx)];
        else                           s_rdata <= '0;
      end else if (s_rvalid && s_rready) s_rvalid <= 1'b0;
    end
  end

  logic unused_strb;
  assign unused_strb = ^s_wstrb;
endmodule
