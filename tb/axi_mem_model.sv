// axi_mem_model: behavioural AXI4 memory used by the testbenches in place of the DDR and its
// controller. NRD independent read ports and one write port share a word array 'mem'
// (word address = byte address / (DW/8)) that testbenches fill and inspect hierarchically.
// Handshakes are randomly delayed (address ready, read-data gaps, write ready, response
// delay) so that the DMA engines see back-pressure; it counts protocol errors (WLAST in the
// wrong beat, out-of-range addresses, non-INCR bursts) in 'errors'.
module axi_mem_model #(
  parameter int DW    = 16,
  parameter int NRD   = 2,
  parameter int WORDS = 65536,
  parameter int GAP   = 3      // 1-in-(GAP+1) chance per cycle of a handshake being held off
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NRD-1:0][31:0]   araddr,
  input  logic [NRD-1:0][7:0]    arlen,
  input  logic [NRD-1:0][1:0]    arburst,
  input  logic [NRD-1:0]         arvalid,
  output logic [NRD-1:0]         arready,
  output logic [NRD-1:0][DW-1:0] rdata,
  output logic [NRD-1:0]         rlast,
  output logic [NRD-1:0]         rvalid,
  input  logic [NRD-1:0]         rready,
  input  logic [31:0]            awaddr,
  input  logic [7:0]             awlen,
  input  logic [1:0]             awburst,
  input  logic                   awvalid,
  output logic                   awready,
  input  logic [DW-1:0]          wdata,
  input  logic                   wlast,
  input  logic                   wvalid,
  output logic                   wready,
  output logic [1:0]             bresp,
  output logic                   bvalid,
  input  logic                   bready
);
  localparam int BPW = DW / 8;
  logic [DW-1:0] mem [WORDS];
  int errors = 0;
  int rd_bursts = 0, wr_bursts = 0, stalls = 0;

  function automatic bit hold(); return ($urandom_range(0, GAP) == 0); endfunction

  for (genvar k = 0; k < NRD; k++) begin : g_rd
    int addr, left;
    bit busy;
    initial begin
      arready[k] = 0; rvalid[k] = 0; rlast[k] = 0; rdata[k] = '0; busy = 0;
      forever begin
        @(posedge clk);
        if (!rst_n) begin arready[k] <= 0; rvalid[k] <= 0; busy = 0; continue; end
        if (!busy) begin
          if (arvalid[k] && arready[k]) begin
            addr = int'(araddr[k]) / BPW; left = int'(arlen[k]) + 1; busy = 1;
            rd_bursts++;
            if (arburst[k] != 2'b01 || addr + left > WORDS) errors++;
            arready[k] <= 0;
          end else arready[k] <= arvalid[k] && !hold();
        end
        if (busy) begin
          if (rvalid[k] && rready[k]) begin
            addr++; left--;
            if (left == 0) begin busy = 0; rvalid[k] <= 0; rlast[k] <= 0; end
          end
          if (busy) begin
            if (hold()) begin rvalid[k] <= 0; stalls++; end
            else begin
              rvalid[k] <= 1; rdata[k] <= mem[addr % WORDS]; rlast[k] <= (left == 1);
            end
          end
        end
      end
    end
  end

  int waddr, wleft;
  bit wbusy, bpend;
  initial begin
    awready = 0; wready = 0; bvalid = 0; bresp = 2'b00; wbusy = 0; bpend = 0;
    forever begin
      @(posedge clk);
      if (!rst_n) begin awready <= 0; wready <= 0; bvalid <= 0; wbusy = 0; bpend = 0; continue; end
      if (bvalid && bready) bvalid <= 0;
      if (bpend && !bvalid && !hold()) begin bvalid <= 1; bpend = 0; end
      if (!wbusy && !bpend && !bvalid) begin
        if (awvalid && awready) begin
          waddr = int'(awaddr) / BPW; wleft = int'(awlen) + 1; wbusy = 1; awready <= 0;
          wr_bursts++;
          if (awburst != 2'b01 || waddr + wleft > WORDS) errors++;
        end else awready <= awvalid && !hold();
      end else if (wbusy) begin
        if (wvalid && wready) begin
          mem[waddr % WORDS] = wdata;
          if (wlast != (wleft == 1)) errors++;
          waddr++; wleft--;
          if (wleft == 0) begin wbusy = 0; bpend = 1; end
        end
        wready <= wbusy && !hold();
      end
    end
  end
endmodule
