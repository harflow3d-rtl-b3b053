// tb_dma_rd: the read DMA against the behavioural AXI memory. Several transfers with random
// start address and length (shorter than, equal to and longer than a burst, not multiples of
// it) under random memory gaps and random stream back-pressure; every streamed word must
// equal the memory contents in order, exactly one 'done' per transfer, and no protocol errors.
module tb_dma_rd;
  localparam int DW = 16, BURST = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [31:0] addr, n_words;
  logic [31:0] m_araddr; logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [DW-1:0] m_rdata, out_data;
  logic out_valid, out_ready = 0, done;
  dma_rd #(.DW(DW), .BURST(BURST)) dut (.*);
  logic awready, wready, bvalid; logic [1:0] bresp;
  axi_mem_model #(.DW(DW), .NRD(1), .WORDS(4096)) mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arburst(m_arburst), .arvalid(m_arvalid),
    .arready(m_arready), .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr('0), .awlen('0), .awburst(2'b01), .awvalid(1'b0), .awready, .wdata('0), .wlast(1'b0),
    .wvalid(1'b0), .wready, .bresp, .bvalid, .bready(1'b0));

  task automatic xfer(int a, int n);
    int got = 0, dn = 0;
    addr = 32'(a * 2); n_words = 32'(n);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    while (got < n || dn == 0) begin
      out_ready <= ($urandom_range(0, 2) != 0); @(posedge clk);
      if (done) dn++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != mem.mem[a + got]) begin
          failures++; $display("word %0d: got %h exp %h", got, out_data, mem.mem[a + got]);
        end
        got++;
      end
    end
    out_ready <= 0;
    repeat (10) begin @(posedge clk); if (done) dn++; end
    checks++; if (dn != 1) begin failures++; $display("done pulses %0d", dn); end
    checks++; if (out_valid) begin failures++; $display("extra word"); end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) mem.mem[i] = DW'($urandom);
    repeat (3) @(posedge clk); rst_n <= 1;
    xfer(0, 5); xfer(100, 8); xfer(37, 61); xfer(1000, 1); xfer(2000, 200);
    repeat (5) xfer($urandom_range(0, 3000), $urandom_range(1, 90));
    checks++; if (mem.errors != 0) begin failures++; $display("protocol errors %0d", mem.errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
