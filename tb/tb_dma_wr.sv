// tb_dma_wr: the write DMA against the behavioural AXI memory. Random-length transfers fed
// by a stream with random gaps, under random write-ready and response delays; after 'done'
// the memory must hold exactly the streamed words, the words just outside the target range
// must be untouched, exactly one 'done' per transfer, and no protocol errors (WLAST position,
// burst type, range).
module tb_dma_wr;
  localparam int DW = 16, BURST = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [31:0] addr, n_words;
  logic in_valid = 0, in_ready; logic [DW-1:0] in_data;
  logic [31:0] m_awaddr; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready, done;
  logic [DW-1:0] m_wdata; logic [DW/8-1:0] m_wstrb; logic [1:0] m_bresp;
  dma_wr #(.DW(DW), .BURST(BURST)) dut (.*);
  logic arready, rlast, rvalid; logic [DW-1:0] rdata;
  axi_mem_model #(.DW(DW), .NRD(1), .WORDS(4096)) mem (
    .clk, .rst_n, .araddr('0), .arlen('0), .arburst(2'b01), .arvalid(1'b0), .arready, .rdata,
    .rlast, .rvalid, .rready(1'b0), .awaddr(m_awaddr), .awlen(m_awlen), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wlast(m_wlast),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  task automatic xfer(int a, int n);
    logic [DW-1:0] q [$], ref_q [$];
    int dn = 0, sent = 0;
    for (int i = 0; i < n; i++) q.push_back(DW'($urandom));
    ref_q = q;
    addr = 32'(a * 2); n_words = 32'(n);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    while (dn == 0) begin
      in_valid <= (q.size() > 0) && ($urandom_range(0, 2) != 0);
      if (q.size() > 0) in_data <= q[0];
      @(posedge clk);
      if (done) dn++;
      if (in_valid && in_ready) begin void'(q.pop_front()); sent++; end
    end
    in_valid <= 0;
    repeat (10) begin @(posedge clk); if (done) dn++; end
    checks++; if (dn != 1 || sent != n) begin failures++; $display("done %0d sent %0d", dn, sent); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (mem.mem[a + i] != ref_q[i]) begin
        failures++; $display("word %0d: got %h exp %h", i, mem.mem[a + i], ref_q[i]);
      end
    end
    checks += 2;
    if (mem.mem[a - 1] != 16'hdead) begin failures++; $display("write before range"); end
    if (mem.mem[a + n] != 16'hdead) begin failures++; $display("write after range"); end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) mem.mem[i] = 16'hdead;
    repeat (3) @(posedge clk); rst_n <= 1;
    xfer(10, 5); xfer(100, 8); xfer(300, 61); xfer(1000, 1); xfer(1200, 200);
    xfer(2000, 17); xfer(2500, 40); xfer(3000, 3);
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
