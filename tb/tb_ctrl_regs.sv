// tb_ctrl_regs: AXI-Lite register file. Writes random values to every parameter register
// and reads them back (with randomly delayed ready signals); checks that STATUS cannot be
// written, unmapped addresses read zero, the routes only take effect on a START write, the
// START write emits a one-cycle start pulse for exactly the written units, and the busy/done
// bits of STATUS follow start and the units' done pulses (done sticky until the next start).
module tb_ctrl_regs;
  import harflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata; logic [3:0] s_wstrb = 4'hf; logic [1:0] s_bresp, s_rresp;
  logic [31:0] regs [NREGS]; logic [31:0] xbar_in_q, xbar_out_q;
  logic [N_UNITS-1:0] start, unit_done = 0, start_seen;
  int start_pulses;
  ctrl_regs dut (.*);

  always @(posedge clk) if (rst_n && start != 0) begin start_seen = start; start_pulses++; end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  task automatic wr(int idx, logic [31:0] v);
    @(negedge clk); s_awaddr = 8'(idx * 4); s_wdata = v;
    s_awvalid = 1; repeat ($urandom_range(0, 2)) @(negedge clk); s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic rd(int idx, output logic [31:0] v);
    @(negedge clk); s_araddr = 8'(idx * 4); s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] vals [NREGS]; logic [31:0] v;
    start_pulses = 0;
    repeat (3) @(posedge clk); rst_n <= 1;
    chk(xbar_in_q, '1, "route after reset"); chk(xbar_out_q, '1, "route after reset");
    for (int i = 2; i < NREGS; i++) begin vals[i] = $urandom; wr(i, vals[i]); end
    for (int i = 2; i < NREGS; i++) begin rd(i, v); chk(v, vals[i], $sformatf("reg %0d", i)); end
    for (int i = 2; i < NREGS; i++) chk(regs[i], vals[i], "regs port");
    chk(xbar_in_q, '1, "route before start");
    rd(40, v); chk(v, 0, "unmapped read");
    wr(REG_STATUS, 32'hffff_ffff); rd(REG_STATUS, v); chk(v, 0, "status after reset");
    chk(32'(start_pulses), 0, "no start yet");
    // start three units
    wr(REG_START, 32'h0000_0109);
    chk(32'(start_pulses), 1, "one start pulse"); chk(32'(start_seen), 32'h109, "start mask");
    chk(xbar_in_q, vals[REG_XBAR_IN], "route in"); chk(xbar_out_q, vals[REG_XBAR_OUT], "route out");
    chk(regs[REG_START], 0, "start not stored");
    rd(REG_STATUS, v); chk(v, 32'h0109_0000, "busy");
    @(negedge clk); unit_done = 9'h008; @(negedge clk); unit_done = 0;
    rd(REG_STATUS, v); chk(v, 32'h0101_0008, "one done");
    @(negedge clk); unit_done = 9'h101; @(negedge clk); unit_done = 0;
    rd(REG_STATUS, v); chk(v, 32'h0000_0109, "all done");
    wr(REG_XBAR_IN, 32'h1234); chk(xbar_in_q, vals[REG_XBAR_IN], "route held during run");
    wr(REG_START, 32'h0000_0001);
    chk(xbar_in_q, 32'h1234, "new route"); rd(REG_STATUS, v); chk(v, 32'h0001_0108, "restart clears done");
    chk(32'(start_pulses), 2, "two start pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
