// dma_rd: memory-to-stream DMA. On 'start' it reads n_words stream beats (LANES 16-bit
// words each, DW = LANES*16 bits) from byte address 'addr' over an AXI4 read channel in
// INCR bursts of up to BURST beats, one burst outstanding at a time, and forwards them
// through a FIFO of 2*BURST beats. A burst is requested only when the FIFO has room for all
// of it, so RREADY stays high. 'done' pulses when the last beat has left the FIFO.
// The address must be aligned to BURST beats so that no burst crosses a 4 KB page.
// The paper names the DMAs and their AXI interface; burst size and policy are this design's.
module dma_rd #(
  parameter int DW    = 16,
  parameter int AW    = 32,
  parameter int BURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   n_words,
  output logic [AW-1:0] m_araddr,
  output logic [7:0]    m_arlen,
  output logic [2:0]    m_arsize,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  input  logic [DW-1:0] m_rdata,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  output logic          done
);
  localparam int DEPTH = 2 * BURST;
  localparam int LW    = $clog2(DEPTH + 1);
  logic [31:0]   req_left, out_left;
  logic [AW-1:0] next_addr;
  logic          outstanding, f_in_ready;
  logic [LW-1:0] level;
  logic [31:0]   blen;

  assign blen      = (req_left > 32'(BURST)) ? 32'(BURST) : req_left;
  assign m_arsize  = 3'($clog2(DW / 8));
  assign m_arburst = 2'b01;
  assign m_rready  = 1'b1;

  stream_fifo #(.W(DW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(m_rvalid), .in_ready(f_in_ready), .in_data(m_rdata),
    .out_valid, .out_ready, .out_data, .level
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_left <= '0; out_left <= '0; next_addr <= '0; outstanding <= 1'b0;
      m_arvalid <= 1'b0; m_araddr <= '0; m_arlen <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        req_left <= n_words; out_left <= n_words; next_addr <= addr; outstanding <= 1'b0;
      end else begin
        if (!outstanding && !m_arvalid && req_left != 0 &&
            (32'(DEPTH) - 32'(level)) >= 32'(BURST)) begin
          m_arvalid <= 1'b1; m_araddr <= next_addr; m_arlen <= 8'(blen - 1);
          req_left <= req_left - blen;
          next_addr <= next_addr + AW'(blen * (DW / 8));
        end
        if (m_arvalid && m_arready) begin
          m_arvalid <= 1'b0; outstanding <= 1'b1;
        end
        if (m_rvalid && m_rlast) outstanding <= 1'b0;
        if (out_valid && out_ready) begin
          out_left <= out_left - 1;
          if (out_left == 1) done <= 1'b1;
        end
      end
    end
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> f_in_ready);
endmodule
