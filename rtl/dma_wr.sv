// dma_wr: stream-to-memory DMA. On 'start' it accepts n_words beats into a FIFO of 2*BURST
// beats and writes them from byte address 'addr' upward over an AXI4 write channel: when
// a full burst (or the remainder of the transfer) is buffered it issues AW, then the W
// beats with WLAST on the last, then waits for B. One burst at a time. 'done' pulses when
// the last write response has arrived. Addresses must be BURST-beat aligned.
// Burst size and policy are this design's choice.
module dma_wr #(
  parameter int DW    = 16,
  parameter int AW    = 32,
  parameter int BURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   n_words,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic [AW-1:0] m_awaddr,
  output logic [7:0]    m_awlen,
  output logic [2:0]    m_awsize,
  output logic [1:0]    m_awburst,
  output logic          m_awvalid,
  input  logic          m_awready,
  output logic [DW-1:0] m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic          m_wlast,
  output logic          m_wvalid,
  input  logic          m_wready,
  input  logic [1:0]    m_bresp,
  input  logic          m_bvalid,
  output logic          m_bready,
  output logic          done
);
  localparam int DEPTH = 2 * BURST;
  localparam int LW    = $clog2(DEPTH + 1);
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} st_e;
  st_e           st;
  logic [31:0]   left, blen;
  logic [7:0]    beat;
  logic [AW-1:0] next_addr;
  logic [LW-1:0] level;
  logic          f_valid, acc_in;

  assign blen      = (left > 32'(BURST)) ? 32'(BURST) : left;
  assign m_awsize  = 3'($clog2(DW / 8));
  assign m_awburst = 2'b01;
  assign m_wstrb   = '1;
  assign m_wvalid  = (st == W_DATA) && f_valid;
  assign m_wlast   = (beat == m_awlen);
  assign m_bready  = (st == W_RESP);
  assign in_ready  = acc_in;

  logic f_in_ready;
  stream_fifo #(.W(DW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(in_valid && acc_in), .in_ready(f_in_ready), .in_data,
    .out_valid(f_valid), .out_ready(m_wvalid && m_wready), .out_data(m_wdata), .level
  );

  // accept input only for the words of the transfer that have not been buffered yet
  logic [31:0] in_left;
  assign acc_in = f_in_ready && (in_left != 0);

  logic done_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; left <= '0; in_left <= '0; beat <= '0; next_addr <= '0;
      m_awvalid <= 1'b0; m_awaddr <= '0; m_awlen <= '0; done_r <= 1'b0;
    end else begin
      done_r <= 1'b0;
      if (in_valid && acc_in) in_left <= in_left - 1;
      case (st)
        W_IDLE: if (start) begin
          left <= n_words; in_left <= n_words; next_addr <= addr;
          if (n_words != 0) st <= W_ADDR;
        end
        W_ADDR: if (!m_awvalid && 32'(level) >= blen) begin
          m_awvalid <= 1'b1; m_awaddr <= next_addr; m_awlen <= 8'(blen - 1); beat <= '0;
        end else if (m_awvalid && m_awready) begin
          m_awvalid <= 1'b0; st <= W_DATA;
          next_addr <= next_addr + AW'(blen * (DW / 8));
        end
        W_DATA: if (m_wvalid && m_wready) begin
          beat <= beat + 1'b1;
          if (m_wlast) begin
            st <= W_RESP; left <= left - (32'(m_awlen) + 1);
          end
        end
        W_RESP: if (m_bvalid) begin
          if (left == 0) begin
            st <= W_IDLE; done_r <= 1'b1;
          end else st <= W_ADDR;
        end
        default: st <= W_IDLE;
      endcase
    end
  end
  assign done = done_r;
  a_okay: assert property (@(posedge clk) disable iff (!rst_n) m_bvalid |-> m_bresp == 2'b00);
endmodule
