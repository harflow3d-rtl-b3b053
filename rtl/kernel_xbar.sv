// kernel_xbar: the runtime crossbar between a window and the f multipliers of each
// vector-dot unit. The window holds KMAX pixels of LANES words; the runtime kernel uses
// ksize of them, visited in (kh, kw, kd) order through the map table written by the
// parameter controller (map[e] = position in the window of kernel element e). In fold j
// multiplier i receives kernel element e = j*FINE + i, or zero when e >= ksize: that
// zero is the multiplier being bypassed at runtime. Combinational.
// The paper names the crossbar and its purpose (map configurable kernel sizes onto a fixed
// number of multipliers); the table-driven form is this design's.
module kernel_xbar
  import harflow_pkg::*;
#(
  parameter int LANES = 1,
  parameter int KMAX  = 27,
  parameter int FINE  = 9,
  parameter int IW    = (KMAX > 1) ? $clog2(KMAX) : 1,
  parameter int FW    = 8
) (
  input  logic [KMAX-1:0][LANES-1:0][DATA_W-1:0] win,
  input  logic [IW-1:0]                          map [KMAX],
  input  logic [FW-1:0]                          fold,
  input  logic [8:0]                             ksize,
  output logic [LANES-1:0][FINE-1:0][DATA_W-1:0] sel
);
  always_comb begin
    for (int i = 0; i < FINE; i++) begin
      int unsigned e;
      e = int'(fold) * FINE + i;
      for (int l = 0; l < LANES; l++)
        sel[l][i] = (e < int'(ksize) && e < KMAX) ? win[map[e[IW-1:0]]][l] : '0;
    end
  end
endmodule
