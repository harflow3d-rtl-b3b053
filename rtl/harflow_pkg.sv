// harflow_pkg: types, constants and helper functions shared by every block of the
// accelerator. Feature-map words are 16-bit signed fixed point (the 16-bit width is the
// paper's; the Q8.8 split of integer and fraction bits is this design's choice). A stream
// beat carries LANES such words, one per channel of a group of consecutive channels, and
// feature-maps travel in H, W, D, C order with the channel changing fastest.
// The runtime-configuration records (shape, window) and the register map of the AXI-Lite
// control block are defined here too, so that the control block, the nodes and the
// testbenches agree on one encoding (the encoding is this design's own).
package harflow_pkg;

  localparam int DATA_W = 16;   // word width of feature-maps and weights
  localparam int FRAC_W = 8;    // fraction bits of the Q8.8 format
  localparam int ACC_W  = 40;   // accumulator width
  localparam int DIM_W  = 16;   // width of a runtime dimension

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {ACT_RELU = 2'd0, ACT_SIGMOID = 2'd1, ACT_SWISH = 2'd2} act_e;
  typedef enum logic [0:0] {POOL_MAX = 1'b0, POOL_AVG = 1'b1} pool_e;
  typedef enum logic [0:0] {ELTW_ADD = 1'b0, ELTW_MUL = 1'b1} eltw_e;

  // runtime feature-map shape (rows, columns, depth/frames, channels)
  typedef struct packed {
    logic [DIM_W-1:0] h;
    logic [DIM_W-1:0] w;
    logic [DIM_W-1:0] d;
    logic [DIM_W-1:0] c;
  } shape_t;

  // runtime kernel (kd, kh, kw), stride (jd, jh, jw) and padding (start/end per dimension)
  typedef struct packed {
    logic [3:0] kd, kh, kw;
    logic [2:0] jd, jh, jw;
    logic [2:0] pds, pde, phs, phe, pws, pwe;
  } win_t;

  // --- AXI-Lite register map (32-bit registers, index = byte address / 4) ---
  localparam int REG_START    = 0;   // W: bit mask of units to start
  localparam int REG_STATUS   = 1;   // R: [15:0] done (sticky), [31:16] busy
  localparam int REG_XBAR_IN  = 2;   // 2 bits per input-crossbar destination
  localparam int REG_XBAR_OUT = 3;   // 3 bits per output-crossbar destination
  localparam int REG_RD0_ADDR = 4, REG_RD0_LEN = 5;
  localparam int REG_RD1_ADDR = 6, REG_RD1_LEN = 7;
  localparam int REG_WR_ADDR  = 8, REG_WR_LEN  = 9;
  localparam int REG_CONV_HW  = 10, REG_CONV_DC = 11, REG_CONV_F = 12;
  localparam int REG_CONV_K   = 13, REG_CONV_P  = 14;
  localparam int REG_POOL_HW  = 15, REG_POOL_DC = 16, REG_POOL_K = 17;
  localparam int REG_POOL_P   = 18, REG_POOL_T  = 19;
  localparam int REG_FC_CF    = 20, REG_FC_FLAG = 21;
  localparam int REG_GAP_N    = 22, REG_GAP_C   = 23;
  localparam int REG_ACT_N    = 24, REG_ACT_T   = 25;
  localparam int REG_ELTW_N   = 26, REG_ELTW_CT = 27;
  localparam int NREGS        = 28;

  // unit numbers (bit positions in REG_START / REG_STATUS)
  localparam int U_RD0 = 0, U_RD1 = 1, U_WR = 2, U_CONV = 3, U_FC = 4;
  localparam int U_POOL = 5, U_GAP = 6, U_ACT = 7, U_ELTW = 8;
  localparam int N_UNITS = 9;

  // input-crossbar sources and destinations
  localparam int XI_SRC_RD0 = 0, XI_SRC_RD1 = 1, XI_SRC_LOOP = 2, XI_NSRC = 3;
  localparam int XI_CONV = 0, XI_CONV_WT = 1, XI_CONV_PS = 2, XI_FC = 3, XI_FC_WT = 4;
  localparam int XI_FC_PS = 5, XI_POOL = 6, XI_GAP = 7, XI_ACT = 8, XI_ELTW_A = 9;
  localparam int XI_ELTW_B = 10, XI_NDST = 11;
  // output-crossbar sources and destinations
  localparam int XO_SRC_CONV = 0, XO_SRC_FC = 1, XO_SRC_POOL = 2, XO_SRC_GAP = 3;
  localparam int XO_SRC_ACT = 4, XO_SRC_ELTW = 5, XO_NSRC = 6;
  localparam int XO_WR = 0, XO_LOOP = 1, XO_NDST = 2;

  function automatic shape_t regs2shape(logic [31:0] hw, logic [31:0] dc);
    shape_t s;
    s.h = hw[31:16]; s.w = hw[15:0]; s.d = dc[31:16]; s.c = dc[15:0];
    return s;
  endfunction

  // REG_*_K: kd[3:0] kh[7:4] kw[11:8] jd[14:12] jh[17:15] jw[20:18]
  // REG_*_P: pds[2:0] pde[5:3] phs[8:6] phe[11:9] pws[14:12] pwe[17:15]
  function automatic win_t regs2win(logic [31:0] k, logic [31:0] p);
    win_t x;
    x.kd = k[3:0];   x.kh = k[7:4];   x.kw = k[11:8];
    x.jd = k[14:12]; x.jh = k[17:15]; x.jw = k[20:18];
    x.pds = p[2:0];  x.pde = p[5:3];  x.phs = p[8:6];
    x.phe = p[11:9]; x.pws = p[14:12]; x.pwe = p[17:15];
    return x;
  endfunction

  // saturate a wide value to a 16-bit word
  function automatic data_t sat16(acc_t v);
    if (v > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (v < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(v[DATA_W-1:0]);
  endfunction

  // fixed-point product of two Q8.8 words, back to Q8.8 with saturation
  function automatic data_t qmul(data_t a, data_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return sat16(p >>> FRAC_W);
  endfunction

  // piecewise-linear sigmoid in Q8.8 (segments with power-of-two slopes:
  // |x|>=5: 1; 2.375<=|x|<5: |x|/32+0.84375; 1<=|x|<2.375: |x|/8+0.625;
  // |x|<1: |x|/4+0.5; negative x uses 1-sigmoid(|x|))
  function automatic data_t sigmoid_q(data_t x);
    logic [16:0] ax;
    logic [16:0] y;
    ax = x[15] ? 17'(-$signed({x[15], x})) : 17'({1'b0, x});
    if (ax >= 17'd1280)      y = 17'd256;
    else if (ax >= 17'd608)  y = (ax >> 5) + 17'd216;
    else if (ax >= 17'd256)  y = (ax >> 3) + 17'd160;
    else                     y = (ax >> 2) + 17'd128;
    if (x[15]) y = 17'd256 - y;
    return data_t'(y[15:0]);
  endfunction

endpackage
