// tgnn_pkg: types, sizes and arithmetic helpers shared by the temporal GNN
// inference accelerator.
//
// Numbers are signed 16-bit fixed point with 8 fraction bits (Q8.8). The
// accelerator described by the paper computes in IEEE float32; the fixed
// point format is this design's own choice. Products are kept at full width
// (Q16.16) and summed in 40-bit accumulators before one final rounding by
// truncation and saturation back to Q8.8.
//
// Default sizes: 10 stored temporal neighbours, 128 time-encoding intervals,
// 172 edge-feature elements and the 2-CU / 8x8 / 16 / 8x8 configuration of
// the U200 build follow the paper. Memory and embedding length 100 and
// node-feature length 200 (GDELT) are this design's own defaults.
//
// The configuration bus (cfg_t) is a single broadcast write port through
// which the host loads every learned table: MAC-array weights and biases,
// the time-encoding look-up tables and the attention parameters.
package tgnn_pkg;

  localparam int FRAC  = 8;
  localparam int VID_W = 32;
  localparam int T_W   = 32;

  typedef logic signed [15:0] fix_t;
  typedef logic signed [39:0] acc_t;
  typedef logic [VID_W-1:0]   vid_t;
  typedef logic [T_W-1:0]     ts_t;

  // Default model sizes
  localparam int F_MEM  = 100;                 // vertex memory length
  localparam int F_EDGE = 172;                 // edge feature length (Table 2)
  localparam int F_FEAT = 200;                 // node feature length (GDELT)
  localparam int F_EMB  = 100;                 // output embedding length
  localparam int MR     = 10;                  // stored most-recent neighbours
  localparam int KMAX   = 6;                   // largest pruning budget (NP(L))
  localparam int LUT_N  = 128;                 // time-encoding intervals

  // Configuration targets
  typedef enum logic [7:0] {
    CFG_NONE   = 8'd0,
    CFG_W_R    = 8'd1,  CFG_B_R = 8'd2,        // update gate  (eq. r)
    CFG_W_Z    = 8'd3,  CFG_B_Z = 8'd4,        // reset gate   (eq. z)
    CFG_W_N    = 8'd5,  CFG_B_N = 8'd6,        // memory gate  (eq. n)
    CFG_W_O    = 8'd7,  CFG_B_O = 8'd8,        // feature transformation
    CFG_MT_THR = 8'd9,  CFG_MT_VAL = 8'd10,    // MUU time LUT
    CFG_ET_THR = 8'd11, CFG_ET_VAL = 8'd12,    // EU time LUT
    CFG_ATT_A  = 8'd13, CFG_ATT_W  = 8'd14     // attention a and W_t
  } cfg_tgt_e;

  typedef struct packed {
    logic        we;
    cfg_tgt_e    tgt;
    logic [15:0] row;
    logic [15:0] col;
    logic [31:0] data;
  } cfg_t;

  // One stored temporal neighbour
  typedef struct packed {
    logic valid;
    vid_t vid;
    ts_t  t;
  } nbr_t;

  // Saturate a Q16.16-scaled accumulator to Q8.8
  function automatic fix_t sat_acc(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > 40'sd32767)       return 16'sh7fff;
    else if (s < -40'sd32768) return 16'sh8000;
    else                      return fix_t'(s[15:0]);
  endfunction

  // Saturating add of two Q8.8 values
  function automatic fix_t sat_add(input fix_t a, input fix_t b);
    logic signed [16:0] s;
    s = 17'(a) + 17'(b);
    if (s > 17'sd32767)       return 16'sh7fff;
    else if (s < -17'sd32768) return 16'sh8000;
    else                      return fix_t'(s[15:0]);
  endfunction

  // Full-precision product of two Q8.8 values (Q16.16 in an accumulator)
  function automatic acc_t fmul(input fix_t a, input fix_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

  // Q8.8 product
  function automatic fix_t fmul_q(input fix_t a, input fix_t b);
    return sat_acc(fmul(a, b));
  endfunction

  // Piecewise-linear sigmoid: clamp(x/4 + 1/2, 0, 1)
  function automatic fix_t hsigmoid(input fix_t x);
    logic signed [16:0] y;
    y = 17'(x >>> 2) + 17'sd128;
    if (y < 0)          return 16'sd0;
    else if (y > 256)   return 16'sd256;
    else                return fix_t'(y[15:0]);
  endfunction

  // Piecewise-linear tanh: clamp(x, -1, 1)
  function automatic fix_t htanh(input fix_t x);
    if (x > 16'sd256)        return 16'sd256;
    else if (x < -16'sd256)  return -16'sd256;
    else                     return x;
  endfunction

endpackage
