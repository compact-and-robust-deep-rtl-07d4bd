// flan_pkg: number formats, parameter-load bus and network geometry shared by
// the FLAN (1-D Fluorescence Lifetime AdderNet) accelerator.
//
// Feature maps (FMs) are signed fixed point with 16 integer and 16 fractional
// bits (Q16.16, 32 bits); learned parameters (adder-conv weights, folded
// batch-norm scale and shift) are signed Q10.10 (20 bits).  Both splits follow
// the paper's quantization section.  A weight is aligned to the FM format by an
// arithmetic left shift of FM_FRAC-PRM_FRAC = 6 bits before it is subtracted.
// Adder-conv sums are kept in ACC_W = 48 bits so that no layer of the network
// (at most 140 terms of up to 2^33) can overflow; results are saturated back
// to 32 bits after batch norm.  The accumulator width, the saturation and the
// parameter-load bus are this design's own choices.
//
// The network geometry is Fig. 1 of the paper: UAC 1x13/s5/5ch, UAC 1x9/s3/10ch,
// a residual block on 14x10, a reshape to 1x140 and two branches of
// 1x1 UACs with 70, 30 and 1 output channels, one for the amplitude-averaged
// lifetime tau_A and one for the intensity-averaged lifetime tau_I.
package flan_pkg;

  localparam int FM_W     = 32;  // Q16.16 feature maps
  localparam int FM_FRAC  = 16;
  localparam int PRM_W    = 20;  // Q10.10 learned parameters
  localparam int PRM_FRAC = 10;
  localparam int ACC_W    = 48;  // adder-tree / accumulator width
  localparam int ALIGN    = FM_FRAC - PRM_FRAC;

  typedef logic signed [FM_W-1:0]  fm_t;
  typedef logic signed [PRM_W-1:0] prm_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Layer identifiers used by the parameter-load bus.
  typedef enum logic [3:0] {
    L_PRE1   = 4'd0,   // Pre #1 : UAC 1x13, s=5, 5 channels
    L_PRE2   = 4'd1,   // Pre #2 : UAC 1x9,  s=3, 10 channels
    L_RES_U  = 4'd2,   // residual block: UAC (AC+BN+ReLU)
    L_RES_A  = 4'd3,   // residual block: AC + ReLU
    L_RES_BN = 4'd4,   // residual block: BN after the skip addition
    L_OA1    = 4'd5,   // O #1 (tau_A): 140 -> 70
    L_OA2    = 4'd6,   //               70 -> 30
    L_OA3    = 4'd7,   //               30 -> 1
    L_OI1    = 4'd8,   // O #2 (tau_I): 140 -> 70
    L_OI2    = 4'd9,   //               70 -> 30
    L_OI3    = 4'd10   //               30 -> 1
  } layer_e;

  typedef enum logic [1:0] {
    P_WEIGHT = 2'd0,   // W[k][ci][co]
    P_SCALE  = 2'd1,   // scale[co]
    P_SHIFT  = 2'd2    // shift[co]
  } prm_kind_e;

  // One parameter write: which layer, which kind, its (co, ci, k) index and value.
  typedef struct packed {
    layer_e    layer;
    prm_kind_e kind;
    logic [7:0] co;
    logic [7:0] ci;
    logic [3:0] k;
    prm_t       data;
  } prm_wr_t;

  // Output length of a strided, unpadded 1-D convolution.
  function automatic int conv_out_len(int w_in, int k, int s);
    return (w_in - k) / s + 1;
  endfunction

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // Saturate a wide signed value to the FM format.
  function automatic fm_t sat_fm(logic signed [ACC_W+PRM_W-1:0] v);
    localparam logic signed [ACC_W+PRM_W-1:0] MAXV = (ACC_W+PRM_W)'(64'sh0000_0000_7FFF_FFFF);
    localparam logic signed [ACC_W+PRM_W-1:0] MINV = (ACC_W+PRM_W)'(-64'sh0000_0000_8000_0000);
    if (v > MAXV)      return fm_t'(MAXV);
    else if (v < MINV) return fm_t'(MINV);
    else               return fm_t'(v);
  endfunction

endpackage
