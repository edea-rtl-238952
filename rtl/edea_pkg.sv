// edea_pkg: widths and tiling constants shared by the dual-engine depthwise
// separable convolution (DSC) accelerator.
//
// Activations are unsigned 8-bit values (they come out of ReLU and a clip to
// [0,255]); weights are signed 8-bit. A product fits in 16 bits and the
// accumulated sums are carried in 24 bits, the word sizes of the paper's
// Non-Conv data path. The tiling follows the paper's chosen configuration:
// 8 channels per step (TD), 16 PWC kernels per step (TK) and a 2x2 output
// block per step. The 8x8 output tile per buffer load is this design's choice.
package edea_pkg;
  localparam int unsigned ACT_W  = 8;   // activation bits (unsigned)
  localparam int unsigned WGT_W  = 8;   // weight bits (signed)
  localparam int unsigned PROD_W = 16;  // product bits
  localparam int unsigned ACC_W  = 24;  // sum / partial-sum bits
  localparam int unsigned KB_W   = 24;  // Non-Conv k and b, Q8.16
  localparam int unsigned KB_FRAC = 16; // fractional bits of k and b
  localparam int unsigned N_TD   = 8;   // channels per step
  localparam int unsigned N_TK   = 16;  // PWC kernels per step
  localparam int unsigned NPIX   = 4;   // 2x2 output block
  localparam int unsigned KTAPS  = 9;   // 3x3 depthwise kernel
  localparam int unsigned WIN    = 5;   // window side (5x5 at stride 2)

  typedef logic        [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [KB_W-1:0]   kb_t;
endpackage
