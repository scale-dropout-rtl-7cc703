// Shared constants and types of the Scale-Dropout compute-in-memory accelerator.
//
// Number formats: crossbar partial sums are signed ACC_W-bit integers (the
// value of a +-1 XNOR-popcount), scales and batch-norm coefficients are signed
// Q16.16 fixed point in 32-bit words, so the constant 1.0 that replaces a
// dropped scale vector is 32'h0001_0000. The 8-bit sum and the 32-bit scale
// widths are those printed on the architecture diagram; the fixed-point split
// is this design's own choice.
//
// A layer descriptor tells the controller which crossbar arrays hold the
// layer's weights (one array per 128-input row tile), how many inputs and
// outputs it has, its dropout probability (as a keep-probability code out of
// 256, so layers can use 10 %, 20 % or 50 % dropout) and whether its output
// is saved to, or summed with, the skip-connection buffer. A convolutional
// layer also gives its kernel size, square input width and input channels:
// its in_len is K*K*c_in (one unrolled kernel per crossbar column), out_len
// its output channels, and the feature maps are stored row by row with the
// channels of one pixel adjacent (index = (y*width + x)*channels + c).
package sd_pkg;
  timeunit 1ns;
  timeprecision 1ps;


  localparam int unsigned SCALE_W    = 32;   // scale word (paper: 32-bit SRAM)
  localparam int unsigned SCALE_FRAC = 16;   // Q16.16
  localparam int unsigned ACC_W      = 8;    // partial-sum register width
  localparam int unsigned PROD_W     = ACC_W + SCALE_W;
  localparam int unsigned BN_W       = 32;   // folded BN coefficient width
  localparam int unsigned ZHAT_W     = PROD_W + BN_W + 1;
  localparam int unsigned LOGIT_W    = 32;   // Q16.16 output logit

  localparam logic signed [SCALE_W-1:0] SCALE_ONE = SCALE_W'(1) <<< SCALE_FRAC;

  typedef struct packed {
    logic [3:0] first_xbar;  // array holding row tile 0 of this layer
    logic [3:0] n_tiles;     // number of 128-input row tiles (1..N_XBAR)
    logic [10:0] in_len;     // number of binary inputs
    logic [8:0] out_len;     // number of outputs (1..256)
    logic [7:0] p_keep;      // P(mask = 1) * 256, i.e. 256 - 256*p_drop
    logic       save_skip;   // store this layer's normalised outputs
    logic       add_skip;    // add the stored outputs before the sign
    logic       conv;        // convolution: one crossbar pass per output position
    logic       pool;        // 2x2 max-pool the binary outputs (conv only)
    logic [2:0] k;           // kernel size K (conv only)
    logic [5:0] in_w;        // input width = height (conv only)
    logic [8:0] c_in;        // input channels (conv only)
  } layer_desc_t;

endpackage
