// chipnet_pkg: shared fixed-point format and kernel types of the ChipNet
// convolution accelerator.
//
// Feature maps and weights are 18-bit two's-complement fixed-point numbers
// with FRAC fraction bits (the 18-bit word follows the paper; the number of
// fraction bits is not given there and FRAC = 10 is this design's choice).
// Every kernel is held as a 5x5 array of such words, index dy*5+dx, dy and dx
// counted from the top-left of the window; 3x3, dilated 3x3 and 1x1 kernels
// are placed inside that 5x5 grid.
package chipnet_pkg;

  localparam int unsigned DW   = 18;        // word width of data and weights
  localparam int unsigned FRAC = 10;        // fraction bits (design choice)
  localparam int unsigned K    = 5;         // window edge
  localparam int unsigned KK   = K * K;     // taps per kernel
  localparam int unsigned PAD  = (K - 1) / 2;
  localparam int unsigned PW_PROD = 2 * DW; // product width

  typedef logic signed [DW-1:0] data_t;
  typedef data_t [KK-1:0]       kernel_t;

  // How a kernel written by the host is to be interpreted.
  typedef enum logic {
    WT_FULL5X5 = 1'b0,   // 25 taps given directly (encoder, output layer)
    WT_BLOCK   = 1'b1    // taps 0..8 = 3x3 w, taps 9..17 = dilated 3x3 v
  } wt_mode_e;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DW-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DW-1){1'b0}}});
  localparam data_t ONE      = data_t'(1 << FRAC);

endpackage
