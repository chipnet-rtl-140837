// kernel_compose: equivalent 5x5 kernel of a ChipNet convolution block.
//
// A ChipNet block adds three branches: the identity, a 3x3 convolution w and
// a dilated (rate 2) 3x3 convolution v. Because they are summed, the block
// is one 5x5 convolution whose kernel has w on the inner 3x3 taps, v on the
// taps at even row and column offsets, and at the centre the sum
// w22 + v22, plus 1.0 for the identity when the input and the output channel
// are the same. This follows the paper's equivalent-kernel figure; clipping
// the centre sum to 18 bits is this design's choice.
//
// Interface: mode WT_BLOCK takes kin[0..8] = w (row-major), kin[9..17] = v
// (row-major), kin[18..24] unused, and ident = (output channel == input
// channel). Mode WT_FULL5X5 passes kin through unchanged.
// Purely combinational.
module kernel_compose
  import chipnet_pkg::*;
(
  input  wt_mode_e mode,
  input  logic     ident,
  input  kernel_t  kin,
  output kernel_t  kout
);

  logic signed [DW+1:0] centre;

  always_comb begin
    centre = (DW+2)'(kin[4]) + (DW+2)'(kin[9+4]) + (ident ? (DW+2)'(ONE) : '0);
    if (mode == WT_FULL5X5) begin
      kout = kin;
    end else begin
      kout = '0;
      for (int unsigned dy = 0; dy < 3; dy++)
        for (int unsigned dx = 0; dx < 3; dx++) begin
          kout[(dy+1)*K + dx + 1] = kin[dy*3 + dx];        // w
          kout[(2*dy)*K + 2*dx]   = kin[9 + dy*3 + dx];    // v
        end
      if (centre > (DW+2)'(DATA_MAX))      kout[2*K + 2] = DATA_MAX;
      else if (centre < (DW+2)'(DATA_MIN)) kout[2*K + 2] = DATA_MIN;
      else                                 kout[2*K + 2] = data_t'(centre);
    end
  end

endmodule
