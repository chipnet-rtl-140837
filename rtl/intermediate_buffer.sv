// intermediate_buffer: holds the output feature map of the layer being
// computed.
//
// One RAM bank per channel, NPIX = IMG_W*IMG_H words each, unpadded,
// address = row*IMG_W + col. During a pass the convolution results of PAR
// output channels are written each cycle (per-channel enables select the
// banks); after the layer all channels of one pixel are read per cycle and
// moved into the feature map buffer.
// Timing: writes at the clock edge; rdata registered, valid the cycle after
// re. Contents are not initialised: every word is written before it is read.
module intermediate_buffer
  import chipnet_pkg::*;
#(
  parameter int unsigned NPIX = 11520,
  parameter int unsigned CH   = 64,
  parameter int unsigned AW   = $clog2(NPIX)
) (
  input  logic          clk,
  input  logic [CH-1:0] we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata [CH],
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [CH]
);

  for (genvar c = 0; c < CH; c++) begin : g_bank
    data_t mem [NPIX];

    always_ff @(posedge clk) begin
      if (we[c]) mem[waddr] <= wdata[c];
      if (re)    rdata[c]   <= mem[raddr];
    end
  end

endmodule
