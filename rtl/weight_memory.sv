// weight_memory: on-chip store of all convolution kernels.
//
// One bank per input channel; bank ic holds, for every layer and output
// channel, the 5x5 kernel that connects input channel ic to that output
// channel, at address layer*CH + oc. A read at (layer, oc) therefore returns
// in one cycle the CH kernels that the CH convolution slices need for one
// output channel. The paper keeps all weights on chip; the host write port
// (instead of constants fixed at build time) is this design's choice.
// All words start at zero.
//
// Timing: writes at the clock edge; rdata registered, valid the cycle after
// re.
module weight_memory
  import chipnet_pkg::*;
#(
  parameter int unsigned CH      = 64,
  parameter int unsigned NLAYERS = 12,
  parameter int unsigned LW      = $clog2(NLAYERS),
  parameter int unsigned CW      = $clog2(CH),
  parameter int unsigned DEPTH   = NLAYERS * CH
) (
  input  logic          clk,
  input  logic          we,
  input  logic [LW-1:0] wlayer,
  input  logic [CW-1:0] woc,
  input  logic [CW-1:0] wic,
  input  kernel_t       wdata,
  input  logic          re,
  input  logic [LW-1:0] rlayer,
  input  logic [CW-1:0] roc,
  output kernel_t       rdata [CH]
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [AW-1:0] waddr, raddr;

  always_comb begin
    waddr = AW'(32'(wlayer) * CH + 32'(woc));
    raddr = AW'(32'(rlayer) * CH + 32'(roc));
  end

  for (genvar c = 0; c < CH; c++) begin : g_bank
    kernel_t mem [DEPTH];

    initial begin
      for (int unsigned a = 0; a < DEPTH; a++) mem[a] = '0;
    end

    always_ff @(posedge clk) begin
      if (we && wic == CW'(c)) mem[waddr] <= wdata;
      if (re)                  rdata[c]   <= mem[raddr];
    end
  end

endmodule
