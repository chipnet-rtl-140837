// fmap_buffer: feature map buffer with automatic zero padding.
//
// One dual-port RAM bank per channel. Each bank holds the map padded by PAD
// pixels on every side, PW = IMG_W + 2*PAD words per line and
// PH = IMG_H + 2*PAD lines. All words start at zero (RAM initial contents);
// a pixel (row, col) is written to address (row+PAD)*PW + (col+PAD), so the
// padding words are never written and stay zero. Reading the addresses
// 0 .. PW*PH-1 in order therefore yields the zero-padded map, which is how
// the paper pads without any extra logic.
//
// Interface: write port takes an unpadded position (wrow, wcol), a
// per-channel enable we and one word per channel. The read port takes a
// linear padded address and returns one word of every channel.
// Timing: writes take effect at the clock edge; rdata is registered, valid
// the cycle after re.
module fmap_buffer
  import chipnet_pkg::*;
#(
  parameter int unsigned IMG_W = 180,
  parameter int unsigned IMG_H = 64,
  parameter int unsigned CH    = 64,
  parameter int unsigned PW    = IMG_W + 2*PAD,
  parameter int unsigned PH    = IMG_H + 2*PAD,
  parameter int unsigned DEPTH = PW * PH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic [CH-1:0]            we,
  input  logic [$clog2(IMG_H)-1:0] wrow,
  input  logic [$clog2(IMG_W)-1:0] wcol,
  input  data_t                    wdata [CH],
  input  logic                     re,
  input  logic [AW-1:0]            raddr,
  output data_t                    rdata [CH]
);

  logic [AW-1:0] waddr;

  always_comb waddr = AW'((32'(wrow) + PAD) * PW + 32'(wcol) + PAD);

  for (genvar c = 0; c < CH; c++) begin : g_bank
    data_t mem [DEPTH];

    initial begin
      for (int unsigned a = 0; a < DEPTH; a++) mem[a] = '0;
    end

    always_ff @(posedge clk) begin
      if (we[c]) mem[waddr] <= wdata[c];
      if (re)    rdata[c]   <= mem[raddr];
    end
  end

endmodule
