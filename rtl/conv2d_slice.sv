// conv2d_slice: one 2D convolution slice of the 3D convolution unit.
//
// Each slice owns one input channel. The channel's padded feature map is
// shifted through a line buffer; its 5x5 window feeds PAR multiplier arrays
// of 25 multipliers, one per output channel computed in the current pass,
// and each multiplier array is followed by a 25-input adder tree. This is the
// structure of the paper (line buffer, two 5x5 multiplier arrays, adder
// trees). Holding the kernels in registers loaded from the weight memory at
// the start of a pass is this design's choice.
//
// Interface: wt_load[p] copies wt_in into kernel register p (zeroed instead
// when wt_en is low, which silences an unused input channel). in_valid/din
// push one padded pixel into the line buffer. sum[p] is the 5x5 dot product
// of kernel p with the window.
// Timing: sum[p] corresponds to the window after the push made
// LAT = 2 + clog2(25) = 7 cycles earlier (1 cycle line buffer, 1 cycle
// multipliers, 5 adder-tree levels). A pixel can be pushed every cycle.
module conv2d_slice
  import chipnet_pkg::*;
#(
  parameter int unsigned PW  = 184,
  parameter int unsigned PAR = 2,
  parameter int unsigned SW  = 2*DW + $clog2(KK)
) (
  input  logic                 clk,
  input  logic [PAR-1:0]       wt_load,
  input  logic                 wt_en,
  input  kernel_t              wt_in,
  input  logic                 in_valid,
  input  data_t                din,
  output logic signed [SW-1:0] sum [PAR]
);

  kernel_t window;
  kernel_t wreg [PAR];

  line_buffer #(.PW(PW)) u_lb (
    .clk     (clk),
    .shift_en(in_valid),
    .din     (din),
    .window  (window)
  );

  always_ff @(posedge clk) begin
    for (int unsigned p = 0; p < PAR; p++)
      if (wt_load[p]) wreg[p] <= wt_en ? wt_in : '0;
  end

  for (genvar p = 0; p < PAR; p++) begin : g_arr
    logic signed [PW_PROD-1:0] prod [KK];

    always_ff @(posedge clk) begin
      for (int unsigned t = 0; t < KK; t++)
        prod[t] <= window[t] * wreg[p][t];
    end

    adder_tree #(.N(KK), .IW(PW_PROD), .OW(SW)) u_tree (
      .clk(clk),
      .din(prod),
      .sum(sum[p])
    );
  end

endmodule
