// conv3d: the 3D convolution unit.
//
// CH 2D slices (conv2d_slice) work in parallel, slice i on input channel i.
// For each of the PAR kernels computed in a pass, a CH-input adder tree sums
// the slice outputs into the full 3D convolution result of one output
// channel. With the defaults (64 slices, PAR = 2) the unit produces two
// output-channel pixels per cycle, as in the paper.
//
// Interface: rst_n clears only the valid pipeline. wt_load/wt_in[i]/ch_en[i] load the kernels of slice i (see
// conv2d_slice); in_valid/din[i] push one padded pixel of every channel;
// in_tag is carried along unchanged and leaves as out_tag together with the
// sums it belongs to (the controller uses it to mark valid output pixels).
// Timing: acc/out_tag/out_valid follow in_valid by
// LAT = 2 + clog2(25) + clog2(CH) cycles (13 at the defaults).
module conv3d
  import chipnet_pkg::*;
#(
  parameter int unsigned CH  = 64,
  parameter int unsigned PW  = 184,
  parameter int unsigned PAR = 2,
  parameter int unsigned TW  = 16,
  parameter int unsigned SW  = 2*DW + $clog2(KK),
  parameter int unsigned AW  = SW + $clog2(CH),
  parameter int unsigned LAT = 2 + $clog2(KK) + $clog2(CH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PAR-1:0]       wt_load,
  input  kernel_t              wt_in [CH],
  input  logic [CH-1:0]        ch_en,
  input  logic                 in_valid,
  input  data_t                din [CH],
  input  logic [TW-1:0]        in_tag,
  output logic                 out_valid,
  output logic [TW-1:0]        out_tag,
  output logic signed [AW-1:0] acc [PAR]
);

  logic signed [SW-1:0] ssum [CH][PAR];

  for (genvar i = 0; i < CH; i++) begin : g_slice
    conv2d_slice #(.PW(PW), .PAR(PAR), .SW(SW)) u_slice (
      .clk     (clk),
      .wt_load (wt_load),
      .wt_en   (ch_en[i]),
      .wt_in   (wt_in[i]),
      .in_valid(in_valid),
      .din     (din[i]),
      .sum     (ssum[i])
    );
  end

  for (genvar p = 0; p < PAR; p++) begin : g_tree
    logic signed [SW-1:0] col [CH];
    always_comb begin
      for (int unsigned i = 0; i < CH; i++) col[i] = ssum[i][p];
    end
    adder_tree #(.N(CH), .IW(SW), .OW(AW)) u_tree (
      .clk(clk),
      .din(col),
      .sum(acc[p])
    );
  end

  // Side band: valid flag and tag delayed by the datapath latency.
  logic          vpipe [LAT];
  logic [TW-1:0] tpipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < LAT; s++) vpipe[s] <= 1'b0;
    end else begin
      vpipe[0] <= in_valid;
      for (int unsigned s = 1; s < LAT; s++) vpipe[s] <= vpipe[s-1];
    end
  end

  always_ff @(posedge clk) begin
    tpipe[0] <= in_tag;
    for (int unsigned s = 1; s < LAT; s++) tpipe[s] <= tpipe[s-1];
  end

  assign out_valid = vpipe[LAT-1];
  assign out_tag   = tpipe[LAT-1];

endmodule
