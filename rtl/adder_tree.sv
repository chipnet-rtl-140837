// adder_tree: pipelined binary adder tree.
//
// Sums N signed inputs of IW bits without loss: the result is
// IW + clog2(N) bits wide. Inputs are paired level by level, each level ends
// in a register, so the sum of the inputs presented in cycle t appears
// LAT = clog2(N) cycles later (combinational when N = 1). A new set of inputs
// may be presented every cycle. The paper names adder trees after the
// multiplier arrays and across the 2D slices; the pipelining is this
// design's choice.
module adder_tree #(
  parameter int unsigned N  = 25,
  parameter int unsigned IW = 36,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] din [N],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned LV = $clog2(N);
  localparam int unsigned N2 = 1 << LV;

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic signed [OW-1:0] v [N2 >> l];
    if (l == 0) begin : g_in
      always_comb begin
        for (int unsigned i = 0; i < N2; i++)
          v[i] = (i < N) ? OW'(din[i]) : '0;
      end
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int unsigned i = 0; i < (N2 >> l); i++)
          v[i] <= g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
      end
    end
  end

  assign sum = g_lvl[LV].v[0];

endmodule
