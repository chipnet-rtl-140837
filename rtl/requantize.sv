// requantize: wide accumulator back to the 18-bit fixed-point format.
//
// A sum of products of two FRAC-fraction words carries 2*FRAC fraction bits.
// This block shifts it right by FRAC with rounding (add half an LSB, then an
// arithmetic shift: round half up) and clips it to the 18-bit range, which is
// the scale/round/clip sequence of the paper's quantization algorithm
// applied to a layer output. The rounding direction of ties is this design's
// choice; the paper only says "round".
// Purely combinational. sat is high when the value was clipped.
module requantize
  import chipnet_pkg::*;
#(
  parameter int unsigned AW = 47    // accumulator width
) (
  input  logic signed [AW-1:0] acc,
  output data_t                q,
  output logic                 sat
);

  localparam logic signed [AW:0] HALF = (AW+1)'(1) <<< (FRAC - 1);

  logic signed [AW:0] rounded;
  logic signed [AW:0] shifted;

  always_comb begin
    rounded = (AW+1)'(acc) + HALF;
    shifted = rounded >>> FRAC;
    sat     = 1'b0;
    if (shifted > (AW+1)'(DATA_MAX)) begin
      q   = DATA_MAX;
      sat = 1'b1;
    end else if (shifted < (AW+1)'(DATA_MIN)) begin
      q   = DATA_MIN;
      sat = 1'b1;
    end else begin
      q = data_t'(shifted);
    end
  end

endmodule
