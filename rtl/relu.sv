// relu: rectified linear unit, a comparator and a multiplexer as in the
// paper: a value above zero passes, anything else becomes zero.
// en = 0 bypasses the function (the output layer, a design choice: the
// paper does not say whether the final channel-wise mapping is activated).
// Purely combinational.
module relu
  import chipnet_pkg::*;
(
  input  logic  en,
  input  data_t din,
  output data_t dout
);

  always_comb dout = (!en || din > 0) ? din : '0;

endmodule
