// One multiplier of the MAC array.
//
// Multiplies a 9-bit activation by a 15-bit filter coefficient and gives the
// full 24-bit signed product. Purely combinational; the sum of a pixel's nine
// products and the running sum over input channels are formed in the MPE.
// Operands are two's-complement integers (the chip's own 9- and 15-bit
// number formats are not specified in enough detail to reproduce).
module mac_unit
  import mram_cnn_pkg::*;
(
  input  act_t  act,
  input  coef_t coef,
  output prod_t prod
);

  always_comb prod = prod_t'(act) * prod_t'(coef);

endmodule
