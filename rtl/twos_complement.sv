// twos_complement -- signed INT8 result from the product magnitude.
//
// z = neg ? -zmag : zmag, with zmag the 7-bit magnitude from the decoder and
// neg the exclusive OR of the operand signs. A zero magnitude stays zero for
// either sign. Since |zmag| <= 127 the result always fits INT8. This is the
// carry-propagating stage the published design builds from eight LUTs; here it
// is written as a plain conditional negation. Purely combinational.
module twos_complement
  import dyrecmul_pkg::*;
(
  input  logic [MAG_BW-1:0] zmag,
  input  logic              neg,
  output int8_t             z
);

  always_comb z = neg ? -int8_t'({1'b0, zmag}) : int8_t'({1'b0, zmag});

endmodule
