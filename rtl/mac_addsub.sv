// mac_addsub -- add/subtract stage of the multiply-accumulate variant.
//
// s = c + z when the product is positive and s = c - z when it is negative,
// where zmag = |z| comes from the decoder and neg is the product sign. This
// replaces the two's complement stage of the plain multiplier: instead of
// negating |z| and then adding, the sign selects addition or subtraction
// directly, so the accumulation costs no more than the negation did. The sum is
// INT8 and wraps on overflow (an 8-bit carry chain, no saturation).
// Purely combinational.
//
// Merging the accumulation into the sign stage follows the published design;
// the 8-bit width and the wrap-around are this design's choices.
module mac_addsub
  import dyrecmul_pkg::*;
(
  input  logic [MAG_BW-1:0] zmag,
  input  logic              neg,
  input  int8_t             c,
  output int8_t             s
);

  always_comb s = neg ? c - int8_t'({1'b0, zmag}) : c + int8_t'({1'b0, zmag});

endmodule
