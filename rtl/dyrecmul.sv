// dyrecmul -- one INT8 dynamically reconfigurable approximate multiplier.
//
// Computes z ~= x * w / 128 for INT8 x and w, where w is not an input signal
// but is held in configuration storage loaded over a one-bit serial chain.
// Datapath (all combinational from x to z):
//   1. int2float_encoder turns x into float(1,2,5): sign, exponent e, and a
//      five-bit mantissa m = (|x| >> e) truncated.
//   2. cfglut_mantissa_mult reads zm = round(m * |w| / 128) out of five
//      reconfigurable LUTs addressed by m.
//   3. float2int_decoder forms |z| = zm << e (seven bits).
//   4. The product sign is x[7] XOR the stored sign of w, and twos_complement
//      negates |z| when it is set.
//
// Configuration chain: cfg_di -> LUT of zm[4] -> ... -> LUT of zm[0] -> sign
// register of w. With cfg_ce high one bit moves per clk edge; a complete load
// is CHAIN_BITS = 161 bits sent as: sign of w first, then the 160-bit word of
// dyrecmul_pkg::cfg_word(w) from its most significant bit. z is valid from the
// edge that shifts in the last bit. The sign register at the end of the chain
// is taken from the published block diagram; its place in the bit order
// (first bit sent) follows from that position. cfg_do is the sign register,
// the end of the chain.
module dyrecmul
  import dyrecmul_pkg::*;
(
  input  logic  clk,
  input  logic  cfg_ce,   // shift enable of the configuration chain
  input  logic  cfg_di,   // serial configuration bit
  output logic  cfg_do,   // last stage of the chain (stored sign of w)
  input  int8_t x,
  output int8_t z
);

  float125_t          xf;
  logic [K-1:0]       zmnt;
  logic [MAG_BW-1:0]  zmag;
  logic               lut_cdo;
  logic               w_sign_q = 1'b0;

  int2float_encoder u_enc (
    .x (x),
    .f (xf)
  );

  cfglut_mantissa_mult u_mult (
    .clk (clk),
    .ce  (cfg_ce),
    .cdi (cfg_di),
    .op1 (xf.mnt),
    .res (zmnt),
    .cdo (lut_cdo)
  );

  // sign bit of w, the last stage of the configuration chain
  always_ff @(posedge clk)
    if (cfg_ce) w_sign_q <= lut_cdo;

  assign cfg_do = w_sign_q;

  float2int_decoder u_dec (
    .exp  (xf.exp),
    .zmnt (zmnt),
    .zmag (zmag)
  );

  twos_complement u_neg (
    .zmag (zmag),
    .neg  (xf.sign ^ w_sign_q),
    .z    (z)
  );

endmodule
