// dyrecmul_mac -- multiply-accumulate variant of the INT8 DyRecMul.
//
// Same datapath as dyrecmul up to the product magnitude (float(1,2,5) encoder,
// five reconfigurable LUTs for the mantissa product, sign register of w at the
// end of the configuration chain, decoder), but the final stage is mac_addsub:
// on every clock edge with acc_en high the accumulator takes
//   acc <= (acc_clr ? 0 : acc) +/- |x * w / 128|
// with the sign of the product choosing + or -. acc_clr without acc_en clears
// the accumulator. acc is the registered INT8 sum and wraps on overflow.
//
// Configuration is loaded exactly as for dyrecmul (161 bits, sign of w first,
// one bit per clock with cfg_ce high). rst_n clears only the accumulator.
// The published design evaluates this configuration alongside the plain
// multiplier; the accumulator register, its controls and its reset are this
// design's choices.
module dyrecmul_mac
  import dyrecmul_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cfg_ce,
  input  logic  cfg_di,
  output logic  cfg_do,
  input  int8_t x,
  input  logic  acc_en,    // add this cycle's product
  input  logic  acc_clr,   // start from zero
  output int8_t acc
);

  float125_t          xf;
  logic [K-1:0]       zmnt;
  logic [MAG_BW-1:0]  zmag;
  logic               lut_cdo;
  logic               w_sign_q = 1'b0;
  int8_t              acc_q, base, sum;

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

  always_ff @(posedge clk)
    if (cfg_ce) w_sign_q <= lut_cdo;

  assign cfg_do = w_sign_q;

  float2int_decoder u_dec (
    .exp  (xf.exp),
    .zmnt (zmnt),
    .zmag (zmag)
  );

  assign base = acc_clr ? int8_t'(0) : acc_q;

  mac_addsub u_addsub (
    .zmag (zmag),
    .neg  (xf.sign ^ w_sign_q),
    .c    (base),
    .s    (sum)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       acc_q <= '0;
    else if (acc_en)  acc_q <= sum;
    else if (acc_clr) acc_q <= '0;

  assign acc = acc_q;

endmodule
