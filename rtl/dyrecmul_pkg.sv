// dyrecmul_pkg -- constants and types shared by the DyRecMul INT8 approximate
// multiplier.
//
// The multiplier works on INT8 operands (N = 8). Operand X is re-coded as a
// small floating-point number float(1,2,5): one sign bit, a two-bit exponent
// and a five-bit mantissa. The mantissa is multiplied by |W| in a bank of
// K = 5 reconfigurable 5-input LUTs (one LUT per product bit, 32 truth-table
// bits each), so one weight needs K * 32 = 160 configuration bits. The product
// mantissa is rescaled by 2^PROD_SHIFT (= 2^7), which makes the INT8 result
// Z ~= X * W / 128. All of these numbers follow the published INT8 design; the
// value of PROD_SHIFT is read from the rounding example of the mantissa LUTs
// and from the 7-bit decoder output.
package dyrecmul_pkg;

  localparam int unsigned N          = 8;            // INT8 operands and result
  localparam int unsigned EXP_BW     = 2;            // exponent bits of float(1,2,5)
  localparam int unsigned MNT_BW     = 5;            // mantissa bits of float(1,2,5)
  localparam int unsigned K          = 5;            // product mantissa bits = CFGLUT5 count
  localparam int unsigned LUT_IN     = 5;            // CFGLUT5 address width
  localparam int unsigned LUT_BITS   = 1 << LUT_IN;  // 32 truth-table bits per CFGLUT5
  localparam int unsigned CFG_BITS   = K * LUT_BITS; // 160 configuration bits per weight
  localparam int unsigned CHAIN_BITS = CFG_BITS + 1; // + sign-bit register behind the LUTs
  localparam int unsigned MAG_BW     = N - 1;        // 7-bit magnitude of the result
  localparam int unsigned PROD_SHIFT = N - 1;        // mantissa product is scaled by 2^-7

  typedef logic signed [N-1:0] int8_t;

  // float(1,2,5) operand produced by the encoder
  typedef struct packed {
    logic              sign;
    logic [EXP_BW-1:0] exp;
    logic [MNT_BW-1:0] mnt;
  } float125_t;

  // Truth table of product bit `bit_idx` for weight magnitude `wmag`: entry a
  // is bit `bit_idx` of round(a * wmag / 2^PROD_SHIFT). For wmag <= 128 and
  // a <= 31 the rounded value stays below 2^K, so nothing saturates.
  function automatic logic [LUT_BITS-1:0] lut_init(input logic [N-1:0] wmag,
                                                   input logic [3:0]    bit_idx);
    logic [LUT_BITS-1:0] t;
    logic [15:0]         p;
    for (int a = 0; a < LUT_BITS; a++) begin
      p    = (16'(a) * 16'(wmag) + 16'(1 << (PROD_SHIFT - 1))) >> PROD_SHIFT;
      t[a] = p[bit_idx];
    end
    return t;
  endfunction

  // The 160-bit configuration word of a signed weight w, in the order it is
  // shifted into the chain: bits [CFG_BITS-1 -: 32] belong to product bit 0
  // (the CFGLUT5 farthest from the stream input), bits [31:0] to product bit
  // K-1. Each 32-bit field is sent from entry 31 down to entry 0.
  function automatic logic [CFG_BITS-1:0] cfg_word(input logic signed [N-1:0] w);
    logic [CFG_BITS-1:0] word;
    logic [N-1:0]        wmag;
    wmag = w[N-1] ? N'(-w) : N'(w);  // |-128| = 128 fits in 8 unsigned bits
    for (int b = 0; b < K; b++)
      word[b*LUT_BITS +: LUT_BITS] = lut_init(wmag, 4'(K - 1 - b));
    return word;
  endfunction

endpackage
