// int2float_encoder -- INT8 to float(1,2,5) conversion of operand X.
//
// The sign is X[7]. The exponent and the mantissa are taken from the 7-bit
// magnitude |X|: the exponent says how far the leading one of |X| lies above
// bit 4 (00: |X| < 32, 01: 32 <= |X| < 64, 10: |X| >= 64) and the mantissa is
// the five bits of |X| starting at bit `exp`, i.e. |X| >> exp truncated to five
// bits. The exponent code 11 is never produced.
//
// Following the published design, the exponent is a three-input table of the
// sign and the two top bits, and each mantissa bit is a five-input table of the
// exponent and three neighbouring input bits (the mantissa is truncated, not
// rounded). This design's own choice is where the magnitude comes from: the
// tables are applied to |X| (computed here by a two's complement negation and
// clamped to 127, so -128 is treated as -127) instead of to the raw bits of a
// negative X. Read for non-negative inputs the published exponent table is
// exactly this function; for negative inputs it is not self-consistent, and the
// raw bits of a negative number would not give a mantissa of |X|.
//
// Interface: x (INT8) in, f (float125_t) out. Purely combinational.
module int2float_encoder
  import dyrecmul_pkg::*;
(
  input  int8_t     x,
  output float125_t f
);

  logic [MAG_BW-1:0] mag;   // |X|, clamped to 127
  logic [1:0]        e;

  always_comb begin
    if (!x[N-1])
      mag = x[MAG_BW-1:0];
    else if (x == int8_t'(-128))
      mag = '1;
    else
      mag = MAG_BW'(-x);
  end

  // exponent table (sign already removed, so only |X|[6:5] matters)
  always_comb begin
    unique casez (mag[6:5])
      2'b00:   e = 2'b00;
      2'b01:   e = 2'b01;
      default: e = 2'b10;
    endcase
  end

  // one five-input table per mantissa bit: exponent plus |X|[j+2:j]
  always_comb begin
    f.sign = x[N-1];
    f.exp  = e;
    for (int j = 0; j < MNT_BW; j++) begin
      unique casez (e)
        2'b00:   f.mnt[j] = mag[j];
        2'b01:   f.mnt[j] = mag[j+1];
        default: f.mnt[j] = mag[j+2];
      endcase
    end
  end

endmodule
