// cfglut_mantissa_mult -- reconfigurable unsigned mantissa multiplier.
//
// K reconfigurable five-input LUTs share the 5-bit mantissa op1 as their
// address. LUT b holds bit b of round(op1 * |W| / 2^7) for all 32 values of
// op1, so reading the LUTs gives the quantized mantissa product res directly
// and the second operand |W| never appears as a signal: it lives in the truth
// tables. There is no interaction between the LUTs, so the read path is one LUT
// deep.
//
// Loading: the LUTs form one serial chain. cdi enters the LUT of the most
// significant product bit (res[K-1]) and leaves the LUT of res[0] on cdo. With
// ce high one bit moves per clock, so a full reload takes K*32 = 160 clocks;
// the bit order is the one produced by dyrecmul_pkg::cfg_word. While a reload
// is in progress res is a mix of old and new tables and must not be used.
//
// The LUT count, the chain and the rounding of the stored product follow the
// published design; the ordering of the chain (most significant bit first) is
// this design's choice.
module cfglut_mantissa_mult
  import dyrecmul_pkg::*;
(
  input  logic              clk,
  input  logic              ce,
  input  logic              cdi,
  input  logic [MNT_BW-1:0] op1,
  output logic [K-1:0]      res,
  output logic              cdo
);

  logic [K:0] chain;   // chain[K] = cdi, chain[b] = CDO of the LUT of res[b]

  assign chain[K] = cdi;

  for (genvar b = K - 1; b >= 0; b--) begin : g_lut
    cfglut5 u_lut (
      .clk (clk),
      .ce  (ce),
      .cdi (chain[b+1]),
      .i   (op1),
      .o6  (res[b]),
      .cdo (chain[b])
    );
  end

  assign cdo = chain[0];

endmodule
