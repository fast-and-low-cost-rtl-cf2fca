// float2int_decoder -- float product back to a 7-bit unsigned magnitude.
//
// |Z| = Zmnt << exp, with the exponent of operand X (00, 01 or 1x = shift by
// 0, 1 or 2). Each output bit is an independent table of the two exponent bits
// and at most three mantissa bits, exactly as in the published truth tables:
// |Z|[6] needs Zmnt[4]; |Z|[5] Zmnt[4:3]; |Z|[4..2] three bits each; |Z|[1]
// Zmnt[1:0]; |Z|[0] Zmnt[0]. Exponent code 11 is decoded like 10, as those
// tables read "1x". Purely combinational, one table level deep.
module float2int_decoder
  import dyrecmul_pkg::*;
(
  input  logic [EXP_BW-1:0] exp,
  input  logic [K-1:0]      zmnt,
  output logic [MAG_BW-1:0] zmag
);

  always_comb begin
    unique casez (exp)
      2'b00:   zmag = {2'b00, zmnt};
      2'b01:   zmag = {1'b0, zmnt, 1'b0};
      default: zmag = {zmnt, 2'b00};
    endcase
  end

endmodule
