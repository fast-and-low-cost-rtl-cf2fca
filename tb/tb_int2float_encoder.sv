// tb_int2float_encoder -- exhaustive check of the INT8 to float(1,2,5) encoder.
// All 256 inputs are compared with the arithmetic reference (sign = x[7],
// exponent from the size of |x|, mantissa = |x| >> exponent). A few rows of the
// published truth tables for non-negative inputs are also checked literally.
module tb_int2float_encoder;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  int8_t     x;
  float125_t f;
  int        checks = 0, failures = 0;

  int2float_encoder dut (.x(x), .f(f));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%0d got s=%0b e=%0b m=%0d", what, x, f.sign, f.exp, f.mnt);
    end
  endtask

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = int8_t'(v);
      #1;
      chk(f.sign == (v < 0), "sign");
      chk(int'(f.exp) == ref_exp(v), "exp");
      chk(int'(f.mnt) == ref_mnt(v), "mnt");
    end
    // published exponent table, non-negative rows: X[7:5] 000->00, 001->01, 01x->10
    x = 8'sb000_10101; #1; chk(f.exp == 2'b00 && f.mnt == 5'b10101, "table 000");
    x = 8'sb001_00110; #1; chk(f.exp == 2'b01 && f.mnt == 5'b10011, "table 001");
    x = 8'sb011_11101; #1; chk(f.exp == 2'b10 && f.mnt == 5'b11111, "table 01x");
    x = 8'sb010_00111; #1; chk(f.exp == 2'b10 && f.mnt == 5'b10001, "table 01x b");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
