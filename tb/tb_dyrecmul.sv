// tb_dyrecmul -- one complete multiplier, every operand pair.
// Each of the 256 weights is loaded over the serial chain (sign first, then the
// table bits, 161 enabled clocks) and all 256 values of x are applied; z must
// equal the arithmetic reference model (z = sign * (round(m*|w|/128) << e)).
// Also checked: cfg_do shows the stored sign of w after a load, and the result
// of every pair never differs from x*w/128 by more than the bound the
// truncated mantissa allows. As an error analysis over all 65,536 pairs it
// measures the error probability (share of pairs where z differs from x*w/128
// rounded to nearest) and the mean absolute error in those INT8 units, and
// requires the error probability to lie within 0.02 of the published 0.5157.
module tb_dyrecmul;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  logic  clk = 0;
  logic  cfg_ce, cfg_di, cfg_do;
  int8_t x, z;
  int    checks = 0, failures = 0;
  int    negative_products = 0, saturated_x = 0;
  int    n_err = 0;
  real   sum_abs_err = 0.0;

  dyrecmul dut (.clk(clk), .cfg_ce(cfg_ce), .cfg_di(cfg_di), .cfg_do(cfg_do), .x(x), .z(z));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic load(input int w);
    for (int n = 0; n < CHAIN_BITS; n++) begin
      @(negedge clk);
      cfg_ce = 1; cfg_di = ref_stream_bit(w, n);
      @(posedge clk);
      #1 cfg_ce = 0;
    end
  endtask

  initial begin
    cfg_ce = 0; cfg_di = 0; x = 0;
    for (int w = -128; w < 128; w++) begin
      load(w);
      chk(cfg_do == (w < 0), "stored sign");
      for (int v = -128; v < 128; v++) begin
        int exact, err;
        x = int8_t'(v); #1;
        chk(int'(z) == ref_mul(v, w), $sformatf("x=%0d w=%0d got %0d exp %0d", v, w, z, ref_mul(v, w)));
        // |x*w/128 - z| <= 3*|w|/128 (dropped mantissa bits) + 1 (rounding) + clamp of -128
        exact = v * w;
        err   = exact - int'(z) * 128;
        if (err < 0) err = -err;
        chk(err <= 3 * ((w < 0) ? -w : w) + 128 * 4 + 128, $sformatf("error bound x=%0d w=%0d", v, w));
        begin
          int rnd;
          rnd = (exact >= 0) ? (exact + 64) / 128 : -((-exact + 64) / 128);
          if (rnd != int'(z)) begin
            n_err++;
            sum_abs_err += (rnd > int'(z)) ? real'(rnd - int'(z)) : real'(int'(z) - rnd);
          end
        end
        if (z < 0) negative_products++;
        if (v == -128 && w != 0) saturated_x++;
      end
    end
    chk(negative_products > 0, "negative products seen");
    $display("error analysis: EP = %0.4f, MAE = %0.4f (INT8 units, against round(x*w/128))",
             real'(n_err) / 65536.0, sum_abs_err / 65536.0);
    chk(real'(n_err) / 65536.0 > 0.4957 && real'(n_err) / 65536.0 < 0.5357, "error probability near 0.5157");
    chk(saturated_x > 0, "x = -128 exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
