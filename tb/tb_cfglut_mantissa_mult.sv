// tb_cfglut_mantissa_mult -- five-LUT mantissa multiplier.
// For a series of weight magnitudes (first 23, the worked example of the
// published design, then 0, 1, 127, 128 and random ones) the 160 table bits are
// built from the reference model and shifted in serially; then all 32
// mantissas are applied and res is compared with round(m * |w| / 128). For
// weight 23 the rows of the published example table are checked literally.
// The bits leaving on cdo during a load must be the previous load, in order,
// and a load must take exactly 160 enabled clocks.
module tb_cfglut_mantissa_mult;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  logic       clk = 0;
  logic       ce, cdi;
  logic [4:0] op1;
  logic [4:0] res;
  logic       cdo;
  int         checks = 0, failures = 0;
  int         prev_w;

  cfglut_mantissa_mult dut (.clk(clk), .ce(ce), .cdi(cdi), .op1(op1), .res(res), .cdo(cdo));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic load(input int wmag);
    int ncyc = 0;
    for (int n = 0; n < CFG_BITS; n++) begin
      @(negedge clk);
      if (prev_w >= 0) chk(cdo == ref_stream_bit(prev_w, n + 1), "cdo replays previous load");
      ce = 1; cdi = ref_stream_bit(wmag, n + 1);
      @(posedge clk); ncyc++;
      #1 ce = 0;
    end
    chk(ncyc == 160, "load length");
    prev_w = wmag;
  endtask

  task automatic sweep(input int wmag);
    for (int m = 0; m < 32; m++) begin
      op1 = 5'(m); #1;
      chk(int'(res) == ref_zmnt(m, wmag), $sformatf("w=%0d m=%0d got %0d", wmag, m, res));
    end
  endtask

  // published example: Op2 = 23, three most significant result bits
  int ex_op [14] = '{0, 1, 2, 3, 4, 5, 6, 25, 26, 27, 28, 29, 30, 31};
  int ex_res[14] = '{0, 0, 0, 1, 1, 1, 1,  4,  5,  5,  5,  5,  5,  6};

  initial begin
    ce = 0; cdi = 0; op1 = 0; prev_w = -1;
    load(23);
    sweep(23);
    foreach (ex_op[j]) begin
      op1 = 5'(ex_op[j]); #1;
      chk(res == 5'(ex_res[j]), $sformatf("example row op1=%0d", ex_op[j]));
    end
    load(0);   sweep(0);
    load(1);   sweep(1);
    load(127); sweep(127);
    load(128); sweep(128);
    repeat (6) begin
      int wm = $urandom_range(128, 0);
      load(wm); sweep(wm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
