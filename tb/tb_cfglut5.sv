// tb_cfglut5 -- reconfigurable LUT: shifts random 32-bit tables in through
// cdi, checks every address of o6, the bits leaving on cdo (the previous
// table, entry 31 first), and that nothing moves while ce is low.
module tb_cfglut5;
  logic        clk = 0;
  logic        ce, cdi;
  logic [4:0]  i;
  logic        o6, cdo;
  logic [31:0] prev, tbl;
  int          checks = 0, failures = 0;

  cfglut5 dut (.clk(clk), .ce(ce), .cdi(cdi), .i(i), .o6(o6), .cdo(cdo));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    ce = 0; cdi = 0; i = 0;
    prev = 32'h0;      // INIT default
    for (int t = 0; t < 6; t++) begin
      tbl = $urandom();
      for (int n = 0; n < 32; n++) begin
        @(negedge clk);
        chk(cdo == prev[31 - n], "cdo order");
        ce = 1; cdi = tbl[31 - n];
        @(posedge clk); #1 ce = 0;
      end
      // idle clocks must not change the table
      repeat (3) @(posedge clk);
      for (int a = 0; a < 32; a++) begin
        i = 5'(a); #1;
        chk(o6 == tbl[a], $sformatf("o6 table %0d addr %0d", t, a));
      end
      prev = tbl;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
