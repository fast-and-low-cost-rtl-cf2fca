// tb_config_memory -- reads the word of every weight -128..127 and compares
// each of its 160 bits with the reference stream (bit n of the word, counted
// from the most significant end, is stream bit n+1 after the sign). Checks the
// one-clock read latency and that the output holds while re is low.
module tb_config_memory;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  logic                clk = 0;
  logic                re;
  int8_t               w;
  logic [CFG_BITS-1:0] rdata, held;
  int                  checks = 0, failures = 0;

  config_memory dut (.clk(clk), .re(re), .w(w), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    re = 0; w = 0;
    for (int v = -128; v < 128; v++) begin
      int bad = 0;
      @(negedge clk);
      re = 1; w = int8_t'(v);
      @(posedge clk); #1;
      re = 0; w = int8_t'(v ^ 8'h55);  // address change without re must not matter
      for (int n = 0; n < CFG_BITS; n++)
        if (rdata[CFG_BITS-1-n] != ref_stream_bit(v, n + 1)) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d: %0d wrong bits", v, bad);
      end
      held = rdata;
      @(posedge clk); #1;
      checks++;
      if (rdata != held) begin failures++; $display("FAIL word not held w=%0d", v); end
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
