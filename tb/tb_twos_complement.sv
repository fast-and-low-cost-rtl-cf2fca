// tb_twos_complement -- exhaustive check of the sign stage: every 7-bit
// magnitude with both signs against the integer value +/- magnitude.
module tb_twos_complement;
  import dyrecmul_pkg::*;

  logic [6:0] zmag;
  logic       neg;
  int8_t      z;
  int         checks = 0, failures = 0;

  twos_complement dut (.zmag(zmag), .neg(neg), .z(z));

  initial begin
    for (int s = 0; s < 2; s++)
      for (int v = 0; v < 128; v++) begin
        zmag = 7'(v); neg = s[0];
        #1;
        checks++;
        if (int'(z) != (s ? -v : v)) begin
          failures++;
          $display("FAIL mag=%0d neg=%0d got %0d", v, s, z);
        end
      end
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
