// tb_mac_addsub -- exhaustive check of the add/subtract stage: every
// accumulator value, magnitude and sign against (c +/- zmag) taken modulo 256
// and read back as a signed byte.
module tb_mac_addsub;
  import dyrecmul_pkg::*;

  logic [6:0] zmag;
  logic       neg;
  int8_t      c, s;
  int         checks = 0, failures = 0;

  mac_addsub dut (.zmag(zmag), .neg(neg), .c(c), .s(s));

  function automatic int wrap8(input int v);
    int r = ((v % 256) + 256) % 256;
    return (r >= 128) ? r - 256 : r;
  endfunction

  initial begin
    for (int cv = -128; cv < 128; cv++)
      for (int sg = 0; sg < 2; sg++)
        for (int m = 0; m < 128; m++) begin
          c = int8_t'(cv); neg = sg[0]; zmag = 7'(m);
          #1;
          checks++;
          if (int'(s) != wrap8(sg ? cv - m : cv + m)) begin
            failures++;
            if (failures < 10) $display("FAIL c=%0d neg=%0d m=%0d got %0d", cv, sg, m, s);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
