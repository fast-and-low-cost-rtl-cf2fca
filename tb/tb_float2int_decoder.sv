// tb_float2int_decoder -- exhaustive check of the float to 7-bit magnitude
// decoder: every exponent code and product mantissa against zmnt * 2^shift,
// where code 11 shifts by two like 10.
module tb_float2int_decoder;
  import dyrecmul_pkg::*;

  logic [1:0] e;
  logic [4:0] m;
  logic [6:0] zmag;
  int         checks = 0, failures = 0;

  float2int_decoder dut (.exp(e), .zmnt(m), .zmag(zmag));

  initial begin
    for (int ev = 0; ev < 4; ev++)
      for (int mv = 0; mv < 32; mv++) begin
        int sh;
        e = 2'(ev); m = 5'(mv);
        #1;
        sh = (ev >= 2) ? 2 : ev;
        checks++;
        if (int'(zmag) != mv * (1 << sh)) begin
          failures++;
          $display("FAIL e=%0d m=%0d got %0d", ev, mv, zmag);
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
