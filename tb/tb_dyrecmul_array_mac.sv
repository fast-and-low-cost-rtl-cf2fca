// tb_dyrecmul_array_mac -- the top level in its multiply-accumulate
// configuration (MAC = 1, four lanes). Each round loads a new random weight into
// every lane through the shared stream, then computes short dot products: for
// 8 clocks every lane adds x * w / 128 for random x (the first clock also
// clears), and the four accumulators are compared with a wrapped-INT8 model.
// While one lane is reloaded the others keep accumulating. Counts and requires
// reconfigurations, accumulations during a reload, wraps and negative sums.
module tb_dyrecmul_array_mac;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  localparam int unsigned NM = 4;

  logic       clk = 0, rst_n;
  logic       load, busy, done;
  int8_t      w;
  logic [1:0] dest;
  int8_t      x [NM];
  int8_t      z [NM];
  logic       acc_en [NM], acc_clr [NM];
  int         lane_w [NM], model [NM];
  int         checks = 0, failures = 0;
  int         n_reconfig = 0, n_acc_busy = 0, n_wrap = 0, n_neg = 0;

  dyrecmul_array #(.MAC(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w(w), .dest(dest),
    .busy(busy), .done(done), .x(x), .acc_en(acc_en), .acc_clr(acc_clr), .z(z));

  always #5 clk = ~clk;

  function automatic int wrap8(input int v);
    int r = ((v % 256) + 256) % 256;
    return (r >= 128) ? r - 256 : r;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // one clock: lanes in `mask` accumulate random x (with clear if first)
  task automatic step(input logic [NM-1:0] mask, input bit first);
    @(negedge clk);
    for (int l = 0; l < NM; l++) begin
      int xv = int'($urandom_range(255, 0)) - 128;
      x[l] = int8_t'(xv);
      acc_en[l] = mask[l]; acc_clr[l] = mask[l] & first;
      if (mask[l]) begin
        int nxt = (first ? 0 : model[l]) + ref_mul(xv, lane_w[l]);
        if (wrap8(nxt) != nxt) n_wrap++;
        model[l] = wrap8(nxt);
      end
    end
    @(posedge clk); #1;
    for (int l = 0; l < NM; l++) begin
      acc_en[l] = 0; acc_clr[l] = 0;
      chk(int'(z[l]) == model[l], $sformatf("lane %0d acc %0d model %0d", l, z[l], model[l]));
      if (z[l] < 0) n_neg++;
    end
  endtask

  task automatic reload(input int wv, input int lane);
    @(negedge clk);
    load = 1; w = int8_t'(wv); dest = 2'(lane);
    @(posedge clk); #1 load = 0;
    while (busy) begin
      logic [NM-1:0] others = ~(NM'(1) << lane);
      step(others, 1'b0);
      n_acc_busy++;
    end
    lane_w[lane] = wv;
    n_reconfig++;
  endtask

  initial begin
    rst_n = 0; load = 0; w = 0; dest = 0;
    for (int l = 0; l < NM; l++) begin x[l] = 0; acc_en[l] = 0; acc_clr[l] = 0; lane_w[l] = 0; model[l] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      for (int l = 0; l < NM; l++) reload(int'($urandom_range(255, 0)) - 128, l);
      step('1, 1'b1);
      repeat (7) step('1, 1'b0);
    end
    chk(n_reconfig > 0 && n_acc_busy > 0 && n_wrap > 0 && n_neg > 0, "all mechanisms exercised");
    $display("mechanisms: reconfig=%0d acc_during_reload=%0d wrap=%0d negative=%0d",
             n_reconfig, n_acc_busy, n_wrap, n_neg);
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
