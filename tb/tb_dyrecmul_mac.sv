// tb_dyrecmul_mac -- multiply-accumulate lane. For a set of weights (loaded
// serially, sign first) it feeds random x with random acc_en / acc_clr and
// compares the accumulator every clock with a model that adds the reference
// product (z = sign * (round(m*|w|/128) << e)) and wraps to INT8. Counts and
// requires: accumulations, clears, wrap-arounds and subtracted products.
module tb_dyrecmul_mac;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  logic  clk = 0, rst_n;
  logic  cfg_ce, cfg_di, cfg_do, acc_en, acc_clr;
  int8_t x, acc;
  int    checks = 0, failures = 0;
  int    model, n_acc = 0, n_clr = 0, n_wrap = 0, n_sub = 0;

  dyrecmul_mac dut (.clk(clk), .rst_n(rst_n), .cfg_ce(cfg_ce), .cfg_di(cfg_di), .cfg_do(cfg_do),
                    .x(x), .acc_en(acc_en), .acc_clr(acc_clr), .acc(acc));

  always #5 clk = ~clk;

  function automatic int wrap8(input int v);
    int r = ((v % 256) + 256) % 256;
    return (r >= 128) ? r - 256 : r;
  endfunction

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

  int weights [8] = '{23, -23, 127, -128, 1, 0, 64, -90};

  initial begin
    rst_n = 0; cfg_ce = 0; cfg_di = 0; x = 0; acc_en = 0; acc_clr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(acc == 0, "reset value");
    model = 0;
    foreach (weights[k]) begin
      load(weights[k]);
      chk(int'(acc) == model, "accumulator holds during a reload");
      repeat (300) begin
        int xv, p, nxt;
        @(negedge clk);
        xv = int'($urandom_range(255, 0)) - 128;
        x = int8_t'(xv);
        acc_en  = ($urandom_range(3, 0) != 0);
        acc_clr = ($urandom_range(15, 0) == 0);
        p = ref_mul(xv, weights[k]);
        nxt = model;
        if (acc_en) begin
          nxt = (acc_clr ? 0 : model) + p;
          if (wrap8(nxt) != nxt) n_wrap++;
          nxt = wrap8(nxt);
          n_acc++;
          if (p < 0) n_sub++;
        end else if (acc_clr) nxt = 0;
        if (acc_clr) n_clr++;
        @(posedge clk); #1;
        model = nxt;
        chk(int'(acc) == model, $sformatf("w=%0d x=%0d acc=%0d model=%0d", weights[k], xv, acc, model));
      end
      @(negedge clk);
      acc_en = 0; acc_clr = 0;
    end
    acc_en = 0; acc_clr = 0;
    chk(n_acc > 0 && n_clr > 0 && n_wrap > 0 && n_sub > 0, "all MAC mechanisms exercised");
    $display("mechanisms: accumulate=%0d clear=%0d wrap=%0d subtract=%0d", n_acc, n_clr, n_wrap, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
