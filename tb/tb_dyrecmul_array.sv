// tb_dyrecmul_array -- end-to-end test of the top level at its default size
// (four lanes, full 129-word configuration memory, 161-bit chains).
//
// Every one of the 256 INT8 weights is loaded, in turn, into lane (w mod 4)
// through the load / busy / done handshake, so the whole configuration memory
// is read and every lane is reconfigured many times. After each load all 256
// values of x are applied to the reloaded lane and z is compared with the
// arithmetic reference model; during each load the other lanes are fed random
// x every clock and must keep giving the products of their own weights. The
// reload latency is checked: done in the 162nd clock after the load cycle and
// the new weight in effect from the edge that ends it. Mechanisms counted, each
// of which must occur: reconfigurations, lanes computing during another lane's
// reload, negative weights, negative products, x = -128 (clamped magnitude),
// and a load request made while busy being held off by the host.
module tb_dyrecmul_array;
  import dyrecmul_pkg::*;
  import dyrecmul_ref_pkg::*;

  localparam int unsigned NM = 4;   // the top's default lane count

  logic       clk = 0, rst_n;
  logic       load, busy, done;
  int8_t      w;
  logic [1:0] dest;
  int8_t      x [NM];
  int8_t      z [NM];
  logic       acc_en [NM], acc_clr [NM];   // unused by the plain multiplier
  int         lane_w [NM];
  int         checks = 0, failures = 0;
  int         n_reconfig = 0, n_busy_compute = 0, n_neg_w = 0, n_neg_z = 0;
  int         n_clamp = 0, n_held_off = 0;

  dyrecmul_array dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w(w), .dest(dest),
    .busy(busy), .done(done), .x(x), .acc_en(acc_en), .acc_clr(acc_clr), .z(z));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic reload(input int wv, input int lane);
    int cyc, done_cyc;
    @(negedge clk);
    if (busy) n_held_off++;
    while (busy) @(negedge clk);
    load = 1; w = int8_t'(wv); dest = 2'(lane);
    @(posedge clk);
    #1 load = 0;
    cyc = 0; done_cyc = -1;
    while (busy) begin
      // the other lanes keep working on their own weights
      @(negedge clk);
      if (done) done_cyc = cyc + 1;
      for (int l = 0; l < NM; l++) if (l != lane) begin
        int xv = int'($urandom_range(255, 0)) - 128;
        x[l] = int8_t'(xv); #1;
        chk(int'(z[l]) == ref_mul(xv, lane_w[l]), $sformatf("lane %0d during reload", l));
        n_busy_compute++;
      end
      @(posedge clk); cyc++;
      #1;
    end
    chk(done_cyc == CHAIN_BITS + 1, $sformatf("done in clock %0d after load", done_cyc));
    chk(cyc == CHAIN_BITS + 1, $sformatf("busy for %0d clocks", cyc));
    lane_w[lane] = wv;
    n_reconfig++;
    if (wv < 0) n_neg_w++;
  endtask

  task automatic sweep(input int lane);
    for (int v = -128; v < 128; v++) begin
      x[lane] = int8_t'(v); #1;
      chk(int'(z[lane]) == ref_mul(v, lane_w[lane]),
          $sformatf("lane %0d x=%0d w=%0d got %0d exp %0d", lane, v, lane_w[lane], z[lane], ref_mul(v, lane_w[lane])));
      if (z[lane] < 0) n_neg_z++;
      if (v == -128 && lane_w[lane] != 0) n_clamp++;
    end
  endtask

  initial begin
    rst_n = 0; load = 0; w = 0; dest = 0;
    foreach (x[l]) begin x[l] = 0; acc_en[l] = 0; acc_clr[l] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // give every lane a defined weight first
    for (int l = 0; l < NM; l++) reload(0, l);
    for (int wv = -128; wv < 128; wv++) begin
      int lane = (wv + 128) % NM;
      reload(wv, lane);
      sweep(lane);
    end
    // a host that asks while a load is running waits for busy to drop
    @(negedge clk);
    load = 1; w = 8'sd77; dest = 2'd1;
    @(posedge clk); #1 load = 0;
    reload(-77, 1);          // requested while busy: held off until idle
    sweep(1);
    chk(n_reconfig > NM,     "reconfigurations happened");
    chk(n_busy_compute > 0,  "lanes computed during a reload");
    chk(n_neg_w > 0,         "negative weights loaded");
    chk(n_neg_z > 0,         "negative products seen");
    chk(n_clamp > 0,         "x = -128 applied");
    chk(n_held_off > 0,      "load held off while busy");
    $display("mechanisms: reconfig=%0d compute_during_reload=%0d neg_w=%0d neg_z=%0d x_clamp=%0d held_off=%0d",
             n_reconfig, n_busy_compute, n_neg_w, n_neg_z, n_clamp, n_held_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
