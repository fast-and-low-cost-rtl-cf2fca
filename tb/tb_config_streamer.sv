// tb_config_streamer -- serial reconfiguration controller against a model of
// the memory read port (random 160-bit words returned one clock after re).
// For several loads to random lanes it checks the memory address, the 161 bits
// on cfg_bit (sign of w first, then the word from its top bit), that only the
// addressed lane's cfg_ce is high and only during the 161 shift cycles, busy,
// and that done is high in the cycle of the last (161st) shift, 162 clocks
// after the load cycle.
module tb_config_streamer;
  import dyrecmul_pkg::*;

  localparam int unsigned NM = 4;

  logic                clk = 0, rst_n;
  logic                load, busy, done, mem_re, cfg_bit;
  int8_t               w, mem_w;
  logic [1:0]          dest;
  logic [CFG_BITS-1:0] mem_rdata, word;
  logic [NM-1:0]       cfg_ce;
  int                  checks = 0, failures = 0;

  config_streamer #(.NUM_MUL(NM)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w(w), .dest(dest), .busy(busy), .done(done),
    .mem_re(mem_re), .mem_w(mem_w), .mem_rdata(mem_rdata), .cfg_bit(cfg_bit), .cfg_ce(cfg_ce));

  always #5 clk = ~clk;

  // memory model: synchronous read of a word chosen by the test
  always_ff @(posedge clk) if (mem_re) mem_rdata <= word;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    rst_n = 0; load = 0; w = 0; dest = 0; word = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int wv, dv, n, cyc, done_cyc;
      wv = int'($urandom_range(255, 0)) - 128;
      dv = $urandom_range(NM - 1, 0);
      for (int q = 0; q < CFG_BITS; q += 32) word[q +: 32] = $urandom();
      @(negedge clk);
      chk(!busy && cfg_ce == '0, "idle before load");
      load = 1; w = int8_t'(wv); dest = 2'(dv);
      #1 chk(mem_re && mem_w == int8_t'(wv), "memory read request");
      @(posedge clk); cyc = 0; done_cyc = -1;
      #1 load = 0; w = 0; dest = 0;
      n = 0;
      // collect the stream: sample every rising edge while busy
      while (busy) begin
        if (done) done_cyc = cyc + 1;
        @(posedge clk); cyc++;
        #1;
      end
      chk(done_cyc == CHAIN_BITS + 1, $sformatf("done at clock %0d", done_cyc));
      chk(cyc == CHAIN_BITS + 1, $sformatf("busy for %0d clocks", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream monitor: on every edge with a shift enable, compare the bit
  int  mon_n = 0;
  int  mon_dest = 0;
  int8_t mon_w;
  always @(posedge clk) begin
    if (load && !busy) begin mon_n = 0; mon_dest = int'(dest); mon_w = w; end
    if (cfg_ce != '0) begin
      logic exp_bit;
      exp_bit = (mon_n == 0) ? mon_w[7] : word[CFG_BITS - mon_n];
      chk(cfg_ce == NM'(1 << mon_dest), "only the addressed lane enabled");
      chk(cfg_bit == exp_bit, $sformatf("stream bit %0d", mon_n));
      chk(mon_n < CHAIN_BITS, "too many shifts");
      mon_n++;
    end
    if (done) chk(mon_n == CHAIN_BITS, $sformatf("done with the last bit, got %0d", mon_n));
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
