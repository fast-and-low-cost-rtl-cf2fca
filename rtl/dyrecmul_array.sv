// dyrecmul_array -- top level: NUM_MUL DyRecMul multipliers sharing one
// configuration memory and one serial configuration stream.
//
// Each lane i computes z[i] ~= x[i] * W_i / 128 in INT8, where W_i is the
// weight last loaded into lane i. The x to z path of every lane is
// combinational (encoder, five-LUT mantissa multiplier, decoder, two's
// complement). To change a lane's weight, pulse load with the new weight w and
// the lane number dest while busy is low; the streamer reads the 160-bit word
// of w from the shared memory and shifts it, with the sign of w, into that
// lane's chain. done pulses in the cycle of the last shift; from the next edge
// on the lane multiplies by the new weight, 163 clocks after the load cycle.
// The other lanes keep computing with their own weights during a reload. From
// power-up until their first load all lanes hold weight 0; rst_n resets only
// the reload controller (and the accumulators when MAC = 1), not the tables.
//
// With MAC = 1 every lane is the multiply-accumulate variant instead
// (dyrecmul_mac): z[i] is then lane i's registered INT8 accumulator, which adds
// the signed product on each clock with acc_en[i] high and restarts from zero
// with acc_clr[i]. With MAC = 0 (the default, the plain signed multiplier)
// acc_en and acc_clr are not used.
//
// Sharing the memory and the stream among several multipliers follows the
// published block diagram; the number of lanes (4), the load handshake and the
// accumulator controls are this design's choices.
module dyrecmul_array
  import dyrecmul_pkg::*;
#(
  parameter int unsigned NUM_MUL = 4,
  parameter int unsigned DEST_BW = (NUM_MUL > 1) ? $clog2(NUM_MUL) : 1,
  parameter bit          MAC     = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight (re)configuration
  input  logic               load,
  input  int8_t              w,
  input  logic [DEST_BW-1:0] dest,
  output logic               busy,
  output logic               done,
  // operands and products
  input  int8_t              x [NUM_MUL],
  input  logic               acc_en [NUM_MUL],   // MAC = 1 only
  input  logic               acc_clr [NUM_MUL],  // MAC = 1 only
  output int8_t              z [NUM_MUL]
);

  logic                mem_re;
  int8_t               mem_w;
  logic [CFG_BITS-1:0] mem_rdata;
  logic                cfg_bit;
  logic [NUM_MUL-1:0]  cfg_ce;

  config_memory u_mem (
    .clk   (clk),
    .re    (mem_re),
    .w     (mem_w),
    .rdata (mem_rdata)
  );

  config_streamer #(.NUM_MUL(NUM_MUL), .DEST_BW(DEST_BW)) u_stream (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (load),
    .w         (w),
    .dest      (dest),
    .busy      (busy),
    .done      (done),
    .mem_re    (mem_re),
    .mem_w     (mem_w),
    .mem_rdata (mem_rdata),
    .cfg_bit   (cfg_bit),
    .cfg_ce    (cfg_ce)
  );

  for (genvar i = 0; i < NUM_MUL; i++) begin : g_mul
    logic unused_cdo;
    if (MAC) begin : g_mac
      dyrecmul_mac u_mac (
        .clk     (clk),
        .rst_n   (rst_n),
        .cfg_ce  (cfg_ce[i]),
        .cfg_di  (cfg_bit),
        .cfg_do  (unused_cdo),
        .x       (x[i]),
        .acc_en  (acc_en[i]),
        .acc_clr (acc_clr[i]),
        .acc     (z[i])
      );
    end else begin : g_plain
      dyrecmul u_mul (
        .clk    (clk),
        .cfg_ce (cfg_ce[i]),
        .cfg_di (cfg_bit),
        .cfg_do (unused_cdo),
        .x      (x[i]),
        .z      (z[i])
      );
    end
  end

endmodule
