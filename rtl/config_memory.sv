// config_memory -- shared memory of CFGLUT configuration words.
//
// Holds, for every weight magnitude 0..128, the CFG_BITS = 160 truth-table bits
// that make the five mantissa LUTs multiply by that magnitude (contents given
// by dyrecmul_pkg::cfg_word, i.e. entry a of the LUT of product bit b is bit b
// of round(a * |W| / 128)). The memory is addressed by the signed 8-bit weight
// itself: w and -w share one word, so 129 words of 160 bits (20,640 bits) are
// enough, which fits one 36-Kbit block RAM as the published design states.
// One read port, synchronous: rdata holds the word of the w presented with
// re = 1 from the next clock edge on and keeps it until the next read.
//
// The memory being shared among multipliers, its 8-bit weight input and its
// 160-bit word are from the published block diagram; its read timing and the
// contents being fixed at start-up (a ROM in practice) are this design's
// choices. The contents are computed here at elaboration instead of being read
// from a file.
module config_memory
  import dyrecmul_pkg::*;
#(
  parameter int unsigned DEPTH = (1 << (N - 1)) + 1   // |w| = 0 .. 128
) (
  input  logic                clk,
  input  logic                re,
  input  int8_t               w,
  output logic [CFG_BITS-1:0] rdata
);

  logic [CFG_BITS-1:0] mem [DEPTH];
  logic [N-1:0]        addr;

  initial begin
    for (int a = 0; a < DEPTH; a++)
      mem[a] = cfg_word(int8_t'(a));   // the magnitude is all that counts
  end

  assign addr = w[N-1] ? N'(-w) : N'(w);

  always_ff @(posedge clk)
    if (re) rdata <= mem[addr];

endmodule
