// config_streamer -- serial reconfiguration controller.
//
// When load is pulsed (and the streamer is idle) it looks up the configuration
// word of weight w in config_memory, then shifts CHAIN_BITS = 161 bits onto the
// one-bit configuration stream cfg_bit, one per clock: first the sign bit of
// w, then the 160-bit word from its most significant bit. The stream is shared
// by all multipliers; only multiplier dest sees its shift enable cfg_ce[dest]
// high, so each multiplier can hold a different weight.
//
// Timing: load sampled at edge 0; the memory word arrives at edge 1 and is
// copied into the shift register; the bits are shifted into the chain at edges
// 2 .. 162. busy is high from edge 0 until done, a one-cycle pulse in the cycle
// before edge 162 (the last shift). The multiplier's new product is valid from
// edge 162 on: a reload costs CHAIN_BITS + 2 = 163 clocks from the cycle that
// carries load. A load while busy is a protocol error (asserted) and ignored.
//
// The serial, one-bit stream shared by several multipliers and its 160 bits per
// weight follow the published design; the controller itself (handshake, sign
// bit sent first, per-multiplier enables) is this design's own.
module config_streamer
  import dyrecmul_pkg::*;
#(
  parameter int unsigned NUM_MUL = 4,
  parameter int unsigned DEST_BW = (NUM_MUL > 1) ? $clog2(NUM_MUL) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                load,
  input  int8_t               w,
  input  logic [DEST_BW-1:0]  dest,
  output logic                busy,
  output logic                done,
  // configuration memory read port
  output logic                mem_re,
  output int8_t               mem_w,
  input  logic [CFG_BITS-1:0] mem_rdata,
  // serial configuration stream
  output logic                cfg_bit,
  output logic [NUM_MUL-1:0]  cfg_ce
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_SHIFT} state_t;

  localparam int unsigned CNT_BW = $clog2(CHAIN_BITS + 1);

  state_t                state_q;
  logic [CHAIN_BITS-1:0] sr_q;
  logic [CNT_BW-1:0]     cnt_q;
  logic                  sign_q;
  logic [DEST_BW-1:0]    dest_q;

  assign mem_re = (state_q == S_IDLE) && load;
  assign mem_w  = w;
  assign busy   = (state_q != S_IDLE);
  assign done   = (state_q == S_SHIFT) && (cnt_q == CNT_BW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      sr_q    <= '0;
      cnt_q   <= '0;
      sign_q  <= 1'b0;
      dest_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (load) begin
          sign_q  <= w[N-1];
          dest_q  <= dest;
          state_q <= S_READ;
        end
        S_READ: begin
          sr_q    <= {sign_q, mem_rdata};
          cnt_q   <= CNT_BW'(CHAIN_BITS);
          state_q <= S_SHIFT;
        end
        S_SHIFT: begin
          sr_q  <= {sr_q[CHAIN_BITS-2:0], 1'b0};
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == CNT_BW'(1)) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign cfg_bit = sr_q[CHAIN_BITS-1];

  always_comb begin
    cfg_ce = '0;
    if (state_q == S_SHIFT && 32'(dest_q) < NUM_MUL) cfg_ce[dest_q] = 1'b1;
  end

  // handshake rule: a new load may only be issued while idle
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy)
    else $error("config_streamer: load issued while busy");

endmodule
