# DyRecMul: an INT8 approximate multiplier whose weight lives in LUT truth tables

A soft multiplier on an FPGA normally spends dozens of LUTs and a few carry
chains on an 8 x 8 product. DyRecMul avoids most of that logic by observing
that in many DSP and neural-network dataflows one operand — the weight `W` —
changes rarely. Instead of feeding `W` into multiplier logic, the product table
"x times W" is written into a handful of reconfigurable lookup tables, and the
other operand `X` is simply used as their address. When `W` changes, the tables
are rewritten over a one-bit serial chain.

A 5-input LUT can only hold a function of five bits, so `X` is first squeezed
into a tiny floating-point number with a 5-bit mantissa. That keeps the
dynamic range of INT8 while making one LUT per result bit sufficient. The
result is approximate: `Z ≈ X·W / 128`, returned as INT8.

This repository gives synthesizable SystemVerilog for the INT8 signed
multiplier, the shared memory that holds the table contents for every weight,
a serial reload controller, a top level with several multipliers sharing that
memory, and the multiply-accumulate variant. Each module also has a
self-checking testbench.

## 1. The arithmetic, step by step

For one multiplier, with `W` already loaded:

| step | operation | width |
|------|-----------|-------|
| encode | sign `s_x = X[7]`; `m = |X|` (clamped to 127); exponent `e = 0` if `m < 32`, `1` if `m < 64`, else `2`; mantissa `M = m >> e` (truncated) | 1 + 2 + 5 bits: float(1,2,5) |
| multiply | `Zm = round(M · |W| / 128)` — read out of the LUTs, not computed | 5 bits |
| decode | `|Z| = Zm << e` | 7 bits |
| sign | `Z = (s_x XOR s_w) ? -|Z| : |Z|` | INT8 |

Example: `X = -77`, `W = 23`. Then `m = 77`, so `e = 2` and `M = 77 >> 2 = 19`.
The LUTs give `Zm = round(19·23/128) = round(3.41) = 3`. Decoding gives
`|Z| = 3 << 2 = 12`. The signs differ, so `Z = -12`. The exact value of
`X·W/128` is `-13.84`.

Two approximations produce the error:

1. The mantissa drops up to two low bits of `|X|` when `|X| ≥ 32`.
2. The mantissa product is rounded to 5 bits.

Over all 65,536 operand pairs, `Z` differs from the correctly rounded
`X·W/128` in 52.1% of cases. The mean absolute difference is 0.77 INT8 units
and the largest is 5. For comparison, the published error probability is
51.6%. The published MAE and MSE are given in units that are not stated, so
they are not compared here.

Why a float(1,2,5) format: a 5-bit mantissa alone would cover only ±31, while
the two exponent bits shift it by up to 2, which covers the full 7-bit
magnitude. That keeps small activations exact: every `|X| < 32` passes through
the encoder unchanged.

## 2. The mantissa multiplier and its configuration word

This is the part most worth understanding before changing anything.

**The LUTs.** `cfglut5` describes the reconfigurable 5-input LUT (the
behaviour of the AMD-Xilinx CFGLUT5 primitive):

- A 32-entry truth table is held in a shift register.
- On a clock edge with `ce` high, `cdi` enters at entry 0, every entry moves up
  by one, and entry 31 leaves on `cdo`.
- The output `o6` is the entry addressed by `i`.

`cfglut_mantissa_mult` puts five of them side by side. All five get the same
5-bit mantissa `M` as address. LUT `b` holds bit `b` of `round(a·|W|/128)` for
every `a = 0..31`. For `a ≤ 31` and `|W| ≤ 128` that value never exceeds 31, so
nothing saturates and no LUT depends on another. The read path is therefore a
single LUT deep.

The rounding matches the published worked example. With `|W| = 23`, the
mantissa `00011` gives `round(69/128) = 1` and `11111` gives
`round(713/128) = 6`.

**The chain.** In each multiplier (`dyrecmul`) the LUTs and one extra flip-flop
form a single 161-bit shift register:

```
cfg_di -> LUT(Zm[4]) -> LUT(Zm[3]) -> LUT(Zm[2]) -> LUT(Zm[1]) -> LUT(Zm[0]) -> sign_w -> cfg_do
```

The extra flip-flop at the end stores the sign of `W`, which is XORed with
`X[7]` to give the product sign. The first bit sent travels farthest, so a load
of weight `w` is sent in this order:

1. the sign of `w`;
2. the 32 table bits of `Zm[0]`, entry 31 first and entry 0 last;
3. the same for `Zm[1]`, `Zm[2]` and `Zm[3]`;
4. the same for `Zm[4]`.

`dyrecmul_pkg::cfg_word(w)` builds the 160 table bits in exactly this order,
most significant bit first. The sign bit is not part of the stored word.

**The memory.** `config_memory` holds `cfg_word` for every weight magnitude
`0..128`. That is 129 words of 160 bits, or 20,640 bits, which fits one 36-Kbit
block RAM. The memory is addressed by the signed weight itself, and `w` and
`-w` share a word. Its contents are computed at elaboration from the formula
above, so no data file is needed. Reads are synchronous, with one clock of
latency.

## 3. Reloading a weight: the top level `dyrecmul_array`

```
           load, w, dest                      busy, done
                |                                  ^
                v                                  |
  +---------------+  re, w   +---------------+     |
  | config_memory |<---------| config_stream |-----+
  | 129 x 160 bit |--------->|   (161-bit    |
  +---------------+  word    |  shift reg.)  |
                             +---------------+
                        cfg_bit |   cfg_ce[0..3]
              +-----------+-----+-----+-----------+
              v           v           v           v
          dyrecmul[0] dyrecmul[1] dyrecmul[2] dyrecmul[3]
           x[0]->z[0]  x[1]->z[1]  x[2]->z[2]  x[3]->z[3]
```

All lanes share one serial stream, `cfg_bit`. Each lane has its own shift
enable, so each lane can hold a different weight. The handshake works as
follows:

- Raise `load` for one clock, with `w` and `dest`, while `busy` is low.
  Asserting `load` while busy breaks the protocol: an assertion catches it, and
  the request is ignored.
- The controller reads the memory on that clock edge (edge 0).
- It copies the word into its 161-bit shift register at edge 1.
- It shifts one bit per clock at edges 2 to 162.
- `done` is high in the cycle that ends with the last shift. From edge 162 on,
  lane `dest` multiplies by the new weight.

A reload therefore takes 163 clocks counted from the cycle that carries `load`.
During those clocks the addressed lane's output is meaningless. The other lanes
keep computing with their own weights. From power-up until their first load,
the lanes hold weight 0.

`X` to `Z` is purely combinational in every lane. Register the operands and
results around the array as the surrounding design requires.

Parameters of `dyrecmul_array`:

| parameter | default | meaning |
|-----------|---------|---------|
| `NUM_MUL` | 4 | number of multipliers sharing the memory and stream |
| `DEST_BW` | 2 | width of `dest` (`$clog2(NUM_MUL)`) |
| `MAC` | 0 | 0: plain multipliers; 1: multiply-accumulate lanes |

## 4. Multiply-accumulate variant

With `MAC = 1`, every lane is a `dyrecmul_mac`. The datapath up to `|Z|` is
unchanged. The final negation is replaced by `mac_addsub`, which adds or
subtracts `|Z|` to or from the running sum according to the product sign. This
is why the variant costs hardly more than the plain multiplier: the negation and
the accumulation share one add/subtract.

Each lane has an 8-bit accumulator with these controls:

- `acc_en[i]` adds the current product on the next clock edge.
- `acc_clr[i]` together with `acc_en[i]` starts a new sum with this product.
- `acc_clr[i]` alone clears the sum.

The accumulator wraps on overflow. Its value appears on `z[i]`. `rst_n` also
clears it.

## 5. Where this RTL departs from, or adds to, the published design

- **Magnitude before the encoder.** The published encoder tables read the raw
  bits of `X`, and their mantissa LUTs have no sign input. For a negative `X`,
  that cannot produce a mantissa of `|X|`, which is what the accompanying
  equations define. The printed exponent table also has overlapping rows for
  negative inputs. Here `|X|` is formed first, and the encoder tables are
  applied to it. This adds a negation (a carry chain) that the published
  seven-LUT encoder does not have.
- **`X = -128`** is treated as `-127`, because 128 does not fit the 7-bit
  magnitude.
- **Truncated mantissa.** The equations call for a rounded mantissa, but the
  published truth tables truncate. The RTL follows the tables.
- **LUT-level structure.** The encoder, decoder and sign stage are written as
  behavioural tables and arithmetic, not as hand-placed LUT3/LUT4/LUT5
  instances. `cfglut5` is a portable model of the vendor primitive. To map onto
  real CFGLUT5 primitives, replace the body of `cfglut5` with an instance of
  the primitive (`i[4:0]` to `I4..I0`, same `CDI`/`CDO`/`CE`/`CLK`); the shift
  direction modelled here is the one the primitive documents.
- **This design's own choices.** The published design leaves open:
  - the reload controller, its handshake and its timing;
  - the number of lanes;
  - the fixed contents and read timing of the memory;
  - the chain order, including the sign of `W` sent first;
  - the scale `2^-7` of the result, which follows from the 7-bit decoder and
    the worked example;
  - the accumulator width and its wrap-around.
- **Not built:** the unsigned variant. It uses a float(0,2,5) format and
  adjusted encoder and decoder, whose tables are not given. It also drops the
  two's complement stage.

## 6. Files

| file | contents |
|------|----------|
| `rtl/dyrecmul_pkg.sv` | widths, `float125_t`, `lut_init` and `cfg_word` |
| `rtl/int2float_encoder.sv` | INT8 to float(1,2,5) |
| `rtl/cfglut5.sv` | reconfigurable 5-input LUT |
| `rtl/cfglut_mantissa_mult.sv` | five-LUT mantissa multiplier and chain |
| `rtl/float2int_decoder.sv` | `Zm << e` |
| `rtl/twos_complement.sv` | signed result |
| `rtl/dyrecmul.sv` | one complete multiplier |
| `rtl/mac_addsub.sv`, `rtl/dyrecmul_mac.sv` | multiply-accumulate lane |
| `rtl/config_memory.sv` | table contents of all weights |
| `rtl/config_streamer.sv` | serial reload controller |
| `rtl/dyrecmul_array.sv` | top level |
| `tb/dyrecmul_ref_pkg.sv` | arithmetic reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_dyrecmul_array_mac` |

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each
testbench also has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dyrecmul_pkg.sv tb/dyrecmul_ref_pkg.sv tb/tb_dyrecmul_array.sv \
    --top-module tb_dyrecmul_array
./obj_dir/Vtb_dyrecmul_array
```

Replace `tb_dyrecmul_array` with any other testbench name. What the testbenches
cover:

- `tb_dyrecmul_array` runs the top at its default size. It loads all 256
  weights in turn through the handshake and checks every `X` for each one. It
  also checks the reload latency and the lanes that keep working during a
  reload, and it counts each mechanism.
- `tb_dyrecmul` checks all 65,536 operand pairs of one multiplier and prints
  the error analysis quoted in section 1.
- `tb_cfglut_mantissa_mult` checks the rows of the published `|W| = 23` example.
- `tb_dyrecmul_array_mac` runs dot products on the MAC configuration.

All testbenches finish in a few seconds.

To change the design:

- To change the scale or the rounding of the product, change `lut_init` in
  `dyrecmul_pkg`. The memory contents follow automatically. The reference model
  in `tb/dyrecmul_ref_pkg.sv` is written independently and must be changed with
  it.
- To change the lane count, change `NUM_MUL` on `dyrecmul_array`.
