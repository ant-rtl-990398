# ANT accelerator: adaptive 4-bit data types on an output-stationary systolic array

This design is a synthesizable SystemVerilog accelerator for low-bit DNN
inference with the ANT ("adaptive numerical data type") scheme. Every tensor
is stored as 4-bit codes. Each tensor has its own type:

- `int`: a 4-bit integer, signed or unsigned.
- `PoT`: a power of two.
- `flint`: a first-one-encoded hybrid of float and int. It is precise near the
  middle of its range and still covers large values.

Layers that need more precision run as 8-bit `int`. A 64 x 64 array of
int-based *TypeFusion* PEs multiplies any pair of these types. The types are
decoded only at the array boundary, by 128 decoders: 64 on the left for
weights and 64 on top for inputs. Inside the array, every operand is a pair
<base integer, exponent> and every product is `(a_base * b_base) << (a_exp + b_exp)`.
The product goes into a 16-bit accumulator.

The top level `ant_top` contains:

- The 64 x 64 PE array, with its 128 boundary decoders and the extra
  neighbour wires used by the 8-bit mode.
- Three on-chip buffers, 512 KB in total:
  - input buffer, 4096 rows x 64 codes (128 KB);
  - weight buffer, 4096 rows x 64 codes (128 KB);
  - output buffer, 2048 rows x 64 x 16 bit (256 KB).
- A skew network for each operand edge.
- A command controller.
- A per-output-channel scale table.
- 64 requantization lanes. They turn drained 16-bit results back into 4-bit
  ANT or 8-bit int codes, which are written to the input buffer as the next
  layer's input.

| File | Block |
|---|---|
| `rtl/ant_pkg.sv` | shared types: data-type config, decoded operand, scale, command |
| `rtl/ant_lzd.sv` | leading-zero detector |
| `rtl/ant_decoder.sv` | int / PoT / flint / int8-nibble decoder to <base, exponent> |
| `rtl/ant_pe.sv` | TypeFusion PE: 5x5-bit multiply, exponent add, shift, 16-bit accumulate |
| `rtl/ant_mp_adder.sv` | adder tree that fuses four 4-bit partial products into one int8 product |
| `rtl/ant_systolic_array.sv` | N x N array, boundary decoders, 8-bit bypass wiring, drain chain |
| `rtl/ant_skew.sv` | per-lane delay lines that skew codes into the array |
| `rtl/ant_buffer.sv` | one-write/one-read SRAM model with registered read |
| `rtl/ant_quantizer.sv` | requantizer: scale, round, encode to int4/PoT/flint/int8 |
| `rtl/ant_controller.sv` | PRELOAD / COMPUTE / DRAIN sequencer for one tile command |
| `rtl/ant_top.sv` | the accelerator |

## The data types and the decoder

The decoder (`ant_decoder`) is the core of the design. It maps a 4-bit code
to a signed 5-bit base and a 4-bit exponent. The value of the code is
`base << exp`.

- **int**: base = the code, sign-extended when signed; exp = 0.
- **PoT**: base 1 and exponent = the code, so an unsigned code c is 2^c. A
  signed code is a sign bit and a 3-bit exponent, with base ±1. A code whose
  exponent bits are all zero means zero, because a tensor needs a zero.
- **flint, unsigned**, for the code `b3 b2 b1 b0`: follows the paper's
  equations and Table 4.
  - When b3 = 0, the code is a plain integer: base = `b2b1b0` and
    exponent = 0.
  - When b3 = 1, a leading-zero detector counts the zeros in `b2b1b0`. The
    exponent is twice that count. The base is `b2b1b0` shifted left by one.
  - Code `1000` is the special case: base 1, exponent 6, value 64.
  - Values for codes 0 to 15: 0, 1, 2, 3, 4, 5, 6, 7, 64, 32, 16, 24, 8, 10, 12, 14.
- **flint, signed**: b3 is the sign. The same rule is applied to the 3-bit
  magnitude, with the LZD over `b1b0`. The base is then put in two's
  complement.
  - Magnitudes for codes 0 to 7: 0, 1, 2, 3, 16, 8, 4, 6.
- **int8 nibble** (8-bit mode): the high nibble of an int8 is decoded as a
  signed value with exponent 4. The low nibble is decoded as unsigned with
  exponent 0. An int8 `x` is then `hi*16 + lo`, and each nibble fits in the
  same 5-bit base.

The LZD is a generic module. The decoder uses two small instances of it, on
`code[2:0]` and `code[1:0]`, one for each flint variant. As a result, one
5-bit x 5-bit signed multiplier covers every type, and a 4-bit exponent
adder feeds the shifter. The shifted product is truncated to 16 bits. This is the width
the paper gives for the flint MAC result.

## TypeFusion PE

`ant_pe` registers both operands and passes them on to its right and lower
neighbours. It computes:

```
i_c = i_a * i_b
e_c = e_a + e_b
i_d = i_c << e_c
acc = acc + i_d    (16-bit, wrapping)
```

These four steps are the paper's equations. In addition, the PE has:

- an external-addend input, used in 8-bit mode;
- a shift mode, in which the accumulator loads from the PE above. The
  accumulators thus form one shift chain per column, used both to preload
  partial sums and to drain results. Shift mode has priority over
  accumulation.

A single cycle does the multiply, shift and accumulate. The paper does not
give a pipeline depth.

## Mixed precision: the 8-bit mode

This is the hardest part of the design. In 8-bit mode, each 2 x 2 group of
4-bit PEs acts as one int8 x int8 MAC. The array then behaves as a 32 x 32
int8 array.

- Weight int8 element j sits in lanes 2j (high nibble) and 2j+1 (low
  nibble). The same holds for the input.
- In a group, the even row and column see the high nibble and the odd row
  and column see the low nibble. The four PEs therefore form the products
  hi·hi·2^8, hi·lo·2^4, lo·hi·2^4 and lo·lo.
- `ant_mp_adder` adds those four partial products in a two-level tree.
- Only the leader PE of the group (even row, even column) accumulates the
  sum. The other three PEs do not accumulate.

The registers inside a group would otherwise put the second nibble one cycle
behind the first. In 8-bit mode, the odd row and odd column take their
operand from the same source as the group leader (`w_reg[r][c-2]` or the
decoder output), not from their direct neighbour. Both halves of a group
therefore see the same int8 element in the same cycle. Operands now move two
PEs per cycle, so the edge skew in 8-bit mode is `lane/2` cycles, not
`lane`.

The switch is a per-command mode bit. There are no extra buffers and no
extra PE types. This follows the paper's claim that the mixed-precision array
needs no new PE components.

In 8-bit mode the results are at the leaders. After the drain, result (i,j)
is in output-buffer row 2i, lane 2j.

## Systolic array and skew

`ant_systolic_array` generates:

- N weight decoders along the left edge and N input decoders along the top;
- the N x N PE grid;
- the 8-bit bypass multiplexers;
- an adder tree at each group leader;
- the vertical accumulator chain.

Weights enter from the left and inputs from the top, as in the paper's
output-stationary dataflow. PE (r,c) accumulates `sum_k W[r][k] * X[k][c]`.

`ant_skew` delays lane i by i cycles, or by i/2 in 8-bit mode. It acts on the
4-bit codes in front of the decoders, which keeps the delay lines 4 bits
wide. The paper shows the decoders next to the buffers. Placing the skew
before them is this design's choice and does not change the results.

## Controller and tile command

`ant_controller` takes a tile command. The command gives:

- `k_len`;
- the base rows in the input, weight, output and requantized-output buffers;
- a preload flag;
- a requantize flag;
- the 8-bit mode;
- the three type configurations: weight, input and requantized output.

The command then runs through these phases:

1. **PRELOAD** (N+1 cycles, optional): reads N rows of earlier 16-bit partial
   sums from the output buffer and shifts them into the accumulator chain. This
   is how a reduction longer than one buffer (K > 4096) is split across
   commands.
2. **COMPUTE** (`k_len` + skew + 1 cycles): streams one input-buffer row and
   one weight-buffer row per cycle into the skew lines. The skew is 2(N-1)
   in 4-bit mode and N-2 in 8-bit mode. Lanes outside the valid window are
   fed zero codes, so the array does not need to be cleared.
3. **DRAIN** (N cycles): shifts the accumulators down, bottom row first. Each
   row is written to the output buffer. When requantization is on, the row
   is also requantized and written to the input buffer at `qbuf_base + row`,
   or `+ row/2` for the even rows in 8-bit mode.
4. **DONE** (1 cycle).

`busy` is high from start to done. While it is high, the external buffer
ports are ignored, and an assertion flags any attempt to use them.

## Requantization

`ant_quantizer` carries out Algorithm 1 of the paper on the drained
accumulators.

It first computes the scaled value `y = round(|x| * mult / 2^shift)`, with
ties rounded up. `mult` and `shift` come from the 64-entry scale table,
indexed by output channel. The encoding then depends on the target type:

- **int4 / int8**: clamp to the type's range.
- **PoT**: the nearest power of two, with ties rounded up, and zero for
  y = 0.
- **flint**: take the interval `floor(log2 y) + 1` and the first-one exponent
  code of that interval. Round the mantissa bits that remain. If the mantissa
  rounds up past the interval, carry into the next interval. At the top of
  the range, clamp to the largest code.

For every input, the result is the nearest representable value. The unit
test checks this against an exhaustive nearest-value search.

Choosing the type of each tensor (Algorithm 1's MSE search over types) is
done offline. It is not done by this design. The hardware only needs the
chosen `ant_cfg_t` for each tensor.

## Buffers

`ant_buffer` models an SRAM macro. It has one write port and one read port.
Reads are registered with one cycle of latency, and the data holds until the
next read. The paper gives the total of 512 KB. The split between the three
buffers is this design's choice:

- input and weight buffers: 4096 x 256 bit each, 64 four-bit codes per row;
- output buffer: 2048 x 1024 bit, 64 sixteen-bit results per row.

## Verification

Each block has a self-checking testbench in `tb/`:

| Testbench | What it checks |
|---|---|
| `tb_ant_decoder` | every code and type exhaustively |
| `tb_ant_pe` | random operands |
| `tb_ant_mp_adder` | random int8 products |
| `tb_ant_quantizer` | results against a nearest-value search |
| `tb_ant_systolic_array` | random matrices against a reference model |
| `tb_ant_buffer` | random writes and reads |
| `tb_ant_controller` | random commands against an expected phase schedule |

`tb_ant_top` runs random tile commands through a small array (N = 8) and
checks the output buffer and the requantized input buffer against a
behavioural model. The commands mix 4-bit and 8-bit modes, preload chains and
requantization. The test counts each mechanism and fails if any of them never
happened. These mechanisms are:

- 4-bit operations;
- 8-bit operations;
- mode switches;
- preloads;
- requantized writes;
- chained K splits;
- every weight/input type pair.

`tb_ant_top_full` runs the same kind of check on the full-size 64 x 64 top
with its paper-sized buffers.

Each block was also checked against a deliberately broken copy, for example a
wrong flint exponent, a missing interval carry, or a swapped nibble. The
testbench of each block detected its broken copy.

## Simulating and changing the design

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>`, and it passes when `failures` is 0. With
plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/ant_pkg.sv rtl/ant_*.sv \
          tb/tb_ant_top.sv --top-module tb_ant_top
./obj_dir/Vtb_ant_top
```

To run a block's own test, replace `tb_ant_top` with that test's name.

- Put `ant_pkg.sv` first, and list it only once; the glob above repeats it,
  and Verilator accepts the duplicate with a warning.
- The full-size test, `tb_ant_top_full`, takes about 12 minutes to compile
  on one thread, because 4096 PEs unroll into a large C++ model. Once built,
  it runs in under a second.

The sizes are parameters of `ant_top`:

- `N`, the array side. It must be even.
- `IBUF_DEPTH`, `WBUF_DEPTH` and `OBUF_DEPTH`, the buffer depths.

The lane counts of the buffers follow `N`. The code width (4 bits), the base
and exponent widths, and the accumulator width are constants in `ant_pkg`.

## Limits and differences from the paper

- **Off-chip memory and the activation unit are outside this design.** The
  paper's evaluation includes DRAM and an activation unit, but the paper does
  not describe the activation unit's internals. Here, requantization is a
  separate stage on the drain path, not an extension of the activation unit.
- **Alternatives are not built.** The design does not include the
  float-based PE and decoder, the weight-stationary variant, or the tensor
  core integration. The paper compares against these but selects the
  int-based output-stationary design.
- **The 16-bit accumulator wraps.** This follows the paper's 16-bit
  accumulator. Long reductions of two large PoT operands, such as
  64 x 64 x K, can overflow. The model in the testbench wraps the same way.
- **Only two precisions exist.** The 6-bit ANT study and the weight-only
  3-bit study in the paper are accuracy experiments. This hardware cannot run
  them, because it supports only 4-bit ANT and 8-bit int.
