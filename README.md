# Nibble-based vector-scalar multipliers in SystemVerilog

Low-precision accelerators spend most of their arithmetic on one operation:
many 8-bit elements multiplied by the same 8-bit value (a weight or an
activation broadcast across vector lanes). This RTL builds two ways of doing
that, and both avoid a conventional multiplier array.

* **The precompute-reuse nibble multiplier** is the main engine, built for
  low area and low power. The broadcast scalar `B` is split into two 4-bit
  nibbles. Each nibble selects one of sixteen fixed shift-and-add circuits,
  which scales the element `A` by that nibble. The two scaled values are
  aligned (the high one shifted left by 4) and accumulated. One small
  datapath is reused for every element. Each element takes two cycles, so a
  vector of N elements takes 2N cycles.
* **The LUT-based array multiplier** is the throughput engine. Each nibble of
  `B` selects a 120-bit constant "hex string" that holds the products
  `B*1 ... B*15` as bytes. Each nibble of `A` then picks one byte of a string,
  which is a 4x4-bit product. The byte-products are shifted into place and
  added. The whole vector is done combinationally, in one cycle, by
  replicated lookup multipliers.

Both engines compute the same thing: `result[i] = opa[i] * opb`, giving 16-bit
unsigned products of 8-bit unsigned operands. The top module
`vector_mult_top` puts the two side by side behind one set of operand inputs.
That packaging is a convenience of this RTL. Each engine can be used on its
own.

## The arithmetic identity behind both engines

Write the scalar as `B = 16*B1 + B0` and an element as `A = 16*A1 + A0`,
where all four are nibbles. Then:

    A*B = A*B0 + (A*B1 << 4)                                   (nibble engine)
        = A0*B0 + (A0*B1 << 4) + (A1*B0 << 4) + (A1*B1 << 8)    (LUT engine)

The nibble engine never splits `A`. It only needs `A*n` for a 4-bit `n`, and
builds it from the shifted copies `A, A<<1, A<<2, A<<3`:

| nibble | scaled value                  | nibble | scaled value                        |
|--------|-------------------------------|--------|-------------------------------------|
| 0000   | 0                             | 1000   | A<<3                                |
| 0001   | A                             | 1001   | A<<3 + A                            |
| 0010   | A<<1                          | 1010   | A<<3 + A<<1                         |
| 0011   | A<<1 + A                      | 1011   | A<<3 + A<<1 + A                     |
| 0100   | A<<2                          | 1100   | A<<3 + A<<2                         |
| 0101   | A<<2 + A                      | 1101   | A<<3 + A<<2 + A                     |
| 0110   | A<<2 + A<<1                   | 1110   | A<<3 + A<<2 + A<<1                  |
| 0111   | A<<2 + A<<1 + A               | 1111   | A<<3 + A<<2 + A<<1 + A              |

All values are 12 bits wide, since `255 * 15 = 3825 < 4096`. This is
`precompute_logic`.

The LUT engine splits both operands. It stores nothing per element, only
the table of strings. String `s` holds `s*k` in byte `k-1` (bits
`[8k-1:8k-8]`) for `k = 1..15`, and string 0 is all zeros. For example:

    string 1 = 120'h0F0E0D0C0B0A090807060504030201
    string 9 = 120'h877E756C635A51483F362D241B1209
    string F = 120'hE1D2C3B4A5968778695A4B3C2D1E0F

The nibble product `a*s` is then "byte `a-1` of string `s`", or 0 when `a` is
0. `hex_string_lut` holds the sixteen constants written out. They equal the
formula above, and its testbench checks every byte against the formula.

## Nibble engine: how a vector moves through it

```
             +----------------------------------------------------+
 start ----->| nibble_controller   elements 0..N-1 (outer loop)   |--> busy, done
             |                     nibbles  0, 1   (inner loop)   |
             +------+--------------------+------------------------+
                    | issue, elem_idx    | nib_idx
   opa (N x 8) -> [operand regs] -> element mux
   opb (8) ----> [scalar reg] ----------+
                                        v
        nibble_element_datapath:
          [A reg] ---------------------------+
          B -> nibble mux -> [nibble reg] ---+-> precompute_logic (12 b)
                                                 -> shift: << 0 or << 4
                                                 -> adder (+ accumulator) -> product (16 b)
                                        |
                      [result regs, N x 16]  <- written when the 2nd nibble finishes
```

`nibble_vector_multiplier` wraps these parts. The pipeline has one register
stage:

* **Issue.** In the cycle a step is issued, the element, the selected nibble
  and the nibble's position are registered.
* **Compute.** In the next cycle the precompute logic scales the element, the
  shift logic aligns the result, and the adder adds it to the accumulator.
  For nibble 0 the adder adds to zero instead, which starts a new element.
  That cycle's sum is written into the element's result slot at the same edge
  as the accumulator.

One step is issued every cycle, so issue and compute overlap. Element `i`
finishes `2(i+1)` clock edges after the edge that sampled `start`. The whole
vector takes `2N`: 8, 16 and 32 cycles for 4, 8 and 16 elements.

### Handshake and timing (sequential mode, default)

| signal   | behaviour |
|----------|-----------|
| `start`  | Sampled while idle. `opa` and `opb` are registered in that cycle and may change afterwards. Step 0 (element 0, nibble 0) is issued in that same cycle. A `start` while `busy` is ignored. |
| `busy`   | High from the edge after `start` until the last product is written. |
| `result` | Product `i` sits in bits `[16i+15:16i]`. The slots fill one by one, every two cycles, starting with element 0 (the least significant byte of `opa`). A slot keeps its old value until it is rewritten. Reset clears all slots. |
| `done`   | A one-cycle pulse, `2N` edges after the edge that sampled `start`. It comes in the same cycle that the last product becomes visible. A new `start` is accepted in that cycle, so operations can run back to back with no gap. |

Example with four elements. The vector `opa = 32'h2111ff40` times
`opb = 8'h80` fills `result` as follows:
`...2000` after 2 edges, then `...7f802000`, then `...08807f802000`, and
`108008807f802000` after 8 edges, when `done` pulses.

### Unrolled mode

Set `UNROLLED = 1` on `nibble_vector_multiplier` or `vector_mult_top`. The
datapath then registers the whole scalar and uses two copies of the
precompute logic, adding `PL(A,B0) + (PL(A,B1) << 4)` in a single cycle.
One element finishes per cycle, and a vector takes N cycles. The interface
is the same.

## LUT engine: lookup multipliers

One `lookup_multiplier` (LM) handles a 16-bit slice of the vector, which is
two elements. It has its own two string selectors (`B[3:0]` and `B[7:4]`)
and eight 16-way byte multiplexers, one per nibble of A and per string. Its
two adders each form `P0 + (P2<<4) + (P1<<4) + (P3<<8)`:

| product       | element nibble | string           |
|---------------|----------------|------------------|
| `P0_1`, `P2_1` | `A[3:0]`       | string0, string1 |
| `P1_1`, `P3_1` | `A[7:4]`       | string0, string1 |
| `P0_2`, `P2_2` | `A[11:8]`      | string0, string1 |
| `P1_2`, `P3_2` | `A[15:12]`     | string0, string1 |

`out1 = A[7:0]*B` and `out2 = A[15:8]*B`. `lut_array_multiplier`
replicates `N/2` LMs. LM `k` takes `opa[16k+15:16k]` and writes
`result[32k+31:32k]`. This gives 2, 4 and 8 LMs for 4, 8 and 16 elements,
with 32/64/128-bit `opa` and 64/128/256-bit `result`. The engine has no
clock: its result follows `opa` and `opb` combinationally. The cost moves
into constant selection logic. After synthesis the strings show up as small
ROMs, and the byte multiplexers dominate.

## Files

| file | contents |
|------|----------|
| `rtl/nibble_mult_pkg.sv` | widths (8/4/12/16/120 bits), operand types, reference product function |
| `rtl/precompute_logic.sv` | the sixteen shift-and-add configurations |
| `rtl/nibble_element_datapath.sv` | operand and nibble registers, nibble mux, precompute, shift, accumulator; sequential or unrolled |
| `rtl/nibble_controller.sv` | element/nibble step sequencer, `start`/`busy`/`done` |
| `rtl/nibble_vector_multiplier.sv` | the nibble engine: operand registers, controller, datapath, result registers |
| `rtl/hex_string_lut.sv` | the sixteen 120-bit hex strings |
| `rtl/lookup_multiplier.sv` | one LM, two elements |
| `rtl/lut_array_multiplier.sv` | `N/2` replicated LMs |
| `rtl/vector_mult_top.sv` | both engines on shared operand inputs |

Parameters, with their defaults:

| parameter  | default | where | meaning |
|------------|---------|-------|---------|
| `N_OPS`    | 16 | `vector_mult_top`, `nibble_vector_multiplier`, `lut_array_multiplier`, `nibble_controller` | elements per vector (4, 8 and 16 are the reference sizes; the LUT engine needs an even number) |
| `UNROLLED` | 0  | `vector_mult_top`, `nibble_vector_multiplier`, `nibble_element_datapath` | 0: two cycles per element; 1: one |
| `STEPS`    | 2  | `nibble_controller` | steps per element, set by the parent from `UNROLLED` |

The reset is synchronous and active low (`rst_n`). The only clock is `clk`.
The LUT engine is purely combinational.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the outputs
with integer products computed in the testbench, prints
`TB_RESULT checks=<n> failures=<n>`, and has a watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_precompute_logic` | all 256 x 16 element/nibble pairs |
| `tb_nibble_element_datapath` | sequential and unrolled instances, random operands back to back and with idle gaps, one-cycle latency on every element |
| `tb_nibble_controller` | step order, `done` exactly `N*STEPS` edges after start, `busy`, a start ignored while busy, for N=4 with 2 and 1 steps |
| `tb_nibble_vector_multiplier` | 4-element sequential (with the `2111ff40 x 80` example), 16-element sequential, 8-element unrolled; every product is checked at the exact edge it must appear, earlier slots are checked to keep their old values, inputs change after start (uses the helper `nvm_harness`) |
| `tb_hex_string_lut` | every byte of every string against `s*k` |
| `tb_lookup_multiplier` | all 65,536 low-element/scalar pairs, plus every high element |
| `tb_lut_array_multiplier` | the four printed example vectors at N=4 (`2111ff40x80`, `01020304x00`, `8cf72d46x07`, `ffffffffxff`), plus 2,000 random vectors at N=16 |
| `tb_vector_mult_top` | the top at its defaults with no overrides; 257 operations (the example, then every scalar 00..ff); checks per-cycle timing, the 32-cycle latency and that the two engines agree; counts the mechanisms (all 16 configurations at both nibble positions, zero element nibbles, ignored starts, back-to-back starts) and fails if any never happened |
| `tb_operand_configs` | the three reference sizes (4, 8 and 16 elements) through the top: nibble-engine latency measured as 8, 16 and 32 cycles, LUT-engine result within the start cycle, products of both (uses the helper `top_cfg_harness`) |

The simulator used is Verilator 5, which models two states, so everything
that is read is reset or initialised. To run one testbench:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/nibble_mult_pkg.sv tb/tb_vector_mult_top.sv --top-module tb_vector_mult_top
./obj_dir/Vtb_vector_mult_top
```

Substitute another testbench name to run that one. Every testbench finishes
in well under a second of wall time. The full-size top test simulates about
8,700 cycles.

## Where this RTL departs from, or adds to, the reference description

* **Product width.** The algorithmic description of the nibble engine calls
  each product "32-bit". Its datapath drawing and its waveform description use
  16 bits, and an 8x8 product needs only 16. This RTL uses 16 bits. The
  LUT engine's "32-bit product" is likewise taken to be its two 16-bit
  outputs.
* **One shared datapath.** The nibble engine reuses a single element datapath
  for all elements. This is what gives the stated `2N`-cycle latency and the
  one-element-per-two-cycles waveform. A drawing of the flow shows a row of
  precompute values per element; here those rows are handled one after
  another in time, not built in parallel.
* **Handshake.** `start`, `done` and reset exist in the reference waveform,
  but their exact cycle relationships are this design's own, and so is
  `busy`. So are these choices: same-cycle issue of the first step, ignoring
  a start while busy, a one-cycle `done`, and registering the whole operand
  vector at start.
* **Accumulator clearing.** The reference clears the accumulator before each
  element. Here the adder adds to zero on nibble 0, which saves a cycle and
  keeps two cycles per element.
* **Element order.** Element 0 is the least significant byte and is
  processed first. This matches the printed example
  (`2111ff40 x 80 = 1080 0880 7f80 2000`).
* **Example size.** The reference example is labelled as an 8-operand run,
  but its printed values are a 4-element operation. They are used here as a
  4-element test.
* **Top-level packaging.** The two engines are presented as alternative
  design points, checked with the same stimulus. Placing both in one top is
  done only so that both are built and tested together.
* **Not covered.** The standard-cell implementation, the process, the pads
  and the package are outside the RTL. So are timing closure at 1 GHz and
  the area and power figures. Unsigned operands only: signed multiplication
  is not described.

## Sizes and what they mean

For 4, 8 and 16 elements, the nibble engine needs 8, 16 and 32 cycles. The
LUT engine needs one cycle in all three cases. All three sizes fit the
default build (16 element slots). For the exact cycle counts of the smaller
sizes, set `N_OPS` to 4 or 8.

After generic synthesis at the defaults:

* **Nibble engine:** about 420 storage bits and a single small datapath. Of
  those, 128 bits hold the operand vector (synthesis maps them to a small
  memory), 256 bits hold the results, and about 40 bits are scalar,
  datapath and control registers.
* **LUT engine:** eight LMs. Each has two 16 x 120-bit constant tables and
  eight 16-way byte multiplexers.

The contrast shows the intended trade-off: the nibble engine's logic does
not grow with the vector, only its registers do.
