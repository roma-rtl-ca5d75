# ROMA array in SystemVerilog: a ROM-based accelerator for QLoRA language models

A QLoRA model has two parts. One is a large base model quantized to 2 or 4
bits, which never changes. The other is a set of small, higher-precision LoRA
adapters that can change. ROMA stores the base model in mask ROM on the chip
and stores the adapters and the KV cache in SRAM. A whole quantized LLM then
runs without external memory. ROM needs far fewer transistors per bit than
SRAM. A block-ROM structure (B-ROM) cuts the transistor count again, to about
a quarter, by storing bits as wiring.

This repository gives RTL for the logic of that architecture:

* the exponent-matching unit and the low-precision compute cell that multiply
  FP16 activations with 2-bit weights;
* the B-ROM;
* the L-Unit (ROM half of a tile) and the H-Unit (SRAM half);
* the vector unit;
* the router of each unit;
* the 17 x 16 array that connects them.

Each block has a self-checking testbench.

## 1. The array

```
 row 0..7   : matrix units   (8 x 16)   each = L-Unit (B-ROM) + H-Unit (SRAM) + router
 row 8      : vector units   (1 x 16)   each = 1 MB scratch SRAM + vector ALU + router
 row 9..16  : matrix units   (8 x 16)
 host port  : west side of the router at column 0, row 8
```

`roma_top` builds this grid (`HALF_ROWS = 8`, `COLS = 16`). Every unit talks
only to its router. Each router links to its four neighbours. Work arrives as
single-flit packets (`flit_t` in `roma_pkg`). A flit has a destination, a
reply destination with a reply address, an opcode, three 16-bit fields and a
128 x FP16 payload. The host port is the only way in or out. A typical step:

1. The host sends `OP_LDOT` flits with 128 activations to matrix units.
2. Each unit answers with an `OP_RESULT` flit. The answer goes either to the
   host or to a vector unit's scratch word (`rep_x`, `rep_y`, `rep_addr`).
3. Vector operations (`OP_VADD`, `OP_VRSUM`, ...) combine the stored results.
4. `OP_VREAD` returns a vector to the host.

The RTL has no sequencer that runs a whole transformer layer. The host issues
the operations.

## 2. How a 2-bit group dot product is computed (L-Unit)

The weights are stored in quantization groups of 128. Each group has 128
unsigned 2-bit weights `w`, one unsigned 2-bit zero point `z` and one FP16
scale `s`. A weight's real value is `(w - z) * s`. One group is one 274-bit ROM
word: bits [255:0] hold `w`, [257:256] hold `z` and [273:258] hold `s`.

**Exponent matching** (`exp_align`, shared by all cells of an L-Unit). Each
FP16 activation becomes a signed significand: `+-{1,mantissa}` for a normal
number, `+-{mantissa,0}` for a subnormal. The unit takes the largest exponent
field `max_exp` (U5). It shifts every significand right by
`max_exp - exp_k`, which gives `value_k` (S12). It also sums them into `vsum`
(S19). Every activation is now `value_k * 2^(max_exp-25)`. The shift is
arithmetic and drops the bits shifted out. This loses a little precision for
activations much smaller than the largest one. The loss is part of the method.

**Compute cell** (`lp_cell`). Because the sum over `k` of
`value_k * (w_k - z)` equals `sum(value_k * w_k) - vsum * z`, the cell needs:

* an integer dot product with the 2-bit weights;
* one small multiply `vsum * z`;
* a subtraction;
* a scale stage.

The scale stage computes `(dot - vsum*z) * s * 2^(max_exp-25)` exactly and
rounds it once to FP16, to nearest with ties to even. The constant 25 is the
FP16 bias (15) plus the 10 fraction bits.

**L-Unit** (`l_unit`). One `exp_align` feeds `N_CELLS = 16` fused cells. A
fused cell is one B-ROM plus one compute cell. All cells read the same group
address, and each holds a different output row. The pipeline has two
registers: alignment, then ROM read plus cell. The L-Unit takes one group per
cycle, and results appear 2 cycles after the input.

## 3. B-ROM

A plain mask ROM decodes the address into one-hot word lines `A_i`. Output bit
`j` is `OR_i (A_i & M[i][j])`, with one transistor per stored bit. B-ROM cuts
the word lines into blocks of four. For each block a candidate generator makes
all 16 possible outputs, `C_k = OR_{i<4} (A_{4b+i} & bit_i(k))`. Column `j` of
the block is then a wire to candidate `C_k`, where `k` is the 4-bit nibble the
block stores in that column. The block outputs are ORed together. Storage
becomes wiring in the metal layers. Physically, the compute cell is placed
under the B-ROM, so one area is used for both (the "fused cell"). That
placement cannot be expressed in RTL. `fused_cell.sv` is only the logical pair.

In `brom.sv` the stored pattern comes in on the `mask` input port. In the
array it is tied to constants, and synthesis then reduces every tap
multiplexer to a wire. The ROM image of cell `c` in tile `(row, col)` is
`rom_word({row,col}, c, addr)` in `roma_pkg`:

* nine 32-bit chunks, each `mix32(seed + i*0x61c88647)`;
* `seed = {tile,16'h0} ^ {c[7:0], addr, 8'h0} ^ 0x9e3779b9`;
* the scale's exponent field forced to `01xxx`.

This pseudo-random image stands in for a trained model. To load a real model,
replace `rom_word` with a function or table that holds it.

## 4. H-Unit and vector unit

The architecture defines what these two units do, not how they are built. The
structures below are the simplest ones that do the job.

* **H-Unit** (`h_unit`). It has 4608 words of 2048 bits (1.125 MB per tile,
  288 MB in total). A word holds 128 FP16 values (KV cache) or 256 FP8 E4M3
  values (LoRA weights). In FP8 mode the `HALF` flag picks which 128 weights
  are used.
  * An `HDOT` request multiplies the activations with one word, using 128
    exact FP16 x FP16 products.
  * It adds them into an exact 96-bit fixed-point accumulator with a
    resolution of 2^-48.
  * The `FIRST` flag clears the accumulator first. With `LAST` set, the unit
    rounds the sum to FP16 and replies. A long dot product can therefore span
    many requests and is still rounded only once.
  * A reply comes 2 cycles after the request.
* **Vector unit** (`vector_unit`). It has 4096 words of 2048 bits (1 MB per
  unit, 16 MB in total). It supports:
  * element-wise add, multiply and max;
  * sum and max reductions into lane 0;
  * a permutation by a per-lane index;
  * storing a vector (this is also how `OP_RESULT` flits land);
  * reading a vector back.

  Results are exact and then rounded once to FP16. One operation takes
  2 cycles.

## 5. Router and flow control

`router` has five ports: local, north, south, east and west. Each input has a
2-entry FIFO. The `ready` signal sent to a neighbour therefore comes from a
register, and a free link carries one flit per cycle.

* Routing is dimension-ordered: first along the row, then along the column.
  Flits for the host go to column 0 of the host row and leave through the
  west port there.
* Each output has a round-robin arbiter. A grant is held while its flit waits,
  and an assertion checks that an offered flit stays stable.

A matrix unit blocks its port while a reply is pending. Back-pressure from
the host therefore fills the mesh, and finally the host port's `ready` goes
low.

Every flit, host-bound or not, follows X-then-Y routing. That alone rules
out routing deadlock in the mesh. Requests and replies share one network,
though, and a matrix unit waits for its reply to leave before it takes the
next request. Under heavy traffic a reply can therefore wait behind requests
queued for its own unit. In that case the host must bound how many requests
it has outstanding. The testbenches back-pressure the host port and run into
no deadlock, but there is no proof for arbitrary traffic.

## 6. Where this RTL departs from the architecture, and its sizes

| Item | Architecture | This RTL |
|---|---|---|
| Array | 17 x 16, 8 x 16 matrix arrays, 1 x 16 vector units | same |
| Group size, formats | 128; U2 weights and zero point, FP16 scale; S12 / S19 / U5 | same |
| H-Unit SRAM | 288 MB | 256 x 4608 x 256 B = 288 MiB |
| Intermediate SRAM | 16 MB | 16 x 1 MB in the vector units |
| ROM | 1.86 GB | 256 tiles x 16 cells x 16 words x 274 bits = 2.24 MB |
| Compute cells per L-Unit | "multiple" | 16 (about 12 needed for 24k tokens/s on 8B at 500 MHz) |
| 4-bit base model | stored in ROM | only the 2-bit cell is described and built |
| Router, packets, host port, controllers | function only | this design's own |

The ROM depth is the deliberate cut. The architecture's capacity would be
about 28,000 words per cell. The lint and elaboration tools elaborate every
cell's image separately, so at that depth the 4096 cell images (about 16 Gbit)
cannot be compiled. 16 words per cell keeps the full array compilable. The
depth is the `L_DEPTH` parameter of `roma_top`.

The design also does not model:

* clocking (the target is 500 MHz), pads, and the physical fusion of the cells;
* the control program of a transformer layer;
* attention softmax and normalisation as separate functions. They would be
  sequences of the vector operations.

Inf and NaN inputs are not special-cased: exponent 31 is treated as an
ordinary exponent.

## 7. Files

* `rtl/roma_pkg.sv`: sizes, `flit_t`, opcodes, FP16 helpers and the ROM image
  function
* `rtl/exp_align.sv`, `lp_cell.sv`, `brom.sv`, `fused_cell.sv`, `l_unit.sv`:
  the low-precision path
* `rtl/h_unit.sv`, `vector_unit.sv`, `matrix_unit.sv`, `router.sv`,
  `roma_top.sv`
* `tb/roma_tb_pkg.sv`: reference FP16 arithmetic through `real`, plus the
  reference alignment, group formula and ROM image
* `tb/tb_<block>.sv`: one self-checking testbench per block
* `tb/tb_roma_top.sv`: the end-to-end test on a 3 x 3 array. It counts every
  mechanism and fails if one never happens: L dot product, store into a
  vector unit, vector add, H write, FP16 and FP8 H dot products, accumulation
  over several requests, host back-pressure, and a stall at the host port.
* `tb/tb_roma_full.sv`: one pass through the array at its default size. It
  has not been run to completion. Verilator turns the full array into about
  1.7 GB of C++ (905 files), and compiling that did not finish in the time
  available. The largest array actually simulated is the 3 x 3 array of
  `tb_roma_top`. The full-size array has been linted and elaborated, but not
  simulated.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## 8. Simulating

With Verilator 5 (run from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb rtl/roma_pkg.sv tb/roma_tb_pkg.sv \
    rtl/*.sv tb/tb_roma_top.sv --top-module tb_roma_top -j 4
./obj_dir/Vtb_roma_top
```

Swap in any other `tb/tb_*.sv` and its module name to run another test.
Verilator will warn that `roma_pkg.sv` appears twice on that command line;
the warning is harmless. To keep it quiet, list the `rtl/` files other than
the package by hand. The block testbenches build in seconds. The end-to-end
test builds in under a minute. The full-size array is large for a simulator:
its 256 H-Unit SRAMs alone are 288 MB of state, and its C++ model did not
compile in under half an hour.

To change the design size, set the parameters of `roma_top`: `HALF_ROWS`,
`COLS`, `N_LCELLS`, `L_DEPTH`, `H_DEPTH` and `V_DEPTH`. `N_LCELLS` and
`L_DEPTH` must stay at or below what `rom_word` can address (256 cells, 65,536
words).
