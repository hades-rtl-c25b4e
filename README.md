# Alphabet-set MAC macros: near-memory and in-memory MVM with power-of-two operands

A multiply-accumulate unit needs no multiplier if every weight is a power of
two. This design restricts the weights of a quantized DNN layer to the
*alphabet set {1}*. Every 4-bit weight is one of `0001`, `0010`, `0100`,
`1000`, so it can be stored as a **2-bit shift code** `k` (value `2^k`). A
product `W * I` is then `I << k`. This halves the SRAM cells per 4-bit weight
and turns each multiply into a shift. The accuracy lost to this coarse,
non-uniform quantization is recovered during training, in software. This RTL
covers the inference hardware only.

Two macros use the idea, and both evaluate one layer `Out_j = sum_i W(j,i) * I(i)`
(`i = 0..M-1` inputs, `j = 0..N-1` outputs):

| | NM-CALC (`nm_calc_macro`) | IM-CALC (`imc_calc_macro`) |
|---|---|---|
| where the multiply happens | next to the SRAM: decoder + barrel shifter | in the array: two cells share a read bit line |
| weight storage | 2-bit shift code | 2-bit shift code |
| activation | plain 4-bit unsigned (up to 16 bits) | also a 2-bit shift code, stored in the array |
| per output node | M/D cycles (one weight per division per cycle) | 1 cycle per division, D nodes per cycle |
| peripheral logic | decoder, barrel shifter, adder-accumulator per division | bit-line level sense, surface logic, decoder per column, adder tree per division |

`hades_top` puts both macros behind one host load bus. They run
independently and can run at the same time.

## Files

```
rtl/hades_pkg.sv            shared constants, shift-code type, bit-line level enum, host bus struct
rtl/hades_top.sv            both macros + host bus decode
rtl/nm_calc_macro.sv        NM-CALC: control, D divisions, output adder/register
rtl/sram_8t_array.sv          8T SRAM weight array of one division (1W/1R)
rtl/nm_input_driver.sv        activation register file, one read per division
rtl/nm_shift_decoder.sv       2-bit code -> 4-bit one-hot weight
rtl/nm_barrel_shifter.sv      activation << k selected by the one-hot weight
rtl/nm_adder_accumulator.sv   per-division running sum
rtl/imc_calc_macro.sv       IM-CALC: control, D divisions, per-division result register
rtl/imc_bitcell_array.sv      weight rows + input row(s) of one division
rtl/imc_rbl_divider.sv        three-level read-bit-line model (digital abstraction)
rtl/imc_surface_logic.sv      two bit-line levels -> product exponent kw+kx
rtl/imc_product_decoder.sv    exponent -> 2^exponent
rtl/imc_adder_tree.sv         M-input balanced adder tree
tb/tb_<module>.sv           one self-checking testbench per module
tb/nm_macro_harness.sv, tb/imc_macro_harness.sv   parameterized checkers used by the macro testbenches
tb/tb_hades_top_wide.sv     whole-design test at 8-bit weights and inputs
```

## Number format

| 4-bit value | code | NM one-hot | note |
|---|---|---|---|
| 1 (`0001`) | `00` | `0001` | |
| 2 (`0010`) | `01` | `0010` | |
| 4 (`0100`) | `10` | `0100` | |
| 8 (`1000`) | `11` | `1000` | |

- Weights, activations and products are **unsigned**.
- **Zero is not representable** in a 2-bit code.
- The quantizer is the host's job. The testbenches show one possible
  quantizer: the nearest power of two, with ties going to the larger value.
- **Wider operands.** A weight of `4*W_NIBBLES` bits is coded one 4-bit
  nibble at a time, so its value is `sum_n 2^(4n + k_n)`. Codes are packed
  with nibble 0 in bits `1:0`. IM-CALC inputs wider than 4 bits work the same
  way (`XN` nibbles). NM-CALC activations are plain binary of `IN_BITS` bits.

## NM-CALC

The `M x N` weight matrix is cut into `D` divisions along the input
dimension. Division `d` holds inputs `d*M/D .. (d+1)*M/D-1`, and each
division has its own SRAM, decoder, barrel shifter and accumulator.

In every cycle, each division does the following:

1. It reads one word from its SRAM: the code of `W(j, i)`.
2. The input driver supplies the matching activation `I(i)` in the same
   cycle.
3. The decoder turns the code into a one-hot weight.
4. The barrel shifter forms `I(i) << k`. For a 4-bit input this is a 7-bit
   product.
5. The accumulator adds the product to its running sum.

After `M/D` cycles each division holds its partial sum for output `j`. The
output stage adds the `D` partial sums and registers `Out_j`.

SRAM word `j*(M/D) + k` of division `d` holds `W(j, d*M/D + k)`. The host
writes weights by logical index `j*M + i`, and the macro does this address
mapping itself.

Timing at the defaults (M = N = 64, D = 2), where cycle 1 is the first cycle
after the start edge:

```
cycle      1   2  ... 32 | 33 ... 64 | ...            2048
read     j=0,k=0..31     | j=1 ...   |  ...  j=63,k=31
acc          k=0 ... k=31| ...
out_valid                      35 (j=0), 67 (j=1), ... 2051 (j=63) with done
```

- A read issued in cycle `t` has its product accumulated at the end of `t+1`.
- The division sums are added at the end of `t+2`.
- `out_valid` is high in `t+3` after the last read of an output.
- Outputs come out in order `j = 0..N-1`, one every `M/D` cycles.
- A layer takes `N*M/D + 3` cycles from the start edge to `done`.

With `W_NIBBLES > 1` each division has one decoder and one barrel shifter
per weight nibble. The nibble products are added, with nibble `n` shifted
left by `4n`, before accumulation. The cycle count does not change.

## IM-CALC

IM-CALC also stores the activations as shift codes, inside the array, so a
whole dot product comes out of one array read.

**Array organisation.** Division `d` holds output rows
`d*N/D .. (d+1)*N/D-1`. Row `r` stores, for every input `i`, the weight code
in a two-cell *column block*. At the end of every column block sits the
input row, which holds the code of `I(i)` in the same two bit columns. Each
division keeps its own copy of the input row. This is input-stationary: the
activations are written once and then every weight row is read against them.

**Read bit line.** A read raises the word line of weight row `r` and that of
the input row together. Each of the two bit columns of a block then carries
one weight bit and one input bit on a shared read bit line (RBL). Through the
voltage-divider action of the two 8T read stacks, the RBL settles at one of
three levels:

| cells holding 1 | RBL level | digit |
|---|---|---|
| none | `RBL_0` (discharged) | 0 |
| one | `RBL_VPRE` (near precharge) | 1 |
| both | `RBL_1` | 2 |

`imc_rbl_divider` gives this mapping as logic. In silicon it is the analog
bit line and two reference sense amplifiers. The mapping of cell pairs to
levels is an assumption of this design (see below).

**Surface logic.** The product of `2^kw` and `2^kx` is `2^(kw+kx)`, so only
the exponent `kw + kx` (0..6) is needed. The high bit line's digit is
`kw[1] + kx[1]` and the low one's is `kw[0] + kx[0]`, so the exponent is
`2*hi + lo`. `imc_surface_logic` resolves it as follows:

```
shift[0] = (lo == VPRE)
shift[1] = (hi == VPRE) xor (lo == 1)
shift[2] = (hi == 1) or ((hi == VPRE) and (lo == 1))
```

**Decoder and adder tree.** `imc_product_decoder` expands the exponent to the
7-bit one-hot value `2^(kw+kx)`. `imc_adder_tree` then sums the `M` values in
a balanced binary tree, giving a 13-bit sum for M = 64.

**Timing.**

- A row read in cycle `t` is latched by the array.
- The levels, surface logic, decoders and tree settle in `t+1`, and the
  result is registered at the end of `t+1`.
- All `D` divisions report in the same cycle: `out_valid` is all ones and
  `out_idx[d] = d*N/D + r`.
- A layer takes `N/D + 2` cycles from the start edge to `done`, which is 34
  cycles at the defaults.

**Wider operands.** With `WN` weight nibbles, every input has `WN` column
blocks. Their products enter the tree shifted by `4n`, and the input code is
copied under each block. With `XN` input nibbles there are `XN` input rows.
Row `r` is read against each of them in `XN` successive cycles, and the tree
sums are accumulated with weight `2^(4q)`, so an output takes `XN` cycles.

## Top level and host bus

`hades_top` decodes `host_wr` (`hades_pkg::host_wr_t`). The bus fields are:

- `en` is a one-cycle write strobe.
- `target` selects NM weights, NM activations, IM weights or IM input codes.
- `addr` (16 bits) is the logical index: `j*M+i` for a weight, `i` for an
  input.
- `data` (16 bits) holds the packed codes or an NM activation.

The control and result signals are:

- `nm_start` and `im_start` each start one layer. A start while that macro
  is busy is ignored.
- `busy` is high from the accepted start until `done`.
- Results stream out on `*_out_valid`, `*_out_idx` and `*_out_data`.
- Loads must not overlap a run of the same macro. No hardware enforces this.

Reset (`rst_n`, asynchronous, active low) clears control and result
registers. SRAM contents are not reset.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 64 | inputs per layer tile |
| `N` | 64 | outputs per layer tile |
| `D` | 2 | array divisions (M and N must be multiples of D) |
| `IN_BITS` | 4 | NM-CALC activation bits (4..16) |
| `W_NIBBLES` | 1 | weight nibbles, both macros (1, 2, 4) |
| `X_NIBBLES` | 1 | IM-CALC input nibbles |

At the defaults, each macro stores 4096 weights (8 kbit). The IM macro adds
a 128-bit input row per division.

Output widths:

- NM-CALC: `IN_BITS + 3 + log2 M` bits for 4-bit weights, and
  `IN_BITS + 4*W_NIBBLES + log2 M` bits for wider ones.
- IM-CALC: `7 + 4(WN-1) + log2(M*WN)` bits, plus `4(XN-1)+1` bits when
  `XN > 1`.

## What follows the source design and what is this design's own

Taken from the published description:

- The alphabet set {1} and its 2-bit encoding.
- The 8T cells with separate read and write ports.
- The NM-CALC chain of decoder, modified barrel shifter and
  adder-accumulator, fed by an input driver.
- The input-stationary IM-CALC with codes at the end of the column blocks, a
  three-level read bit line, surface logic, a specialised decoder and an
  adder tree.
- Division into `D` parts, with `D = 2`.
- One output node per cycle in IM-CALC.
- Precision in multiples of 4 bits.
- 4b/4b as the main configuration.

Chosen here, where the description is silent:

- The array size (64 x 64).
- The host bus, handshake and reset.
- The pipeline registers and the exact cycle counts.
- How activations and rows are assigned to divisions.
- Which RBL level stands for which cell pair.
- The gate form of the surface logic.
- The output stage that adds the NM partial sums.
- How wider IM inputs are handled (one input row per nibble, read
  serially).

Departures and limits:

- **Unsigned only.** The training method quantizes to *signed* alphabets,
  but the hardware description gives only unsigned power-of-two levels and a
  7-bit product of two 4-bit numbers. The RTL follows the hardware: there is
  no sign bit and no subtraction.
- **No zero weight.** The alphabet set {1} also allows the 4-bit snippet
  `0000`, but a 2-bit code holds only the four nonzero levels. A zero weight
  cannot be stored.
- **Alphabet {1} only.** Weight decompositions using other alphabets (3, 5,
  ...) are not supported.
- **Analog parts abstracted.** The bit-line voltages, precharge, sense
  references, supply scaling (0.8 V operation) and the transistor-level
  barrel shifter are not modelled. Neither are power or energy.
- **Placeholder adder tree.** The IM-CALC adder tree is a plain binary tree.
  The optimised tree that the description borrows from a published
  compute-in-memory macro is not reproduced.
- **Outside the RTL.** Activation functions (ReLU, or LeakyReLU for
  IM-CALC), re-quantization of outputs to codes, the full-precision last
  layer, tiling of large layers, and the training itself are not part of
  the RTL.

## How far it goes for real networks

One macro holds one 64 x 64 tile. The networks the design was evaluated on
are much larger. Parameter counts from common implementations:

| network | weights | largest layer | longest dot product |
|---|---|---|---|
| VGG16 / VGG19 | 14.7 M / 20 M | 2.36 M (3x3x512x512) | 4608 terms |
| ResNet18 / ResNet50 | 11–26 M | 2.36 M (3x3x512x512) | 4608 terms |
| MobileNetV2 | 2–3.5 M | 0.4 M | 960–1280 terms |

Running such a network would need a host that does all of the following:

- tiles every layer into 64 x 64 blocks;
- reloads the weights for each block;
- adds partial sums across input tiles;
- applies the activation function;
- re-encodes the activations for IM-CALC.

None of this is in the RTL. What the RTL does reproduce exactly is the
arithmetic of one quantized tile. That includes a single 4b x 4b MAC, which
is the unit the hardware comparison was made on.

## Verification

Every module has a self-checking testbench that compares against values
computed independently in the testbench. Each one prints
`TB_RESULT checks=N failures=F` and has a cycle watchdog.

- **Leaf modules** are checked exhaustively where the input space is small:
  the decoders, the bit-line model and the surface logic. The SRAMs, the
  adder tree and the accumulator are checked with random values.
- **Macro testbenches** (`tb_nm_calc_macro`, `tb_imc_calc_macro`) each run
  two configurations at once:
  - the default 4b/4b macro;
  - a reconfigured one: 8-bit activations and 8-bit weights with D = 4 for
    NM, and 8-bit weights and inputs with D = 4 for IM.

  For each, they check every output value, the output order, the spacing
  (`M/D` cycles for NM; 1 cycle per row for IM, or `XN` cycles with wider
  inputs), the total cycle count, the single `done` pulse, and that a start
  while busy is ignored.
- **`tb_hades_top`** runs the whole design at its default parameters. It
  quantizes random 4-bit weights and activations, loads both macros over the
  host bus, and runs three layers with both macros working concurrently. It
  counts each mechanism and fails if one never happens: multi-cycle
  accumulation, the cross-division sum, parallel outputs of the IM
  divisions, overlap of the two macros, an ignored start, and input updates
  between runs.
- **`tb_hades_top_wide`** does the same with 8-bit weights and inputs, and
  also checks that upper weight nibbles are exercised.

Assertions in the macros check that `done` coincides with the last output
(NM) and that the IM divisions stay in lockstep.

Simulating with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/hades_pkg.sv tb/tb_hades_top.sv --top-module tb_hades_top -o sim
./obj_dir/sim
```

Replace `tb_hades_top` with any other testbench name. Variables that are
not initialised start at random values in a two-state simulator. The
testbenches reset or load everything they read, so random initialisation
(`+verilator+rand+reset+2`) is safe. Every testbench finishes in a few
seconds.
