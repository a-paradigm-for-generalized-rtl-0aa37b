# Generalized multi-level priority encoders in SystemVerilog

This is synthesizable SystemVerilog for the multi-level priority encoder
(MLPE) family from "A Paradigm for Generalized Multi-Level Priority
Encoders". It includes the building cells (OR trees, multiplexers,
single-level encoders), the two-level encoder (2LPE), and both ways of
building deeper encoders: composition and cascading. The top module,
`mlpe`, selects between them with parameters, much like the generator the
paper describes. The logic is purely combinational: there is no clock and
no reset.

## What a priority encoder does here

An `n:log2(n)` priority encoder takes an `n`-bit word. It returns `pos`,
the index of the most significant high bit (MSHB), and `valid`, which is 1
when any input bit is 1. For the all-zero word, `pos` is 0 and `valid` is 0.
The word `00...01` also gives `pos = 0`; `valid` tells the two cases apart.
`n` must be a power of two. The paper guarantees its equations only for
such sizes, and `mlpe` stops elaboration with `$error` for any other `n`.

## Architecture

### Single-level encoders (SLPE)

- `slpe_mux` is a chain of `n-2` 2:1 multiplexers. Stage `j` passes the
  constant `j` when `in[j]` is 1, otherwise it passes the stage below.
  Stage 1 is just `in[1]`. `in[0]` never changes `pos`.
- `slpe_gate` is the gate-based form. Each output bit is an OR over the
  positions whose index has that bit set, and each position is qualified
  by "no higher bit is set".
- `slpe` picks one of the two with `GATE_BASED`. The mux form is the
  default.

### Two-level encoder (`pe_2l`)

For `n` inputs:

- `L1 = 2^ceil(log2 sqrt n)` is the coarse size.
- `L2 = n / L1` is the fine size.
- For 2048 bits, L1 = 64 and L2 = 32. For 4096 bits, 64 and 64.

It works in four steps:

1. `or_stage` ORs each of the `L1` slices of `L2` bits.
2. A coarse `slpe(L1)` finds the highest non-empty slice.
3. `wide_mux`, an `n::L2` multiplexer, selects that slice. `x::y` means
   `x` input bits in `x/y` channels of `y` bits each.
4. A fine `slpe(L2)` encodes the selected slice.

`pos = {coarse, fine}`. `valid` is an OR of the slice ORs: the "extra OR
gate after the first stage".

### Composed MLPE (`mlpe_composed`, "-O")

An `m`-level composed encoder has a 2LPE's structure: the OR stage, the
wide multiplexer and the concatenated output. Its coarse and fine
sub-encoders are `(m-1)`-level composed encoders, and each one computes
its own `L1`/`L2` from its own width. Example: the 4096:12 composed 3LPE is
64 OR gates of 64 inputs, a 4096::64 mux, and two 64:6 2LPEs (each L1 = L2 = 8).
The module is self-recursive. It bottoms out at a 2LPE at `m = 2`, and at
an SLPE when a sub-encoder has fewer than 4 inputs.

### Cascaded MLPE (`mlpe_cascaded` → `cascade_stage`, "-A")

The cascaded form replaces the coarse encoder of a 2LPE, again and again,
by a smaller 2LPE. All levels share one set of sizes:

    L_i = 2^ceil( log2( (n / (L_1 ... L_{i-1}))^(1/(m-i+1)) ) ),  L_1 ... L_m = n

This is computed exactly with integer exponents in `mlpe_pkg::cascade_l`.
For 4096 bits and `m = 3`, the sizes are 16/16/16. The hardware for
level `m` (the outermost) is:

- an OR stage that forms `n / L_m` groups of `L_m` bits;
- a cascaded `(m-1)`-level encoder over the group ORs, which gives the
  upper `pos` bits;
- an `n::L_m` wide mux and an `SLPE(L_m)`, which give the low bits.

Level 2 is a 2LPE with `L1 = L_1`. Level `i`'s prefix width
`L_1 ... L_i` is passed down as the parameter `NS`. If `n` has fewer than `m`
address bits, `m` is reduced until every `L_i` is at least 2.

### Valid signal

The paper gives two methods, selected by `VALID_FROM_OUTPUT` on `mlpe`:

- `0` (the default, used for the paper's FPGA results): an OR after the
  first OR stage.
- `1`: `valid = in[0] | (|pos)`.

### Cells

- `or8_unit` is an 8-input OR built as four NOR2 gates into a NAND4.
- `or_tree` builds an OR of `W` inputs from OR8 units, level by level, as
  long as more than 8 signals remain. The root is a wire, an OR2, an OR4
  or an OR8 unit, following the case split of the paper's OR-cost
  equation.
- `mux2` is a 2:1 multiplexer.
- `mux4` is a 4:1 multiplexer. It is built either from three `mux2`s
  (`NAND_FORM = 0`, the form behind the paper's results) or from four
  NAND3 gates into a NAND4.
- `mux_tree` is a 1-bit `C:1` multiplexer made of 4:1 stages. The last 2,
  4, 8 or 16 channels are finished by a small end tree.
- `wide_mux` places one `mux_tree` per output bit.

## Parameters of `mlpe` (top)

| parameter | default | meaning |
|---|---|---|
| `N` | 4096 | input width, a power of two |
| `MAX_LVLS` | 3 | number of levels `m` (1 gives an SLPE, 2 a 2LPE) |
| `USE_CASCADING` | 0 | 0 = composed, 1 = cascaded (used when `MAX_LVLS > 2`) |
| `USE_GATE_OPTIMIZED` | 0 | 0 = mux-chain SLPEs, 1 = gate-based SLPEs |
| `VALID_FROM_OUTPUT` | 0 | valid method, see above |

Ports: `in_bits[N-1:0]`, `pos[$clog2(N)-1:0]`, `valid`.

The defaults build the paper's worked example, the 4096:12 composed 3LPE.
Set `USE_CASCADING=1` for the 4096:12 cascaded 3LPE. The generator
parameters named in the paper map to these parameters:

- `G_n` → `N`
- `G_max_lvls` → `MAX_LVLS`
- `G_use_cascading` → `USE_CASCADING`
- `G_use_gate_optimized` → `USE_GATE_OPTIMIZED`

## Sizes

The paper evaluates widths from 4 to 262144 bits. Every configuration from
the paper's recommendation tables is a power of two with up to 5 levels,
and the RTL accepts all of them as parameters. To keep elaboration
manageable at large widths, the long generate loops are split into rows
of 1024.

Simulated configurations:

- every block across a range of widths;
- the 4096-bit default in both composed and cascaded form;
- 64:6 2LPE, 128 composed 3LPE, 512 cascaded 3LPE, 1024 composed 4LPE and
  2048:11 2LPE (`tb_mlpe_sizes`).

Widths of 8192 bits and more were not simulated. Their models take
over 20 minutes to compile with Verilator, and 262144 bits ran out of
memory. A word narrower than `N` can be fed with its upper bits tied to 0.

## Simulation

Each testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. With Verilator 5:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/mlpe_pkg.sv tb/tb_mlpe.sv --top-module tb_mlpe && ./obj_dir/Vtb_mlpe

Testbenches:

- `tb_or8_unit`, `tb_mux2`, `tb_mux4`: exhaustive.
- `tb_or_tree`: widths 1 to 4096.
- `tb_wide_mux`: several `x::y` shapes, in both mux4 forms.
- `tb_slpe_mux`, `tb_slpe_gate`, `tb_pe_2l`, `tb_mlpe_composed`,
  `tb_mlpe_cascaded`: several widths, level counts and L1 choices.
- `tb_mlpe`: end to end. It runs nine configurations of the top and
  counts that every mode (composed/cascaded, mux/gate SLPE, both valid
  methods) ran, that the zero word was seen, and that each of the 64
  slices of the default encoder held the MSHB at least once.
- `tb_mlpe_full`: the top at its default parameters. It covers every bit
  position plus random words.
- `tb_mlpe_sizes`: the table sizes listed above.

The shared harness `pe_check` drives these word kinds:

- the zero word and the all-ones word;
- a one-hot word for each position;
- a word with random lower bits below each position;
- random words.

It compares `pos` and `valid` with a plain top-down scan.

For each block, a copy broken in one deliberate way was also run against
its testbench. Every broken copy was detected.

## Departures from the paper and assumptions

- **Not built:** the paper's baselines (the recursive and tree
  encoders), the FPGA LUT/carry-chain mapping of the cells, and the
  transistor-level cell costs and delays. Those are technology results,
  not logic.
- **Cascaded valid:** the valid signal is taken from the innermost 2LPE,
  an OR of its slice ORs. That is logically the same as one OR after the
  first stage, but it is not a separate gate.
- **SLPE mux chain:** the figure draws the chain, and it is written out
  here as a priority `?:` chain, which is the same function.
- **Small sub-encoders:** when a composed sub-encoder is narrower than 4
  bits, it becomes an SLPE. The paper does not say what to do below that
  size.
- **The `mux4` choice** follows the paper's statement that its results
  use the three-`mux2` form. The NAND form is available as an option.
- **OR4 roots** use an atomic 4-input OR. The paper's OR-cost case split
  fixes only the count of gates.

## Lint notes

- `mlpe_composed` and `cascade_stage` instantiate themselves. When either
  is linted as its own top at default parameters, Verilator reports
  UNDRIVEN on signals of the recursive instance. This is a tool artefact:
  every signal is driven in every elaborated configuration, and the
  testbenches check all outputs.
- The header of each file states its interface, how it works, and what
  follows the paper versus what is this design's own choice.
