# RAELLA tile in SystemVerilog

Analog processing-in-memory computes a dot product by letting a ReRAM crossbar sum
currents along its columns. Converting those analog column sums is the expensive part. A
converter that resolves every sum exactly needs many bits, while a cheap one clips large
sums. RAELLA's answer is to change the arithmetic so that column sums stay small. Then a
7-bit ADC with a step of one keeps nearly every value exact, and 8-bit networks run
without retraining. It relies on three mechanisms:

* **Center+Offset weights.** Each filter is stored as offsets from a per-filter center φ.
  Offsets above the center go in a positive device and offsets below it in a negative
  device. The two cancel inside the column. The term φ·ΣI is added digitally afterwards.
* **Adaptive weight slicing.** Each layer splits its 8b weights over 2 to 8 columns. The
  most common split is 4b-2b-2b.
* **Dynamic input slicing.** Inputs are sent in wide slices first ("speculation"). A column
  whose converted value clipped is redone with 1-bit slices ("recovery"). Per-column flags
  record which columns need the redo.

This RTL models one tile of such an accelerator at its published size:

* 8 IMAs (in-situ multiply-accumulate units);
* 4 crossbars per IMA, each 512×512 with 2T2R cells of 4b devices;
* four 7b ADCs per crossbar;
* a 256-entry psum buffer per crossbar (16b psum plus 8 flags per entry);
* a 2kB input buffer per IMA;
* 64kB of eDRAM, an 8192-channel quantizer and a maxpool unit.

The analog parts are behavioural models. Everything else is synthesizable.

## Center+Offset arithmetic

For a weight w and its filter's center φ, the crossbar holds w+ = max(w−φ, 0) in one device
and w− = max(φ−w, 0) in the other. The dot product then splits as

    W·I = φ·ΣI + (W+ − W−)·I

The crossbar computes the second term as signed current. Because the center balances the
positive and negative slices, this term stays near zero. The first term needs only the sum
of the inputs, and `input_sum` keeps that sum for each crossbar:

* When an input line is written into a crossbar's row register, the new bytes are added.
* The bytes they replace are subtracted.

This way a sliding window that reuses most of its inputs costs one line's worth of
additions, not a 512-input sum. `center_correct` holds one 8b center per filter. On
read-out it adds `center × ΣI` to the offset psum.

Note the sign. The unit is drawn as a "multiply-subtract" in the original block diagram,
but with the offsets defined as above the correction must be added. The RTL adds. Its unit test
includes a small worked case: center 13, inputs 4, 2, 1 (ΣI = 7) and an offset part of 3 give
13·7 + 3 = 94.

Centers are chosen offline by a cost function that balances slice magnitudes in each
column. This is not hardware. The testbenches carry a small version of it to produce
realistic centers.

## Weight slicing and the column map

A crossbar holds weights of one layer. The layer's slicing is a `wslicing_t`:

* the number of slices n (2..8);
* the lsb position of each slice.

Slice widths follow from the lsb positions; devices are 4b, so no slice is wider than 4b.
Filter f occupies columns f·n … f·n+n−1. Slice k of a weight is `(offset >> lsb[k])`
masked to its width. Both devices of a column hold the same slice of w+ and w−
respectively.

With 4b-2b-2b, a 512-column crossbar holds 170 filters of up to 512 inputs. The psum buffer
entry of a filter sits at index f.

## Dynamic input slicing: speculation and recovery

This is the heart of the design and the part that needs the most care. `xbar_unit` runs an
operation as 11 input slots:

| slot | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| kind | spec | rec | rec | rec | rec | spec | rec | rec | spec | rec | rec |
| input bits | 3..0 | 0 | 1 | 2 | 3 | 5..4 | 4 | 5 | 7..6 | 6 | 7 |

The wide slice covers the dense low-order bits. The sparse high-order bits come as 2-bit
speculations. The paper's prose says the first speculative slice is "high-order", but its
figure prints these exact bit ranges, and this design follows the figure.

Each ADC code is handled as follows:

* **Speculative slot, code in −63..62:** it is shifted by (weight-slice lsb + input-slice
  lsb) and added to the filter's psum.
* **Speculative slot, code saturated (−64 or 63):** the code is thrown away and the
  column's flag is set. One flag per weight slice, so 8 flags per filter.
* **Recovery slot:** only flagged columns are converted. The ADCs of all other columns are
  disabled (power-gated). A recovery code is always added, even if it saturates, because a
  1-bit slice rarely does.
* **Next speculative slot:** the flags are cleared before the next group of bits is
  speculated.

The result is exact whenever no recovery code saturated. The reference model in the
testbenches (`col_contrib` in `raella_ref_pkg`) repeats this rule independently. The
end-to-end tests compare psums that include failed speculations and recoveries.

The psum is 16b and wraps modulo 2^16. A real 8b layer may exceed that range, and the paper
does not say how overflow is handled.

## The crossbar cycle

A crossbar cycle has two pipelined stages:

1. The pulse-train DACs drive slice t.
2. The ADCs sweep the held column sums of slice t−1.

The DAC stores one bit per row in a flip-flop and gates a shared pulse clock with an AND:

* bit 3 gives 8 pulses, then bit 2 gives 4, bit 1 gives 2 and bit 0 gives 1;
* each pulse is 1 tick on and 1 tick off, so a 4b slice takes 30 ticks.

In the RTL, one clock is one ADC conversion slot. Four ADCs cover 512 columns in 128
clocks, which is the paper's 100ns ADC stage. A cycle is

    CYC = max(COLS/NUM_ADC, 30) + 2   (130 clocks at full size)

The 30-clock DAC stage hides under the sweep. An operation takes 11 slots plus one fill
cycle, so `done` comes exactly 12·CYC clocks after `start`. The testbenches check that
count.

The sweep is implemented as follows:

* At each of the clocks 1..COLS/NUM_ADC, ADC lane a converts column g·NUM_ADC + a.
* `psum_unit` is two stages. The request stage decides which lanes are enabled, from the
  slot kind and the flags.
* The code stage, one clock later, shifts and adds the codes. Lanes that fall in the same
  filter are merged before the buffer write.

## IMA: feeding, input sums and read-out

`ima` owns the 2kB input buffer, four `xbar_unit`s, four `input_sum`s and `center_correct`.

* **FEED** copies `feed_lines` lines of LOAD_W=16 bytes from the input buffer into the row
  registers of every crossbar selected by a mask. One line goes per clock. Several bits in
  the mask multicast the same inputs. A feed ends `feed_lines + 2` clocks after it starts.
* **Read-out** addresses one crossbar and filter. The psum is center-corrected and returned
  after 2 clocks.

## Tile: commands, eDRAM, quantization, pooling

The tile is driven by `tile_cmd_t` commands (valid/ready). These replace the
pattern generators, which the paper only names:

| op | action |
|---|---|
| LOAD_IB | copy `count` eDRAM lines to the input buffers of the IMAs in `ima_mask` (multicast) |
| FEED | feed `count` lines into the crossbars in `xbar_mask` of one IMA |
| RUN | start all crossbars in the masks and wait for them |
| DRAIN | read `count` filters of one crossbar; center-correct; quantize with channel `channel + f`; write the 8b outputs to eDRAM at `dst` |
| POOL | max over windows of `win` lines, `stride` apart, for `count` outputs, written to `dst` |
| SEND | stream `count` eDRAM lines from `src` to `net_out` (valid/ready) |

Other details:

* The network writes lines with `net_in_*` whenever the tile is not draining or pooling.
* The quantizer stores 32b per channel: FP16 scale in bits 31:16 and FP16 bias in bits
  15:0.
* It computes floor(psum·scale + bias) exactly in fixed point with 24 fraction bits.
* The result is clamped to [0,255] with ReLU, or [−128,127] without.
* Programming ports (`prog_*`, `cfg_*`, `c_*`, `q_*`) load devices, slicings, centers and
  quantization parameters.

## Where this departs from the paper

* The slot order follows the figure, not the prose (see above).
* The center correction adds, despite the diagram's label.
* Flags are stored as "1 = failed" rather than as success bits.
* The psum wraps at 16b, and rounding in the quantizer is floor. Neither is specified in
  the paper.
* Signed inputs are not supported. The paper runs positive and negative inputs in two
  passes for BERT. The non-speculative "recovery only" mode is not supported either.
* Layers larger than one crossbar, psum accumulation across crossbars or tiles, the
  router and the inter-tile pipeline are outside this tile.
* Every column of a crossbar sees the same 512 inputs, so there is one input sum per
  crossbar. The paper also allows column groups with different input subsets, whose sums
  are updated while the columns stream; that case is not built.
* Analog noise is not modelled. The crossbar is an ideal integer sum of (g+ − g−) per
  pulse.
* Clock counts are in ADC-conversion clocks, not nanoseconds.

## Verification and how far to trust it

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog. The reference functions live in
`tb/raella_ref_pkg.sv` and are written separately from the RTL.

`tb_raella_tile` runs the whole tile at reduced size: 2 IMAs, 32×16 crossbars, CYC=32.
`tb_raella_tile_full` runs the same sequence at full size, with no parameter overrides.
Both share `tb/tile_test_body.svh`, which:

* picks centers;
* programs 4b-2b-2b weights;
* runs two passes of network load → multicast LOAD_IB → FEED → RUN → DRAIN with ReLU →
  POOL → SEND under random back-pressure.

The test counts each mechanism and fails if any never happened: speculation failures,
recovery conversions, exact filters, multicast, back-pressure, ReLU clamping, pooling and
input-sum subtraction. The full-size run takes about a minute in Verilator.

Random weights and inputs make speculation fail far more often than in real layers. The
tests stress recovery, not the paper's efficiency claims.

To simulate with plain Verilator, list the packages first:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/raella_pkg.sv tb/raella_ref_pkg.sv \
        $(ls rtl/*.sv | grep -v raella_pkg) tb/tb_raella_tile.sv --top-module tb_raella_tile
    ./obj_dir/Vtb_raella_tile

The RTL has these interfaces:

* `rtl/raella_pkg.sv` holds the shared types, the slot schedule (`slot_slice`) and the
  command format.
* The crossbar size, ADC count, psum entries and buffer sizes are all parameters of
  `raella_tile`.
