# A precision-scalable process-in-memory MAC tile

A network quantized with activation-density based training ends up with a
different bit-width in every layer: 16 bits in the first and last layers,
often only 2 to 5 bits in between (for example, VGG19 on CIFAR-10 settles at
`[16, 4, 5, 4, 3, 2, 2, 2, 3, 3, 3, 4, 3, 3, 3, 3, 16]`). Such a network only
saves energy if the hardware can run each layer at its own, lower precision
without building a separate multiplier per width. This RTL describes a
process-in-memory (PIM) tile that does that. Weights sit bit by bit in an
array of 1-bit SRAM-and-multiply cells. Activations enter one bit at a time.
The precision is set entirely by how far a small tree of shift-and-add
accumulators combines the column results. The same array serves 2-, 4-, 8-
and 16-bit layers. A lower precision uses fewer cycles and fewer accumulator
levels.

The tile has three sections: an input decoder, the PIM block and the
shift-accumulator block. The tree has four ACC4 units, two ACC8 units and one
ACC16 unit. Both the sections and the tree are the published architecture.
The following are this implementation's own choices, made where the
architecture description leaves the details open:

- the bit-serial input order;
- the weight layout in the columns;
- the register widths;
- the control sequence and handshake.

Each choice is described below. The published work also contains the
quantization-training method and energy figures for a 45 nm implementation.
Neither is hardware that can be written as RTL, so neither is part of this
code.

## Supported precisions and rounding

The tile supports exactly four data precisions: 2, 4, 8 and 16 bits. These
apply to weights and activations alike. `precision_mapper` turns a layer's
trained bit-width `k_l` into one of them by rounding up:

| k_l     | runs as | result level | results per operation |
|---------|---------|--------------|-----------------------|
| 0       | –       | bypass (`done_skip`) | none |
| 1–2     | 2-bit   | ACC4,1..4    | 4 |
| 3–4     | 4-bit   | ACC4,1..4    | 4 |
| 5–8     | 8-bit   | ACC8,1..2    | 2 |
| 9–16    | 16-bit  | ACC16,1      | 1 |
| 17–31   | –       | rejected (`unsupported`, `done_skip`) | none |

`k_l = 0` marks a layer that training removed entirely. Widths above 16 bits
do occur in some of the evaluated ResNet18/TinyImagenet layer lists (17, 18,
22 and 24 bits). This tile cannot run them and reports them instead of
truncating.

All operands are unsigned integers, as produced by the k-bit quantizer
`x_q = round((x - x_min) * (2^k - 1) / (x_max - x_min))`.

## How a multi-bit MAC is built from 1-bit cells

The PIM block (`pim_array`) has `ROWS` rows and 16 columns of `pim_cell`s.
Each cell stores one weight bit and outputs the AND of that bit with the input
bit of its row. Each column's products are summed into a small count,
`col_sum[c]`: the number of rows in which both the input bit and the weight
bit are one.

**Weights live in the columns.** Row `r` holds the weights that multiply
activation `r`. Bit `j` of a weight is in column `j` of its column slice.
How the 16 columns are split depends on the precision:

```
columns   15..12  11..8   7..4    3..0
2/4-bit   w3      w2      w1      w0      four independent weights (2-bit ones zero-extended)
8-bit     w1 (8 bits)     w0 (8 bits)     two weights
16-bit    w0 (16 bits)                    one weight
```

**Activations arrive bit-serially.** `input_decoder` captures all `ROWS`
activations at once. In the following `P` cycles it drives bit-plane
`t = 0 .. P-1`, least significant bit first, onto the rows. A row whose bit in
`row_en` is clear is held at zero for the whole operation. This is how a
pruned input channel is skipped.

**The shift-accumulator tree weighs everything.** For each of its four columns
`j`, an ACC4 unit adds `col_sum << j`. The sum is then shifted by the
bit-plane index `t` and accumulated:

```
ACC4,i  = sum over t of 2^t * sum over j<4 of 2^j * col_sum[4i+j](t)
        = sum over r of a_r * W_r[4i+3:4i]
ACC8,k  = ACC4,2k-1 + (ACC4,2k << 4)   = sum_r a_r * W_r[8k-1:8k-8]
ACC16,1 = ACC8,1    + (ACC8,2 << 8)    = sum_r a_r * W_r[15:0]
```

The ACC4 values are already complete dot products for weights up to 4 bits.
For 8-bit weights, the two ACC8 units join pairs of 4-bit slices. For 16-bit
weights, ACC16 joins the two ACC8 results. Only the levels a precision needs
are clocked. In the figure of the published tile, results are forwarded on
blue lines from the ACC4 level, red from ACC8 and green from ACC16. They are
labelled 4b, 8b and 16b, which here is the weight width each level covers. The
registers themselves are wider, so that a full dot product never overflows:

| level | width (bits)               | ROWS = 8 |
|-------|----------------------------|----------|
| ACC4  | clog2(ROWS+1) + 4 + 16     | 24 |
| ACC8  | clog2(ROWS+1) + 8 + 16     | 28 |
| ACC16 | clog2(ROWS+1) + 16 + 16    | 36 |

There is one discrepancy in the published description. It says a 4-bit layer
is combined into ACC8. Taken literally, that would leave no level for 16-bit
data, which the architecture is also stated to support. This implementation
keeps all four precisions: a 4-bit layer finishes in ACC4. A 2-bit layer
finishes in ACC4 in either reading.

## One operation, cycle by cycle

`pim_controller` runs this sequence, where `P` is the precision in bits:

| state  | cycles | what happens |
|--------|--------|--------------|
| IDLE   | –      | weights may be written, one row per cycle (`w_we`, `w_addr`, `w_data`) |
| LOAD   | 1      | the decoder captures `act_in` and `row_en`; all accumulators clear |
| BITS   | P      | bit-plane t on the rows; ACC4 += weighted column sums << t |
| COMB8  | 1      | ACC8 ← ACC4 pairs (8- and 16-bit only) |
| COMB16 | 1      | ACC16 ← ACC8 pair (16-bit only) |
| DONE   | 1      | `done` pulses; `valid4`, `valid8` or `valid16` rises |

`start` is a one-cycle pulse, accepted only in IDLE. The tile samples
`k_bits` in the start cycle. It samples `act_in` and `row_en` in the following
cycle (LOAD), so hold them until `busy` is seen high. `done` comes `P + 2`
cycles after start for 2 and 4 bits, `P + 3` for 8 bits and `P + 4` for
16 bits. That is 4, 6, 11 and 20 cycles. A bypassed or rejected layer
finishes one cycle after start, with `done_skip`. Results and the valid flag
stay until the next start. Weight writes are ignored while `busy` is high.

Throughput per operation follows directly. A 2-bit layer gives four dot
products in 4 cycles. A 16-bit layer gives one dot product in 20 cycles. The
gap between the two is the energy and time saving the quantization aims at.

## Module map

| file | role |
|------|------|
| `rtl/pim_pkg.sv` | precision enum `prec_e`, tile constants, `prec_bits()` |
| `rtl/precision_mapper.sv` | k_l → supported precision, removed/too-wide flags |
| `rtl/input_decoder.sv` | activation capture, bit-serial row drive, row mask |
| `rtl/pim_cell.sv` | 1-bit SRAM-and-multiply cell |
| `rtl/pim_array.sv` | ROWS × 16 cell array, row write port, column sums |
| `rtl/shift_accumulator.sv` | ACC4 ×4 → ACC8 ×2 → ACC16 tree |
| `rtl/pim_controller.sv` | operation sequencer |
| `rtl/pim_accelerator.sv` | top: one tile |

The top has one parameter, `ROWS` (default 8). The published figure draws
eight rows, but no row count is stated anywhere, so treat 8 as a placeholder.
All widths follow from `ROWS`, and any value from 1 upward elaborates. The
16 columns and the 4/2/1 accumulator counts are fixed by the architecture and
live in `pim_pkg`.

## What is modelled and what is not

- **Cells.** The SRAM cell is a write-enabled flip-flop without reset, and its
  multiply is a gate. The real cell is a custom 45 nm circuit, and no
  transistor-level behaviour is modelled. Cells must be written before they
  are read.
- **Column read-out.** It is a digital population count. The published
  description does not say how column products are summed, whether by analog
  bit-line and converter or digitally.
- **A single tile.** The architecture feeds "the PIM block of layer l" from
  layer l−1 and is called scalable. No tile count, activation buffers,
  inter-tile interconnect or mapping of large layers is described, so none is
  built. Real layers are far larger than one tile. VGG19 alone has about
  20 million 3×3 convolution weights, against 8 × 16 = 128 weight bits here.
  A system would tile them over many arrays or time-multiplex this one. Until
  then, the top's activation inputs and result outputs are the boundary.
- **Signed data** is not supported; see the quantizer above.
- **Energy.** The published energy per MAC (about 2.9 fJ at 2 bits up to
  277 fJ at 16 bits, in 45 nm) belongs to the circuit and is not reproduced
  by RTL.

## Testbenches

Every testbench is self-checking. Each computes expected values with plain
integer arithmetic, has a cycle watchdog, and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_precision_mapper` | all 32 values of k_l against the rounding table |
| `tb_input_decoder` | bit-plane order, hold on idle cycles, row mask, inputs changing after load |
| `tb_pim_cell` | AND product, write enable |
| `tb_pim_array` | column sums for random weights and inputs, including the maximum, row rewrites |
| `tb_shift_accumulator` | every level after every step against the formulas above, including the largest possible values |
| `tb_pim_controller` | strobe counts, bit-plane order and latency per precision, bypass, start while busy ignored |
| `tb_pim_accelerator` | the whole tile at its default size (k_l = 0..24, full and pruned row masks, all-ones extremes) |
| `tb_layer_sequence` | layer-by-layer bit-width lists of the evaluated networks |

`tb_pim_accelerator` also counts how often each mechanism happened and fails
if any never did. The mechanisms are: each precision, rounding, bypass,
rejection, pruned rows, and a write attempted while busy.

`tb_layer_sequence` runs VGG19/CIFAR-10 and ResNet18/CIFAR-100 and
TinyImagenet, each with and without pruning, plus a 16-bit baseline. Each
layer is one checked operation with random data. For each network it prints
the number of layers rejected as wider than 16 bits and the tile cycles
spent.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pim_pkg.sv tb/tb_pim_accelerator.sv --top-module tb_pim_accelerator
./obj_dir/Vtb_pim_accelerator
```

Replace the testbench name to run another; each finishes in well under a
second. To try a different array height, change `ROWS` on the top. The
end-to-end testbenches derive all their expectations from their own `ROWS`
localparam, so set it to match.
