# A multiplier-free convolution engine using distributed arithmetic

This RTL computes the first convolution layer of LeNet-5 without a single
multiplier and without analog-to-digital converters. It follows the
in-memory vector-matrix multiplication (VMM) scheme of Zeller, Reuben and Fey,
"Multiplier-free In-Memory Vector-Matrix Multiplication Using Distributed
Arithmetic". In that scheme every possible sum of the weights is computed once
and stored in a non-volatile (ReRAM) memory. Each product is then built from
memory reads, adders and a shift register. This is an independent
implementation of that scheme, not the authors' code. It does not model the
analog parts (ReRAM cells, sense amplifiers, write drivers); it models their
logical behaviour.

## 1. The idea: distributed arithmetic

A neuron or a convolution output is an inner product `Y = sum_i X_i * W_i`.
The weights `W_i` are fixed after training, and the inputs `X_i` are unsigned
B-bit pixels. Write each input as bits, `X_i = sum_k 2^k x_i,k`, and swap the
two sums:

    Y = sum_k 2^k * ( sum_i x_i,k * W_i ) = sum_k 2^k * T[ x_1,k x_2,k ... x_N,k ]

`T[a]` is the sum of those weights whose address bit is set in `a`. It depends
only on the weights, so it can be tabulated once in a memory with 2^N rows. A
product then takes B steps. In step k the bit plane k of all the inputs is
used as a memory address. The value read out (MR, "memory read-out") is added
to the running sum shifted left by one: `IS <= MR + 2*IS`, with the most
significant plane first. After B steps, IS is Y.

A matrix works the same way. A memory row holds `T[a]` for every column of the
weight matrix side by side. One read therefore serves all the outputs at once,
and the latency (B = 8 cycles) does not depend on the number of columns.

Address convention: address bit `i-1` selects input `X_i`. So address `0001`
holds `w_1`, `0010` holds `w_2` and `0011` holds `w_1 + w_2`.

## 2. The configuration built: LeNet-5 CONV1

| quantity | value |
|---|---|
| input image | 32 x 32, unsigned 8-bit |
| filters | 6 of 5 x 5, signed 8-bit (INT8) |
| one VMM | 1x25 window vector times 25x6 weight matrix |
| VMMs per layer | 28 x 28 = 784 (stride 1, no padding) |
| outputs | 6 maps of 28 x 28, 21-bit two's complement |

A table with 2^25 rows is impossible. The 25 inputs are therefore split into
three slices, and each slice gets its own processing memory array (PMA):

| PMA | inputs | rows | row width |
|---|---|---|---|
| PMA-1 | X1..X8 | 256 | 6 x 11 bits = 66 |
| PMA-2 | X9..X16 | 256 | 66 |
| PMA-3 | X17..X25 | 512 | 66 |

All three PMAs are read with the same bit plane. Their read-outs are added per
column before the add-and-shift step. The sum of 8 INT8 weights needs
8 + log2(8) = 11 bits, and the merge needs a 12-bit adder (MR1 + MR2) and then
a 13-bit adder (+ MR3). The accumulator is 21 bits wide, because
|Y| <= 255 * 25 * 128 = 816,000 < 2^20.

**Caveat on PMA-3.** PMA-3 sums nine weights, and nine INT8 weights can add up
to between -1152 and +1143. That range does not fit in 11 bits. The original
design still gives PMA-3 the same 66 columns (11 bits per output), and this
RTL keeps that width. A PMA-3 sum outside -1024..1023 therefore wraps, and the
result for that filter is then wrong. Trained LeNet filters are far from this
limit. The filter printed with the original work has a largest nine-weight
positive sum of 357. To remove the limit, widen the PMA-3 words to 12 bits;
the 13-bit adder already has room for the result.

## 3. Block diagram

```
 host: weights ──► weight_summation ──(pre-VMM row writes, once)──┐
                   (one serial 11-bit accumulator)                │
                                                                  ▼
 host: image ──► image_memory ──px──► input_buffer ── xbits[7:0] ───► PMA-1 256x66 ─MR1─┐
                 (in / out maps)      (5x5 registers,─ xbits[15:8] ──► PMA-2 256x66 ─MR2─┤
                     ▲                 bit plane k)  ─ xbits[24:16]─D─► PMA-3 512x66 ─MR3─┤
                     │                                                                   ▼
                     │                                  6 x column_adder: 12-bit LF + reg,
                     │                                                    13-bit LF + reg
                     │                                                                   ▼
                     └────────── Y1..Y6 ◄── 6 x add_shift: IS <= MR + (IS << 1), 21-bit LF
                                         vmm_controller sequences everything
```

`D` is a one-clock delay. LF is a Ladner-Fischer parallel-prefix adder
(`lf_adder`); every adder in the engine is one.

## 4. The bit-serial pipeline (the part to read carefully)

In the circuit of the original work, one memory cycle is 10 ns. Within it,
three clocks run 1 ns and 2 ns apart. This lets a read-out pass the 12-bit
adder, the 13-bit adder and the 21-bit accumulator before the next read-out
comes. This RTL has a single clock, where one clock is one memory cycle, and
it turns each of those register points into a pipeline stage:

| clock | PMA-1/2 | PMA-3 | column_adder | add_shift |
|---|---|---|---|---|
| t | read plane k (`rd_en`) | | | |
| t+1 | MR1, MR2 registered | read plane k (`rd3_en`, delayed address) | | |
| t+2 | | MR3 registered | `s12 = MR1+MR2` registered | |
| t+3 | | | `sum = s12+MR3` registered | `acc_en`; `acc_first` on plane 7 |
| t+4 | | | | IS updated |

PMA-3 is read one clock later than the other two. This matches the original
circuit, where PMA-3 is read later to give MR1 + MR2 time to settle. Because
of the delay, MR3 and the 12-bit sum of the same plane meet at the 13-bit
adder. The eight planes (bit 7 first) are read on eight consecutive clocks. Y
is complete 11 clocks after the first read: 8 reads plus 3 pipeline stages. In
the original timing the same sequence takes 88 ns: a 15 ns first read, then
7 reads of 10 ns, then an addition of under 3 ns.

`add_shift` forms `a + b` with `a` = the 13-bit sum sign-extended to 21 bits
and `b` = IS shifted left by one, bit 0 zero. On the first plane, `b` is forced
to zero, and that starts a new product.

## 5. Pre-VMM: filling the PMAs

`weight_summation` holds the 25x6 weight matrix in registers. It sweeps PMA-1,
PMA-2 and PMA-3 in turn, each over all its addresses in ascending order and
all six columns. Each clock, it adds weight row `i` of the current column to
its one 11-bit accumulator if address bit `i` is set (otherwise it adds zero).
After 8 (or 9) clocks the column sum is done. After six columns, the 66-bit
row is written to the PMA. The sweep takes 256·6·8 + 256·6·8 + 512·6·9 =
52,224 clocks.

The original work counts 24,576 additions for this step. This sweep instead
spends one clock on every (address, column, slice row) triple, adding zero
where the address bit is clear. The count here is therefore larger, but the
table contents are the same.

This is slow by design. The step runs once: ReRAM keeps its contents, and
the weights change only when the network is retrained. Any number of images
can then be convolved with the stored sums.

## 6. Running a layer

`vmm_controller` visits the output pixels row by row. Each visit has three
steps:

1. **Fill the window.** At the start of an image row it reads all 25 pixels.
   Otherwise it slides the window one column (`shift`: every window row moves
   left) and reads only the 5 pixels of the new right-hand column. The other
   20 pixels are shared with the previous stride and stay in the buffer's
   registers. A pixel read returns data one clock later, and that data is
   written straight into the buffer.
2. **Bit cycles.** Eight clocks with `bit_sel` = 7..0. Then 3 clocks to drain
   the pipeline.
3. **Write back.** Y1..Y6 go to the output region of the image memory at
   `r*28 + c`.

One multiplication costs 38 clocks at a row start and 19 clocks otherwise.
The whole layer takes 15,428 clocks. Loading the window does not overlap with
the bit cycles; overlapping them is the obvious next speed-up.

Window positions are unrolled row-major: X1 is the top-left pixel, X5 the
top-right and X25 the bottom-right. A different unrolling only permutes the
rows of the weight matrix, which must follow the same order.

## 7. Top-level interface (`da_vmm_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of control and accumulators |
| `w_we`, `w_row`, `w_col`, `w_data` | in | 1, 5, 3, 8 | write weight W[row][col] (row 0..24 = X1..X25, col 0..5 = filter) |
| `prevmm_start` / `prevmm_done` | in / out | 1 | run the weight summation; `done` pulses 52,225 clocks after the start clock |
| `img_we`, `img_addr`, `img_data` | in | 1, 10, 8 | write pixel `row*32 + col` |
| `conv_start` / `conv_done` | in / out | 1 | run the layer; `done` pulses 15,429 clocks after the start clock |
| `busy` | out | 1 | either sequence running; starts are ignored while busy |
| `res_addr` → `res_data` | in → out | 10 → 126 | read {Y6..Y1} of output pixel `r*28 + c` (Y_j in bits `21*(j-1) +: 21`), combinational |

The memories have no reset: they model non-volatile arrays. Anything read
must have been written first.

## 8. Files

| file | content |
|---|---|
| `rtl/da_pkg.sv` | sizes of the configuration (widths, slice sizes, image size) |
| `rtl/lf_adder.sv` | W-bit Ladner-Fischer parallel-prefix adder |
| `rtl/weight_summation.sv` | pre-VMM table generator with one serial accumulator |
| `rtl/pma.sv` | processing memory array: row write, registered read (MR) |
| `rtl/input_buffer.sv` | 5x5 window registers, slide, bit-plane output |
| `rtl/column_adder.sv` | 12-bit + 13-bit merge of the three read-outs, two stages |
| `rtl/add_shift.sv` | 21-bit add-and-shift accumulator |
| `rtl/image_memory.sv` | input map (32x32x8) and output maps (784 x 6 x 21) |
| `rtl/vmm_controller.sv` | layer sequencer |
| `rtl/da_vmm_top.sv` | the engine |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Every testbench ends by printing `TB_RESULT checks=N failures=M`, and each has
a watchdog. Expected values are always computed in the testbench by direct
arithmetic: integer sums for the adders, and the plain convolution
`sum_i X_i*W_ij` for the engine. They are never taken from the design.

## 9. Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/da_pkg.sv tb/tb_da_vmm_top.sv \
          --top tb_da_vmm_top -o sim && ./obj_dir/sim
```

The package is named first; Verilator finds every other module through
`-Irtl`. Replace `tb_da_vmm_top` with any other
testbench name to test one block.

`tb_da_vmm_top` runs the engine at its full, default size. It loads six
filters. Filter 1 is a real quantized LeNet-5 filter; two filters carry the
extreme weights -128 and +127. The testbench runs the weight summation once,
then convolves two images with the stored sums and checks all 2 x 784 x 6
outputs. It also checks, for every multiplication, 8 consecutive PMA reads
and a result written 11 clocks after the first read. It checks the cycle counts above and makes sure that every
mechanism occurs at least once:

- full and sliding window loads;
- the 9th address bit of PMA-3;
- negative weight sums;
- negative results and results beyond 2^19;
- reuse of stored sums across layers.

It takes about 10 s.

## 10. How far this follows the original design

Taken from the original work:

- the distributed-arithmetic principle and the address convention;
- the split into PMAs of 256, 256 and 512 rows by 66 columns;
- MSB-first bit-serial addressing, 8 cycles per product;
- the 11/12/13/21-bit adder widths and the sign extension of read-outs
  (the upper adder inputs copy the read-out's sign bit);
- Ladner-Fischer adders throughout, and the add-and-shift structure;
- PMA-3 read one step after PMA-1/2, with registers after each adder;
- a single serial 11-bit accumulator for the weight sums;
- a register buffer that keeps the pixels shared by adjacent strides;
- results written back to the image memory;
- 784 VMMs per layer.

The hardware count matches the original's own tally for this configuration:

- 3 x 66 = 198 read-out bits, one per sense amplifier;
- six 12-bit, six 13-bit and six 21-bit adders;
- 2 x 256 x 66 + 512 x 66 = 67,584 stored bits.

Choices made here, where the original is silent:

- one clock instead of three skewed clocks. The register stages are the same,
  but they become pipeline stages, so one product takes 11 clocks rather than
  8 memory cycles plus a short final addition;
- the controller state machine, with window loading not overlapped with
  computation;
- the image-memory organisation: one pixel per read, one six-result word per
  write, outputs kept at 21 bits (re-quantization for the next layer is not
  specified);
- row-major unrolling of the window, and the slide direction;
- how the accumulator starts a new product (a `first` flag forces the shifted
  feedback to zero);
- the host ports for weights, image and results;
- resets on control state and accumulators only.

Not modelled:

- the 1T-1R ReRAM cells;
- bit-line precharge and discharge, the transmission gate, and the
  latch-type sense amplifier (V_REF = 175 mV, 5 ns phases);
- the BL/SL multiplexers and the SET/RESET voltage drivers used to program
  the cells;
- the generation of the skewed clock phases.

In the RTL, each array is a register array. A programming operation is one
row write, and a sensing operation is one registered read. Energy, latency in
nanoseconds and area are properties of those analog circuits and cannot be
checked at this level.

## 11. Changing it

- Sizes live in `rtl/da_pkg.sv`. The modules take them as parameters
  (`pma #(ADDR_W, NCOL, MR_W)`, `lf_adder #(W)`, `add_shift #(IN_W, ACC_W)`).
- The top and the controller assume three slices and 5x5 windows. A different
  matrix height needs a different number of PMAs and one more adder stage per
  extra PMA.
- More filters only widen the PMA rows and add column adders and add-shift
  units; latency does not change.
- Wider pixels need more bit cycles (`bit_sel`) and a wider accumulator.
