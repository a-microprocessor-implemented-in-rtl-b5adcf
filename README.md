# A processor with a bit-scalable in-memory matrix-vector unit

This RTL describes a small microcontroller-class processor built around one large
accelerator: a compute-in-memory unit (CIMU) that holds a matrix of up to
256 × 2304 one-bit cells and multiplies it by an input vector in place. Each
column of the array adds up the bit-wise products of its stored bits and one
bit-plane of the input as charge on capacitors. The sum is digitised, and a
digital datapath next to the array combines the results into multi-bit
products.

The array computes only 1-bit × 1-bit products. Multi-bit numbers come from two
tricks combined:

* **bit-parallel matrix:** a matrix element of B_A bits takes B_A adjacent
  columns, one bit per column;
* **bit-serial input:** an input element of B_X bits is fed one bit-plane at a
  time, over B_X passes.

Shifting and adding the digitised column sums, across columns (space) and
across passes (time), gives the full-precision result. Cost therefore grows
linearly with B_A·B_X, not exponentially.

The CPU sees the unit as ordinary memory. It writes input words and matrix
rows into an address window, writes configuration registers, starts an
operation and reads results back.

The RISC-V CPU itself is not part of this RTL. Its instruction and data ports
are ports of the top module, `cimu_soc`.

## The array and its column arithmetic

`cima` is a behavioural model of the 2304-row × 256-column array. It is
organised in 4 × 4 banks: a row bank is 576 rows and a column bank is 64
columns.

Physically the array is 768 word lines of 768 bits. Physical row `r`, bit `b`
holds logical row `3r + b/256`, column `b % 256`. A matrix is therefore loaded
in 768 row writes.

Each input row `n` is driven by a pair of active-low signals `x_n`, `xb_n`. A
cell's output is

    o = (~x_n & ~w) | (~xb_n & w)

so the pair selects what the cell contributes:

| pair (`x_n`, `xb_n`) | cell output `o` | used for |
|---|---|---|
| (1, 1) | 0 | masked row: the capacitor stays discharged |
| (x, ~x) | XNOR(w, x) | XNOR mode: bits stand for +1/−1 |
| (1, ~x) | AND(w, x) | AND mode: ordinary 0/1 bits, 2's complement numbers |

The column "voltage" is kept as an integer: `level`, the number of charged
capacitors, out of `ncap` capacitors sharing charge. `ncap` is 576 times the
number of enabled row banks.

Gated row banks neither charge nor share. Gated column banks output zero.

A compute takes 50 cycles.

## Converters

Every column has two converters:

* an 8-bit SAR ADC (`sar_adc`): `code = min(255, floor(level·256/fs))`;
* a binarizing comparator (`abn`): `out = level/ncap > dac/64`, with a 6-bit
  DAC code per column.

The ADC full scale `fs` is a register of this design, counted in capacitors.

* With `fs = 256` and at most 255 participating rows, the ADC is exact, so the
  whole unit reproduces integer arithmetic bit for bit. The testbenches rely on
  this.
* With more rows, results are quantised in the way an 8-bit ADC implies.

Both converters take 20 cycles.

## Near-memory datapath

Each `near_mem_dp` serves 8 neighbouring columns; there are 32 of them. It
takes the columns one per cycle. For column `j` it computes:

    s = adc[j] + goff + loff[j]              11-bit signed
    p = s * lscale[j]                        19-bit signed
    v = p <<< (lexp[j] + plane)              32-bit signed
    rf[j / B_A] += v                         8 × 32-bit register file

The terms are:

* `loff`, `lscale` and `lexp`: per-column configuration;
* `plane`: the input bit-plane index (the global exponent);
* `goff`: the global offset, described below.

How to program the columns:

* **AND mode (2's complement matrix):** column `k` of an element gets
  `lexp = k`. Its scale is +1, except the MSB column, which gets −1.
* **XNOR mode:** every column gets scale 2.

Entry `j/B_A` is cleared by the first column of its group on the first
bit-plane. Planes run MSB first.

On readout the datapath can apply a ReLU. When `B_X + B_A ≤ 5` it also
saturates results to 16 bits.

### Zero handling (sparsity)

In XNOR mode a bit always means +1 or −1, so a zero input cannot be written as
bits. Zero elements are therefore masked: their rows are driven (1, 1) and
contribute nothing to the charge.

A masked row still changes the XNOR arithmetic. An unmasked row contributes
`2·XNOR − 1`, and summing over the `U` unmasked rows gives

    2·level − U

The datapath supplies the `−U` part through the global offset:

    goff = sat9(global_offset − ((U · offset_gain) >> 8))

`U` is counted by the sparsity controller. With `offset_gain = 128` and
`lscale = 2`, masked rows count as zero. `U` must be even for the halving to be
exact.

How the count becomes an offset is this design's own formula.

## Feeding the input vector

### The reshaping buffer

`w2b_buffer` accepts 32-bit words. Each byte carries `floor(8/B_X)` elements in
its low bits, so with B_X = 1 a 2304-element vector takes 72 words.

Elements are unpacked on arrival into one of two banks:

* element `n` goes to register file `n/288`, entry `n % 288`;
* the CPU (or the DMA) fills one bank while the array reads the other;
* a swap command exchanges the banks.

Readout is one bit-plane at a time: 4 chunks of 72 bits from each of the 8
files, each bit with its mask bit. The mask is set for:

* padding elements, `n ≥ N`;
* zero elements, when sparsity is on.

**Convolution striding.** The shift command copies the compute bank into the
fill bank rotated by `SHIFT` entries per file. The oldest entries drop out, and
only the new tail of each file has to be written. Rotation is by an index
offset on a barrel-rotated readout.

### The sparsity controller

`sparsity_ctrl` latches the chunks into 2304-bit data and mask buffers. It then
drives the `x_n`/`xb_n` pairs from the table above and counts the unmasked rows
in the enabled banks.

## Running one operation

`cimu_seq` runs each bit-plane through four phases:

| phase | cycles |
|---|---|
| load sparsity buffers | 4 |
| array compute | 50 |
| ADC/ABN conversion | 20 |
| datapath pass | 8 |

A plane takes 86 cycles, and an operation takes `1 + 86·B_X` cycles. This count
is checked by the testbenches and can be read from the `CYCLES` register.

The phases do not overlap, between or within planes. Per bit of input
precision this comes to about 86 cycles, in line with the chip's published
cycle counts. For a full 2304 × 256 one-bit operation at 100 MHz that is about
1.4 1-bit TOPS. The chip's quoted peak figure is 4.7; how that figure counts
operations is not known here.

Matrix rows go through `mem_rw_if`:

* it collects 24 words into a 768-bit row;
* writing the last word of a row starts a 20-cycle row write;
* bus accesses made during a row write wait;
* a read fetches the whole row (20 cycles), then answers from the buffer.

`row_decoder` turns the row address into one-hot word lines.

### Programming interface

CIMU data window (offsets within `0x2000_0000`):

| offset | access |
|---|---|
| `0x00000` | write input words; a read returns how many elements the fill bank holds |
| `0x40000` | matrix words, word index = physical row × 24 + word |
| `0x80000` | results |

Results are laid out as follows:

* **ABN mode:** bit `i` of word `w` is column `32w + i`.
* **Otherwise:** result `r` comes from datapath `r / (8/B_A)`, entry
  `r % (8/B_A)`. With 16-bit outputs, two results share a word, the
  even-numbered one in the low half.

Configuration registers are on APB at `0x3000_0000`. They are listed in the
opening comment of `rtl/cimu_cfg.sv`:

* command/status;
* mode (AND/XNOR, ABN, ReLU, sparsity, B_X, B_A, bank enables);
* N, ADC full scale, offset and gain, shift, cycle count;
* per column: local offset, scale, exponent and DAC code.

A typical operation:

1. Set `MODE.bx`.
2. Restart filling (`CMD` bit 3).
3. Write (or DMA) the input words.
4. Swap (`CMD` bit 1).
5. Configure the mode and columns.
6. Start (`CMD` bit 0).
7. Wait for `irq[0]` or `CMD` bit 1.
8. Read the results.

## The processor around it

`cimu_soc` connects the parts as follows.

* **Memories:** a 128 kB program memory, `pmem`, with a separate instruction
  port; and a 128 kB data memory, `dmem`.
* **Masters:** a two-channel DMA, `dma`, and the CPU's data port.
* **Interconnect:** a shared bus, `sys_bus`, with fixed priority (DMA first).
  It reaches:
  * program memory (`0x0…`);
  * data memory (`0x1…`);
  * the CIMU window (`0x2…`);
  * the APB bridge (`0x3…`);
  * external memory (`0x4…` and up), which leaves the chip as a port.
* **APB peripherals:** the APB bridge, `apb_bridge`, decodes address bits
  [15:12]:
  * 0: CIMU configuration
  * 1: DMA
  * 2: `timer`
  * 3: `gpio`
  * 4: `uart`
* **Boot:** after reset, `bootloader` reads an 8 kB image from a parallel
  E2PROM (13-bit address, 8-bit data) into program memory. Only then does it
  raise `cpu_rst_n`.
* **Interrupts:** `irq = {timer, DMA, CIMU done}`.

The bus is a simplified valid/ready protocol:

* a master holds `valid` until `ready`;
* read data comes with `ready`;
* memories answer reads one cycle after the request.

The chip uses AXI here. Bursts, IDs and parallel channels are not modelled.

## Where this departs from the chip

* The CPU, the external DRAM interface and the bit cell's circuit are not
  included. The CPU and external memory are ports; the cell's function lives
  in `cima`.
* `cima`, `sar_adc` and `abn` are behavioural models of analog circuits. They
  are ideal: there is no noise, offset or nonlinearity.
* These are this design's own choices:
  * the pair encoding table;
  * the charge model;
  * the programmable ADC full scale;
  * the sparsity-offset formula;
  * all register maps and address maps;
  * the element packing;
  * the row mapping.
* Phases run strictly in sequence (see above).
* A DMA word transfer is a bus read followed by a bus write, about 3-4 cycles.
  The chip quotes about one cycle per transfer.
* The w2b input staging buffer is folded into the register files. The chip's
  96-bit shifted readout is replaced by an index rotation.
* The bus is not AXI.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`. Example:

    verilator --binary --timing --assert -Irtl -Itb rtl/cimu_pkg.sv rtl/*.sv tb/tb_cimu.sv --top-module tb_cimu
    ./obj_dir/Vtb_cimu

What the main testbenches cover:

* **`tb_cimu`** runs the unit at 96 × 32 and compares every result with an
  integer model. It covers AND and XNOR at several precisions, sparsity, ABN,
  ReLU, bank gating, convolution shift, 16- and 32-bit outputs and cycle
  counts.
* **`tb_cimu_soc`** runs the whole processor at its full default size. It
  covers boot, instruction fetch, matrix loading by DMA under CPU bus traffic
  with row-write stalls, and AND 4b/4b, XNOR-with-sparsity and ABN layers
  checked against a model. It also covers a convolution shift, the timer,
  GPIO, UART and external memory. It counts each of these mechanisms and
  fails if one never occurs. It takes well under a minute to build and
  seconds to run.

Only the first 96 input rows take part in the full-size test; `N` masks the
rest.
