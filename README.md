# Newton tile: crossbar in-situ multiply-accumulate with adaptive ADCs

Analog crossbar accelerators store neural-network weights as memristor
conductances and obtain dot products as bitline currents. The weights never
move, so the dominant cost is not data movement but the analog-to-digital
conversion of every bitline reading. The Newton organisation attacks that cost
in three ways, all of which are built here:

* **Adaptive ADC resolution.** Most bits of most readings either fall below the
  LSBs that the fixed-point scaling drops or above the bits that only cause
  saturation. The SAR ADC is told, per reading, which bits can matter and
  resolves only those, after one extra comparison that detects saturation.
* **Karatsuba split of the 16x16-bit multiply** into three 8/9-bit
  sub-products, so fewer crossbar-iterations need an ADC.
* **Strassen's 7-product form** of a 2x2 block matrix product, mapped onto
  seven IMAs of a tile and finished by the tile adders.

Around these sits a tile: an input buffer, sixteen compute units (IMAs), a
controller and a result stream. The RTL describes one tile; the chip-level mesh
of tiles, its routers and off-chip links are not part of it.

## Number format and the bit-slicing that everything depends on

Inputs and weights are unsigned 16-bit values. A weight is cut into eight 2-bit
slices; slice *s* (significance 2^(2s)) lives in a crossbar cell of mat *s*.
An input is applied one bit per iteration through 1-bit DACs, LSB first, so a
full product takes 16 iterations. In iteration *i* a bitline of mat *s* reads

    v(s,i) = sum over 128 rows of  input_bit_i(row) * cell(row)      (0..384, 9 bits)

and that reading carries weight 2^(2s+i). The exact dot product is

    D = sum over s, i of  v(s,i) * 2^(2s+i)                         (up to 39 bits)

The 16-bit output is `D[25:10]`: ten LSBs are dropped by the scaling factor and
any set bit in `D[38:26]` saturates the output to `0xFFFF`.

## Adaptive ADC windows

Reading bit *p* of v(s,i) lands on result bit 2s+i+p. Only result bits 10..25
survive, so only reading bits

    lo  = max(0, 10 - (2s+i))          top = min(9, 26 - (2s+i))

are resolved (bits lo .. top-1). If top < 9, bits above the window exist; since
all contributions are non-negative, any of them being set means D >= 2^26, so
the ADC first compares the reading with 2^top and, if it is not below,
reports overflow and stops. The overflow flags travel up the HTree with the
data and force `0xFFFF`. `adc_window` computes the window; its grid of resolved
bits per slice and iteration ranges from 0 to 9 and reproduces the published
table. Over random data this saves roughly a quarter to a third of the SAR
comparisons (printed by `tb_ima`).

Dropped LSBs are truncated per reading, not rounded, so STD-mode results can be
slightly below `floor(D / 2^10)`: the carries that the dropped bits of many
readings would have produced are lost. The testbenches model this
exactly; a rounding scheme would be a change to `tunable_sar_adc` and the
reference models.

## Inside an IMA

```
                 In Reg (128 x 16 bit)          Out Reg (256 x 40-bit accumulators)
                        |                                  ^
        row bits (1 per iteration, per mat)                |  root << i
                        v                                  |
   mat0 mat1  mat2 mat3   mat4 mat5  mat6 mat7        +-- S+A (<<8) --+
     \  /       \  /        \  /       \  /           |               |
    S+A<<2     S+A<<2      S+A<<2     S+A<<2       S+A(<<4)        S+A(<<4)
```

A mat holds two crossbars (four in classifier tiles) that share the DAC row
drive and one tunable ADC behind a 128:1 bitline multiplexer per crossbar and
a 2:1 (4:1) crossbar multiplexer. The HTree's shift-and-add nodes shift by 2,
4 and 8 so the root delivers the full-weight column product of one input bit;
the output register adds it shifted by the iteration number.

**STD mode** (16 iterations, 256 neurons): crossbar *x* of mat *s* holds slice
*s* of neurons 128x .. 128x+127. Every iteration drives the same input bit into
all mats, then converts 128 bitlines of each crossbar in turn with the adaptive
windows.

**KARATSUBA mode** (17 iterations, 128 neurons). Write W = 2^8 W1 + W0 and
X = 2^8 X1 + X0. Then

    W X = 2^16 W1X1 + 2^8 ((W1+W0)(X1+X0) - W1X1 - W0X0) + W0X0

Placement: crossbar 0 of mats 0-3 holds W0, crossbar 0 of mats 4-7 holds W1,
crossbar 1 of mats 0-4 holds the 9-bit W0+W1 (five slices), crossbar 1 of
mats 5-7 is unused. Iterations 0-7 send X0 bits to mats 0-3 and X1 bits to
mats 4-7 at the same time; the two middle HTree nodes then give the W0X0 and
W1X1 terms separately. Iterations 8-16 send the bits of X0+X1, produced
bit-serially by 128 one-bit full adders (`serial_preadder`), to mats 0-4 and
the root gives the middle term. The output register keeps the three
sub-products and combines them when read. Because two terms are subtracted,
the saturation shortcut of the adaptive ADC is not valid here and the ADCs
run at full 9-bit resolution; the result is the exact D scaled and clamped.

Note that the often-quoted closed form with a (2^16 - 1) W1X1 coefficient is
not an identity; the correct coefficient is 2^16 - 2^8, which is what the
form above gives.

**Timing.** One iteration = one cycle to drive rows and sample, then ADC slots
of `SLOT_CYC` cycles (default 11: one SAR comparison per cycle, at most nine,
plus start and readout). An ADC that needs fewer comparisons idles (is gated)
for the rest of its slot, so throughput does not depend on data:

| mode | cycles from `start` to `done` (default XPM = 2, SLOT_CYC = 11) |
|------|-----|
| STD | 16 x (1 + 2 x 128 x 11) + 1 = 45 073 |
| KARATSUBA | 17 x (1 + 128 x 11) + 1 = 23 954 |

In STD mode with two crossbars per mat the shared ADC converts 256 bitlines
per iteration; this is a choice of this RTL (one ADC per mat as drawn, and 256
neurons per IMA as specified, do not leave another option without doubling
the ADC rate).

## The tile

`newton_tile` (the top) holds a 16 KB buffer (8192 x 16-bit words), 16 IMAs,
a loader, a write-back engine and the Strassen adders.

* **Network in** (`in_valid/in_ready/in_addr/in_data`): neuron values written
  into the buffer. `in_ready` drops while a local write-back uses the buffer's
  write port.
* **Command** (`cmd_*`, valid/ready): run IMA `cmd_ima` in `cmd_mode` on the
  128 words at `cmd_in_addr`, sending results to addresses from
  `cmd_out_addr`; with `cmd_local` the results are also written into this
  tile's buffer. A command is held off (`cmd_ready` low) while its IMA is busy
  or its results are not yet out. The loader copies 128 words in ~130
  cycles, after which the IMA runs on its own and the loader can start the
  next IMA, so all 16 can compute at once. There is no check for data
  hazards between a running job's local results and a later command that
  reads them: issue such a command after the results have been seen on the
  output stream.
* **Strassen command** (`cmd_strassen`): IMAs `cmd_ima` .. `cmd_ima+6` are
  loaded from seven consecutive 128-word blocks (the X operand of P0..P6) and
  run in STD mode; their weights must hold the seven weight combinations.
  When all seven are done, the output stream carries Y00, Y01, Y10, Y11 (256
  signed values each) from `strassen_adders`. The crossbar datapath is
  unsigned, so every weight and input combination (for example X01 - X11) must
  be non-negative; handling signed operands is not designed. The adders' input
  combination outputs are therefore not used inside the tile, and the X
  operands are prepared by whoever fills the buffer.
* **Network out** (`out_valid/out_ready/out_addr/out_data`): one result per
  cycle, 19-bit signed (16-bit unsigned results are zero-extended).

A classifier (fully-connected) tile is the same module with `XPM = 4` (four
crossbars per ADC, 512 neurons per IMA in STD mode), `BUF_WORDS = 2048` (4 KB)
and a larger `SLOT_CYC` for its slower ADC.

## What is modelled, not built

`xbar` is a behavioural model of the analog crossbar, DACs and
sample-and-hold: ideal conductances, no noise or IR drop. It keeps the sampled
row drive and computes the selected bitline's level on demand, which is the
same information a real sample-and-hold keeps as long as cells are not
reprogrammed between sampling and conversion. Cells are programmed one
bitline (128 cells) per cycle (`wr_col`/`wr_cells` in the IMA, `pw_*` in the
tile), so each crossbar's storage is a one-write, one-read memory of 128
words; the programming interface is this design's own. `tunable_sar_adc` is the SAR
logic with an ideal comparator (the held level is represented by its ideal
code). The buffer is a plain memory array (no eDRAM refresh). Pooling,
sigmoid, the router and the chip's serial links are not included; the tile's
streams are where they would attach.

## Files

| file | content |
|------|---------|
| `rtl/newton_pkg.sv` | sizes, mode enum, ADC setting struct, window function |
| `rtl/xbar.sv` | crossbar + DAC + S+H + bitline mux (behavioural) |
| `rtl/tunable_sar_adc.sv` | adaptive-resolution SAR ADC |
| `rtl/adc_window.sv` | window/resolution for a slice and iteration |
| `rtl/mat.sv` | crossbars sharing a DAC and an ADC |
| `rtl/shift_add.sv` | HTree shift-and-add node |
| `rtl/serial_preadder.sv` | bit-serial X0 + X1 |
| `rtl/ima.sv` | IMA: mats, HTree, registers, STD/KARATSUBA sequencing |
| `rtl/edram_buffer.sv` | tile buffer |
| `rtl/strassen_adders.sv` | Strassen pre/post adders |
| `rtl/newton_tile.sv` | tile top |

Each `tb/tb_<module>.sv` is a self-checking testbench that prints
`TB_RESULT checks=N failures=M`. The reference models in the testbenches are
written independently of the RTL (the window rule, for instance, is written
out again), and `tb_adc_window` holds the published resolution grid.
`tb_ima` includes a KARATSUBA case whose high halves are small but nonzero,
so the combine of the three sub-products is seen in unsaturated outputs.
`tb_newton_tile` runs the tile at full size: five overlapping jobs (STD,
KARATSUBA, saturating STD, a Strassen group, and a job that consumes locally
written results), with random output back-pressure and competing network
writes, and fails if any of those mechanisms never occurs.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/newton_pkg.sv tb/tb_newton_tile.sv \
              --top-module tb_newton_tile -o sim && ./obj_dir/sim

Replace `newton_tile` by any other module name for its unit test. The full
tile test simulates about 140 000 cycles and takes seconds; `tb_ima` runs both
modes at full IMA size.

## Where this RTL departs from, or adds to, the published description

* 9-bit ADC readings (the grid of resolved bits goes up to 9), although an
  8-bit ADC is also quoted, which assumes an extra encoding trick not described.
* HTree node widths are exact (12, 17, 26 bits) rather than the quoted 11 and
  13.
* 16 IMAs per tile as specified; a figure of the Strassen mapping draws eight.
* Truncation instead of rounding of dropped LSBs (see above).
* Full ADC resolution in KARATSUBA mode.
* Cycle-level schedule, command format, handshakes, local write-back and the
  Strassen command are this design's own.
* Unsigned arithmetic throughout; signed weights and inputs are not handled.
