# Membrane: bank-level filtering in DDR4 DRAM

Analytical database queries spend much of their time scanning columns and
evaluating `WHERE` predicates, and most of the data scanned is thrown away. This
design moves that filtering into the DRAM chips. Next to every DRAM bank sits a
small **Bank-level Filtering Unit (BFU)**. It compares each 64-bit column word
read from its bank with one or two predicate values and writes a result bitmap
(one bit per value) back into the same bank. The CPU then reads only the bitmap.

A memory controller drives all BFUs of a channel in lockstep with ordinary DDR4
commands. It switches the chips into an *All-Bank* (AB) mode, opens one row in
every bank, and steps through the row's columns with READ commands. Each READ
makes every bank of every chip of every rank filter one 64-bit word. No data
crosses the memory bus. With the default configuration (8 channels × 4 ranks ×
8 chips × 16 banks = 4096 BFUs, 128 columns of 64 bits per row), one filter
pass covers a 4 MB page of the column in 1073 memory-clock cycles from
activate to completion.

The RTL covers the BFU, the chip-level command logic, the memory controller
with its cache De-interleaving Unit, and a top level that wires up the whole
memory system. The DRAM cell arrays, the CPU and its caches are outside it. The
top exposes one port per bank for the cell array.

## Files

| File | Module | Role |
|---|---|---|
| `rtl/membrane_pkg.sv` | package | widths, enums, command/request structs, register map |
| `rtl/membrane_rcb.sv` | `membrane_rcb` | Reconfigurable Comparator Block (SIMD compare) |
| `rtl/membrane_pimconf.sv` | `membrane_pimconf` | PIMCONF configuration registers |
| `rtl/membrane_bitmap_buffer.sv` | `membrane_bitmap_buffer` | 64-bit bitmap buffer, AND gate and mux |
| `rtl/membrane_bfu_ctrl.sv` | `membrane_bfu_ctrl` | BFU control unit (pipeline, output address) |
| `rtl/membrane_bfu.sv` | `membrane_bfu` | one BFU |
| `rtl/membrane_chip.sv` | `membrane_chip` | x8 DRAM chip: mode register, decode, 16 BFUs |
| `rtl/membrane_du.sv` | `membrane_du` | cache De-interleaving Unit |
| `rtl/membrane_mc.sv` | `membrane_mc` | one channel's PIM-aware memory controller |
| `rtl/membrane_top.sv` | `membrane_top` | channels × ranks × chips |

Each file opens with a comment on its interface, timing, and which parts are
this design's own choices. Each module has a self-checking testbench
`tb/tb_<module>.sv`.

## Data layout: one value field never spans two chips

In a normal DDR4 rank of eight x8 chips, a 64-bit word of a cache line is split
across the chips, one byte per chip. A BFU inside one chip would then see only
byte slices of many words. Membrane therefore stores each 64-bit word whole
inside one chip:

* A chip delivers its 64-bit column word over 8 pins in 8 beats. Bits
  `[8t+7:8t]` of the word travel on beat `t`.
* On the channel, beat `t` carries byte `t` of the word of every chip `c`, on
  pins `[8c+7:8c]`.
* The **De-interleaving Unit** (`membrane_du`) in the memory controller collects
  the 8 beats of a cache line. It moves byte `c` of beat `t` to byte `t` of
  64-bit word `c` of the line, so word `c` is chip `c`'s column word. Writes go
  the opposite way.

The CPU sees a normal cache line whose word `c` lives entirely in chip `c`.
Software lays out a column so that consecutive 64-bit words fall in the same
chip and bank.

## The comparator block: every field width in one circuit

The Reconfigurable Comparator Block (`membrane_rcb`) is the hardest part to
read. A column word holds `floor(64/w)` packed fields of `w` bits, with `w` any
value from 2 to 64. Field `k` occupies bits `[k*w +: w]`, and field 0 is the
least significant. Fields are unsigned, signed (two's complement) or
floating-point, where the top bit is the sign. The block evaluates either
`v == a` or `a < v < b` for every field at once, and its result bit `k` belongs
to field `k`.

Building one comparator per supported width would mean 63 comparator arrays. The
block instead uses one 64-bit circuit that is cut into fields at run time.

1. **Field-boundary masks.** `lsb_m` has a 1 at the lowest bit of every field.
   It is built from the single bit `1` by six doubling steps,
   `r |= r << (w·2^s)`, skipping any step whose shift would be 64 or more.
   `msb_m = lsb_m << (w-1)` marks the top bit of every field. Bits past the last
   whole field stay outside every field and are ignored.
2. **Order-preserving keys.** Every type is mapped to an unsigned key that
   sorts in the same order as the values:
   * signed: flip the sign bit;
   * float, positive: flip the sign bit;
   * float, negative: invert all bits.

   Each bit learns the sign of its own field through a chain of multiplexers
   that runs down from bit 63 and reloads at every `msb_m` bit. The predicates
   `a` and `b` are given as right-aligned `w`-bit values. They are turned into
   keys the same way and then repeated into every field with the doubling
   method.
3. **Segmented ripple comparators.** Three chains run from bit 0 to bit 63:
   equal-so-far, greater-than-`a` and less-than-`b`. At bit `i` each chain
   either starts fresh (when `lsb_m[i]` is set) or extends the value from bit
   `i-1`. The chain's value at a field's top bit is the outcome for the whole
   field.
4. **Gather.** Result bit `j` is taken from bit `(j+1)*w-1`. Bits for `j` at or
   above the field count are 0.

The block is purely combinational: about 64 chain stages plus the doubling
shifters. The BFU registers its output.

Float comparison is an ordering on bit patterns. +0.0 and −0.0 count as
different values, and a NaN compares like any other bit pattern. The paper does
not say how those cases should behave.

## The bitmap buffer and multi-predicate AND

Each column comparison yields `floor(64/w)` result bits: 32 for `w = 2`, 4 for
16-bit values, 1 for `w ≥ 33`. The control unit (`membrane_bfu_ctrl`) appends
these bits to the 64-bit **bitmap buffer** one cycle after the read. When the
buffer is full, the word is written back into the bank at the output position:
row `out_row`, column `out_col + n` for the `n`-th word. Bits that do not fit are
kept and start the next word. For widths that do not divide 64 the bitmap is
therefore still dense, one bit per field in storage order, with no holes. The
precharge that ends a filter pass writes back a partly filled word; its unused
bits are zero.

For a conjunction of predicates (for example `10 < x < 100 AND y == 5`, where
columns `x` and `y` are laid out alike so that their values line up row by
row), the host runs one filter pass per predicate into the same output
position. With the
`multi` flag set, each written word is the AND of the new results with the word
already stored there. That word is read back through the bank's second port
(`bm_row`/`bm_col` → `bm_prev`). The AND is applied to a whole word at
write-back, which gives the same result as ANDing bit by bit.

## PIMCONF registers

An AB-mode WRITE is not a data write: it is a **PIMCONF** write broadcast to
every BFU of every selected rank. Column address bits `[1:0]` pick the register:

| idx | Register | Contents |
|---|---|---|
| 0 | `CTRL` | `[6:0]` width (clamped to 2..64), `[8:7]` type (0 uint, 1 sint, 2 float, 3 treated as uint), `[9]` op (0 equal, 1 open range), `[10]` multi |
| 1 | `PRED_A` | equality value, or lower bound of the range |
| 2 | `PRED_B` | upper bound of the range |
| 3 | `OUTPOS` | `[15:0]` output row, `[22:16]` first output column; writing it empties the buffer and restarts the word index |

After reset every BFU holds width 64, unsigned, equality, single predicate.

## The All-Bank filter flow

`membrane_mc` serves one host request at a time. Each request becomes a fixed
command sequence with known latencies, so the controller never waits for
status from the chips.

| Host request | DRAM commands |
|---|---|
| `HR_PIM_BEGIN` / `HR_PIM_END` | MRS to all ranks (row[0] = 1 enters AB mode, 0 leaves it), then tMRD |
| `HR_PIM_CONF` | AB WRITE to all ranks. `col` selects the register; the 512-bit line carries the same word in each of its 8 slots. |
| `HR_PIM_FILTER` | AB WRITE of `OUTPOS`, then ACT of the input row in every bank, then `COLS` READs each tCCD_L apart, then PRE (which also flushes the bitmap buffers), then tRP |
| `HR_READ` / `HR_WRITE` | normal single-bank access with a closed page: ACT, tRCD, RD/WR, PRE, tRP. The data passes through the DU. |

With the default DDR4-3200 timings (tRCD = tRP = 22, tCCD_L = 8, tRTP = 12,
tRAS = 52 memory clocks), a `HR_PIM_FILTER` of 128 columns takes 1073 cycles from
the ACT to the response (0.67 µs at 1.6 GHz). It takes 1083 cycles from the
request, including the OUTPOS write. During that time 4096 BFUs filter
4 MB. A typical query runs:

1. `HR_PIM_BEGIN`.
2. `HR_PIM_CONF` ×3 (CTRL, PRED_A, PRED_B).
3. One `HR_PIM_FILTER` per input row.
4. `HR_PIM_END`.
5. Normal `HR_READ`s of the bitmap.

For a conjunction, repeat steps 2–3 with `multi` set.

Inside a chip (`membrane_chip`):

* In AB mode the bank address is ignored. ACT opens the row in all 16 banks, and
  each RD hands the same column of every bank to its BFU.
* BFU write-backs go to the bank array through the bank's write port. This port
  is free during a filter pass because the DRAM itself writes nothing then.
* In SB mode a RD or WR moves a column word over the pins in 8 beats, starting
  the cycle after the command.

## Timing of one BFU

A READ on cycle `t` puts the column word on `col_data`. The comparator result
is registered at the end of `t`. It is appended to the buffer at the end of
`t+1`. If that append fills the word, `wb_en` is high during `t+1`. A BFU
accepts one column per clock, much faster than the DRAM's one per tCCD_L, so it
never holds anything up.

## Departures from the paper and open points

* **Filter pass time.** The paper quotes about 0.38 µs per 128-column row. This
  design paces reads at tCCD_L (8 clocks), as the paper's own description of
  same-bank-group reads implies, which gives 0.67 µs. Reads spaced at tCCD_S
  would come close to the paper's figure. Change `T_CCD_L` on `membrane_mc` to
  experiment.
* **Output position.** The paper does not say how the BFU learns where to write
  the bitmap. Here it is the `OUTPOS` PIMCONF register, written at the start of
  every `HR_PIM_FILTER`.
* **Flush on precharge.** A partly filled bitmap word is written back when the
  row is closed. The paper only describes write-back of a full buffer.
* **Refresh** is not issued by the controller. Power-down and the other DDR4
  commands are not modelled either.
* **Several ranks at once.** In AB mode the controller selects all ranks of the
  channel together, so all 4×8×16 BFUs of the channel work on one command.
* **Timing units.** All timings are in memory-clock cycles, one data beat per
  clock. Real DDR moves two beats per clock. This changes only the internal beat
  schedule between controller and chip, not the command spacing.
* The request encoding, the register map, the pipelining and the packing order
  of fields are this design's choices. Each is noted in the opening comment of
  the file where it lives.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and ends with `$finish`. Example with plain
Verilator 5:

```sh
verilator --binary --timing -Irtl -Itb -y rtl +libext+.sv \
    rtl/membrane_pkg.sv tb/tb_membrane_bfu.sv --top-module tb_membrane_bfu
./obj_dir/Vtb_membrane_bfu
```

| Testbench | What it covers |
|---|---|
| `tb_membrane_rcb` | all widths 2..64 × 3 types × 2 ops against a reference model (uint, sint, IEEE float at 32/64 bits, sign-magnitude at other widths) |
| `tb_membrane_pimconf` | register writes, clamping, OUTPOS pulse |
| `tb_membrane_bitmap_buffer` | random appends of 1..32 bits, flushes, AND, against a bit-queue model |
| `tb_membrane_bfu_ctrl` | pipeline, append counts, write-back addressing, flush rule |
| `tb_membrane_bfu` | a whole BFU with a bank model: several widths, single and two-pass AND |
| `tb_membrane_chip` | SB reads and writes, mode switch, PIMCONF broadcast, AB filter of 16 banks × 128 columns |
| `tb_membrane_du` | read and write routing |
| `tb_membrane_mc` | command sequences and spacing for every request type |
| `tb_membrane_top` | end to end: SB write/read through the DU, mode switch, configuration, filter passes with an AND pass, bitmaps read back, and a count of each mechanism |

**Sizes simulated.** The end-to-end testbench `tb_membrane_top` runs the top at
1 channel × 2 ranks × 8 chips × 2 banks with 12 columns. `tb_membrane_chip` runs
a full 16-bank chip over a full 128-column row. The complete default
configuration (4096 BFUs) has not been simulated. Verilator inlines every BFU,
and linting the top needs about 4 MB and 0.1 s per BFU. Measured: 128 BFUs in
11 s / 0.6 GB, 512 in 51 s / 2.1 GB, 1024 in 110 s / 4.2 GB. At full size that
is about 17 GB of memory for the build alone.
