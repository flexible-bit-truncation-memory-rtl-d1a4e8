# TrunMEM: an SRAM that truncates any number of low-order bits at run time

Many edge workloads tolerate small errors in the low-order bits of the data
they keep in memory: a pixel that is off by a few grey levels is invisible in
bright light, and a 32-bit floating-point weight whose last 16 fraction bits
are wrong hardly changes a network's output. A memory can trade that
tolerance for power by switching off the bit-line columns that hold those
bits. Earlier designs fixed the number of switchable bits for one
application (3 or 4 bits per pixel, or 0 to 4). This memory lets the user
choose at every access how many bits to drop, from none to all of them, either
across the whole 32-bit word (word mode, for floating point) or inside each
byte (byte mode, for 8-bit pixels).

This repository holds synthesizable SystemVerilog for the memory's logic: the
1024 x 32 array with column power gating, the per-column truncation managers,
the byte-mode chain breakers and the truncation decoder. It also holds
self-checking testbenches for each block, for the whole memory, and for
video and neural-network access patterns.

## What a truncated read returns

Once a column is power-gated its bit cells lose their contents, so some
value has to be made up for the dropped bits. The value minimises the
expected squared error when the dropped bits are uniformly distributed. For
*n* dropped bits that value is half of their full range, `1` followed by
*n*-1 zeros:

| stored (byte)       | bits dropped | returned   |
|---------------------|--------------|------------|
| `0101_0101` (0x55)  | 2            | `0101_0110` (0x56) |
| `0101_0101`         | 3            | `0101_0100` (0x54) |
| `0101_0101`         | 4            | `0101_1000` (0x58) |

The same holds for the fraction bits of an IEEE 754 single. The sign and
exponent scale every dropped bit by the same factor, so the best fill is
again the midpoint, 10...0. With up to 23 bits dropped only the fraction is
touched. The absolute error then stays within half the dropped range, and
its mean over many weights is zero rather than the −(2ⁿ−1)/2 LSB bias that
a fill of zeros would give (`tb_dnn_workload` measures this).

## The truncation managers: how one control bit truncates a whole field

Every column *i* has a truncation manager with two control inputs:

* **Head\<i\>**: this column is the most significant bit of the truncated field.
* **Tail\<i\>**: a more significant column of the same field is truncated.

| Head | Tail | Read | rails          | DataOut | Tail\<i-1\> out | state            |
|------|------|------|----------------|---------|-----------------|------------------|
| 0    | 0    | r    | connected      | r       | 0               | normal           |
| 0    | 1    | x    | floating       | 0       | 1               | lesser-bit truncated |
| 1    | x    | x    | floating       | 1       | 1               | MSB truncated    |

A manager's Tail output is the next lower column's Tail input. So the
managers form a chain from bit 31 down to bit 0, and setting a single Head
makes that column read 1 and every column below it read 0. All of those
columns have their rails switched off. The decoder therefore only ever drives
one Head per field. Tail into bit 31 is tied to 0, and Tail out of bit 0 goes
nowhere.

**Byte mode.** The 32 managers are grouped into four byte managers. Where the
chain passes from one byte to the next (out of bits 24, 16 and 8), the Tail is
ANDed with the active-low pin `byte_mode_enb`:

```
 Tail=0 ─► [byte 3: bits 31..24] ─┬─► AND ─► [byte 2] ─┬─► AND ─► [byte 1] ─┬─► AND ─► [byte 0] ─► (unused)
                                  │   ▲                 │   ▲                 │   ▲
                                  │   byte_mode_enb     │   byte_mode_enb     │   byte_mode_enb
```

* `byte_mode_enb = 1` (word mode): the gates pass Tail, and one Head at bit
  *k* truncates bits *k*..0 of the word.
* `byte_mode_enb = 0` (byte mode): the gates break the chain at every byte,
  and the decoder places one Head in each byte, so all four bytes lose the
  same number of LSBs.

## Pins and modes

| pin              | width | meaning |
|------------------|-------|---------|
| `clk`            | 1     | memory clock; its low phase is the bit-line precharge |
| `word_enable`    | 1     | activate the addressed word line |
| `readen`, `writeen` | 1  | read / write this cycle (not both) |
| `addr`           | 10    | word address |
| `data_in`        | 32    | write data |
| `trunc_enable`   | 1     | 0: nothing truncated |
| `trunc`          | 5     | number of truncated bits **minus one** |
| `byte_mode_enb`  | 1     | active low: 0 = byte mode, 1 = word mode |
| `data_out`       | 32    | read data after truncation |
| `col_rail_en`    | 32    | 1 = column's virtual VCC/GND connected; drives the power-gate transistors |

Number of truncated bits:

| `trunc_enable` | `byte_mode_enb` | truncated |
|----------------|-----------------|-----------|
| 0              | any             | none |
| 1              | 1 (word)        | `trunc`+1 LSBs of the word, 1..32 |
| 1              | 0 (byte)        | `trunc`+1 LSBs of every byte, 1..8 (`trunc` > 7 saturates at 8) |

So `trunc = 15` in word mode on 0x55555555 reads 0x55558000, and
`trunc = 31` reads 0x80000000.

## Timing

* An access is sampled at the rising edge of `clk`.
* A write stores `data_in` into the addressed word, but only in columns
  powered at that edge. A truncated column's write driver is off.
* A read loads the addressed word into a read latch. `data_out` is valid
  right after that edge and holds until the next read. The latency is one
  cycle, with one access per cycle.
* `data_out` is formed combinationally from the latch and the *current*
  truncation pins. Hold the pins at the read's setting while using the data.
  The same pins also set `col_rail_en` immediately.

**Lowering the truncation level requires a rewrite.** A column that was
switched off has lost its data. After reducing the number of truncated bits,
rewrite a word before trusting its newly restored bits. Raising the level
needs nothing: the managers supply the dropped bits.

A column's power gate serves all 1024 words of that column. Gating a column
for one access therefore drops that bit from *every* word in the memory. Two
consequences follow:

* **One level at a time.** A single macro holds its data at one truncation
  level at a time. Switching to a higher level and back costs a rewrite of
  every word whose low bits are still wanted.
* **Per-region truncation.** Policies that truncate regions differently must
  either write each region under its own level just before reading it
  (streaming), or keep regions with different levels in different macros.
  Examples are per-macroblock levels in content-aware video and ROI versus
  background.

The video testbench follows the streaming order. The end-to-end testbench
carries a monitor that tracks which bits of every word have been lost to
gating. It fails any read that would return such a bit untruncated.

## Module map

| file | contents |
|------|----------|
| `rtl/trunmem_pkg.sv` | sizes (1024 words, 32 bits, 8-bit bytes), manager state enum |
| `rtl/trunc_manager.sv` | one column manager (the truth table above) |
| `rtl/byte_trunc_manager.sv` | eight managers chained |
| `rtl/trunc_manager_array.sv` | four byte managers plus the byte-mode AND gates |
| `rtl/trunc_decoder.sv` | `trunc_enable`, `trunc`, `byte_mode_enb` → Head vector |
| `rtl/sram_core.sv` | array, write driver, sense/read latch with column power gating |
| `rtl/trunmem.sv` | top level |

Every module takes its sizes as parameters (`DEPTH`, `W`, `BW`), whose
defaults are the 1024 x 32 configuration with 8-bit bytes. `W` must be a
multiple of `BW`. The testbench reference arithmetic assumes 32-bit words.

## What is not logic here

* The **power-gate transistors** (a PMOS header and NMOS footer per column)
  are analog switches. The RTL produces their control, `col_rail_en`. Inside
  the model the same signal stands for the column's power state.
* **Loss of data in a gated column** is not modelled. In the RTL the bit
  cells keep their old value, the write driver and sense amplifier of the
  column are off, and the truncation manager masks the column. A real array
  returns garbage in those columns after re-powering until they are
  rewritten. Designs built on this model must still follow the rewrite rule
  above. The RTL does not flag a violation; the monitor in `tb_trunmem`
  shows how to check for one in simulation.
* The **switching delay of the power gates** (tens of nanoseconds in the
  130 nm layout) is not modelled. A column's power state follows the pins at
  once. In silicon, re-powering must complete before the rewrite that needs
  the column.
* A **precharge pin** separate from the clock is not provided. The clock's low
  phase plays that role.

## Choices made in this RTL

The column truth table, the Tail chain with its grounded top end, the
byte-mode AND gates, the pin names and the `trunc` encoding (value + 1 bits)
describe the memory as published. The following are this implementation's own:

* the address port, the read latch and the one-cycle read latency;
* reads and writes in the same cycle are illegal (an assertion in `sram_core`);
* a gated column senses 0 in the array model;
* `trunc` above 7 in byte mode saturates at 8 bits per byte;
* no reset: the array and read latch start undefined, as in an SRAM;
* the manager state output (`tm_state_e`), which exists for observation.

## Capacity against the intended workloads

The macro holds 1024 x 32 bits = 4 KB. The truncation settings of every
evaluated use are supported:

* luminance-aware video: 3 or 4 bits per byte;
* content-aware video: 0–4 bits per byte;
* ROI-aware video: 0 or 3 bits per byte;
* neural-network weights: 16–22 bits per word.

The data, however, does not fit in one macro:

* one 320x240 luma frame is 76,800 bytes, about 19 macros;
* VGG-16 has 15.2 M fp32 parameters (61 MB), and a pruned VGG-16 still has
  0.68 M (2.7 MB);
* ResNet-56 has 0.86 M (3.4 MB).

A system would tile many macros and drive their truncation pins per region or
per layer.

## Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/trunmem_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_trunmem.sv \
    --top-module tb_trunmem -o sim
./obj_dir/sim
```

Replace `tb_trunmem` with any of the testbenches below.

| testbench | what it checks |
|-----------|----------------|
| `tb_trunc_manager` | all 8 input combinations against the truth table |
| `tb_byte_trunc_manager` | every Head position, both Tail inputs, random data |
| `tb_trunc_manager_array` | word mode at every Head, byte mode with independent per-byte Heads (the AND gates), and the figure values below |
| `tb_trunc_decoder` | all 128 settings of the three pins |
| `tb_sram_core` | full 1024-word fill and read-back, writes and reads with random column gating, read-latch hold |
| `tb_trunmem` | whole memory at full size (see below) |
| `tb_power_sequence` | write 0xA5A5A5A5, write 0xFF00FF00, read, at all 33 word-mode and 9 byte-mode levels; checks the gated-column count |
| `tb_video_workload` | a 64x64 pixel tile (fills the memory), each word stored and read under luminance-aware (3, 4 bits), content-aware (0–4 bits per 16x16 block) and ROI-aware (0/3 bits) policies; exact values, error bound, PSNR printed |
| `tb_dnn_workload` | 1024 fp32 weights read at 16, 17, 20, 21, 22 truncated bits; exact values, untouched sign/exponent, relative-error bound, zero-mean error |

`tb_trunmem` does three things:

* It replays the published timing sequence. It writes 0x55555555, then reads
  it in byte mode with 0/2/3/4 bits truncated (expecting 0x55555555,
  0x56565656, 0x54545454, 0x58585858). After a rewrite it reads it in word
  mode with 0/2/3/16 bits truncated (0x55555555, 0x55555556, 0x55555554,
  0x55558000).
* It fills all 1024 words, then rewrites each and reads it back under a
  random setting.
* It writes into truncated columns, lowers the truncation and rewrites.
* It lowers the truncation once without a rewrite. The lost-data monitor must
  flag that read.

It checks the read latency and the rail enables on every read. It also counts
word-mode, byte-mode, untruncated, whole-word and byte-saturated reads, gated
writes, rewrites, mode switches and flagged stale reads, and fails if any count is zero. All
testbenches run at the default sizes in well under a second.
