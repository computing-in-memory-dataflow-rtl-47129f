# ConvDK: a depthwise-convolution CIM macro with duplicated kernels

Depthwise convolution (DWConv) suits computing-in-memory (CIM) badly. In a
weight-stationary CIM tile, one bitline sums the products of a whole column of
stored weights. A depthwise kernel has only 9 or 25 taps, though. Mapping one
kernel per column leaves most of the 180 rows empty. Every new output also
needs a new input window, fetched from the input buffer. So buffer traffic,
not arithmetic, becomes the cost.

This design fixes both problems. It stores N copies of each kernel side by
side in the tile memory. The input activations (IAs) for a strip of N·kw + l − 1
columns are loaded once and stay in the tile. A block-enable signal picks one
kernel copy at a time. A small shifter moves the IA vector by a = 0..l−1
positions. These l shift positions and N copies together reach every output
column of the strip. No IA is fetched twice. The RTL here covers the whole
macro: 64 tiles, three buffers, the controller that walks the ConvDK loop, and
the BIG/LITTLE planner that maps a layer onto the tiles.

## Contents

- [Why a shift of at most l − 1 is enough](#why-a-shift-of-at-most-l--1-is-enough)
- [The macro](#the-macro)
- [One tile: the bit-serial MAC](#one-tile-the-bit-serial-mac)
- [Data layout in a tile](#data-layout-in-a-tile)
- [The controller: kernel write, TRF load, the ConvDK loop](#the-controller-kernel-write-trf-load-the-convdk-loop)
- [BIG and LITTLE mapping](#big-and-little-mapping)
- [How to drive the macro](#how-to-drive-the-macro)
- [Where this RTL departs from, or adds to, the published design](#where-this-rtl-departs-from-or-adds-to-the-published-design)
- [Verification](#verification)
- [Simulating and changing it](#simulating-and-changing-it)

## Why a shift of at most l − 1 is enough

Take a 1-D kernel of width kw and stride s. Output z[m] starts at IA column
m·s. Copy n of the kernel sits at TM columns n·kw .. n·kw + kw − 1. If the
IA vector is shifted left by a, copy n sees IA columns starting at n·kw + a. It
therefore computes z[m] exactly when

    m·s = n·kw + a.

Let l = lcm(kw, s)/s. For kw odd, s < kw and gcd(kw, s) = 1 (true for every
3×3 and 5×5 layer with stride 1 or 2), the shifts a = 0..l − 1 split all output
indices m ≥ 0 into l disjoint classes. Each class is an arithmetic sequence:

    n = a·n1 mod dn,  then n += dn        (dn = lcm(kw,s)/kw)
    m = a·m1 mod l,   then m += l

Here (m1, n1) is the least solution of m1·s = n1·kw + 1. Some examples:

| kw | s | l | dn | m1 | n1 |
|----|---|---|----|----|----|
| 3  | 1 | 3 | 1  | 1  | 0  |
| 3  | 2 | 3 | 2  | 2  | 1  |
| 5  | 1 | 5 | 1  | 1  | 0  |
| 5  | 2 | 5 | 2  | 3  | 1  |

Take kw = 3, s = 2 and N = 30 copies:

- a = 0: n = 0, 2, .., 28 gives m = 0, 3, .., 42.
- a = 1: n = 1, 3, .., 29 gives m = 2, 5, .., 44.
- a = 2: n = 0, 2, .., 28 gives m = 1, 4, .., 43.

That is all 45 outputs, from one IA load and three shift values. `convdk_seq`
computes l, dn, m1 and n1 from kw and s. The controller walks these
sequences. For 2-D kernels each copy is kh rows tall. The same shift applies to
every row, because rows are placed at a fixed pitch.

## The macro

```
 DRAM fill ──► IB 16 KiB (64 banks × 256 B) ══ dedicated wires, 180 B/tile ══► TRF ┐
 DRAM fill ──► WB  4 KiB (64 banks ×  64 B) ── 1 byte/tile/clock ──► TM R/W port   │ 64 × cim_tile
 DRAM read ◄── OB 16 KiB (64 banks × 64 × 32 b) ◄── 1 word/tile/clock ◄── accumulator┘
                         ▲                                    ▲
            big_little_sched (plan)  ──►  dwconv_ctrl (sequencer, broadcast to all tiles)
```

| Module | Role |
|---|---|
| `convdk_macro` | Top level. |
| `dwconv_ctrl` | Sequencer. Drives every tile with the same control. |
| `big_little_sched` | Combinational planner: BIG or LITTLE, channels per tile, N, copies, passes. |
| `cim_tile` | TRF + `ia_sm` + `tm_array` + 8 × `adc` + `shift_add` + `accumulator`. |
| `ib_buffer`, `wb_buffer`, `ob_buffer` | The three on-chip buffers, banked one bank per tile. |
| `tm_array`, `adc` | Behavioural models of the analog parts (8T-SRAM array with bitline discharge, 4-bit ADC). |
| `convdk_seq` | Combinational l, dn, m1, n1 for the controller. |
| `convdk_pkg` | Constants and structs. |

All tiles do the same thing at the same time. Only their data differ. So one
controller drives them all, and each buffer has one bank per tile.

## One tile: the bit-serial MAC

The TM holds 180 INT8 weights, one per row. Bit j of every weight lies on read
bitline BL[j]. One MAC is applied to the TM one IA bit at a time, LSB first:

1. **Selector** (`ia_sm`). Takes bit t of each of the 180 TRF entries.
2. **Shifter** (`ia_sm`). Row p takes the bit of TRF entry p + a. This is a
   5:1 multiplexer per row; rows past the end receive 0.
3. **Activator** (`ia_sm`). Passes only the rows whose enable `row_en[p]` is
   set: the kh·kw rows of the chosen kernel copy.
4. **TM** (`tm_array`, behavioural). For each bitline j it counts the rows
   that have both a 1 on the word line and a 1 in weight bit j. This stands for
   the analog discharge of the precharged bitline. Each open path removes the
   same charge.
5. **ADC** (`adc`, behavioural, one per bitline). Turns the count into a
   4-bit code, saturating at 15. It is registered.
6. **Shift-and-add** (`shift_add`). Computes Σ code_j·2^j. Bit 7 counts as
   −2^7 because weights are two's-complement. It is registered.
7. **Accumulator** (`accumulator`). Adds the result shifted by t. Bit 7 is
   subtracted because IAs are two's-complement INT8. `clear` restarts the sum
   on bit 0.

Timing. `mac_start` is sampled on edge 0. Bit t is applied in the clock after
edge t, for t = 0..7. The ADC registers it on edge t+1, the shift-and-add on
edge t+2, and the accumulator on edge t+3. The final sum is in `acc` after
edge 10, flagged by a one-clock `acc_valid`. One MAC is one "compute cycle" of
ten clocks; MACs do not overlap. `mac_a` and `mac_row_en` must stay constant
for the eight clocks after the start.

A 4-bit ADC resolves 0..15. That is why no more than 15 rows may be active in
one conversion. A 3×3 kernel uses 9 rows. A 5×5 kernel (25 rows) is applied
as two MACs: kernel rows 0–2 (15 rows) with `clear`, then rows 3–4 (10 rows)
without it. The accumulator sums the two.

## Data layout in a tile

The TRF and the TM share one layout. T_w = floor(180/kh) is the row pitch and
CW is the width of one channel's sub-map. The IA of kernel row j, column x of
local channel cc sits at position

    p = j·T_w + cc·CW + x

In the TM, weight k[j][i] of copy n of local channel cc sits at p = j·T_w +
cc·CW + n·kw + i. Rows that hold no copy are never enabled. Shifting the whole
180-entry vector by a therefore moves every kernel row the same way. A shifted
tap never crosses into the next row or channel, because the controller only
issues outputs m < W_out. The example below is the published one: 128 × 24 × 24
input, 3×3 kernel, stride 1, with T_w = 60, two channels per tile and eight
kernel copies per channel.

```
TRF position  0 ....... 23 | 24 ....... 47 | 48..59     (kernel row 0)
             ch t, cols 0-23 | ch t+64, cols 0-23 | unused
             60 ...                                      (kernel row 1)
             120 ...                                     (kernel row 2)
```

## The controller: kernel write, TRF load, the ConvDK loop

`dwconv_ctrl` latches the plan when `start` is pulsed. It then runs up to four
phases:

1. **KLOAD** (when `load_kernels` is set). For each weight of each local
   channel it takes two clocks:
   - one clock writes the row of copy 0;
   - one clock writes the rows of copies 1..N−1 at once, with all their word
     lines raised together.

   A 3×3 kernel thus takes 18 clocks, whatever N is. The WB supplies each
   tile's byte at address cc·kh·kw + j·kw + i.
2. **TLOAD**. One clock. All 64 TRFs copy bytes 0..179 of their IB bank.
3. **COMP**. The loop nest

       for a in 0..l−1:
         n = a·n1 mod dn;  m = a·m1 mod l
         while n < N:
           if m < W_out:  for c in local channels:  for g in row groups:  MAC(a, n, c, g)
           else:          one idle clock
           n += dn;  m += l
         one idle clock

   Each MAC takes ten clocks. Every tile outputs channel c's column m at the
   same time. In the published example that means O[0:63, h, w] first, then
   O[64:127, h, w]. After the last row group, the result is written to OB
   address `ob_base + c·W_out + m`. The write happens in the clock after
   `acc_valid`. An 11-stage tag pipe carries the address alongside the tile
   latency.
4. **DRAIN**. Waits for the last OB write, then pulses `done`.

A row of the published example costs 36 clocks (kernel write) + 1 (TRF load)
+ 44 × 10 (MACs) + 5 (idle) + 2 (drain) = 484 clocks. Later rows skip the kernel
write and cost 448 clocks. The roughly 440-clock MAC part matches the
published count of N_ch · W' compute cycles of ten clocks each.

## BIG and LITTLE mapping

`big_little_sched` derives the whole plan from (C, W, kh, kw, s):

- **BIG** (W > T_w). Each tile holds one channel. Its sub-map is T_w columns
  wide. When C < 64, the idle tiles get further copies of the kernels and take
  the next sub-maps along the width. Consecutive sub-maps start
  `plan_sub_stride` = W_out·s columns apart, so they overlap by at least
  kw − s columns and no output is lost at a seam.
- **LITTLE** (W ≤ T_w). N_ch whole-width channels sit side by side in a TRF
  row. N_ch is the smallest of four limits:
  - ceil(C/64);
  - floor(T_w/W);
  - how many kernels fit the 64-byte WB bank;
  - how many output rows fit the 64-word OB bank.

  Local channel cc of tile t is channel (t mod used) + used·cc, where used =
  ceil(C/N_ch).
- **Both modes**. W_out = floor((CW − kw)/s) + 1 is a valid (unpadded)
  convolution; padding is zero columns the host places in the IB.
  N = floor((W_out − 1)·s/kw) + 1 is the fewest copies that reach every column.
  `plan_replicas` is the number of kernel copies over idle tiles. `plan_passes`
  is the number of macro runs needed when the channels exceed 64 tiles.

## How to drive the macro

The host (DRAM side) does the following:

1. Put the layer on `layer` and read the plan from `plan_*`.
2. Fill each tile's WB bank through `wb_we/wb_bank/wb_addr/wb_wdata`. Each
   write is 8 bytes, little-endian.
3. Fill bytes 0..179 of each tile's IB bank through the `ib_*` port, in the
   layout above. For BIG, tile t's sub-map starts at column
   (t / used)·`plan_sub_stride`.
4. Pulse `start` with `load_kernels = 1` and wait for `done`.
5. Read the outputs through `ob_re/ob_bank/ob_raddr`. `ob_rdata` arrives one
   clock later, as a sign-extended 24-bit sum.
6. For the next output row, refill the IB and start again with
   `load_kernels = 0`. The duplicated kernels stay in the TMs.

Filling the IB and draining the OB happen outside the macro. The published
design overlaps them with computation (DRAM traffic is pipelined). Here they
are simply ports. The macro does not arbitrate between them and a running
operation. Bytes 180..255 of an IB bank are plain storage: no wire takes them to the
TRF.

## Where this RTL departs from, or adds to, the published design

Taken from the published design:

- 64 tiles and a 180 × 8-bit TM and TRF per tile.
- IB 16 KiB, WB 4 KiB, OB 16 KiB.
- Eight 4-bit ADCs per tile, shift-and-add, and an accumulator.
- IAs applied bit-serially, LSB first.
- A ten-clock MAC.
- A TRF load of one clock for all tiles.
- A WB-to-TM transfer of one byte per clock, with one extra clock for all
  duplicates of a weight.
- A one-clock transfer from the accumulator to the OB.
- The selector/shifter/activator structure of the shift-and-mask unit.
- The ConvDK loop order (shift, then block, then channel).
- The BIG/LITTLE rule W > T_w and T_w = floor(180/kh).
- The published example: T_w = 60, N_ch = 2, 22 output columns, 44 compute
  cycles per row.

Choices of this implementation:

- **Shifter width.** The published shift-and-mask unit is drawn for kw = 3,
  s = 1, with 3:1 multiplexers. Here it has 5 ways, so 5×5 kernels work.
- **Enable decoding.** The enable `e` arrives already decoded to one bit per
  row, so the same unit serves any kernel size and channel layout.
- **Duplication number N.** The published formula
  N = (min(W, T_w) − l + 1)/kw is not an integer for the published example
  (22/3). Rounded down, it would miss the last output column, yet the published
  figure shows all 22. Here N is the number of copies needed to reach every
  output. Pairs whose output column lies past the row end are skipped.
- **Row groups for large kernels.** The ADC is limited to 15 rows per
  conversion, so 5×5 kernels run in two row groups. The published text says
  "up to 16" parallel MACs but also a 4-bit ADC, which cannot code 16.
- **Number formats.** Weights and IAs are signed. The accumulator is 24 bits
  and OB words are 32 bits. There is no requantisation of outputs.
- **Organisation and interface.** The buffer banking and the 8-byte fill
  ports are this design's own. So are the start/busy/done handshake and the OB
  addressing.
- **Channel layout.** Channels are placed side by side along the TRF row, as
  in the published LITTLE tiling picture. A different picture in the same
  publication shows them one after another; that is not followed.
- **Analog parts.** The TM is an ideal behavioural model: one LSB per
  discharging cell, no noise, no settling. The same goes for the ADC. The real
  parts are an 8T-SRAM array with pass-transistor discharge paths and 4-bit
  ADCs.
- **One output row per IB fill.** Each tile's IB bank is wired byte for
  byte to its TRF, so a TRF load always takes bytes 0..179 of the bank. The
  host rewrites the kh input rows before each output row. In the published
  example, one IB fill holds enough input rows for three output rows
  (3 × 44 compute cycles). That needs a row-selecting path between IB and
  TRF, which is not built here. Compute time per row is unchanged. The IB-fill
  traffic from DRAM is larger, and in the published design it overlaps
  computation anyway.
- **Outside the macro.** DRAM is not modelled.
- **Only the weight-stationary dataflow.** The published work also compares
  ConvDK against three other dataflows: a plain weight-stationary one, a plain
  input-stationary one, and an input-stationary ConvDK (IAs in the TM, kernels
  in the TRF). These comparison dataflows are not built. Energy, area and
  utilisation figures are not modelled either. The testbenches print the MAC
  and clock counts from which latency follows.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench and ends with a `TB_RESULT`
line:

- `tb_convdk_seq`: l, dn, m1, n1 (hand-worked and against a brute-force
  search for random odd kw and coprime s), and that the visiting order reaches each
  output column exactly once.
- `tb_ia_sm`: random IAs, bits, shifts and enables.
- `tb_tm_array`: multi-row writes and bitline counts.
- `tb_adc`: linear transfer and saturation.
- `tb_shift_add`, `tb_accumulator`: signed arithmetic. The accumulator test
  also sums across two MACs.
- `tb_cim_tile`: random signed dot products of up to 15 rows with shifts,
  and a latency of exactly 10 clocks.
- `tb_ib_buffer`, `tb_wb_buffer`, `tb_ob_buffer`: fill, read and byte order.
- `tb_big_little_sched`: hand-worked plans, including the published example.
- `tb_dwconv_ctrl`:
  - the published kw = 3, s = 2, N = 30 sequence, with its enables, shifts
    and OB addresses;
  - the 2-clocks-per-weight kernel write;
  - a 5×5 run with row groups;
  - a rerun without kernel reload.
- `tb_convdk_macro`. The whole macro at full size, three layers:
  - the published 128 × 24 × 24 LITTLE case, two rows;
  - a BIG 3×3 stride-2 case using both tile halves;
  - a 5×5 LITTLE case.

  Every output is checked against a direct convolution. It also checks kernel
  write time and run time. It requires each mechanism to occur at least once:
  duplicate-row write, shift a > 0, skipped block, row-group MAC, BIG, LITTLE,
  kernel reuse, and kernel copies.
- `tb_convdk_workloads`. One output row of representative depthwise layers
  from MobileNetV1, V2, V3-Large, V3-Small and EfficientNet-B0 (standard
  shapes, padding included in W), full size, first pass of each.

All depthwise layers of these five networks use 3×3 or 5×5 kernels with stride
1 or 2. All fit the macro, the deepest ones in several passes (up to 9 for a
1152-channel 5×5 layer). What has not been verified:

- any analog non-ideality;
- timing closure at the published 250 MHz;
- more than one pass of a layer in one simulation (each pass is the same
  operation on other channels).

## Simulating and changing it

With plain Verilator, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_convdk_macro \
        rtl/convdk_pkg.sv tb/tb_convdk_macro.sv -o sim
    ./obj_dir/sim

Other modules are found through `-Irtl`, because each file holds one module
named like the file. Use the same command with any other `tb_*` name. The macro
testbenches take about a minute (mostly compile time). The unit testbenches
take seconds.

Sizes live in `convdk_pkg`. Change `NUM_TILES`, `TM_ROWS` or the buffer sizes
there; the bank sizes follow. `SHIFT_WAYS` bounds the kernel width: it must be
at least l = kw/gcd(kw, s). `MAX_PAR` is the most rows one ADC conversion may
see. Raise it together with `ADC_BITS`. The controller's loop and layout live in
`dwconv_ctrl`. The mapping rules live in `big_little_sched`.
