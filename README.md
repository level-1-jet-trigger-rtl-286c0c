# Summary Trigger Unit for a calorimeter level-1 jet and photon trigger

The electromagnetic calorimeter of ALICE is read for triggering by 32
Trigger Region Units (TRUs). Each TRU digitises the analogue "fastOR" sums of
its 96 calorimeter modules (one fastOR = 2x2 towers), integrates them over
four bunch crossings, and fires a local level-0 (L0) trigger from the 2x2
fastOR patches it can see on its own. A TRU cannot see patches that straddle
its border with another TRU. It also cannot form the large patches needed for
a jet trigger. Both need all the data in one place.

The Summary Trigger Unit (STU) is that place. It is one FPGA that:

* receives, from each TRU over a custom serial link, the 96 time-integrated
  sums (12 bits each) of the event's bunch crossing;
* forms the **global L0**, an OR of the 32 local L0 candidates;
* evaluates **every 2x2-fastOR photon patch** of the calorimeter (2961
  positions), including those that cross TRU borders (**L1-gamma**);
* sums the fastORs into 4x4 **subregions**, then evaluates **every 2x2-subregion
  jet patch** (16x16 fastOR, 165 positions) (**L1-jet**);
* compares both against thresholds computed event by event from the V0
  detector's charge, `A*V0^2 + B*V0 + C`. This keeps the trigger's selectivity
  independent of collision centrality.

The main idea of the architecture is a trade between parallel and serial
work. Each TRU region has its own small processor. It reads the region's 96
values one per clock, in a fixed order, and dispatches each value to the few
patch accumulators that need it. Every accumulator handles a whole line of
patches in turn. All 32 regions run in lock-step, so a region can take a
neighbour's value straight from the neighbour's RAM output in the same clock.
No data has to be copied between regions.

This repository holds synthesizable SystemVerilog for the STU's trigger logic,
from the serial data pairs to the L1 decision and the multievent readout
buffer. The parts outside it (the TRUs themselves, the FPGA's delay
elements, the TTC, V0, DDL and slow-control links) connect through ports of
the top module `stu_top`.

---

## 1. The calorimeter as the STU sees it

**One region.** A TRU region has 4 rows (phi) by 24 columns (eta) of fastORs.
They are numbered column by column:

```
fastOR = 4 * column + row        column 0..23, row 0..3

        col: 0   1   2   3  ...  22  23
  row 0      0   4   8  12  ...  88  92
  row 1      1   5   9  13  ...  89  93
  row 2      2   6  10  14  ...  90  94
  row 3      3   7  11  15  ...  91  95
```

The reception RAM of a region stores the values in this order, so reading it
at addresses 0, 1, 2, ... walks down column 0, then column 1, and so on.

**The whole calorimeter.** The calorimeter has two halves in eta, called
side C and side A. Each side has 16 regions stacked in phi: 5 full
supermodules of 3 regions each, plus one third-size supermodule with 1
region. Region numbers in this RTL are

```
t = side * 16 + phi_index        side 0 = C, side 1 = A;  phi_index 0..15
```

In global coordinates, region t covers eta columns `24*side .. 24*side+23`
and phi rows `4*phi_index .. 4*phi_index+3` of a 48 x 64 fastOR map.

**Mirroring.** The supermodules of side A are inserted from the other end, so
their fastOR numbering runs backwards. The reception logic of an A-side link
undoes this as it writes the RAM: fastOR #95 goes to address 0 and fastOR #0
to address 95. From then on, every region is handled in the same global
orientation. After mirroring, column 0 of an A-side region lies directly next
to column 23 of the C-side region with the same phi index.

**Neighbours.** A region's patch processors need data from three neighbours.
The names follow the original drawings:

| name  | region in this RTL | what is used                          |
|-------|--------------------|---------------------------------------|
| R     | t+1 (same side)    | its row 0: the row above in phi       |
| A     | t+16 (C side only) | its column 0: the next column in eta  |
| A+1,R | t+17 (C side only) | its fastOR 0: the diagonal corner     |

Where a neighbour does not exist (A-side regions have no eta neighbour, and
the last phi region has no R), the input is tied to 0. The patches that would
need it are masked out of the trigger (section 7).

## 2. The TRU link and its start-of-run synchronisation

Each link is a 4-pair LVDS cable. One pair carries the LHC clock to the TRU
and one carries the TRU's L0 candidate back. The other two carry data at
400 Mb/s each, with no encoding, clocked at ten times the LHC clock. This RTL
runs the link side on that bit clock, `clk_bit`.

**Word format (this design's choice).** Each 12-bit word goes out as 6 bits
on pair 0 (the low half) and 6 bits on pair 1 (the high half), MSB first, so
a word takes 6 bit clocks. Between frames the TRU repeats a training word
whose 6-bit half is `000111`. That pattern has six distinct rotations, so
exactly one chunk boundary matches it. A frame is the start marker `12'hFC0`
followed by the 96 values. That is 97 words, or 582 bit clocks (1.455 us at
400 MHz). The 96 values alone take 1.44 us.

**`lane_deser`.** Shifts one pair in and hands out a 6-bit chunk every six bit
clocks. A `bitslip` pulse holds its counter for one clock, which moves the
chunk boundary by one bit.

**`link_sync`** (one per pair) does the two synchronisation steps at the start
of a run:

1. *Phase alignment.* It steps the pair's input delay (an FPGA primitive with
   64 taps of 78 ps, outside this RTL, driven by the `tap` port) from tap 0
   to tap 63. At each tap it waits 2 chunks for the delay to settle. The tap
   counts as stable if the next 16 chunks are all equal: inside the data eye,
   the training pattern gives a constant chunk. The FSM records the first
   contiguous run of stable taps, stops scanning at the first unstable tap
   after it, and applies the centre tap `(lo+hi)/2`. With no stable tap it
   reports `error`.
2. *Character framing.* It pulses `bitslip` until the chunk equals `000111`,
   waiting 2 chunks after each slip. It gives up after 6 slips.

A full scan takes 64 x 18 chunks, about 6 900 bit clocks (17 us).

**`reception_fsm`.** Each pair is framed on its own. It waits for its half of
the start marker (`000000` on pair 0, `111111` on pair 1; neither can occur
in the training pattern). It then queues the next 96 chunks in a 2-entry
FIFO. A word is written when both FIFOs hold a chunk. This matches the two
halves of a word by their position in the frame, whatever the skew between
the pairs, up to one chunk. The write address is `idx`, or `95-idx` on an
A-side link. Every word also appears on `prim_valid/prim_idx/prim_data`, the
tap for saving the time sums for readout. At the end of a frame,
`frame_toggle` changes level. The region synchronises it into the processing
clock and raises `rx_ready`.

## 3. Photon patches inside one region (`region_proc`, `distribution_fsm`, `patch_proc`)

This is the heart of the design.

A photon patch is 2x2 fastOR. The patches of a region are handled by eight
**patch processors** (`patch_proc`), each doing "4 accumulations + 1
comparison". A processor adds every value it is told to load. On the fourth
load it compares the sum with the photon threshold, in the same clock. It
then outputs the result with a patch index and starts the next patch.

The processors come in two columns of four:

| processor | rows        | first columns of its 12 patches | last patch                           |
|-----------|-------------|---------------------------------|--------------------------------------|
| E0..E2    | i, i+1      | 0, 2, 4, ..., 22                | columns 22-23                        |
| E3        | 3 + R row 0 | 0, 2, ..., 22                   | uses R                               |
| O0..O2    | i, i+1      | 1, 3, 5, ..., 23                | columns 23 + A column 0              |
| O3        | 3 + R row 0 | 1, 3, ..., 23                   | 95, A(3), R(92), A+1,R(0)            |

For example, E0 sums `[0,1,4,5]`, `[8,9,12,13]`, ..., `[88,89,92,93]`, and O0
sums `[4,5,8,9]`, ..., `[92,93,A0,A1]`. Four phi positions and two eta
phases give every 2x2 position whose lower-left corner lies in the region:
96 patches per region.

**The read sequence.** On `start_processing` the distribution FSM runs a
pointer `p = 0..99`. For `p < 96` it reads the RAM at `p`: column `p/4`,
row `p%4`. For `p = 96..99` ("above 96") it reads addresses 0..3 again, but
the processors use the A neighbour's output instead. The A region is reading
*its* column 0 in the same clock, so this supplies the 25th column.
For every read, the FSM tells each processor whether to load and from which
source (`src_e`: own, R, A or A+1,R):

```
E_i, i<3 : load if p<96 and row in {i, i+1}                 source own
E3       : load if p<96 and row in {3, 0}                   row 0 from R
O_i, i<3 : load if column >= 1 and row in {i, i+1}          column 24 from A
O3       : load if column >= 1 and row in {3, 0}            row 0 from R, or from
                                                            A+1,R in column 24;
                                                            row 3 of column 24 from A
```

Because a column is read top to bottom and patches are two columns wide,
each processor sees exactly four loads per patch. The loads of a patch come
over eight consecutive reads.

**Why lock-step matters.** Every region starts on the same
`start_processing` and follows the same read order. In any clock, the R, A
and A+1,R RAM outputs therefore present the same (column, row) as the local
RAM. The strobes for neighbour data are computed from the local pointer.
The original drawing takes them from the neighbours' FSMs; in lock-step the
two are the same. No neighbour handshake exists or is needed.

**Timing.** The RAM read is registered, and the strobes are registered to
match. A patch result appears one clock after its fourth load. The last one
appears, and `proc_done` pulses, 102 clocks after the edge that samples
`start_processing`. The hit of patch k of processor j is also kept in
`ph_hit_map[j][k]` until the next event. These maps are the triggering patch
positions.

## 4. Subregions and the jet processor (`subregion_proc`, `jet_proc`)

While the region is read for photon patches, `subregion_proc` watches the
same words (`data_avail` marks the 96 own reads). A subregion is 4x4 fastOR,
or 4 columns. With column-major reading, its 16 values arrive on 16
successive reads. The block accumulates them and writes the 16-bit sum into
a 6-word RAM, six times per event.

The 32 subregion RAMs form a map of 12 rows (eta) by 16 columns (phi). Region
t holds rows `6*side .. 6*side+5` of column `phi_index`. `jet_proc` reads
this map one subregion per clock, column by column: 192 reads. It drives one
address to all 32 RAMs and selects the region. Like the photon processor, it
feeds two columns of patch processors, 11 in each, now loading subregions:

* `J_E<i>` (i = 0..10): rows i, i+1 of columns (2k, 2k+1), k = 0..7;
* `J_O<i>`: rows i, i+1 of columns (2k+1, 2k+2), k = 0..6.

That gives 11 x 15 = 165 jet patches of 2x2 subregions. Results are indexed
as for photons: processor 0..10 even, 11..21 odd. `done` pulses 194 clocks
after `start`.

## 5. Thresholds from the V0 charge (`threshold_calc`)

For each event the V0 link delivers the charges of its A and C plates
(`v0_valid`, `v0a`, `v0c`). Two instances compute the photon and jet
thresholds:

```
V0  = v0a + v0c
thr = clip( floor( (A*V0^2 + B*V0 + C) / 2^8 ), 0, 2^18-1 )
```

A, B and C are signed 32-bit slow-control values with 8 fraction bits. The
pipeline has three stages. The thresholds are ready long before the frames
have arrived, so they never delay the processing.
A fixed threshold, as used in early proton-proton running, needs no
separate mode: set A = B = 0 and C = threshold x 2^8.

## 6. Global L0 (`global_l0`)

The 32 local L0 candidates are registered twice, masked by the per-TRU
enable, and ORed. `l0_global` follows a candidate by 3 clocks. `l0_pattern`
records which TRUs fired.

## 7. One event through `stu_top`

1. `v0_valid` starts the threshold computation. When both thresholds are
   ready, `thr_ok` is set.
2. The TRUs send their frames. Each region raises `rx_ready` once its 96
   values are in its RAM.
3. When `thr_ok` is set, every enabled region is ready and the readout
   buffer has a free slot (section 8), the top pulses
   `start_processing` to all 32 regions at once (`l1_busy` rises).
4. 102 clocks later the photon results are complete and the subregions are
   written. The top then starts the jet processor.
5. 194 clocks later the jet results are complete. One clock after that,
   `l1_valid` pulses with `l1_gamma` (any unmasked photon hit) and `l1_jet`
   (any jet hit). The hit maps stay valid until the next
   `start_processing`. The same pulse stores the event in the readout
   buffer.

Counted from the edge that samples `start_processing`, `l1_valid` arrives
after 298 clocks of `clk`. The source does not state the processing clock
frequency. It asks for the whole L1 to finish within about 4 us of the
confirmed L0. About 1.46 us of that goes to the frame transfer, so `clk`
needs to run at roughly 120 MHz or faster. At 200 MHz the processing takes
1.49 us.

**Edge masking.** Of the 32 x 96 = 3072 photon positions computed, two kinds
reach past the calorimeter edge. The last patch of the O processors of every
A-side region needs an eta neighbour that does not exist. The E3/O3
processors of the last phi region on each side need a phi neighbour that
does not exist. Their hit bits are forced to 0, leaving 47 x 63 = **2961**
photon patches. Jet patches need no mask. The unused bit 7 of the odd jet
processors' maps is always 0.

## 8. Readout buffer (`readout_buffer`)

After an L2 accept, the data acquisition receives the event's time sums, the
patch positions that fired and the thresholds that were used. Several events
can wait for their L2 decision, so the STU keeps them in a buffer of 4 event
slots, used as a FIFO.

**Capturing the time sums.** These sums are not copied while the frames
arrive. During photon processing, the 32 regions read their reception RAMs
in lock-step (section 3). On the first 96 reads, the 32 RAM outputs together
hold fastOR address `a` of every region. That 384-bit row is written to row
`a` of the current slot. Row `a` is on the RAM outputs on the (a+2)-th clock
after `start_processing`. When `l1_valid` pulses, the buffer also stores the
thresholds, `l1_gamma`/`l1_jet` and both hit maps in that slot. It then
closes the slot.

**L2 decisions.** `l2_accept` and `l2_reject` always refer to the oldest
closed event. A reject frees its slot at once. An accept streams the event
out as 3179 words of 32 bits on a valid/ready interface (`ro_valid`,
`ro_data`, `ro_last`, `ro_ready`), and the slot is freed after the last
word. `l2_ready` is low while an event is being sent. A decision that
arrives then is ignored. When all 4 slots are full (`ro_full`), the top does
not start a new event. The frames stay in the reception RAMs, and processing
starts as soon as a slot is freed.

| words | content |
|-------|---------|
| 0 | `{8'hA5, slot, event number[15:0]}` |
| 1, 2 | photon threshold, jet threshold |
| 3 | `{l1_jet, l1_gamma}` |
| 4..99 | photon hit maps, 3 words per region: bit 12j+k = processor j, patch k |
| 100..105 | jet hit map: bit 8i+k = jet processor i, patch k |
| 106..3177 | time sums `{3'b0, region[4:0], address[6:0], 5'b0, value[11:0]}`, region-major |
| 3178 | trailer `{8'h5A, 8'h00, event number}`, with `ro_last` |

Addresses are RAM addresses, so A-side regions appear in mirrored order. At
full rate an event takes 3179 clocks. The buffer holds 4 x 96 x 384 bits of
time sums plus the headers, about 160 kbit.

## 9. What is outside this RTL

| part | how it connects |
|------|-----------------|
| TRU boards | serial pairs `link_din[t][1:0]`, `l0_local[t]`; `tb/tru_link_model.sv` models one |
| 64-tap input delay per pair (FPGA primitive) | `link_tap[t][pair]` out; delayed data in on `link_din` |
| LHC clock forwarding, x10 bit clock | `clk_bit` port |
| TTC receiver (trigger messages) | not built; `sync_start`, V0 and the frames start each step |
| V0 optical link | `v0_valid`, `v0a`, `v0c` |
| DDL link (SIU) | `ro_*` event stream from the readout buffer; raw `prim_*` reception stream |
| L2 decisions from the TTC | `l2_accept`, `l2_reject`, `l2_ready` |
| Slow control (Ethernet) | coefficients `*_coef_*`, `tru_enable` |

## 10. Departures and own choices

These follow the source description as closely as it allows. Where it is
silent, the choice made here is listed. Where it disagrees with itself, the
reading followed is stated.

* **Link encoding.** The 6+6 bit split of a word over the two pairs, the
  training pattern, the start marker and the per-pair FIFO alignment are not
  given in the source. A real TRU may use a different format. Only
  `stu_pkg`, `lane_deser` and `reception_fsm` would change.
* **Stable-zone rule.** The scan uses the first stable zone, with a 2-chunk
  settle and a 16-chunk stability test at each tap.
* **Subregion accumulation count.** The text says 16 successive
  accumulations per subregion; the block drawing says "8 Acc". This design
  uses 16, the only count that gives a 4x4 subregion.
* **Jet patch size.** 2x2 subregions (16x16 fastOR, 32x32 towers), as the
  trigger definition states. One summary sentence of the source says
  "64x64"; this is not followed.
* **Map orientation.** The 12 subregion rows are taken along eta and the 16
  columns along phi. This is the only orientation consistent with 6
  subregions per region and 16 regions per side.
* **Neighbour strobes.** These are computed locally from the lock-step
  pointer rather than wired from the neighbour FSMs (section 3). The gate
  that combines the "above 96" signal with a neighbour strobe in the
  original drawing is replaced by load conditions derived from the listed
  patches.
* **Comparison.** A patch fires when its sum is strictly greater than the
  threshold.
* **Threshold format.** V0 = sum of both plates. Coefficients are signed,
  with 8 fraction bits. The result is floored and clipped to 18 bits.
* **Sequencing.** The L1 control (wait for thresholds and all enabled links,
  then regions, then jets) is this design's own.
* **Readout.** The source gives the contents of the readout and says that
  several events are buffered. The depth of 4, the word format, the FIFO
  order of L2 decisions and the stall while the buffer is full are this
  design's own choices.
* **Clock domain crossing.** A toggle and a two-flop synchroniser carry
  frame completion into the processing clock. `rx_ram` is a true two-clock
  RAM.
* **Reset.** All resets are synchronous and active high: `rst_bit` for the
  link side, `rst` for processing.
* **Not verified:** timing closure at 400 MHz and at any processing clock.
  Behaviour with real TRU hardware. The FPGA delay primitive is modelled
  only by its effect on sampling.

## 11. Files

| file | content |
|------|---------|
| `rtl/stu_pkg.sv` | geometry, widths, link constants, `src_e`, `patch_res_t` |
| `rtl/lane_deser.sv`, `rtl/link_sync.sv` | one data pair: deserializer and synchronisation FSM |
| `rtl/reception_fsm.sv`, `rtl/rx_ram.sv` | frame reception with mirroring; 96-word dual-port RAM |
| `rtl/distribution_fsm.sv`, `rtl/patch_proc.sv` | read sequence and load strobes; 4-accumulate + compare |
| `rtl/subregion_proc.sv` | 4x4 subregion sums and their 6-word RAM |
| `rtl/region_proc.sv` | one TRU region: all of the above |
| `rtl/jet_proc.sv` | 165 jet patches over the subregion map |
| `rtl/threshold_calc.sv`, `rtl/global_l0.sv` | V0 threshold; global L0 |
| `rtl/readout_buffer.sv` | 4-event buffer of time sums, hit maps and thresholds; L2 readout |
| `rtl/stu_top.sv` | 32 regions, neighbour wiring, edge masks, L1 control, readout buffer |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tru_link_model.sv` | TRU transmitter + cable + delay-eye model |

Every testbench computes its expected values independently, for example
patch sums from a global fastOR map rather than from the RTL's read order.
Each one prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb_stu_top` runs the full design at its default size. It synchronises 32
links with different eyes, phases and pair skews, then runs five events.
It checks every photon and jet hit bit, both thresholds, both L1 outputs and
the 298-clock L1 latency. The fifth event must wait for a free buffer slot.
Events are then rejected or accepted, and every word read out is checked,
partly with the stream held back. The test also counts each mechanism it
exercised: tap centring, mirroring, hits across the C/A, phi and diagonal
borders, threshold change with V0, both trigger outcomes, edge masking, the
global L0, the buffer-full stall, L2 reject, L2 accept and readout
backpressure.

## 12. Simulating

With Verilator 5 (the testbenches use `--timing`):

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/stu_pkg.sv tb/tb_stu_top.sv --top-module tb_stu_top -o sim
./obj_dir/sim
```

Replace `tb_stu_top` with any other `tb_<module>` to run that unit test.
The full-size top test runs in well under a second. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/stu_pkg.sv rtl/<module>.sv`.

**Changing it.** The geometry lives in `stu_pkg` and is fixed by the
calorimeter (4 x 24 fastOR per region, 32 regions). `patch_proc` is
parameterised in input width, sum width, threshold width and patch count.
`link_sync` is parameterised in tap count, settle and stability lengths and
training pattern. A different link format stays inside `lane_deser`,
`reception_fsm` and the link constants of `stu_pkg`.
