# Fast trigger logic on digitized hit times

Veto counters in rare-kaon-decay experiments see high rates. A veto applied
with classic discriminators and coincidence units uses windows several
nanoseconds wide, and accidental hits inside those windows throw away good
events. If the front end already delivers each hit as a digital time, the
trigger can instead work on thin time slices (800 ps here) and apply a
coincidence or veto condition slice by slice. This RTL implements that idea
as a fully pipelined, fixed-latency design that accepts one master-clock
period (a *time slot*, TS, 25 ns at 40 MHz) of data every clock and has no
dead time. It follows the design described in *Fast trigger logic with
digitized time information* (Imbergamo, Nappi, Papi, Riccini, Valdata).

Two modules are provided and combined:

* the **trigger module**: up to NCH channels, any logical condition of the
  channels, given as a look-up table (LUT) loaded at run time;
* the **channel reduction module**: folds many channels of one detector
  section into one channel of *cluster times* (OR or majority OR), so a
  large detector can use a few trigger inputs.

`fast_trigger_system` puts them together: one 20-channel reduction module
drives trigger input 0, and trigger inputs 1..7 are direct channels.

## Data format

Each channel delivers, every TS, `M_HITS` = 3 hit fields of `N_BITS` = 8
bits. A field holds the hit time inside the TS in 100 ps units (0..249); the
all-ones word (255) means *no hit*. Fields are packed as
`hits[h*8 +: 8]`, h = 0..2, in no particular order. The reduction module
produces the same format, so its output can feed a trigger input directly.

## The processing chain of one channel

```
hits -> coarse correction -> fine correction -> resolution -> window      -> 32-bit TS word
        (RAM delay, d TS)    + offset, 1 clk     degrading     generation      (one bit per slice)
                                                 (drop 3 bits) (3 clk)
```

1. **Coarse correction** (`coarse_correction`). A dual-port RAM used as a
   delay line: written every clock, read `d` clocks later, 1 <= d <= 16.
   This aligns channels in whole TS.
2. **Fine correction** (`fine_correction`). Flags each field as valid (not
   all ones) and adds the channel's offset (0..249). The sum is 9 bits wide:
   a hit can move up to almost one full TS later, into the *next* TS. Only
   positive corrections exist; that is what makes the two-TS bookkeeping
   below sufficient.
3. **Resolution degrading**. The 3 low bits are dropped, giving a slice
   index 0..62 with 2^(8-3) = 32 slices of 800 ps per TS. Indices 32..62 lie
   in the next TS. (It is a bit selection and lives at the input of
   `window_generation`.)
4. **Window generation** (`window_generation`). Each valid hit becomes a
   run of `width` ones starting at its slice; `width` sets the coincidence
   resolution of the channel. The output is one 32-bit word per TS, bit k
   being slice k (bit 0 earliest).

### How a TS word is assembled

This is the part that needs the most care. A hit of TS n can, after the
offset and the stretch, cover slices of TS n+1 as well. So the word of TS
n+1 is only complete once the hits of TS n+1 *and* the tails of TS n are
known. The block keeps a 96-bit shift register, three words of 32 bits,
shifted down by one word every clock:

```
            word 0 (bits 0..31)   word 1 (32..63)          word 2 (64..95)
next clock: <- old word 1         <- old word 2 | head     <- tail
```

where *head* and *tail* are the first and second 32 bits of the OR of the
new hits' 64-bit masks. Word 0 is complete and is the block's output; word
1 collects the current TS's own runs on top of the tails left by the
previous TS; word 2 holds the tails of the current TS. Example (width 6, hit
at corrected time 232 = slice 29): the word of that TS ends in `111` at
slices 29..31 and the next TS's word starts with `111` at slices 0..2.

The three clocks are: decode every hit into its 64-bit mask (1), shift and
OR into words 1 and 2 (2), word 0 is read out (3). Runs that would extend
past slice 63 are cut there; width 0 turns a channel off.

## Trigger module

`trigger_module` runs NCH = 8 channel chains in parallel and feeds their
TS words to `lut_logic_evaluation`. For every slice k, the k-th bits of all
channels form an 8-bit address (channel c = address bit c). Each of the 32
slices has its own copy of a 256 x 1 bit LUT, so all 32 slices are
evaluated in the same clock. The TS is accepted (`response`) if any slice's
LUT answers 1; `slice_resp` shows the 32 per-slice answers.

All 32 copies hold the same table; a LUT upload writes one entry into all of
them. The LUT read is registered and the final OR is combinational on the
RAM outputs.

**Latency.** For a channel with coarse delay `d`, the response to its hits
of a TS appears `d + 5` clocks after they entered: `d` in the RAM, 1 for
fine correction, 3 for window generation, 1 for the LUT. A new TS is
accepted every clock.

**Memory.** The LUTs take 32 x 2^NCH bits: 8192 bits at 8 channels, about
1 Mbit at 15, which is why the LUT approach stops at roughly 15 inputs on a
mid-size FPGA. The logic grows linearly with channels and hits per TS, and
with the number of slices.

## Channel reduction module

`channel_reduction` elaborates NCH = 20 channels exactly as above and then:

* `slice_or_multiplicity`: for each slice, the OR of all channels and the
  number of channels at 1 (the *multiplicity*);
* `time_cluster_search`: every run of consecutive ones in the OR word is a
  candidate cluster. It is kept if some slice in the run reaches the
  multiplicity threshold. Threshold 1 makes the module an OR of its
  channels; threshold 3 a 3-fold majority. A kept cluster is reported as a
  hit time equal to the start of its first slice (slice x 8 in 100 ps
  units). Up to 3 clusters per TS are output, earliest first.

Example with 16 slices: OR `0111110001111000`, multiplicities
`0123210001221000`. Threshold 3 gives one cluster, at slice 1; threshold 1
gives two, at slices 1 and 9.

To see a run that starts late in TS n and continues, the search holds each
word for one TS and looks at TS n and n+1 together. A run is judged only on
its part in those two TS. A run that started in TS n-1 is not reported
again in TS n.

**Latency.** `d + 7` clocks: `d` + 1 + 3 as in the trigger chain, 1 for OR
and count, 2 for the cluster search. In the system top, hits on a reduced channel reach the response after
`d_r + 7 + d_0 + 5` clocks (d_r: its delay in the reduction module, d_0:
the coarse delay of trigger input 0), hits on direct input i after
`d_i + 5`. To align them, set `d_i = d_r + 7 + d_0`, e.g. 9 for d_r = d_0 = 1.

**Known limit.** Two events closer than the run length merge into one run
and give one cluster time. The design does not try to split them.

## Loading parameters

Everything programmable is loaded over one write-only bus, `cfg`
(`ftl_pkg::cfg_wr_t`), one write per clock:

| field    | meaning |
|----------|---------|
| `we`     | write strobe |
| `target` | 0 = trigger module, r+1 = reduction module r |
| `kind`   | `CFG_COARSE` delay (TS), `CFG_FINE` offset, `CFG_WIDTH` run length (slices), `CFG_LUT_THR` |
| `index`  | channel number; for `CFG_LUT_THR` on the trigger, the LUT address |
| `data`   | value; for a LUT entry bit 0 |

`CFG_LUT_THR` sent to a reduction module sets its multiplicity threshold.
Writes take effect on the next clock edge and do not change the latency.
After reset: coarse delay 1, offset 0, width 0 (channels silent),
threshold 1. LUT contents are not reset and must be loaded before use.
Channel constants should be loaded while no data flow, as a change in
flight affects the TS already in the pipeline.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_BITS`  | 8  | bits per hit time |
| `M_HITS`  | 3  | hit fields per channel per TS |
| `P_TRUNC` | 3  | low bits dropped; 2^(N_BITS-P_TRUNC) slices per TS |
| `DEPTH`   | 16 | coarse-delay RAM depth, in TS |
| `NCH` (trigger) | 8 | trigger inputs; LUT size 2^NCH per slice |
| `NCH` (reduction), `RED_CH` | 20 | channels per reduction module |
| `NRED`    | 1  | reduction modules in `fast_trigger_system` (1 <= NRED < NCH) |

The sizes 8 / 3 / 3, the 8 trigger channels and the 20 reduction channels
are those of the reference configuration. `DEPTH` and `NRED` are this
design's own choices.

## Files

* `rtl/ftl_pkg.sv`: default sizes, upload bus type.
* `rtl/coarse_correction.sv`, `rtl/fine_correction.sv`,
  `rtl/window_generation.sv`, `rtl/channel_elaboration.sv`: channel chain.
* `rtl/param_regs.sv`: per-channel constants.
* `rtl/lut_logic_evaluation.sv`, `rtl/trigger_module.sv`: trigger module.
* `rtl/slice_or_multiplicity.sv`, `rtl/time_cluster_search.sv`,
  `rtl/channel_reduction.sv`: reduction module.
* `rtl/fast_trigger_system.sv`: system top.
* `tb/ftl_ref_pkg.sv`: reference model (slice-by-slice loops, no
  pipeline) used by the testbenches.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_workload_sizes.sv`: the two largest quoted configurations, a
  15-input trigger module (1 Mbit of LUT) and a 45-input reduction module
  with one hit per TS, each checked against the model over 800 TS.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/ftl_pkg.sv tb/ftl_ref_pkg.sv \
  tb/tb_fast_trigger_system.sv --top-module tb_fast_trigger_system
obj_dir/Vtb_fast_trigger_system
```

Replace the last file and top name for another block. The system
testbench runs the default-size design (8 trigger inputs, one 20-channel
reduction module). It loads all constants and a random LUT, plays 3000 TS
of random hits, compares every response with the reference model at the
exact latency, and switches the reduction module from OR to majority mode
halfway. It also counts that each mechanism happened: coarse delays above 1,
several hits per TS, hits moved into the next TS by the offset, runs
stretched into the next TS, two TS merged in one word, clusters kept and
suppressed, more clusters than output fields, accepted and rejected TS.
It builds in under a minute and runs in seconds.

The block testbenches also replay the worked examples: the stream that
spills into the next TS, the per-slice LUT addressing of one column, and
the 16-slice cluster example above at thresholds 3 and 1.

## How far this follows the reference design

Taken from the reference design: the four per-channel stages and their
order; the RAM delay line; the no-hit code; the 9-bit fine correction
within 0..249; truncation of p bits; the 3 x 32-bit shift register and its
three clocks; one LUT copy per slice, all read in one clock, ORed into the
response; the 5-clock algorithm latency; the OR / multiplicity / run search
of the reduction module and its output format; the default sizes.

Choices made here, where the description gives no detail:

* bit k of a TS word is slice k; channel c is LUT address bit c;
* coarse-delay RAM depth 16, delay range 1..16, no-hit output while the RAM
  fills after reset;
* only the all-ones code marks a missing hit (no separate valid bits);
* the offset register is 8 bits, so offsets up to 255 are accepted; the
  intended range is 0..249;
* the split of the window generation's three clocks, runs cut after the
  next TS, width 0 = off;
* the LUT read is registered and the slice OR sits after it in the same
  clock;
* cluster-search rules: threshold met anywhere in the run, one TS of look
  ahead, earliest three clusters kept, cluster time = first slice x 8;
* the upload bus, its address map and the reset values;
* one reduction module on trigger input 0 in the system top.

Not built: the USB link and host PC that load the constants (the `cfg`
port stands for them), the LVDS receivers and deserializers (the hit
ports take the deserialised words), the test-bench FIFOs of the hardware
test, and the proposed variants that were described but not designed: the
LUT read several times per TS to support more channels, and a cluster
search that emits extra cluster times for merged runs.
