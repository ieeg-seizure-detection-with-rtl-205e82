# Sparse hyperdimensional seizure classifier for 64-channel iEEG

This is synthesizable SystemVerilog for a low-power classifier that watches 64
intracranial EEG (iEEG) electrodes and decides, once per 256 samples, whether
the brain is in a seizure state. It uses *sparse* hyperdimensional computing
(HDC). Each piece of information is a 1024-bit hypervector (HV) in which only
about 1 % of the bits are set. All processing is bitwise: rotations, ORs,
counters and a popcount. There are no multipliers.

The design follows the optimised sparse HDC architecture of Cuyckens, Antonio,
Fang and Verhelst, "iEEG Seizure Detection with a Sparse Hyperdimensional
Computing Accelerator" (PRIME 2025). Two ideas set that architecture apart from
a plain port of dense HDC:

* **Compressed item memory (CompIM).** A sparse item HV has exactly one 1-bit
  in each of its 8 segments of 128 bits. The CompIM therefore stores only the
  eight 7-bit positions of those bits: 56 bits per entry instead of 1024. The
  binder needs exactly those positions, so no one-hot decoder is required.
* **Spatial bundling without thinning.** Each electrode contributes 8 ones, so
  64 electrodes set at most 512 of the 1024 bits. The spatial bundle can never
  fill up. It is built as one 64-input OR per bit, not as an adder tree
  followed by a threshold.

Throughout this document, "the reference architecture" means the design
described in that publication. Any other choice is marked as this
implementation's own.

## Data path at a glance

```
 samples[64] ─► lbp_preproc ─► comp_im ─► spatial_encoder ─────────► temporal_encoder ─► similarity_search ─► pred
  (16 bit)       6-bit LBP     8×7-bit    64 × seg_shift_binder        1024 × 8-bit        AND + adder tree     (class)
                 per channel   positions  + 1024 × 64-input OR        counters, ≥130      over 2 class HVs
                 [register]    [ROM]      [combinational]              [registers]         [2 cycles + 1]
                                                                                            ▲
                                                                         assoc_memory ──────┘ (loaded offline)
```

| File | Role |
|---|---|
| `rtl/hdc_pkg.sv` | default sizes, types, and the hash that generates the random tables |
| `rtl/lbp_preproc.sv` | sample stream → 6-bit local binary pattern code per channel |
| `rtl/comp_im.sv` | CompIM: LBP code → 8 segment positions, one constant table per channel |
| `rtl/seg_shift_binder.sv` | segmented shift binding of one channel (8 barrel rotators) |
| `rtl/spatial_encoder.sv` | 64 electrode HVs, 64 binders, OR tree |
| `rtl/temporal_encoder.sv` | frame accumulator and thinning threshold |
| `rtl/assoc_memory.sv` | class HVs (register file with a write port) |
| `rtl/popcount_tree.sv` | balanced adder tree, built level by level (helper) |
| `rtl/similarity_search.sv` | AND/popcount score per class, run one class per clock, arg-max |
| `rtl/sparse_hdc_top.sv` | the whole classifier |

Default parameters: 64 channels, 6-bit LBP codes, D = 1024, 8 segments of
128 bits, frames of 256 samples, 8-bit accumulators, threshold 130, and 2
classes. All of them come from the reference architecture except the 16-bit
sample width. The reference architecture was evaluated at a 10 MHz clock.

## Segmented shift binding and the CompIM

Binding must combine two HVs: *what* was measured (the item HV of the LBP code)
and *where* it was measured (the electrode HV). In segmented shift binding,
each 128-bit segment of the electrode HV is rotated circularly by the position
of the single 1-bit in the corresponding segment of the item HV. The result is
again sparse, with one 1-bit per segment.

The CompIM stores the item HV directly as its positions `pos[s]`, each a 7-bit
index counted from the segment's least significant bit. For each channel and
each segment, `seg_shift_binder` computes

```
bound[s][j] = ehv[s][(j + pos[s] + 1) mod 128]
```

In words, the segment is rotated towards the LSB by `pos[s] + 1`. The "+1"
comes from the worked example of the operation. In that example a 1-bit in
the lowest position shifts by 1, and a 1-bit at index 5 shifts by 6. The
example is

| data segment | electrode segment | bound segment |
|---|---|---|
| `00000001` | `01000000` | `00100000` |
| `00100000` | `00010000` | `01000000` |

with 8-bit segments written MSB first. `tb_seg_shift_binder` checks exactly
this example on an 8-bit instance.

The fixed rotation by one costs nothing, because it is only wiring. The
variable rotation by `pos[s]` is a `{x,x} >> pos` barrel rotator, which
synthesises to 7 multiplexer stages. Any other fixed offset or direction would
work equally well for classification, as long as training and inference use
the same one.

### Where the random tables come from

The item memory and the 64 electrode HVs are random, but fixed when the chip
is designed. Here they are generated by a hash rather than stored as data:

```
table_hash(salt, ch, code, seg) = fmix32( salt<<30 ^ ch<<20 ^ code<<10 ^ seg )
fmix32(x): x ^= x>>16; x *= 0x85ebca6b; x ^= x>>13; x *= 0xc2b2ae35; x ^= x>>16
CompIM[ch][code].pos[seg] = table_hash(1, ch, code, seg) mod 128
E_HV(ch) has its 1-bit of segment seg at   table_hash(2, ch, 0, seg) mod 128
```

`fmix32` is the MurmurHash3 finaliser. `comp_im` calls the hash in a constant
function during elaboration. Each channel's table therefore becomes a 64-entry
constant ROM of 56-bit words, which synthesis can reduce to logic.
`spatial_encoder` builds the electrode HVs in the same way. To use different
random HVs, change the salts in `hdc_pkg`. To use tables trained elsewhere,
replace the two generator functions. The hash is this implementation's own
choice. The reference architecture only requires random tables that are fixed
at design time.

## Spatial bundling by OR

`spatial_encoder` ORs the 64 bound HVs bit by bit. When two electrodes set the
same bit, the OR keeps one 1 where an adder tree would have counted 2. That
information loss is what the reference architecture trades for area. It
reported no loss of detection accuracy after retuning the temporal threshold.
The result has at most 512 ones. With random inputs it has about 400, since
1 − (1 − 1/128)^64 ≈ 39 %.

## Temporal encoder: frames and thinning

A *time frame* is 256 consecutive spatial HVs, which is 25.6 µs at 10 MHz.
`temporal_encoder` keeps one counter per HV element, 1024 × 8 bits = 8192
flip-flops, and adds the spatial HV into them on every valid cycle. An element
can be set in all 256 HVs of a frame, and 256 does not fit in 8 bits.
Therefore the 256th HV is never stored. It is added on the fly into a 9-bit
comparison, and the counters restart at zero. Output bit *i* is

```
frame_hv[i] = (acc[i] + in_hv[i]) >= THRESHOLD        (at the 256th valid input)
```

`out_valid` pulses one clock after the 256th valid input. `out_hv` is a
register that holds the frame HV for the whole next frame. THRESHOLD is the
"maximum density" knob of sparse HDC: it sets how many elements survive. The
reference architecture used 130 and targeted a frame density of 20–30 %. It
tunes this knob per patient. Here it is a synthesis parameter, not a run-time
register. Whether the comparison is `>=` or `>` is this implementation's own
choice.

## Similarity search and the associative memory

The associative memory holds one HV per class: class 0 is non-seizure and
class 1 is seizure (this label order is this implementation's own). The class
HVs are trained offline. One-shot training bundles the frame HVs of one
labelled recording. The reference architecture bundles them with thinning to
50 % density. The class HVs are then written through `am_we / am_waddr /
am_wdata`. For this, `frame_hv` is exported from the top, so training can use
the chip's own encoder output.

The score of a class is `popcount(frame_hv & class_hv)`. A plain AND is used
because in sparse HDC only the ones carry information. A single 1024-input
adder tree (`popcount_tree`, built level by level) is shared by both classes. The
classes are scored one per clock through the memory's asynchronous read port,
keeping a running maximum. A tie goes to the lower class index.

`similarity_search` timing, after `start` is high in cycle 0:

- **Cycles 1 and 2:** score class 0, then class 1. `busy` is high.
- **Cycle 3:** `done` pulses. `pred`, `best_score` and `scores[]` are valid.
  They hold until the next search.

A search takes 3 cycles. The next frame closes 256 cycles later, so the search
never stalls the input. An assertion checks that a frame never closes during a
search. Another checks that the query stays stable while a search runs.

## Top-level interface and timing (`sparse_hdc_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset (all registers clear) |
| `sample_valid` | in | 1 | one sample per channel this cycle |
| `samples` | in | 64 × 16 | two's complement ADC samples |
| `am_we`, `am_waddr`, `am_wdata` | in | 1, 1, 1024 | load a class HV |
| `frame_valid`, `frame_hv` | out | 1, 1024 | encoded frame (pulse / held) |
| `pred_valid`, `pred`, `scores` | out | 1, 1, 2 × 11 | classification (pulse / held) |

The pipeline has the following timing:

1. A sample vector is registered into the LBP codes at the clock edge that
   samples it.
2. During the next cycle, the codes pass combinationally through the CompIM,
   the binders and the OR tree into the counters.
3. The 256th sample of a frame leads to `frame_valid` two clocks after it is
   sampled.
4. `pred_valid` follows 3 clocks after `frame_valid`.

With continuous input, this gives one prediction every 256 clocks. Pausing
`sample_valid` simply stretches the frame.

The LBP code of a channel is the last six signs of its sample-to-sample
differences, where 1 means the signal rose. The reference architecture only
states that 6-bit LBP codes capture the relation between consecutive samples.
The compare-and-shift form, the 16-bit signed samples and the reset values are
this implementation's own. The ADC is not included.

## What was not built, and departures

- **ADC and electrode front end.** These are analog parts. The top takes
  digital samples instead.
- **Run-time thinning threshold.** The threshold is a parameter. Per-patient
  tuning, as the reference architecture describes it, means re-synthesising or
  adding a register.
- **Training.** Training of the class HVs is not included; it runs offline.
- **Baseline variants.** The full 1024-bit item memory, the one-hot decoders,
  the spatial adder trees with threshold, and the shift binding with a large
  look-up table are comparison baselines in the reference architecture. They
  are not part of this design.
- **Own choices.** The following were not specified and are this
  implementation's own:
  - the random tables (hash-generated)
  - the shift convention, which was read from the worked example
  - the `>=` comparison
  - the tie-break
  - the reset behaviour
  - the AM write port
  - the absence of pipeline registers between the LBP register and the
    counters (acceptable at 10 MHz)

## Verification

Every module in `rtl/` has a self-checking testbench, `tb/tb_<module>.sv`.
Each one prints `TB_RESULT checks=N failures=M` and has a watchdog. All of
them compare against the reference model in `tb/tb_ref_pkg.sv`. That model
re-implements the hash and computes bound bit positions arithmetically, as
`(e − p − 1) mod 128`, not by rotating. The testbenches cover:

- **`tb_lbp_preproc`:** random and slowly varying streams (equal samples
  included), with `in_valid` gaps.
- **`tb_comp_im`:** every entry of all 64 tables.
- **`tb_seg_shift_binder`:** the worked example, plus 2000 random vectors at
  full size.
- **`tb_spatial_encoder`:** 300 random position sets. It requires that some
  elements are hit by two or more channels.
- **`tb_temporal_encoder`:** three full frames. Per-element probabilities are
  chosen so that the threshold cuts both ways, and some elements are set in all
  256 inputs. It also checks pulse timing and output holding.
- **`tb_assoc_memory`:** write and read, write timing, reset, and an
  out-of-range address.
- **`tb_similarity_search`:** two- and four-class instances. It checks scores,
  arg-max, ties and the latency of exactly NUM_CLASSES + 1 cycles.
- **`tb_sparse_hdc_top`:** end to end with every parameter at its default.
  - Six frames are run. Rising and falling noisy ramps stand in for two brain
    states.
  - The first two frame HVs are written into the AM as class HVs.
  - The remaining frames must be classified exactly as the reference model
    predicts.
  - It checks every frame bit, the scores, the 256-cycle frame rate and the
    3-cycle prediction latency.
  - It requires that each of these occurs: OR collisions, thinned and kept
    elements, both predicted classes, AM writes and input pauses.
- **`tb_threshold_sweep`:** five full-size classifiers with thresholds 64,
  100, 130, 160 and 220 receive the same input. This reproduces, on
  synthetic input, the maximum-density sweep used to tune sparse HDC. Every
  frame bit is checked, and the frame density must fall as the threshold
  rises. On this input it falls from about 15 % at 130 to 0 % at 220.

Simulate with plain Verilator (two-state, so every register is reset), for
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/hdc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sparse_hdc_top.sv --top-module tb_sparse_hdc_top
./obj_dir/Vtb_sparse_hdc_top
```

The full-size end-to-end run takes well under a second once built.

**How far to trust it.** The data path has been checked against an
independent model. It has not been checked against the authors' software or
trained class HVs: no real iEEG data or patient models were used. The random
tables differ from the reference architecture's, so detection quality has to
be re-established with your own training. Coarse synthesis with Yosys
completes; no timing or power analysis was done.
