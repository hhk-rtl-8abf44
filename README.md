# HHK: cross-location PPG key generation in RTL

Two wearable nodes on the same body — say one on the head and one on the
wrist — each see the same heart. Their optical pulse (PPG) waveforms look
different from site to site, but the *timing* of the heartbeats is shared.
HHK turns that shared timing into a shared secret without sending it:

1. each node filters its PPG stream, finds the beats and measures the
   inter-beat intervals (IBIs) over a 120 s window;
2. each interval becomes two bits (Gray code of a 4-bin quantizer), giving a
   128-bit string `b` per node; the two strings agree in most, but not all,
   positions;
3. node A picks a random 42-bit message `m`, encodes it with a (128, 42) polar
   code to a codeword `c`, and publishes the helper `h = b_A ^ c`;
4. node B forms `r = b_B ^ h = c ^ (b_A ^ b_B)`, which is `c` corrupted by
   exactly the bit disagreements between the two sites, and recovers `m`
   with a successive-cancellation (SC) decoder.

The helper alone reveals nothing useful about `m` as long as `b_A` is
unpredictable to an eavesdropper. Three successful 42-bit blocks give 126
bits of key material; hashing them into a session key is left to software.

This repository holds synthesizable SystemVerilog for one node: every node
contains both roles, and software chooses whether it encodes (node A) or
decodes (node B). Sample rate is 128 Hz; a window is 15 360 samples.

```
 AXI4-Lite ──► hhk_axil_regs ──sample──► hhk_bpf ──► hhk_foot_detector ──beat ts──►
                  ▲    │ cfg/cmd                                                    │
                  │    └────── peer ts ────► hhk_ts_matcher ◄───────────────────────┘
                  │                              │ beat + matched flag
                  │                              ▼
                  │                        hhk_ibi_timer ──IBI──► hhk_gray_quantizer
                  │                                                     │ 128-bit b
                  └──────── status / results ◄── hhk_keygen_ctrl ◄──────┘
                                                 (hhk_polar_encoder, hhk_sc_decoder)
```

All shared constants, structs and the register map live in `hhk_pkg`.

## Beat timing path

Everything in this path works on one sample per `sample_valid` pulse (one
AXI write to `SAMPLE`), so throughput is set by the host; each stage adds one
clock of latency.

**Band-pass prefilter (`hhk_bpf`).** Three first-order IIR sections with
power-of-two coefficients, so there are no multipliers: a baseline tracker
(`b += (x-b) >>> 5`, high-pass corner ≈ 0.64 Hz) whose residue `x-b` feeds two
identical low-pass sections (`>>> 2` each, combined corner ≈ 3.8 Hz). The state
carries 8 guard bits below Q15 and the output is saturated back to 16 bits.
The first sample after a window start preloads the baseline, so the sensor's
DC level does not make a large start-up transient that the detector would
take for a beat.

**Beat detector (`hhk_foot_detector`).** A beat is a filtered sample that is
a local maximum (`y[n-1] > y[n-2]` and `y[n-1] >= y[n]`), rises at least
`PROM_TH` above the lowest sample seen since the previous local maximum, and
comes at least 51 samples (400 ms, i.e. a 150 BPM ceiling) after the
previous accepted beat. Because the minimum restarts at *every* local maximum,
the dicrotic wave that follows a pulse, and the slow recovery of the
high-pass after it, are judged by their own rise, not by the depth of the
trough before the main pulse. Its timestamp is the sample index within the
window (16 bits). One caveat: after a long pause (about 150 samples or
more, i.e. a slow heart or a missed pulse) the high-pass output climbs back
out of its undershoot, and that climb ends in a local maximum. If `PROM_TH`
is set below the size of the undershoot it counts as a beat, so the
threshold has to be chosen for the slowest expected rhythm.

**Cross-location matcher (`hhk_ts_matcher`).** A beat missed at one site
shifts every later interval by one position and would wreck the bit
agreement. The matcher keeps the sequences aligned: for each local beat it
finds the nearest beat of the peer site and marks the local beat as matched
when the distance is at most 38 samples (300 ms). Only intervals that *start*
at a matched beat are turned into bits; a beat that only one site saw thus
removes the same interval slot on both sides instead of shifting the rest.

The peer site's timestamps are written by software into `PEER_TS` in
ascending order after the window start (up to 256 entries, a register array).
Because both lists are sorted, the nearest peer beat is always next to a
pointer that only moves forward: on each beat the pointer advances one entry
per clock while the next peer timestamp is not later than the beat, and then
the two neighbours are compared. A window therefore costs at most one clock
per peer entry plus two per beat, far below the 51-sample beat spacing.
With `MATCH.match_en = 0` (the reset state) every beat passes as matched in
one clock, which is the single-site behaviour.

Timestamps are only comparable if both nodes start their windows together
and see the same detection delay; in practice the peer list is the set of
timestamps the other node detected. Note that sending timestamps exposes the
intervals they encode: a deployment has to protect that exchange or accept
the leak.

**IBI timer (`hhk_ibi_timer`).** `IBI(n) = t(n+1) - t(n)` in sample periods,
emitted when beat n was matched, for at most 64 intervals per window (64 × 2
bits fill the 128-bit string). `STATUS.ibi_full` reports the limit.

**Gray quantizer (`hhk_gray_quantizer`).** Three programmable edges split
the intervals into four bins, `bin = (IBI ≥ E0) + (IBI ≥ E1) + (IBI ≥ E2)`,
coded 00, 01, 11, 10, so a value just across an edge costs one bit, not two.
Interval k fills bits `2k` (Gray MSB) and `2k+1` of `RAW_BITS`. The edges
should be equal-frequency percentiles of the expected interval distribution;
the reset values 92/102/112 samples (0.72/0.80/0.875 s) are placeholders for
software to replace.

## The polar fuzzy commitment

### Code construction

The code has N = 128 and K = 42 in natural (not bit-reversed) index order:
`c = u · F^⊗7` with `F = [[1,0],[1,1]]`, i.e. `c_j = XOR of u_i over all i
with (i & j) == j`. The 42 information positions are those with the smallest
Bhattacharyya parameter for a binary symmetric channel with crossover 0.1:
start from `Z = 2·sqrt(0.1·0.9)`, walk the bits of the index from MSB to LSB,
and map `Z → 2Z − Z²` for a 0 bit and `Z → Z²` for a 1 bit. The resulting set
is `hhk_pkg::INFO_MASK = 128'hfffe_fee8_fec0_8000_f880_0000_0000_0000`
(bit i set = position i carries a message bit). Message bit j goes to the
j-th information position in ascending order (`msg_to_u`, `u_to_msg`).

### Encoder (`hhk_polar_encoder`)

A 128-bit register holding `u` goes through the seven butterfly stages one
per clock (`v[i] ^= v[i + 2^s]` for every `i` with bit s clear). The codeword
is ready 8 clocks after start, counting the start clock.

### SC decoder (`hhk_sc_decoder`)

This is the largest block and the one worth reading slowly.

Decoding walks the code tree of levels 0 (the 128 channel values) to 7 (one
leaf per `u` bit). The received word is a hard decision, so the channel LLRs
are just ±1. Each tree node of size 2n computes, from its parent's LLRs
`a = L[k]`, `b = L[k+n]`:

- left child: `f(a, b) = sign(a)·sign(b)·min(|a|,|b|)` (min-sum);
- right child: `g(a, b, β) = b + (β ? −a : a)`, saturated to 9 bits, where β
  is the partial sum — the re-encoded decisions — of the finished left
  sibling.

One processing element computes one LLR per clock. LLR storage is one
64-entry array per level (`llr_q[1:7]`), written in place, plus one 64-bit
partial-sum vector per level (`beta_q`).

Schedule: bit i needs new LLRs only from level `7 − tz(i)` downwards (`tz` =
number of trailing zeros of i; bit 0 starts at level 1), because higher
levels have not changed since the last time they were computed. Summed over
all bits that is 7 × 128 PE clocks, plus one decision clock per bit and one
start clock: **1 025 clocks per decode**.

Partial sums: after each leaf decision, a combinational loop walks up the
tree. While the finished node is a right child, the parent's partial sum is
`[β_left ^ β_right, β_right]`; at the first left child the vector is stored
in `beta_q` for the sibling's g steps. After bit 127 the walk reaches the
root and yields the re-encoded codeword `ĉ`.

Frozen bits are decided 0; information bits are 1 when the leaf LLR is
negative (a zero LLR decides 0).

### Control and success test (`hhk_keygen_ctrl`)

- `CTRL.encode` (node A): the helper `h = b ^ c` is ready from clock 9.
- `CTRL.decode` (node B): `r = b ^ HELPER_IN` is latched, the decoder runs, and
  the Hamming distance between `r` and `ĉ` is compared with `DIST_MAX` (reset
  24). `decode_ok = 1` when the distance is within the limit, i.e. when the
  received word is close enough to a codeword to trust the result.
  `key_ready` rises 1 028 clocks after the command (reported in
  `KEYINFO.key_cycles`), 0.1 ms at 10 MHz.

`decode_ok` is a plausibility test for node B alone; whether the two nodes
really hold the same `m` can only be confirmed by a later protocol step
(e.g. a key confirmation message), which is not part of this hardware.

## Window and register interface

`hhk_top` is the node. Its AXI4-Lite slave has 8-bit addresses and 32-bit
data (strobes ignored). A write is taken when AW and W are both valid and is
answered one clock later; a read likewise. Multi-word values are
little-endian (word 0 = bits 31:0).

| Addr | Name | Access | Content |
|------|------|--------|---------|
| 0x00 | CTRL | W | one-clock commands: bit0 win_start, bit1 win_close, bit2 encode, bit3 decode |
| 0x04 | STATUS | R | [0] win_open, [1] busy, [2] helper_ready, [3] key_ready, [4] decode_ok, [5] ibi_full, [14:8] ibi_count, [31:16] beat_count |
| 0x08 | SAMPLE | W / R | write: push one signed 16-bit sample; read: samples taken in this window |
| 0x0C | PROM_TH | R/W | prominence threshold (reset 32) |
| 0x10–0x18 | EDGE0–2 | R/W | quantizer edges in samples (reset 92, 102, 112) |
| 0x1C | DIST_MAX | R/W | decode_ok distance limit (reset 24) |
| 0x20, 0x24 | MSG0, MSG1 | R/W | 42-bit message m (node A) |
| 0x28 | KEYINFO | R | [15:0] key_cycles, [23:16] Hamming distance r vs ĉ |
| 0x2C | MATCH | R/W | [0] match_en (RW); [12:4] peer timestamps held, [31:16] matched beats (R) |
| 0x30–0x3C | HELPER_IN | R/W | helper received from node A |
| 0x40–0x4C | HELPER | R | helper h = b ^ c (node A) |
| 0x50–0x5C | RAW_BITS | R | quantized string b |
| 0x60–0x6C | R_VEC | R | r = b ^ HELPER_IN (node B) |
| 0x70, 0x74 | M_HAT | R | decoded message (node B) |
| 0x78 | PEER_TS | W | append one peer beat timestamp |

`win_start` clears the whole datapath (filter, detector, matcher, timer,
quantizer, ready flags) and opens a window. The window closes on `win_close`
or by itself after 15 360 samples (`WINDOW_LEN`); samples written while it is
closed are ignored. A complete exchange:

1. both nodes: `CTRL = win_start`; optionally `MATCH = 1` and the peer's
   timestamps into `PEER_TS`; stream the samples;
2. node A: write `MSG0/1`, `CTRL = encode`, wait for `helper_ready`, read
   `HELPER` and send it;
3. node B: write `HELPER_IN`, `CTRL = decode`, wait for `key_ready`, read
   `decode_ok` and `M_HAT`.

Commands given while `busy` is high are a protocol error (an assertion
reports it in simulation).

## Where this design departs from the published one

- **Filter coefficients, prominence threshold and bin edges** are not
  published; the values here are reasonable placeholders, all but the filter
  programmable.
- **Foot points vs maxima.** The source text calls the detected points beat
  "foot points" but its algorithm detects local maxima above a prominence
  threshold; the RTL detects maxima.
- **Information set and bit order** of the polar code are not published; see
  the construction above. A different set changes every codeword, so two
  nodes must use the same one.
- **Decoder latency.** The published decoder needs about 32 000 clocks per
  decode; this one needs 1 025. The published schedule is not described, so
  this is a faster schedule of the same algorithm, not a copy.
- **decode_ok rule** (distance between `r` and the re-encoded `ĉ`) is this
  design's own; the source only names the flag.
- **Matcher interface.** How a node learns the peer's timestamps is not
  described in the source; here software writes them. The source's list of
  hardware modules does not include the matcher, although its algorithm
  does.
- **Not built:** motion gating on IMU data and the heart-rate / variability
  window filters (evaluation-side screening with no hardware description),
  the random source for `m`, SHA-256 / AES key derivation, the optical
  front end and the vendor AXI interconnect. Software or other IP must
  provide them.
- **Resource figures.** The register arrays (LLR store, peer list) are
  written as plain arrays; no memory macros or FPGA-specific primitives are
  used.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
values worked out independently (a golden filter model, interval lists,
the generator matrix, a separate top-down recursive SC decoder in
`hhk_ref_pkg`) and checks the latencies above. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

`tb_hhk_top` runs two full-size nodes (no parameter overrides) through four
15 360-sample windows of synthetic PPG: pulses with a secondary wave and a
small ripple, intervals chosen one per quantizer bin so the expected strings
are known. It checks the raw strings, helper, `r`, the decoded message
against the reference decoder, the 1 028-clock key latency, a successful
agreement with a few disagreeing bits, a rejected one with many, and a
window with beats missing at one site that only agrees because matching is
on, and a slow-heart window (about 45 BPM, 89 beats) with reprogrammed
quantizer edges and threshold. It counts refractory and prominence rejections, the 64-interval limit,
both window-close paths, ignored samples, corrected errors, rejections, and
matched and unmatched beats, and fails if any never happened. It takes about
30 s.

What this does **not** show: behaviour on real PPG recordings. The bit and
key agreement rates of the method depend on the data, the filter and the
bin edges, and synthetic pulses cannot stand in for them.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hhk_pkg.sv tb/tb_hhk_top.sv \
          --top-module tb_hhk_top -Mdir obj_top
./obj_top/Vtb_hhk_top
```

Replace `tb_hhk_top` with any `tb_hhk_<block>` to run one block. Modules and
packages are found through `-I`, so only the package and the testbench need
naming. Simulation uses two-state values; every register that is read
before it is written is reset (the peer list is not, as entries
are only read once written).

To change the design: code size and information set are in `hhk_pkg`
(`POLAR_N`, `POLAR_K`, `INFO_MASK` — `POLAR_N` must stay 128 for the
decoder's fixed seven levels and the 64-interval string), the refractory
period, window length, peer list depth and match tolerance likewise; LLR
width is a decoder parameter.
