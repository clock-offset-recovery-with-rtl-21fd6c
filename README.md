# iQSync clock-offset recovery in SystemVerilog

A quantum key distribution (QKD) receiver has to know which of the
sender's symbols each of its photon detections belongs to. Once the two clocks
are phase-locked, what is left is an unknown integer offset between the
sender's symbol counter (Alice) and the receiver's (Bob). That offset can be
hundreds of milliseconds, i.e. more than 10^8 symbols. Only a tiny, noisy
fraction of the symbols is ever detected: with 70 dB of channel loss, a few
thousand clicks out of 10^10 symbols.

iQSync recovers this offset without FFTs, floating point or stored patterns.
Alice sends a pseudo-periodic pattern that spells out the bits of every
symbol index. Bob reads the offset back one bit at a time, from the least
significant bit up, using only counters, additions and shifts. This
repository is RTL for both ends:

* a real-time pattern generator at Alice;
* at Bob, an acquisition unit, a detection memory, a sub-timebin aligner and
  a recovery engine that runs the bit-by-bit search in hardware.

It also has self-checking testbenches and a behavioural reference model.

## 1. The pattern

Symbols are sent in binary pulse-position modulation (PPM). A symbol lasts
two timebins. A `0` is a pulse in the early timebin and a `1` a pulse in the
late one. In the reference system a timebin is 800 ps and a symbol 1.6 ns.
Because a detection of either value is equally likely, loss does not bias the
bits.

The pattern is built from **levels** `l = 0 .. lmax`:

* Level 0 is all zeros. It tells Bob which of the two timebins starts a
  symbol.
* Level `l > 0` at symbol index `ks` carries bit `l-1` of `ks`. In general,
  the symbol of level `l` is `LSB((ks << 1) >> l)`.

A **group** is `2^(lmax+1)` symbols long. With a **degree of interleaving**
`di`, group `g` serves levels `g*di .. min(g*di+di-1, lmax)`. For every
symbol, Alice picks one of those levels at random and sends that level's
symbol. The pattern has `ceil((lmax+1)/di)` groups.

* With `di = 1`, each level has a group of its own. The pattern is longest
  and most robust.
* With `di = lmax+1`, all levels share one group. The pattern is shortest,
  but each level gets only `1/di` of the detections.

Example, `lmax = 2`, `di = 1` (24 symbols):

```
ks     0 1 2 3 4 5 6 7 | 8 9 10 11 12 13 14 15 | 16 17 18 19 20 21 22 23
level  0 ...           | 1 ...                 | 2 ...
s      0 0 0 0 0 0 0 0 | 0 1 0  1  0  1  0  1  | 0  0  1  1  0  0  1  1
```

Offsets are recoverable in the range `-2^(lmax-1) <= offset < 2^(lmax-1) - 1`
symbols. For `lmax = 28` that is 2^27 symbols, or 215 ms at 1.6 ns per
symbol. The `di = 1` pattern is then `29 * 2^29` symbols long (24.9 s).

The protocol around the pattern:

1. Alice and Bob agree on `lmax` and `di`.
2. Alice sends a single start message over the classical channel. This
   channel may have large, unknown latency; the latency simply becomes part
   of the offset.
3. At the same time, Alice starts the pattern.
4. Bob starts counting symbols when the message arrives and records every
   detection.

## 2. Reading the offset back (the hard part)

Bob holds a list `D` of detection timebin indices, counted from his own
start. His recovered offset `delta` (in timebins) starts at 0 and is built one
bit per level.

**Which detections count for a level.** Level `l` lives in group
`g_req = floor(l/di)`. A detection is in group `(D>>1) >> (lmax+1)`. It
contributes only if its position inside the group, `(D>>1) mod 2^(lmax+1)`,
lies in the middle half `[2^(lmax-1), 3*2^(lmax-1))`. This is the
*acceptance window*. As long as the true offset is below a quarter group,
every accepted detection really was sent in the group Bob assumes. The first
and last quarters could have come from a neighbouring group and are dropped.
The window test uses Bob's *unshifted* index. Only the symbol comparison
uses the shifted one.

**Counting.** For an accepted detection, let `x = D + delta`. The received
bit is `x[0]`, since a late pulse means 1. The expected bit is `x[l]` for
`l > 0` and 0 for level 0. A match adds 1 to a signed counter `C` and a
mismatch subtracts 1.

The bits of `delta` below `l` are already right, so the detections of level
`l` now agree with the pattern exactly when bit `l` of the remaining offset is
zero. When that bit is one, they disagree on every detection. Detections sent
for the other interleaved levels of the group only add zero-mean noise.
Therefore `C < 0` means "bit `l` is set", and `delta += 2^l`.

**Sweeping the memory.** The detections are stored in time order. The sweep
for level `l` starts at index `k-`. It stops at the first detection of a
later group. If the next level belongs to the next group (`(l+1) mod di == 0`),
that detection's index becomes the new `k-`. Otherwise the next level sweeps
the same group again. Each detection is visited once per level of its group.
The total work is therefore about `di` times the number of detections, plus
the first detection of each following group, no matter how long the pattern
is.

**Sign and range.** The accumulated value is the offset negated, modulo
`2^(lmax+1)` timebins. If it is above `2^lmax`, it is reduced by
`2^(lmax+1)` and then negated. The result is positive when Bob's counter is
ahead of Alice's. The offset in symbols is `delta/2`.

The worked case in `offset_recovery_tb` is `lmax = 3`, `di = 2`, with Bob 3
symbols ahead and no loss. Level 0 gives `C > 0`. Level 1 gives `C = -4`, so
`delta = 2`. Level 2 gives `C = 6`. Level 3 gives `C = -2`, so `delta = 10`.
Since 10 > 8, the result is `-(10-16) = 6` timebins, i.e. 3 symbols.

## 3. Sub-timebin alignment

The recovery needs whole timebin indices. Bob's TDC gives, for each
detection, its position inside the current symbol period: one bit for the
timebin and `FINE_W = 4` bits of phase. The phase of all signal pulses is the
same up to jitter, and it is unknown.

During acquisition, `timebin_align` builds a 16-bin histogram of the phase.
It then picks the fullest bin `p` and shifts every timestamp by `8 - p`
sixteenths of a timebin. This centres the pulses in their timebins. Dropping
the four phase bits then gives the timebin index. A detection is never moved
by more than half a timebin.

## 4. Hardware organisation

```
            Alice (iqsync_alice)                          Bob (iqsync_bob)
  a_start -> pattern_gen --sym/ppm--> [optics] ...> [SPAD+TDC] --det_valid/phase--+
              ^   |                                                                 v
      level_rng   +--start_msg--> [classical channel] --b_start_msg--> det_capture --wr--> det_buffer
                                                                          |  hist              | rd (1 cycle)
                                                                          v                    v
                                                         timebin_align(histogram, peak, convert)
                                                                          | D(k)
                                                                          v
                                                         offset_recovery --> delta, delta_sym, iters
```

`iqsync_top` holds both ends with one shared configuration `cfg` (`lmax`,
`di`). Everything between them is outside the top and appears as ports:
optics, the detector, the TDC, and the classical and clock channels. Both
ends run on one clock here. In a real link each end has its own clock,
phase-locked to the other, with one clock cycle per symbol.

| module | role | timing |
|---|---|---|
| `iqsync_pkg` | widths, `cfg_t`, level-symbol function | |
| `level_rng` | 32-bit xorshift for the random level choice | one word per cycle when enabled |
| `pattern_gen` | pattern of section 1, PPM pair, start message | first symbol 2 cycles after `start`, then one per cycle; `start_msg` with symbol 0, `done` with the last |
| `iqsync_alice` | `level_rng` + `pattern_gen` | as above |
| `det_capture` | window of one pattern length from the start message; timestamps `{symbol, timebin, phase}` | write one cycle after the detection; `overflow` if the buffer is full |
| `det_buffer` | dual-port RAM, 2^18 x 39 bits | read data one cycle after `rd_en` |
| `timebin_align` | phase histogram, peak search, timestamp-to-timebin conversion | search takes 16 cycles; conversion is combinational |
| `offset_recovery` | section 2 as a state machine | one detection per cycle, plus 2 cycles per level, plus 2 cycles |
| `iqsync_bob` | acquire, align, recover; result `delta` / `delta_sym` | `done` pulses with the result |
| `iqsync_top` | both ends | |

The recovery engine evaluates the word it has just read and, in the same
cycle, issues the read of the next one. A level therefore costs exactly
(detections swept) + 2 cycles. `iters` counts inner-loop iterations, which is
the natural complexity measure of the method. For a 4,000-detection,
`di = 4` run this is about 16,000 cycles, which takes microseconds.

### Configuration and sizes

| name | default | meaning |
|---|---|---|
| `LMAX` | 28 | largest `lmax` the widths support (the reference system's value) |
| `cfg.lmax`, `cfg.di` | runtime | `1 <= lmax <= LMAX`, `1 <= di <= lmax+1`; any `di`, not only powers of two |
| `SYM_W` / `TB_W` | 34 / 35 | symbol / timebin index; holds the longest pattern, 29 groups of 2^29 symbols |
| `FINE_W` | 4 | TDC phase bits per timebin |
| `DET_DEPTH` | 262144 | detection buffer words |

The buffer depth follows from the detector, not from the noise-free runs,
which need only 3,000 to 4,500 words. With a dead time of about 96 us, a 24.9
s pattern can produce at most about 258,600 detections. A run with noise
probability 1e-5 per symbol produces about 150,000 noise clicks over such a
pattern. 2^18 words hold either. The memory is 10 Mbit, which maps to block
or ultra RAM on a large FPGA.

## 5. Where this RTL departs from or adds to the method

* **Random source.** The reference transmitter expanded randomness with
  AES-CTR. Here a 32-bit xorshift replaces it, since the level choice only has
  to be unpredictable to Bob's counter statistics. The pick within a group is
  `floor(rnd16 * range / 2^16)`, which is biased by less than 2^-11 for
  `di > 1`.
* **Level-bit wording.** One description of the method says the transmitted
  symbol is "the `l`-th least significant bit" of the index. The algorithm
  and the published example patterns both use bit `l-1`, i.e.
  `LSB((ks<<1)>>l)`, and that is what is built.
* **Recovery in logic.** The reference system ran the recovery in software on
  a PC. Here it is a hardware engine with the same arithmetic. `floor(l/di)`
  is kept as a counter modulo `di`, so no divider is needed.
* **This design's own choices:**
  * Bob's acquisition window is exactly one pattern length. Anything pushed
    past either end by the offset falls in a discarded quarter group.
  * The timestamp format.
  * The 16-bin histogram and its tie rule (lowest bin). The histogram is
    built during acquisition instead of in a second pass.
  * Negative aligned timestamps clamp to timebin 0.
  * One symbol per clock at Alice. A real 625 MHz transmitter would produce
    several symbols per fabric clock and serialise them. `pattern_gen` would
    then be replicated per lane, which is not done here.
  * Reset values and the handshakes.
* **Not built:** the optical transmitter and receiver, the single-photon
  detectors, the TDC, clock recovery, and the classical network link. These
  are instruments or analog parts, and the top exposes their signals.

## 6. Simulation

Every module starts with a comment on its function, interface and timing.
Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/iqsync_ref_pkg.sv` is an independent
behavioural model: a pattern generator, a lossy/noisy detection model, and the
recovery written as plain integer loops. The testbenches compare against it.

Build and run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/iqsync_pkg.sv tb/iqsync_ref_pkg.sv tb/iqsync_top_tb.sv --top-module iqsync_top_tb
./obj_dir/Viqsync_top_tb
```

| testbench | what it establishes |
|---|---|
| `level_rng_tb` | bit-exact xorshift sequence, seeding, hold |
| `pattern_gen_tb` | the published 24-symbol example; for six configurations: every symbol, level ranges, length, start message, PPM, back-to-back timing |
| `det_capture_tb` | timestamps and addresses cycle by cycle, window length, overflow at 2^18 detections |
| `det_buffer_tb` | random write/read-back of the whole memory, read latency |
| `timebin_align_tb` | peak finding under clustered + uniform phases, 16-cycle search, conversion on both sides of the half-timebin boundary |
| `offset_recovery_tb` | the worked example (`delta = 6`); 60 random runs with loss and noise compared with the model for `delta`, `iters` and cycle count; true offset for lossless `di = 1` runs |
| `iqsync_alice_tb`, `iqsync_bob_tb` | each end alone, against the model |
| `iqsync_top_tb` | end to end through a channel model (classical latency, optical delay in timebins, phase, jitter, loss, noise); counts and requires: complete patterns, interleaving, positive/negative/odd offsets, non-zero alignment shift, noise, buffer overflow |
| `iqsync_workload_tb` | the recovery engine at full size on the four configurations of the reference experiment (`lmax = 28` with `di = 1` and `di = 4`; `lmax = 28` with added noise, about 170,000 detections; `lmax = 26`), with detection lists drawn statistically over patterns of up to 1.6e10 symbols; `delta`, `iters` and cycle count against the model, and the true offset in at least 7 of 8 runs |
| `iqsync_full_tb` | all parameters at defaults, `lmax = 28` with maximum interleaving (`di = 29`, a 2^29-symbol pattern, offsets up to 215 ms); about 100,000 detections; `delta` must equal both the model and the true offset. It runs about 4 minutes |

**Full-size coverage.** The `di = 1` and `di = 4` patterns at `lmax = 28`
(1.6e10 and 4.3e9 symbols) are too long to simulate cycle by cycle, so the
largest pattern simulated end to end is the 5.4e8-symbol, `di = 29` one. For
those longer patterns, `iqsync_workload_tb` runs Bob's recovery on detection
lists of the experiment's size. The acquisition logic (counter
widths, window length) is the same code that the full-size test exercises.

**Stimulus shortcut.** The full-size test draws detections only from symbols
that land inside Bob's acceptance windows. It does this to spend simulation
time on detections that matter. The recovery would discard the others.

Each testbench also has a deliberately broken copy of its module that it is
known to reject, e.g. the acceptance window disabled or the alignment shift
negated.

## 7. How far to trust it

The pattern generator and the recovery engine follow the published
algorithms step by step. They are checked bit-exactly against an independent
model, including the published example pattern and the worked recovery.

* The success probability of a run is a property of the method, not of the
  RTL. With strong interleaving and few detections, Bob can return a wrong
  offset even though the hardware matches the model. The end-to-end test
  shows one such run.
* The sub-timebin aligner, the acquisition window and the buffer sizing are
  this design's own engineering around the method and were checked only
  against their own specification.
* Nothing here has been run on an FPGA or timed. The recovery engine has a
  combinational path from the memory output through an adder and compare to
  the next read address, which may need a pipeline stage at high clock rates.
