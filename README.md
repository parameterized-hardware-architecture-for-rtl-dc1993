# Sync-word frame synchronizer with parallel correlation

A receiver that gets a raw, noisy bit stream has to find where each frame
begins. This design does it the brute-force way: every frame is preceded by a
long random sync word (about a thousand bits) that transmitter and receiver
both know, and the receiver correlates the incoming stream with that word at
every possible bit position. The number of agreeing bits peaks sharply where
the sync word really is. A long word makes the peak stand out even when a
quarter or more of the received bits are wrong. For a 1020-bit word the
correct position agrees on about 750 bits when 26 % of bits are flipped,
while any other position agrees on about 510 ± 16.

The circuit takes the stream `Q` bits per clock cycle. Every cycle it checks
`Q` candidate positions in parallel. When the best agreement count exceeds a
threshold, it streams the following frame out, `Q` bits per cycle, with a
*valid* flag. It uses only XNOR gates, adder trees and a comparator tree, so
it pipelines deeply and scales to long sync words and wide inputs.

The architecture follows D. Nikolaidis, "Parameterized Hardware Architecture
for Frame Synchronization at all Noise Levels". The RTL here is an
independent implementation of that description. The section *Design choices
not fixed by the architecture* lists every point the description leaves
open and the choice made here.

## Terms and conventions

| symbol | meaning | default |
|---|---|---|
| `N` (n) | sync word length in bits, a multiple of `Q` | 1020 |
| `Q` (q) | bits received per clock cycle, `Q <= N` | 68 |
| k | frame payload length in `Q`-bit words (run-time input `frame_words`) | 300 in the reference tests |
| threshold | detection threshold (run-time input) | 663 = 0.65·1020 in the reference tests |
| `LAT` | `ceil(log2 N) + ceil(log2 Q)` | 10 + 7 = 17 cycles |

* **Bit order.** In each input word, bit 0 was received first and bit `Q-1` last.
  Throughout the design a lower index means an older bit.
* **Sync word order.** `sync_word[0]` is the first sync bit on the line.
* **Idle.** Between frames the line carries 0s. The idle gap can have any
  length, so a sync word can start at any bit offset inside a `Q`-bit word.
* **Location.** A group of bits is located by its first (oldest) bit. `m` is the
  location of the sync word inside the window register.

## Data flow

```
 din[Q-1:0] ──► isolation_window ──window[N+2Q-1:0]──► parallel_correlation ──► sum, m, delayed_window
                (N/Q+2 slots of Q)                      │ Q rows of N XNORs                   │
                                                        │ Q adder trees (ceil(log2 N) stages) ▼
 sync_word[N-1:0] ──────────────────────────────────────┘ comparator tree (ceil(log2 Q))  frame_capture ──► frame_data[Q-1:0]
                                                          delay register (LAT slots)      (threshold, k)   valid_data
```

`frame_sync_top` contains only these three units and their wiring. It also
brings `sum` and `m` out. With them the peak can be watched directly, for
example to lock on to a train of sync words before any data is sent.

## The window and the candidate positions

`isolation_window` is a shift register of `N/Q + 2` slots of `Q` bits each.
Each cycle the new word enters the top slot and every slot moves down by one.
Slot `s` occupies bits `(s+1)Q-1 .. sQ`, so the window holds the last
`N + 2Q` received bits in order, oldest at bit 0.

The correlator looks at `Q` candidate locations, `p = 0 .. Q-1`. Candidate
`p` is the stretch `window[p+N-1 : p]`, compared bit for bit with the sync
word. Each cycle the window moves by exactly `Q` bits. So a sync word that
arrives at any offset lands, in exactly one cycle, with its first bit in
slot 0 (positions `Q-1 .. 0`). In that cycle the candidate `p = m` matches
it. Detecting the word needs only `N + Q - 1` bits.

The two extra slots are there for the payload. When the sync word starts
at `m`, the first frame bit is at `m + N`, and the first payload word is at
`m+N+Q-1 .. m+N`. That range reaches position `N + 2Q - 2` when `m = Q-1`.
The next cycle the window has moved by `Q`, so the *same* range holds the
next payload word. The capture unit therefore latches `m` once and reads a
fixed bit range for the whole frame, with no realignment logic:

```
 bit N+2Q-1                                                     bit 0
 ┌──────────────┬───────────────────────────────────────┬───────┐
 │ payload word │        sync word (N bits)             │ <- m -│
 └──────────────┴───────────────────────────────────────┴───────┘
   m+N+Q-1..m+N   m+N-1 .. m                             slot 0 = Q-1..0
```

## Correlation pipeline

`parallel_correlation` contains:

* **XNOR rows.** `match_p = window[p +: N] ~^ sync_word` for each of the `Q` candidates:
  `N·Q` XNOR gates (69 360 at the default size).
* **Adder trees** (`adder_tree`). One per candidate, each counting the ones in its `N`-bit
  `match_p`. Values are added in pairs, level by level, with a register after
  every level: `ceil(log2 N)` stages. An odd value at the end of a level is
  carried up unchanged. Word width grows by one bit per level up to
  `$clog2(N+1)` (10 bits for `N = 1020`). The XNORs sit in front of the first
  adder level, in the same cycle.
* **Comparator tree** (`comparator_tree`). It has the same shape as an adder
  tree, with a comparator at every node. The larger value of each pair moves
  up, and its candidate index moves with it in a parallel register. After
  `ceil(log2 Q)` stages the root holds `sum` (the best agreement count) and `m`
  (its candidate index). On a tie the lower index wins.
* **Delay register** (`delay_register`). `LAT` slots of `N+2Q` bits that carry the
  window along with the pipeline. Its output `delayed_window` is the window
  that produced the current `sum` and `m`.

A new window enters every cycle and a new `(sum, m)` leaves every cycle. The
pipeline never stalls, and there is no back-pressure anywhere in the design.

## Detection and capture

`frame_capture` compares `sum` with `threshold` each cycle:

1. If no capture is running and `sum > threshold`, the sync word counts as
   found. The unit latches `m` and the frame length `k = frame_words`, and takes
   `delayed_window[m+N+Q-1 : m+N]` as payload word 0.
2. For the next `k-1` cycles it takes the same bit range again, using the
   latched `m`.
3. While a capture runs, every threshold crossing is ignored. This covers a
   payload that happens to contain the sync word. A frame gets exactly one
   chance to be detected.
4. The cycle after the last word, detection is armed again. A sync word placed
   right after the previous payload is therefore caught, so frames can follow
   each other back to back.

`frame_data` and `valid_data` are registered. The word taken in the
detection cycle appears one cycle later, and `valid_data` is then high for
exactly `k` consecutive cycles. `frame_words = 0` acts as 1.

### End-to-end timing

Edge numbering: the edge that loads input word `t` into the window is edge `t`.

* Window `t` exists after edge `t`.
* Its `sum`/`m` are on the outputs after edge `t + LAT`.
* If it triggers a detection, payload word 0 is on `frame_data` after edge
  `t + LAT + 1`.

For a sync word starting at stream bit `S`, detection uses window
`t = floor(S/Q) + N/Q + 1`. At the defaults the first payload word therefore
leaves 18 cycles after the window in which the whole sync word and one
payload word first sit inside the register. Throughput is `Q` bits per cycle
in and out: 68 bits per cycle, i.e. 27.2 Gb/s at 400 MHz, the clock rate the
original article reports for this size on an FPGA.

### Reset

`rst_n` is synchronous and active low. It clears the window to all zeros (the
idle value), the comparator-tree registers and the capture state. The
adder-tree and delay-register stages have no reset. For them to be flushed
with the idle window, **hold `rst_n` low for at least `LAT` cycles**. An idle
window agrees with the sync word only where the word has 0s, about `N/2`
bits, which is well below any useful threshold.

## Interface of `frame_sync_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | one input word per rising edge |
| `rst_n` | in | 1 | synchronous, active low, hold ≥ `LAT` cycles |
| `din` | in | `Q` | received bits, bit 0 first |
| `sync_word` | in | `N` | expected sync word, bit 0 first; keep stable |
| `threshold` | in | `$clog2(N+1)` | detection threshold, strict `>` |
| `frame_words` | in | `KW` (16) | payload length k in words, sampled at detection |
| `sum` | out | `$clog2(N+1)` | best agreement count of the window `LAT` cycles ago |
| `m` | out | `$clog2(Q)` | its location (first sync bit) |
| `frame_data` | out | `Q` | payload, bit 0 first |
| `valid_data` | out | 1 | `frame_data` carries payload |

Parameters: `N`, `Q`, `KW`. `N` must be a multiple of `Q` with `N >= Q`.
`isolation_window` checks this at elaboration. The sync word is an input, not
a constant, so one instance can serve any sync word of length `N`. Without
the word the frames cannot be found.

## Sizes

At the defaults the logic consists of 69 360 XNORs and 68 adder trees of 1019
adders each (10 pipeline stages). It also has a comparator tree of 67
compare-and-select nodes in 7 stages, a 1156-bit window and 17 × 1156 delay
bits.

The original article reports FPGA results for nine `(N, Q)` pairs:

| N | Q values reported |
|---|---|
| 540 | 36, 60, 90 |
| 780 | 30, 52, 78 |
| 1020 | 34, 68, 85 |

All nine satisfy `N mod Q = 0` and can be built from this RTL by setting `N`
and `Q`. Three versions were tested for detection accuracy: (540,60),
(780,52) and (1020,68), with thresholds 351, 507 and 663 (0.65·N) and frames
of 300 words.

## Design choices not fixed by the architecture

* **Bit numbering.** The bit numbering inside slots and the order of the sync
  word (bit 0 first) are chosen here.
* **Window width.** The window is `N + 2Q` bits, as the text and most figures
  give. One figure labels it `q + 2n`. The `N + 2Q` size is the one the
  capture arithmetic needs.
* **Detection test.** Detection is strict: `sum > threshold` ("surpasses").
* **Comparator ties.** The lower candidate index wins.
* **Odd tree levels.** An unpaired value at the end of an adder or comparator
  level is carried up unchanged.
* **Capture output.** The capture outputs are registered. The original
  describes the data as going "directly" from the delay register to the
  output; here it leaves one cycle later.
* **Run-time inputs.** The frame length `k` and the threshold are run-time
  inputs. The frame length is `KW = 16` bits wide.
* **Reset.** Resets are synchronous and active low, and the pipeline is not
  reset. See *Reset*.
* **No re-monitoring.** The original mentions an option it calls
  impractical: keep watching the peak after a detection and restart the
  capture if a higher peak follows. That option is not implemented; a
  detection is final.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself after a cycle budget.

| testbench | what it checks |
|---|---|
| `isolation_window_tb` | default size; reset to 0; every slot against the last `N/Q+2` inputs |
| `adder_tree_tb` | N = 1020 and 13; popcount of random, biased, all-0 and all-1 vectors at latency `ceil(log2 N)` |
| `comparator_tree_tb` | Q = 68 and 5; max and lowest tied index at latency `ceil(log2 Q)`, reset value |
| `delay_register_tb` | 1156 × 17 and 8 × 1; exact delay |
| `parallel_correlation_tb` | (24,6) and (60,12); all Q counts computed in the bench, `sum`, `m` and `delayed_window` at latency `LAT`, with planted, noisy and idle windows |
| `frame_capture_tb` | default size; payload bit range, k-cycle valid window, ignored peak during a capture, back-to-back detection, `sum == threshold` not detecting, k = 1, m = Q-1 |
| `frame_sync_top_tb` | (96,8), 24 frames; see below |
| `frame_sync_top_full_tb` | default (1020,68), 5 frames of k = 300, BER 0.26 on the whole stream |
| `frame_sync_workload_tb` | the three tested versions (540,60), (780,52), (1020,68) with k = 300 and 0.65·N thresholds, at several bit error rates; see below |

The two end-to-end benches build a stream with these features:

* idle gaps of random length, and back-to-back frames;
* clean and noisy sync words;
* one payload that contains a copy of the sync word;
* one sync word damaged (45 % of its bits flipped) so that it must be missed.

A behavioural model in the bench computes every window's `Q` agreement
counts and applies the capture rule. The RTL must match it on `sum`, `m`,
`valid_data` and `frame_data` on every cycle. Each frame's payload must also
come out at the predicted cycle. The benches count recovered frames,
back-to-back frames, noisy sync words detected, peaks ignored during a
capture, deliberately lost frames and idle cycles. A mechanism that never
occurs is a failure.

The reduced bench uses a threshold of 0.75·N. With a 96-bit word, 0.65·N is
only about 3 standard deviations above the random agreement level, so idle
noise would occasionally trigger false detections.

### Running a testbench

All packages must be read first. Example for the full-size end-to-end test
(about 15 s to build, under a second to run):

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/frame_sync_pkg.sv tb/frame_sync_top_full_tb.sv --top-module frame_sync_top_full_tb
./obj_dir/Vframe_sync_top_full_tb
```

For another testbench, replace the testbench file and top-module name. The
simulator picks up the modules it needs from `rtl/` through `-y rtl`.

## Limits

* **Not timed or built for hardware.** The RTL is written for synthesis, but
  it has not been timed or placed here. Clock rate and resource figures are
  the original article's, for an FPGA implementation, not measurements of
  this code.
* **Simulated accuracy is only a sanity check.** Accuracy at very low SNR
  depends only on `N`, the threshold and the channel. The workload bench
  runs far fewer frames than the 245 098 the original article used.
