# Multi-stage NFA filter for regular-expression packet inspection

Matching network traffic against a large set of regular expressions (REs) at
100 Gbit/s and beyond takes many parallel copies of the matching automaton. On an
FPGA those copies, not the automaton itself, use up the logic. This design saves
logic with a cascade of cheaper, *approximate* automata:

* Stage 1 runs at the full line rate with many copies of a small NFA `A1`. `A1`
  accepts every packet that the precise NFA `A` accepts, and some packets that it
  does not.
* Only the packets that `A1` accepts go on to stage 2. That is a small fraction of
  the traffic, so stage 2 needs fewer copies, and each copy can be a larger, more
  precise NFA `A2`.
* The last stage holds the precise NFA, so its output is exactly the packets that
  match. If the precise NFA does not fit, the last stage holds the best
  approximation that does, and software removes the last false positives.

Every stage throws away packets that certainly do not match. No stage may throw
away a packet that does. The approximate NFAs come from an offline step that
prunes and merges the rarely used states of `A`. That step is not part of the
RTL: it runs in software over a sample of traffic and produces the constant
tables the RTL takes as parameters.

The RTL follows the architecture in *Deep Packet Inspection in FPGAs via
Approximate Nondeterministic Automata* (Češka et al.). The paper gives the overall
organisation and the sizes. Most of the micro-architecture here (scheduling,
buffering, filtering, interfaces) is this implementation's own. The section
"What is taken from the source and what is not" lists which parts are which.

## How a stage matches packets

One stage is a `match_engine`. It holds `K` copies of one NFA (`nfa_unit`, called
FA 1..K below) and one shared `packet_buffer`. Each buffer word is `N = K*NB`
bits. It is stored as `K` rows of `NB`-bit blocks, and row `i` is read only by
FA `i`.

A packet is matched by one **context**, which travels round the ring of FAs:

```
cycle t      FA 1 reads block 1 of word w of the packet, starting from the configuration
             the context brought back from FA K (or from {q0} for the first word)
cycle t+1    FA 2 reads block 2 of word w, starting from FA 1's result
  ...
cycle t+K-1  FA K reads block K of word w
cycle t+K    back at FA 1 with word w+1
```

A **configuration** is the set of active NFA states, one bit per state. It
travels with the context from FA to FA, together with the packet's match bitmap.
Each FA is a single register stage. The ring holds exactly `K` contexts, one at
each FA. Each context advances one word every `K` cycles, so the engine as a whole
takes one `N`-bit word per clock. With `NB = 8` at 200 MHz, each FA handles
1.6 Gbit/s, and `K = 64` FAs handle 102.4 Gbit/s on a 512-bit bus.

The **scheduler** sits at the entry of FA 1 and works on the context coming back
from FA K:

1. If that context has just carried the last word of its packet, the packet's
   bitmap is written to the packet table and the context is freed.
2. A free context takes the oldest packet that has arrived but has no context yet.
3. A context whose next word is already in the buffer takes that word on this trip.
   Otherwise it makes an empty trip (`ev_wait`) and tries again `K` cycles later.
   This only happens when the input delivers a packet's words more slowly than one
   per `K` cycles.

Contexts never stop the ring, so no FA ever stalls. In the last word of a packet,
only the first `nblk` FAs process their block. The rest pass the configuration
through unchanged.

**Matching is on prefixes.** A packet matches an RE as soon as the NFA reaches a
state that reports that RE, whatever follows. Each state has an RE bitmap (zero
for a non-final state). Whenever a state is active, its bitmap is ORed into the
packet's match bitmap, and bits once set stay set. The engine keeps matching to
the end of the packet, so the bitmap lists every matching RE.

**Packet table and retirement.** Each arriving packet gets a table entry, in
arrival order. The entry holds its start and end address in the buffer, a done
flag and its bitmap. Packets leave in arrival order. When the oldest packet is
done:

* If its bitmap is non-zero, it is read out of the buffer word by word, with the
  bitmap on every word.
* If its bitmap is zero, it is dropped in one cycle.

Either way its buffer space is freed. The input is stalled (`in_ready` low) when
the buffer or the table is full.

When the last word of a forwarded packet leaves, the next entry is looked up too.
If it is also done and matched, its first word follows in the next cycle. So a
stage whose traffic all matches still forwards one word per clock.

**Buffer size.** At line rate, a packet of `L` words stays in the buffer about
`K*L` cycles: that is how long its context needs for it. Meanwhile `K*L` new words
arrive, so the buffer must hold at least `K*L` words, or stage 1 falls below line
rate. A 1518-byte frame is 24 words of 64 bytes, which gives 64 × 24 = 1536 words.
The default `DEPTH` is therefore 2048 words (1 Mbit per stage). A packet longer
than `DEPTH` words would deadlock the stage and is not allowed.

**Timing.** Take an idle engine and a 1-word matching packet accepted in cycle `t`.
The packet is assigned and issued in cycle `t+1`, leaves FA K after cycle `t+K`,
and is marked done. The first output word is valid in cycle `t+K+3`.

## NFAs as tables

An NFA is given to `nfa_unit` (and through it to `match_engine`) as constant
parameters, with types from `dpi_pkg`:

* `TRANS[T]`: transitions `{src, dst, lo, hi}`. The transition fires when `src` is
  active and the input byte lies in `lo..hi`.
* `FINAL[Q]`: the RE bitmap of each state.
* State 0 is the initial state.

The next configuration is the usual one-flip-flop-per-state mapping. A state
becomes active if some transition into it fires. With `NB > 8`, the `NB/8` bytes
of a block are applied one after another within the cycle, first byte in bits
`[7:0]`.

`nfa_tables_pkg` holds the three NFAs of the default build. They form a chain
of over-approximations built from a small textbook example over the symbols
`a` and `b`:

| NFA | states | transitions | reports | prefix language |
|-----|--------|-------------|---------|-----------------|
| A3 (precise) | q0..q4 | q0-a→q1, q1-a→q1, q1-b→q2, q2-b→q4, q1-a→q3 | q3: RE 0, q4: RE 1 | `a a* a…` (RE 0), `a a* b b…` (RE 1) |
| A2 | q0..q3 | A3 without q4 | q3: RE 0, q2: RE 1 | `a a* a…` or `a a* b…` |
| A1 | q0, q1 | q0-a→q1 | q1: RE 0 and RE 1 | `a…` |

A2 is A3 *pruned* at q4. Pruning removes a state, and every state left with an
edge into a removed state (here q2) becomes final. A1 is A3 pruned at q2 and q4,
then reduced by simulation. A border state reports the REs of the final states
pruned behind it. This is why the bitmaps of stages 1 and 2 are over-approximate,
and why only stage 3's bitmap is passed out.

To use real rule sets, generate these tables from the reduced NFAs (any state
count below 65,536) and set the stage sizes (below).

## Stages and links

`multistage_unit` chains three engines:

```
in 512 b ─► stage 1: 64 × A1 ─► link 512→256 ─► stage 2: 32 × A2 ─► link 256→128 ─► stage 3: 16 × A3 ─► out 128 b + RE bitmap
```

Stage `i` needs `ceil(traffic into stage i / (NB × f_clk))` FAs. The source gives
`K1 = 64` for 100 Gbit/s. It gives no stage sizes for its evaluated rule sets. The
defaults 32 and 16 give the stages the same throughputs as its worked three-stage
example (102.4, 51.2 and 25.6 Gbit/s). Set `K1`, `K2`, `K3` as needed, with each a
multiple of the next. These sizes have been simulated:

| `NB` | `K1`/`K2`/`K3` | input bus | input rate at 200 MHz | note |
|------|----------------|-----------|------------------------|------|
| 8  | 64/32/16   | 512 b  | 102.4 Gbit/s | default |
| 32 | 16/8/4     | 512 b  | 102.4 Gbit/s | the worked three-stage example |
| 8  | 128/64/32  | 1024 b | 204.8 Gbit/s | |
| 8  | 256/128/64 | 2048 b | 409.6 Gbit/s | |

With the default `DEPTH` of 2048, all of them keep stage 1 at line rate for
1518-byte frames (`K1` × words per frame is at most 1536).

A later stage has fewer FAs, so its words are narrower. A `stage_link` holds one
wide word and sends it on as `KI/KO` narrow words, lowest blocks first. In a
packet's last word it sends only the sub-words that hold valid bytes.

## Interfaces

All packet streams use the same set of signals:

* `valid`/`ready` handshake. A word moves when both are high. `in_ready` never
  depends on `in_valid`.
* `data`: byte 0 of the word in bits `[7:0]`.
* `sop`/`eop`: first and last word of a packet.
* `nblk`: number of valid `NB`-bit blocks in the word. It must be `K` except in
  the last word. With `NB > 8` a packet is therefore a whole number of blocks
  (use `NB = 8` for byte granularity).

Packets start at block 0 of a word. While stalled, a word must be held stable; the
engine checks this with an assertion, and also checks that only last words are
partial.

The top adds:

* `out_match`: the stage 3 bitmap, valid on every output word.
* `stage_drop`, `stage_pass`, `stage_wait`: per-stage pulses, one bit per stage.

Reset `rst_n` is asynchronous and active low. It clears the control state. Buffer
memories and table entries are not reset: each is written before it is read.

## What is taken from the source and what is not

From the source:

* The multi-stage cascade of over-approximating NFAs, each stage passing on only
  the packets it accepts.
* The engine of `K` FAs sharing one buffer. A word is stored as `K` blocks of `n`
  bits, FA `i` reads row `i`, and the configuration is passed from FA to FA and
  from FA K back to FA 1, so `K` packets are matched in parallel.
* Prefix acceptance and the match bitmap of all matching REs.
* 8-bit NFAs at 200 MHz, 64 of them for 100 Gbit/s on a 512-bit bus.
* The pruning rule used to derive A2 and A1, and the example NFA they come from.

This implementation's own choices:

* The context scheduler.
* The packet table, in-order retirement, drop/forward and buffer freeing.
* The buffer depth and the second, word-wide read port.
* The stream interfaces and the width converters between stages.
* The NFA table format and which RE each final state reports.
* Stage sizes 32 and 16.

Departures worth knowing:

* The source draws a bitmap output on every FA. Here the bitmap is taken after
  FA K, up to `K-1` cycles later than from the FA that read the last block.
* Buffer reads are asynchronous (distributed-RAM style). A block-RAM version needs
  the row addresses one cycle earlier, which the token pipeline can provide.
* The source's evaluated rule sets (Snort `backdoor`, `spyware`, `pop3`, L7
  `l7-all`, `sprobe`) are not included, because their automata are not published
  with it. The design can hold them as tables: a state index is 16 bits.
* The packet receive path (MAC, 512-bit bus) and the DMA transfer to the host are
  outside this RTL.

## Files

| file | content |
|------|---------|
| `rtl/dpi_pkg.sv` | symbol width, RE count, transition type |
| `rtl/nfa_tables_pkg.sv` | the A1/A2/A3 tables |
| `rtl/nfa_unit.sv` | one FA: configuration in, block in, next configuration and bitmap out |
| `rtl/packet_buffer.sv` | row-organised shared buffer with per-row, metadata and word read ports |
| `rtl/match_engine.sv` | one stage: FA ring, scheduler, packet table, retirement |
| `rtl/stage_link.sv` | width converter between stages |
| `rtl/multistage_unit.sv` | top: three stages and two links |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_multistage_workloads` |
| `tb/multistage_harness.sv` | end-to-end test of the top at a given size, used by `tb_multistage_workloads` |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and finishes. Each has a
watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/dpi_pkg.sv rtl/nfa_tables_pkg.sv tb/tb_multistage_unit.sv \
    --top-module tb_multistage_unit -Mdir obj && obj/Vtb_multistage_unit
```

Replace the testbench name for the others.

* `tb_nfa_unit`: random configurations and blocks against hand-written
  next-state functions of A3 and of a second example NFA (8-bit and 16-bit
  blocks), plus whole strings against the two REs.
* `tb_packet_buffer`: random writes and reads against a shadow copy.
* `tb_stage_link`: random packets with random stalls are reassembled and compared
  byte for byte. The rate check requires one narrow word per clock.
* `tb_match_engine` (K = 4): packets with random gaps and stalls. Only matching
  packets may come out, in order, with the right bitmap. A second phase requires
  one word per clock with no stall. A third requires a latency of exactly K+3. A
  fourth requires back-to-back matching packets to leave at one word per clock.
* `tb_multistage_unit`, at the full default size: 525 packets of 1–1518 bytes.
  The output must be exactly the matching packets. Each stage must both drop and
  forward packets, contexts must wait, output backpressure must reach the input,
  and non-matching traffic must enter at one 512-bit word per clock. The full run
  takes well under a second.
* `tb_multistage_workloads`: the same test at the three other sizes in the table
  above, each at its own line rate.
