# A pattern-driven on-chip memory hierarchy for neural network accelerators

Neural network accelerators read their weights and features in patterns that
are known before the network runs: a block of words is read, read again a
number of times, then the block moves on by a few words and the next block
overlaps the last one. Storing the whole data set on chip wastes area;
caching it the way a CPU does is pointless when every future address is
known. This design sits between the off-chip memory and the processing
units and stores only the window of data the current pattern still needs.
It fetches the off-chip stream in order, passes it through one to five
levels of on-chip SRAM, and each level replays its part of the pattern
to the level below. A final output shift register (OSR) cuts the level's
wide words into the width the processing units take, with a selectable
shift between outputs.

The RTL is written in SystemVerilog (IEEE 1800-2017) and is fully
parameterised. Its default build is a two-level hierarchy with an OSR:

| part | default |
|---|---|
| off-chip data / address | 32 bit / 32 bit word address |
| level word width | 128 bit |
| level 0 | one single-ported macro, 128 words |
| level 1 | one dual-ported macro (one read, one write port), 32 words |
| OSR | 256 bit, 32-bit output, shifts 32, 16 and 8 bit |
| clocks | off-chip clock for the input buffer, accelerator clock for the rest |

## Data path

```
 off-chip clock domain            |  accelerator clock domain
                                  |
 data_in_i ──► input_buffer ──────┼──► buffer_handshake ──► level 0 ──► level 1 ──► ... ──► osr ──► data_out_o
 global_read_address_o ◄──┘  full ┼──►            reset  ◄──┘   (one hier_level per level)
                             reset◄┼──
```

1. **Input buffer** (`input_buffer`, off-chip clock). It requests
   consecutive off-chip words from `start_address_i` on, and packs
   `WORD_W/OFFCHIP_W` of them into one level word. The first word received
   goes into the most significant bits. When the level word is complete it
   raises *buffer full* and holds the word.
2. **Clock domain crossing** (`buffer_handshake`, accelerator clock). It
   synchronises *buffer full* through two flops. It offers the word to level
   0, and after level 0 has written it, raises *reset buffer* until *full*
   has fallen. The handshake is four-phase: the buffer does not raise *full*
   again until *reset buffer* is low. This makes it safe for any ratio of
   the two clocks. The data bus is not synchronised. It is stable for as long
   as *full* is high, and *full* reaches the accelerator side two edges late.
3. **Hierarchy levels** (`hier_level`, each with its own `level_ctrl` and
   one or two `mem_bank`s). Every word passes through every level in order.
4. **Output** (`osr`), or the last level directly when `USE_OSR = 0`.

## How a level runs its pattern

This is the core of the design and the part that needs the most care when
configuring it.

A level sees a stream of words from the level above (level 0 sees the
off-chip stream). It writes stream word *n* into entry *n mod DEPTH*,
where DEPTH is the level's capacity over all its banks. The level is a
circular buffer with one occupancy bit per entry. It writes whenever the
entry under its write pointer is free and the source offers a word.

Reads follow three settings, taken while `reset_i` is high:

* `cycle_length` *L*: the number of words in one pattern cycle (the window).
* `inter_cycle_shift` *S*: how far the window moves when it moves.
* `skip_shift` *K*: the window moves after every *K+1* completed cycles.

The read address is `(offset_pointer + pattern_pointer) mod DEPTH`.
`pattern_pointer` counts 0 to *L-1*. `offset_pointer` grows by *S* after
every *K+1* cycles. Step *k* of the pattern therefore reads stream word

```
    floor(floor(k / L) / (K + 1)) * S  +  (k mod L)
```

* *S = 0*: a **cyclic** pattern (the same *L* words again and again).
* *S = L*: a **linear** (sequential) stream.
* *0 < S < L*: a **shifted cyclic** (overlapping) pattern.

An entry is freed as soon as it has been read for the last time. That
happens during the last repeat of a cycle, for the first *S* words of the
window, which the next shift leaves behind. A freed entry can be refilled
straight away, while the rest of the window is still being read. A level
therefore loads ahead of the pattern as far as its capacity allows. A
reload counter counts how many words the level may still load; it starts
at DEPTH and grows by one for each freed entry.

The levels are composed by giving each one its own settings. The pattern
seen at the output is level 0's pattern applied to the off-chip stream,
then level 1's pattern applied to level 0's output, and so on. Two common
set-ups:

* **Shifted cyclic pattern that fits the last level.** Run level 0 linear
  (for example *L = S =* half its depth, so it refills one half while the
  other half drains). Run the last level with the real *L, S, K*.
* **Cycle longer than the last level.** Run level 0 with the real pattern,
  which holds the whole cycle. Run the last level linear, so it only streams.
  The transfer between two levels runs at most every second cycle (see
  below), so a cycle longer than the last level halves the output rate.

There is no run-time check of the settings. They must satisfy
`1 <= cycle_length <= level depth` and `inter_cycle_shift <= cycle_length`.
A cycle longer than the level can never be complete in it, so such a level
stalls for ever.

### Port rules and rates

* **Single-ported macro.** A read and a write cannot happen in the same
  cycle. The write wins (write-over-read), and the read waits for the next
  free cycle. Writes are never starved this way, so the hierarchy cannot
  deadlock.
* **Two single-ported banks.** Even addresses go to bank 0 and odd addresses
  to bank 1. A read and a write proceed together unless they hit the same
  bank.
* **Dual-ported macro.** Reads and writes are independent. The controller
  never reads and writes the same entry in one cycle, because it only writes
  free entries and only reads occupied ones.
* **Inner level.** It holds one read word in its output stage. It starts the
  next read no earlier than the cycle in which the next level writes the
  previous word. A transfer between levels therefore takes a read cycle
  and a write cycle, at most one word per two cycles.
* **Last level.** It has a two-word output stage and can give one word every
  cycle. With the default 128-bit words and 32-bit outputs, the last level
  only needs to deliver a word every fourth cycle.

Read data comes one cycle after the read (synchronous SRAM).

## Output shift register

The OSR keeps its data left-aligned. `fill` bits from the top are valid
and the rest are zero. The accelerator sees the top `OUT_W` bits.
`shift_select_i` picks an entry of the shift list `SHIFTS`; 0 stops the
output. In every cycle in which at least `max(OUT_W, shift)` bits are held
and `disable_output_i` is low, the OSR gives an output and shifts left by
the selected amount.

* A shift equal to `OUT_W` cuts the stream into consecutive words.
* A smaller shift gives overlapping windows, for example a 32-bit window
  that advances by 8 bits.
* A larger shift skips bits.

In the same cycle, if there is room for a whole level word after the
shift, the next word is taken from the last level and placed directly below
the held bits. `OSR_W` must be at least `IN_W + OUT_W - 1` if shifts smaller
than `OUT_W` are used. Otherwise the register could hold too few bits for
an output and too many to take another word.

The weight-memory use (a 384-bit weight port fed from 128-bit words) is
built with `OSR_W = OUT_W = 384` and a single shift of 384. It gives one
384-bit output every three cycles.

## Weight-memory build

As the weight memory of an 8x8 MAC array, the hierarchy replaces
macros that hold a whole network's weights. The build has a single
dual-ported level of 104 x 128 bit and a 384-bit OSR (64 weights of 6 bit
per output). It streams each layer's weights from off-chip and keeps only
the window the layer is reusing. `tb_case_study` runs the window patterns
of the 13 layers of a TC-ResNet keyword-spotting network. Their cycle
lengths are 98, 45, 49, 41, 20, 24, 16, 24, 1, 8, 12, 4 and 1, counted
here in 128-bit words. The largest is below the level depth of 104.

Once a window is on chip, the array gets a 384-bit word every three
cycles. When new weights have to come from off-chip, the clock-crossing
handshake limits the rate. With an off-chip clock four times the
accelerator clock and one cycle of read latency, one 128-bit word takes
about six accelerator cycles. The original work reports three, so its
buffer must overlap the handshake more than this one does. Layers with
little reuse, such as the fully connected ones with a cycle length of 1,
run at about a third of the peak rate. Preloading the next layer while
the current one runs is possible with `disable_output_i`, but it is not
automated.

## Top-level interface (`mem_hierarchy`)

| port | dir | meaning |
|---|---|---|
| `internal_clk_i`, `external_clk_i` | in | accelerator clock, off-chip clock |
| `reset_i` | in | reset; pattern settings and start address are taken while high. Takes effect at once in both domains and is released synchronously in each; hold for a few cycles of the slower clock |
| `data_in_i`, `data_in_valid_i` | in | off-chip reply word and its strobe (replies in request order, any latency) |
| `global_read_address_o`, `global_read_req_o` | out | off-chip word address and request strobe (off-chip clock) |
| `start_address_i` | in | first off-chip word address |
| `cycle_length_i[l]`, `inter_cycle_shift_i[l]`, `skip_shift_i[l]` | in | pattern settings per level (16 bit each) |
| `disable_output_i` | in | holds the output; the hierarchy keeps preloading |
| `shift_select_i` | in | OSR shift, 0 = no output |
| `data_out_o`, `data_out_valid_o` | out | output word and strobe; the consumer must take it in that cycle |
| `level_conflict_o[l]`, `level_shift_o[l]` | out | per level: a read waited for a write; the window moved (for observation) |

Build parameters: `OFFCHIP_W`, `ADDR_W`, `WORD_W`, `NUM_LEVELS` (1–5), and
per level (five-entry arrays) `MACRO_DEPTH`, `NUM_BANKS` (1 or 2) and
`DUAL_PORT`. The OSR has `USE_OSR`, `OSR_W`, `OUT_W`, `NUM_SHIFTS` and
`SHIFTS` (an eight-entry array, first `NUM_SHIFTS` used). `WORD_W` must be a
multiple of `OFFCHIP_W`. Without an OSR, `OUT_W` must equal `WORD_W`.

## Where this RTL departs from, or fills gaps in, the original description

The published description gives the block structure, the port list, the
per-level pointer arithmetic, the handshake wires of the clock crossing and
the write-over-read rule. The following are this implementation's own:

* The read pointer advances when the read starts. The word then waits in
  the level's output stage. In the original pseudo-code the pointer
  advances when the next level has written the word. The resulting rates
  are the same: two cycles per word between levels.
* An entry is freed at its last read, and the reload counter starts at the
  level depth. The original pseudo-code adds the offset pointer to the
  reload counter at a shift. That conflicts with its own text; the
  inter-cycle shift is what is added here, one freed entry at a time.
* `skip_shift = K` means the shift happens after *K+1* cycles, as in the
  pseudo-code. The port description ("cycles run before the shift") could
  be read as *K*.
* All levels have one word width. The first off-chip word is placed in the
  most significant bits. The start address is absolute; a relative
  addressing mode is not implemented.
* The off-chip side requests consecutive addresses only. A pattern whose
  cycle exceeds the capacity of the whole hierarchy would need re-reads
  from off-chip, which are not generated. In the default build this limits
  cyclic patterns to 128 level words (512 32-bit outputs).
* The clock crossing is a plain four-phase handshake over a single buffer
  register. It costs five to six accelerator cycles per level-0 word,
  depending on the clock ratio, against the three reported for the
  original design. That makes the worst case slower than the original
  design's. In the worst case every output word is new: a shifted cyclic
  pattern whose shift equals its cycle length. The original gives one
  output every three cycles there; this design about one every five
  (see `tb_perf_tests`).
* Shifted cyclic patterns of 64 words were measured with shifts of 8, 16,
  32 and 64. Up to a shift of 16 (a quarter of the cycle) they give one
  output per cycle; at a shift of 32 (half) the rate drops by 15%. The
  original design is reported to keep full rate up to about a third of
  the cycle.
* The off-chip request and valid strobes, the output valid, the OSR shift
  list and width, the two-bank address interleaving, the two-flop
  synchronisers and the reset synchroniser (immediate assertion,
  synchronous release) are all choices of this
  implementation.
* The SRAM macros are plain arrays (`mem_bank`) that a memory compiler's
  macro can replace. They have the same ports: single-ported, or one read
  and one write port.

## Files

| file | content |
|---|---|
| `rtl/mh_pkg.sv` | shared constants and the `level_cfg_t` settings struct |
| `rtl/mem_hierarchy.sv` | top |
| `rtl/input_buffer.sv` | input buffer and buffer controller (off-chip clock) |
| `rtl/buffer_handshake.sv` | accelerator side of the clock crossing |
| `rtl/sync_2ff.sv` | two-flop synchroniser |
| `rtl/hier_level.sv` | one level: banks, controller, output stage |
| `rtl/level_ctrl.sv` | a level's pattern controller |
| `rtl/mem_bank.sv` | SRAM macro model |
| `rtl/osr.sv` | output shift register |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/tb_mem_hierarchy.sv` | end-to-end test of the default build |
| `tb/tb_case_study.sv` | weight-memory build running the 13 layer patterns |
| `tb/tb_deep_hierarchy.sv` | five levels mixing two-bank, single- and dual-ported macros |
| `tb/tb_cycle_lengths.sv` | cycle lengths 16 to 1,024 on three 32-bit builds |
| `tb/tb_perf_tests.sv` | 32-bit two-level builds: throughput, single- vs dual-ported level 0 |
| `tb/tb_pkg.sv`, `tb/offchip_mem.sv` | reference pattern function, off-chip memory model |

## Simulating

Every testbench checks its outputs against a reference computed
independently from the pattern formula above. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mh_pkg.sv tb/tb_pkg.sv tb/tb_mem_hierarchy.sv --top-module tb_mem_hierarchy
./obj_dir/Vtb_mem_hierarchy
```

`tb_mem_hierarchy` runs the default build end to end. The off-chip clock
is four times the accelerator clock and the off-chip memory answers after
one cycle. It runs five patterns, each started by a reset cycle:

* shifted cyclic in level 1;
* a preload with the output disabled, then a 16-bit sliding window;
* two cycles longer than level 1, held by level 0;
* shift selections switched at run time.

It checks every output word and the rate of one output per cycle once a
pattern that fits level 1 is loaded. It also counts that every mechanism
occurred: off-chip requests, write-over-read in level 0, shifts in both
levels, disabled output, each shift selection, and restarts.

`tb_cycle_lengths` builds three 32-bit hierarchies. Each has a 1,024-word
single-ported level 0 and a dual-ported level 1 of 32, 128 or 512 words.
It runs cyclic patterns of 16 to 1,024 words, with and without a preload,
and counts the cycles for 5,000 outputs. With a preload:

| cycle length | L1 = 32 | L1 = 128 | L1 = 512 |
|---|---|---|---|
| 16, 32 | 5,000 | 5,000 | 5,000 |
| 64, 128 | 10,101 | 5,000 | 5,000 |
| 256, 512 | 10,101 | 9,909 | 5,000 |
| 1,024 | 10,101 | 9,909 | 9,141 |

Once the cycle no longer fits the last level, the run takes about twice as
long. Without a preload, the runs take 5,099 to 15,124 cycles.

`tb_perf_tests` builds two 32-bit hierarchies, 512 + 128 words without an
OSR, one with a single-ported and one with a dual-ported level 0. It
measures how many cycles 1,000 outputs take:

| pattern | single-ported L0 | dual-ported L0 |
|---|---|---|
| 64-word cycle held in level 1 | 1,000 | 1,000 |
| 256-word cycle held in level 0, preloaded | 2,026 | 1,943 |
| same, not preloaded | 2,536 | 2,280 |
| cycle 64, shift 8 / 16 / 32 in level 1 | 1,000 / 1,000 / 1,171 | same |
| cycle 64, shift 64 (every word new) | about 5,200 | same |

The last row is limited by the clock crossing, about 5 accelerator cycles
per off-chip word at this clock ratio (20/7). In that testbench the two
clocks are deliberately not in an integer ratio. With an exact ratio, new
words lock onto the idle cycle between two level-0 reads, and the single
port never costs anything.

`tb_deep_hierarchy` builds the deepest hierarchy, five 32-bit levels,
through the top. Levels 0 and 2 are two single-ported banks each, level 1
is one single-ported macro, and levels 3 and 4 are dual-ported. It runs
three patterns:

* a shifted cyclic pattern in the last level;
* a cycle held in a middle level;
* a shifted cyclic pattern in every level at once.

The reference composes the five level patterns. The testbench requires
every level to shift and write-over-read to occur.

The per-module testbenches also cover two-bank levels, the two-cycle
inter-level transfer, the OSR's three-cycle fill of a 384-bit word, and the
clock-crossing handshake at two reply latencies.
