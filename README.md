# Counter- and bit-vector-augmented in-memory automata bank

Regular expressions used in network intrusion detection, spam filtering and
protein search often contain bounded repetition: `x{m,n}` means "x, at least
m and at most n times". An automata processor built from memory runs one
state-transition element (STE) per automaton state. If a repetition is unfolded
into plain states, `x{1000}` costs a thousand STEs. This design adds two small
modules next to the STE arrays, so that a repetition costs a few STEs plus one
module:

* A **counter** (17 bits) handles a repetition that is *counter-unambiguous*.
  In such a repetition, at any point of the input, at most one "attempt" at the
  repetition can be in progress. One number is then enough to track it.
* A **bit vector** (2000 bits) handles a *counter-ambiguous* repetition. Such a
  repetition can have many overlapping attempts in progress at once. An example
  is `.*a[ab]{3,6}b`, where every `a` may start one. Bit *i* of the vector says
  "some attempt has done i+1 iterations". All attempts advance together with
  one shift per symbol.

Which repetitions are counter-ambiguous is decided offline by a static
analysis in the regex compiler, which is software and is not part of this RTL.
The hardware only provides both kinds of module and the wiring to use them.

The RTL describes one bank. A bank has an input/output buffer and 16
processing arrays. Each array holds 8 processing elements (PEs) and a global
switch. Each PE holds:

* two CAM arrays of 256 STEs;
* two local switches;
* eight counters;
* one bit vector.

All parameter defaults are these sizes.

## One symbol, one cycle

Each accepted input symbol takes one clock cycle. The signal `step` marks such
a cycle. The cycle has two halves, both combinational from the registers:

1. **State matching.** The symbol is searched in every CAM. `match[i]` is 1 when
   STE *i*'s character class contains the symbol. An STE is *active* when three
   things hold:
   * `step` is 1;
   * it matches;
   * it is enabled. Enabled means the enable register from the previous symbol
     is set, or the STE has `start_all`, or it has `start_first` and this is
     the first symbol of a stream.
2. **State transition.** The local switch of each CAM computes the enable of
   every STE for the next symbol. It ORs the sources that the STE's
   configuration row selects. The sources are the active STEs of the same CAM,
   the counter and bit-vector outputs, and the PE's global inputs. The result
   is stored in `en_q` at the clock edge.

The counters and the bit vector sit inside the same cycle. They take their
inputs from this cycle's active STEs and update their state at the clock edge.
Their outputs are computed from the state *after* this cycle's update, and
these outputs go straight into the switch. So a repetition's exit is known in
the same cycle as its last STE. The bank therefore keeps the one-symbol-per-cycle
rate of the base processor; the paper's target is 2.14 GHz in 28 nm. The RTL
models cycles only, not gate delays.

## The counter (`counter_module`)

A repetition `r{m,n}` is laid out using three STE groups, where *r* is the
repeated part:

| port | STEs | meaning |
|------|------|---------|
| `pre` | the state just before `r` | an attempt is about to start |
| `fst` | the first state of `r` | an iteration begins |
| `lst` | the last state of `r` | an iteration ends |

The counter applies four rules in every step:

| condition | action |
|-----------|--------|
| `pre` was active last step and `fst` is active now | count := 0 (a new attempt, first iteration) |
| `fst` is active and `pre` was not active last step | count := count + 1 |
| `lst` is active and lo <= count <= hi | `en_out` (the state after the repetition may follow) |
| `lst` is active and count <= hi | `en_fst` (another iteration may follow) |

The count holds *iterations - 1*, so the compiler programs lo = m-1 and
hi = n-1. With this encoding:

* the first iteration is the reset;
* an (n+1)-th iteration dies at its `lst`, because `en_fst` was already
  withheld at the n-th.

The module works when `fst` and `lst` are active in the same step. That is
the case when *r* is a single character class. The fst and lst groups are
disjoint, so such a class is placed twice: one copy in each group, with the
same switch row. The count saturates at its maximum instead of wrapping.

To wire `a(bc){m,n}d` with counter c:

* `a` in the pre group (`start_all` for an unanchored pattern);
* `b` in the fst group, with a switch row that enables it from `a` and from
  counter c's `en_fst`;
* `c` in the lst group, enabled from `b`;
* `d` enabled from counter c's `en_out`, marked `report`.

## The bit vector (`bit_vector`)

The bit vector serves a repetition `s{m,n}` of one character class *s*. The
repeated STE(s) sit in the `fst` group, and the state before them in the `pre`
group. In each step the vector does one of these:

* **reset.** If `fst` is not active, every attempt is broken and the vector
  clears.
* **shift.** If `fst` is active, every attempt moves up one bit.
* **setFirst.** In the same shift, bit 0 takes `pre` from the previous step. A
  new attempt starts while older ones keep going, which is exactly the
  ambiguous case.
* **disjunct.** `en_out` is the OR of bits lo..hi of the new vector (lo = m-1,
  hi = n-1). It is 1 when some attempt has done between m and n iterations.

The vector is one 2000-bit serial-in, parallel-out shift register. A variable
window mask picks the bits for the disjunction. The paper also allows the vector
to be split into independent segments for small bounds. That mode is not built
here: one PE runs one ambiguous repetition.

## Fixed port groups and the source map (`processing_element`)

The counter and bit-vector inputs are wired to fixed groups of eight STEs; the
compiler must place the states there. A group member drives the port only if
its `port_en` attribute is set. The port is the OR of the active, port-enabled
members. The group layout is:

| module | CAM | pre | fst | lst |
|--------|-----|-----|-----|-----|
| counter c (0..7) | 1 | STEs 24c .. 24c+7 | 24c+8 .. 24c+15 | 24c+16 .. 24c+23 |
| bit vector | 0 | STEs 0 .. 7 | 8 .. 15 | - |

CAM-1 STEs 192..255 and CAM-0 STEs 16..255 belong to no group.

Each local switch row selects from 289 sources:

| source index | signal |
|--------------|--------|
| 0 .. 255 | active STEs of the same CAM |
| 256 + c | counter c `en_out` |
| 264 + c | counter c `en_fst` |
| 272 | bit vector `en_out` |
| 273 + j | global input j of this PE (j = 0..15) |

The function `cama_pkg::sw_src` gives the total for other sizes. Global
output j of a PE carries the active bit of one selectable STE (`gsel[j]`, 0..511
over both CAMs). The PE's `report` is the OR of its active STEs that have the
`report` attribute.

## Global switch and arrays

`global_switch` is a full programmable crossbar over the 8 x 16 global ports of
an array. Global input row d (PE d/16, port d%16) ORs the selected global
outputs. The crossbar is combinational, so a transition between PEs takes one
symbol, like a local one. `processing_array` joins the PEs to the switch.
`cama_bank` holds 16 arrays and the buffer.

## Buffers, reports and stalls (`io_buffer`)

* The host writes symbols into a 16-entry input FIFO. `in_first` marks the first
  symbol of a new stream. On that symbol the enables left from the previous
  stream are ignored and the stream offset restarts at 0.
* A step happens when a symbol is waiting and the 16-entry output FIFO has
  room.
* In every step where some PE reports, one record goes into the output FIFO:
  `{out_offset, out_report}`, where `out_report` has one bit per PE
  (bit = array*8 + PE).
* If the output FIFO is full, the bank **stalls**: no symbol is consumed and no
  state moves until the host drains a record. `stall` shows this.

The buffer depths, the record format and the stall rule are this design's own.
The paper names the buffer only.

## Configuration

Everything is written through one bus, `cfg` (`cama_pkg::cfg_t`). It carries
`we`, `array_id`, `pe_id`, `tgt`, `index`, `word` and `data`. Configuration
writes may be mixed with streaming. The targets are:

| `tgt` | `index` | `word` | `data` |
|-------|---------|--------|--------|
| `CFG_CAM` | cam*256 + STE | - | `{care[7:0], value[7:0]}`: matches when `(sym ^ value) & care == 0` |
| `CFG_ATTR` | cam*256 + STE | - | `{port_en, report, start_first, start_all}` |
| `CFG_SWITCH` | cam*256 + destination STE | 32-bit slice of the row | source bits |
| `CFG_COUNTER` | counter number | 0: lo, 1: hi | bound (m-1 or n-1) |
| `CFG_BV` | - | 0: lo, 1: hi | bound bit index |
| `CFG_GSEL` | global port j | - | STE 0..511 that drives it |
| `CFG_GSWITCH` | row = PE*16 + port (destination) | 32-bit slice | source bits (PE*16 + port) |

A CAM entry with care = 0 matches every symbol. A class that no single ternary
entry can express is split across several STEs, with the same switch row.

## Where this differs from the paper

* The 16-bit CAM entry is encoded here as ternary {care, value}. The paper
  gives the 256x16 size but not the encoding.
* The paper's text says the `fst` group is STEs 8 to 16, while its figure shows
  8 to 15. This design uses groups of 8. The placement of the eight counters
  (CAM 1) and of the bit vector (CAM 0) is this design's own.
* The following are own choices: the counter encoding (iterations - 1), the
  saturation, the global-port selection, the crossbar form of both switches,
  the configuration bus, and the buffer and stall behaviour.
* Bit-vector segmentation is not implemented.
* Energy, delay and area are not modelled. The paper reports them per
  component: 17-bit counter 288 fJ / 101 ps / 237 µm², 2000-bit vector
  3340 fJ / 71 ps / 6382 µm².
* The compiler, the ambiguity analysis and the regex front end are software and
  are not part of this RTL.

## Capacity

At the default sizes a bank has:

* 65 536 STEs;
* 1024 counters, each taking a bound up to 131 071;
* 128 bit vectors, each taking a bound up to 2000.

The benchmark rule sets in the paper have more counting regexes than that. For
example, Snort has 1934 counting regexes, 282 of them ambiguous. They therefore
need several banks. A single repetition of either kind at the paper's
microbenchmark sizes fits in one module.

## Simulating

Every testbench checks itself and ends with a `TB_RESULT checks=... failures=...`
line. Build with plain Verilator, package first:

```
verilator --binary --timing --assert -Mdir obj rtl/cama_pkg.sv \
  $(ls rtl/*.sv | grep -v cama_pkg) tb/tb_cama_bank.sv --top-module tb_cama_bank
obj/Vtb_cama_bank
```

| testbench | what it checks |
|-----------|----------------|
| `tb_counter_module` | random pre/fst/lst against an iteration-count reference, several bounds |
| `tb_bit_vector` | random pre/fst against a set-of-counter-values reference, bounds up to 2000 |
| `tb_ste_cam`, `tb_local_switch`, `tb_global_switch` | random contents against bit-level shadows |
| `tb_io_buffer` | offsets, records, back-pressure and stalls |
| `tb_processing_element` | `a(bc){2,4}d` on a counter and `a[ab]{3,6}b` on the bit vector, against references computed from the input history |
| `tb_processing_array` | a transition from one PE to another through the global switch |
| `tb_cama_bank` | reduced bank (2x2 PEs); four automata and three streams; slow host drain; records checked; each mechanism (counter reset / increment / loop cut / exit, bit-vector setFirst / shift / reset / disjunct, global route, anchored start, stall) must occur |
| `tb_microbench` | one default-size PE: `b a{100000} c` on a counter (the single repeated class is placed twice, in the fst and the lst group) and `.* a{2000} c` on the full bit vector, against run-length references |
| `tb_cama_bank_full` | default-size bank; `a(bc){1000}d` on counter 7 of PE 7 in array 15 and `a[ab]{1990,2000}b` on a bit vector; checks records and one symbol per cycle |

The full-size bank takes a few minutes to compile. It then simulates about
12 000 cycles in seconds.
