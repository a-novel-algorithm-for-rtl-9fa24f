# Online approximate string matching in hardware (OASM)

An approximate string matcher compares a short pattern `p` (length `l_p`)
with every substring of a long text `t` and reports the substrings within
edit distance `K`. A naive matcher reports far too much. Around every true
match there is a cloud of *shadow hits*: the same match shifted by one
symbol, or one symbol longer or shorter, each within the threshold too.

This design removes the shadow hits **online**, while the text streams
through. It never has to store the raw hits and filter them afterwards.
For each text position `i` it computes the Levenshtein distances
`k = lev(p, t[i, l])` for every length `l = l_p-K .. l_p+K`. It keeps at
most one candidate per distance value `k = 0..K` in a small table, and
emits a candidate once it is clear that no better one can still overlap it.
The result is a short list of occurrences `[i, l, k]` (start, length,
distance) that do not overlap each other.

The RTL is a systolic Levenshtein array feeding the search table. It takes
one text position every `2*l_p + K - 1` clocks and needs no external memory
besides the text source and the result store.

## Block map

```
hw_oasm_system                      test system: text ROM -> core -> result RAM
├── link_emulator                   text ROM (5 symbols per word), one symbol per request
├── substring_window                sliding window t[i .. i+LP_MAX+K_MAX-1] and index i
├── lev_core                        one matcher
│   ├── lev_calc                    systolic array, step counter, output MUX
│   │   └── lev_pe  x LP_MAX        one row of the edit-distance matrix
│   └── lev_search                  candidate table and its control
│       ├── ena_gen                 priority rules, counting, validation
│       └── search_element x K_MAX+1   one stored candidate per k
├── result_ram                      results {index, k, length}
└── sys_fsm                         elaborate / drain / return control
```

`oasm_pkg` holds the default sizes and the codes of the two padding
symbols.

## The edit-distance array (`lev_calc`, `lev_pe`)

The distances for one text position are the last row of the usual
dynamic-programming matrix `C`. `C` has `l_p + 1` rows (pattern) and up to
`l_p + K + 1` columns (text). Element `j` of the array owns row `j + 1`.

The matrix is filled along anti-diagonals, one per clock (a *step*). On
step `cnt`, element `j` computes `C(j+1, cnt-j)` from three values:

* its own previous value (left neighbour in the matrix);
* the previous value of element `j-1` (upper neighbour);
* element `j-1`'s value from two steps ago (upper-left neighbour).

Element 0 uses `cnt` and `cnt-1` as its upper neighbours. These are row 0
of `C`. The update in each element is

```
min  = min(left, upper, upper_left)
cost = (upper_left > min) ? 1 : (p(j) != s)
C    = min + cost
```

This form needs only a comparator and an incrementer. It is exact: if
`upper_left` is the minimum, the cost is the symbol mismatch. Otherwise
`upper_left` exceeds `min` by at least one, and the left and upper
neighbours already carry the `+1`.

The text symbols enter element 0 one per step and move one element down
per step, so element `j` sees `t[i + cnt - 1 - j]` on step `cnt`. The
padding symbols close the matrix:

* pattern positions past `l_p` hold `$1`, which is all ones;
* text positions past `l_p + K` read `$2`, which is all ones minus one.

`$1` and `$2` never match each other or an ordinary symbol.

Element `l_p - 1` holds the last row. From step `2*l_p - K - 1` on, it
yields `lev(p, t[i, m])` with `m = cnt - l_p + 1`. An output multiplexer
picks that element. The run ends after `2*l_p + K - 1` steps, with one sample
`(lev_dist, target_len, index)` per clock for the last `2K + 1` steps. A new
text position can be loaded during the last step, so positions follow
each other without a gap. With `K >= l_p`, length 0 would be a sample; it
is skipped.

Timing: a sample leaves one clock after its step. For back-to-back
positions the first sample of position `i` comes `max(1, l_p-K) + l_p`
clocks after its start, and the last comes `2*l_p + K` clocks after it.

## Keeping only real occurrences (`lev_search`, `ena_gen`, `search_element`)

The table has one row per distance value `k = 0..K_MAX`. Each row holds a
candidate `(i, l)` and a counter `r`. `r` counts the text positions seen
since the candidate started, including its own. Two registers go with the
table:

* `idx` is the lowest `k` that holds a candidate;
* `ins` says whether anything is pending.

**Per sample `[i, l, k]` with `k <= K`:**

| rule | condition | action |
|---|---|---|
| R1 | nothing pending, or `k < idx` | store in row `k`, `r = 1`, `idx = k` |
| R2/R3 | `k == idx` and `i + l <= i' + l'` (the new substring ends no later than the stored one) | replace row `idx`, `r = 1` |
| — | anything else | shadow hit, dropped |

**After the last sample of a position:**

* If `r(idx) == l(idx)`, the best candidate has been followed to its own
  end, so nothing better can overlap it any more. *Validation* then starts.
* Otherwise every occupied row `j >= idx` increments its counter.

**Validation** visits rows `j = idx .. K`, one per clock:

* Row `idx` is always emitted.
* A lower-priority row `j` is emitted only if it ends before everything
  already emitted starts: `r(j) - acc > l(j)`, where `acc` is the summed
  length of the rows already emitted.
* Each emitted row is one clock of `valid`, with `result = {index, k, length}`.
* In the last clock all rows are cleared and `idx`, `ins` and `acc` are
  reset.

**Worked example.** Pattern `ACBDA`, text `CCCCDACCBDACBDAA`, `K = 2`
(0-based positions). Along the way the table holds these candidates:

* `k = 2`: `(1,5)`, `(2,4)`, then `(3,3)`. Each ends no later than the
  one before, so it replaces it.
* `k = 1`: `(5,6)`, `(6,5)`, `(7,4)`.
* `k = 0`: `(10,5)`, which sets `idx = 0`.

After position 14, `r(0) = 5 = l(0)`, so validation starts:

* Row 0 gives `t[10;5]` with `k = 0`.
* Row 1, `(7,4)` with `r = 8`, fails the test: `8 - 5 > 4` is false, so it
  overlaps.
* Row 2, `(3,3)` with `r = 12`, passes: `12 - 5 > 3`.

The output is therefore `{(10,5,0), (3,3,2)}`. The testbench compares
every row of the table with this sequence, position by position.

**Timing.**

* The end-of-position step takes one clock after the last sample.
* Validation starts the clock after that. It emits its first result two
  clocks after the last sample and takes `K - idx + 1` clocks.

**Overlap with the array.** LEV SEARCH finishes one position while
LEV CALC already computes the next. Samples must not meet a validation,
because its closing clear would erase them. LEV SEARCH therefore raises
`hold` from the clock of the last sample until the last validation
clock. While `hold` is high, LEV CALC postpones any step that would
produce a sample: the whole array keeps its state for that clock.

If `max(1, l_p-K) + l_p - 1 >= K + 3`, the first sample of a position
always comes late enough and no clock is lost. This covers all `K <= 3`
with `l_p >= 5`. For large `K` against `l_p`, a clock is lost only where a
validation actually collides with a sample. At `l_p = 5` on a 3104-symbol
text this costs 83 clocks with `K = 4` and 461 clocks with `K = 5`.
`stall_cycles` counts these clocks.

## Throughput

One text position costs `2*l_p + K - 1` clocks. A text of `l_t` symbols
takes `(2*l_p + K - 1) * (l_t + l_p + K)` clocks: the `l_p + K` padded
positions after the text flush pending candidates. For example, at
100 MHz:

* `l_p = 5`, `K = 3`: 37,389 clocks for 3104 symbols, about 0.37 ms.
* `l_p = 15`, `K = 3`: 99,949 clocks, about 1.0 ms.

The clock rate itself is not established here. The critical path is one
element's `min` and compare, plus the candidate-table update.

## The test system (`hw_oasm_system`)

The top is a self-contained test system. The text sits in a ROM that
emulates the data link: 65,536 words of five 3-bit symbols. Results go to a
RAM of 43,690 × 24-bit words, `{index[15:0], k[2:0], length[4:0]}`. The
pattern, `l_p` and `K` are ports.

`sys_fsm` sequences the run:

| input | what happens |
|---|---|
| `start_elab` | restarts the text and the window, then runs the core over `l_t + l_p + K` positions and waits until the core is idle |
| `result_return` | streams the stored results out on `out_data` / `out_valid` / `out_ready` |

On that stream, a result is taken in any clock where both `out_valid`
and `out_ready` are high. The stream stands in for a host link.

Status outputs: `busy`, `done`, `n_results`, `overflow` (the RAM was full
and a result was dropped), `stall_cycles` and `text_done`.

`substring_window` keeps `LP_MAX + K_MAX` symbols. It asks the ROM for one
symbol at a time and shifts when the core takes a position. Window slots
past the end of the text read `$2`.

## Departures from the published description, and choices made here

Where the published description contradicts itself, this design follows
its worked example:

* **Replacement rule.** The wording of the rule for equal distances ("the
  first one found becomes the occurrence") does not reproduce the example
  table. "Replace when the new substring ends no later" reproduces it
  exactly.
* **Validation start.** The pseudocode tests the counter against 0. The
  text says validation starts when the counter reaches the length, and
  this design does the latter.
* **Validation inequality.** The pseudocode writes `<`. The equation and
  the example use `>`, and so does this design.
* **Distance `k = K`.** Candidates with `k = K` are kept (`k <= K`), as in
  the example.
* **Left operand of the element update.** It is the element's own last
  value (`a_reg`), not its delayed copy. The delayed copy does not give
  the matrix recurrence with the upper-left value taken from the delayed
  register of `j-1`.

The description gives no handshakes, widths or sequencing beyond the
points above. The following are this design's own choices:

* the sample format and the one-clock output register;
* the overlap of positions and the `hold` mechanism;
* the end-of-position clock and validating one row per clock;
* the 16-bit counter width and the occupancy bits;
* the window and ROM handshakes;
* the system control and the overflow flag;
* the field order of the result word.

Reported but **not built**:

* The multi-pattern system, which runs many cores on one text. Its
  controller and result collector are only named.
* The USB interface of the test board. The result stream port takes its
  place.

The published hardware run times for this test system are about ten times
the clock counts its own formula gives. This design follows the formula.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LP_MAX` | 15 | array length, longest pattern |
| `K_MAX` | 5 | largest threshold, table rows `0..K_MAX` |
| `SYMB_W` | 3 | bits per symbol (two codes are padding) |
| `IDX_W` | 16 | text index width |
| `R_W` | 16 | counter width in a table row (saturates) |
| `ROM_WORDS`, `SYMS_PER_WORD` | 65536, 5 | text store |
| `RAM_DEPTH` | 43690 | result store (24-bit words) |

The run-time `lp` must be `1..LP_MAX` and `kth` must be `0..K_MAX`. Every
block takes the sizes as parameters, so a wider alphabet or a longer
pattern is a parameter change.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/oasm_ref_pkg.sv`
is a plain software model of the distances and the search rules, used as
the reference by the core and system tests. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/oasm_pkg.sv tb/oasm_ref_pkg.sv rtl/*.sv tb/tb_hw_oasm_system.sv \
  --top-module tb_hw_oasm_system -o sim && ./obj_dir/sim
```

`tb_hw_oasm_system` runs the top at its default sizes:

* a 3104-symbol random text with planted approximate copies of the
  pattern;
* `l_p = 5, 7, 10, 15` with `K = 3`;
* `l_p = 5` with `K = 2..5`.

It compares every stored result with the reference and checks the clock
count of each run. It counts each mechanism and fails if one never
occurred:

* R1 stores, R2/R3 replacements and dropped shadow hits;
* validation rows kept and rejected, and multi-row validations;
* RAM writes and output back-pressure;
* array hold clocks.

It takes under a second. The RAM overflow path is covered by
`tb_sys_fsm`, which uses a 40-word RAM.
