# BF2: a time-binned hashed event store and a low-memory noise filter for event cameras

An event camera (dynamic vision sensor, DVS) reports every pixel whose
brightness changes as an address-event `(x, y, t, p)`. Besides real activity
it emits *background activity*: isolated events caused by leakage and noise.
The classic remedy is a spatio-temporal correlation filter: an event is kept
only if one of its 8 neighbouring pixels fired within the last `tau`
(typically a few milliseconds). Done directly, this needs a timestamp per
pixel - 346 x 260 x 32 bits for a small sensor, growing with the square of
the resolution.

This RTL implements the filter on a much smaller structure, **BF2**: a
Bloom filter with a second, temporal dimension. Instead of storing *when*
each pixel fired, it stores *that* it fired, hashed, in one of `D` time
bins. With the default `W = 16384`, `D = 4`, `K = 4` the whole memory is
32 KB regardless of the sensor size, the only arithmetic is a row counter,
and the filter classifies one event every 9 clock cycles (18 M events/s at
166 MHz) with a 9-cycle latency.

## The data structure

BF2 consists of `K` bit arrays `BF2^1 .. BF2^K`, each `D` rows by `W` bits.
Hash unit `i` maps a pixel address `(x, y)` to a bit index
`BitPtr(i) = h_i(x, y)` in `0 .. W-1`.

* **Insert** `(x, y)`: in every array `i`, set bit `BitPtr(i)` of the
  *active* row `RowPtr`.
* **Search** `(x, y)`: in every array and every row, read bit `BitPtr(i)`.
  Row `j` holds the pixel when the bit is set in all `K` arrays:
  `Dout(j) = AND_i Bit_out(j, i)`. The AND across independent hashes is
  what keeps false positives rare, exactly as in a Bloom filter.

Each row is a time bin of length `tau_row = tau / D`. Every `tau_row` the
row pointer moves on (wrapping from `D-1` to 0), and the row after the new
active row - the one holding the oldest events - is cleared. The rows thus
form a sliding window of `D x tau_row = tau`, and `Dout(1..D)` says in which
bins a pixel fired. Errors are of two kinds only:

* false positives, from hash collisions; they grow with the number of
  events per row relative to `W`;
* false negatives, for support that sat in the row just cleared - support
  older than `(D-1) x tau_row` may already be gone.

Memory is `K x W x D` bits and does not depend on the sensor resolution.

## The filter

Per event the controller (`filter_ctrl`) runs this fixed schedule:

| cycle | operation on BF2 | address |
|---|---|---|
| 1..8 | search, all rows of all arrays in parallel | the 8 neighbours, `(x-1,y-1), (x-1,y), (x-1,y+1), (x,y-1), (x,y+1), (x+1,y-1), (x+1,y), (x+1,y+1)` |
| 9 | insert into the active row | `(x, y)` itself |

The pixel itself is never searched, so a hot pixel that keeps firing on its
own is not its own support. For each search, `event_class` ORs the `D` row
outputs (support anywhere in the window), counts the supporting neighbours,
and after the 8th search declares the event *signal* when the count reaches
`SUPPORT_THR`. With the default threshold of 1 this is a plain OR over all
rows and all neighbours. Neighbours outside the `X_SIZE x Y_SIZE` sensor
never count.

The next event is accepted in the insert cycle of the current one, so with
back-to-back input the memory is busy every cycle. The search of the next
event sees the insert of the previous one (write in cycle 9, read from
cycle 10).

## Memory organisation and row clearing

This is the part that makes the structure practical in hardware.

Each (row, hash) pair is a separate memory block (`mem_block`), `D x K`
blocks in all, so that one search reads all of them in one cycle and an
insert writes the `K` blocks of the active row together. A block stores its
`W` bits as `W/WORD_W` words (`WORD_W = 32`), as a block RAM would. A word
read returns 32 bits, and `bit_select` picks the addressed one using the low
5 bits of `BitPtr(i)`; the upper bits are the word address. An insert sets a
single bit through a per-bit write enable.

A row cannot be zeroed in one cycle, so `row_clear` zeroes the oldest row
one word per cycle, **while** the active row keeps taking inserts. The two
never collide: the row being cleared is always `RowPtr + 1 (mod D)`, never
the active one (hence `D >= 2`). A clear takes `W/WORD_W` cycles - 512 at
the default size, 3.1 us at 166 MHz, against a row period of 1.25 ms - and
must end before the next advance; an elaboration check
(`TAU_ROW_CYCLES > W/WORD_W`) and an assertion enforce this.

```
cycle:          T-1      T        T+1      T+2   ...   T+512    T+513
row_adv         0        1        0        0           0        0
row_ptr         r        r+1      r+1      r+1         r+1      r+1
row_clearing    0        0        1        1           1        0
cleared word    -        -        0        1           511      -     (of row r+2)
```

Searches during those 512 cycles read a row that is partly cleared; this is
harmless because it only holds the oldest events, which are about to leave
the window anyway. So the effective window slides between
`(D-1) x tau_row` and `D x tau_row` of history.

After reset the memory content is unknown. `row_clear` therefore first
clears all `D` rows in parallel for `W/WORD_W` cycles; `in_ready` stays low
and the row timer does not run until this is done.

## Row timing

`row_timer` counts clock cycles and advances `row_ptr` every
`TAU_ROW_CYCLES` cycles, with a one-cycle `row_adv` pulse. The default
207500 is `tau_row = 5 ms / 4` at 166 MHz. The event timestamp `t` is not
used: events are placed in a bin by their *arrival* time. This keeps 32-bit
timestamp arithmetic out of the design, but it assumes that events arrive
close to the time they were produced (no large buffering upstream). A
timestamp-driven row pointer, `row = floor(t / tau_row) mod D`, is the
algorithmic alternative; it is not built here.

## Hash functions

Each hash unit is an H3 hash: with the 18-bit key `{y, x}`, the index is the
XOR of the rows of a fixed 18 x 14 binary matrix `Q` selected by the key bits
that are 1. It needs only AND and XOR gates and is fully combinational.
`Q` is not a stored table: row `r` of the matrix of hash unit `i` (seed
`i+1`) is computed at elaboration as the low `log2(W)` bits of four steps of
xorshift32 (`s ^= s<<13; s ^= s>>17; s ^= s<<5`) started from
`seed * 0x9E3779B9 + (r+1) * 0x85EBCA6B`. Any other random matrices work as
well; the filter's statistics depend only on the hashes being independent.

## Interface of `bf2_filter`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `in_valid`, `in_ready`, `in_event` | in/out/in | event `(x, y, t, p)` (`bf2_pkg::dvs_event_t`), taken when both valid and ready; hold it stable until taken |
| `out_valid` | out | one-cycle pulse per event |
| `out_event`, `out_signal` | out | the event and its class, 1 = signal, 0 = noise; valid with `out_valid` |
| `row_ptr`, `row_clearing` | out | active row, and whether the row after it is still being cleared |

Timing: `out_valid` rises 9 clock edges after the edge that accepted the
event. `in_ready` is low for the 8 search cycles of each event, so the
sustained rate is one event per 9 cycles. There is no back-pressure on the
output: a consumer must take every `out_valid`. To pass only signal events
downstream, gate with `out_valid & out_signal`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `W` | 16384 | bits per row per array (a power of two) |
| `D` | 4 | rows = time bins (at least 2) |
| `K` | 4 | hash functions / arrays |
| `WORD_W` | 32 | memory word width, bits cleared per cycle |
| `TAU_ROW_CYCLES` | 207500 | row period in clock cycles (`tau / D x f_clk`) |
| `SUPPORT_THR` | 1 | supporting neighbours needed for "signal" (1..8) |
| `X_SIZE`, `Y_SIZE` | 346, 260 | sensor size; neighbours outside it are ignored |

Coordinate widths (9 + 9 bits, up to 512 x 512) and the 32-bit timestamp are
in `bf2_pkg`; a larger sensor needs wider `X_W`/`Y_W` there. A different
`tau` only changes `TAU_ROW_CYCLES`. The memory size trades false positives
against area; at the default size, 32 KB suits a 346 x 260 sensor at
`tau = 5 ms`.

## Size

At the default size each `mem_block` is 16 Kbit, i.e. one 18 Kb block RAM
of an FPGA, and the 16 blocks fill eight 36 Kb block RAMs; synthesis keeps
262 144 memory bits and about 170 flip-flops. Roughly 100 of these carry the
event's timestamp and polarity through to the output; a filter that only
emits the class can drop them.

## Module map

```
bf2_filter                    top
 |- row_timer                 RowPtr, advances every TAU_ROW_CYCLES
 |- filter_ctrl               handshake, 8 neighbour searches, insert
 |- bf2                       the data structure
 |   |- h3_hash   x K         (x,y) -> BitPtr(i)
 |   |- bf2_array x K         D rows of one hash
 |   |   '- mem_block x D     W bits as W/WORD_W words
 |   |- bit_select            word -> bit, regrouped per row
 |   |- D AND gates           -> Dout(1..D)
 |   '- row_clear             power-on clear, clear of the oldest row
 '- event_class               OR over rows, support count -> class
```

## What follows the source design and what does not

Taken from the published design: the BF2 structure (K hashed arrays, D
time-binned rows, AND across hashes per row, OR across rows), the H3 hash,
one memory block per (row, hash) read in parallel, 8 search cycles plus 1
insert cycle per event, clearing the next row word by word while the
current one is written, the default sizes `W = 16384, D = 4, K = 4`,
`tau = 5 ms` and a clock of about 166 MHz.

Choices made here where the description stops: the 32-bit word width, the
bit-enable write for setting single bits, one-cycle synchronous reads, the
power-on clear, the valid/ready input handshake and the absence of output
back-pressure, the neighbour search order, ignoring off-sensor neighbours,
the H3 matrices, rows numbered from 0, and the synchronous reset.

Departures to be aware of:

* **Row pointer from the clock, not from timestamps.** The algorithmic
  description computes the bin from `t`; the hardware description says the
  timestamp is not used and the pointer is advanced on the clock. The RTL
  does the latter.
* **Support threshold.** The hardware is an OR (one supporting neighbour).
  The accuracy results were obtained with four supporting events. Both are
  available through `SUPPORT_THR`; the counter it adds is the only
  arithmetic besides the row timer.
* **8, not 9, searches.** A loop over the full 3 x 3 neighbourhood would
  include the pixel itself; the RTL searches only the 8 neighbours, which
  is what the cycle count and the hot-pixel argument require.
* Not built: an input FIFO to absorb event bursts above 18 M events/s, and
  multi-ported memories to search several neighbours per cycle. Both are
  suggested as extensions of the design, not part of it.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops on a watchdog. Reference results
are computed independently of the RTL; `tb/bf2_tb_pkg.sv` re-implements the
H3 hashes from their definition.

| testbench | what it checks |
|---|---|
| `tb_h3_hash` | hash values against the reference, H3 linearity, two widths |
| `tb_mem_block`, `tb_bf2_array` | random set/clear/read against a bit model, read latency |
| `tb_bit_select` | bit selection and per-row regrouping |
| `tb_row_clear` | power-on clear, clear of the row after the active one, cycle count |
| `tb_row_timer` | period, wrap, enable |
| `tb_event_class` | support counting for thresholds 1 and 4, output timing |
| `tb_filter_ctrl` | neighbour addresses and order, border flags, insert, 9-cycle throughput |
| `tb_bf2` | searches bit-exact against a model across row advances and clears |
| `tb_bf2_filter` | end to end, reduced size (W = 2048, row period 400 cycles), thresholds 1 and 4 side by side, 3000 events against a cycle-level model; requires signal, noise, back-pressure, power-on clear, row wrap, expired support, hot-pixel rejection, border events and back-to-back operation to occur |
| `tb_workload_driving` | the default size under a synthetic stream at a driving-scene average rate (1.1 M events/s): a moving edge plus 10 % random noise over 12 ms; requires no lost event, at least 90 % of edge events kept and at least 85 % of noise removed (typical run: 99 % kept, 5 % of noise passed) |
| `tb_bf2_filter_full` | the default size through power-on clear, three row advances, and a set of hand-checked events, including support lost when its row is cleared |

The filter's accuracy on recorded datasets (ROC curves) has not been
reproduced in simulation; only the functional behaviour of the structure is
checked.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bf2_filter \
    -y rtl -y tb +libext+.sv -Irtl rtl/bf2_pkg.sv tb/bf2_tb_pkg.sv tb/tb_bf2_filter.sv
./obj_dir/Vtb_bf2_filter
```

Replace the module name for any other testbench. The full-size run takes a
few seconds (about 620 000 cycles).
