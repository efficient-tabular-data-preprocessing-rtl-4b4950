# Piper: a column-wise preprocessing pipeline for recommendation-model training data

Training a deep-learning recommendation model (DLRM) needs its raw log data reshaped before every
epoch. For Criteo-style click logs each row holds one label, 13 integer ("dense") features and
26 categorical ("sparse") features, the latter given as 32-bit hashes in hexadecimal. The
preprocessing is:

| column kind | count | transformation |
|---|---|---|
| label | 1 | passed through |
| dense | 13 | negative values become 0, then `ln(x + 1)` as a float |
| sparse | 26 | `hash mod V`, then replaced by its *vocabulary index*: the order in which that value first appeared in this column over the whole dataset |

The vocabulary step is what makes this hard on a CPU: it is stateful, and the state is global
over the dataset, so row-parallel threads must synchronise. This design instead gives **every
column its own hardware lane**. The lanes run side by side, never exchange state, and are
joined back into rows only at the output. Because a vocabulary index is only known once the
whole dataset has been seen, the dataset is streamed through **twice**: the first pass builds
the vocabularies, the second maps and stores every row.

The RTL is SystemVerilog-2017 and synthesizable, apart from the testbenches and one
behavioural memory model in `tb/`. It follows the Piper FPGA accelerator described in
"Efficient Tabular Data Preprocessing of ML Pipelines". Where that description is silent, this
RTL makes its own choices, and they are listed under
[Departures and open points](#departures-and-open-points).

```
              512-bit text beats          512-bit x3 binary rows
                     |                            |
                 load_data  (4 bytes/cycle)   load_data (1 row/cycle)
                     |                            |
                utf8_decode (0..4 values/cycle)   |
                     |                            |
                row_assembler ------------------->+  one 40-column row
                                                  |
                      broadcast (only when every column FIFO has room)
     +---------------+---------------+------------+--------------------------+
     | col 0 label   | cols 1..13 dense              | cols 14..39 sparse      |
     | FIFO          | FIFO -> neg2zero -> logarithm | FIFO -> modulus ->      |
     |               |                               |   genvocab -> applyvocab <-> vocab table
     +---------------+---------------+---------------+--------------------------+
                                                  |
                          store_data: pop all 40 column heads together
                                                  |
                                     3 x 512-bit output row
```

`piper_ctrl` decides which pass is running and when rows may enter the lanes.

## Row format

Text input is tab-separated, one row per line:

```
<label>\t<d1>\t...\t<d13>\t<s1>\t...\t<s26>\n
```

Dense fields are signed decimal. Sparse fields are lower-case hexadecimal. Any field may be
empty, and an empty field reads as 0. Inside the pipeline a row is `row_t`, an array of 40
32-bit columns in file order:

| column | content |
|---|---|
| 0 | label |
| 1 .. 13 | dense features |
| 14 .. 39 | sparse features |

Binary rows use the same 40 values on three 512-bit lanes, and the output uses the same layout:

| lane | bits used | content |
|---|---|---|
| 0 | 447:0 | label (bits 31:0), dense 1..13 |
| 1 | 511:0 | sparse 1..16 |
| 2 | 319:0 | sparse 17..26 |

All unused bits are zero. On output, lane 0 carries the label unchanged and the 13 dense results
as IEEE-754 single-precision bit patterns. Lanes 1 and 2 carry the sparse vocabulary indices,
zero-extended to 32 bits. `piper_pkg::row_to_beat` and `beat_to_row` convert between the row
and lane layouts.

## The two passes

`piper_ctrl` steps through IDLE → CLEAR → LOOP1 → DRAIN → LOOP2 → IDLE. The `loop` output tells
the data source which pass is running. The source sends the same `num_rows` rows once per pass.

- **CLEAR**: `start` (with `num_rows`) sends one `clear_start` pulse. Each GenVocab zeroes its
  bitmap, one 32-bit word per cycle (157 cycles for V = 5000). Each ApplyVocab resets its
  counter.
- **LOOP1** (`loop = LOOP_GEN`): rows are admitted until `num_rows` have entered. Only the 26
  sparse lanes take them; the label and dense lanes stay idle, because their results are only
  wanted once. Each sparse lane keeps the first occurrence of each value and numbers it.
- **DRAIN**: the row gate closes until every column FIFO is empty and no PE holds work. Only
  then does `loop` switch, so no loop-1 value can meet a loop-2 PE.
- **LOOP2** (`loop = LOOP_APPLY`): all 40 lanes take the rows again. Every sparse value is
  replaced by its table entry, and the rows are stored. `done` pulses when `num_rows` rows have
  left on `out_*`.

The vocabulary index of a value is its position in the column's order of first appearance,
counting from 0. The sequence is the same however the lanes stall, because each lane is
strictly in-order.

## Decoding text four bytes per cycle

Text decoding would be the bottleneck if done one byte per cycle: a Criteo row is about 240
bytes, so decoding alone would cost about 240 cycles per row. `load_data` therefore cuts each
512-bit beat into 16 chunks of 4 bytes, and `utf8_decode` consumes one chunk per cycle. This
is the hardest part of the design.

Each byte is first classified by `ascii_map`:

| byte | class and value |
|---|---|
| tab | field delimiter |
| new line | end of row |
| `-` | minus sign |
| `0`–`9` | digit, value = byte − 48 |
| `a`–`f` | digit, value = byte − 87 |
| anything else (e.g. zero padding after the last row) | ignored |

The decoder keeps a running value `v`, a negative flag and the current feature id. Each cycle
it folds the four bytes into that state, in order:

- **Digit**: `v = v*10 + d` if the feature id is at most 13 (label and dense, decimal);
  otherwise `v = (v << 4) + d` (sparse, hexadecimal).
- **Minus**: sets the flag. The flag is only honoured for decimal features.
- **Tab or new line**: emits `v`, negated if the flag is set, in the next free output slot,
  tagged with the feature id. Then `v` and the flag clear and the id advances (a new line also
  marks the value as the row's last and resets the id to 0).

So a chunk yields 0 to 4 values. The published design lists the 16 patterns of delimiters among
four bytes as separate cases (no delimiter: `v` absorbs all four bytes; one delimiter: one
value out and the rest seeds `v`; and so on). Writing the fold as a loop that synthesis unrolls
gives exactly those cases. It also covers decimal digits, the minus sign and the feature
counter, which the case table leaves out. The combinational depth is four digit steps in a row,
each a multiply-by-10 (shift-add) or a shift.

`row_assembler` writes each value into column `fid` of a row buffer. A value marked last closes
the row: the row moves to the output register and the buffer restarts at zero, which is how
empty fields become 0 without a separate FillMissing step. Values that follow a new line in the
same chunk already belong to the next row.

Throughput in text mode is set by the text length: about one row per (row bytes / 4) cycles,
which is the reason binary input is much faster.

## Column lanes

Every PE has valid/ready handshakes on both sides and is strictly in-order.

**Dense: `neg2zero`, then `logarithm`.**

- `neg2zero` is one register stage computing `x < 0 ? 0 : x`.
- `logarithm` computes `ln(x+1)` for a 32-bit unsigned integer, fully pipelined with one result
  per cycle and FRAC_BITS + 3 = 23 stages:
  1. Normalise `x+1` to `2^e · m` with `m` in [1, 2).
  2. Run FRAC_BITS squaring steps. Each step squares `m`; if the result is at least 2, it
     halves `m` and yields a 1 bit. This gives 20 fractional bits of `log2 m`.
  3. Multiply `e.fraction` by ln 2 (Q0.32 constant `0xB17217F8`).
  4. Pack as a float with truncation.

  Absolute error stays below about 2^-17 (the test allows 2e-5 absolute or 1e-5 relative).
  `ln(1)` is +0.0, and 159 gives 5.0752. The whole pipeline advances as one and holds when its
  last stage is blocked.

**Sparse: `modulus`, then `genvocab`, then `applyvocab`, with `vocab_table`.**

- `modulus` computes the unsigned `x mod VOCAB_SIZE`. It is one stage at II = 1, where II is the
  initiation interval: cycles between successive inputs. The decoder has already produced binary
  bits, so no separate hex-to-integer step exists.
- `genvocab` behaves differently in the two passes:
  - Loop 1: it reads the bitmap word for the value, then tests and sets the bit, so it takes one
    input every 2 cycles. Only values whose bit was clear go on.
  - Loop 2: it is a plain register stage with II = 1.
  - The bitmap holds ceil(V/32) 32-bit words in a single-port array.
- `applyvocab` also behaves differently in the two passes:
  - Loop 1: each value it receives is a first occurrence. It writes `table[value] = counter`
    and then increments the counter, at up to one write per cycle. `vocab_count` reports the
    final count.
  - Loop 2: it issues a table read for every value and outputs the returned index. Up to
    `MAX_READS` reads may be in flight; their results queue in a `MAX_READS`-entry buffer, which
    also absorbs output stalls. With the default of 1 the interval is the memory's read
    latency + 1: 2 cycles with the on-chip table. With `MAX_READS` above the latency the reads
    overlap and the PE takes one value per cycle. The memory must answer reads in order.
  - The memory port is a request/response handshake (`mem_req_*`, `mem_rsp_*`) that accepts
    any latency.
- `vocab_table` is the on-chip table: an array of V entries of `clog2(V+1)` bits. It accepts a
  request every cycle and answers reads one cycle later. It is never cleared, because loop 2
  only reads entries that loop 1 wrote.

**Label**: a FIFO only.

## Joining the lanes back into rows

The row broadcast writes a row into all 40 column FIFOs in the same cycle, and only when all of
them have room. `store_data` pops all 40 FIFO heads in the same cycle, and only when all are
valid and the output register is free. Rows therefore stay aligned without any tags, and a slow
lane simply back-pressures the broadcast.

The lanes have very different depths: about 25 cycles for dense, about 5 for sparse. A FIFO
must absorb that difference or the short lanes stall while the long ones fill. With
`FIFO_DEPTH = 32` (the default) the pipeline runs at the pace of its slowest PE. In simulation
that is 200 binary rows of loop 2 in 427 cycles, about 2.1 cycles per row, against the
2-cycle interval of ApplyVocab-2 and GenVocab-1. With depth 4 it ran at about 6.7 cycles per
row.

## Large vocabularies (EXT_VOCAB)

With a vocabulary of a million entries, the 26 tables (26 × 1M × 20 bits, about 65 MB) no
longer fit on chip. The published design moves them to HBM. Setting `EXT_VOCAB = 1` removes
the `vocab_table` instances and routes each sparse lane's memory port to the top-level `vt_*`
ports, one channel per column:

| port | direction |
|---|---|
| `vt_req_valid`, `vt_req_we`, `vt_req_addr`, `vt_req_wdata` | out |
| `vt_req_ready` | in |
| `vt_rsp_valid`, `vt_rsp_data` | in |

Each port is an array of 26.

The bitmaps stay on chip: 26 × 1 Mbit. With the default `VOCAB_READS = 1`, loop 2 then runs
at one row per (read latency + 1) cycles. `tb_piper_1m` attaches a 14-cycle behavioural channel (`tb/hbm_channel_model.sv`) and
measures 120 rows in 1814 cycles, about 15 cycles per row. That matches the "about 15 cycles"
the authors report per PE for HBM lookups. Setting `VOCAB_READS` above the channel latency lets
every ApplyVocab overlap its reads and brings loop 2 back to about one value per cycle per
column, which is the rate the authors measured with HBM. `tb_piper_1m_overlap` runs the same 1M build
with `VOCAB_READS = 15`: 120 binary rows of loop 2 take 148 cycles. `tb_applyvocab` tests the
overlapped mode at block level (7 reads against a 6-cycle channel). The same parameter set to 2
lifts the on-chip build from 2 cycles per row to about 1: 200 binary rows of loop 2 then take
228 cycles instead of 427. With `EXT_VOCAB = 0` the `vt_*` outputs are tied to zero
and the inputs are ignored.

## Top-level interface (`piper_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, synchronous active-low reset |
| `start`, `num_rows[31:0]` | in | pulse to begin a run; `num_rows` must stay constant for the whole run |
| `mode_binary` | in | 1: rows come on `bin_*`; 0: text on `utf8_*`. Hold constant for the run |
| `utf8_valid/ready`, `utf8_data[511:0]` | in/out/in | text beats, byte 0 in bits 7:0 |
| `bin_valid/ready`, `bin_data` (3 × 512) | in/out/in | binary rows, one per beat |
| `out_valid/ready`, `out_data` (3 × 512) | out/in/out | processed rows |
| `loop` | out | pass in progress (LOOP_GEN, LOOP_APPLY) |
| `busy`, `done` | out | run active; one-cycle pulse at the end |
| `vocab_count[26]` | out | vocabulary size of each sparse column after loop 1 |
| `vt_*` | | external table ports, see above |

| parameter | default | meaning |
|---|---|---|
| `VOCAB_SIZE` | 5000 | vocabulary size V per sparse column, and the modulus divisor |
| `FIFO_DEPTH` | 32 | column FIFO depth |
| `EXT_VOCAB` | 0 | 1: tables outside, on `vt_*` |
| `VOCAB_READS` | 1 | loop-2 table reads each ApplyVocab keeps in flight |

## Departures and open points

- **Interval of the vocabulary PEs.** The published text gives II = 2 for GenVocab-1 and for
  ApplyVocab-1/-2 on chip, and about 15 with HBM. Its per-operator timing table, however, lists
  the times of II = 1 for GenVocab-2 and ApplyVocab, even with HBM, explained by round-robin
  use of the HBM channels. By default this RTL follows the per-PE text:
  - GenVocab-1: 2 cycles.
  - ApplyVocab-2: latency + 1 cycles.
  - ApplyVocab-1 and GenVocab-2: 1 cycle.

  `VOCAB_READS` > latency gives ApplyVocab-2 II = 1 instead. How the original overlaps its HBM
  reads is not described; here responses are assumed to return in order.
- **One PE per column.** Every column has its own PE chain. The timing table's figures (for
  example 7.33 s ≈ 45.8 M rows × 40 values / 250 MHz) point to a build that handles one value
  per cycle over all columns, and the published text says PEs can be replicated per stage. The
  replication actually used is not stated; per-column lanes are this design's choice.
- **Decoder digit mapping.** The published decode flow chart pairs the "48~57" test with
  "minus 87". The RTL follows ASCII: digits minus 48, a–f minus 87.
- **No Hex2Int stage.** The published overview figure draws a row of Hex2Int PEs, while its text
  says no explicit hex-to-integer step is needed. The decoder's hex path already produces the
  integer, so no such stage exists here.
- **Decimal or hex** is chosen by column position (label and dense decimal, sparse hex), and the
  minus sign only applies to decimal columns. Numbers wider than 32 bits wrap.
- **Dense lanes idle in loop 1.** The published design runs every PE in both passes. Here the
  label and dense lanes are fed only in loop 2. The output is the same and pass 1 does less
  work.
- **Logarithm method, precision and format.** These are this design's own: single-precision
  float, truncated, about 17 correct fraction bits.
- **Not built**: the DDR/HBM memory controller, the FPGA TCP/IP stack and the HBM itself. The
  top exposes plain valid/ready streams and table ports where they would attach. There is no
  host interface or register map; `start`, `num_rows` and `mode_binary` are plain inputs.
- **Constant outputs.** After synthesis a large share of the top's output bits are constant, by
  construction: the unused lane bits, the upper bits of the zero-extended sparse indices and,
  with on-chip tables, all `vt_*` outputs.

## Verification

Each block has a self-checking testbench in `tb/` that compares against values computed
independently in the testbench. Each ends by printing `TB_RESULT checks=N failures=M` and has a
cycle watchdog. Rates and latencies that the design promises are checked as cycle counts:

- decoder, Neg2Zero, Modulus, StoreData and LoadData: 1 per cycle
- GenVocab-1: one input per 2 cycles
- ApplyVocab-2: 2 cycles, and 1 cycle with overlapped reads
- logarithm: latency
- bitmap clear: time

| testbench | what it covers |
|---|---|
| `tb_ascii_map` | all 256 bytes |
| `tb_utf8_decode` | random text rows with negatives and empty fields, stalls |
| `tb_row_assembler` | random grouping of 0..4 values per cycle, skipped ids |
| `tb_load_data` | beat-to-chunk order, binary unpack, mode gating |
| `tb_neg2zero`, `tb_modulus` | random values, both vocabulary sizes for modulus |
| `tb_logarithm` | against `$ln`, latency and stalls |
| `tb_genvocab`, `tb_applyvocab`, `tb_vocab_table` | first-occurrence filtering, numbering, table reads |
| `tb_store_data` | gather alignment under random arrival |
| `tb_piper_ctrl` | pass sequencing and the drain |
| `tb_piper_top` | the whole design at default parameters: 200 random rows through three runs (text with output stalls, binary at full speed with a rate check, binary with stalls) against a reference model; it counts that each mechanism occurred |
| `tb_piper_1m` | the same with V = 1,000,000 and external tables (14-cycle channel model), one read in flight |
| `tb_piper_1m_overlap` | as `tb_piper_1m` with 15 overlapping reads per column |

The mechanisms `tb_piper_top` counts are multi-value decode cycles, empty fields, clamped
negatives, filtered repeats, FIFO back-pressure, output back-pressure, both input modes and the
pass switch.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/piper_pkg.sv tb/tb_piper_top.sv \
          --top-module tb_piper_top -Mdir obj_top -o sim
./obj_top/sim
```

Verilator finds the other modules through `-Irtl` and `-Itb`. The end-to-end test at default
size runs in well under a second. Uninitialised state in the testbenches is avoided, so
`+verilator+rand+reset+2` (random initial values) should also pass.

## Files

| file | contents |
|---|---|
| `rtl/piper_pkg.sv` | column counts, `row_t`, `bin_beat_t`, character classes, loop enum, lane packing |
| `rtl/piper_top.sv` | the whole pipeline |
| `rtl/piper_ctrl.sv` | pass sequencer |
| `rtl/load_data.sv` | input stage (text chunking, binary unpack) |
| `rtl/ascii_map.sv` | byte classifier |
| `rtl/utf8_decode.sv` | four-byte parallel decoder |
| `rtl/row_assembler.sv` | values into rows |
| `rtl/neg2zero.sv` | dense PE |
| `rtl/logarithm.sv` | dense PE |
| `rtl/modulus.sv` | sparse PE |
| `rtl/genvocab.sv` | sparse PE |
| `rtl/applyvocab.sv` | sparse PE |
| `rtl/vocab_table.sv` | on-chip table |
| `rtl/store_data.sv` | gather and output |
| `rtl/stream_fifo.sv` | column FIFO |
| `tb/*.sv` | testbenches, plus `hbm_channel_model.sv` (behavioural external table channel) |
