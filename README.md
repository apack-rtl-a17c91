# APack: lossless compression of 8-bit tensors on the way to and from DRAM

Quantised neural-network tensors are stored as 8-bit values, and their value
distributions are very uneven. Most weights sit close to zero, and many
activations sit near zero or near the top of the range. APack turns this into
fewer DRAM bits without losing any information. It does this with a small
hardware coder in the path between the accelerator's global buffer and the
memory controller.

The main idea is to split every value into two parts:

* **Symbol.** This is the index of the value range, one of 16 contiguous ranges,
  that the value falls in. Symbols are coded with arithmetic coding, so a
  frequent range costs well under one bit.
* **Offset.** This is the position of the value inside its range. It is stored
  raw, in as many bits as that range needs (`ob`, 0 to 7). A range that holds a
  single value costs no offset bits at all.

Each tensor gets its own 16-row table, chosen offline from a profile of the
tensor. Only the 16 symbols go through the arithmetic coder. That keeps the
probability table, and so the hardware, small, while the offsets pick up most
of the remaining gain for free.

One tensor (one stream) becomes two bit streams in memory: the **symbol
stream** and the **offset stream**. It also produces one number of metadata:
the count of values coded, which tells the decoder when to stop.

The RTL is SystemVerilog-2017 in `rtl/`, with self-checking testbenches in
`tb/`. Everything here compiles with Verilator 5 and with the slang front end of
Yosys.

## Block map

```
             apack_top  (N_ENC = 32 compression + N_DEC = 32 decompression engines)
   L2 side                                                      memory-controller side
 values ──► apack_enc_engine ─┬─ apack_encoder ──────────────┐
                              │    ├ apack_enc_symbol_lookup  │  code bits + underflow bits
                              │    ├ apack_enc_pcnt           ├─► apack_bit_packer ─► 64b words (symbols)
                              │    └ apack_enc_hilo_gen       │
                              │         └ apack_range_norm    └─► apack_bit_packer ─► 64b words (offsets)
                              └─ value counter ──────────────────────────────────────► nsym (metadata)

 values ◄── apack_dec_engine ◄─ apack_decoder ◄── apack_bit_unpacker ◄── 64b words (symbols)
              (FSM)               ├ apack_dec_pcnt  ◄── apack_bit_unpacker ◄── 64b words (offsets)
                                  ├ apack_dec_symbol_gen
                                  └ apack_dec_hilo_adj
                                       └ apack_range_norm
```

`apack_pkg` holds the shared widths and the structs for the table-write ports.

## The per-tensor table

Each row `i` of the 16-row table holds:

| field      | bits | meaning |
|------------|------|---------|
| `base[i]`  | 8    | smallest value of the row's range (`v_min`) |
| `ob[i]`    | 3    | offset length: enough bits for the largest offset in the row |
| `HiCnt[i]` | 10   | cumulative count: top of the row's probability interval |

The rows are sorted by `base`, with `base[0] = 0`, and each range starts where
the previous one ends. So only `v_min` has to be stored: a row runs up to the
next row's `base` minus one. A range need not fill its `2^ob` offsets (a row
of 36 values takes 6 offset bits), and the unused codes are never produced. A value belongs to the
last row whose `base` is less than or equal to the value.

The probability interval of row `i` is `[HiCnt[i-1], HiCnt[i])`, out of 1024,
with `HiCnt[-1] = 0`. Its width is the row's share of the tensor's values.
Three rules apply to the table:

* `HiCnt` must never fall from one row to the next.
* Every row that occurs in the data must have a non-empty interval. Rows
  that never occur may repeat the previous count.
* The last row's `HiCnt` should be 1023 or less.

Tables are written one row at a time through `symt_in` = {enable, row, base,
ob} and `pcnt_in` = {enable, row, count}. These are the 11+4+1 and 10+4+1 bit
ports. Both sides hold the same table.

Reset loads a uniform table: `base = 16i`, `ob = 4`, `HiCnt = 64i + 63`. A
design that never loads a table therefore still codes correctly, just without
any gain.

## Coding one symbol

The coder keeps a 16-bit interval `[LO, HI]`. It starts at `[0x0000, 0xFFFF]`.
For a value in row `i`:

```
range = HI - LO + 1                       (17 bits: the first range is 0x10000)
sHI   = (range * HiCnt[i])   >> 10        (division by 1024 is a shift)
sLO   = (range * HiCnt[i-1]) >> 10
tHI   = LO + sHI - 1
tLO   = LO + sLO
```

The encoder finds row `i` with 16 comparators on `base`. The decoder has to
find it from the code value instead. It computes `CODE - LO` and compares it
with `range * HiCnt[j] >> 10` for all 16 rows in parallel, which takes 16
multipliers. The first row whose scaled count is above `CODE - LO` is the
symbol. The decoder then uses the same `sHI` and `sLO` as the encoder. Because
both sides use exactly the same integer arithmetic, they stay in lockstep.

One consequence of dividing by 1024 when the top count is at most 1023: the top
1/1024 of every interval is never used. The cost is about 0.0014 bits per
symbol. In exchange, the scale is a plain shift and never a divider.

## Renormalisation in a single step: the core of the design

A bit-serial arithmetic coder renormalises one bit at a time:

1. While the top bits of `tHI` and `tLO` agree, it shifts that bit out as
   output.
2. While `tLO = 01...` and `tHI = 10...`, the interval straddles the midpoint
   but is small. The coder drops the second bit and notes one **pending
   underflow bit**.

The hardware does the whole loop in one cycle. `apack_range_norm` holds that
logic, and the encoder and decoder share it.

* **Common prefix.** `cpl` = leading-zero count of `tHI ^ tLO`. Those `cpl`
  bits are final code bits. They are shifted out of both bounds. `HI` is
  refilled with ones and `LO` with zeros.
* **Underflow run.** After the shift, the MSbs differ (HI = 1, LO = 0). `p01`
  counts how many bits below the MSb have HI = 0 and LO = 1, starting from bit
  14. Those bits are removed from below the MSb of both bounds. Again the
  bounds are refilled with ones and zeros, and `p01` is added to the pending
  count `UBC`.

  The new MSbs are worth a closer look. When `p01 > 0`, the new interval is
  "just above" and "just below" the midpoint. So the new `HI` gets MSb 1 and
  the new `LO` gets MSb 0, whatever the old bit 15 was. That is why
  `nHI[15] = HI'[15] | (p01 != 0)` and `nLO[15] = LO'[15] & (p01 == 0)`.

Encoder output for one value (all registered, one cycle after `in_en`):

* `code_out = tHI`, `code_c = cpl`, `code_v = (cpl != 0)`. The code bits are
  the top `code_c` bits of `code_out`.
* `out_u = UBC`, `out_u_v`. These are the pending underflow bits that now
  resolve. They are written **after the first code bit** and are the inverse of
  that bit.

So when code bits come out, the pending count restarts at this step's `p01`.
When none come out, it grows by `p01`.

The engine turns this into one bit string, `{b, UBC copies of ~b, remaining cpl-1
bits}`, of up to 15 + 31 + 1 bits, which is then packed.

**Decoder side.** `CODE` is a 16-bit window on the symbol stream, and `CODE_in`
is the next 16 bits. The decoder does the same `cpl`/`p01` steps on
`{CODE, CODE_in}`:

* It shifts left by `cpl`.
* It keeps the MSb.
* It removes the `p01` bits below the MSb.

The result is the new `CODE`, and `CODE_r = cpl + p01` tells the supplier how
far to advance. So a decoder that has already consumed the bits of the
underflow run sees exactly the same window as the bit-serial decoder.

**Pending-count limit.** `UBC` is 5 bits, so at most 31 underflow bits can be
pending. Nothing bounds the pending count in principle. On the synthetic
streams in the testbenches the largest value seen was 20 (20,000 values). An
assertion in `apack_encoder` (`a_ubc_fits`) fires if a stream ever exceeds 31.
In that case the stream would not decode. Widening `UBC_W` in `apack_pkg` is
the fix if a data set needs it.

## Ending a stream

`done` ends a stream. The encoder emits two bits: bit 14 of `LO` (`b`), then
`UBC + 1` copies of `~b`. This is the usual finite-precision flush. It places
the code value inside the last interval, whatever the bits that follow it. The
encoder then returns to `[0, 0xFFFF]` with no pending bits, ready for the next
stream.

Both packers pad their last word with zeros. The decoder always reads 16 bits
beyond the current window. The memory side therefore has to return zeros (or
anything else: the value does not matter) for at least one word past the end of
the symbol stream.

The decoder stops after exactly `nsym` values. `nsym` is the count that the
compression engine reports at `done`.

## Offsets

`apack_enc_symbol_lookup` gives the value's offset `in - base[i]` and its length
`ob[i]`. The engine writes the offset's `ob` bits, MSb first, into the offset
stream.

On the decoder side, `OFS` is an 8-bit window and `OFS_in` the next 8 bits.
The output is computed as follows:

```
OUT   = base[i] + (OFS >> (8 - ob[i]))
OFS'  = ({OFS, OFS_in} << ob[i]) >> 8
OFS_r = ob[i]
```

A row with `ob = 0` reads no offset bits.

## Timing

| unit | throughput | latency |
|------|-----------|---------|
| `apack_encoder` | 1 value/cycle | outputs registered, 1 cycle |
| `apack_decoder` | 1 value/cycle (`step`) | `out_valid` 1 cycle after `step` |
| `apack_enc_engine` | 1 value/cycle, no back-pressure | packed word 2 cycles after the value that completes it |
| `apack_dec_engine` | 1 value/cycle while both windows are full | 2 cycles from step to `out_valid`; start-up ≈ 4 cycles + first words |

The coder's critical path runs through one row of work:

* a 17×10 multiplier,
* a 16-bit adder,
* a leading-zero count,
* a second run-length count,
* two barrel shifts.

In the decoder it also runs through 16 multiplier/comparator pairs and a
priority encoder. These engines are not pipelined (see the pipelined coders below for the
two-stage alternative).

## Engines and the top level

**`apack_enc_engine`** combines:

* one encoder,
* the underflow expansion,
* two `apack_bit_packer`s (64-bit words, MSb first, 128-bit buffer),
* a 32-bit value counter.

It asserts `stream_done` when both streams are flushed, and gives out `nsym`
with `nsym_v`.

**`apack_dec_engine`** combines two `apack_bit_unpacker`s, a decoder and a
four-state control:

1. `IDLE`.
2. `INIT` empties the unpackers and loads `HI`/`LO`.
3. `PRIME` waits for full windows, then pulses `start`.
4. `RUN` steps once per cycle while both windows are full and values remain.
   Otherwise it raises `stall`.

Words are taken with a ready/valid handshake, and only while a stream is
active. `sym_err` flags a code value that matches no row, which only happens
with a corrupt stream or a table mismatch.

**`apack_top`** holds 32 compression and 32 decompression engines, 64 in all.
Each engine has its own memory-side ports. The two table-write buses are
shared, and the `enc_tbl_sel` / `dec_tbl_sel` masks pick which engines take a
write. Weights and activations can therefore use different tables at the same
time. Arbitration onto the DRAM channels is left to the memory controller,
which sits outside this design.

## Pipelined, time-multiplexed coders

The single-cycle coders put a multiplier, an adder, two run-length counts and
two barrel shifters (the decoder adds sixteen multipliers and a priority
encoder) into one clock cycle. A faster clock needs pipeline stages. The
catch is that arithmetic coding is a recurrence: a stream's next step needs
the range its previous step produced. `apack_enc_pipe` and `apack_dec_pipe`
therefore split the step into two stages and fill the pipeline with several
independent streams, each a sub-tensor with its own range state. The symbol
table and the count table are shared; HI, LO and UBC (encoder) or HI, LO,
CODE and OFS (decoder) are kept per stream (`NSTR` copies, default 2).

| stage | encoder (`apack_enc_pipe`) | decoder (`apack_dec_pipe`) |
|-------|----------------------------|----------------------------|
| 1 | symbol lookup, count scaling with the stream's HI/LO | count lookup with the stream's HI/LO/CODE |
| 2 | HI/LO/CODE generation, write back, outputs | offset extraction, HI/LO/CODE adjust, write back, output |

Every command carries its stream number (`in_sid`) and every output is tagged
(`out_sid`). Outputs come two cycles after the command. A stream's registers
are written at the end of stage 2, so the same stream must not be commanded in
two consecutive cycles; assertions check this. With two or more streams in
rotation the unit still takes one command per cycle.

The decoder's bit supply follows stage 2. `win_sid` names the stream whose
next 16 symbol bits and 8 offset bits must be on `code_in` and `ofs_in`, and
`code_r`/`ofs_r` say how far that stream advances. A `start` command resets a
stream's range and fills its windows.

These two units are alternative coder cores. `apack_top` keeps the single-cycle
engines; a multi-stream engine (per-stream packers and unpackers around these
cores) is not built.

## Verification

All testbenches compare against an independent model in `tb/apack_ref_pkg.sv`.
It is written the textbook way: a bit-at-a-time arithmetic coder with
`while`-loop renormalisation and its own pending-bit counter, and the matching
bit-serial decoder.

The package also holds two test tables:

* **Weight-like table.** A profiled weight table of an LSTM layer. Its rows
  have 4 to 64 values, and its probability sits mostly on the rows near 0 and
  near 255. Nine middle rows are empty (zero probability).
* **Activation-like table.** Rows 0 and 1 hold the single values 0 and 1, with
  `ob = 0` and half of the probability between them. Rows 2 to 15 then widen
  the ranges step by step.

Values are drawn from the tables' own distributions, so every row and every
offset length occurs.

| testbench | what it checks |
|-----------|----------------|
| `tb_apack_enc_symbol_lookup` | row and offset for all 256 values, with the reset table and the LSTM table |
| `tb_apack_enc_pcnt` | `sHI`/`sLO` against the formula for random ranges and rows |
| `tb_apack_enc_hilo_gen` | `nHI`, `nLO`, UBC, code bits against the bit-serial loop |
| `tb_apack_encoder` | full code/offset output per value against the reference, flush, rate 1/cycle |
| `tb_apack_dec_pcnt` | symbol and interval found from random code values |
| `tb_apack_dec_symbol_gen` | output value, offset window and `OFS_r` |
| `tb_apack_dec_hilo_adj` | new bounds, new `CODE` and `CODE_r` against the bit-serial decoder |
| `tb_apack_decoder` | decodes reference streams value by value, one per cycle |
| `tb_apack_bit_packer` / `_unpacker` | random bit groups in, exact words out and back |
| `tb_apack_enc_engine` | packed words bit-exact to the reference, `nsym`, `stream_done` |
| `tb_apack_dec_engine` | round trip of several streams with a slow, gappy memory |
| `tb_apack_enc_pipe` | four interleaved streams, each bit-exact to its own reference; two-cycle latency and stream tags |
| `tb_apack_dec_pipe` | four interleaved streams decoded back in order; bit supply per stream; latency |
| `tb_apack_bilstm_layer` | the profiled LSTM weight table through one compression and one decompression engine: exact round trip, symbol stream within 1% of the ideal cost, one value per cycle |
| `tb_apack_top` | end to end at full size (below) |

`tb_apack_top` runs the top at its default parameters:

* All 32 compression engines code 600 values each, at the same time, with even
  and odd engines on different tables.
* Every word is checked against the reference.
* All 32 decompression engines then decode the streams back, a quarter of them
  behind a slow memory port.

It counts four mechanisms and fails if any count is zero:

* streams flushed,
* underflow bits emitted,
* decoder stall cycles,
* values with no offset bits.

`tb_apack_bilstm_layer` gives a feel for the gain. With the profiled LSTM
table, 20,000 weights take 32,768 symbol-stream bits. The table's ideal cost
is about 32,900 bits, so the 16-bit window loses nothing measurable. The
offsets take another 41,673 bits. Together that is 2.15 times smaller than
the raw 8-bit values.

Each testbench ends with a `TB_RESULT checks=… failures=…` line and has a
cycle watchdog.

## Simulating

Plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_apack_encoder rtl/apack_pkg.sv tb/apack_ref_pkg.sv tb/tb_apack_encoder.sv
./obj_dir/Vtb_apack_encoder
```

Swap in any other `tb_*` name. The full-size `tb_apack_top` takes a few
minutes to build and run.

## Departures from the published description, and limitations

* **Table field.** The published text says both that the lookup compares
  against each row's maximum and that only the minimum needs storing. This
  design stores `v_min` and matches the last row whose `base` is less than or
  equal to the value.
* **Offset length port.** The offset-length port is 4 bits wide. The offset
  lengths themselves are 0–7, because `ob` is 3 bits. A full 8-bit offset would
  need `OB_W = 4`.
* **Flush and end of stream.** The flush, the zero-tail rule for the symbol
  stream, the start/step decoder interface, the unpacker/packer structure, the
  64-bit word width and the 32-bit value count are all this design's own
  choices. The source describes these parts only by function.
* **Engine split.** The 64 engines are split into 32 compressors and 32
  decompressors. The published area and power per unit add up to the published
  totals with this split.
* **Pipelined coders not in the top.** The pipelined, time-multiplexed
  coders use one two-stage split; splitting the count lookup itself over
  stages is not built. They are tested on their own but are not wired into
  `apack_top` and have no engine wrapper.
* **Pending-count overflow.** `UBC` overflow past 31 is detected by an
  assertion but not handled.
* **No back-pressure.** The compression engine has no back-pressure. Its memory
  side must accept a word in every cycle in which one is produced.
* **Tables are the user's job.** A value whose row has an empty probability
  interval cannot be coded. Choosing the table from a profile is done in
  software and is not part of the RTL.
