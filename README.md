# Bitmap index creation core: RTL

A bitmap index answers queries over many records with bitwise logic. For
every key k and record j there is one bit: 1 when record j contains key k.
A query like "records with key 2 and key 4 but not key 5" is then
`row2 & row4 & ~row5`. Building the index is the costly part. This design
builds it in hardware. It uses a content-addressable memory (CAM) to ask
"does this record contain this key?" once per clock, and a transpose stage
to turn the per-record answers into per-key rows.

The sizes are those of a small proof-of-concept core made in a 65-nm
silicon-on-thin-buried-oxide (SOTB) process:

| quantity | default | parameter |
|---|---|---|
| word and key width | 8 bits | `WORD_W` |
| words per record | 32 (one CAM block of 32 words) | `NUM_CB` x `CB_WORDS` |
| keys per batch (M) | 8 | `KEYS` |
| records per batch (N) | 16 | `RECORDS` |
| cores in the system (Z) | 4 (own choice) | `CORES` |

A batch of 16 records and 8 keys produces an 8 x 16-bit bitmap index. Each
of its 8 rows is 16 bits wide, and bit j of a row stands for record j.

## How one core works

```
 stream in ──► CAM (record) ──match──► buffer N x M ──► transpose matrix ──► BI rows out
 (words, keys)   1 clock                 bit per clock     copy N rows, send M rows
```

**Input order.** The core reads one 8-bit valid/ready stream. For each
record it takes the record's 32 words, then the batch's 8 keys. It does
this 16 times per batch. The keys are sent again with every record,
because the core does not store them. Its only storage is the CAM and the
buffer: 8,192 + 128 = 8,320 bits.

**CAM (`cam`, `cam_block`).** A CAM block is a RAM addressed by the data
value, not by the word position. It has 256 rows, one per possible 8-bit
value, and 32 columns, one per word position. Bit [v][w] is set when word
w of the record holds value v. Storing word w with value v clears column w
in every row and sets bit [v][w], all in one clock. This overwrites the
previous record without a separate erase pass. It works because the array
is built from flip-flops, not from a RAM macro. A search reads row `key`
and ORs its 32 bits. The result is registered, so it arrives one clock
after the key. With several blocks (`NUM_CB` > 1), each block holds 32
words of the record and the blocks' results are ORed.

**Buffer (`bic_buffer`).** Each match bit is written to row = record,
column = key. The write happens the clock after the key is taken, while
the CAM may already be loading the next record's words. Records therefore
follow each other with no gap. A record takes 32 + 8 = 40 clocks and a
batch 640 clocks.

**Transpose matrix (`transpose_matrix`, `tm_transpose_unit`).** When the
last bit of a batch is in the buffer, the control unit copies the 16
buffer rows into its own 16 x 8 register matrix, one row per clock. It
then releases the buffer and sends the 8 columns out as the bitmap index
rows, one per clock while `out_ready` is high.

Timing: the first result row is offered N + 3 = 19 clocks after the edge
that took the batch's last key, provided the transpose matrix was idle.

**Stall.** A core can hold up to three batches at once:

- one in the transpose matrix, waiting to be read out;
- one complete in the buffer;
- one being loaded into the CAM.

If the buffer still holds an uncopied batch, the next batch's record words
are accepted, but its keys are held off. `in_ready` is then low and
`key_stall` is high. This keeps the buffer from being overwritten, and an
assertion checks it. The transpose matrix releases the buffer N + 3
clocks after a batch's last key. At the default sizes this is sooner than
the 33rd clock, when the next batch's first key arrives, so back-to-back
batches never stall. With more records than words per record
(N + 3 > words), each following batch waits N + 3 - words clocks at its
first keys.

## The multi-core system and standby

`bic_multicore` has `CORES` cores on one shared input stream and one
shared output stream. An external memory supplies the batches and takes
the results.

- **Dispatch.** When the first word of a batch arrives, the dispatcher
  picks the next core in round-robin order that is not in standby and can
  accept input. The whole batch goes to that core.
- **Ordered return.** A FIFO records which core took each batch. The
  output side drains the head core's 8 rows, then moves to the next entry.
  Results therefore come back in the order the batches went in, and
  `out_core` says which core made them.
- **Standby.** `stb[i]` stops core i's clock. The clock-gating cell
  `clock_gate` holds the core clock at 1, and a latch that is open only
  while `sclk` is high keeps that clock free of glitches. The core keeps
  all its state, so nothing has to be saved or restored.
  - `stb` is registered inside the system. A change sampled at edge e
    takes effect at edge e+1.
  - No batch is started on a core in standby.
  - If a core is put in standby in the middle of a batch or of its output,
    the shared stream waits until the core is woken.

In silicon, standby leakage is cut further by reverse-biasing the
transistors' back gates. That is a matter of supply and bias voltages, so
it has no RTL here.

## Where this departs from, or adds to, the source design

These parts follow the published description:

- the CAM → buffer → transpose-matrix order;
- a search result one clock after the key;
- records fed back to back;
- the block sizes and memory bit counts;
- one clock-gating cell per core, holding the core clock at 1 while its
  standby input is 1;
- results returned in batch order.

These are this design's own choices:

- the byte-wide stream format with valid/ready handshakes;
- clearing a CAM column in the same clock as the write;
- the key-stall rule and the copy-then-release in the transpose matrix;
- the round-robin dispatcher and the ordering FIFO (depth 3 x `CORES`);
- the latch in the clock gate and the registering of `stb`;
- all reset values;
- the core count of 4.

The fabricated chip holds a single core. The earlier, larger
configuration (16 keys, 256 records of 256 words) fits the same RTL with
`NUM_CB=8, KEYS=16, RECORDS=256`. `tb_bic_core_large` runs one core at that
size for two batches. Each batch takes 256 x 272 = 69,632 input clocks,
and the second also waits the 3 clocks described above.

## Files

| file | contents |
|---|---|
| `rtl/bic_pkg.sv` | default sizes, stream-phase and TM state enums |
| `rtl/cam_block.sv` | one 32-word x 8-bit CAM block (256 x 32 register array) |
| `rtl/cam.sv` | `NUM_CB` blocks, ORed result |
| `rtl/bic_buffer.sv` | N x M match-bit buffer, bit write, row read |
| `rtl/tm_transpose_unit.sv` | row-written, column-read matrix |
| `rtl/transpose_matrix.sv` | TM control: copy, release, output stream |
| `rtl/clock_gate.sv` | latch-based clock gate, clock held high in standby |
| `rtl/bic_core.sv` | one core: sequencing, CAM, buffer, TM |
| `rtl/bic_multicore.sv` | top: cores, clock gates, dispatcher, ordered collector |

Each `tb/tb_<module>.sv` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=F` at the end and has a watchdog. The tests
cover:

- `tb_cam_block`, `tb_cam`: all 256 key values against a record model,
  overwriting, and two blocks.
- `tb_bic_buffer`, `tb_tm_transpose_unit`: model-based checks of each
  block.
- `tb_transpose_matrix`: copy and release timing, column order, and
  back-pressure.
- `tb_clock_gate`: iclk edges and levels while stb is switched from a
  register.
- `tb_bic_core`:
  - the nine-object, five-attribute example index;
  - random batches;
  - 640 clocks per batch at full input rate;
  - N + 3 latency;
  - key stalls under held-off output.
- `tb_bic_core_large`: one core with 256-word records, 16 keys and 256
  records, with its rows and input clock counts checked.
- `tb_bic_multicore`: the whole system at its default sizes, 24 batches.
  It checks every result row and the batch order. It makes each of these
  happen and counts it: dispatch to every core, standby of two cores, a
  core frozen in the middle of a batch, key stalls and output
  back-pressure.

Run a test with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/bic_pkg.sv tb/tb_bic_multicore.sv \
          --top-module tb_bic_multicore -o sim && obj_dir/sim
```

Verilator finds the other modules through `-Irtl`. Every state element has
an asynchronous reset. The testbenches drive a falling edge on `rst_n` so
that the reset reaches cores whose clock is gated. A simulation in which
`rst_n` starts at 0 and never falls leaves such cores unreset.

Lint notes:

- `clock_gate` contains one intended latch.
- Verilator's `SYNCASYNCNET` notes come from assertions that sample
  `rst_n` in `disable iff`.
