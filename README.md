# SHIELD: an STT-RAM L2 cache that avoids read disturbance through compression

In STT-RAM, reading a cell passes a current through it, and that current can flip the value it
stores. This is *read disturbance*. The usual fix is to write the sensed data back after every
read, called a *restore*. A restore costs as much as a write in time and energy, and it keeps the
cache port busy.

SHIELD removes many of those restores by storing every line compressed. It relies on two
observations:

* **All-zero lines need no storage at all.** The line is recorded as "zero" in a small side
  memory that is not STT-RAM. Reading it touches no STT-RAM cell, so nothing is disturbed and
  nothing has to be restored.
* **Small compressed lines can be stored twice.** If the compressed image takes at most 32 bytes,
  two copies fit in the 64-byte block. The first read senses one copy and leaves the other
  intact, so no restore is needed. The block is then marked as holding a single copy, and later
  reads restore as usual. The extra copy is written together with the line, so it costs nothing
  separate.

Every other read senses only the compressed bytes and restores only those bytes. Writes also
store only the compressed bytes.

Compression is not used to fit more lines into the cache. Each 64-byte block still holds exactly
one line, and the bytes compression frees are used only for the second copy. The tag array and
replacement are therefore those of an ordinary set-associative cache.

This repository holds synthesizable SystemVerilog for such an L2 cache:

* default size 4 MB, 16-way, 64-byte lines, write-back, LRU replacement;
* a base-delta-immediate (BDI) compressor and decompressor;
* the per-block encoding store;
* the SHIELD read and write rules;
* a behavioural model of the STT-RAM data array, in which every read really destroys the bytes
  it senses.

Self-checking testbenches cover each block and the whole cache.

## Compressed image format

BDI views a 64-byte line as an array of equal elements (2, 4 or 8 bytes). It tries to express
each element as a *base* plus a narrow signed *delta*. There are two bases:

* the zero base, so small values are stored as they are;
* a non-zero base, which is the first element that does not fit the zero base.

A state BpDq means p-byte elements with q-byte deltas. The compressor checks all states and keeps
the smallest one that works, in this order:

| state | elements | payload CW (bytes) | mask bytes | stored image (bytes) | copies | encoding (1 copy / 2 copies) |
|---|---|---|---|---|---|---|
| zero | – | 0 | 0 | 0 | 0 | 0000 |
| repeat (eight equal 8-byte words) | 8 | 8 | 0 | 8 | 2 | 0001 / 0011 |
| B8D1 | 8 | 15 | 1 | 16 | 2 | 0010 / 0110 |
| B4D1 | 16 | 19 | 2 | 21 | 2 | 1100 / 1101 |
| B8D2 | 8 | 22 | 1 | 23 | 2 | 0101 / 0111 |
| B2D1 | 32 | 33 | 4 | 37 | 1 | 1110 |
| B4D2 | 16 | 34 | 2 | 36 | 1 | 0100 |
| B8D4 | 8 | 36 | 1 | 37 | 1 | 1000 |
| uncompressed | – | 64 | 0 | 64 | 1 | 1111 |

Two size reductions are built into the payload column:

* An all-zero line has no payload.
* The delta of the non-zero base element against itself is always zero, so it is not stored.
  The payload of BpDq is therefore `p + (64/p − 1)·q` bytes. For example, B8D1 is
  8 + 7·1 = 15 bytes.

The four-bit encodings and payload sizes are those of the published technique. Of the 16 codes,
three (1001, 1010, 1011) are unused. If one of them appears, it is read as "uncompressed".

**Where the base mask lives.** The decompressor must know, for each element, whether its delta
is against zero or against the non-zero base. That takes one bit per element. The published
payload sizes have no room for these bits, and the description does not say where they are kept.
This design appends them right after the payload, inside the STT-RAM block. It packs them LSB
first and rounds them up to whole bytes. Two things follow:

* The only state kept outside STT-RAM is the 4-bit encoding.
* The stored image is slightly larger than CW (the "stored image" column).

No state moves across the 32-byte or 64-byte boundary because of this. So the number of copies
and the encoding of every state are exactly as if the mask were free. The mask bits *are* exposed
to read disturbance, and they are restored along with the payload.

Byte layout of one image of BpDq, with n = 64/p elements and the base at element index b:

```
byte 0 .. p-1                 : base (element b, little-endian)
next (n-1)*q bytes            : deltas of elements 0..n-1 in order, skipping element b
next ceil(n/8) bytes          : mask, bit i = 1 if element i uses the non-zero base
```

The base element's own mask bit is 1. Its delta is implied to be zero. If every element fits the
zero base, element 0 is used as the base anyway, which keeps the layout uniform. Elements are
taken little-endian from the line. Deltas are two's complement and sign-extended when decoded.

## Two copies in one block

A two-copy block holds the image at bytes `[0, L)` and again at `[L, 2L)`, where L is the image
size (L ≤ 23). On its first read, the controller senses only `[L, 2L)`, the second copy. The
read policy moves the sensed bytes down to byte 0 for the decompressor. The copy at `[0, L)` is
never touched, so once the encoding is downgraded to its one-copy code, the block looks exactly
like a freshly written one-copy block. The published description does not say which copy is read
first; reading the upper one is this design's choice, and it is what makes the downgrade free.

The read rules, by the encoding found in the side memory:

| encoding | what is sensed | restore? | encoding afterwards |
|---|---|---|---|
| 0000 (zero) | nothing; the line is rebuilt as zeros | no | unchanged |
| 0011, 0110, 1101, 0111 (two copies) | the upper copy | no | 0001, 0010, 1100, 0101 |
| any other | the single image `[0, L)` | yes, same bytes | unchanged |

Writes (including fills from memory) compress the line, then:

* CW = 0: no STT-RAM byte is written and the encoding becomes 0000;
* 0 < CW ≤ 32: both copies are written with one byte-enabled write;
* otherwise: one copy is written.

## The STT-RAM array model and what "disturbance" means here

`sttram_data_array` is a behavioural model. It is not a circuit that could be built as written.
It holds all the lines and takes one access at a time:

* a read completes after `READ_LAT` cycles;
* a write completes after `WRITE_LAT` cycles.

Every access carries a 64-bit byte-enable, so only the bytes of the compressed image are sensed
or written. The model counts sensed and written bytes.

When a read is accepted, the model latches the correct bytes, as sense amplifiers would, and then
damages the sensed cells: each one becomes `byte & RDE_AND_MASK`. With the default mask 8'h00,
every sensed byte is wiped to zero. That is the worst case of disturbance (real disturbance
flips 1s to 0s with some probability). Because of this, any missing restore or wrong copy choice
shows up in simulation as wrong data on a later read. The testbenches rely on that.

Default latencies are 5 cycles for a read and 10 for a write. They were taken from a published
circuit-level estimate of a 4 MB, 16-way STT-RAM L2, at an assumed 2 GHz clock.

## The cache controller

`shield_l2_cache` serves one request at a time over a valid/ready port:

* a read returns one line on `resp_valid_o`;
* a write carries a whole line (an L1 write-back) and gets no response.

On the memory side it issues line fetches and write-backs and waits for fill data.

Tags are read before data, one after the other. States in order:

1. **IDLE → LOOKUP.** The set's tag row and LRU ages are read in the accept cycle. In LOOKUP,
   the hit or miss is known. The tag row and LRU are updated there. The hit way, the first
   invalid way, or the LRU way is chosen. The encoding read for that way is started. A write
   also starts compressing its line here.
2. **ENC.** The encoding is available. What happens next:
   * a read hit on a zero block is answered from the decompressor at once, without sensing;
   * any other read hit goes to **RD_ISSUE / RD_WAIT**, which senses the bytes named by the read
     policy;
   * a miss that evicts a dirty way first reads the victim through the same path, with no
     restore and no encoding change, because the block is leaving;
   * the victim is then decompressed and sent to memory in **EV_MEM**.
3. **RD_DEC → DECOMP.** The sensed image is realigned and decompressed (1 cycle), and the read
   is answered. For an eviction, the line goes to memory instead.
4. **RESTORE.** If the read policy asks for it, the sensed bytes are written back unchanged.
   The cache is not ready for new requests until this ends. This is the port blocking that SHIELD
   reduces. For a two-copy block, RESTORE is skipped and only the encoding is rewritten.
5. **FETCH / FETCH_WAIT.** On a read miss, the line is requested from memory. When it arrives,
   the request is answered with that line at once. The line then goes to compression.
6. **COMP → WR_ISSUE / WR_WAIT.** Compression takes 2 cycles. The write policy then produces
   the encoding, the data with one or two copies, and the byte enables. A zero line skips the
   array write entirely.

Read-hit latency with the defaults, from the accepting edge to `resp_valid_o`:

* a zero block takes 5 cycles (lookup, encoding, decompress, response);
* a sensed block takes `READ_LAT + 2` cycles more (sense, capture, realign).

`events_o` gives one-cycle pulses for each mechanism: read/write hit and miss, zero read, copy
read, restore, write-back, zero write, duplicated write. `bytes_sensed_o` and `bytes_written_o`
give running byte counts.

After reset, the controller clears one set per cycle (tags invalid, LRU ages reset), then raises
`init_done_o`. At the default size this takes 4096 cycles. The encoding store needs no reset,
because an invalid tag makes its contents irrelevant.

Three assertions guard the internal rules:

* the array is only requested when it is idle;
* no unused encoding is ever written;
* memory fill data arrives only while a fetch is pending.

## Files

| file | contents |
|---|---|
| `rtl/shield_pkg.sv` | line types, BDI states, the 13 encodings, size and encoding functions, event struct |
| `rtl/bdi_bd_pack.sv`, `rtl/bdi_bd_unpack.sv` | one BpDq packer / unpacker (parameters P, Q) |
| `rtl/bdi_compressor.sv` | 2-cycle BDI compressor choosing the smallest state |
| `rtl/bdi_decompressor.sv` | 1-cycle BDI decompressor |
| `rtl/shield_write_policy.sv` | encoding, copies and byte enables for a write |
| `rtl/shield_read_policy.sv` | what to sense, restore or not, new encoding, image realignment |
| `rtl/enc_store.sv` | 4-bit encoding per block (SRAM) |
| `rtl/l2_tag_array.sv` | valid, dirty and tag per way, tag compare |
| `rtl/lru_policy.sv` | true LRU, 4-bit ages per way |
| `rtl/sttram_data_array.sv` | behavioural STT-RAM data array with the disturbance model |
| `rtl/shield_l2_cache.sv` | the top: controller and wiring |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/bdi_ref_pkg.sv` | independent reference compressor and line generators for all classes |
| `tb/main_memory_model.sv` | behavioural main memory (fixed latency) for the cache tests |

Parameters of the top:

* `SETS` (4096) and `WAYS` (16) set the size.
  * The 8 MB configuration used with two cores is `SETS=8192`.
  * Half and double sizes are 2048 and 8192 sets for one core, or 4096 and 16384 for two.
* `ADDR_W` (48) is the address width.
* `READ_LAT` (5) and `WRITE_LAT` (10) are the array latencies.
* `RDE_AND_MASK` (8'h00) sets how a disturbed byte is damaged. 8'hFF turns disturbance off.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each has a watchdog. For
example, the end-to-end test:

```
verilator --binary --timing -Irtl -Itb rtl/shield_pkg.sv rtl/*.sv tb/bdi_ref_pkg.sv \
  tb/main_memory_model.sv tb/shield_l2_cache_tb.sv --top-module shield_l2_cache_tb
./obj_dir/Vshield_l2_cache_tb
```

`shield_l2_cache_tb` runs 4000 random reads and writes over 100 lines, on a cache shrunk to
4 sets, so that misses and dirty evictions happen often. The data covers every compression class.
Every read is compared with a golden copy of memory. It also checks that each mechanism occurred
and checks the read-hit latencies. In a typical run, about 29 % of read hits avoid a restore.

`shield_l2_cache_full_tb` runs the cache at its default 4 MB size: the reset sweep, then one of
each kind of operation.

The block testbenches compare against `bdi_ref_pkg`, which is written separately from the RTL.
They also check the 2-cycle and 1-cycle latencies of the compressor and decompressor.

## Where this design departs from, or adds to, the published technique

* **Base mask stored in the block**, as described above. The published sizes leave it out.
* **Copy read first**: the upper copy. Not specified in the source.
* **Fills are compressed like writes.** Read-miss data is returned to the requester before it
  is compressed and stored.
* **Dirty victims are read without a restore.** They are leaving the cache.
* **Restore timing.** The restore follows the read immediately, and the cache blocks during it.
  There is no buffer for deferred restores, which matches the technique's intent.
* **Interface, FSM, reset sweep and address width** are this design's own. The source evaluates
  the cache in a simulator and gives no interface.
* **Latencies in cycles** are derived from nanosecond figures at an assumed 2 GHz clock.
* **Disturbance** is modelled as certain, and per sensed byte. Real disturbance is
  probabilistic and per cell.
* **Not built:** the processor cores, the L1 caches and main memory. The tests drive the L2 port
  directly, with a behavioural memory.
