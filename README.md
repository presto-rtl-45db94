# An in-storage preprocessing accelerator for recommendation-model training

Training a deep recommendation model (DLRM-style: dense features into an MLP, sparse
features into embedding tables) spends a surprising share of its time *before* the GPU sees
any data. Raw training rows are kept in columnar files (Apache Parquet), and every
mini-batch has to be decoded and then transformed feature by feature:

* **Bucketize** turns a dense (numeric) feature into a new sparse feature: the index of the
  bucket, among a sorted list of boundaries, that the value falls into.
* **SigridHash** maps each sparse id (an arbitrary 64-bit number) into the row range of its
  embedding table: a seeded hash followed by `mod table_size`.
* **Log** compresses the range of dense features, typically `ln(x + 1)`.

Done on general-purpose CPUs this takes many cores per GPU. The design here moves the work
into the storage device: the FPGA of a computational SSD reads the raw Parquet pages from
its own flash (a peer-to-peer copy over the SSD's internal PCIe switch into the FPGA's
DRAM), runs them through hardwired units, and leaves train-ready tensors in DRAM for the
host to forward to the GPUs. Only the finished tensors cross the host's PCIe link.

This repository is the RTL of that accelerator, in SystemVerilog, with self-checking
testbenches for every block, an end-to-end test on 8192-row columns and a test that
preprocesses one complete mini-batch of the Criteo-shaped configuration (RM1 below).

## Structure

```
                       control registers (presto_csr)  --->  irq
                                 | job / start / busy / done
     +-----------------+-----------------+------------------+------------------+
     | decoder PE x1   | Bucketize PE x2 | SigridHash PE x2 | Log PE x2        |
     |  in buf         |  in buf         |  in buf          |  in buf          |
     |  parquet_decoder|  bucketize_unit |  sigridhash_unit |  log_unit        |
     |   + dictionary  |   + bucket buf  |                  |                  |
     |  out buf        |  out buf        |  out buf         |  out buf         |
     +---rd---wr-------+---rd---wr-------+---rd---wr--------+---rd---wr--------+
          |   |             |   |             |   |              |   |
                 FPGA DRAM ("global memory"), one read + one write channel per PE
```

The three functional groups are

* the **decoder unit** (`N_DEC` PEs), which decodes Parquet pages into plain value columns,
* the **feature generation unit** (`N_BKT` Bucketize PEs, each with its own bucket buffer),
* the **feature normalisation unit** (`N_SH` SigridHash PEs and `N_LOG` Log PEs).

Defaults are 1, 2, 2 and 2 PEs, seven in all. Doubling every group (2/4/4/4) gives the
larger-FPGA variant; only the parameters change.

### Two kinds of parallelism

*Between features.* Each feature column is an independent job. Every processing element (PE)
has its own DRAM read and write channel, so seven columns are transformed at once and the
memory system, not a shared bus, is the limit.

*Within a feature.* Every PE reads its column through a ping-pong **feature buffer** and
writes its results through a second one. While the kernel drains one 512-word bank, the DRAM
reader fills the other; while the writer empties one output bank, the kernel fills the
other. Fetching, computing and writing back therefore overlap for the whole column.

## The processing element (`feature_pe`)

A PE runs one job: read `n_in` consecutive 64-bit words from `src`, push them through the
kernel, write what the kernel produces to consecutive words from `dst`.

* **Reader.** Issues one read per cycle while the number of reads in flight is below the
  free space of the input buffer. Read responses have no back-pressure, so this credit rule
  is what guarantees they always fit (an assertion checks it). The last word read is tagged
  `last`, and the tag travels with the data through buffer, kernel and output buffer.
* **Kernel.** Chosen at elaboration by `KIND`. All kernels share one streaming interface:
  valid/ready in, valid/ready out, each element a 64-bit word plus the `last` flag, and an
  `idle` output.
* **Writer.** Turns every element leaving the output buffer into a write request.
* **Completion.** A kernel may output fewer words than it reads. A table load outputs none,
  and a dictionary-encoded page outputs more values than words. So once all reads have
  returned and the kernel is idle, the output buffer is *flushed*: its partly filled bank is
  handed to the writer. The job ends when the output buffer is empty, and `done` pulses for
  one cycle. A job with `n_in = 0` finishes at once.

## The kernels

### Bucketize (`bucketize_unit` + `bucket_buffer`)

The bucket boundaries, sorted ascending, live in an on-chip RAM of 4096 32-bit entries
(enough for the largest bucket size evaluated, 4096). A *table-load* job
(`MODE_LOAD_TABLE`) streams one boundary per word into it. A *run* job takes signed 32-bit
dense values and outputs, for each, the number of boundaries `<= value`. Ids run from 0 to
`m`, where `m` (job parameter `p0`) is the number of boundaries.

The search is a textbook binary search over `[lo, hi)`. The RAM reads synchronously, and the
next probe address is computed combinationally from the word just read, so each halving
costs one cycle. A value therefore costs at most `ceil(log2(m+1)) + 2` cycles: 13 for
`m = 1024` and 15 for `m = 4096`. This is the slowest kernel per element, which is why
there are two Bucketize PEs.

### SigridHash (`sigridhash_unit`)

`out = Hash(id, seed) mod d`, with `seed = p0` and `d = p1` (the embedding-table size).
The hash is the 128-to-64 mixing function used by CityHash and folly, with the seed as the
high half:

```
a = (id ^ seed) * K;   a ^= a >> 47;
b = (seed ^ a) * K;    b ^= b >> 47;
h = (b * K) & (2^63 - 1)          K = 0x9DDFEA08EB382D69
```

A divider per element would be far too slow, so the remainder uses **Barrett reduction**:

* At job start a bit-serial restoring divider computes `R = floor(2^63 / d)`. It takes 64
  cycles, and the unit does not accept input until it finishes.
* Per element, `q = (h * R) >> 63` is either `floor(h/d)` or one less. So `r = h - q*d`
  needs at most one conditional subtraction of `d`, and an assertion checks `r < d`.
* Corner cases: `d = 1` gives 0, and `d = 0` passes the 63-bit hash through.

The unit is a six-stage pipeline that accepts one id per cycle. Its multipliers are the
unit's DSP cost.

### Log (`log_unit`)

`out = float32(ln(max(x + offset, 1)))`, where `x` is a signed 32-bit input and
`offset = p0`. `p0 = 1` gives the usual `log(x + 1)`; inputs with `x + offset <= 1` give 0.

1. Write `y = 2^e * z` with `1 <= z < 2`. A leading-one detector supplies `e`.
2. The fraction bits of `log2(z)` come one per pipeline stage by **repeated squaring**:
   square `z`; if the result is `>= 2`, the next bit is 1 and `z` is halved.
3. Multiply `e.f`, with `FB = 24` fraction bits, by `ln 2` as a Q0.32 constant.
4. Normalise the product to an IEEE single, truncating the mantissa.

The pipeline is `FB + 3 = 27` stages deep at one element per cycle. The testbench holds the
result to within `2^-20` relative error of a double-precision reference.

### Parquet decoder (`parquet_decoder`)

Input is the value section of a column page, packed as a little-endian byte stream, 8 bytes
per word. Three modes:

| mode | input | output |
|---|---|---|
| `MODE_DEC_PLAIN` | PLAIN INT32 (`p0 = 4`) or INT64 (`p0 = 8`) values | one value per word, INT32 sign-extended; one per cycle |
| `MODE_LOAD_TABLE` | a PLAIN dictionary page | nothing; entries go to the 4096-entry on-chip dictionary |
| `MODE_DEC_RLEDICT` | an RLE_DICTIONARY data page | one dictionary value per index |

An RLE_DICTIONARY page starts with a byte giving the index width `w`. It then holds
*hybrid runs*, each opened by a ULEB128 varint header `h`:

* **`h` odd:** `(h >> 1) * 8` indices follow, bit-packed LSB first, `w` bits each.
* **`h` even:** one index, stored in `ceil(w/8)` bytes, repeats `h >> 1` times.

The decoder consumes one byte per cycle from the page. It emits one value per cycle while a
run lasts. `p1` is the number of values in the page. Exactly that many are output, and
padding at the end is dropped. If the page ends early, `err` is raised.

**Not handled:**

* Thrift page and file headers. The host is expected to point the job at the page's values.
* Compression.
* Definition and repetition levels, so only required, flat columns.
* The other Parquet encodings.

A variable-length sparse feature is decoded as its flat value column. Its offsets are
handled on the host.

## Control registers (`presto_csr`)

Eight 64-bit registers per PE, at word address `8*pe + r`. PEs are numbered decoders first,
then Bucketize, SigridHash and Log.

| r | name | meaning |
|---|---|---|
| 0 | MODE | `job_mode_e`: 0 run, 1 load table, 2 PLAIN decode, 3 RLE_DICTIONARY decode |
| 1 | SRC | first DRAM word to read |
| 2 | DST | first DRAM word to write |
| 3 | N_IN | words to read |
| 4 | P0 | Bucketize: `m`; SigridHash: seed; Log: offset; decoder: value width |
| 5 | P1 | SigridHash: table size `d`; decoder: number of values |
| 6 | CTRL | write bit 0 to start (ignored while busy); read `{err, done, busy}` |

`done` and `err` stay set until the next start. `irq` pulses for one cycle whenever any PE
finishes.

## Memory channels (`presto_pkg`)

Every PE has the following channels:

* A **read channel.** A request (`rd_req_t`: valid, word address) is accepted on
  `valid && rd_req_ready`. Data comes back in request order, any number of cycles later, as
  a one-cycle `rd_rsp_t` pulse with no back-pressure.
* A **write channel.** A `wr_req_t` carries valid, address and data, and is accepted on
  `valid && wr_req_ready`.

Addresses count 64-bit words, 32 bits wide. A DRAM controller or AXI bridge attaches here.
It is outside this RTL.

## How far to trust it, and where it departs

Taken from the published design:

* the unit structure: decoder, feature generation with a bucket buffer, and feature
  normalisation with SigridHash and Log;
* the per-PE memory channels and the double-buffered feature buffers;
* Bucketize by binary search and SigridHash as a seeded hash modulo the table size;
* the bucket sizes and the mini-batch size.

This design's own choices, where the description stops short:

* the number of PEs of each kind (the published description has a single decoder unit and
  several feature generation and normalisation units);
* the decoder's feature buffers: the published block diagram connects the decoder to DRAM
  directly, here it sits in the same PE shell as the other kernels;
* the buffer depth (512 words per bank) and the dictionary size (4096);
* every width and every handshake;
* the job and register interface;
* the exact hash function, which the published description leaves open;
* the Barrett reduction;
* the Log formula and its offset;
* the tie rule of Bucketize (a value equal to a boundary goes to the upper bucket);
* which Parquet encodings are decoded.

The original accelerator was built with high-level synthesis and closed timing at 223 MHz.
This RTL has not been through timing analysis. The long combinational paths are:

* the 64x64 multiplies in SigridHash;
* the squaring stages in Log;
* the combinational probe-address path in Bucketize.

Each would need pipelining or DSP retiming on a real device. Power and area were not
evaluated.

Not part of this RTL:

* the DRAM itself and its controller;
* the SSD and its PCIe switch;
* the host software that splits a mini-batch into jobs, programs the registers and forwards
  the results;
* the training servers.

## Evaluated configurations

| model | dense | sparse | avg. ids/row | generated | bucket size |
|---|---|---|---|---|---|
| RM1 (Criteo) | 13 | 26 | 1 | 13 | 1024 |
| RM2 | 504 | 42 | 20 | 21 | 1024 |
| RM3 | 504 | 42 | 20 | 42 | 1024 |
| RM4 | 504 | 42 | 20 | 42 | 2048 |
| RM5 | 504 | 42 | 20 | 42 | 4096 |

All use 8192-row mini-batches and embedding tables of about 500,000 rows. Each column is a
separate job, and columns stream through the feature buffers, so column length never has to
fit on chip. The only on-chip limits are these:

* **Bucket size.** At most 4096; RM5 uses the whole buffer.
* **Dictionary size.** At most 4096 entries per column chunk. The evaluation does not say
  how large its dictionaries are.
* **Column length.** At most 2^32 − 1 words per job. The largest column, 8192 × 20 =
  163,840 ids, is far below that.

Measured in simulation with the default seven PEs and a DRAM model that refuses one
request in four:

* **RM1.** A complete mini-batch takes 117 jobs and 0.74 million cycles, about 3.3 ms at
  223 MHz. The two Bucketize PEs set the pace: each value costs up to 13 cycles of binary
  search.
* **RM5.** A complete mini-batch takes 1260 jobs and 21.2 million cycles. The single
  decoder PE sets the pace. Each dictionary-encoded sparse column of 163,840 ids costs it
  about 0.4 million cycles, because it handles one page byte per cycle and one value per
  cycle.

More decoder PEs (`N_DEC`) are the first knob to turn for the large configurations. The
regular RM5 test simulates all dense and generated features but only 4 of the 42 sparse
features (7.6 million cycles), to stay within a few minutes.

## Files

| file | content |
|---|---|
| `rtl/presto_pkg.sv` | widths, channel structs, job descriptor, modes, constants |
| `rtl/presto_accel.sv` | top level |
| `rtl/presto_csr.sv` | control registers |
| `rtl/feature_pe.sv` | processing element |
| `rtl/feature_buffer.sv` | ping-pong feature buffer |
| `rtl/bucketize_unit.sv`, `rtl/bucket_buffer.sv` | Bucketize and its boundary RAM |
| `rtl/sigridhash_unit.sv` | SigridHash |
| `rtl/log_unit.sv` | Log |
| `rtl/parquet_decoder.sv` | Parquet decoder |
| `tb/mem_model.sv` | behavioural multi-channel DRAM with random back-pressure (simulation only) |
| `tb/<module>_tb.sv` | self-checking testbench of each module |
| `tb/presto_accel_tb.sv` | end-to-end run of every mechanism at the default configuration |
| `tb/presto_workload_tb.sv` | whole mini-batches of the RM1 and RM5 configurations |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. A watchdog ends the run with a failure if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/presto_pkg.sv tb/presto_accel_tb.sv --top-module presto_accel_tb -o sim
./obj_dir/sim
```

Replace the testbench file and top name for any other test; `-y` lets Verilator find the
other modules (including the DRAM model `tb/mem_model.sv`) by name.

What the testbenches compare against:

* **Unit tests** use reference models written independently in the testbench: a linear
  bucket count, the hash with a plain `%`, a double-precision `ln`, and a software Parquet
  encoder.
* **Cycle counts.** The tests check the Bucketize step bound, and one-element-per-cycle
  throughput for SigridHash and Log.
* **The end-to-end test** places raw Parquet pages for one 8192-row mini-batch in DRAM and
  runs all seven PEs concurrently under random DRAM back-pressure. Its jobs cover two dense
  columns, a 1000-entry dictionary and a 163,840-id RLE_DICTIONARY sparse column. It checks
  every output word. It also counts these mechanisms and fails if any never occurred:
  * stalls, and reads held back by a full input buffer;
  * read/write overlap;
  * several PEs busy at once;
  * table and dictionary loads;
  * RLE and bit-packed runs;
  * flushes and interrupts.

  It runs about 600,000 cycles, roughly ten seconds.
* **The workload test** (`presto_workload_tb`) acts as the host scheduler. It assigns each
  column job to the first free PE of the right kind once its input column exists, and
  checks every output word of a whole mini-batch. It takes about two and a half minutes.
