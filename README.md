# Sparse pattern matching inside a flash storage device

Document search and similar workloads (subgraph matching, protein search,
feature matching) compare a query against millions of very sparse vectors.
A document becomes a vector with one dimension per word of a vocabulary of
100,000 words or more. Only the few dozen words that occur in the document are
nonzero. The query is scored against every document with the cosine
similarity:

    cos(A, B) = sum_i A_i B_i / ( |A| |B| )

Because the vectors are sparse, the numerator only has terms where both
vectors are nonzero. Those terms are the partial products PP_i. Finding them
means matching keys, not doing arithmetic, and on a CPU the matching takes
most of the time. Over a whole collection it is also limited by memory
bandwidth.

The accelerator in this repository computes where the data lives. It sits in
the FPGA of a flash storage device. Documents stream out of flash straight
into a set of matching kernels. Each kernel holds a query in a small on-chip
memory and sends the host only the documents that score high enough. The host
just starts searches and collects results.

This RTL implements the accelerator slice described in *In-Storage Embedded
Accelerator for Sparse Pattern Processing* (Jun, Nguyen, Gadepally and
Arvind), on the BlueDBM platform. The slice has eight kernels, each with an
8 KB query memory for up to 2048 nonzero query elements. The matching
datapath follows the published description. Where that description stops
(encodings, handshakes, the cosine normalisation, the end of a run), the
choices are this design's own. They are listed in
[Departures and additions](#departures-and-additions).

## How the data sits in flash

Every stored item is a 32-bit word. Bit 31 is a flag that says what the
word is:

| bit 31 | bits 30:8                | bits 7:0            |
|--------|--------------------------|---------------------|
| 1      | pattern (document) identifier, bits 30:0 ||
| 0      | key: word index (23 bits) | value: word count (8 bits) |

A document is stored as its identifier followed by its key/value pairs,
**sorted by key**. The collection is these documents one after another. The
query uses the same key/value format and is also sorted by key. The widths
come from the published format. The flag polarity (1 = identifier) is this
design's choice. With 23-bit keys the vocabulary can have up to 8.4 million
words. With 31-bit identifiers there can be up to 2.1 billion documents.

The flash side delivers 512-bit beats on `dataIn`. Each beat holds 16 items,
with item 0 in bits 31:0.

## The kernel

```
            commandIn (128)                               resultsToMemory (128)
                 |                                                ^
           [command decode] ---- threshold / cosine constant ---+ |
                 | query writes, length                         | |
                 v                                              | |
   +--------------------------+   next pair / rewind            v |
   | query memory + prefetch  |<------------------+   +------------------+
   +--------------------------+                   |   | threshold filter |
                 | query items                    |   +------------------+
                 v                                |            ^ pattern ID, dot, |B|^2
   dataIn (512) -> [unpacker] -> doc items -> [key comparator] -> [distance accumulator]
                                                   pattern ID, value pair
```

`spm_kernel` puts a queue on each of its three ports (`sync_fifo`,
4 entries) and chains the blocks above.

### Key comparator: a merge, one step per cycle

The comparator (`key_comparator`) keeps two pointers: one into the document
as it streams past, and one into the query memory. Both lists are sorted, so
the common keys come out of a merge. Each cycle it compares the two current
keys and moves exactly one pointer:

* document key < query key: that document word is not in the query, so the
  document pointer moves on;
* document key = query key: it is a match. The comparator sends the
  document identifier and both values on as a partial product, and moves the
  document pointer;
* document key > query key: it moves the query pointer. This is the "next
  pair" request to the query memory.

When a pattern identifier arrives, the previous document is finished: the
comparator sends a document-end event and **rewinds** the query pointer to
item 0 for the new document. Once the query pointer has passed the query's
last item, the rest of the document cannot match. The comparator skips those
items at one per cycle without comparing them.

A document of n items that advances the query pointer m times therefore
costs 1 + n + m cycles. This is the cost on which the throughput figures
below depend. Every document item consumed is also passed on with its value,
so that the accumulator can form the document's norm.

### Query memory and the prefetch predictor

This is the least obvious part of the design. The query sits in a block RAM
with a read latency of one cycle. To take a new query item every cycle, the
reads must be issued ahead of need. But any document boundary can make the
comparator rewind, and then the items read ahead are the wrong ones. If the
query memory waited at each step to learn whether a rewind was coming, it
would lose a cycle or more on every step.

`query_memory` therefore **predicts that no rewind happens**. It keeps a
*fetch offset* and issues a read from it every cycle in which there is room.
The item that comes back goes into a *prefetched-value queue*. At the same
time the current *epoch* number goes into a parallel *epoch queue*. A rewind
does two things: the fetch offset goes back to 0, and the epoch register goes
up by 1. It does not touch the queues.

At the head of the queues, the stored epoch is compared with the current
one:

* equal: the item was fetched for the current document. It is offered to the
  comparator, and "next pair" removes it from both queues;
* different: the item was mispredicted, fetched before a rewind that has
  since happened. It is dropped without being offered. The `discard` output
  pulses.

Example: a query of 5 items, and a document that ends after the comparator
has used items 0 and 1.

```
cycle  event            fetch  epoch  queues (item@epoch, head first)   offered
  t    -                  4      0    2@0 3@0                            item 2
  t+1  rewind             1      1    2@0 3@0 0@1 (read issued)          -
  t+2  -                  2      1    2@0 3@0 0@1                        discard 2
  t+3  -                  3      1    3@0 0@1 1@1                        discard 3
  t+4  -                  4      1    0@1 1@1 2@1                        item 0
```

A rewind costs as many cycles as there are stale entries to drain, at most
the queue depth. There are no extra cycles per comparison.

Details that are this design's own:

* The read of item 0 is issued in the rewind cycle itself, already tagged
  with the new epoch.
* Reads are issued only while the epoch queue has room. Since the value
  queue never holds more entries than the epoch queue, it cannot overflow.
* The item at offset `qlen-1` is tagged `last`. After it, reading stops until
  the next rewind.
* The epoch is 4 bits wide. A stale entry leaves the queue within
  `PF_DEPTH+2` cycles and there is at most one rewind per cycle, so an old
  epoch value cannot come round again while a stale entry is still queued.
  `EPOCH_W` must stay above log2(`PF_DEPTH`+3).
* The head is compared with the epoch *register*. An item that is still
  offered in the rewind cycle is stale, and the comparator never takes an
  item in a rewind cycle (an assertion checks this).

### Distance accumulator and threshold filter: the cosine without a divider

`distance_accumulator` adds A_i·B_i for every match, which gives the dot
product. It adds B_i² for every document item, which gives |B|². It also
counts the partial products. At each document end it hands these three
numbers, with the identifier, to `threshold_filter`. The dot product is
32 bits wide, which is enough for 2048 products of 255·255.

The filter has two modes, set by command:

* **dot-product mode:** pass if `dot >= threshold`;
* **cosine mode:** pass if `cos >= t`. This is tested without a divider or
  square root as `dot² · 2^16 >= C · |B|²`. The host supplies
  `C = t² · |A|² · 2^16`. The query norm |A| is fixed for a run, so the host
  computes C once per query.

A passing document becomes a result record. The record carries the dot
product and |B|², so the host can compute the exact cosine if it wants it.
After the last document of a run the filter sends an end-of-run record with
three totals: documents seen, documents passed and partial products.

The published design says that the cosine is computed in the accumulator
stage and that high-scoring documents are reported. It does not say how the
normalisation is done. The multiplication-only test above is this design's
choice.

## Talking to a kernel

Commands (`commandIn`, 128 bits): opcode in bits 127:120, argument A in
bits 63:32, argument B in bits 31:0.

| opcode | name        | effect                                                    |
|--------|-------------|-----------------------------------------------------------|
| 0x01   | QUERY_WR    | query memory[A] = B (a key/value item)                    |
| 0x02   | SET_QLEN    | query length = B (clamped to 2048)                        |
| 0x03   | SET_THRESH  | dot-product threshold = B; selects dot-product mode       |
| 0x05   | SET_COS     | cosine constant C = {A, B}; selects cosine mode           |
| 0x04   | START       | start a run over the next B items arriving on dataIn      |

Commands are taken only while no run is in progress (`busy` low), so a
query cannot change under a search. A run must begin with a pattern
identifier. Items before the first identifier are dropped. The host must
send exactly enough beats to cover B items. Items past B in the last beat are
ignored.

Results (`resultsToMemory`, 128 bits):

| bits     | REC_DOC (0x01)          | REC_DONE (0x02)        |
|----------|-------------------------|------------------------|
| 127:120  | record type             | record type            |
| 119:96   | partial products        | 0                      |
| 95:64    | pattern identifier      | documents in the run   |
| 63:32    | dot product             | documents passed       |
| 31:0     | abs(B) squared (sum of B_i²) | partial products in the run |

All port and internal handshakes are valid/ready. A transfer happens on a
rising clock edge where both are high. The reset `rst_n` is active low and
asynchronous. Memories are not reset.

## The slice

`spm_accelerator` is the top. It holds `NUM_KERNELS` = 8 kernels, which is
enough to keep up with the roughly 2 GB/s of the prototype's flash. Each
kernel has its own ports, and the top exposes them as arrays indexed by
kernel. The storage side decides which flash pages go to which kernel. The
same query in every kernel splits one search eight ways. Different queries
search the same data for several queries at once.

The parameters and their defaults:

| parameter   | default | meaning                                   | origin    |
|-------------|---------|-------------------------------------------|-----------|
| NUM_KERNELS | 8       | kernels in the slice                      | published |
| QDEPTH      | 2048    | query memory items (8 KB)                 | published |
| PF_DEPTH    | 4       | prefetch queue depth                      | own       |
| EPOCH_W     | 4       | epoch width                               | own       |
| PORT_DEPTH  | 4       | depth of each port queue                  | own       |

Each kernel's query memory is 2048 × 32 bits (64 Kbit), so the slice holds
512 Kbit of query RAM. The port and prefetch queues are 4 entries deep.
A generic synthesis of the slice with the defaults (Yosys, no FPGA
mapping) gives 5,600 flip-flops and 550,048 memory bits. The memory bits
are the eight query RAMs plus the small queues.

## Throughput

`tb_workload_search` runs all eight kernels on random data of realistic
sparsity and reports cycle counts:

| search                                   | items/cycle (slice) | clock for 2 GB/s | clock for 10.35M docs/s |
|------------------------------------------|---------------------|------------------|-------------------------|
| documents: 141,000 words, 60-word docs and query | 3.98        | ~126 MHz         | ~159 MHz                |
| proteins: 8,000 3-mers, ~300 per protein and query | 3.95      | ~127 MHz         | n/a                     |

Flash bandwidth limits a single search. The same pass over the data can
serve several queries: each partition is read once and broadcast to one
kernel per query. `tb_workload_batch` builds the slice with
`NUM_KERNELS = 20`, the size of the published scalability estimate. It runs
three document-search queries over six partitions on 18 of the kernels;
twenty does not divide by three, so two are idle. A beat is held until all
three kernels have taken it, so each partition moves at the pace of its
slowest kernel. The slice then scores 0.147 documents per cycle (documents
times queries) and reads 2.98 items per cycle from flash. The estimated
27 million scored documents per second would need about 184 MHz.

A kernel takes about 0.5 items per cycle, not 1. The merge also spends cycles
advancing the query pointer, and each document costs a few cycles of rewind.
The published prototype's clock frequency is not known here, so these numbers
do not confirm or refute its measured 10.35M documents/s. At the sizes the
original work uses, everything fits the defaults: 141,000-word vocabulary,
8.2M documents, queries of tens to hundreds of words. Two limits remain. A
query longer than 2048 distinct keys does not fit. A collection of more than
2^31 documents overflows the identifier, unless identifiers are assigned per
partition.

## Departures and additions

Taken from the published design: the 32-bit data format and its field
widths; the chain query memory → key comparator → distance accumulator →
threshold filter; the one-pointer-per-comparison merge with rewind at
document ends; the prefetcher with fetch offset, epoch, epoch and value
queues, and use-or-discard; the port names and widths; eight kernels; 8 KB
(2048-item) query memories.

This design's own:

* the flag polarity;
* the item order within a beat;
* the command and record encodings;
* the end of a run given by an item count;
* the end-of-run record;
* the block RAM latency of one cycle;
* all queue depths and the epoch width;
* moving the document pointer on equal keys;
* forwarding every document value for the norm;
* the cosine test by multiplication;
* commands waiting while a run is in progress.

Not built:

* **dataToStorage**, the fourth published kernel port (512 bits, kernel to
  flash). Document search writes nothing back to flash.
* The **flash storage interface**, which reorders out-of-order pages and
  routes them to kernels. The flash controller, PCIe link and host software
  are platform parts and are also not built. The kernel ports are where they
  connect.
* The **broadcast of one flash stream to several kernels** for batched
  queries. That belongs to the flash storage interface. The batched
  testbench models it, and the slice itself needs nothing more than
  `NUM_KERNELS = 20`.

## Files

| file | contents |
|------|----------|
| `rtl/spm_pkg.sv` | widths, data/command/record types, field helpers |
| `rtl/sync_fifo.sv` | the queue used for ports and prefetching |
| `rtl/query_bram.sv` | query block RAM |
| `rtl/query_memory.sv` | prefetch predictor around the block RAM |
| `rtl/word_unpacker.sv` | 512-bit beats to 32-bit items |
| `rtl/key_comparator.sv` | the merge |
| `rtl/distance_accumulator.sv` | dot product, abs(B) squared, partial product count |
| `rtl/threshold_filter.sv` | dot or cosine threshold, result records |
| `rtl/spm_kernel.sv` | one kernel with its port queues and command decoder |
| `rtl/spm_accelerator.sv` | the eight-kernel slice (top) |
| `tb/spm_tb_pkg.sv` | data generator and reference model |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_workload_search.sv` | throughput on document and protein search |
| `tb/tb_workload_batch.sv` | twenty kernels, three queries sharing one pass over the data |

## Simulating

Every testbench checks itself and ends with
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/spm_pkg.sv tb/spm_tb_pkg.sv \
  tb/tb_spm_accelerator.sv --top-module tb_spm_accelerator
./obj_dir/Vtb_spm_accelerator
```

To run another bench, substitute its name. All of them finish in seconds.
All run at the default parameters, except `tb_workload_batch`, which builds
twenty kernels.

The expected values are computed without the RTL. The reference model finds
each dot product by looking up every document key in the query directly, not
by merging. It checks the number of key comparisons against a software merge,
and checks cycle counts against one merge step per cycle.

The slice testbench runs the full-size design: eight kernels, in two passes,
with queries of 0 to 2048 items. It also counts how often each mechanism
occurred, and fails if one never did:

* rewinds;
* discarded prefetches;
* matches;
* documents passed and dropped, in both threshold modes;
* items skipped after the query is exhausted;
* backpressure on `dataIn` and on `resultsToMemory`.

The data is random, not a real corpus.
