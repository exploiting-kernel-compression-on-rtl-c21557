# A streaming decoder for Huffman-compressed binary 3x3 kernels

In a binary neural network every weight is one bit, so one channel of a 3x3
convolution kernel is a 9-bit word, a *bit sequence*. Only 512 such words exist,
and in trained networks such as ReActNet their use is very uneven: a few dozen
sequences cover about half of all channels. Coding the frequent sequences with
fewer bits therefore shrinks the kernels (by about 1.2x to 1.3x per layer).
Decoding a variable-length code in software costs more than the smaller loads
save, though. This RTL is the small hardware unit that closes that gap. It sits
beside a CPU's load-store unit and does three things:

* it fetches the compressed kernel stream from memory on its own;
* it decodes one code word per clock cycle through a deliberately tiny Huffman
  tree;
* it *channel-packs* the decoded sequences into 128-bit registers, in the layout
  that xnor/popcount convolution code expects.

The CPU configures the unit with one instruction (`lddu`). It then pulls packed
registers out with another (`ldps`), oldest first.

## The code: a four-node chain tree

A full Huffman tree over 512 symbols needs a large lookup table or a complex
decoder. Here the tree is cut down to four nodes that form a chain. Each node
owns a table of sequences, and a code word has two parts:

```
node n prefix = n ones, then a zero     index = position in table n
  node 0 : 0        + 5-bit index   ->  6-bit code, 32 sequences
  node 1 : 10       + 6-bit index   ->  8-bit code, 64 sequences
  node 2 : 110      + 6-bit index   ->  9-bit code, 64 sequences
  node 3 : 1110     + 8-bit index   -> 12-bit code, 256 sequences
```

The index widths shown are the configuration evaluated for the scheme. They are
not built in: each node's index width is a configuration field of up to 8 bits.
An offline tool sorts the sequences by frequency and gives the most common 32
to node 0, and so on. In the clustering variant it first replaces rare sequences
with frequent ones at Hamming distance 1. The unit only ever sees the tables and
the coded stream.

A sequence is the kernel channel read row by row: position (0,0) is the most
significant bit and position (2,2) the least. The channel

```
 1 -1  1
 1  1 -1      ->  bits 101 110 001  ->  sequence 369 (0x171)
-1 -1  1
```

is stored as 369 (+1 is a 1 bit, -1 a 0 bit). Suppose it is entry 5 of node 1.
Its code word is then `10` followed by `000101`.

**Stream layout.** Code words are concatenated with no alignment. The resulting
bit string is stored most significant bit first: stream bit *i* is bit
7 - (*i* mod 8) of byte *i*/8. The last byte is padded with anything. The
stream's length in bytes and its number of code words are both configured, so
the padding is never decoded.

## Data path

```
 lddu ptr -> configuration loader: reads the structure and tree tables (LSU),
             fills length table + uncompressed table, then restarts the unit
            +------------------------ streaming unit ------------------------+
 LSU  <---  | stream address --> requests of T bytes                         |
 LSU  --->  | input buffer (256 B) --12-bit window--> stream parser          |
            |    node address (leading ones) -> length table -> index bits  |
            |    [node, decoded address] register                           |
            |        --> decoder unit: banked uncompressed table + selector |
            +-------------------------------|--------------------------------+
                                            v 9-bit sequence
            +------------------------ packing unit --------------------------+
            | decoded sequence buffer (FIFO 8) -> channel packer (9 x 128)   |
            |        -> register file (16 x 128 bit = 256 B) --> ldps        |
            +----------------------------------------------------------------+
```

**Configure.** `lddu` gives the unit the address of a configuration structure.
The configuration loader first cancels any stream in progress and waits until
none of its fetches are still in flight. It then uses the LSU port itself:

* it reads the structure;
* it writes the tree's sequences into the uncompressed table, one per cycle;
* it restarts the streaming and packing units with the loaded fields.

**Fetch.** After the restart the stream address register holds the stream base. The
unit asks the LSU for T = 16 bytes at a time, stepping the address by T, until
the configured length has been requested. A request goes out only when the
input buffer has a free 16-byte slot that no outstanding request has claimed.
So fetching runs ahead of decoding by up to 256 bytes, and responses never need
back-pressure. Responses must come back in request order.

**Parse.** The input buffer shows the parser the next 12 bits, the longest code
word. The parser works in one cycle:

1. It counts the leading ones (at most three) to get the node address.
2. It reads that node's index width from the length table.
3. It takes the index bits that follow the prefix.
4. It loads node and index into the decoded-address register.
5. It tells the buffer to drop prefix plus index bits.

A code word is parsed only when all of its bits are in the buffer, so words that
cross fetch blocks, or wrap around the buffer, need no special case.

**Decode.** The uncompressed table has one bank per node, each of 256 nine-bit
entries. The node address picks the bank and the index picks the entry. The
read is registered, and the selector then forwards the chosen bank's output.

**Timing.** A code word at the head of the buffer appears as a 9-bit sequence
two cycles later. The rate is one sequence per cycle for as long as the buffer
holds data and the packing unit has room. In the end-to-end test, 2048
sequences with an always-ready reader drain in about 2080 cycles.

**Flow control between the two halves.** The packing unit reports *room* when
its sequence FIFO has more free entries than the two sequences that can still
be in the streaming pipeline. The parser starts a code word only when room is
high. That is all the back-pressure there is: the decoder itself never stalls.

## Channel packing

Convolution code on a 128-bit SIMD machine wants the same kernel position of
128 channels side by side in one register. The packer builds that layout. Nine
registers hold positions (0,0) through (2,2). Channel *c* of the current group
of 128 goes into bit *c* of each register:

```
register p, bit c  =  bit (8 - p) of the c-th sequence of the set
                      p = 0 is kernel position (0,0), p = 8 is (2,2)
```

After 128 sequences the nine registers form a complete *set*. The set moves in
one cycle into nine consecutive entries of the 16-entry register file, and
packing of the next set begins.

* If the register file has fewer than nine free entries, the packer holds the
  set and stops taking sequences. This is the packer stall; the FIFO and then
  the parser absorb it.
* The last sequence of a stream closes its set early, and the unused channel
  bits stay 0. Streams whose count is a multiple of 128 never produce a partial
  set.

`ldps` reads the register file oldest first. The CPU therefore receives
registers 0 to 8 of set 0, then those of set 1, and so on. While the file is
empty, `ldps_valid` is low and the CPU has to wait.

## Programming the unit

1. **Place a configuration structure in memory**, 16-byte aligned and
   little-endian:

   | bytes | field |
   |---|---|
   | 0-3 | number of bit sequences (code words) in the stream |
   | 4-7 | compressed stream length in bytes |
   | 8-15 | compressed stream address (16-byte aligned) |
   | 16-17 | index width of node *n* in bits [4n+3:4n] |
   | 18-19 | unused |
   | 20-27 | number of sequences of node *n*, 16 bits each |
   | 28-31 | unused |
   | 32- | the sequences, one 16-bit word each (low 9 bits used): all of node 0 in index order, then node 1, 2, 3 |

   A node may hold at most 256 sequences and may be empty. The evaluated tree
   (32/64/64/256) makes an 864-byte structure, read in 54 requests.
2. **Issue `lddu`.** Pulse `lddu_valid` for one cycle with `lddu_ptr` set to
   the structure's address. A new `lddu` during a stream abandons the old one:
   its queues are cleared, and its late memory responses are counted and
   dropped before the structure is read.
3. **Read with `ldps`.** The unit holds one packed register on `ldps_data`
   while `ldps_valid` is high. `ldps_ready` pops it. That makes 9 x
   ceil(`num_seq`/128) reads per stream.
4. `busy` stays high from `lddu` until every sequence has been decoded, packed
   and read.

The LSU side is `lsu_req_valid/lsu_req_ready/lsu_req_addr` plus
`lsu_resp_valid/lsu_resp_data`, with byte 0 of a block in bits [7:0]. Responses
must arrive in request order. Configuration reads and stream fetches share the
port, but never at the same time. `ev_parse`, `ev_node` and `ev_pack_stall` are
observation outputs for testing.

## Sizes

| parameter (`decoding_unit`) | default | meaning |
|---|---|---|
| `T_BYTES` | 16 | bytes per memory request (this design's choice) |
| `BUF_BYTES` | 256 | input buffer |
| `BANK_DEPTH` | 256 | entries per node bank in the uncompressed table (4 banks) |
| `R` | 128 | channels per packed register |
| `RF_DEPTH` | 16 | 128-bit entries of the register file (256 bytes) |
| `FIFO_DEPTH` | 8 | decoded sequence buffer |

These constants are fixed in `du_pkg`:

* 9-bit sequences;
* four nodes;
* index fields of at most 8 bits;
* 12-bit code words at most;
* 64-bit addresses;
* 32-bit count and length fields.

At these defaults the unit holds about 1.8 kbit of flip-flops and about
13.4 kbit of memory: the 9216-bit table, the 2048-bit input buffer, the 2048-bit
register file and the FIFO.

## What follows the published scheme and what is this design's own

The following are taken from the scheme as published:

* the four-node chain tree with 32/64/64/256 entries and 6/8/9/12-bit codes;
* the block structure: stream address, input buffer, stream parser with node
  address, length table and decoded-address register, decoder unit with
  selector and banked uncompressed table, and a packing unit made of a
  decoded-sequence buffer, channel packer and register file;
* fetching ahead while decoding;
* nine packing registers of 128 bits;
* a 256-byte input buffer and a 256-byte register file;
* the four configuration fields, loaded by `lddu` through a pointer;
* the unit's reset and start after loading;
* `ldps` reading the oldest packed data.

The following are this design's own choices, and the places where it departs:

* **Uncompressed table size.** The published figure is "1 KB". Here the table is
  4 banks x 256 x 9 bits (1024 entries, 9216 bits), so that any node could hold
  256 sequences. The evaluated tree uses only 416 entries.
* **Configuration structure layout.** The four fields are published (number of
  sequences, stream pointer, stream length, "Huffman tree nodes"), but not how
  they are encoded. The layout above is this design's own, and so is carrying
  the tree's tables in the structure.
* **Unspecified details, chosen here:**
  * T = 16;
  * the 12-bit parser window;
  * the MSB-first bit order;
  * in-order memory responses and a T-aligned stream base;
  * the FIFO depth and the room rule;
  * one-cycle table latency;
  * channel *c* in register bit *c*;
  * zero fill of a last partial set;
  * dropping late responses after a restart;
  * synchronous active-low reset;
  * treating the prefix `1111`, which the tree never produces, as node 3.
* **Throughput.** The design decodes one sequence per clock. The published
  material gives no rate or latency to compare against.
* **Out of scope.** The host CPU, its LSU and caches, and main memory. The
  testbenches use a behavioural memory (`tb/tb_lsu_model.sv`).

## Verifying and simulating

Each module has a self-checking testbench in `tb/`, named after the module,
that prints `TB_RESULT checks=N failures=M`. The reference models live in the
testbenches and are independent of the RTL. `tb/tb_du_pkg.sv` codes streams in
software and defines the test tree's leaves as value = (173 x flat + 41) mod 512,
where flat numbers the 416 leaves in node order.

`tb_decoding_unit` runs the whole unit at its default sizes:

* it writes a configuration structure for each stream and starts it with
  `lddu`, checking every table write of the loader;
* it decodes four streams of 300, 2048, 1500 (abandoned) and 200 code words;
* it compares every `ldps` register with registers packed in software;
* it checks the request count per stream and the one-per-cycle drain rate.

It also counts each mechanism and fails if any never happened: every tree node,
a packer stall, `ldps` waiting, a full input buffer, fetch overlapping decode, a
partial set, a restart, and dropped responses.

`tb_reactnet_workload` streams the 3x3 kernels of all thirteen ReActNet-A basic
blocks through the unit at its default sizes, layer by layer. The layers are
C x C channels, with C = 32, 64, 128, 128, 256, 256, 512 (six times) and 1024,
which comes to about 2.8 million sequences. The kernel contents are random. The
code-word lengths follow the node mix of the published compressed models:
46/24/23/5 % for odd blocks, as for the frequency-encoded kernels, and
65/25/8/0.6 % for even blocks, as for the clustered ones. The few percent those
figures leave unassigned go to the 12-bit node and the 6-bit node respectively. That gives streams
compressed by 1.19 and 1.32. The test checks every packed register, and checks
that a layer of N sequences finishes within N + N/64 + 200 clocks when the
reader is always ready. The measured cost is about 1.008 clocks per sequence,
including the configuration load. The run takes a few seconds.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_decoding_unit rtl/du_pkg.sv tb/tb_du_pkg.sv tb/tb_decoding_unit.sv
./obj_dir/Vtb_decoding_unit
```

Any other testbench is run the same way by changing the top module. Lint the
RTL with `verilator --lint-only -Wall -Irtl -y rtl rtl/du_pkg.sv rtl/decoding_unit.sv`.

## Files

| file | content |
|---|---|
| `rtl/du_pkg.sv` | shared sizes and the configuration struct |
| `rtl/decoding_unit.sv` | top: configuration loader, streaming unit, packing unit |
| `rtl/config_loader.sv` | executes `lddu`: reads the configuration structure |
| `rtl/streaming_unit.sv` | fetch, input buffer, parser, decoder |
| `rtl/stream_fetcher.sv` | stream address register and request generator |
| `rtl/input_buffer.sv` | 256-byte circular buffer with a 12-bit window |
| `rtl/stream_parser.sv` | node address, decoded-address register, sequence count |
| `rtl/length_table.sv` | per-node index widths |
| `rtl/decoder_unit.sv` | table read and bank selection |
| `rtl/uncompressed_table.sv` | banked leaf store |
| `rtl/bank_selector.sv` | bank output multiplexer |
| `rtl/packing_unit.sv` | FIFO, channel packer, register file |
| `rtl/seq_fifo.sv` | decoded sequence buffer |
| `rtl/channel_packer.sv` | 9 x 128-bit set builder |
| `rtl/packed_regfile.sv` | 16 x 128-bit queue read by `ldps` |
| `tb/tb_*.sv` | testbenches, the stream-coding package and the memory model |
