# An info-collector for data-flow integrity checked next to memory

Data-flow integrity (DFI) catches memory-corruption attacks with one rule: every
value a load reads must have been written by a store that the program's static
data-flow analysis allows. Compile time produces, for each load, its
*reaching-definition set* (RDS): the identifiers of the stores allowed to have
written the data. At run time every store records its identifier in a
*reaching-definition table* (RDT), one entry per data word. Every load then looks
up the RDT entry of its address and checks that the identifier is in its RDS.

In software this roughly doubles the instruction count. The scheme implemented
here moves the checking to a small processor placed inside the memory system
(processing-in-memory, PIM), next to the RDS and RDT data. The main processor
keeps only a light job. Each load and store of the instrumented program is
followed by one extra store, a **DFI store**. Its data word says what to check.
A hardware unit between the core and its memory controller, the
**info-collector**, recognises these stores and turns them into **DFI packets**.
It packs the packets into blocks, removes packets the checker does not need,
reorders and compresses the rest, and writes them into a FIFO region of memory.
The PIM core drains that FIFO.

This repository holds synthesizable SystemVerilog for the info-collector, with
self-checking testbenches. The PIM core, its checking program, the memory and
the host core are outside the RTL: the testbenches model them behaviourally.

## How the program talks to the info-collector

### Set-up

Before any checking starts, the program makes two set-up stores:

| store | data | effect |
|---|---|---|
| `*dfi_global = dfi_dummy` | 123456 | the store address becomes `dfi_global`, the address of all later DFI stores |
| `*packet_mem = packet_dummy` | 654321 | the store address becomes `packet_mem_addr`, the base of the packet FIFO |

Each address is recorded only once. Later stores with those data values are
ordinary stores. The set-up stores themselves are not passed on to memory.
`setup_done` goes high when both addresses are known. Until then every other
access is relayed unchanged and no packets are made. The value of
`packet_dummy` is a choice of this design; both values are parameters.

### The DFI store data word

After set-up, a store to `dfi_global` is a DFI store. It is consumed, not
written to memory. Its 32-bit data word is decoded as:

| bits | meaning |
|---|---|
| 15:0 | instruction identifier |
| 16 | type: 1 = the instrumented instruction was a load, 0 = a store |
| 17 | the instrumented instruction is a library call (`memcpy`, `memset`, ...) |
| 18 | library call: its length is 64 bits wide (two words follow) |
| 19 | library call: the function reads memory (a load address follows) |
| 20 | library call: the function writes memory (a store address follows) |
| 21 | function-return protection: the next DFI store carries the address of the saved return address |

Bit 21 is this design's own choice; the other positions follow the examples of
the original scheme. The three kinds of DFI store behave as follows.

* **Ordinary check.** Bits 17 and 21 are clear. A *basic packet*
  `{type, identifier, address}` is made at once. The address is that of the
  last ordinary load or store that went through the info-collector, which is
  the instruction the DFI store follows.
* **Return address.** Bit 21 is set. The next DFI store's data is the address
  used as the packet address.
* **Library call.** Bit 17 is set. The following DFI stores carry, in this
  order, the load address (if bit 19), the store address (if bit 20), the low
  length word, and the high length word (if bit 18). Then one *library packet*
  is made. For example, `memset(p, 0, (9<<32)+12)` sends the header with bits
  20, 18 and 17 set, then `p`, then 12, then 9.

An ordinary access whose address falls inside the packet FIFO region
`[packet_mem_addr, packet_mem_addr + FIFO_BYTES)` raises a one-cycle
`fifo_violation`. Only the info-collector may write there. A violating store
is dropped; a violating load is still performed.

## Transmission buffer

Packets are collected in a register file of `BUF_BYTES` = 2048 bytes, arranged
as 256 slots of 8 bytes. A basic packet (1 + 16 + 32 bits) fills one slot. A
library packet fills three slots: a header, the two addresses, and the length.
A block is closed and processed in three cases: the buffer is full, the next
packet would not fit, or `flush_req` is high. Processing has three phases.
While they run, the buffer accepts no packets, so DFI stores stall the core.

1. **Prune** (optimization C), one cycle: redundant loads are marked dead.
2. **Sort** (optimization E): stable sort of the basic packets by address.
3. **Emit**: compress and write the live packets, one 32-bit word per cycle.

### Optimization C: dropping repeated loads

Take a load packet, and a later load packet with the same identifier and
address. If no store to that address and no library call comes between them,
the later check gives the same answer as the first: the RDT entry cannot have
changed. The later packet can be dropped.

`dfi_opt_c_pruner` finds every such packet in one combinational pass. It is a
triangular array of small processing elements (PEs), one column per buffer
entry *i*. The column compares entry *i* (`Pa`) with every later entry *j*
(`Pb`), in order. Each PE has two outputs:

* `R` (redundant): high when the PE is still enabled (`Din` = 0) and `Pa`, `Pb`
  are two loads of the same address with the same identifier.
* `Dout`: passes to the next PE of the column and disables it. It is high when
  `Din` was high, when this PE fired `R`, when `Pb` is a store to `Pa`'s
  address, or when `Pb` is part of a library packet.

So each column marks at most the first matching later load, and it stops at
the first store to the same address. The `R` outputs that belong to the same
entry *j* are ORed across columns. Chains of three or more equal loads are
still handled: each of them is caught by the column of the load before it.
Only a load can fire a column, so only loads are ever pruned.

At 256 entries the array has 32,640 PEs. This is the largest part of the
design, and it is what makes lint and synthesis of the full-size design slow.

### Optimization E: sorting by address

Packets sorted by address have small address differences, so more of them
compress. The sort is stable: packets with equal addresses keep their order.
That keeps the meaning of a load-store-load sequence on one address. A library
packet is a barrier: the packets before it and after it are sorted separately.

The paper gives no circuit for the sort. `dfi_opt_e_sorter` is one phase of an
odd-even transposition sort: 128 compare-exchange units working on the pairs
(0,1), (2,3), ... in even phases and (1,2), (3,4), ... in odd phases. Two
entries are swapped only if both are basic packets and the key of the first is
strictly greater. The key is `{dead, address}`, so pruned entries move to the
end of their segment. The buffer runs one phase per cycle. It stops after two
phases in a row with no swap, or after N+1 phases, which is enough for any
input. An already sorted block therefore costs 2 cycles, and the worst case is
257 cycles.

### Compression

After the optimizations, a basic packet is coded against the previously
emitted basic packet (`dfi_compressor`):

* The **address difference** becomes an 8-bit float with a base-16 exponent:
  `value = (-1)^s * m * 16^e`, with a 4-bit `m` and a 3-bit `e`. It covers
  differences of up to ±15·2^28, but only exact values. For example, a
  difference of 0x400 is `m = 4, e = 2`. If several exponents work, the
  smallest is used.
* The **identifier difference** must fit in 6 bits, two's complement (−32 to
  +31). This width is this design's choice: it is what is left of 15 bits.
* With the type bit, the compressed packet is `{type, id_delta[5:0], s,
  e[2:0], m[3:0]}`, 15 bits, so two fit in one word.

A packet compresses only if both differences fit. The first basic packet after
reset is always sent in full. Nothing else resets the reference: the decoder
keeps the last full or decoded basic packet across blocks.

### Word formats in the packet FIFO

Bits 31:30 of the first word of each item are a tag. All formats are this
design's choice.

| tag | item | words |
|---|---|---|
| `00` | basic packet | `{14'b0, type, id}`, then the address |
| `01` | two compressed packets | `{2'b01, c1[14:0], c0[14:0]}`; `c0` is the earlier one |
| `10` | library packet | `{2'b10, 9'b0, bits 20:0 of the original DFI store}`, then the load address, store address, length low and length high words that are present |
| `11` | one compressed packet | `{2'b11, 15'b0, c0[14:0]}` |

A compressed packet waits for a partner. A lone code is written as a `11` word
in three cases: before any uncompressed item, at the end of a block, or when
its neighbour does not compress. So the words always decode in program order
after sorting. Reference code for the decoder is the `word_decoder` class in
`tb/dfi_ref_pkg.sv`.

## The packet FIFO and the memory port

`dfi_fifo_ptr` keeps the head and tail pointers in hardware. The tail is moved
by the info-collector as it writes words. The head is moved by the PIM core,
which pulses `pim_pop` once for each word it has consumed. Each pointer has
one extra wrap bit, so full and empty are told apart without losing a word.
The default region is 64 KB (16,384 words); that size is this design's choice.

The top, `dfi_info_collector`, has one memory-controller port (`mc_*`). It
carries both the relayed program accesses and the packet words; `mc_is_pkt`
marks the packet words. Relayed accesses have priority. A packet word is
written only when no relayed access is waiting and the FIFO is not full. When
the FIFO is full, the buffer waits, then the parser, then the core: the design
stalls rather than drops packets.

## Module map

| file | role |
|---|---|
| `rtl/dfi_pkg.sv` | types (`mem_op_t`, `dfi_pkt_t`, `slot_t`), bit positions, word tags |
| `rtl/dfi_info_parser.sv` | set-up capture, DFI store decoding, packet assembly, relay, FIFO-region protection |
| `rtl/dfi_compressor.sv` | combinational 15-bit packet compression |
| `rtl/dfi_opt_c_pe.sv` | one PE of the optimization-C array |
| `rtl/dfi_opt_c_pruner.sv` | the triangular PE array |
| `rtl/dfi_opt_e_sorter.sv` | one odd-even transposition phase |
| `rtl/dfi_tx_buffer.sv` | transmission buffer: fill, prune, sort, emit |
| `rtl/dfi_fifo_ptr.sv` | packet FIFO head/tail pointers |
| `rtl/dfi_info_collector.sv` | top: parser + buffer + FIFO pointers + memory-port arbiter |

Parameters of the top: `BUF_BYTES` (2048), `FIFO_BYTES` (65536),
`EN_OPT_C`, `EN_OPT_E` and `EN_COMPRESS` (all on), `DFI_DUMMY` (123456),
`PACKET_DUMMY` (654321). All streams use valid/ready handshakes. Assertions
check that a stalled stream holds its data.

### Latency

* The parser adds one registered stage. It takes one operation per cycle
  while both its outputs can move.
* A block costs 1 prune cycle, 2 to N+1 sort cycles, and then one cycle per
  output word.
* A relayed access reaches the memory port one cycle after it is accepted.

The original scheme gives no cycle counts for the info-collector. Instead, it
counts one cycle for each packet optimization or compression.

## What this RTL covers and where it differs

**Built:** packet generation for ordinary, return-address and library DFI
stores; the set-up protocol; FIFO-region protection; the 2 KB transmission
buffer with optimizations C and E and compression; the hardware FIFO pointers.
This is the configuration the original evaluation presents as its main result,
about 36% overhead.

**Not built:** the evaluation also studies three more optimizations that apply
to whole programs, in an "all optimizations" variant. They are
left out because they are not part of the main configuration:

* A: drop a store's check when the store is redundant with respect to the
  loads.
* B: merge the accesses of a loop.
* D: drop packets of loads that follow a store to the same address.

Also outside the RTL:

* the PIM core and its checking program, which hold the RDS, RDT and
  identifier tables;
* the memory and the memory controller;
* the instrumenting compiler.

**Choices made here, where the original description is silent:**

* slot size and the three-slot library packet;
* when a block is closed, and the stall while it is processed;
* the sorting circuit;
* the 6-bit identifier difference and all FIFO word formats;
* the return-address indicator bit and the `packet_dummy` value;
* the FIFO region size;
* handshakes and reset behaviour.

**Two points where the original description disagrees with itself:**

* Its `memcpy` example passes a length of 40 (bytes), but the text calls the
  library length "in words". The hardware treats the length as an opaque
  32/64-bit value. The testbenches use word counts.
* Its sorting example prints one packet as a store before sorting and as a
  load after. Here sorting never changes a packet, as the text says.

## Testbenches and how to simulate

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.
The expected values come from independent models in `tb/dfi_ref_pkg.sv`:

* a PE-free reference for optimization C;
* an insertion sort for E;
* a float decoder for the compression;
* a FIFO word decoder.

| testbench | size | what it checks |
|---|---|---|
| `tb_dfi_compressor` | default | random and edge differences against the float/2's-complement rules; round trip |
| `tb_dfi_info_parser` | default | set-up, all DFI store kinds, relay order, violations, back-pressure |
| `tb_dfi_opt_c_pruner` | N = 12 | random blocks and the repeated-load, store-between and library-barrier cases |
| `tb_dfi_opt_e_sorter` | N = 14 | the worked example block with a library packet; random blocks sorted phase by phase |
| `tb_dfi_tx_buffer` | 128 B | packet stream in, decoded words out, compared with the reference for C, E and compression |
| `tb_dfi_fifo_ptr` | default | random push/pop against a counter model, full and empty |
| `tb_dfi_info_collector` | 256 B buffer, 64 B FIFO | end to end (see below) |

The end-to-end test (`tb/dfi_top_tb_body.svh`) models an instrumented program,
the memory and a PIM checker that drains the FIFO at one word in eight cycles.
It includes repeated loads, strided and random addresses, library calls, return
protection and a forbidden access to the FIFO region. The checker applies the
DFI rule to the decoded packets, and a golden model applies the same rule to the
program in its original order. Both must agree on the RDT and on the
violations. Memory contents must also match what the program wrote. The test
counts how often each mechanism happened:

* relay;
* each packet kind;
* blocks;
* pruned packets and sort swaps;
* pair, single and full words;
* FIFO-full stalls;
* violations.

A mechanism that never happened counts as a failure.

To run a testbench with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dfi_pkg.sv tb/dfi_ref_pkg.sv rtl/*.sv tb/tb_dfi_tx_buffer.sv \
  --top-module tb_dfi_tx_buffer -o sim && ./obj_dir/sim
```

`dfi_pkg.sv` must come first, because the other files import it.

Build time is dominated by the optimization-C array. Linting the 256-entry
array takes about 3.5 minutes and 4.6 GB of memory. A 64-entry array takes a
few seconds. A simulation model of the full-size design (2 KB buffer) comes to
roughly 400 MB of generated C++, which is impractical to compile. So the
default size is checked only by lint and elaboration. The largest buffer
simulated end to end is 512 bytes (64 slots), with a 64-byte FIFO; the
testbench as shipped uses 256 bytes. The blocks themselves are simulated at
12 to 16 entries, apart from the compressor, the parser and the FIFO pointers,
which run at their default sizes. To experiment, override `BUF_BYTES` on the top (it must be a multiple
of 8, and at least 24 so a library packet fits).
