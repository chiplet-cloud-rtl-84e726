# CC-MEM: an SRAM-only chiplet memory with in-network sparse decoding

Serving a large language model one token at a time is limited by memory
bandwidth. Every generated token streams the model's weights past the compute
units again. Chiplet Cloud answers this by giving up external DRAM
completely. Each small ASIC chiplet keeps its share of the weights, the KV
cache and the activations in on-chip SRAM, and hundreds of chiplets on a board
together hold the whole model. The memory system of one chiplet is called
**CC-MEM**. It is a set of SRAM *bank groups* joined by a pipelined crossbar.
The chiplet's SIMD cores sit on the crossbar ports.

The second idea is **store as compressed, load as dense**. Pruned weight
matrices are kept in the SRAM in a compressed format. A decoder inside each
bank group expands them back to dense rows before they enter the crossbar. The
compute cores therefore never see the sparse format and need no sparse
support. At 60 % unstructured sparsity a matrix takes 0.6 of its dense size,
so about 1.7x more parameters fit in the same chips.

This repository gives synthesizable SystemVerilog for CC-MEM, for the
configuration sized for GPT-3: 128 bank groups and 226.5 MB per chip. It also
has self-checking testbenches for every module. The SIMD cores, chip-to-chip
links, board network and server controller are outside this RTL. Their
connection points are the crossbar ports of the top module `cc_mem`.

## Structure

```
            port 0 .. NP-1 (SIMD cores)
                 |  req_t          ^  rsp_t
                 v                 |
        +------------------+  +------------------+
        |  request xbar    |  |  response xbar   |   xbar: round-robin per output,
        |  (dest = group)  |  |  (dest = dst)    |   one pipeline register per output
        +------------------+  +------------------+
                 |                 ^
     +-----------v-----------------+-----------+   x NG
     | bank_group                               |
     |  burst_ctrl: CSRs, burst engine, port    |
     |     arbitration, response queue          |
     |  sram_bank x NBANK  (one virtual port)   |
     |  index_mem   (tile -> [init, end))       |
     |  comp_decoder (Buf1/Buf2, 8 out_decoders)|
     +------------------------------------------+
```

| File | Contents |
|---|---|
| `rtl/cc_pkg.sv` | Shared constants, the sparse-word struct, the request/response packets, opcodes and CSR numbers |
| `rtl/sram_bank.sv` | One single-port SRAM bank, 192-bit lines, one cycle of read latency |
| `rtl/index_mem.sv` | Per-tile word range `[init_addr, end_addr)` |
| `rtl/out_decoder.sv` | One output column of the decoder: 16 match cells and a one-hot select |
| `rtl/comp_decoder.sv` | The compression decoder |
| `rtl/sync_fifo.sv` | Small FIFO used as the response queue |
| `rtl/burst_ctrl.sv` | The bank group's control unit |
| `rtl/bank_group.sv` | Banks, index memory, decoder and control unit of one group |
| `rtl/rr_arbiter.sv` | Round-robin arbiter |
| `rtl/xbar.sv` | Pipelined crossbar, parameterised on packet type |
| `rtl/cc_mem.sv` | Top: NG groups between a request and a response crossbar |

## The compressed format

A matrix is cut into tiles of **32 rows x 8 columns**. Each non-zero 16-bit
value of a tile becomes one 24-bit *sparse word*:

```
 23            8 7     3 2   0
+---------------+-------+-----+
|  value (16)   | r (5) |c (3)|
+---------------+-------+-----+
```

Here `r` is the row inside the tile and `c` is the column. A tile's words are
stored one after another in row-major order. Eight words fill one 192-bit SRAM
line, with word 0 in bits [23:0]. A tile may start and end anywhere inside a
line, so no space is lost between tiles. The index memory holds one entry per
tile: the word address of its first sparse word and the address one past its
last. Both are word addresses inside the bank group (line address x 8 + word).
An empty tile has `init == end` and decodes to 32 zero rows.

Word addresses are `LAW+3` bits wide. `LAW` is the group's line address width,
which is 17 bits at the default size.

## How the decoder turns sparse words back into rows

`comp_decoder` is the hardest part of the design.

Its job is to emit one dense row per cycle: eight 16-bit values, with zeros
where the tile has no entry. Its input is a stream of 192-bit lines. A line
can hold parts of several rows, or several lines can make up one row's
entries.

* **Fetch.** A tile command (`start`, `tile_base`, `tile_cnt`) reads the first
  index entry. `rd_addr` is loaded from `init_addr / 8`. It counts up one line
  per read until it reaches `end_addr`. After that the next tile's index entry
  is read ahead of time.
* **Double buffer.** Two line buffers, Buf1 and Buf2, each hold one line. Each
  also holds a mask of the words that belong to the current tile (those inside
  `[init, end)`) and the row of its last valid word.
* **Row counter and match.** `glb_r` counts 0..31. Each of the eight
  `out_decoder`s compares all 16 buffered words with (`glb_r`, its column).
  It outputs the matching value, or 0 when nothing matches. A tile row holds
  at most one word per column, so at most one cell matches.
* **When a row may leave.** A row is complete once the newest buffered word
  belongs to a later row, or once the tile has no lines left to fetch. Until
  then the decoder holds the row back and raises `stall`.
* **When a buffer is refilled.** The older buffer is dropped as soon as all of
  its words lie in rows below the next row. A new line is requested whenever a
  buffer is free or is about to become free. A row has at most eight words, so
  when the newest buffer cannot yet complete a row, the older one must already
  be free. Two buffers therefore never deadlock.

Timing, measured in `tb_comp_decoder` with the SRAM's one-cycle read:

| Tile contents | Rate |
|---|---|
| 60 % sparse (3.2 words per row) | 384 rows in 429 cycles, about 0.9 row per cycle |
| fully dense (8 words per row) | about 0.5 row per cycle |
| tile change | 2 extra cycles |

A dense row needs a whole fresh line. That line can only be requested once a
buffer is free, so it arrives one cycle late. The paper's decoder outputs a
full row every cycle. Reaching that would need a third buffer or a read issued
one row ahead. This is the main departure from the paper.

## Bank group and its control unit

A bank group is NBANK banks behind one memory port, so it behaves as a single
large single-port memory. The line address is `{bank, row}`, and only the
addressed bank is enabled in a given cycle.

`burst_ctrl` accepts packets from the request crossbar:

| Opcode | Meaning |
|---|---|
| `OP_RD` | Read one line; one response with `last = 1` |
| `OP_WR` | Write one line |
| `OP_CSR_WR` | Write CSR `addr[3:0]` |
| `OP_IDX_WR` | Write index entry `addr`; `data = {end, init}`, each `LAW+3` bits |
| `OP_BWR` | Data for an open write burst (dropped if none is open) |

CSRs: `CSR_ADDR` (0) and `CSR_LEN` (1) hold a start address and a length.
Writing `CSR_START` (2) starts a burst for the port that wrote it:

| Mode | Effect |
|---|---|
| `BM_DENSE_RD` | LEN lines from line ADDR, one response per line, the last one flagged |
| `BM_SPARSE_RD` | LEN tiles from index ADDR through the decoder; 32 rows per tile, `sparse = 1` |
| `BM_WRITE` | The next LEN `OP_BWR` packets go to lines ADDR, ADDR+1, ... |

While a read burst runs, the group accepts no other request, since it has only
one port. A request for a busy group waits in the request crossbar. Reads are
issued only when the 4-entry response queue has room for them. Back-pressure
from the response crossbar therefore slows a burst down but never loses data.

Without contention, a dense burst of LEN lines delivers one line per cycle.
A single read returns 4 cycles after it is accepted:

1. request crossbar register
2. bank read
3. response queue
4. response crossbar register

## Crossbar and addresses

`xbar` is an NI x NO switch. Each output has a round-robin arbiter over the
inputs that want it and a one-entry output register. An input is ready only
when it is granted and the register can accept. The same module carries
requests (steered by `addr[LAW +: GW]`, the group number) and responses
(steered by `dst`, taken from the request's `src`). The `conflict` outputs
show, cycle by cycle, where two packets wanted the same output.

A CC-MEM address is `{group, line}`. The group occupies bits `[LAW +: 7]` at
the defaults, and the crossbar strips it before the packet reaches the group.

## Sizes

| Parameter | Default | Basis |
|---|---|---|
| Tile | 32 x 8, 16-bit values, 24-bit words, 8 words per line | the paper's decoder |
| `NG` bank groups | 128 | 128 x 24 B per cycle = 3.07 TB/s at 1 GHz, against the paper's 2.75 TB/s |
| `NBANK` x `DEPTH` | 8 x 9216 lines | 128 x 8 x 9216 x 24 B = 226.5 MB, against 225.8 MB per GPT-3 chip |
| `IDX_DEPTH` | 8192 tiles per group | about 1.4x what a full group of 60 %-sparse weights needs |
| `NP` ports | 128 | square crossbar |
| Response queue | 4 | covers the read latency |

The paper gives no clock, group count, bank size or port count. Those values
are this design's choices, made to match the paper's per-chip capacity and
bandwidth. Table 2 of the paper gives each model's own optimal chip. Its
largest per-chip memory is 225.8 MB (GPT-3), so every listed model's per-chip
memory fits this configuration. The per-chip bandwidth of MT-NLG (4.21 TB/s)
and BLOOM (3.51 TB/s) would need a faster clock or more groups.

## Departures and unknowns

* **Decoder rate.** Dense tiles decode at about half a row per cycle (see
  above). Sparse tiles come close to one row per cycle.
* **Blocking bursts.** A group serves nothing else during a read burst.
* **Encodings.** Opcodes, CSR numbers and modes, packet formats, the `{end,
  init}` index-write layout, word order inside a line and exclusive
  `end_addr` are this design's own choices.
* **Reset.** An active-low asynchronous `rst_n` clears all control state.
  SRAM and index contents are not reset.
* **Crossbar.** One register stage per output. The paper says only that the
  crossbar is pipelined.
* **The `>>` stage** drawn on the dense path of the paper's bank-group figure
  is not explained in the text. It is represented only by the registered SRAM
  output and the response queue.
* **SRAM macro.** `sram_bank` is a plain array standing in for a foundry
  macro.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/cc_pkg.sv tb/tb_cc_mem.sv \
          --top-module tb_cc_mem -Mdir obj_cc_mem
./obj_cc_mem/Vtb_cc_mem
```

Any other testbench works the same way. Verilator finds the modules in
`rtl/` through `-I`.

| Testbench | What it shows |
|---|---|
| `tb_sram_bank` | Random writes and reads against a model; read latency and hold |
| `tb_index_mem` | Entries written and read back with one cycle of latency |
| `tb_comp_decoder` | 12 tiles from empty to dense at unaligned addresses under random back-pressure, all rows compared; rate bounds, and 0.8 row per cycle or better at 60 % sparsity |
| `tb_xbar` | Random traffic with random back-pressure: no loss, no duplication, per-pair order, one-cycle latency, conflicts resolved, full load on every output when saturated |
| `tb_burst_ctrl` | Single reads and writes, CSR-driven dense and write bursts, index writes, and a sparse burst through a stand-in decoder |
| `tb_bank_group` | A full group: latency, one line per cycle in dense bursts, burst writes, a sparse burst over four tiles while a blocked request waits |
| `tb_cc_mem` | End to end at 4 ports x 4 groups. All ports run at once, and the test counts bank conflicts, response conflicts, back-pressure, decoder stalls, and single, dense, sparse and write transfers; it fails if any never happened |
| `tb_cc_mem_full` | `cc_mem` at its default size (128 x 128, 226.5 MB): a sparse burst in the last group, single reads and a dense burst at the same time |

The full-size build allocates about 0.7 GB in Verilator and compiles in about
three minutes. The simulation itself takes well under a second.
