# Near-memory key/value lookup engine

Hash-table lookups are a big part of the work in key/value stores and other
data-intensive software. A CPU does them badly: each lookup is a dependent,
random memory access that misses the caches. This design moves the lookups
next to memory. The CPU puts a batch of query keys in memory and starts an
engine. The engine streams the keys in, hashes each one, reads that key's
stretch of the hash table, picks out the matching value, and writes the
values into a small SRAM scratchpad. The CPU then reads the values back.
Several engines can share the memory device, so lookups run in parallel
across its channels (for example the vaults of a Hybrid Memory Cube).

The RTL follows the lookup pipeline of Lloyd and Gokhale's accelerator in the
optimized form evaluated by Landgraf, Lloyd and Gokhale ("Combining Emulation
and Simulation to Evaluate a Near Memory Key/Value Lookup Accelerator"). That
form has three changes from the original:

- query keys are read 16 at a time in 128-byte packets;
- the data path is 128 bits wide, so a hash table entry moves in one cycle;
- twice as many memory requests may be outstanding.

The publication gives the block structure, the dataflow and these three
changes. It says what each block does, but not how it is built inside. Widths,
encodings, the hash function, the register map, the interconnect and the
reorder scheme are choices made here. They are marked as such below and in
each file's header.

## The hash table and what a lookup means

The table is an open-addressing hash table: all slots are allocated up
front, and a key that collides is stored in a nearby slot (linear probing).
The engine does not depend on how entries were inserted. It only requires
that a key sits within `psl` slots after its hashed slot. `psl` is the probe
sequence length. The software picks it from the table's load factor.

| item | this design |
|---|---|
| key | 8 bytes; the engine gives no key value a special meaning, so empty slots must hold a key that is never looked up (the testbenches use 0) |
| value | 8 bytes |
| entry | 16 bytes: key in bits [63:0], value in bits [127:64] |
| table | 2^`tbl_log2` entries at a 16-byte aligned base; the probe sequence wraps from the last entry to entry 0 |
| hash | `fmix64(key) mod 2^tbl_log2` (the MurmurHash3 64-bit finaliser, `kvl_pkg::fmix64`) |
| result | value of the *first* of the `psl` entries whose key matches, else `64'hFFFF_FFFF_FFFF_FFFF` (key not found) |

The engine always reads and compares all `psl` entries, even after a hit. So
the cost of a lookup is fixed by `psl`, not by where the key sits.

## One engine: the pipeline (`kvl_accel`)

```
           memory interconnect
         keys |        ^ | buckets (hash table entries)
              v        | v
 LSU0-R -> unpack -> Split -> Hash --index--> LSU1-R
                       |                         |
                       +--> key FIFO --> Compare/Select <--+
                                               |
                                             values
                                               v
                                   LSU1-W -> scratchpad SRAM <- CPU reads
```

| block | module | job |
|---|---|---|
| LSU0-R | `kvl_lsu_rd` (sequential mode) | reads the key batch, `num_keys*8` bytes rounded up to 16, in packets of up to 128 B |
| unpack | `kvl_key_unpack` | 128-bit beats to single keys, low half first; drops the padding half of an odd batch |
| Split | `kvl_splitter` | gives each key to both the key FIFO and the hash unit |
| Hash | `kvl_hash` | key to table index, `HASH_LATENCY` cycles, one per cycle |
| key FIFO | `kvl_fifo` | holds the keys whose probe sequences are still being read (`KEY_FIFO_DEPTH`) |
| LSU1-R | `kvl_lsu_rd` (random mode) | reads the probe sequence of every index, `psl` entries |
| Compare/Select | `kvl_csu` | one bucket per cycle against the FIFO head; emits one value per key |
| LSU1-W | `kvl_lsu_wr` | writes value *i* to scratchpad word `val_base + i` |
| scratchpad | `kvl_scratchpad` | `SPAD_WORDS` x 64-bit SRAM, one write and one CPU read port |
| control | `kvl_ctrl` | batch registers, start, done, cycle counter |

Every connection is a valid/ready stream: an item moves when both are high in
the same cycle. So back-pressure spreads on its own. If LSU1-R is at its
request limit, the hash unit holds its output. The splitter then holds the
next key, and LSU0-R stops draining its buffer. Nothing overflows, and no
stage needs to know the depth of another. The key FIFO and LSU1-R cannot
deadlock each other. The compare/select unit needs exactly one FIFO key per
probe sequence, and the FIFO only ever holds keys that were sent to the hash
unit too.

Results leave in query order. Value *i* is the result for key *i*, because
every stage keeps order, including the LSUs (see below).

## The read load/store unit (`kvl_lsu_rd`, `kvl_lsu_cmdgen`)

This is the part that sets performance: a lookup engine is a machine for
keeping memory busy. The LSU has three stages.

**Command generation.** The control word chooses one of three modes:

- `LSU_SEQ`: one block.
- `LSU_STRIDED`: `count` elements of `elem_bytes`, `stride` apart.
- `LSU_RANDOM`: for each index from the hash unit, the block of `psl`
  entries starting at `base + 16*index`.

A probe sequence that runs past the last table entry becomes two blocks, the
second starting at entry 0. An index is consumed when its first block is
accepted.

**Packetising.** Each block is cut into read packets of at most 128 bytes,
and no packet crosses a 128-byte boundary. A 1 KB key batch thus becomes 8
full packets; 16 keys per packet is the "batched keys" optimisation. A probe
sequence of `psl` entries becomes one or two packets. The unit issues at most
one packet per cycle.

**Reordering.** Packets can go to different channels and come back in any
order. Each packet gets a slot in a circular buffer of `MAX_REQS` slots of 8
beats, and the slot number is the request tag. So at most `MAX_REQS` packets
are outstanding, and a packet is only issued when its slot is free; this is
also why the unit can always accept a response beat. A response beat is
written at `slot*8 + beats_received[slot]`. The output reads the oldest slot
beat by beat, as soon as each beat is there. The slot is freed with its last
beat. The output is therefore strictly in request order, one beat per cycle.
An assertion checks that no beat arrives for a slot that is not waiting.

With the default `MAX_REQS = 16`, one LSU can have 16 x 128 B = 2 KB in
flight. That covers 10 GB/s at 200 ns latency (2000 B) and 85 ns latency
(850 B).

## Control and the CPU bus (`kvl_ctrl`)

Each engine has a simple CPU bus (`cpu_valid`, `cpu_we`, 16-bit word address
`cpu_addr`, `cpu_wdata`). Read data comes back one cycle later on
`cpu_rdata`, with `cpu_rvalid`. If address bit 15 is set, the access goes to
the scratchpad (word `cpu_addr[9:0]` by default). Otherwise it goes to these
registers:

| addr | name | meaning |
|---|---|---|
| 0 | `KEY_BASE` | byte address of the key batch (16-byte aligned) |
| 1 | `NUM_KEYS` | keys in the batch (at most `SPAD_WORDS` minus `VAL_BASE`) |
| 2 | `TBL_BASE` | byte address of the hash table (16-byte aligned) |
| 3 | `TBL_LOG2` | log2 of the number of table entries |
| 4 | `PSL` | probe sequence length, 1..255, at most the table size |
| 5 | `VAL_BASE` | first scratchpad word for the values |
| 6 | `CTRL` | write 1 to start |
| 7 | `STATUS` | bit 0 busy, bit 1 done (read only) |
| 8 | `CYCLES` | cycles from start to done of the last batch (read only) |

Register writes and starts are ignored while a batch runs. When LSU1-W has
written the last value, `done` and `irq` rise and stay high until the next
start. At that point both read LSUs are idle and the key FIFO is empty
(checked by an assertion). A batch is used this way:

1. Write the keys to memory.
2. Program the registers.
3. Write `CTRL`.
4. Wait for `irq`.
5. Read the values back from the scratchpad.

## Several engines: `kvl_system` (top) and `kvl_mem_xbar`

`kvl_system` holds `NUM_ACCEL` engines (default 8, the largest configuration
evaluated on the HMC model) and one memory interconnect. Engine *a* uses
interconnect port 2*a* for its LSU0-R and port 2*a+1* for its LSU1-R. Each
engine has its own CPU bus and `irq` line, one CPU per engine.

The interconnect (`kvl_mem_xbar`) is a combinational crossbar:

- **Routing.** The channel is address bits `[7 +: log2 NUM_CH]`, so
  consecutive 128-byte blocks go to consecutive channels. A packet never
  crosses a 128-byte block, so each packet lives in one channel.
- **Requests.** Each channel has a round-robin arbiter over the ports that
  address it. The winning port number is written into `tag[15:8]`.
- **Responses.** Each port has a round-robin arbiter over the channels that
  hold a beat for it.

It adds no latency. Its cost is a deep mux path, and a register slice can be
added on the channel side if timing needs it.

### The memory channel interface (outside this design)

The `NUM_CH` channel ports (default 32) are top-level ports. The memory
behind them, such as HMC vaults or DRAM channels, is not part of the RTL.
A channel must follow this contract:

- Requests are `mem_req_t {addr[33:0], nbytes[7:0], tag[15:0]}` with
  valid/ready. `nbytes` is 16..128 in steps of 16, within one 128-byte block.
- For each request it returns `nbytes/16` beats of `mem_resp_t {data[127:0],
  tag, last}`, in address order, with the tag unchanged and `last` on the
  final beat.
- Beats of different packets may come in any order and may interleave.
- `ch_resp_ready` may be low, and the channel must then hold its beat.

Memory is only read. Values go to the on-chip scratchpad, not back to memory.

## Timing

- Hash unit: `HASH_LATENCY` (3) cycles from key to index, one key per cycle.
- Compare/select: one bucket per cycle. The result is registered, one cycle
  after the last bucket.
- LSU: one packet request per cycle. Output is one beat per cycle as soon as
  the oldest packet's beats are there.
- Steady state: the compare/select unit takes one bucket per cycle, so one
  engine needs at least `psl` cycles per lookup. It reaches that bound only
  while its `MAX_REQS` outstanding packets carry enough data to cover the
  memory latency. Otherwise the request limit sets the rate.

In simulation, one engine with 20-cycle memory latency took about 3.8
cycles per lookup at load factor 0.1 (`psl` 3) and about 78 cycles at 0.8
(`psl` 77). At 0.9 the longest probe distance, and so `psl`, reaches the
limit of 255, and a lookup costs about 256 cycles. Throughput falls with
load factor in the same way in the published evaluation.

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `NUM_ACCEL` | 8 | `kvl_system` | largest configuration evaluated on the HMC model |
| `NUM_CH` | 32 | `kvl_system` | assumption: twice the 16 vaults of an HMC 1.x cube, as the simulated cube had twice the vaults of existing parts |
| `MAX_REQS` | 16 | per read LSU | twice an assumed original of 8 (the doubling is given, the original count is not) |
| `HASH_LATENCY` | 3 | hash unit | assumption (the delay is described as configurable) |
| `KEY_FIFO_DEPTH` | 64 | key FIFO | assumption |
| `SPAD_WORDS` | 1024 | scratchpad | assumption (largest batch) |
| `DATA_W` | 128 | `kvl_pkg` | twice a 64-bit original path, one entry per beat |
| `PKT_BYTES` | 128 | `kvl_pkg` | given (16 keys of 8 bytes per packet) |
| `ADDR_W` | 34 | `kvl_pkg` | assumption |

## Where this RTL departs from, or adds to, the description

- **Values go to the scratchpad directly.** The block diagram draws the
  values going from LSU1-W back up to the memory interconnect. The text says
  LSU1-W writes them to an SRAM scratchpad that the CPU reads. Here LSU1-W
  writes the scratchpad directly.
- **Key unpacker added.** With a 128-bit path, LSU0-R delivers two keys per
  beat. A small unpacker, not in the diagram, turns them into single keys.
- **One hash table entry per beat.** This follows from the widened data
  path. The narrower original path, with two beats per entry, is not built.
  Neither are the other baseline configurations: single keys per request and
  the smaller request limit.
- **Random-address writes.** The LSUs are described as able to read or write
  sequential, strided or random locations. The read LSU has all three modes.
  The write LSU has sequential and strided only, because the lookup never
  writes to random locations.
- **Not built.** The host CPU and the memory devices are not part of this
  RTL. Neither are the emulator's programmable delay units and the
  bandwidth-limited link of the fixed-latency memory model, which belong to
  the evaluation set-up and not to the design.
- **Where the keys live.** One sentence of the description has the CPU
  put the keys into scratchpad memory. The pipeline and its diagram,
  however, have LSU0-R fetch them from memory through the interconnect.
  This design follows the pipeline: keys are read from main memory at
  `KEY_BASE`, and the scratchpad only receives the values.
- **Own choices.** The hash function, entry layout, not-found code, register
  map, CPU bus, tag format, channel interleave and arbitration are all chosen
  here. The source gives none of them.

## Files

`rtl/` holds the design, one module or package per file:

- `kvl_pkg.sv`: shared types, constants, hash and register map.
- The engine: `kvl_lsu_cmdgen`, `kvl_lsu_rd`, `kvl_key_unpack`,
  `kvl_splitter`, `kvl_fifo`, `kvl_hash`, `kvl_csu`, `kvl_lsu_wr`,
  `kvl_scratchpad`, `kvl_ctrl` and `kvl_accel`.
- The shared memory side: `kvl_rr_arb`, `kvl_mem_xbar` and the top,
  `kvl_system`.

`tb/` holds self-checking testbenches. Each prints
`TB_RESULT checks=N failures=M`.

- There is one testbench per block, `tb_<module>.sv`.
- `tb_kvl_system` runs the whole system end to end at 2 engines and 4
  channels.
- `tb_kvl_system_full` runs it at its defaults: 8 engines, 32 channels and
  12 batches of up to 1024 keys. It takes about a minute.
- `tb_kvl_workload_lf` sweeps the load factor from 0.1 to 0.9.

Both system testbenches count the mechanisms they exercise, and fail if one
never happened:

- hits and misses;
- probe sequences that wrap at the table end;
- 128-byte key packets;
- the outstanding-request limit being reached;
- splitter back-pressure;
- reordered responses;
- channel contention;
- engines running at the same time.

`tb/kvl_mem_model.sv` is a behavioural model of the memory channels: fixed
latency plus random jitter, optionally out of order. `tb/kvl_tb_pkg.sv` holds
the memory contents, the reference hash, the table builder and the reference
lookup.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/kvl_pkg.sv tb/kvl_tb_pkg.sv tb/tb_kvl_system.sv --top-module tb_kvl_system
./obj_dir/Vtb_kvl_system
```

For a lint pass of the synthesizable design:
`verilator --lint-only -Wall -Irtl -y rtl rtl/kvl_pkg.sv rtl/kvl_system.sv`.
