# Hotline: an accelerator that splits recommendation-model mini-batches by embedding popularity

Training a recommendation model such as DLRM spends much of its time on embedding tables. These tables are too large for GPU memory, so they live in CPU memory. A few rows of these tables are used far more often than all the others: popular users, popular items. This design builds on that skew. A small copy of the popular ("hot") rows is kept on every GPU. A training input whose rows are all hot can then be trained on at once, without touching CPU memory. Only the remaining inputs need rows gathered from the host.

The accelerator sits between the host and the GPUs and does this sorting in hardware. For every mini-batch it:

1. **Classifies** every input. It looks up the input's 26 sparse indices in an on-chip tracker of hot rows, the *Embedding Access Logger* (EAL). Inputs that hit on all 26 are *popular* and go straight to the GPUs. The others are *non-popular* and are parked in an on-chip input store (the input eDRAM).
2. **Gathers** the non-popular inputs while the GPUs train on the popular ones. It reads them back and looks them up again, this time to learn *where* each hot row sits. For every row it issues a read: hot rows come from one of the GPUs (`gpu_rd`, with the GPUs taken in turn), all other rows from CPU memory through the host's DMA engine (`dma_rd`). The returned rows are pooled into one vector per table and streamed to the GPUs together with the input's dense features.

During a *learning phase*, one mini-batch in 20 (5 %) is classified in *learning mode*. Its lookups also update the tracker, so the set of hot rows follows the data.

All RTL is synthesizable SystemVerilog-2017 in `rtl/`; self-checking testbenches are in `tb/`.

## Block map

```
                 +--------------------------- hotline_top ----------------------------+
 host inputs --> |  data_dispatcher  ---> lookup_engine_array ---> eal (64 banks)       |
 s_wr ---------> |   address_registers        (64 engines,          eal_bank x 64      |
                 |   input_classifier  <---    feistel_randomizer)                     |
                 |   memory_controller --------------------------------------------> req (dma_rd / gpu_rd)
 rsp ----------> |  reducer (16 x fp32_alu) --> emb_vector_buffer --> data_dispatcher --> GPUs
                 |  scheduler <--> input_edram (16K records)                           |
                 +---------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `hotline_pkg` | Sizes, record and message types, instruction opcodes |
| `scheduler` | Steps of a mini-batch (idle, classify, gather, done); learning-mode sampling; streams the non-popular inputs back out of the input store |
| `lookup_engine_array`, `lookup_engine`, `feistel_randomizer` | Turns each input into 26 EAL lookups; collects the answers; marks the input popular or not; gives each hot row's position |
| `eal`, `eal_bank` | The tracker: 64 banks, 2M entries, SRRIP replacement, 512-entry request queue and a controller that issues at most one request per bank per cycle |
| `data_dispatcher`, `address_registers`, `input_classifier`, `memory_controller` | Routes inputs by mode; holds the per-table base addresses; sends popular inputs to the GPUs and non-popular ones to the input store; creates the row reads |
| `input_edram` | 16K records of 160 bytes (2.5 MiB) |
| `reducer`, `fp32_alu` | 16 fp32 lanes that pool the rows of one (input, table) bag |
| `emb_vector_buffer` | 0.5 kB FIFO of pooled vectors (8 vectors of 16 fp32) |
| `hotline_top` | Wires the blocks; exposes the host, memory and GPU sides as valid/ready streams |

## The training input record

An input is the Criteo record: 13 fp32 dense features, 26 sparse indices of 32 bits (one per embedding table) and a 32-bit label. That is 40 words or 160 bytes, and 16384 records are exactly 2.5 MiB. This is how the input store's size and depth fit together. The record type is `input_rec_t` in `hotline_pkg`. An input is numbered by its position in the mini-batch while it is being classified. Once it is non-popular, it is numbered by its position in the non-popular part. That number is also its record address in the input store, and the GPU side uses it to match pooled vectors to input records.

## The Embedding Access Logger

This is the most involved part of the design.

**What an entry holds.** An entry does not store the embedding row, only enough to recognise it. It has a valid bit, a 2-bit access counter (the re-reference prediction value of SRRIP) and a 14-bit identifier: 17 bits in all. 2,097,152 entries make 4.25 MiB of SRAM.

**From (index, table) to a place in the SRAM.**

1. The lookup engine forms a 40-bit key: the index shifted left by 8 bits, ORed with the table number.
2. It passes the key through a 4-round Feistel network on two 20-bit halves. The network is a bijection, so two different keys never get the same hash.
3. The hash's low 6 bits choose the bank and the next 13 bits choose one of 8192 sets in that bank.
4. The entry's identifier is the low 14 bits of the *unhashed* key.

Two keys that share a set and the same 14 key bits are confused. The design accepts this: a wrongly classified row costs time, never correctness, because the row is still read from wherever the dispatcher sends it.

Each set has 4 ways, which this design chose. The hot row's position is {bank, set, way}, a 21-bit number. The GPUs are assumed to keep their copy of the hot rows in that same order, so the position is the row number of a `gpu_rd`.

**Replacement (SRRIP with 2-bit counters).** These rules apply only in learning mode:

- A hit sets the counter to 0.
- A miss fills the first invalid way with counter 2, one below the maximum.
- If every way is valid, all counters are raised together until one reaches 3. The first way at 3 is replaced, again with counter 2.

Outside learning mode a lookup changes nothing. The update is done as a read-modify-write of one set per cycle. Each bank is one memory with one read and one write port, one word per set.

**Queue and controller: why lookups take "iterations".** A batch of lookups is loaded into a 512-entry queue first, 64 per cycle (one per lookup engine). The controller then runs iterations. In each iteration every bank serves the oldest queue entry that wants it, so up to 64 lookups complete per cycle. How many iterations a batch needs depends on the busiest bank: with 512 entries spread over 64 banks it is about the worst bank's share. Because every bank serves its requests oldest-first, lookups to the same set are applied in program order. Results are therefore the same as if the lookups had been done one by one, which is what the testbenches check against.

After reset the EAL clears its valid bits, one set of every bank per cycle (8192 cycles at full size). `eal_ready_o` rises when it is done.

## The lookup engine array

The array groups whole inputs into batches of `QUEUE / 26` inputs (19 at full size). It then:

1. Writes their 494 lookups into the EAL queue, 64 per cycle, each engine hashing one (index, table) pair.
2. Starts the EAL.
3. When the EAL is done, hands the inputs on one by one, each with its 26 hit bits, its popular flag (all 26 hit) and, per table, either the hot position (on a hit) or the original index (on a miss).

A batch is closed early when no new input is waiting, so a short mini-batch does not wait for a full batch. The array serves both steps. In the classify step the learning flag may be set. In the gather step it never is, so a non-popular input's hits and positions are exactly those that were true when its mini-batch was classified.

## The data dispatcher and the instruction set

The host and the GPUs see the accelerator through one PCIe streaming interface. In this RTL it is split into independent valid/ready streams: `host_*`, `cfg_*`, `req_*`, `rsp_*` and `gpu_*` on `hotline_top`. The PCIe endpoint itself is not part of the design.

| Instruction | Operands | In this RTL |
|---|---|---|
| `s_wr` | register index, base address | `cfg_*`: index 0-25 sets table t's CPU base address, index 26-51 sets its GPU base address |
| `dma_rd` | start address, byte count | `req_o.op = OP_DMA_RD`, `addr = cpu_base[t] + index * 64`, `nbytes = 64`, to the host's DMA engine |
| `gpu_rd` | GPU id, sparse index | `req_o.op = OP_GPU_RD`, `gpu_id` = 0, 1, 2, 3, 0, ... across all hot reads, `addr = gpu_base[t] + position * 64` |
| `v_add`, `v_mul` | vector, buffer | carried in every request's tag (`red_op`) and executed by the reducer when the row comes back; the gather path always uses `v_add` |
| `dma_wr` | start address, byte count | not generated (nothing in this design writes to host memory) |

Every request carries a tag: input number, table, operation, and first/last row of the bag. Responses must come back in request order with their tag. The reducer relies on the rows of one bag arriving together.

Towards the GPUs a single multiplexer sends, in this priority order:

1. pooled vectors from the embedding vector buffer;
2. non-popular input records (dense features and label);
3. popular input records.

Each beat is marked with its kind (`gpu_beat_t.kind`).

## Reducer and embedding vector buffer

Each of the 16 lanes is an IEEE-754 single-precision adder/multiplier. Rounding is to nearest even; subnormal inputs and results are flushed to zero. Rows arrive as beats of 16 elements. A 16-element row is one beat, and larger `EMB_DIM` values take `EMB_DIM / 16` beats per row. The first row of a bag is loaded into the accumulator. Each later row is added to it, or multiplied element-wise for `v_mul`. After the last beat of the last row, the pooled vector enters the embedding vector buffer, a FIFO of `512 B / (EMB_DIM * 4 B)` entries. With the one-index-per-table inputs used here, a bag holds a single row. The reducer nevertheless pools bags of any length, and its testbench exercises bags of up to five rows.

## Timing of a mini-batch

The clock target is 350 MHz.

- **Classify:** one input per cycle can enter. Each batch of 19 inputs then needs `494 / 64 = 8` load cycles plus the EAL's iterations, about 10-15 per batch in simulation.
- **Gather:** the memory controller issues one row request per cycle, so an input costs at least 26 cycles.

At full size, with random stalls on the memory and GPU sides, 50 inputs took about 310 cycles to classify. Gathering their 33 non-popular inputs took about 1400 cycles. `classify_cycles_o`, `gather_cycles_o` and `eal_iters_o` report these numbers for every mini-batch.

## Sizes

| Parameter | Default | Where it comes from |
|---|---|---|
| Lookup engines | 64 | published configuration |
| EAL | 64 banks, 2,097,152 entries, 4 ways, 512-entry queue, 2-bit counter | published configuration; 4 ways is this design's choice |
| Input store | 16384 x 160 B | published 2.5 MB / 16K inputs |
| Reducer | 16 fp32 lanes | published configuration |
| Embedding vector buffer | 0.5 kB = 8 vectors | published configuration |
| Embedding dimension | 16 | the dimension of three of the four evaluated models |
| GPUs | 4 | the evaluated system |
| Learning sample | 1 mini-batch in 20 | published 5 % |

## Where this RTL departs from the published design or fills gaps

- The Feistel round function, the number of rounds, the EAL associativity and the hash bits used for bank, set and identifier are this design's choices.
- The controller's iteration scheme (oldest request per bank per cycle) and the batching of whole inputs in the lookup engine array are this design's choices.
- Inputs are one-hot with exactly 26 tables. Models with fewer tables need padding: the RTL always performs 26 lookups. Multi-hot inputs, such as the larger synthetic models with 102 or 204 sparse features, are not carried by the record format.
- A model with 64-wide embeddings (Criteo Terabyte) needs `EMB_DIM = 64`, a package constant. Nothing else has to change.
- `dma_wr` is not generated. The write-back of updated embeddings is not described in enough detail to build.
- The PCIe link, DMA engine, CPU memory and GPUs are outside the design. The testbench models them.
- In a multi-node system, one node is meant to learn the hot set and copy it to the others. There is no port for reading or loading the EAL contents, so that copy is not supported. Every node learns on its own.
- Learning is controlled from outside through `learn_phase_i`. The host decides when a learning phase (first epoch, or a later periodic one) runs. Within it, the scheduler samples one mini-batch in 20.
- The input store is an ordinary memory array. eDRAM refresh is not modelled.
- Reset is synchronous and active low everywhere.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops on its own. A watchdog ends a hung run with a failure. Testbenches that use the reference models need `tb/hotline_ref_pkg.sv`. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/hotline_pkg.sv tb/hotline_ref_pkg.sv tb/tb_hotline_top.sv --top-module tb_hotline_top
./obj_dir/Vtb_hotline_top
```

| Testbench | What it shows |
|---|---|
| `tb_feistel_randomizer` | Hash equals the reference formula for random and corner keys; the network inverts |
| `tb_eal` | Small EAL (8 banks) against a reference SRRIP model; hits, ways, learning and read-only modes; iteration count equals the busiest bank's share |
| `tb_lookup_engine_array` | 8 engines with a small EAL: learning batches, popular flag and hot positions against the reference model |
| `tb_input_edram` | Random write/read traffic, read data held between reads |
| `tb_reducer` | Bags of 1-5 rows of 32 elements (two beats), `v_add` and `v_mul`, bit-exact against an fp32 reference; output latency |
| `tb_emb_vector_buffer` | FIFO order, tags, full/empty back-pressure |
| `tb_data_dispatcher` | Routing in both modes, `s_wr` base addresses, `dma_rd`/`gpu_rd` addresses and round robin, output priority |
| `tb_scheduler` | Step order, eDRAM streaming order under back-pressure, completion rule, 1-in-N sampling, skipped gather step |
| `tb_hotline_top` | Whole design at reduced size: host, memory and GPU models; every record and every pooled vector checked; counts each mechanism (learning, popular and non-popular inputs, both read kinds, round-robin wrap, multi-iteration EAL batches, GPU stalls, vector priority, all-popular mini-batch) and fails if one never happened |
| `tb_hotline_full` | The same test on `hotline_top` at its default, full size (about 10 k cycles, most of them the EAL clear) |

The reference models in `hotline_ref_pkg` are written from the description above, not from the RTL. The most important one is a set-associative SRRIP tracker that also remembers the full key of each entry. This lets the end-to-end test answer a `gpu_rd` with the row that really sits at the requested hot position.
