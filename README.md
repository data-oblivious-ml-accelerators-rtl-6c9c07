# Row-granular information-flow tracking for a systolic matrix accelerator

A client wants an untrusted service to run a neural network on its data.
The service's software, operating system and accelerator driver are all
untrusted, and they may be buggy or malicious. The client's data must still
never leave the machine unencrypted. It must also never steer anything an
attacker can observe: an address, a command, a timing.

The host CPU tracks secrecy with a tag on every 64-bit word of memory. Tag 0
means *public*. Any other value means *blinded*: the word belongs to one
client's secret domain, and the value names that domain. The CPU lets blinded
values flow only through data-oblivious operations, and it faults if one would
decide a branch or an address.

This RTL extends the same discipline to a Gemmini-style matrix accelerator. A
tracker per processing element would work, but it would cost a tag register
and an OR gate in each of the DIM×DIM PEs. The design avoids that with one
observation. In a weight-stationary systolic array, the *only* data that
influences output row *i* is input row *i* (of A and of D) and the weights B
held in the array. Nothing else ever mixes into it. So it is enough to keep:

* **one tag per matrix row**, computed before the row enters the array;
* **a tag queue** that delays that tag by exactly the array's latency, so the
  tag leaves next to its row;
* **one tag per scratchpad and accumulator row**, checked on every write.

The PEs themselves are untouched. Rows of different clients can follow each
other back to back through the array, each with its own tag.

## 1. The tag algebra

All checks use one rule, the function `tags_conflict` in `dolma_pkg`.

* Combining tags gives their bitwise OR.
* Combining two *different non-zero* tags is forbidden. That would mix two
  clients' secrets into one value, and the result could then not be given
  back to either of them.

A public value may combine with anything. The result then carries the other
value's tag. `tag_check` applies the rule to N tags: `tag_o` is the OR and
`violation_o` flags a conflict. The OR is only used when there is no conflict,
so the OR of two equal tags or of a tag and zero is the right answer. The
numeric OR of two different domains never becomes a tag.

Tags are 8 bits wide, one per 64-bit word, as in the host's tagged memory. A
row of the scratchpad is DIM bytes, i.e. DIM/8 memory words, and it has a
single tag.

## 2. The systolic array and its tag queue (`dift_mesh`)

### Data path (`pe`, `tile`, `mesh`)

The array computes `C = A·B + D` row by row, weight-stationary.

* `pe` holds one 8-bit weight. It passes its activation to the right and adds
  `a·w` to the 32-bit partial sum coming down from above.
* `tile` is a purely combinational block of PEs.
* `mesh` places MESH_ROWS×MESH_COLS tiles with a register between
  neighbouring tiles, in both directions.
* Input row *i* is *skewed*: element *k* is delayed by *k* cycles, so it meets
  the partial sum of column *j* at the right PE. The bottom outputs are
  *deskewed* so that a whole output row leaves in one cycle.

With 1×1 tiles, an input row accepted in cycle *t* leaves as an output row in
cycle *t + 2·DIM − 1*, and one row can enter every cycle. In the 2×2 example
that is 3 cycles: inputs in cycle 1, output row in cycle 4. The testbench of
`mesh` checks exactly this case, with the numbers worked out by hand.

### Weights

Weights are loaded by PRELOAD. It shifts DIM rows of B down a chain through
the PE weight registers, last row first, so that row *k* ends in array row *k*.
While the rows go in, their tags are combined into one *weight tag* register:

* A public B leaves the weight tag at 0.
* A B of one domain makes **every** output row of that domain. This is
  inevitable, since every output depends on every weight.
* If the B rows carry two different domains, the weights are marked poisoned.
  `weight_violation_o` pulses, and every row that enters before the next
  preload is dropped.

### Row tags and the queue

For each row that enters, the tag is computed from the A row's tag, the D
row's tag and the weight tag, in the same cycle in which the row enters:

```
row_tag  = tag(A_i) | tag(D_i) | weight_tag
conflict = any two of them are different non-zero tags
```

* **Conflict:** the row is not given a valid bit in the queue, so no output is
  ever written for it, and `row_violation_o` pulses.
* **No conflict:** `{valid, row_tag}` enters `tag_queue`, a shift register of
  exactly the array latency (2·DIM − 1 stages). The tag therefore leaves in
  the cycle its output row leaves. `out_valid_o` / `c_tag_o` are the tag
  queue's outputs, and `c_row_o` is the array's.

The queue holds one tag per row in flight, i.e. 2·DIM − 1 tags. Putting a tag
into every tile instead would need one per tile; for the 2×2 example that is 4
against 3.

## 3. Scratchpad and accumulator rows: read-check-write (`scratchpad_bank`)

This is the subtlest part of the design.

A memory row of DIM bytes is filled from DIM/8 memory words, and each word
arrives with its own tag. If the words of one row come from different domains,
the row would mix two secrets. The bank must notice this when the *second*
word is written. To do that, the write has to read the row's current tag,
check it and write the new tag. The tag memory is a synchronous SRAM, so this
cannot happen in one cycle. The bank is therefore pipelined:

| stage | write | read |
|---|---|---|
| 1 | address goes to the tag (and data) memory, and the write is held in a one-entry write queue | address goes to data and tag memory |
| 2 | check the current tag against the incoming one, then write | response (`rd_resp_*`) |

### Which write does what

| write | check | new tag | data |
|---|---|---|---|
| full row (all mask bits) | none | incoming tag | incoming row |
| partial row (some bytes) | conflict → refused | current OR incoming | masked bytes replaced |
| accumulating (`wr_accum_i`) | conflict → refused | current OR incoming | row + incoming, lane by lane |

A refused write leaves the row as it was and pulses `violation_o`. A full-row
write may replace the tag, because nothing of the old row survives.

### One request per cycle

Only one request is accepted per cycle, and a write wins over a read:
`rd_ready_o` is low while a write is presented. The reason is that a write in
stage 1 uses the memory read port to fetch the current tag.

### Forwarding

A write checks and commits in stage 2. In that same cycle, the following
request (in stage 1) reads the same memories, and it may be for the same row:

* a read of the row just written, or
* a second partial write to it, e.g. the next 64-bit beat of the same row.

The old tag it reads would be stale. The bank therefore remembers the committed
write for one cycle (`fwd_*`). In the next cycle it overlays the stale read
data byte by byte, by the write mask, and replaces the stale tag.

* Accumulations forward the sum.
* A refused write is not forwarded.

Back-to-back beats of one row thus see each other's tags. This is the
mechanism that catches a row whose beats come from two clients.

### Reset

After reset every bank writes zero data and tag 0 into all its rows, which
takes ROWS cycles. Until then it accepts nothing. The top holds off commands
until every bank is done. Nothing written before the reset can be read back
afterwards.

### Two kinds of bank

The same module is used for both memories:

* **Scratchpad:** DIM 8-bit elements per row. It is written by the move-in
  DMA, one partial write per 64-bit beat.
* **Accumulator:** DIM 32-bit elements per row. It is written by the array with
  full rows, or with accumulating writes. Accumulation is how a product with
  an inner dimension K larger than DIM is built up from K/DIM passes. The tag
  rule then means that partial sums of two different clients can never end up
  in one row.

## 4. Where blinded data could steer the machine

Two places in the accelerator turn a value into control. Both are closed
off.

* **Command operands (`rocc_cmd_check`).** rs1 and rs2 of every command are
  addresses, row counts and flags. A command whose rs1 or rs2 tag is non-zero
  is consumed and never reaches the router, and a fault is raised. Its
  operands are forced to zero on the way.
* **Page-table entries (`tlb_fill_check`).** A PTE sits on the TLB refill path
  and decides where memory accesses go. A blinded entry is replaced by zero
  and a fault is raised; a public one passes unchanged. The TLB and the page
  walker are outside this RTL, and the check sits on their refill port,
  brought out at the top.

Everything else the DMA engines do depends only on public command operands.
The array and the activation unit are fixed-latency and fixed-function, so
they take the same number of cycles whatever the data is. This is why blinded
data may flow through them at all.

## 5. Fault behaviour (`dolma_top`)

The first violation sets a sticky `fault_o`, and `fault_cause_o` records its
source:

| cause | value | raised when |
|---|---|---|
| `FAULT_BLINDED_CMD` | 1 | rs1 or rs2 of a command was blinded |
| `FAULT_MIX_ARRAY` | 2 | the A, D and weight tags of a row conflict |
| `FAULT_MIX_WEIGHTS` | 3 | the B rows of a preload carry two domains |
| `FAULT_MIX_SPAD` | 4 | a partial or accumulating write would mix two domains in a scratchpad or accumulator row |
| `FAULT_BLINDED_PTE` | 5 | a blinded page-table entry reached the TLB refill port |

From then on:

* every command is consumed and ignored;
* no write reaches a scratchpad bank, the accumulator or memory;
* this lasts until reset, which also wipes the banks.

In addition, the offending row or write itself is dropped where it was found.
The policy is that a faulting operation emits nothing further; stopping the
whole accelerator until reset is this design's reading of it.

## 6. Programming model

Commands arrive on a RoCC-like port: `funct`, `rs1`, `rs2`, and a tag for each
operand. Scratchpad row addresses are global: bank *b* starts at `b·SP_ROWS`.

| command | funct | rs1 | rs2 |
|---|---|---|---|
| CONFIG | 0 | [0] ReLU on move-out, [12:8] scale shift | – |
| MVIN | 2 | memory address | [15:0] scratchpad row, [31:16] rows |
| MVOUT | 3 | memory address | [15:0] accumulator row, [31:16] rows |
| COMPUTE | 4 | [15:0] A row, [31:16] rows | [15:0] D row, [63] D = 0 |
| PRELOAD | 6 | [15:0] B row (DIM rows) | [15:0] first output accumulator row, [62] accumulate |

Rows are contiguous in memory, DIM bytes apart.

* **MVIN** reads 64-bit beats with their tags and writes each beat into its
  slice of the row.
* **MVOUT** reads accumulator rows and processes each element in this order:
  1. divides it by 2^shift, rounding half up;
  2. applies ReLU if enabled;
  3. saturates it to 8 bits;
  4. writes it out with the row's tag on every beat.
* **PRELOAD** waits until the array is empty, then loads B. Outputs of the
  following COMPUTEs go to consecutive accumulator rows from the given one.
* **COMPUTE** streams A and D rows, one per cycle. A COMPUTE that follows
  another COMPUTE continues the same output sequence, so rows of different
  clients can be streamed through the same weights without a gap.
* If A and D lie in the same scratchpad bank, the bank can serve one of them
  per cycle, and the rate drops to one row per two cycles.

A typical job looks like this:

```
MVIN A; MVIN B; MVIN D; PRELOAD B,C; COMPUTE A,D,n; CONFIG relu; MVOUT
```

Longer inner dimensions repeat `PRELOAD (accumulate) / COMPUTE` for every
DIM-wide slice of K.

### Overlapping the controllers

The move-in, execute and move-out controllers work at the same time when they
touch different rows. The router records the row ranges of each command it
hands over:

* the scratchpad rows a MVIN writes;
* the accumulator rows a MVOUT reads;
* the scratchpad rows the latest PRELOAD or COMPUTE reads;
* the accumulator rows written since the execute controller was last idle.

A new command waits while its rows overlap the recorded ranges of a
controller that is still busy. MVIN and MVOUT always wait for each other,
because the router does not compare host memory addresses.

Inside the memories the controllers then share the banks:

* a move-in write wins over an execute read of the same bank;
* an execute write to the accumulator wins over a move-out read;
* the loser simply waits a cycle.

This ordering only makes the results correct. Security does not depend on it,
because every row carries its own tag wherever it goes.

## 7. Module map

| module | role |
|---|---|
| `dolma_pkg` | tag type, command and fault encodings, `tags_conflict` |
| `tag_check` | OR of N tags plus conflict flag |
| `pe`, `tile`, `mesh`, `delay_line` | weight-stationary array, skew/deskew |
| `tag_queue` | valid + tag delay matching the array latency |
| `dift_mesh` | array + weight tag + row check + tag queue |
| `scratchpad_bank` | tagged SRAM bank with read-check-write, forwarding, accumulate |
| `activation` | scale, ReLU, saturation; tag passes through |
| `rocc_cmd_check` | refuses blinded command operands |
| `tlb_fill_check` | zeroes blinded PTEs |
| `cmd_router` | decodes commands, holds CONFIG, dispatches with row-range hazard checks |
| `load_ctrl` | move-in DMA, one tagged beat per partial write |
| `store_ctrl` | move-out DMA through `activation` |
| `exec_ctrl` | preload and compute sequencing around `dift_mesh` |
| `dolma_top` | everything above: 4 scratchpad banks, 2 accumulator banks, sticky fault |

### Default size: `dolma_top` with no parameters

* 32×32 array.
* 256 KiB scratchpad: 4 banks of 2048 rows × 32 bytes.
* 64 KiB accumulator: 2 banks of 256 rows × 32×32 bits.
* 64-bit memory beats.

`DIM`, `SP_KB`, `ACC_KB`, `SP_BANKS` and `ACC_BANKS` are parameters.
`TILE_ROWS`/`TILE_COLS` of `mesh` allow larger combinational tiles, but the
controllers use 1×1 tiles.

### Ports of the top

* the command port with operand tags;
* `busy_o`, `fault_o`, `fault_cause_o`;
* a read channel (request address, then a response with 64-bit data and tag);
* a write channel (address, data, tag);
* the TLB refill port.

All use valid/ready handshakes.

## 8. What follows the paper, and what does not

**Taken from the paper:**

* the tag semantics: 0 is public, each non-zero value is a domain, 8 bits per
  64-bit word;
* OR propagation, and a fault on mixing domains;
* row granularity, with the output tag computed before the row enters the
  array;
* the tag queue of array latency, and the weight tag covering all outputs;
* the two-stage scratchpad with a write queue, tag check, write priority and
  forwarding;
* checking every partial write, and zeroing blinded PTEs;
* refusing blinded command operands;
* constant-time activation with plain tag pass-through;
* the three controllers.

**This design's own choices**, where the paper gives no detail:

* all widths other than the tag: 8-bit inputs, 32-bit accumulation;
* the command encoding and its operand fields;
* the memory channel handshakes;
* full-row writes replace the tag;
* the reset sweep;
* the sticky whole-accelerator fault;
* the preload order and the rule of draining the array before a preload;
* the power-of-two output scale;
* accumulate-on-write in the accumulator;
* the 2-cycle row rate when A and D share a bank;
* the sizes of scratchpad and accumulator (Gemmini's usual ones).

**Departures from the paper:**

* Dependency tracking between the controllers is range-based and in order
  (see "Overlapping the controllers" below), not a reservation station.
  Move-in and move-out never run together.
* There is no double-buffered weight preload. PRELOAD waits for the array to
  drain, which costs about 2·DIM cycles per weight tile.
* The host CPU with its tagged memory, the TLB and page walker, and the root
  of trust for attestation are not part of the RTL. The CPU and memory are
  replaced in the testbenches by a behavioural tagged memory
  (`tb/tagged_mem_model.sv`), and the TLB by the refill port.
* Only the weight-stationary dataflow is built. There is no
  output-stationary mode and no convolution-specific addressing (im2col);
  residual adds, pooling and non-power-of-two requantization are left to the
  host.

## 9. Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Random stimulus uses `$urandom`, and the
expected values are computed independently in the testbench. The notable
ones:

* **`tb_mesh`:** a 3×2 mesh of 2×1 tiles against a software matrix product,
  and the 2×2 example, with output row `[30, 42]` in cycle 4.
* **`tb_dift_mesh`:** tags of A-blinded, D-blinded and public rows streamed
  back to back, mixing in a row, mixing among the weights.
* **`tb_scratchpad_bank`:** 4000 cycles of random reads, full, partial and
  accumulating writes to four rows of a 16-row bank, against a reference
  model. It counts forwarding, refusals, write priority and accumulation, and
  fails if any never happened.
* **`tb_exec_ctrl`:** checks the one-row-per-cycle rate and the two-cycle rate
  for a shared bank.
* **`tb_dolma_top`** (DIM 16, 16 KiB scratchpad, 8 KiB accumulator, with the
  tagged memory model):
  * a two-client job of 20 rows, checked byte by byte and tag by tag;
  * a shared-bank compute, a compute with D = 0, a scaled move-out without
    ReLU, and a two-pass accumulation;
  * then, one per reset: a blinded operand (after which memory must not be
    written), a row whose two beats come from different domains, A/D mixing,
    weight mixing, accumulator mixing, and a blinded PTE.

  It counts partial-write checks, forwards, shared-bank rows, domain switches
  between consecutive rows, D-only blinded rows, ReLU, saturation,
  accumulated rows, cycles in which a DMA controller and the execute
  controller were both busy, and each fault cause. It fails if any of them
  stayed at zero.
* **`tb_resnet_layer`:** a slice of a ResNet-50 layer, tiled the way a host
  driver would tile it. It takes the first 1×1 convolution of a conv2_x
  bottleneck (64 → 64 channels) over an 8×8 patch of pixels: a GEMM of
  M = K = N = 64. The input is one client's blinded activations (tag 3) and
  the weights are public. For each output tile the host issues K/DIM
  K-slices (overwrite, then accumulate), then a move-out with ReLU and a
  2⁻⁶ scale. The run itself is the module `resnet_slice`. The testbench runs
  it on 8×8, 16×16 and 32×32 arrays side by side, each with the default
  memories. Each checks all output words and the tag. Cycle counts:

  | Array | Cycles | Array rows | Array busy |
  |---|---|---|---|
  | 8×8 | 7527 | 4096 | 54% |
  | 16×16 | 3825 | 1024 | 26% |
  | 32×32 | 2798 | 256 | 9% |

  The rest of the time goes to move-in before the first compute, and to
  draining the array before each weight load. The smaller the array, the
  more rows each weight tile serves, so its share of busy cycles is higher.
* **`tb_dolma_full`:** runs the default-size top (32×32, 256 KiB scratchpad)
  through one complete two-client job: move-in, preload, 32 rows of compute,
  move-out with ReLU. It checks every byte and tag, in 862 cycles after the
  reset sweep.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/dolma_pkg.sv tb/tb_dolma_top.sv --top-module tb_dolma_top -o sim
./obj_dir/sim
```

Testbenches that reach inside the design name internal signals
hierarchically, to count mechanisms (e.g. `dut.fwd_hit`,
`u_dut.u_exec.push`). Keep those names if you change the RTL.

### Lint notes

`scratchpad_bank` mixes an asynchronously reset control path with unreset
data registers in one module, and Verilator reports this as SYNCASYNCNET.
This is intended: the data registers need no reset, because nothing reads
them before the valid bits that are reset.
