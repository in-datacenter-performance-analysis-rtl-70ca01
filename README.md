# A weight-stationary inference accelerator: 256x256 systolic matrix unit in SystemVerilog

This design is a neural-network inference coprocessor. It is built around one idea: most of the work in a neural network layer is a matrix product between a batch of activation vectors and a constant weight matrix. A single large grid of small 8-bit multiply-accumulate cells does that product efficiently if two things hold:

- the weights stay in the grid;
- the activations flow through it.

The rest of the chip keeps the grid fed and handles the data around it:

- An on-chip activation store.
- A weight queue in front of an external weight DRAM.
- Accumulator memory below the grid.
- A nonlinear-function and pooling pipeline.
- A small in-order controller that runs a handful of long CISC-style instructions sent by a host.

The RTL is written in synthesizable SystemVerilog (IEEE 1800-2017). Every size defaults to the full configuration:

| Part | Default size |
|---|---|
| Array | 256 x 256 cells (65,536 MACs) |
| Unified Buffer | 24 MiB |
| Accumulators | 4 MiB |
| Weight FIFO | four tiles |

## The matrix multiply unit and its wavefront

The array (`matrix_multiply_unit`) is an N x N grid of cells, with N = 256 by default. Each cell holds:

- **Weights:** two 8-bit weight registers, called weight banks.
- **Data:** an 8-bit data register that passes the activation byte one column to the right every cycle.
- **Partial sum:** a 32-bit register that passes the running sum one row down every cycle.

Cell (i, j) multiplies the byte arriving from its left by its weight for row i, column j. It adds the product to the sum arriving from above. After N rows, the bottom of column j holds the dot product of one activation vector with weight column j. Sums travel at the full 32-bit width inside the array, so nothing is rounded before the accumulators.

**Operands.** Each operand is treated as signed or unsigned. Both bytes are extended to 9 bits before the multiply, so all four combinations are exact.

**Row tags.** The signedness of each operand and the weight bank to use are carried as a small tag next to each data byte. Different vectors in flight can therefore use different modes and different weight tiles.

**The wavefront.** A product of one input vector cannot enter all rows at once, because row i's sum only arrives at row i after i cycles. `systolic_data_setup` therefore delays byte i of every vector by i cycles, using a triangle of shift registers. A vector then crosses the array as a diagonal wavefront. Its timing is:

- The vector enters at edge t.
- Its column-0 result leaves the bottom N cycles later.
- Column j's result follows j cycles after column 0.

**Accumulator control.** The accumulator address and write mode of the vector travel beside this wavefront:

1. The data setup delays them to meet column 0 at the bottom.
2. The accumulators pass them from column to column, one column per cycle.

Software therefore sees a simple model: one instruction writes B vectors to B accumulator rows at one row per cycle. A row has landed in every column about 2N cycles after it was read from the Unified Buffer; the controller allows 2N + 4 cycles for this drain.

**Weight double buffering.** A weight tile (N x N bytes, 64 KiB at full size) shifts into the array from the top, one row per cycle. It therefore takes N cycles. The tile goes into the bank that is not in use, while the other bank keeps computing.

Because the first row shifted in ends at the bottom, the weight fetcher reads each tile from memory **last row first**.

When a MatrixMultiply asks for the new tile (the *switch* flag), its rows are tagged with the other bank. The change of weights then moves through the array with the wavefront of its first row. Vectors still in flight with the old bank are unaffected, so there is no pipeline bubble at a tile switch. The controller starts shifting the next tile into the free bank only once both hold:

- no row still in flight uses that bank;
- the Weight FIFO holds the tile's rows.

**16-bit operands.** There is no 16-bit datapath. A MatrixMultiply can instead shift its partial sums left by 8 or 16 bits and add them into the accumulator. A 16 x 8-bit product is then done in two passes and a 16 x 16-bit product in four. This gives the half and quarter speed the original hardware has for such operands.

## Memories

**Unified Buffer** (`unified_buffer`)

- 98,304 rows of 256 bytes (24 MiB). One row is one activation vector: one byte per array row.
- Two read ports: the matrix input and the host write-back.
- Two write ports: activation results and host input. If both write the same row in one cycle, port A (activation results) wins.
- Reads are registered (one cycle of latency).

**Accumulators** (`accumulators`)

- 4096 rows of 256 x 32-bit values, built as one RAM per column.
- Each column is written on its own cycle behind the wavefront.
- A write either overwrites the row or adds into it, with the optional 0, 8 or 16-bit shift described above.
- The row space is flat. Software gets double buffering by alternating between two halves (for example 2 x 2048 rows).
- One full row can be read per cycle for Activate.

**Weight FIFO** (`weight_fifo`)

- Four tiles of storage (4 x 256 rows of 256 bytes).
- A fetcher with a four-entry queue of tile requests.
- The fetcher sends row requests to Weight Memory while the FIFO has room for the row and for every request still in flight. Responses must return in request order.
- Tile t is Weight Memory rows t*256 to t*256+255.

## Instructions and the controller

The host writes 12-byte instructions into a 32-entry `instruction_buffer`. The format is defined in `tpu_pkg`:

| bits | field | bytes |
|---|---|---|
| 95:88 | opcode | 1 |
| 87:72 | flags | 2 |
| 71:48 | Unified Buffer address (rows) | 3 |
| 47:32 | accumulator address (rows) | 2 |
| 31:0 | length (rows, or tiles for Read_Weights) | 4 |

The opcodes are:

- **`READ_HOST_MEMORY` (1):** copies `length` rows from host memory into the Unified Buffer. The host row address is `{flags, acc_addr}`.
- **`READ_WEIGHTS` (2):** queues `length` tiles, starting at tile `ub_addr`, for the weight fetcher. It retires as soon as the request is queued; the fetch continues in the background.
- **`MATRIX_MULTIPLY` (3):** streams `length` Unified Buffer rows through the array into consecutive accumulator rows. Its flags are:
  - bit 0: accumulate instead of overwrite;
  - bit 1: switch to the next weight tile first;
  - bit 2: data bytes are signed;
  - bit 3: weight bytes are signed;
  - bits 5:4: partial-sum shift of 8·k bits.
- **`ACTIVATE` (4):** reads accumulator rows and applies the nonlinear function. It pools and writes `length` result rows to the Unified Buffer. Its flags are:
  - bits 2:0: function (0 none, 1 ReLU, 2 sigmoid, 3 tanh);
  - bit 3: average pooling instead of max;
  - bits 5:4: log2 of the pooled group (1, 2, 4 or 8 rows);
  - bits 10:6: right shift applied before the function.
- **`WRITE_HOST_MEMORY` (5):** copies Unified Buffer rows to host memory.
- **`SYNC` (6):** waits until every station is idle. Software places it between a layer's Activate and the next layer's MatrixMultiply when they share Unified Buffer rows.
- **`INTERRUPT_HOST` (7):** pulses `irq`.
- **`HALT` (8):** stops issue for good; `halted` goes high.
- **`NOP` (0):** does nothing.

**Stations.** The `controller` issues instructions in order, at most one per cycle. It has four stations that run concurrently:

- host DMA (`host_interface`);
- weight requests;
- matrix streaming;
- activation.

An instruction waits only for its own station and for read-after-write hazards. Hazards are detected by comparing address ranges:

- A MatrixMultiply or Write_Host_Memory waits while an Activate or Read_Host_Memory still writes overlapping Unified Buffer rows.
- An Activate waits while a MatrixMultiply writes overlapping accumulator rows. This includes the drain time through the array.

Long instructions therefore overlap: while a MatrixMultiply streams, the next tile's Read_Weights, the previous layer's Activate and host transfers all make progress.

**Matrix stalls.** The matrix station stalls in two cases:

- *weight stall:* the next tile is not yet in the Weight FIFO;
- *weight shift:* the tile is still being shifted into the array.

**Restriction.** The first MatrixMultiply after reset must set the switch flag.

**Performance counters.** `perf_counters` holds eight 64-bit event counters, read through `perf_sel`:

| perf_sel | counts |
|---|---|
| 0 | cycles |
| 1 | array active (a row entered the array) |
| 2 | weight stall |
| 3 | weight shift |
| 4 | RAW stall |
| 5 | host input stall |
| 6 | instructions issued |
| 7 | array idle |

## Activation and pooling

`activation_unit` takes one accumulator row per cycle and returns 256 bytes one cycle later. Each 32-bit value is first shifted right arithmetically by the instruction's shift. It is then mapped by the chosen function:

- **None:** saturated to a signed byte.
- **ReLU:** max(0, x), saturated to 0..127.
- **Sigmoid:** the input is read with 4 fraction bits. The output is an unsigned byte with 8 fraction bits. It uses a four-segment piecewise-linear curve, symmetric about (0, 0.5), with a maximum error of about 0.02. It needs only shifts and adds.
- **Tanh:** computed as 2·sigmoid(2x) − 1 and returned as a signed byte with 7 fraction bits.

`normalize_pool` then combines 1, 2, 4 or 8 consecutive result rows, element by element:

- by maximum, or by average (the sum shifted right by log2 of the group size);
- signed, or unsigned after a sigmoid.

With a group of 1, rows pass through unchanged. Two-dimensional pooling windows are obtained by the order in which software places rows in the accumulators.

The number formats, the sigmoid approximation and the row-wise pooling are this design's own choices. The original hardware only says which functions exist.

## Top level and external interfaces

`tpu_top` wires the blocks in the order of the data path:

> host memory → Unified Buffer → data setup → matrix unit (weights from the Weight FIFO) → accumulators → activation → pooling → Unified Buffer → host memory

The PCIe endpoint, the DDR3 controllers and physical interfaces, the DRAM itself and the host are not part of the RTL. Their places are taken by plain ports:

- **Instruction port:** `instr_valid` / `instr_ready` / `instr`, one 12-byte instruction per handshake.
- **Host memory bus:**
  - requests: `hreq_valid` / `hreq_ready` / `hreq_write` / `hreq_addr` / `hreq_wdata[N]`;
  - read responses: `hrsp_valid` / `hrsp_data[N]`.
  - One row per request, one read outstanding, and addresses count rows.
- **Weight Memory port:** `wm_req_valid` / `wm_req_ready` / `wm_req_addr` (25-bit row address, 8 GiB of 256-byte rows) and `wm_rsp_valid` / `wm_rsp_data[N]`. Responses come back in order, with any latency.
- **Status:** `halted`, `irq` and `acc_done` (a pulse when an accumulator row has been fully written), plus `perf_clear`, `perf_sel` and `perf_value`.

Parameters of `tpu_top`:

| parameter | default | meaning |
|---|---|---|
| `N` | 256 | array side, bytes per row |
| `UB_DEPTH` | 98304 | Unified Buffer rows (24 MiB) |
| `ACC_DEPTH` | 4096 | accumulator rows |
| `WF_TILES` | 4 | Weight FIFO depth in tiles |
| `IB_DEPTH` | 32 | instruction buffer entries (own choice) |

All resets are asynchronous and active low. Only control state is reset. Data, sums and weights are qualified by valid bits.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block with values computed independently inside the testbench and ends by printing `TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog. Most run at a reduced N (4 to 8) to stay fast.

**Matrix unit and data setup.** These were also run at N = 64, 65 and 256, and the end-to-end test at N = 32 and 128. The matrix-unit test checks:

- every output against 256-term dot products;
- vectors alternating between the two banks while a tile shifts in;
- all four signedness modes;
- the exact N + j cycle latency.

**Small end-to-end test.** `tb_tpu_top` runs a two-layer network at N = 8:

1. Layer 1: ReLU.
2. Layer 2: switches to a second tile loaded in the background. It adds a second product, shifted left by 8 bits, into the accumulators, then applies sigmoid with 2-row max pooling.
3. Layer 1's sums are also sent through tanh, and through the identity function with 2-row average pooling.

It uses slow weight and host memory models. It counts each mechanism and fails if one never occurred:

- weight stalls, weight shifts and tile switches;
- RAW stalls, host input stalls and a Sync that had to wait;
- accumulate and overwrite writes, every function, max and average pooling;
- both DMA directions, the interrupt and halt.

**Full-size test.** `tb_tpu_top_full` runs one complete layer with every parameter at its default: 256 x 256 array, 24 MiB buffer, 4096 accumulators. It checks all 1024 outputs against a reference. It also checks that the tile shift took 256 cycles and that the matrix took one cycle per row.

**Memory models.** `tb/weight_memory_model.sv` and `tb/host_memory_model.sv` are behavioural models of the external memories with configurable latency and back-pressure. Byte i of Weight Memory row a is (37a + 11i + 5·(a >> 3) + 3) mod 256, so no data file is needed.

To run a testbench with Verilator, list the package first, for example:

```
verilator --binary --timing --assert rtl/tpu_pkg.sv rtl/*.sv \
  tb/weight_memory_model.sv tb/host_memory_model.sv tb/tb_tpu_top.sv \
  --top-module tb_tpu_top
obj_dir/Vtb_tpu_top
```

(Remove the duplicate `tpu_pkg.sv` from the glob, or name the files explicitly.) The full-size test takes about a minute to build and a few seconds to run.

## Where this design departs from the original, and what is missing

- **Instruction encoding:** the instruction field order, opcode numbers and flag bits are this design's own. Only the byte counts of the fields come from the original: 1+2 opcode/flags, 3 Unified Buffer address, 2 accumulator address, 4 length.
- **Convolution addressing is not built.** The original length field can hold two dimensions for convolutions. Here a convolution runs as a plain matrix multiply over rows the host has laid out (im2col).
- **Instructions not built:** set configuration, debug tag, the alternate host read/write and the second synchronisation variant. The original names these without describing them.
- **Vector operations:** element-wise vector operations, as used by the LSTM gate arithmetic, have no unit here, because the original does not say how they are executed.
- **Counters:** only 8 event counters are built. The original has 106 but only describes the ones above.
- **Own choices:** the host and Weight Memory interfaces, the queue depths, the controller's sequencing and hazard rules, and the pooling window are this design's own. So are the numeric formats of the nonlinear functions.
- **Off-chip parts are not built:** PCIe, DDR3 interfaces, clocking and test logic.
