# A remapping memory controller for sparse MTTKRP

Sparse MTTKRP is the core step of CP tensor decomposition (CP-ALS). For every
non-zero `x` of a sparse tensor at coordinates `(i0, i1, i2)`, it adds
`x * B[i1][:] * C[i2][:]` (element-wise) into row `i0` of the output factor
matrix `A`. The arithmetic is light and the memory traffic is irregular, so on
an FPGA the run time is set by external-memory access, not by compute.

This RTL builds the memory side of such an accelerator. It follows the
organisation proposed in "Towards Programmable Memory Controller for Tensor
Decomposition" (Wijeratne, Wang, Kannan, Prasanna). Its central idea is
**output-direction computation with remapping**:

* If the non-zeros reach the processing element grouped by their
  output-mode coordinate, each output row can be accumulated on chip and
  written once. Nothing is spilled to memory as partial sums.
* That grouping is different for every mode. Rather than keep one sorted copy
  of the tensor per mode, the controller **remaps** the tensor before each
  mode. It streams the tensor in and writes every element, one by one, to the
  next free slot of its output coordinate. That slot address comes from an
  on-chip table of address pointers, one per coordinate value.
* After that, each kind of access goes through its own engine. The tensor
  is read as a stream (DMA). Input factor-matrix rows are random reads and go
  through a cache. Output rows are written as a stream (DMA). Remapped
  elements are single-element writes.

Remapping adds one read and one write of the tensor per mode. For `N` modes
and rank `R`, that is about `2 / (1 + (N-1) R)` of the mode's traffic. This
is a few percent for `N = 3` and `R = 16`.

## Block structure

```
              +---------------------------- memory_controller -------------------------+
 processing   |  cache_engine  <--- factor-row reads ------------+                      |
 element  <-->|  dma_engine: input buffer  <--- tensor stream ---+                      |
 (PE)         |              output buffer ---> output rows -----+--> data_selection -->|--> memory
              |  tensor_remapper: DMA buffer + pointer table ----+    logic (FCFS)      |    interface
              +-------------------------------------------------------------------------+    (outside)
```

| File | Block |
|---|---|
| `rtl/mc_pkg.sv` | widths, `elem_t` (tensor element), `mem_req_t` (memory request), client numbers |
| `rtl/mttkrp_top.sv` | processing element + memory controller; memory port brought out |
| `rtl/processing_element.sv` | MTTKRP over a remapped tensor |
| `rtl/memory_controller.sv` | the four blocks below, wired as in the controller diagram |
| `rtl/tensor_remapper.sv` | bulk read, pointer lookup, element-wise store |
| `rtl/cache_engine.sv` | set-associative read cache for factor rows |
| `rtl/dma_engine.sv` | input buffer (read stream) and output buffer (write stream) |
| `rtl/data_selection_logic.sv` | first-come first-served arbiter and read-data router |
| `rtl/sync_fifo.sv` | FIFO used by the buffers and the tag queue |

The DRAM/HBM memory-interface IP and the memory itself are not part of
the RTL. `mttkrp_top` exposes the interface's request/response side.
`tb/ext_mem_model.sv` is a behavioural stand-in for both.

## Data layout

Memory is addressed in 512-bit words.

* **Factor matrix row.** One row holds `R = 16` values of 32 bits, which
  fills exactly one word. Row `r` of matrix `k` is at word `fm_base[k] + r`.
  With the default line width, one cache line is also one row.
* **Tensor element.** An `N`-mode element is `N` 32-bit coordinates
  followed by a 32-bit value. It occupies a slot of `elem_slot_w(N)` bits,
  rounded up to a power of two: 128 bits for `N = 3`, 256 bits for
  `N = 4` or `5`. A word therefore holds `SEPW = 512 / slot` elements: 4 or
  2. Element `z` of a tensor at word `T` is in word `T + z/SEPW`, lane
  `z%SEPW`. Coordinate `k` is at bits `32k+31:32k` of the slot. `elem_t` in
  the package is the three-mode slot as a struct.
* **Element address.** This is `word * SEPW + lane`. The remapper's
  pointers are element addresses.
* **Values.** These are 32-bit two's-complement integers, and all products
  and sums wrap modulo 2^32. A fixed-point interpretation is up to the
  user. This is a choice of this implementation, not of the paper.

## One mode of CP-ALS

The host runs each mode `m` in two steps.

1. **Remap.**
   * Count the non-zeros per coordinate of mode `m` and form prefix sums.
   * Write `dst*SEPW + prefix[c]` into pointer `c` through
     `ptr_wr_valid/idx/addr`.
   * Pulse `remap_start` with `remap_mode = m`, `remap_src` and `remap_nnz`.
   * Wait for `remap_done`.

   Afterwards the tensor at `dst` is grouped by `coord[m]`, in ascending
   coordinate order. Within a coordinate, elements keep their input order.
2. **Compute.**
   * Pulse `cache_invalidate`, because the previous mode rewrote a factor
     matrix.
   * Pulse `pe_start` with `pe_mode = m`, the remapped tensor address,
     `pe_nnz`, `pe_out_dim` (the length of mode `m`), `pe_fm_base[0..N-1]`
     and `pe_out_base`.
   * Wait for `pe_done`.

   Afterwards all `pe_out_dim` output rows have been issued to memory.
   Writing them over `fm_base[m]` gives the in-place CP-ALS update.
   Normalisation is not done in hardware.

Each step's source is the previous step's destination (ping-pong between two
tensor areas). The original tensor may be in any order.

## Tensor remapper

This is the least conventional block. Its pointer table `ptr_mem` has
`MAX_PTRS` entries of 32 bits and is indexed by coordinate value.

1. The remapper reads `ceil(nnz/SEPW)` words from `remap_src` into its DMA
   buffer. Reads are issued only while buffered words plus reads in flight
   stay within `BUF_DEPTH`, so returning data always has room.
2. For the element at the head of the buffer, `c = coord[mode]`.
3. It issues one memory write:
   * address `ptr_mem[c] / SEPW`;
   * data: the element copied into every lane;
   * byte enables: only lane `ptr_mem[c] % SEPW`.

   In the same cycle `ptr_mem[c]` is incremented. The pointer is read
   combinationally, so back-to-back elements with the same coordinate see
   the updated value.
4. Element writes take priority over reads. When memory never stalls, the
   remapper stores about one element per cycle. The test measures 203
   elements in 263 cycles with a 64-word buffer and latency 8.

An element with `coord[mode] >= MAX_PTRS` has no pointer. It is dropped and
counted in `remap_range_err`. The paper notes that real tensors have modes of
tens of millions of coordinates. Their pointers (40 MB for 10 M coordinates)
do not fit on chip, and the paper leaves the partitioned layout that would fix
this to future work. This RTL therefore handles output modes of up to `MAX_PTRS`
coordinates. A longer mode would need a partitioned layout, or a
coordinate-window base on the pointer table, and neither is built.

## Processing element

The PE expects the tensor sorted by the output coordinate. It handles one
element at a time:

1. Set `prod[r] = x` for all 16 lanes.
2. For every input mode `k` (each mode except `m`, in ascending order),
   read row `coord[k]` of factor matrix `k` through the Cache Engine, at
   `fm_base[k] + coord[k]`. Multiply it into `prod`.
3. Add `prod` into `acc`. For three modes this is
   `acc[r] += x * row1[r] * row2[r]`.
4. When the next element has a larger output coordinate, push `acc` to the
   DMA output buffer and clear it. Also push a zero row for every coordinate
   skipped in between. After the last element, flush the remaining rows up
   to `out_dim`.

The output is therefore always exactly `out_dim` consecutive words, one DMA
write stream.

An element whose output coordinate is below the current row (the input is
not sorted) or beyond `out_dim` is skipped and counted in `order_err_count`.

Timing: about `4 + 3(N-1)` cycles per element, plus `N-1` cache latencies
(2 cycles each on a hit). There is one PE, with no overlap between elements. The paper
leaves the PE organisation open.

## Cache Engine

* `NUM_LINES` lines of `LINE_WORDS` words each (default 1, one row per
  line), `ASSOC`-way set associative. The word address splits into tag,
  set index and word offset within the line.
* A miss fills an invalid way if the set has one, otherwise the set's
  round-robin way. It reads the whole aligned line with back-to-back
  requests and forwards the requested row once the line is complete.
* Requests are handled one at a time, in order.
* Hit timing: a request accepted in cycle 0 is answered with `rsp_valid` in
  cycle 2. A miss answers one cycle after the last word of the line returns.
* The cache is read only, because only input factor matrices go through it.
  `invalidate` clears it in one cycle.

## DMA Engine

Each of the two buffers is a `BUF_DEPTH`-word FIFO.

* **Input buffer.** The command `(addr, len)` streams `len` consecutive
  words to the PE. It keeps at most `BUF_DEPTH` words in flight or
  buffered, so streaming reaches one word per cycle when
  `BUF_DEPTH > memory latency`. The test measures 200 words in 212 cycles.
* **Output buffer.** The command `(addr, len)` opens a region. Pushed words
  are written to consecutive addresses with all byte lanes enabled.
  `wr_busy` stays high until the last write of the region has been issued.

## Data selection logic

The controller's consistency rule is first-come first-served across its
engines. Implementation:

* A client raising a request joins an arrival queue. Requests raised in the
  same cycle join in client order: cache, DMA in, DMA out, remapper.
* The queue head is granted when memory is ready.
* If the queue is empty, a new request is granted in the cycle it appears
  (bypass). A lone streaming client therefore gets every cycle.
* Memory must return read data in request order. A tag FIFO of the issuing
  client (`MAX_OUTSTANDING` deep) routes each response. Reads stall when the
  FIFO is full. Writes have no response.

No ordering is enforced between a write by one engine and a read of the same
address by another. The paper's consistency argument is that the engines
never touch the same location at the same time. The host sequence above
respects this.

## Memory port

| Signal | Meaning |
|---|---|
| `mem_req_valid`, `mem_req_ready` | request handshake |
| `mem_req` (`mem_req_t`) | `we`, `addr` (word), `wdata` (512 bit), `wstrb` (64 byte enables) |
| `mem_rsp_valid`, `mem_rsp_data` | read data, in request order, one per cycle, cannot be refused |

This is the simplest interface that carries the three transfer kinds: bulk
reads, single-row reads and byte-enabled single-element writes. An AXI
adapter would sit between it and a vendor memory controller.

## Parameters

The paper lists which sizes are synthesis-time parameters but gives no values
except the typical rank. All defaults below are this implementation's choices.

| Parameter | Default | Where |
|---|---|---|
| `CACHE_LINES` | 1024 (64 KiB) | cache lines |
| `CACHE_ASSOC` | 4 | ways |
| `CACHE_LINE_WORDS` | 1 | cache line width in 512-bit words |
| `DMA_BUF_DEPTH` | 64 words | each DMA buffer |
| `REMAP_BUF_DEPTH` | 64 words | remapper DMA buffer |
| `MAX_PTRS` | 65536 | remapper pointer table (256 KiB) |
| `MAX_OUTSTANDING` | 32 | reads in flight |
| `NMODES` | 3 | tensor modes. The paper's datasets have 3 to 5; 4 and 5 are tested. |
| `RANK`, `MEM_DW` (package) | 16, 512 | fixed together: one row per word |

## Departures from the paper and open points

* The paper's parameters "number of DMAs" and "buffers per DMA" are fixed
  at one.
* Up to 7 modes fit the 3-bit mode field. Only 3, 4 and 5 are simulated.
* The rank is fixed at 16, the typical value. Ranks 8 or 32 would need rows
  of half or two words.
* The remapper's pointers are loaded by the host. The paper does not say how
  they are initialised.
* There is no partitioned tensor layout. Output modes longer than `MAX_PTRS`
  need host-side passes.
* The paper does not fix the number format. Arithmetic here is integer.
* There is no performance-model or design-space exploration logic. The
  paper describes that as software.

## Simulation

Every testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mc_pkg.sv \
    tb/tb_mttkrp_top.sv --top-module tb_mttkrp_top -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_mttkrp_top` | Full CP-ALS sweep (remap and compute for modes 0, 1, 2) at default parameters on a random 37x29x23 tensor with 301 non-zeros. Checks every remapped element and every output value against a reference. Also checks that each mechanism occurred: cache hit, miss and invalidate, arbiter bypass and queued grant, memory stall, zero rows, pointer range drop. |
| `tb_mttkrp_nmodes` | The same sweep for 4-mode and 5-mode builds (`NMODES = 4, 5`), on two parallel instances |
| `tb_memory_controller` | All four engines active at once under memory stalls, 2-word cache lines |
| `tb_tensor_remapper` | grouping, byte-enable isolation, pointer advance, range drop, store rate |
| `tb_processing_element` | MTTKRP rows, zero rows, out-of-order detection, with randomised port timing |
| `tb_cache_engine` | data, hit/miss sequence against a reference cache model (4-word lines), hit latency, invalidate |
| `tb_dma_engine` | stream data, buffer credit, stream rate, write region |
| `tb_data_selection_logic` | FCFS order at every grant, bypass, response routing, writes |

`tb/ext_mem_model.sv` takes `LATENCY` and `STALL_PCT` parameters for memory
timing.
