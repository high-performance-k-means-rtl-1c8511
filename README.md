# A Map-Reduce k-means accelerator in SystemVerilog

k-means clustering assigns each of N samples (D-dimensional points) to the
nearest of K centroids. It then moves every centroid to the mean of its samples,
and repeats until the centroids stop moving. Almost all of the work is the
distance step: N·K·D subtract-multiply-adds per iteration. The step after it,
averaging, only touches K·D values.

This accelerator splits each iteration the way a Map-Reduce job would:

* **Map.** M identical *mapper* cores each take one equal slice of the sample
  set and run it against the current centroids. For its slice, each core works
  out a label per sample, and also K partial sums, K counts and a partial
  distortion.
* **Reduce.** One *reducer* core adds up the M partial results and divides the
  sums by the counts. It writes the new centroids over the old ones and decides
  whether the run has converged.

All data moves through DMA engines under a hardware *DMA scheduler*. A hardware
*iteration controller* runs Map, then Reduce, then Map again, until the reducer
reports convergence. So once the data is in memory, a whole k-means run needs a
single start pulse and no host software in the loop.

All arithmetic is IEEE-754 single precision (fp32).

The default build has M = 12 mappers, K = 4 clusters and D = 4 dimensions. An
8 MB limit applies to each DMA command. At 100 MHz, each mapper consumes one
32-bit dimension per cycle, which is 3.2 Gbit/s per mapper and 38.4 Gbit/s for
twelve.

## One iteration, step by step

```
            start
              |
     +--------v---------+   map_start     +-----------------------------+
     | iteration_       |---------------->| mapper_block                |
     | controller       |<----------------|  dma_scheduler (M managers) |
     |                  |  map_done[M]    |  M x kmeans_map             |
     |                  |                 +-----------------------------+
     |                  |  reduce_start   +-----------------------------+
     |                  |---------------->| reducer_block               |
     |                  |<----------------|  dma_scheduler (1 manager)  |
     |                  |  reduce_done,   |  kmeans_reduce              |
     +------------------+  iteration_done +-----------------------------+
```

1. **Map start.** The controller pulses `map_start`.
   - The mapper-side scheduler gives each of its M DMA managers an ID (0..M-1).
     Each manager computes its addresses from that ID and launches two DMA
     transfers: part *i* of the sample set into mapper *i*'s sample stream,
     and mapper *i*'s label stream back out to part *i* of the label area.
   - At the same moment, every mapper core reads the K·D centroids from memory
     and starts clustering.
2. **Map end.** When a mapper has labelled its last sample, it writes its
   K·(D+1)+1 words of intermediate results to its own block of the
   intermediate area. Mapper *i* reports `map_done` once both its core and
   its DMA manager have finished. The controller waits for all M reports.
3. **Reduce.** The controller pulses `reduce_start`.
   - The reducer-side scheduler streams all M intermediate blocks (one
     contiguous area) into the reducer.
   - The reducer adds them up, divides, and writes K·D new centroids over the
     old ones.
   - It then compares the total distortion with the previous iteration's
     distortion.
4. **Check.** If |distortion − previous distortion| ≤ `threshold`, the reducer
   raises `iteration_done`. The controller then ends the run: `done` pulses and
   `converged` is high. Otherwise the controller starts the next iteration with
   the new centroids.
   - An optional `max_iter` (0 = no limit) ends a run that does not converge.
   - The first iteration never counts as converged, because it has nothing to
     compare against.

Every step is a hand-over between two of these blocks. None of them stalls the
others, except through the valid/ready handshakes on the streams and memory
ports.

## Memory layout

All addresses are byte addresses of 32-bit words. The four base addresses are
inputs of the top module.

| Area | Base | Contents |
|---|---|---|
| Samples | `sample_base` | N = M·`n_per_map` samples. Each is D consecutive fp32 words. Part *i* starts at `sample_base + i·n_per_map·D·4`. |
| Labels | `label_base` | One word per sample (the cluster index, 0..K-1), in sample order. |
| Intermediate | `mediate_base` | M blocks of K·(D+1)+1 words. Block *i* is at `mediate_base + i·(K·(D+1)+1)·4`. Within a block, each cluster has `count` (unsigned integer) followed by its D fp32 sums. The fp32 distortion comes last. |
| Centroids | `centroid_base` | K·D fp32 words. Centroid *k*, dimension *d* is at word *k·D+d*. The run overwrites this area, so it holds the final centroids at the end. |

## The mapper core (`kmeans_map`)

This is the part that sets the speed, and the one whose timing takes the most
care.

Samples arrive **one dimension per beat** on a 32-bit stream. The core keeps
the K·D centroids in registers, loaded over its memory port at the start of
each run. It has K subtract-square-add units, one per centroid, working side by
side:

* **Stage 1 (distance).** On each accepted beat, with dimension *d* of the
  current sample, every unit adds (x_d − c_kd)² to its running sum. The
  first dimension starts a new sum. On the last dimension, a K-way
  comparison chain picks the nearest centroid, with the lowest index winning a
  tie. The sample, its label and its distance then move on to stage 2.
* **Stage 2 (label and accumulate).** The label is offered on the label
  stream. In the cycle it is accepted, the core does three things for the
  chosen cluster: it adds the sample into that cluster's D sums, increments
  the cluster's count, and adds the distance into the distortion.

Stage 1 accepts the next sample's first dimension in the cycle after the
previous sample's last one. So with both streams always ready, a new sample
enters every D cycles: the **initiation interval is D**. The only stall inside
the core comes from stage 2: if the label stream is not ready, stage 2 stays
occupied. Stage 1 then holds back the *last* dimension of the next sample
until stage 2 frees up.

The distance is the squared Euclidean distance. The square root would not
change which centroid is nearest, so it is not computed. The distortion is the
sum of squared distances.

State machine: `IDLE → LOAD` (K·D reads, one outstanding) `→ RUN → WRITE`
(K·(D+1)+1 posted writes) `→ DONE`, and `ap_done` pulses for one cycle.

## The reducer core (`kmeans_reduce`)

The reducer has four phases:

* **ACC.** Takes M·(K·(D+1)+1) words from its stream, one per cycle. It tracks
  where it is in the block layout: for cluster *k*, word 0 is the count and
  words 1..D are the sums; after the last cluster comes the distortion. Counts
  are added as integers; sums and distortions are added in fp32.
* **DIV.** Handles one cluster per cycle. D fp32 dividers divide its sums by
  its count, which is first converted to fp32.
* **WRITE.** Writes the K·D new centroids over the old ones. A cluster that got
  no sample in this iteration is skipped, so it **keeps its previous
  centroid** rather than becoming 0/0.
* **CMP.** Compares the absolute change of the total distortion with
  `threshold`. It then saves the current distortion for the next iteration.
  `first_iter` clears the saved value at the start of a run.

## DMA scheduling

Each scheduler is a small two-state FSM. On start, it launches all of its *DMA
managers* at once, then waits for all of them: each manager's completion is
kept in a sticky mask. It then pulses `done`, and also gives a per-manager
`mgr_done`.

A manager has three parts:

* **ID generator.** Gives the manager's data block the ID `id_base + INDEX`.
  INDEX is the manager's position in the scheduler, so manager *i* handles part
  *i*.
* **Address calculator** (`address_calc`). A combinational
  `addr = base + ID × length`. This one formula locates every part of the
  sample, label and intermediate areas.
* **Simple-mode DMA driver.** A DMA engine in simple mode takes one command
  (an address and a length) at a time, up to 8 MB. The driver cuts a longer
  transfer into 8 MB pieces plus a remainder. It issues them one after another,
  waiting for the engine's completion pulse between pieces.

The mapper-side scheduler has M managers. Each one drives a read channel (the
samples) and a write channel (the labels). The reducer-side scheduler has one
manager with a read channel only.

Mapper *i*'s intermediate-block address is also computed with an
`address_calc` (`mediate_base + i × block size`).

## fp32 arithmetic (`kmeans_pkg`)

Add, subtract, multiply, divide and unsigned-to-float conversion are
combinational functions. They round to nearest, with ties going to even.

Simplifications:

* Subnormal inputs and results are flushed to zero.
* Overflow gives infinity.
* NaNs are not handled, because finite data never produces them here.

A dedicated testbench checks the functions bit for bit against
double-precision arithmetic rounded to single precision. For +, −, × and ÷ of
single-precision operands, that double rounding is exact.

Every operator is a single combinational function, with no pipeline registers
inside it. A synthesis for a real clock rate would need to retime or pipeline
the subtract-multiply-add path of the mapper, and the dividers of the reducer.

## Throughput and where the time goes

The Map phase takes about n_per_map·D cycles plus a fixed overhead of about 60
cycles. That overhead covers loading the centroids and writing the
intermediate results. The Reduce phase does not depend on N. It reads
M·(K·(D+1)+1) words, does K division steps and K·D writes, and checks
convergence, which comes to about 280 cycles at the defaults.

So the Map phase dominates once a mapper's slice is more than a few hundred
samples. `tb_kmeans_workload_sweep` measures one iteration at the defaults. The
DMA engines and memory in that testbench never stall:

| N | Cycles per iteration | Bits per cycle | At 100 MHz | Map share |
|---|---|---|---|---|
| 12 | 344 | 4.5 | 0.45 Gbit/s | 18 % |
| 1,200 | 740 | 207.6 | 20.8 Gbit/s | 62 % |
| 12,000 | 4,340 | 353.9 | 35.4 Gbit/s | 94 % |
| 480,000 | 160,340 | 383.2 | 38.3 Gbit/s | 99.8 % |
| 2,075,256 | 692,092 | 383.8 | 38.4 Gbit/s | ≈100 % |

Throughput here means N·D·32 bits divided by the iteration time.

The ceiling is 12 × 32 = 384 bits per cycle. A real memory system would not
reach it: the streams of several mappers have to share memory ports, and this
testbench does not model that.

## Top-level interface (`kmeans_top`)

The top has four parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `M` | 12 | Number of mappers. |
| `K` | 4 | Number of clusters. |
| `D` | 4 | Dimensions per sample. |
| `MAX_BYTES` | 8388608 | Largest single DMA command. |

The DMA engines, the bus interconnect and the memory are **not** in this RTL.
Their connections are ports of the top:

* **Run control.**
  - Inputs: `start`, `n_per_map`, the four base addresses, `threshold` (fp32)
    and `max_iter`.
  - Outputs: `busy`, `done` (one-cycle pulse), `converged`, `iterations`, and
    the final `distortion`.
* **Per mapper (arrays of size M).**
  - The sample stream `map_sample_t*` and the label stream `map_label_t*`
    (with `tlast`). These are AXI-Stream-style valid/ready.
  - The two DMA command ports, `map_mm2s_cmd_*` and `map_s2mm_cmd_*`, each with
    a completion input (`*_done`, one pulse per command).
  - The core's memory port `map_mem_*`.
* **Reducer.** The intermediate stream `red_med_t*`, its DMA command port
  `red_mm2s_cmd_*` with `red_mm2s_done`, and a write-only memory port
  `red_mem_req_*`.

The memory ports use a simple request handshake (`valid`, `ready`, `we`,
`addr`, `wdata`). Read data returns in order on `rsp_valid`/`rsp_rdata`, one
word per request, and writes are posted. A bridge to a full AXI4 master would
sit outside this RTL.

The reset (`rst_n`) is asynchronous and active low. All sequential state is
reset.

## Where this design departs from the original

* **No DMA engines, interconnect or memory.** These are vendor IP blocks and
  off-chip parts, so their connections are brought out as ports. The
  testbenches model them in behaviour only.
  - A DMA command is a valid/ready handshake with an address and a length,
    plus a completion pulse. It stands in for register writes and an
    interrupt.
  - The cores' memory-mapped masters use the simple request port described
    above, not AXI4 bursts.
* **Equal parts only.** The sample set must be a multiple of M samples, since
  every part has length `n_per_map`. For example, a 2,075,259-sample set with
  M = 12 leaves 3 samples that cannot be assigned.
* **Convergence test.** The test is on the absolute change of the summed
  squared distance. `max_iter` is an extra guard.
* **Empty clusters** keep their previous centroid.
* **Memory-bandwidth sharing is not modelled.** In a real system, several
  mappers share one memory port, which makes throughput grow more slowly
  beyond about eight mappers. Here the testbench memory serves every mapper at
  once.
* **Completion rules are this design's own.** A mapper counts as done when both
  its core and its DMA manager are done, and the same holds for the reducer.
  The labels, encoded as one 32-bit word each, are also this design's own
  choice.

## Simulating it

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle-count watchdog. The
testbenches use `tb/tb_fp_pkg.sv`, which converts between fp32 and `real`.

To build and run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/kmeans_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_kmeans_top.sv \
    --top-module tb_kmeans_top -o sim
./obj_dir/sim
```

Swap the last source file and the top-module name to run another testbench.
`tb_kmeans_pkg` needs only `rtl/kmeans_pkg.sv` and `tb/tb_fp_pkg.sv`.

| Testbench | What it shows |
|---|---|
| `tb_kmeans_pkg` | Checks fp32 add, subtract, multiply, divide, integer conversion and compare, bit for bit, on 20,000 random operand pairs. |
| `tb_address_calc` | Checks `base + ID·length` on corner and random values. |
| `tb_simple_dma_driver` | Checks splitting into pieces: a small limit, and a 20,000,000-byte transfer split at the real 8 MB limit. Also covers a zero length and a slow engine. |
| `tb_dma_manager` | Checks ID assignment, the addresses on both channels, and that `done` waits for both channels. Covers a manager without a write channel. |
| `tb_dma_scheduler` | Checks that each of N managers transfers its own part, that `done` comes only after the last of them has finished, and that a start while busy is ignored. |
| `tb_iteration_controller` | Checks the Map/Reduce sequencing, convergence, `max_iter`, and map_done reports arriving in any order. |
| `tb_kmeans_map` | Checks labels, sums, counts and distortion against a reference model, with the default K and D. Checks the initiation interval of D cycles per sample. Covers stalls on both streams. |
| `tb_kmeans_reduce` | Checks the new centroids, the skipping of empty clusters, and the convergence flag across iterations. |
| `tb_mapper_block`, `tb_reducer_block` | Run each block with its scheduler and a behavioural DMA engine and memory. |
| `tb_kmeans_top` | Runs complete runs at small sizes (M=3, K=3, D=2) with a small DMA limit, comparing against a double-precision k-means. Counts that every mechanism occurred: multi-piece DMA, stream stalls, empty clusters, convergence, and the `max_iter` stop. |
| `tb_kmeans_workload_sweep` | Runs one iteration at the defaults for N from 12 to 2,075,256 samples. Checks labels and centroids, a Map time of D cycles per sample, and that throughput and the Map share grow with N. |
| `tb_kmeans_top_full` | One complete run at the defaults (M=12, K=4, D=4): 1,200 samples, which converges in 3 iterations. |

The fp32 results of the hardware and the `real` reference can differ in the
last bits. So the end-to-end testbenches compare centroids and distortions with
a relative tolerance, and compare labels exactly.

## Source files

| File | Contents |
|---|---|
| `rtl/kmeans_pkg.sv` | fp32 type and functions, and shared constants. |
| `rtl/kmeans_map.sv` | Mapper core. |
| `rtl/kmeans_reduce.sv` | Reducer core. |
| `rtl/address_calc.sv` | `base + ID·length`. |
| `rtl/simple_dma_driver.sv` | Splits one transfer into DMA commands of at most `MAX_BYTES`. |
| `rtl/dma_manager.sv` | ID generator, address calculators and drivers for one DMA engine. |
| `rtl/dma_scheduler.sv` | Launches N managers and collects their completions. |
| `rtl/mapper_block.sv` | The M mapper cores and their scheduler. |
| `rtl/reducer_block.sv` | The reducer core and its scheduler. |
| `rtl/iteration_controller.sv` | The Map → Reduce → check loop. |
| `rtl/kmeans_top.sv` | Top level. |
