# A sparsity-aware RISC-V compute cluster

Sparse and irregular kernels, such as sparse matrix products, graph updates and stencils on odd grids, usually waste most of a processor's floating-point units. The cores spend their issue slots on address arithmetic, index loads, loop counters and compare-and-branch code for merging index lists.

This design moves all of that bookkeeping into hardware next to the FPU. The integer core only sets things up: it configures address generators ("streamers"), offloads one loop body to a hardware loop buffer, and then waits. Every cycle after that, the FPU reads its operands from, and writes its results to, streams:

- affine 1–4D array walks;
- indirect walks through an index array;
- merges of two sparse index lists (intersection or union).

These streams are fed from a banked, single-cycle scratchpad. A DMA engine fills the scratchpad from the rest of the system, ideally while the previous tile is being computed.

The RTL here is one **compute cluster**: eight worker FP datapaths and a DMA around a 128 KiB, 32-bank scratchpad. At chip scale, many such clusters (8 worker cores plus 1 DMA-control core each) are tiled into groups and chiplets with HBM memory. That level is not part of this RTL.

## Cluster at a glance

```
        offload (instr, operand) x8          DMA descriptor      512-bit system port
                 |                                 |                     |
        +--------v---------+                 +-----v---------------------v-+
        | frep_sequencer   |  x8             |        cluster_dma          |
        +--------+---------+                 +-------------+---------------+
                 |                                         | 512-bit (8 banks at once)
        +--------v-----------------------+                 |
        | fp_subsystem                   |                 |
        |  FP regfile   fpu_fma64        |                 |
        |  su_streamer x3 + su_idx_cmp   |                 |
        +---+--------+--------+----------+                 |
            | SU0    | SU1    | SU2       (24 streamer ports + 9 core ports)
        +---v--------v--------v----------------------------v--+
        |                 tcdm_interconnect                  |
        +---+-----+-----+--------------------------------+----+
            |     |     |          32 x spm_bank (64-bit x 512)
```

| Quantity | Value |
|---|---|
| Worker FP datapaths | 8 (plus one DMA-control core's data port) |
| Scratchpad | 128 KiB = 32 banks x 512 words x 64 bit, word-interleaved |
| Scratchpad bandwidth | 32 x 8 B per cycle (256 GB/s at 1 GHz) |
| Streamers per worker | 3: SU0 and SU1 are affine + indirect; SU2 is affine + joint-index writer |
| FP arithmetic | FP64 fused multiply-add, one result per cycle per worker |
| DMA | 1D/2D, 512 bit (one 64-byte line) per cycle |

All sizes are parameters with these values as defaults. They are collected in `rtl/occamy_pkg.sv`, which also holds the shared structs (`mem_req_t`, `wide_req_t`, `su_cfg_t`, `dma_cfg_t`) and enums.

## Streams: how the FPU gets its operands

This is the part that makes the cluster work, and the least obvious one.

### Register mapping

When `ssr_en_i` is high, FP registers `ft0`, `ft1` and `ft2` (f0–f2) stop being registers:

- Reading `ftN` pops the head of streamer N's data FIFO.
- Writing `ftN` (if streamer N is configured to write) pushes into its FIFO, and the streamer stores it to memory.

An instruction issues only when every stream operand it reads is present and its stream destination has room. Otherwise the FP side stalls. There is no other synchronisation.

Consequently, a sparse-dense dot product is a one-instruction loop:

```
frep   n-1, 1 instruction        # loop buffer: replay the next instruction n times
fmadd.d fa0, ft0, ft1, fa0       # ft0 = a.values[i] (affine), ft1 = b[a.idx[i]] (indirect)
```

### Address generation (`su_streamer`)

Each streamer is configured with an `su_cfg_t`:

- **Affine mode.** Up to 4 nested loops (`dims`, `bound[d]` = trip count - 1, signed byte `stride[d]`). The address is `base + sum(off[d])`. Each `off[d]` is kept as a running sum, so no multipliers are needed.
- **Indirect mode** (SU0, SU1 only).
  - The streamer reads 64-bit words of an index array at `idx_base`, holding 8, 16 or 32-bit indices (`idx_size`, `num_idx` = count - 1).
  - It unpacks them and forms element addresses `base + (idx << idx_shift)`.
  - Index-word fetches and element accesses share the streamer's one scratchpad port. Element accesses have priority.
- **Write mode.** The streamer drains its FIFO to successive affine addresses.

Reads are issued only when a FIFO slot is reserved for the response (credit counting), so the scratchpad never has to be back-pressured. A granted read returns data one cycle later, through a one-stage response register.

In steady state an affine stream delivers one element per cycle. An indirect stream with 16-bit indices needs one extra port cycle per four elements (about 1.25 cycles per element), and the FIFO hides that jitter.

### Sparse-sparse merging (`su_idx_cmp`)

With `cmp_mode_i` set, SU0 and SU1 do not stream freely. Each exposes the index at the head of its index list. The comparator looks at both heads every cycle and sends each side one of four commands:

| Command | Meaning |
|---|---|
| ADV | fetch this element, move to the next index |
| SKIP | move to the next index without fetching |
| ZERO | push a +0.0 into the data FIFO instead of fetching (union only) |
| NONE | wait |

- **Intersection.** Equal heads mean both sides advance and one element pair is produced. Otherwise the smaller head is skipped. The merge ends when either list is exhausted. The FPU sees only matching pairs, so `fmul` or `fmadd` over `ft0, ft1` computes sparse x sparse.
- **Union.** The smaller head advances and the other side receives a ZERO. Equal heads advance both. The merge ends when both lists are exhausted. `fadd ft2, ft0, ft1` therefore computes a sparse + sparse sum.

In either mode, each produced index can also be sent to SU2 (`iout` in SU2's configuration). SU2 then writes the joint index list beside the values it writes, which yields the result's sparse format with no instruction spent on it.

Indices must be sorted ascending. The comparator makes one decision per cycle, and each decision waits until both sides are ready to take it.

## Hardware loop buffer (`frep_sequencer`)

The sequencer sits between the integer core's offload port and the FP subsystem. Normal instructions pass straight through.

An `frep` instruction (custom opcode `0001011`) starts a loop:

- Bits [31:20] hold the body length - 1.
- The integer operand sent with it holds the iteration count - 1.

The body instructions are forwarded as they arrive and recorded into a 16-entry buffer. The sequencer then replays them for the remaining iterations on its own, and `in_ready_o` stays low until it has finished. `looping_o` is high while a loop is being recorded or replayed.

## FP datapath (`fp_subsystem`, `fpu_fma64`)

The FMA is a single combinational FP64 fused multiply-add with round-to-nearest-even.

1. The 106-bit product and the aligned addend are placed in a 220-bit window, and bits shifted out of it collapse into a sticky bit.
2. After the signed sum, the result is normalised by a leading-one search and rounded once.
3. NaN, infinity and signed zeros follow IEEE 754. Subnormal inputs and results are flushed to zero.

The FP subsystem decodes `fmadd.d`, `fmsub.d`, `fnmsub.d`, `fnmadd.d`, `fadd.d` (executed as `a*1.0+b`), `fsub.d` and `fmul.d` (executed as `a*b+(-0.0)`). The result is written at the end of the issue cycle, so an accumulation chain runs at one FMA per cycle. Other encodings are dropped and counted in `illegal_o`.

## Scratchpad and interconnect (`tcdm_interconnect`, `spm_bank`)

- **Banking.** Bank = address bits [7:3]: consecutive 64-bit words go to consecutive banks.
- **Narrow ports.** 33 ports (24 streamers, 9 integer cores). Requests to different banks are granted in the same cycle. For each bank, a round-robin pointer picks one of the contenders. Read data returns in the next cycle.
- **Wide port.** The DMA's 512-bit port accesses one 64-byte line, which spans 8 adjacent banks. It is always granted and takes priority over narrow requests on those 8 banks.
- **Conflicts.** A narrow master simply holds its request until granted. The cluster counts cycles with at least one waiting request in `bank_conflicts_o`.

## DMA (`cluster_dma`)

A descriptor (`dma_cfg_t`) copies `reps+1` rows of `len` bytes. Row r starts at `src + r*src_stride` and goes to `dst + r*dst_stride`, so `reps = 0` is a plain 1D copy. `to_ext` selects the direction.

The read and write sides are decoupled by an 8-entry line FIFO. The DMA issues a read only when the FIFO has room for the response. With a system read latency below 8 cycles, it sustains one 64-byte line per cycle.

## Using the cluster

The top module is `occamy_cluster`. The integer cores are not part of the RTL, so whatever drives the cluster takes their role:

1. Load data with the DMA: `dma_cfg_i`, pulse `dma_start_i`, wait for `dma_busy_o` low. The system side is `ext_req_o` / `ext_gnt_i` / `ext_rvalid_i` with in-order read data.
2. Per worker, set `su_cfg_i[w][s]` and `cmp_mode_i[w]`, raise `ssr_en_i[w]`, and pulse `su_start_i[w]`.
3. Offload instructions on `off_valid_i/off_instr_i/off_op_i`, with `off_ready_o` as the handshake.
4. Wait for `looping_o` and `su_busy_o` to drop. Read registers through `dbg_raddr_i/dbg_rdata_o`, or the scratchpad through a `core_req_i` port or the DMA.

At the interconnect, worker w's streamer s is master `3w+s` and integer core c is master `24+c`.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv` that prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/occamy_pkg.sv tb/tb_occamy_cluster.sv --top-module tb_occamy_cluster
./obj_dir/Vtb_occamy_cluster
```

`tb_occamy_cluster` runs the cluster at its default size. It:

- DMAs a 40 KiB working set in (1D and 2D);
- has six workers compute sparse-dense dot products with 8, 16 and 32-bit indices, all at once;
- has worker 6 compute a sparse-sparse dot product by intersection;
- has worker 7 compute a sparse + sparse sum by union, writing values and joint indices through SU2;
- DMAs that result out and reads a word through a core port.

It compares every result with a reference. It also requires that each mechanism actually occurred: loop replay, stream stalls, bank conflicts, index skips and zero injection.

The unit testbenches cover:

| Testbench | What it covers |
|---|---|
| `tb_fpu_fma64` | 40,000 random FMAs against exactly computable references |
| `tb_tcdm_interconnect` | random traffic against a memory model, with a starvation bound |
| `tb_su_streamer` | affine 3D and indirect reads |
| `tb_cluster_dma` | transfer shapes and throughput |

## Where this departs from a full chip

- Only the cluster is built. The integer cores, instruction caches, multiplier/divider, the group and chiplet interconnects (AXI crossbars), HBM and die-to-die links are absent.
- The FPU is FP64-only. The SIMD narrow formats (FP32, FP16, FP8 variants) and the widening dot-product operations of a full implementation are missing, and subnormals are flushed.
- The FP load/store unit is missing. FP data reaches the FPU only through streams.
- DMA transfers are 64-byte aligned and multiples of 64 bytes.
- The following are choices of this design rather than given facts:
  - the `frep` encoding, loop-buffer depth and FIFO depths;
  - round-robin arbitration and wide-port priority;
  - word interleaving;
  - the one-decision-per-cycle comparator;
  - the single-cycle FMA.

  A real FPU would be pipelined, and accumulation chains would then need several accumulators to run at one FMA per cycle.
