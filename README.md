# NeuroFlex RTL: column-level ANN/SNN co-execution

NeuroFlex is a sparse inference accelerator for quantised neural networks.
Its main idea is that **every output column of a layer can be computed in
one of two ways that give exactly the same integer**:

* as an ANN neuron: multiply-accumulate over the matched non-zeros, then the
  integer QCFS activation (quantise, clip, floor, shift); or
* as a spiking neuron: the activations are turned into spike trains,
  weights are only *added* (no multiplier), and an integrate-and-fire neuron
  with spike inhibition counts output spikes over 3L-1 = 23 timesteps.

The SNN form costs less energy per match and takes longer. The ANN form is
faster and costs more. A compiler decides offline, column by column, which
form to use, and ships the decision as one bit per column. The chip has an
ANN core and an SNN core that share a banked on-chip store (the FiberCache),
two crossbars and an output compressor. Both cores work on the same layer at
the same time. Every tensor lives in memory as INT8 in a bitmap-compressed
format, whichever form produced it. Spikes exist only inside the SNN
processing elements.

This repository holds synthesizable SystemVerilog for the accelerator as the NeuroFlex
paper ("NeuroFlex: Column-Exact ANN-SNN Co-Execution Accelerator with
Cost-Guided Scheduling") describes it. The design
follows the paper's configuration: 16 + 16 PEs, 128-element chunks, a 512 KB
32-bank store, 32x32 crossbars, L = 8 and 23 timesteps. The paper leaves
many details open, such as encodings, handshakes and update equations. Where
it does, this RTL makes its own choices, and the text below marks them.

## 1. Why the two forms agree

This is the least obvious part of the design, and the SNN datapath depends
on it.

**ANN form.** For one output neuron, `acc = sum_k A[k]*B[k]` runs over the
positions where both the activation and the weight are non-zero. The output
level is

    q = clip( floor( (acc + floor(theta/2)) / theta ), 0, L )

where `theta` is the integer quantisation step (threshold / L) and L = 8.
`nf_qcfs` computes this without a divider. It uses a ladder of L comparators,
`q = sum_{k=1..L} [acc + theta/2 >= k*theta]`.

**Spike code.** Activations are themselves QCFS levels, so they lie in 0..L.
`nf_spike_gen` sends level `a` as a thermometer code: one spike in each of
the first `a` timesteps. The timestep-t input current of the neuron is
then

    O[t] = sum over matches with a_k >= t of B[k]        (t = 1..L)

and `sum_t O[t] = acc`.

**Pseudo and correction accumulators.** Every match has a non-zero
activation, so every match spikes at t = 1. The PE therefore keeps:

* one pseudo-accumulator `P = sum B[k]` over all matches (12 bits); and
* seven correction accumulators. `C[t]` (t = 2..8, 10 bits) adds B[k]
  whenever `a_k < t`, which is when the train has *no* spike at t.

Then `O[1] = P` and `O[t] = P - C[t]`. This costs 8 adders, with no
multiplier and no per-timestep buffer. It is the paper's "one 12-bit pseudo
accumulator and seven 10-bit correction accumulators", with the thermometer
code making the pseudo/correction split exact.

**Integrate-and-fire window (`nf_membrane_unit`).** The membrane V starts
at `floor(theta/2)`, which is the QCFS shift. Each timestep runs as
follows:

    V += O[t]
    if V >= theta and count < L : count += 1, V -= theta   (spike, soft reset)
    elif V < 0  and count > 0   : count -= 1, V += theta   (inhibitory spike)

The quantity `V + count*theta` always equals `theta/2 + sum of inputs so far`.
After the L input timesteps the whole dot product has entered the neuron.
The count then moves at most one step per timestep towards
`clip(floor((acc+theta/2)/theta),0,L)` and stops there. It needs at most L
more steps, and the window has 2L-1 = 15 more. So after T = 3L-1 = 23
timesteps the count is exactly the ANN level. The unit then outputs the
count and resets V to `theta/2` for the next neuron.

The paper names the three operations (spike generation, spike count,
membrane reinitialisation) and the 23-timestep window. It does not give the
equations. The thermometer code, the one-spike-per-step rule and the
inhibitory spike are this design's reading of "spike accumulation and
inhibition". The equivalence holds only while the sums fit the accumulator
widths the paper gives (12-bit P, 10-bit C). The accumulators wrap on
overflow.

## 2. Data format: fibers, lines and chunks

A *fiber* is one row of activations or one column of weights, cut into
128-element pieces. Each piece is a *line* (`nf_pkg::line_t`):

| field  | bits   | meaning                                              |
|--------|--------|------------------------------------------------------|
| `mask` | 128    | presence bitmap, bit i = element i is non-zero        |
| `vals` | 128x8  | the non-zeros packed, lowest position first           |
| `last` | 1      | no continuation line                                  |
| `next` | 16     | address of the continuation line                      |

A *chunk* (`chunk_t`) is the activation line plus the weight line covering
the same 128 positions of one dot product. A PE handles one chunk at a time.
The element at position p sits at `vals[popcount(mask[p-1:0])]`, so the
prefix-count circuits are what locate operands.

Layout in the store, set by the layer command (`cmd_t`):

* row m of A starts at `a_base + m*kseg`;
* column n of B starts at `b_base + n*kseg`;
* output row m, segment j starts at `out_base + m*nseg + j`.

Here `kseg = ceil(K/128)` and `nseg = ceil(N/128)`. An output written this
way is already laid out as the next layer's A. Point the next command's
`a_base` at the previous `out_base` to chain layers.

## 3. Chip organisation

    host/HBM port --> nf_fiber_cache (32 banks, 4096 lines = 512 KB)
                        |   ^                       ^
              rd A,rd B |   | write                 |
                        v   |                       |
          nf_xbar (A lines), nf_xbar (B lines)   nf_compressor
                        |                           ^
             per-PE nf_fiber_fetch                  | results (2:1 LRG merge)
                        |                           |
      nf_scheduler --> nf_ann_core (16 x nf_ann_pe) -+
        (queue, mask) -> nf_snn_core (16 x nf_snn_pe)-+

| module | role |
|---|---|
| `nf_pkg` | widths, `line_t`, `chunk_t`, `job_t`, `result_t`, `cmd_t`, `mode_e` |
| `neuroflex_top` | wires everything; host, command and status ports |
| `nf_scheduler` | unified command queue, mode-bitmask memory, column dispatch, segment control |
| `nf_ann_core`, `nf_snn_core` | 16 PEs each with a fetcher; greedy lowest-idle dispatch; result merge |
| `nf_ann_pe` | inner join, FIFO A/B (depth 128), MAC, QCFS |
| `nf_snn_pe` | inner join, fast + laggy prefix, FIFO A/B (depth 8), spike gen, P and C accumulators, membrane unit |
| `nf_inner_join` | bitmap AND, lowest remaining match, fast-prefix offsets |
| `nf_fast_prefix` | single-cycle prefix count |
| `nf_laggy_prefix` | 16-adder prefix sum, 16 positions per cycle, 8 cycles per chunk |
| `nf_spike_gen`, `nf_qcfs`, `nf_membrane_unit` | see section 1 |
| `nf_xbar`, `nf_lrg_arbiter` | 32x32 crossbar with least-recently-granted arbitration per bank |
| `nf_fiber_cache` | banked line store: two crossbar read ports and one write port per bank, plus host ports |
| `nf_fiber_fetch` | per-PE line fetcher; follows continuation pointers, holds one chunk ahead |
| `nf_compressor` | gathers an output segment, bitmap-encodes it, writes the line |
| `nf_fifo` | FIFO used by the PEs and the command queue |

The crossbars have 32 requesters: requesters 0..15 are the ANN PEs and
16..31 the SNN PEs. Line address `a` is in bank `a mod 32`.

## 4. The ANN processing element

On each chunk (`nf_ann_pe`):

1. **Load cycle.** The PE copies both bitmaps and both value arrays into its
   buffers. Nothing is issued in this cycle. This is the single bubble
   between consecutive chunks.
2. **Join.** Each following cycle, the inner join picks the lowest remaining
   match. Two fast prefix circuits give the activation and weight offsets,
   and both operands are pushed into FIFO A and FIFO B.
3. **MAC.** One cycle later the MAC pops both FIFOs and accumulates into a
   24-bit accumulator.

The first product therefore reaches the accumulator two cycles after the
chunk arrives, which is the paper's two-cycle warm-up. A chunk with m matches
occupies the join for m+1 cycles, or 1 cycle if it has no matches. The last
chunk of a neuron is marked by `chunk.a.last`. Once it has issued and the
FIFOs are empty, the QCFS stage registers the level into the result
register, which is held until `res_ready`.

## 5. The SNN processing element

`nf_snn_pe` uses a *fast* prefix only for the weights. The activation
offsets come from a *laggy* prefix that finishes 16 positions per cycle.
This is cheaper, and it works because the weight is all the
pseudo-accumulator needs right away:

* Each cycle, the lowest remaining match puts its **position** into FIFO A
  and its **weight** into FIFO B. Both FIFOs are 8 deep.
* When the laggy prefix has covered the head position, both FIFOs pop. The
  activation is read at the laggy offset, and `nf_spike_gen` makes its
  spike train. Only matched activations are ever spike-encoded. P adds the
  weight, and each C[t] adds it when the train has no spike at t.
* If the matches sit high in the chunk, the laggy prefix is behind and FIFO A
  fills. The join then stalls (`stat_snn_fifo_stall`).
* When the neuron's last chunk has drained, P and C are copied into the
  membrane unit. The 23-step window runs there while the PE already takes
  its next neuron. A second neuron's window waits if the previous result has
  not been taken.

This design's choice: a new chunk is loaded only after FIFO A has drained,
because FIFO entries index the current chunk's activation buffer. In steady
state one match issues per cycle. At chunk boundaries with few matches, up
to the 8-cycle laggy latency can show.

## 6. Memory side: FiberCache, crossbars, fetchers, compressor

* **FiberCache** (`nf_fiber_cache`). 32 banks of 128 lines each. The 4096
  lines hold 128 value bytes each, which makes the paper's 512 KB; the mask
  and pointer are extra storage. Reads return one cycle after the request.
  Host writes win a bank against the compressor, which then sees
  `cw_ready` low.
* **Crossbars** (`nf_xbar`). Each bank output has a least-recently-granted
  priority matrix, the arbitration a swizzle-switch crossbar keeps at its
  crosspoints. The winner sees `req_ready` in the same cycle and gets the
  line the next cycle. One crossbar carries activation lines and the other
  weight lines, so A reads and B reads do not compete.
* **Fetchers** (`nf_fiber_fetch`). Each PE has one. It fetches a neuron's
  first A and B lines. As soon as the PE has copied a chunk, it follows both
  `next` pointers to fetch the next pair while the PE computes. At most one
  chunk is staged (one credit per chunk).
* **Compressor** (`nf_compressor`). The scheduler opens a segment: one
  output row, up to 128 consecutive columns, the line address and the
  continuation pointer. Results arrive in any order from both cores through
  a 2:1 arbiter and are placed by column. When all have arrived, the line is
  bit-mapped and packed in one cycle, then written.

## 7. Scheduler and programming model

The host does the following, through `neuroflex_top` ports:

1. Writes A and B fibers into the store (`host_we`, `host_waddr`,
   `host_wline`). These ports stand in for the HBM side, which is outside
   the design.
2. Writes each layer's mode bits (`mask_we`, `mask_addr`, `mask_bit`). Bit
   `mask_base + n` = 1 runs column n on the SNN core. There are 8192 bits,
   shared by the queued layers.
3. Pushes one `cmd_t` per layer (`cmd_valid`/`cmd_ready`). The queue is 4
   deep. The command fields are M, N, kseg, a_base, b_base, out_base, theta
   and mask_base.
4. Waits for one `layer_done` pulse per layer, then reads the outputs back
   with `host_re` and `host_raddr`. `host_rvalid` and `host_rline` arrive
   together in the cycle after `host_re`.

For each row and each 128-column segment, the scheduler opens the
compressor segment. It then issues one job per column, with the mode token
from the bitmask, to the selected core. It waits whenever that core has no
idle PE. Before the next segment, it waits until the compressor has written
the current segment's line. The segment barrier is this design's choice.
It keeps one compressor buffer sufficient and costs little while 32 PEs
share a segment's 128 columns.

The store is meant to be run double-buffered. Here that is a convention for
the host, not hardware: the host fills one half of the address space while a
layer reads the other. Layers larger than the store are run as several
commands on column tiles. One neuron needs only its row fiber and its column
fiber to be resident.

## 8. Parameters

| parameter | default | where | source |
|---|---|---|---|
| `NPE_ANN`, `NPE_SNN` | 16, 16 | `neuroflex_top` | paper (Table 1) |
| `NBANK` | 32 | top, cache, crossbar | paper |
| `LINES` | 4096 | top, cache | 512 KB / 128 B (paper's capacity) |
| `NREQ` x `NBANK` | 32 x 32 | crossbar | paper |
| `CHUNK` | 128 | `nf_pkg` | paper (128-bit bitmask buffers) |
| `L`, `T` | 8, 23 | PEs, QCFS, membrane unit | paper |
| `FIFO_DEPTH` | 128 (ANN), 8 (SNN) | PEs | paper |
| `PACC_W`, `CACC_W` | 12, 10 | SNN PE | paper |
| `ADDERS` | 16 (8 cycles) | laggy prefix | paper |
| `ACC_W` | 24 | ANN PE, QCFS | this design |
| `V_W` | 18 | membrane unit | this design |
| `MASK_BITS`, `QDEPTH` | 8192, 4 | scheduler | this design |
| `PTR_W`, `IDX_W`, `TH_W` | 16 | `nf_pkg` | this design |

## 9. Where this RTL departs from the paper

* **Cache organisation.** The paper's global cache is 32-way associative,
  double-buffered, and evicts by fiber reuse, in front of HBM. Here it is a
  tagless, line-addressed store that the host fills. There are no misses,
  no replacement policy and no hardware double-buffering.
* **Crossbar transfer width.** The paper moves 128-bit beats. Here a whole
  line moves in one transfer.
* **HBM.** The paper's 32 x 64-bit channels are reduced to one line-wide host
  read port and one host write port.
* **Packing seeds.** The compiler also emits packing seeds, whose format the
  paper does not give. They are not used; any idle PE of the chosen core
  takes the job.
* **ANN accumulation.** The ANN PE uses one accumulator register, not a
  register tree.
* **Chunk boundaries in the SNN PE.** A chunk waits for the FIFOs to drain
  before the next one loads (section 5).
* **Outside the design.** The offline cost model and the two-stage
  score-then-refine assignment are compiler software; only their output, the
  bitmask, enters the hardware. Non-QCFS operators (softmax, normalisation,
  pooling, residual adds) are also outside the design, as are the host
  control block and HBM.
* **Timestep count.** The paper's Algorithm 1 lists the spike window as T = L
  while the text requires 3L-1 = 23 timesteps. Here the spike train of an
  input spans L timesteps and the neuron window spans 23.

## 10. Verification and how to simulate

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_nf_util.sv` holds the shared
reference functions: a floor-division QCFS, line packing and random sparse
data.

| testbench | what it proves |
|---|---|
| `tb_nf_fast_prefix`, `tb_nf_inner_join` | offsets, match order, last flag against bit scans |
| `tb_nf_laggy_prefix` | segment s readable after s+1 compute cycles, all done after 8 |
| `tb_nf_spike_gen`, `tb_nf_qcfs` | thermometer code; QCFS including both clips |
| `tb_nf_membrane_unit` | spike count = QCFS of the dot product, 23-cycle window, inhibitory spikes occur |
| `tb_nf_ann_pe` | exact levels; chunk period = matches + 1 |
| `tb_nf_snn_pe` | the same exact levels by the spiking path |
| `tb_nf_ann_core`, `tb_nf_snn_core` | 120 neurons in parallel, greedy lowest-idle dispatch |
| `tb_nf_xbar` | one winner per bank, 1-cycle response, LRG alternation |
| `tb_nf_fiber_cache`, `tb_nf_compressor`, `tb_nf_scheduler` | ports, collisions, encoding, job/segment sequence |
| `tb_neuroflex_top` | full default-size chip, two chained layers, ANN and SNN columns mixed |
| `tb_nf_sparsity_sweep` | full chip, one layer at 90%, 60% and 25% zero activations; exact outputs, cycles rise with density |

The end-to-end test runs two chained layers at the default size:
4x384 times 384x160, then the result times 160x96. Columns are split about
evenly between the cores at random. Every output line matches the exact
integer reference. With random data it takes about 3900-4100 cycles. The test
also counts each mechanism and fails if one never happened:

* ANN and SNN jobs, and both cores busy at once;
* dispatch stalls and chunk bubbles;
* SNN FIFO stalls and inhibitory spikes;
* crossbar bank conflicts and continuation lines;
* zero outputs and both QCFS clipping ends.

The sparsity sweep (M=4, K=256, N=128, half-zero weights, random core
split) gives, for one seed:

| zero activations | matched pairs | cycles |
|---|---|---|
| 90% | 5264 | 745 |
| 60% | 22453 | 1267 |
| 25% | 41775 | 2024 |

At the dense end the 32 PEs together retire about 21 matches per cycle. The
peak is 32. The gap comes from chunk bubbles, SNN windows, crossbar conflicts
and the segment barrier.

Simulate with Verilator 5, for example:

    verilator --binary --timing --assert --timescale 1ns/1ps \
      -Irtl -Itb -y rtl -y tb rtl/nf_pkg.sv tb/tb_nf_util.sv \
      tb/tb_neuroflex_top.sv --top-module tb_neuroflex_top -j 8
    ./obj_dir/Vtb_neuroflex_top

Swap the testbench file and `--top-module` to run any other test.

**Synthesis.** Every module except the crossbar and the chip top finishes
Yosys synthesis (slang front end) within ten minutes, with no latches. The
32x32 crossbar dominates synthesis time: it takes about 4 s at
4x4 and 2.5 minutes at 16x16. At the default 32x32, and so for the whole
chip, expect well over ten minutes. Most of the chip's storage is the
FiberCache array, about 4.8 Mbit including masks and pointers. A real
implementation would map it to SRAM macros.

**What the tests cover.** The equivalence of the two paths is checked on
random data: hundreds to thousands of neurons per unit, plus the full chip.
It is not a formal proof. Timing claims are checked where the paper gives them:
one match per cycle, the one-cycle bubble, the two-cycle warm-up, 8-cycle
laggy prefix and the 23-step window. No power, area or frequency figure of
the paper has been reproduced.
