# TLV-HGNN: an accelerator that aggregates one target vertex at a time

A heterogeneous graph has several vertex types and several relation types
(semantics). A heterogeneous GNN layer usually runs semantic by semantic:
project every feature, aggregate the neighbours under relation 1 for every
target, store those partial results, repeat for relation 2, and so on; only
then are the per-semantic results fused into one embedding per target. The
intermediate results for every target and every semantic must be stored. The
same neighbour features are also fetched again for every semantic.

This design turns the loop inside out ("thinking like a vertex"). The unit of
work is one **target vertex together with its neighbours under all
semantics**. A channel reads the target's own projected feature once, walks
through its semantics one after another, and keeps a running sum in the
processing elements. It emits the fused embedding as soon as the last
semantic is done, so no per-semantic intermediate result is ever written out.
Two further ideas support this:

* **Reconfigurable PEs (RPEs).** The same reduction trees do the matrix
  products of feature projection and the vector sums of aggregation.
* **Overlap-driven vertex grouping.** Targets whose neighbourhoods overlap are
  put in the same group and sent to the same channel, so that channel's local
  feature cache serves the shared neighbours.

The RTL here is a complete, simulatable version of that chip. It has
4 channels of 512 RPEs (2048 in total), a two-level feature cache, a
512-multiplier vertex grouper, the on-chip buffers, a scheduler, and a
LeakyReLU activation unit. It computes a sum-aggregating model, for which
every embedding has been checked against an independent reference. Attention
models are not built (see *Departures*).

## 1. One inference, end to end

A run has two phases. The scheduler (`scheduler.sv`) steps through them after
the host loads the buffers and pulses `start`:

1. **Flush.** Every feature cache is invalidated.
2. **Feature projection (FP).** Vertex IDs `0 .. n_vert-1` are handed
   round-robin to whichever channel is ready. The vertex type follows from its
   ID: type `t` owns the IDs from `cfg_type_base[t]` up to the next base. The
   channel does the following:
   * reads the raw feature from HBM;
   * computes `h' = W_type · x` on its RPEs in linear mode;
   * writes `h'` back to HBM through the memory controller.

   The write also fills the global cache. The scheduler waits until every channel is idle before going on.
3. **Grouping and neighbour aggregation (NA).**
   * The scheduler starts the vertex grouper on the first `n_hv` targets.
     These are the high-degree ones, which the host numbers first.
   * Each `(vertex, group)` pair the grouper produces is pushed straight away
     into the target queue of channel `group mod N_CH`. So aggregation of the
     first group overlaps with the grouping of later ones.
   * When the grouper finishes, the remaining low-degree targets are dealt out
     sequentially in runs of `N_max`, one channel after another.
   * Each channel pops its own queue and aggregates each target over all
     semantics.
4. **Activation and output.** Finished embeddings from all channels pass
   round-robin through the activation module, which applies LeakyReLU with a
   slope of 0.01, and leave on `out_valid/out_ready`. `done` rises once
   `n_tgt` embeddings have left.

The value computed for target `t` is

    z_t = LeakyReLU( Σ_r ( h'_t + Σ_{u ∈ N_r(t)} h'_u ) ),   h'_v = W_type(v) · x_v

This is per-semantic sum aggregation with a self term, fused by summation.

## 2. The reconfigurable PE and how vectors are mapped onto it

This is the least obvious part of the design.

**One RPE** (`rpe.sv`) is a tree with `N_MOA = 4` multiply-or-accumulate units
in the first layer and two layers of adders after them. Each layer is one
register stage, so a result appears **3 cycles** after its operands. Each
stage register loads only when valid data reaches it. The output therefore
holds the last result until a new one arrives, and that held value is what
the feedback path returns.

* *Linear mode:* MOA `i` computes `REG[i] · y[i]`, where `REG` is a per-MOA
  operand register loaded once and then held over many issues.
* *Aggregation mode:* MOA `i` computes `x[i] + y[i]`.
* *Feedback:* any MOA can replace its `x` operand by the RPE's own last
  result.

The mode is chosen per issue, so an RPE can change mode between consecutive
cycles.

**A group of RPEs.** Each channel has `N_GRP = 8` groups of `F = 64` RPEs.
The RPEs of a group work in lock-step, RPE `k` on element `k` of every
vector. One issue to a group therefore reduces whole vectors:

| issue | operands of RPE k | result of RPE k |
|---|---|---|
| aggregation, first pass | 8 vectors `v0..v7` in the 8 slots | `Σ v_i[k]` |
| aggregation, later pass | fed-back sum in slot 0, 7 new vectors | previous + `Σ` new |
| linear, first pass | `REG[i] = x[j+i]`; `y[i]` = row `j+i` of `Wᵀ` | `Σ_i x[j+i]·Wᵀ[j+i][k]` |
| linear, later pass | fed-back sum + 3 new products | previous + `Σ` new |

The dispatcher collects operands in eight vector slots, which act as the
operand buffer. When the slots are full, or the job's operands are used up,
it issues them, and it then waits for the result before issuing again. This
wait is the paper's "odd vector delayed by three cycles". Because the
partial sum stays in the RPEs, a target's sum runs across all of its
semantics without leaving the tree. The crossbar (`crossbar.sv`) steers the
dispatcher's operand bus to one group, rotating round-robin from job to job.

At the default sizes a projection of a 64-element feature takes about 21
linear issues. An aggregation over `n` vectors takes `ceil((n-1)/7)` issues.

## 3. The dispatcher and the buffer layouts

`dispatcher.sv` runs one job at a time per channel.

* **FP job for vertex v.**
  * Read raw `x_v` once, at HBM region 1.
  * For each input index `j`, read weight-buffer row `type·F + j` (row `j` of
    `Wᵀ` for that type) into a slot, and put `x_v[j]` into `REG`.
  * Write `h'_v` back.
* **NA job for target t.**
  * Read `h'_t` once.
  * For each semantic `r`, read the two CSR words of `(t, r)` and then every
    neighbour reference between them. Put `h'_t` and every `h'_u` into slots.
  * Send the result to activation after the last semantic.

Memory layouts chosen for this design:

| memory | word | contents |
|---|---|---|
| adjacency buffer (32-bit words) | `t·(n_sem+1) + r` | first neighbour address of semantic `r` of target `t` |
| | `t·(n_sem+1) + r + 1` | end address of that list |
| | neighbour word | `{vtype[31:28], vid[27:0]}` |
| weight buffer (F×32-bit rows) | `type·F + j` | row `j` of `Wᵀ` for that vertex type |
| HBM (one vector per word) | `{1, vid}` | raw feature |
| | `{0, vid}` | projected feature `h'` |

## 4. Feature caches and the memory controller

Each cache is a lightweight cache-like buffer. It is keyed by
`(stage, vertex type, vertex ID)` and replaces entries first-in-first-out.
The module is `feature_cache.sv`:

* 4 ways;
* set index = low key bits;
* one FIFO pointer per set;
* a fill of a key already present overwrites it in place;
* a lookup answers one cycle later.

The paper's 6 MB total is split here into:

* a **global cache** of 2 MB (8192 vectors of 64 × 32 bits) inside
  `memory_controller.sv`;
* a **local cache** of 1 MB (4096 vectors) in each of the four channels
  (`computing_module.sv`).

Paths through the hierarchy:

* **Projected-feature read.** Local cache first. On a miss, the request goes
  to the memory controller, which tries the global cache and then HBM. Each
  level fills on the way back.
* **Raw-feature read.** Bypasses both caches: raw features are used once.
* **Write-back.** Goes past the local cache. It is written through to HBM
  and allocated in the global cache.

The memory controller serves one request at a time and arbitrates the
channels round-robin. HBM itself is off chip; its request/response port is a
port of the top.

## 5. The vertex grouper

`vertex_grouper.sv` builds groups of targets that share neighbours. The host
loads a graph over the high-degree targets in CSR form:

* the offsets, the neighbour IDs, and one weight per edge;
* each weight is the Jaccard similarity `|N(a)∩N(b)| / |N(a)∪N(b)|` of the
  two targets' multi-semantic neighbourhoods, in Q0.16.

Before grouping, an init pass computes every weighted degree `k_j` and the
total `2m` (one cycle per edge and per vertex) and clears the visit bitmask.
Groups are then built one at a time:

1. **Seed.** The lowest-numbered unvisited vertex opens group `C`.
2. **Add.** Each vertex added is marked visited, written into the
   vertex-group table and streamed out. Its edges are walked, and for every
   unvisited neighbour `j`, `k_in(j)` (the weight between `j` and `C`)
   accumulates.
3. **Evaluate.** Candidates are scanned in rows of `LANES = 256`, one row per
   cycle. Each lane has two multipliers (512 in all) and computes
   `g = 2m·k_in(j) − k_j·Σ_tot(C)`. This is the Louvain modularity gain
   multiplied by `(2m)²`, so it has the same sign and order without a
   division. A comparison tree selects the largest gain; ties go to the
   lower lane.
4. **Close or grow.** If the best gain is positive and `|C| < N_max`, the
   candidate joins. Otherwise `C` closes, and its intra- and inter-group
   weight sums are written to the group-weight table.

The vertex-group and group-weight tables can be read from outside the top
(`vg_rd_*`, `gw_rd_*`). The paper suggests `N_max = targets / channels`; it
is a run-time input.

## 6. Target queues and the weight/adjacency buffers

* **Target buffer** (`target_buffer.sv`): four FIFOs of 39321 vertex
  references, 0.6 MB in all. The scheduler stalls on a full queue.
* **Weight and adjacency buffers** (`sram_buf.sv`): one write port for the
  host and one 1-cycle read port per channel.

## 7. Number format and sizes

All arithmetic is Q16.16 two's complement (`tlv_pkg.sv`). A product is
truncated after the multiply; sums wrap.

| parameter | default | origin |
|---|---|---|
| channels `N_CH` | 4 | paper |
| RPEs per channel `N_GRP·F` | 8 × 64 = 512 (2048 total) | paper gives 2048 |
| MOA units per RPE `N_MOA` | 4 (latency 3) | paper's figure and "three cycles" |
| feature length `F` | 64 | this design |
| grouper lanes `LANES` | 256 (512 multipliers) | paper gives 512 MACs |
| weight buffer | 6400 rows × 2048 bit = 1.64 MB | paper size |
| adjacency buffer | 367001 × 32 bit = 1.40 MB | paper size |
| target buffer | 4 × 39321 × 32 bit = 0.60 MB | paper size |
| feature caches | 2 MB global + 4 × 1 MB local | paper gives 6 MB total |
| grouper graph | 16384 vertices, 131072 edges | this design |

## 8. Departures from the published design, and what is missing

* **No attention.** RGAT and NARS need the following, and none of them is
  built:
  * attention coefficients computed in the RPEs;
  * an attention buffer (1 MB in the paper);
  * attention-weighted semantic fusion.

  Edge weights are 1, fusion is a sum, and there is no mean normalisation.
* **One weight matrix per vertex type.** It is shared by all semantics, and
  projection is square: input length = output length = `F`. Raw features of
  another length must be reduced to `F` off chip first.
* **One job per channel at a time, on one RPE group.** The other seven groups
  of a channel idle during that job. The paper runs many aggregations
  concurrently.
* **Crossbar placement.** In the published block diagram the crossbar sits
  between two rows of RPEs. Here it only steers the dispatcher's operands to
  one RPE group; no RPE-to-RPE traffic is built.
* **Unused cache-key stage.** The caches carry the stage field of their key,
  but only projected features (stage 0) are stored. Intermediate aggregation
  results never leave the RPEs.
* **Deterministic seed.** The paper picks a random unvisited seed vertex;
  here it is the lowest-numbered one.
* **Host-computed inputs.** The Jaccard weights and the degree ordering of the
  targets are computed by the host.
* **Strict phases.** The whole FP phase finishes before any aggregation
  starts.
* **No HBM model on chip.** The HBM device and PHY are outside the design; a
  simple behavioural model (`tb/tb_hbm_model.sv`) stands in for simulation.
* **Timing not closed.** Clock rate, area and power (1 GHz, 16.56 mm²,
  10.61 W in a 12 nm process) are not reproduced. At full size, yosys
  synthesis of the top does not finish in 10 minutes.

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. For
example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/tlv_pkg.sv tb/tb_tlv_hgnn_top.sv --top-module tb_tlv_hgnn_top -Mdir obj
    ./obj/Vtb_tlv_hgnn_top

The testbenches:

* **`tb_tlv_hgnn_top`** runs the whole chip at reduced sizes: 2 channels,
  `F = 8`, tiny caches, 2-entry target queues.
  * It checks every embedding and every projected feature written to HBM.
  * It requires each of these events to occur at least once: linear issues,
    aggregation issues, feedback, local and global cache hits and misses,
    write-backs, more than one group, sequentially dealt targets, a full
    target queue, and output back-pressure.
* **`tb_tlv_hgnn_full`** runs the top with every parameter at its default.
  * It does one complete inference over 8230 vertices and 12 targets.
  * Neighbour IDs are chosen to collide in the global cache.
  * It takes about 385k cycles, about a minute of simulation.
* **`tb_vertex_grouper`** reproduces a published worked example (six targets,
  `N_max = 3`, groups {1,2,3} and {4,5,6}). It also compares twelve random
  graphs against a software model.
* **Other testbenches** check each block against a behavioural reference.
