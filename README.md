# RTGS gradient plug-in: RTL for a 3D Gaussian Splatting SLAM training accelerator

In Gaussian Splatting SLAM, each new camera frame is handled by running gradient descent twice.
Tracking fits the camera pose to the frame. Mapping then refines the 3D Gaussians that make up the scene.
Every training iteration renders the image and then backpropagates the photometric error through the same fragments.
A fragment is one pixel paired with one 2D Gaussian that covers it.
This backward pass is the expensive part on an edge GPU.

The design here is a plug-in that sits next to a GPU's streaming multiprocessors.
It takes the projected, depth-sorted 2D Gaussians the GPU produces and runs the whole rendering and backpropagation loop in fixed-function hardware.
It returns gradients for the camera pose (tracking) or for the Gaussian means (mapping).

Three kinds of redundancy are removed in hardware:

* **Recomputation in the backward pass.**
  The forward pass stores each fragment's blended colour, alpha and T·alpha in the R&B (render-and-backprop) buffer.
  The backward pass reads them back instead of recomputing them.
* **Idle lanes from uneven pixel workloads.**
  Pixels terminate after very different numbers of Gaussians.
  Pixels are processed in pairs, and once one pixel of a pair finishes, both alpha units serve the other.
  A scheduling unit learns the completion order in one iteration and pairs heavy pixels with light ones for the next.
* **Repeated gradient traffic.**
  Many fragments in a subtile update the same Gaussian.
  A merging unit sums equal-ID gradients before they leave the engine.
  A stage buffer then sums them across subtiles before the per-Gaussian 2D→3D transform.

## Top level (`rtgs_top`)

The top level instantiates:

* 16 rendering engines (REs), one 4×4-pixel subtile each;
* 4 gradient merging units (GMUs), each shared by 4 REs;
* one stage buffer;
* 16 preprocessing engines (PEs);
* a pose-gradient merging tree;
* the pose/Gaussian update unit;
* the Gaussian cache;
* the subtile dispatcher;
* the frame controller.

The host writes data into the cache and then issues `exec`.
Each exec runs one training iteration over all loaded subtiles:

1. **Forward pass.** The dispatcher hands subtiles to free REs. Each RE renders its subtile, computes the loss gradient and backpropagates it.
2. **Merging.** The REs stream 2D fragment gradients to their GMU, which merges them and passes them to the stage buffer.
3. **Per-Gaussian work.** The stage buffer sends per-Gaussian records to the PEs. The PEs produce 3D mean gradients and pose gradients.
4. **Pose sum.** The merging tree sums the pose gradients.
5. **Update.** After the pipeline drains and the stage buffer is flushed, the pose is stepped (tracking), or the updated means are written out (mapping).

## Rendering engine (`rendering_engine`)

The RE holds:

* a 2D Gaussian buffer (up to `MAX_G`=32 Gaussians per subtile list) and a pixel buffer;
* 8 rendering cores (RCs), one per pixel pair;
* a loss unit;
* the R&B buffer;
* 8 rendering-backprop cores (RBCs);
* the workload scheduling unit (WSU);
* an output queue for 2D gradients.

The engine works through these states:

1. `S_LDG`: load the Gaussian list.
2. `S_FWD`: forward rendering.
3. Loss.
4. Backpropagation rounds: each round walks the fragments of each pair from back to front.
5. Wait for the output queue to drain.

`done_valid` rises when the last round is issued, before the queue is empty.

### Rendering core: pairwise alpha and shared blending

`alpha_comp` evaluates alpha = min(0.99, o·exp(−½ dᵀ Σ*⁻¹ d)).
It does this in a 12-stage pipeline.
The exponential is computed as 2^(−x·log₂e) with a quadratic fit of the fractional power.

`alpha_blend` takes 3 cycles and computes:

* w = T·alpha;
* Ĉ = w·C;
* T' = T − w.

It flags termination when T' drops below `T_THR` (7 LSB, about 1e-4).

An RC has two alpha units and one blending unit:

* While both pixels of the pair are alive, unit 0 works on pixel a and unit 1 on pixel b.
* After one pixel terminates, the two units take consecutive Gaussians of the surviving pixel.

Two 4-cycle blends fit under the 12-cycle alpha latency, so the shared blender is never the bottleneck.
Fragments still in flight when their pixel terminates are dropped.
Each blended fragment is written into the R&B buffer at its list position k.

### Workload scheduling unit (`wsu`)

The WSU watches the order in which pixels terminate:

* The first 8 pixels to finish are the light ones. They go into a FIFO.
* The last 8 are the heavy ones. They go into a LIFO.

Popping both queues together pairs the lightest pixel with the heaviest, the second lightest with the second heaviest, and so on.
This pairing is used for the same subtile in the next iteration.
The dispatcher keeps one pairing per subtile, so a subtile keeps its learned pairing even when it runs on a different RE.
In the first iteration the pairs are (2i, 2i+1).

### R&B reuse in the backward pass

The backward pass for fragment k of pixel P needs two things:

* the colour still to come behind it, S_k = Σ_{n>k} Ĉ_n;
* T_k·alpha_k.

Both come from values stored in the forward pass, so the backward pass needs no exponential and no division.
`alpha_grad` computes dL/dalpha_k = (C_k − S_k)·dL/dC_P in 4 cycles and then adds Ĉ_k into S.
`covpos_grad` takes 8 cycles and produces:

* dL/dμ* (2D mean);
* dL/d(conic);
* dL/dC (colour).

Each RBC has one shared `alpha_grad` unit and two `covpos_grad` units, one per pixel slot.
With this 4:8 ratio both slots stay busy.

`rb_buffer` is banked per pixel lane: lane 2w+s is pair w's slot s.
This lets both slots of every pair read in the same cycle.
`loss_comp` uses an L2 photometric loss, so dL/dC_P = C_P − C_gt.

## Gradient merging (`gmu`) and the stage buffer (`stage_buffer`)

Each GMU cycle takes one 16-lane vector of fragment gradients from one of its REs.

1. The lanes are sorted so that equal Gaussian IDs sit next to each other. In the paper this is a Benes network. Here it is a 16-lane gather that performs the same permutation.
2. A 4-level segmented prefix adder sums each run. This plays the role of the reduction tree with bypass links: every run's total appears at its head lane.
3. Only the cluster heads move on, through a queue, to the stage buffer.

The stage buffer is a direct-mapped table indexed by Gaussian ID (2^`IDX_W` entries).

* On a hit it adds the new gradient to the stored sum.
* On a conflict it evicts the old entry to the PEs.
* At the end of an iteration, `flush` writes every remaining entry out.

## Preprocessing engines, merging tree and update

Each PE receives a per-Gaussian 2D gradient and the Gaussian's 3D record (camera-space position p and world mean).
It takes the 2D mean gradient back through the pinhole projection (focal lengths `cam_fx`, `cam_fy`) to camera space and then to the world-frame mean.
It also forms that Gaussian's share of the pose gradient: translation g and rotation p×g.

The merging tree adds the 16 PE pose gradients each cycle and accumulates them over the iteration.
`pose_gauss_unit` then applies one of two steps:

* In tracking: pose −= dL/dP >> `LR_SHIFT`.
* In mapping: mean −= dL/dμ >> `LR_SHIFT` for each Gaussian.

## Control and host interface (`rtgs_ctrl`, `subtile_dispatcher`, `gaussian_cache`)

The controller follows a polling protocol:

1. The host raises `input_done` once the cache holds the frame's data.
2. `exec` starts an iteration.
3. `gradient_ready` marks the end of an iteration.
4. On non-keyframes the controller waits in WAIT_PRUNING for `pruning_done` (pruning runs on the GPU) before it accepts the next frame.

`status` reports IDLE, EXECUTING or WAIT_PRUNING.

Flush control:

* The controller flushes the stage buffer only after every RE, GMU and PE has been idle for 3 consecutive cycles.
* The merging tree is cleared at the start of every iteration.

The Gaussian cache holds four arrays: subtile descriptors, sorted 2D Gaussians, ground-truth pixels and 3D Gaussian records.
Several requesters share its read ports under round-robin arbitration.

## Number format

All datapath values are signed 32-bit fixed point with 16 fraction bits (`rtgs_pkg::fx_t`, Q16.16).
Products are formed at 64 bits and shifted right arithmetically (rounded toward minus infinity, `fx_mul`).
The format is this design's own choice.
Gradients of large, bright scenes can overflow Q16.16; the fixed shift learning rate keeps steps small.

## Where this design departs from the paper

* **Permutation network.** It is written as a gather, not as a Benes switch network, and the reduction tree is a segmented scan. Both give the same results but a different area and timing.
* **R&B buffer.** The buffer keeps a subtile's whole list on chip. Chunk-wise write-back of Ĉ to the Gaussian cache and prefetch are not built, which is why a list is limited to `MAX_G`=32.
* **Stage buffer eviction.** An entry is evicted on a set conflict and at flush. It does not look ahead to when the Gaussian occurs next.
* **PE gradients.** The PE computes only the mean and pose gradients. Gradients for 3D covariance (scale, rotation) and opacity are not computed.
* **Loss.** L2 photometric loss only, with no depth term.
* **Optimiser.** Plain gradient descent with a power-of-two step (`LR_SHIFT`=8), instead of the usual adaptive optimiser.
* **Gaussian cache size.** The cache holds 64 subtiles and 1024 entries per array, with no refill from the GPU's L2. A full frame must be split across several execs.
* **WSU queue labels.** The light/heavy queues are labelled the other way round in one of the paper's figures. This design follows the prose: light pixels go into the FIFO, heavy ones into the LIFO. Both labellings give the same pairs.
* **Outside the plug-in.** Adaptive pruning, resolution downsampling, the GPU, L2 and DRAM belong to the host and are not part of this RTL.
* **Memories.** They are plain arrays written so they can be inferred as memory, not SRAM macros.

## Simulating

Each block has a self-checking testbench in `tb/`.
Every testbench drives random stimulus from `$urandom`, compares against a behavioural model, checks latencies, has a watchdog, and ends with `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing -Irtl rtl/rtgs_pkg.sv rtl/*.sv tb/tb_gmu.sv --top-module tb_gmu -o sim
./obj_dir/sim
```

Replace `tb_gmu` with any testbench name.

`tb_rtgs_top` runs the full plug-in at default parameters on 20 random subtiles over 40 Gaussians for three iterations.
Each iteration takes about 1730 cycles.
The testbench counts how often each mechanism fires: early terminations, dual-alpha rounds, reused pairings, RE streaming, GMU merges, stage-buffer hits and conflicts, and output back-pressure.
It checks the host handshake and status sequence. It compares the loss exactly with a reference model in the testbench, and the 3D mean and pose gradients within a small relative tolerance. It also checks the pose step.
Its build takes a few minutes.

## Verification status

All 20 testbenches pass with zero failures at their default parameters.
`tb_stage_buffer` uses `IDX_W`=4 so that conflicts are frequent.

Each block's testbench was also run against a deliberately broken copy of that block, for example:

* a pipeline one stage short;
* a LIFO read in FIFO order;
* the merge disabled.

Each of these runs reported failures.

Known limits:

* Sizes are reduced as listed above.
* Gradients are not checked against a floating-point 3DGS implementation, only against a bit-accurate model of the same fixed-point arithmetic. Model errors common to both would not be found.
