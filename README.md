# A Kalman-filter-steered network-on-chip for CPU/GPU chiplets

CPU and GPU chiplets that share one network-on-chip want different things from it. CPU traffic is light and steady. GPU traffic comes in bursts, and when a burst meets a fixed, fair split of the router resources, the GPUs stall and their IPC drops.

This design keeps a small Kalman filter next to the network. Once per epoch it reads three GPU congestion counters and predicts whether GPU performance is about to fall. When the prediction turns positive, every router moves to a GPU-favouring configuration with two changes:

- GPU packets get three of the four virtual channels (VCs) instead of two;
- the switch allocator grants two GPU packets for every CPU packet instead of plain round-robin.

A set of deployment rules keeps the system from flapping between the two configurations.

The RTL is an implementation of the reconfigurable interconnect from *Designing Reconfigurable Interconnection Network of Heterogeneous Chiplets Using Kalman Filter*. It is not written by that paper's authors. Where the paper is silent, the choices made here are listed in the last section.

## The system around the network

The evaluated system is a 6×6 mesh of 36 nodes:

- 14 CPU nodes, one x86 core each;
- 14 GPU nodes, two streaming multiprocessors each;
- 8 memory-controller nodes.

They are laid out like this (row 0 at the top):

```
MC  CPU GPU CPU GPU MC
MC  GPU CPU GPU CPU MC
CPU GPU CPU GPU CPU GPU
GPU CPU GPU CPU GPU CPU
MC  CPU GPU CPU GPU MC
MC  GPU CPU GPU CPU MC
```

There are two physical subnets of identical routers: one carries requests and one carries replies. Both follow the same Kalman-filter decision.

The cores, caches and memory controllers are not part of this RTL. The network's top level brings out one injection port and one ejection port per node and subnet. It also has two per-node event inputs through which the tiles report stalls.

## Hierarchy

```
kf_noc_top
├── kf_mesh            ×2   (request subnet, reply subnet)
│   └── kf_router      ×36
│       ├── kf_logic           mode → VC masks and switch weight
│       ├── kf_vc_buffer  ×5   per-input VC FIFOs
│       ├── kf_route_xy   ×20  XY route per input VC
│       ├── kf_vc_allocator    class-partitioned VC allocation
│       │   └── kf_class_arb ×5
│       ├── kf_sw_allocator    two-stage, class-weighted switch allocation
│       │   └── kf_class_arb ×10
│       └── kf_crossbar
├── kf_ni              ×72  (one per node per subnet, each with its own kf_logic)
├── kf_monitor              per-epoch counters and normalisation
├── kalman_filter           (uses kf_fx_div)
└── kf_mode_ctrl            deployment rules
```

`kf_noc_pkg` holds the shared types:

- `flit_t`: head, tail, class, VC, destination and a 256-bit payload (the 32-byte channel);
- `link_t`: valid plus flit;
- `credit_t`: valid plus VC;
- the port enumeration;
- the `fx_t` fixed-point type.

## The decision loop

### What is measured

`kf_monitor` counts three events over each epoch of `EPOCH_CYCLES` = 1000 cycles:

| Observation | Meaning | Where it comes from here |
|---|---|---|
| Z1 GPU_Icnt_Push | GPU injections into the network | `push_gpu` pulses of the network interfaces, one per GPU-class packet head, both subnets |
| Z2 GPU_Stall_Icnt-Shader | GPU stalls waiting on the network | `gpu_stall_shader_ev[node]` input |
| Z3 GPU_Stall_Dramfull | GPU stalls because DRAM queues are full | `gpu_stall_dramfull_ev[node]` input |

Each cycle the event vectors are population-counted into 32-bit totals. At the epoch boundary each total is clamped to a full scale of 2^L events. It is then mapped linearly onto [-1, 1]: 0 events gives −1 and full scale gives +1. The default full scales are 4096, 8192 and 4096 events per epoch (`PUSH_LOG2`, `SHADER_LOG2`, `DRAM_LOG2`). The result is a `z_valid` strobe with three Q15.16 values.

### The filter

`kalman_filter` tracks one scalar state X, which stands for the (negated) outlook of GPU IPC. It treats the three normalised counters as three noisy observations of that state. On each `z_valid` it runs the textbook sequence:

1. Predict: X̂ = A·X + B·U and P̂ = A·P·A + Q.
2. Gain: K = P̂·Hᵀ·(H·P̂·Hᵀ + R)⁻¹.
3. Correct: X = X̂ + K·(Z − H·X̂) and P = (1 − K·H)·P̂.

It then sets `pred = (X > 0)`. A positive state means GPU performance is about to drop, so the network should favour the GPUs.

The only expensive step is the 3×3 inverse in the gain. With a diagonal R it collapses to a scalar. Write g_i = H_i/R_i and s = Σ H_i·g_i. Then

```
K_i = g_i · P̂ / (1 + s · P̂)
```

That is one division per epoch, done by the bit-serial `kf_fx_div` over KF_W + KF_FRAC cycles. Each product uses a 64-bit intermediate and is saturated back to 32 bits. One complete update takes 54 cycles, far below the epoch length.

The default constants are A = 1, B = 0, Q = 0.05, H = 1, R = 0.25 on each observation, X0 = 0 and P0 = 1. They are parameters (`*_FX`, in units of 2⁻¹⁶).

With these constants, the steady state of the filter is roughly the average of the three normalised counters. The filter smooths it over a few epochs. So the decision turns to 1 once the network has been busy, with GPUs stalling, for a couple of epochs. The input U is wired to the mode in force. With B = 0 it has no effect, but a non-zero B lets the current configuration bias the prediction.

### Deployment rules

`kf_mode_ctrl` sits between the filter and the routers. It enforces three rules:

- **Start delay.** The mode stays 0 for `START_DELAY` = 10,000 cycles after `gpu_active` rises. Filter decisions in that time are ignored.
- **Minimum hold.** After any change, the new mode is held for `MIN_HOLD` = 5,000 cycles. Decisions that arrive during the hold are not dropped: the latest one is kept as a target and applied when the hold expires.
- **Bounded boost.** After `MAX_BOOST` = 10,000 cycles in mode 1, the controller forces a return to mode 0, pulses `forced_return`, clears any pending target and starts a new hold. Mode 1 is re-entered only on a fresh positive decision after that.

When `gpu_active` falls, the mode and all counters reset.

## The routers

### Two configurations

`kf_logic` (one per router and one per network interface) registers the mode and decodes it:

| Mode | GPU VCs | CPU VCs | Switch allocation |
|---|---|---|---|
| 0 (equal sharing) | VC0, VC1 | VC2, VC3 | round-robin |
| 1 (favour GPU) | VC0, VC1, VC2 | VC3 | 2 GPU grants, then 1 CPU grant |

For other values of `NUM_VC` the GPU gets the lowest `NUM_VC/2` VCs in mode 0 and the lowest `3·NUM_VC/4` in mode 1.

### Pipeline and flow control

Flow control is credit based: each output keeps one credit counter per downstream VC, initialised to `BUF_DEPTH`.

A head flit spends three cycles in each router:

| Cycle | Head-flit stage |
|---|---|
| 1 | Written into its input VC FIFO (`kf_vc_buffer`); route computed by `kf_route_xy` |
| 2 | Wins an output VC from `kf_vc_allocator` |
| 3 | Wins the switch (`kf_sw_allocator`) and is registered into the crossbar output (`kf_crossbar`) |

On the cycle after that it is on the link. Body and tail flits skip VC allocation and take two cycles per hop. When a flit leaves an input FIFO, a credit goes back upstream one cycle later.

### VC allocation

A packet's class travels in its flits. When a head flit asks for an output, `kf_vc_allocator` looks only at the output VCs that the current mode allows for that class. Per output port, a round-robin arbiter picks one requesting input VC per cycle. That input VC gets the lowest-numbered free allowed VC.

An output VC then belongs to that packet until its tail flit passes. A mode change therefore never pulls a VC away from a packet in flight: it only changes where the next packets may go. For example, a CPU packet that still holds VC2 when the mode turns to 1 keeps it, and VC2 becomes available to GPU packets once it is freed.

### Switch allocation

`kf_sw_allocator` is a separable input-first allocator:

1. Each input picks one of its ready VCs. A VC is ready when it has a flit, an output VC and a downstream credit.
2. Each output picks one of the inputs that chose it.

Both stages use `kf_class_arb`. This is a round-robin arbiter with a class twist: while its weight is non-zero, it prefers a GPU requester until it has granted `weight` GPU requests in a row, then it prefers a CPU requester. If only one class is requesting, that class wins. So the 2:1 policy never leaves the switch idle and never starves either class. With weight 0 it is a plain round-robin arbiter.

Under a full load of both classes in mode 1, an output therefore sends G, G, C, G, G, C, …

### Network interface

`kf_ni` connects a tile to the router's local port, and has one credit counter per VC of that port.

- **Injection.** A head flit takes the allowed VC (for its class, under the current mode) with the most credits left. The packet keeps that VC until its tail. `inj_ready` tells the tile whether the flit went out this cycle.
- **Push event.** Each accepted GPU packet head raises `push_gpu`, which feeds the GPU_Icnt_Push counter.
- **Ejection.** Arriving flits are handed straight to the tile on `ej_valid`/`ej_flit`. Their credits are returned the next cycle, so the tile must always accept.

## Simulating

All testbenches are self-checking. Each prints `TB_RESULT checks=<n> failures=<n>` and contains a watchdog. Any simulator with SystemVerilog-2017 support should run them. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/kf_noc_pkg.sv tb/tb_kf_router.sv \
          --top-module tb_kf_router -o sim
obj_dir/sim
```

Replace `tb_kf_router` with any testbench name. The package must come first; the other modules are found through `-Irtl`.

| Testbench | What it checks |
|---|---|
| `tb_kf_route_xy` | every source/destination pair of an 8×8 grid |
| `tb_kf_logic` | mode decode and its one-cycle register, for 4 and 8 VCs |
| `tb_kf_vc_buffer` | random traffic against per-VC reference queues |
| `tb_kf_vc_allocator` | grants against a reference ownership model, in both modes |
| `tb_kf_sw_allocator` | the G,G,C sequence and plain round-robin, plus legality under random load |
| `tb_kf_crossbar` | random selects; VC rewrite |
| `tb_kalman_filter` | against a floating-point filter with a full 3×3 inverse; latency of 54 cycles |
| `tb_kf_monitor` | counts, normalisation and clamping, at a short epoch |
| `tb_kf_mode_ctrl` | start delay, hold, deferral and forced return, with short timers |
| `tb_kf_ni` | VC choice per class and mode, credit accounting and ejection |
| `tb_kf_router` | one router with five traffic sources: delivery, ordering, credits and the 3-cycle head latency |
| `tb_kf_mesh` | a 3×3 subnet with network interfaces under random traffic |
| `tb_kf_noc_top` | the whole design at 3×3 with shortened timers |
| `tb_kf_noc_full` | the whole design at its default size and timers |

### The end-to-end tests

The two end-to-end tests model the tiles:

- CPU and GPU nodes send one-flit read requests to the memory-controller nodes over the request subnet.
- A memory controller serves a request every four cycles and answers with a four-flit reply on the reply subnet.
- GPU nodes alternate between a light phase and a heavy phase.
- A GPU node raises its shader-stall event whenever it is blocked. A memory controller raises its DRAM-full event when more than six requests wait.

The tests check that every request is answered exactly once, in order and at the right node. They also count each mechanism of the design and fail if one never happens:

- the filter predicting both 0 and 1;
- the mode going up and down;
- a deferral by the hold;
- a forced return (3×3 test only);
- GPU traffic on VC2;
- mode-1 switch grants of both classes;
- injection back-pressure.

At the default size (two 6×6 subnets, 1000-cycle epochs, 10,000-cycle start delay), `tb_kf_noc_full` runs 22,000 cycles. Verilator builds it in a few minutes and runs it in under a minute. It shows the mode rising just after the start delay and falling again when the heavy phase ends. The forced return after 10,000 cycles is exercised only in the shortened 3×3 test.

## Where this departs from the paper or fills its gaps

- **Number of VCs.** The text uses four VCs per router input and its figures number them VC0–VC3. The configuration table lists 16 VCs. Four is the default here; `NUM_VC` is a parameter.
- **Which VCs belong to whom.** One sentence gives the first VCs to the CPU. The explicit numbering (GPU on VC0–1, or VC0–2 when boosted) gives them to the GPU. The numbering is followed.
- **Filter constants.** A, B, Q, H, R and the initial state are not given and are chosen here. So is the fixed-point format (Q15.16). So is the diagonal R that makes the gain a scalar division.
- **Normalisation.** The counters are said to be scaled into [-1, 1], but not how. The clamp-and-scale mapping and its full-scale values are this design's.
- **Measurement points.** GPU_Icnt_Push is counted inside the network interfaces. The two stall counts come from tiles and memory controllers that are not built, so they enter as per-node event ports.
- **Forced return.** The return to equal sharing after 10,000 cycles is described as "advisable". Here it is always taken.
- **Microarchitecture.** The allocators' internal structure is not given and is chosen here: input-first separable switch allocation, weighting at both stages, lowest-free-VC choice. So are the router pipeline, the credit flow control, the network interface's VC choice and the ideal ejection. The baseline VC allocation is described as iSLIP-like round-robin; a single-iteration round-robin arbiter per output stands in for it.
- **One filter for the chip.** A single filter and controller drive all 72 routers and the network interfaces. The mode reaches the routers through a register in each one.
- **Not built.** The CPU cores, GPU SMs, caches, memory controllers and DRAM are not built, and neither are the 4-subnet and static-partition configurations the design is compared against.
