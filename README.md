# Near-data MoE expert engine on DDR5 buffer chips

Large Mixture-of-Experts models keep most of their expert weights in host DRAM because they do
not fit in GPU memory. Under large-batch inference a few experts are hot (many tokens), many are
warm, and a long tail is cold: each cold expert sees only a handful of tokens, so running it is a
matrix-*vector* product whose cost is reading the weights, not the arithmetic. Moving those weights
over PCIe to the GPU, or through the CPU's memory channels, wastes the one resource that matters.

This RTL implements the part of such a GPU + CPU + DRAM system that is new hardware: a small
compute engine placed on the buffer chip of every DIMM (near-data processing, NDP). Each engine
reads its own DRAM devices at the full internal bandwidth of the DIMM, runs the cold experts whose
weights live on that DIMM, and applies the SiLU activation before results go back to the host.
Because a cold expert must sit entirely on one DIMM for this to work, while the CPU and GPU prefer
weights spread over all DIMMs, the engines can also rearrange an expert's weights between these
two layouts, and move experts between DIMMs, over a direct DIMM-to-DIMM link (DIMM-Link), without
the host reading and re-writing the data.

The scheduler that decides which expert runs on the GPU, the CPU or an NDP, the load predictor
and the migration policy are host software and are not part of this RTL; they drive the ports
described below.

## System view

```
                 host memory channel (per DIMM)
                           |
   +-----------------------+-----------------------+      x 16 DIMMs
   | buffer chip (ndp_buffer_chip)                 |
   |   Local CTL ---- DRAM devices (outside)       |
   |     |   |   \                                 |
   |  GEMV & Act   Relayout Unit -- DIMM-Link CTL -+---- DL bridge (dimm_link_bridge),
   |  unit (256 KB buffer)                         |     shared by all 16 chips
   +-----------------------------------------------+
```

`trimoe_ndp_system` (the top) instantiates 16 `ndp_buffer_chip`s and one `dimm_link_bridge`.
Per DIMM it exposes: a GEMV job command, the host's ordinary memory port, the host's port into the
activation buffer, the DRAM device port and statistics counters. Relayout tasks are broadcast: one
`rl_valid`/`rl_task` goes to all 16 chips at once and `rl_done` pulses when every chip has
finished its share.

Default sizes (all parameters):

| parameter | default | meaning |
|---|---|---|
| `NUM_DIMMS` | 16 | DIMMs, each with one NDP |
| `NUM_MULT` | 256 | bit-serial multipliers per NDP, 8 FP16 lanes each (2048 products per pass) |
| `MEM_W` | 1024 | DRAM bits per beat seen by the NDP |
| `MAX_TOK` | 256 | tokens one GEMV job can batch |
| `BUF_BYTES` | 262144 | activation buffer (256 KB = 64 lines of 2048 FP16) |
| `LANES` (link) | 8 | DIMM-Link lanes, one byte per link clock |

The 256 multipliers, 8 FP16 values per 128-bit multiplier, the 256 KB buffer, the 256-lane
activation module, 16 DIMMs and 8 link lanes are the published design's numbers. `MEM_W`, `MAX_TOK`
and all encodings are choices of this implementation.

## The GEMV & Act unit

`ndp_gemv_unit` computes, for one expert projection stored on its DIMM,

    y[t][r] = act( sum_k W[r][k] * x[t][k] )     r < rows, t < tokens, k < K

**Chunks.** One pass of all multipliers covers 2048 consecutive `k`: a *chunk*. Weights are stored
row-major, each row padded with zeros to a whole number of chunks, so row `r`, chunk `c` is the
32 DRAM lines starting at `w_base + (r*k_chunks + c)*32`. Activations live in the buffer, one
chunk per 4 KB line: token `t`, chunk `c` is line `x_base + t*k_chunks + c`.

**Loop order.** Rows outermost, then chunks, then tokens. A weight chunk is fetched once and used
for every token of the job, so weight traffic per job is independent of the token count. Two weight
banks alternate: while the multipliers work on one chunk the next is filled from DRAM. With `T`
tokens a chunk keeps the multipliers busy `16*T` cycles and needs 32 DRAM beats to refill, so for
a single token the unit waits for memory (counted in `stat_w_stall`) and from two tokens on it
is compute-bound (given a DRAM that delivers one beat per cycle). `stat_passes` counts multiplier passes (`rows * k_chunks * tokens` per job).

**Multiplier** (`ndp_bitserial_mul`). Each of the 8 lanes holds its activation in parallel and
receives the weight one bit per cycle, LSB first, for 16 cycles: the 5 exponent bits go through a
one-bit serial adder with a carry flop (adding the activation's exponent), then the 11 significand
bits (hidden bit included) each conditionally add the shifted activation significand to a partial
product. After the 16th bit the 22-bit product is normalised and packed as FP32. An FP16 x FP16
product fits FP32 exactly, so nothing is rounded here. A new operation can start in the cycle the
previous one finishes (one every 16 cycles); results appear 17 cycles after `start`.
Throughput: 256 multipliers x 8 lanes x 2 flops / 16 cycles = 256 flops per cycle, which matches
the published 256 GFLOPS per NDP at a 1 GHz clock (the clock is an assumption).

**Adder tree** (`ndp_adder_tree`). 2048 FP32 inputs, 11 registered levels of FP32 adders
(round to nearest even). A tag (token index, first/last chunk flags) travels with the data.

**Accumulator** (`ndp_accumulator`). One FP32 register per token (`MAX_TOK` of them). The first
chunk of a row loads the tree sum, later chunks add to it.

**Activation** (`ndp_act_unit`). When a row's last chunk has gone through for all tokens, the
token sums are handed to 256 lanes at once. Each lane computes either the FP32 sum rounded to FP16
(`ACT_NONE`), `silu(s) = s / (1 + e^-s)` (`ACT_SILU`), or `silu(s) * u` where `u` is the value
already stored at the destination (`ACT_SILU_MUL`, which fuses the gate and up projections of a
gated FFN: run the up projection with `ACT_NONE`, then the gate projection with `ACT_SILU_MUL` onto
the same addresses). `e^-s` is `2^(−s·log2 e)`, split into integer and fraction; the fraction goes
through a cubic polynomial in Q16 (coefficients 45553, 14824, 5158), the integer part goes straight
into the exponent. The reciprocal starts from the linear estimate `48/17 − 32/17·d` and takes three
Newton steps. Results differ from exact SiLU by well under one FP16 ulp in the tested range. The
pipeline is 3 cycles.

**Write-back.** Each result goes to buffer element `y_base + t*y_stride + r`, one per cycle (two
for `ACT_SILU_MUL`, which reads first). Outputs of one projection can thus be laid out directly as
the next projection's input lines.

**Buffer** (`ndp_act_buffer`). 64 lines x 2048 FP16. Port A reads a whole line per cycle for the
multipliers; port B reads or writes one element per cycle for write-back and for the host, which
may use it only while the unit is idle (`hb_ready`).

**Job interface.** A `gemv_job_t` (see `trimoe_pkg`) gives `w_base`, `rows`, `k_chunks`,
`tokens`, `x_base`, `y_base`, `y_stride` and `mode`; `done` pulses once all results are written.

## Local CTL and the DRAM port

`ndp_local_ctl` shares the DIMM's DRAM between three requesters with fixed priority: host accesses
first (the NDP must never slow ordinary memory traffic), then GEMV weight reads, then relayout
traffic. One request is issued per cycle when the DRAM port is ready. Read data must come back in
request order; an owner FIFO remembers who issued each read. The weight fetcher only issues a read
when the weight FIFO has room for it counting everything in flight, so that FIFO cannot overflow.
`stat_host_block` counts cycles an NDP request lost to the host.

The DRAM port (`d_*`) is a simple valid/ready request channel with in-order read data. Real DDR5
timing (banks, refresh, tCCD and so on) belongs in the memory controller beyond this port and is
not modelled; the testbenches use a latency-and-random-backpressure model.

## Layouts, relayout and migration

An expert occupies `n_lines` DRAM lines. Two layouts are supported:

* **striped**: line `i` lives on DIMM `i mod 16`, at `base + i/16`. CPU and GPU reads of such an
  expert draw on all DIMMs.
* **localized**: all lines live on one home DIMM, at `base + i`. Only this layout can be run by an
  NDP, because each NDP sees only its own DIMM.

`ndp_relayout_unit` executes a `relayout_task_t` (source layout/home/base, destination
layout/home/base, line count). Striped-to-localized, localized-to-striped and localized-to-localized
on another DIMM (migrating a cold expert to balance NDP load) are the same operation. All 16 units
receive the task in the same cycle and each walks the line index `i` from 0 to `n_lines-1`. A line
the unit owns in the source layout is read from its DRAM; if the unit also owns it in the
destination layout it is written back locally, otherwise it is sent over DIMM-Link to its new
owner. During the walk the unit also counts the lines it is due to receive; lines arriving from the
link are written to DRAM immediately, ahead of the unit's own requests. A unit finishes when its walk
is over and every expected line has arrived. Source and destination ranges must not overlap.
`stat_rl_local`, `stat_rl_sent` and `stat_rl_recv` count copied, sent and received lines.

## DIMM-Link

`dimm_link_ctl` turns one line transfer into a packet of byte flits: destination id, four address
bytes (LSB first), then the data bytes (`MEM_W/8` of them), 133 flits for a 1024-bit line. It
requests the bridge with the destination id and, once granted, sends one flit per cycle. On the
receive side it watches every flit on the shared medium, collects packets whose first flit carries
its id into a single receive buffer and offers them to the Relayout Unit; `rx_free` says the buffer
is empty.

`dimm_link_bridge` is the shared medium: it grants one sender at a time, round robin, and only a
sender whose destination has `rx_free` set, so a packet is never sent to a full receiver (an
assertion in the controller checks this). The granted sender's flits are broadcast with a
start-of-packet flag on the first one. At 8 lanes x 25 Gb/s the published link carries 25 GB/s;
here that is one byte per link clock.

## Arithmetic

`trimoe_pkg` holds the FP16/FP32 conversions and the FP32 adder and multiplier used everywhere.
All round to nearest even. Subnormals are flushed to zero and NaN is not kept apart from infinity;
for activations and weights of trained models this is harmless, but it is a departure from IEEE.

## Where this differs from the published design

* Data format: the NDP is quoted at "256 GFLOPS (BF16)" in one place and as processing FP16 values
  in the block description; this RTL uses FP16 inputs throughout.
* The internals of the multiplier (bit order, 16 cycles), tree pipelining, accumulator, buffer
  organisation, activation approximation, the DRAM arbitration rules, the packet format, the bridge
  topology and the relayout algorithm are not published; each is the simplest design that does the
  described job, as explained above.
* The DQ/CA re-drive buffer of the DDR5 buffer chip is not modelled: host accesses go straight to
  the Local CTL.
* The scheduler, the per-expert load predictor (an exponential moving average with weight 0.3),
  hot-expert prefetching and the choice of migrations are host software and are absent. The host
  issues their decisions as GEMV jobs and relayout tasks.
* A 1 GHz NDP clock is assumed where the published figures (256 GFLOPS, 153.6 GB/s) imply a rate.
  `MEM_W = 1024` bits per cycle at 1 GHz is 128 GB/s, a little below the 153.6 GB/s internal
  bandwidth quoted for the DIMM.

## Capacity for real models

A cold expert of a typical MoE layer (hidden size 4096-5120, expert intermediate size 1408-1536)
has K padded to 2-3 chunks for the gate/up projections and 1 chunk for the down projection.
Weights are streamed from DRAM so their size is not limited on chip. The 256 KB buffer holds 64
lines; at 3 chunks per token plus the intermediate outputs it holds about 17 tokens of input for a
5120-wide model at once (about 23 for 4096-wide ones), which is more than the few tokens a cold expert
receives; larger token counts are split into several jobs by the host.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Reference values are computed with real (double) arithmetic from
the FP16 inputs; FP16 results are accepted within a few ulps.

| testbench | what it checks |
|---|---|
| `tb_ndp_bitserial_mul` | 2200 random products exact against real arithmetic, 17-cycle latency, 16-cycle issue |
| `tb_ndp_adder_tree` | sums and the log2(N) latency, tag alignment |
| `tb_ndp_accumulator` | per-token load/accumulate against a model |
| `tb_ndp_act_buffer` | both ports against a model, read latency 1 |
| `tb_ndp_act_unit` | SiLU and SiLU-multiply against `$exp`, 3-cycle latency |
| `tb_ndp_gemv_unit` | three jobs (all modes), results and pass counts, stalls with slow weights |
| `tb_ndp_local_ctl` | host priority, weight FIFO credits, response routing |
| `tb_ndp_relayout_unit` | four units on a model link: striped/localized conversions and line contents |
| `tb_dimm_link` | four controllers on one bridge: random traffic, arbitration, no loss |
| `tb_ndp_buffer_chip` | one chip: host access, local relayout, outgoing and incoming packets, SiLU-multiply GEMV |
| `tb_trimoe_ndp_system` | four DIMMs end to end: striped write, relayout over the link, GEMV under host traffic, migration, GEMV with slow DRAM; every mechanism counted |
| `tb_trimoe_ndp_16dimm` | all 16 DIMMs with narrower engines: an expert relaid from 16 DIMMs onto one over the link, then a SiLU GEMV |

`tb/dram_model.sv` is a behavioural DRAM (sparse storage, fixed latency, random back-pressure)
and `tb/tb_fp_pkg.sv` has FP16 helpers for the testbenches.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ndp_gemv_unit \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/trimoe_pkg.sv tb/tb_fp_pkg.sv tb/tb_ndp_gemv_unit.sv
./obj_dir/Vtb_ndp_gemv_unit
```

The testbenches override parameters (for example 2 multipliers = 16-element chunks and 64-bit
lines) so they run in seconds; the logic is the same at every size. The largest configuration
simulated is `tb_trimoe_ndp_16dimm`: 16 DIMMs, 16 multipliers per DIMM, 256-bit lines. The
default-size system (16 x 256 multipliers, 16 x 2048-input FP32 adder trees, 16 x 256 activation
lanes) passes Verilator lint and elaborates in yosys, but a Verilator simulation model of it is
about 1 GB of C++ and needs about 12 GB of memory to generate; it was not built to completion, so
no end-to-end run at the default size exists.
