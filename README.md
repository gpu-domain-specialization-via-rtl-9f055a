# COPA-GPU post-L2 memory system in SystemVerilog

A composable on-package GPU (COPA-GPU) answers a split in what GPUs are asked
to do. HPC codes in FP32/FP64 barely use more DRAM bandwidth than today's GPUs
offer. Deep-learning training and inference in FP16 or narrower is starved for
memory bandwidth and wants far more last-level cache than fits on a GPU die.
Instead of one converged die, the GPU is split on the package into two parts:

* a **GPU module (GPM)**: SMs, L1s, the on-chip network and the L2 cache. It is
  the same die in every product.
* a **memory system module (MSM)**: a second die that holds the memory
  controllers and, for the deep-learning part, a very large **L3 cache**. More
  MSM die edge also means room for more HBM stacks.

The cut is made below the L2. The L2 already filters most of the traffic, so
what crosses between dies is a few TB/s, not the tens of TB/s of the SM-to-L2
network. Links on the package can carry that amount.

This RTL implements the part of the design that is new: everything between
the L2 slices and the HBM channels. That is the optional steering switch, the
on-package ultra-high-bandwidth (UHB) link, the L3 cache slices and the memory
controllers, put together as the top module `copa_gpu`. The SMs, the network
and the L2 are unchanged GPU blocks and sit outside. So do the HBM stacks and
the analog link and HBM PHYs.

## Organisations

Two package types are described. One parameter, `INTEG`, picks between them.

| | 2.5D (`INTEG_2P5D`, default) | 3D (`INTEG_3D`) |
|---|---|---|
| MSM placement | one or two dies beside the GPM on the interposer | one die under the GPM |
| GPM memory controllers | none; the GPM has no HBM I/O | present; idle when an MSM is stacked |
| post-L2 path | always L2 → link → L3 → MC → HBM | switch → local MC → HBM, or switch → link → L3 → MC → HBM |
| selected by | packaging | `msm_present` strap, loaded with `cfg_load` |

The defaults describe the design recommended as the best all-round
deep-learning part, named HBML+L3. It is a 2.5D package with two MSMs, 960 MB
of L3 in total (480 MB per MSM), ten HBM sites and 4.5 TB/s of DRAM bandwidth.
The 3D organisation is the same RTL with the switch and GPM controllers
switched in. With the strap low it is the HPC part. With the strap high it is
the 3D deep-learning part, which has one MSM of 960 MB
(`NUM_MSM=1, CH_PER_MSM=32`).

## Channels

Everything below the L2 is organised as independent **channels**, one per L2
slice. Each channel runs:

```
L2 slice c ──► [post_l2_switch] ──► uhb_link (req) ──► l3_cache ──► mem_ctrl ──► HBM port c
          ◄──                  ◄── uhb_link (rsp) ◄──            ◄──
                      └──► mem_ctrl on the GPM (3D only) ──► HBM port c
```

There are 32 channels, 16 on each MSM. The count follows from the link
bandwidth: the L2-L3 links are sized for 10.8 TB/s, twice the DRAM bandwidth
for reads plus twice for writes. One 128-byte line per cycle in each direction
at the 1.4 GHz core clock gives 32 × 128 B × 1.4 GHz × 2 = 11.5 TB/s.

Each L2 slice owns a fixed set of addresses: slice `c` may only issue line
addresses whose five low bits equal `c`. The channels never talk to each
other. Each channel keeps its requests in order from the L2 port down to DRAM
and back.

### Requests

All traffic is in whole 128-byte lines (`copa_pkg`):

* `mem_req_t {op, id, addr, data}`. `op` is `OP_READ` (an L2 miss) or
  `OP_WRITEBACK` (a dirty L2 victim). `addr` is a 31-bit line address: a
  38-bit byte address covers the 167 GB of HBM.
* `mem_rsp_t {id, data}` answers reads only. Writebacks are posted.
* `dram_req_t {we, addr, wdata}` goes out on the HBM channel port. Read data
  must come back in order.

Every port uses valid/ready. A transfer happens in a cycle where both are high.

## The L3 cache (`l3_cache`)

The L3 is the hardest part to get right. It is a *memory-side* cache, and
three rules follow from the L2 being the GPU's point of coherence:

1. Nothing reaches the L3 without passing the L2 first. The L3 sees only L2
   read misses and L2 victim writebacks.
2. The L3 is neither inclusive nor exclusive of the L2. It keeps no coherence
   state, because a line in the L2 always supersedes the L3 copy.
3. When the L2 evicts a line, the line is written back into the L3.

So the slice never has to snoop, invalidate or forward. The cases are:

| request | hit | miss |
|---|---|---|
| read | return the line (`rsp_valid` 2 cycles after acceptance) | fetch from the MC, install clean, return |
| writeback | overwrite, mark dirty | install dirty |

If the line being replaced is dirty, it is first written back through the
memory controller (`S_EVICT`). The victim is the first invalid way;
otherwise a per-set round-robin pointer picks one.

The organisation is this design's own choice, since only the capacity is
specified. Each slice has 16384 sets × 15 ways × 128 B = 30 MB, and
32 slices give the 960 MB. The set index is taken from line-address bits
[18:5], above the channel bits; the tag is bits [30:19]. The tag and data
arrays are synchronous-read memories, one word per way and set. After reset
the slice clears one set per cycle (16384 cycles) and holds `req_ready` low
until `init_done`.

The slice is blocking: it serves one request at a time. The system study found
performance almost insensitive to L3 latency, so hit-under-miss was left out.
It is the first thing to add if per-slice throughput matters. As built, a
slice accepts at most one request every three cycles, even when every
request hits. With 32 slices at 1.4 GHz that is about 1.9 TB/s of line
traffic. The links carry 11.5 TB/s, and the study assumed about 10.8 TB/s
between L2 and L3, so a real part would need pipelined or banked slices. The state
machine is:

```
S_INIT ─► S_IDLE ─► S_COMPARE ─┬─ hit, read ───────────────────────► S_RSP ─► S_IDLE
                               ├─ hit, writeback (write) ─────────────────────► S_IDLE
                               ├─ miss, dirty victim ─► S_EVICT ─┬─ read ─► S_FETCH_REQ
                               │                                  └─ writeback (install) ─► S_IDLE
                               ├─ miss, clean, read ─► S_FETCH_REQ ─► S_FETCH_WAIT ─► S_INSTALL ─► S_RSP
                               └─ miss, clean, writeback (install) ──────────► S_IDLE
```

## The UHB link (`uhb_link`)

The link is specified by its bandwidth, energy and latency. This module is its
logical layer in the core clock domain: one flit, which is a whole request or
response, per cycle in each direction. It uses credit-based flow control. The
sender holds `DEPTH` credits, one for each entry of the receive FIFO. A flit
takes `LATENCY` register stages to cross, and its credit takes `LATENCY`
stages to return. With `DEPTH ≥ 2·LATENCY+1` the link runs at full rate;
with fewer credits it throttles the sender. The defaults are `LATENCY=4` and
`DEPTH=16`. A flit accepted in cycle *t* is at the receiver in cycle
*t+LATENCY+1*.

The L2-to-L3 round trip was modelled as half the DRAM latency, but no cycle
count is specified, so `LATENCY=4` is an assumption. The serialising PHY
(20 Gb/s interposer signalling in 2.5D, bonded I/O in 3D) is not modelled.

## The switch (`post_l2_switch`, 3D only)

A 3D GPM must work both with and without an MSM stacked under it. The switch
between each L2 slice and its memory is the only change this needs in the
GPM. Its route is a configuration register, not an address decode. `cfg_load`
samples the `msm_present` strap, but only when no read is outstanding, so a
response can never return on the side that is no longer selected. Requests
are held off while `cfg_load` is high. After reset the route points to the
local controller. The request path adds no latency. Assertions check that the
side not selected never responds.

## The memory controller (`mem_ctrl`)

The memory controller is only named as a block, so this is the simplest
controller that does the job. It has an in-order queue of `QDEPTH` requests.
A tag queue remembers the id of each read sent to DRAM, so the in-order read
data can be returned as tagged responses. At most `MAX_OUT` reads can be in
flight. Bank scheduling, refresh and DRAM timing are left to whatever sits
behind the `dram_*` port. The same module serves as the GPM's controller in
the 3D HPC case and as the MSM's controller.

## Files

| file | contents |
|---|---|
| `rtl/copa_pkg.sv` | line, request and response types; `integ_e`; `l3_ev_t` event struct |
| `rtl/sync_fifo.sv` | FIFO helper (type parameter) |
| `rtl/uhb_link.sv` | credit-based link, one direction |
| `rtl/post_l2_switch.sv` | 3D steering switch |
| `rtl/l3_cache.sv` | one L3 slice |
| `rtl/mem_ctrl.sv` | memory controller for one HBM channel |
| `rtl/msm.sv` | one MSM die: `CH` × (L3 slice + MC) |
| `rtl/copa_gpu.sv` | top: GPM side, links, MSMs |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/l2_traffic.sv` | stand-in for an L2 slice: random reads/writebacks with a golden memory |
| `tb/hbm_model.sv` | behavioural HBM channel (sparse store, fixed latency, random stalls) |
| `tb/tb_pkg.sv` | `init_line(addr)`: contents of never-written DRAM lines; `rand_line()` |

## Using the top

1. Hold `rst_n` low, then release it. Wait for `init_done`, which takes 16384
   cycles at the default size.
2. 3D only: drive `msm_present` and pulse `cfg_load`.
3. Drive L2 slice `c`'s misses and writebacks on `l2_req_*[c]`. Only use
   addresses with `addr[4:0] == c`.
4. Accept reads on `l2_rsp_*[c]`. They come back in the order they were
   issued on that channel.
5. Connect each `dram_*[c]` to an HBM channel that returns read data in
   order.

`l3_ev[c]` pulses once for each read hit, read miss, writeback hit, writeback
miss and dirty eviction. These pulses are meant for performance counters.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_copa_gpu rtl/copa_pkg.sv tb/tb_pkg.sv tb/tb_copa_gpu.sv -o sim
./obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_uhb_link` | first-flit latency = LATENCY+1; 64 flits in 64+LATENCY+1 cycles; a link with too few credits throttles; order and data under random back-pressure |
| `tb_mem_ctrl` | one-cycle request latency; tagged in-order read data; outstanding-read limit reached and never exceeded |
| `tb_l3_cache` | directed: miss fill, hit in 2 cycles, writeback hit/miss, dirty victim written to DRAM and read back; then 3000 random requests against a golden memory |
| `tb_post_l2_switch` | routing to local MC, then to the MSM after reconfiguration; reconfiguration refused while a read is outstanding |
| `tb_msm` | two channels with random traffic; DRAM requests stay on their channel |
| `tb_copa_gpu` | end to end at reduced size: a 2.5D instance (2 MSMs × 2 channels, starved links) and a 3D instance run through an HPC phase and then a DL phase. Every mechanism is counted: L3 read/writeback hits and misses, dirty evictions, link credit stalls, both 3D routes, the reconfiguration |
| `tb_copa_gpu_full` | the top at its default size (32 channels, 960 MB of L3): the tag clear takes 16384 cycles, then a random mix with 20 lines per set overflows the 15 ways |

The full-size model needs about 1 GB of memory for the L3 arrays. It takes
about two minutes to build and a few seconds to run.

## How far to trust it, and where it goes beyond the source

These parts follow the architecture as described: where the cut between
GPM and MSM is made; the L3 as a memory-side cache that backs the L2, is
non-inclusive and non-exclusive, gets L2 victims, and sees no request that
has not passed the L2; a switch configured by whether an MSM is present; the
2.5D GPM with no controllers of its own; the 960 MB split over two MSMs; the
link bandwidth target; the 1.4 GHz clock; the DRAM capacity behind the
address width.

These are this design's own choices: the 128-byte line; 32 channels and the
address-to-channel interleave; 15-way, 16384-set slices with round-robin
replacement; allocation on read misses; the blocking L3; credit flow control
with 4-cycle links; the switch's configure-when-idle protocol; the in-order
controller; 8-bit ids; valid/ready everywhere; asynchronous active-low reset.

These are not covered:

* the DRAM protocol;
* mapping channels onto physical HBM sites;
* the link PHY;
* the larger 1920 MB configurations. For those, set `L3_SETS=32768`.

Only the logic has been checked: by the testbenches above, by Verilator
lint, and by elaboration in a second SystemVerilog front end. Nothing has been
checked against the performance figures of the original study. Coarse
synthesis of one full-size L3 slice with Yosys maps each way's tag and data
array onto a memory cell, and the rest is ordinary logic. A real part would
use SRAM macros for these arrays.
