# Cocoon-NMP: a near-memory GEMV device for correlated-noise DP training

Differentially private training adds noise to every gradient step. Plain
DP-SGD draws fresh, independent Gaussian noise each step. Correlated-noise
mechanisms such as banded matrix factorisation get better accuracy by mixing
each new Gaussian sample with the noises of the previous `b-1` steps, so that
later noise partly cancels earlier noise:

    zhat_t = ( z_t - sum_{tau=1..min(t,b-1)} C[t,t-tau] * zhat_{t-tau} ) / C[t,t]

Each past noise is as large as the model (`m` parameters), so the *noise
history* is a `(b-1) x m` matrix. For billion-parameter models and bands of
tens to hundreds it reaches hundreds of gigabytes. That is more than GPU or
host memory can hold, so part of it goes to CXL-attached memory. Reading that
part across the link every step is then the bottleneck. The weighted sum is a
matrix-vector product (GEMV) between the history and one row of `C`, and it
touches every history element once per step.

This RTL is the digital logic of a CXL memory card that runs that GEMV next to
its own DRAM. The host stores a few hundred coefficients on the card and
issues a command. The card streams the
history out of its DDR4 channels, multiplies and accumulates, and leaves an
`m`-element result that the host reads back. The card otherwise behaves as
ordinary CXL memory. The architecture follows the Cocoon-NMP design published
with the Cocoon DP-training framework. The micro-architecture, widths and
encodings here are this implementation's own, because the publication gives
the block structure and the workflow but no RTL-level detail. The places where
this design had to choose are collected in
[Where this design departs from, or adds to, the published description](#where-this-design-departs-from-or-adds-to-the-published-description).

## One training step, as the device sees it

The host, not the device, keeps the algorithm's bookkeeping simple for the
hardware:

1. **Pre-scaling.** The host divides the mixing coefficients `C[t,t-tau]` and
   the fresh sample `z_t` by `C[t,t]` before anything is sent. No division is
   ever done on the card.
2. **Ring buffer.** History row `i` (`0 <= i < K`, `K = b-1`) holds the noise
   of the most recent step `s < t` with `s mod K = i`. The new noise `zhat_t`
   overwrites row `t mod K`, which is the oldest one. Rows therefore never
   move.
3. **Rotated vector.** Because rows stay in place, the coefficient for row `i`
   at step `t` is `c_t[tau]` with `tau = ((t - i) mod K)`, and `tau = K` when
   that is 0. The host sends the vector already in row order. Coefficients of
   rows that do not hold a noise yet (`t < K`) multiply rows that are still
   zero, so the first steps need no special case.

Per step the host then:

| step | host action | device action |
|---|---|---|
| 1 | CXL.mem writes of the vector (`ceil(K/16)` lines), then `OP_LOAD_VEC` | reads `ceil(K/32)` beats into the vector buffer |
| 2 | `OP_GEMV` (history id, result id, `K`, row length, row stride) | streams the history, writes the result row |
| 3 | waits for the completion, then CXL.mem reads of the result row | serves the reads like any memory |
| 4 | `zhat_t = z_t - result` | none |
| 5 | CXL.mem writes of `zhat_t` into row `t mod K`; `zhat_t` to the GPU | serves the writes |

Commands travel over CXL.io and bulk data over CXL.mem. Step 1 can instead
use `K` x `OP_WRITE_VEC`, one coefficient per command, which needs no memory
region for the vector but costs `K` command slots.

The device keeps serving CXL.mem loads and stores from other users during a
GEMV (see [Sharing the channels](#sharing-the-channels)).

## Block structure

    CXL.io ──cmd──► cmd_queue ──► nmp_ctrl ──┬──► va_pa_trans (matrix id → physical address)
             ◄─cpl──────────────────┘        ├──► vector_buffer (≤255 coefficients)
                                             └──► gemv_engine ◄─► vector_buffer
                                                      │   (coefficients in, loaded beats out)
                                                      │ beats (NUM_CH × 512 bit)
    CXL.mem ──host lines (512 bit)──► nmp_interconnect ◄┘
                                             │ one port per channel
                                   DDR4 controller 0 … NUM_CH-1 (outside this RTL)

| module | role |
|---|---|
| `cocoon_nmp_top` | wires the blocks; its ports are the CXL.io command/completion side, the CXL.mem side, and one port per memory controller |
| `cmd_queue` | FIFO of commands, so several host jobs are served first come, first served |
| `nmp_ctrl` | takes one command at a time and carries it out; a GEMV holds it until the engine finishes |
| `va_pa_trans` | offset table: every matrix is one contiguous region, and its address is its stored base plus the offset inside it |
| `vector_buffer` | the mixing vector, written once per step (a 32-element beat or one element at a time) and reused for every output beat |
| `gemv_engine` + `mac_lane` | the GEMV: `NUM_CH*16` multiply-accumulate lanes, read scheduling, result write-back; also fetches the vector from memory |
| `nmp_interconnect` + `sync_fifo` | channel interleaving, host/engine arbitration, response buffering |
| `cocoon_pkg` | shared widths, the command, completion and memory request types |

The CXL endpoint, the DDR4 controllers and the DIMMs are not part of the RTL.
Their sides are ports of `cocoon_nmp_top`. `tb/mem_channel_model.sv` is a
behavioural stand-in for one controller with its DIMM. The published device
diagram also shows an embedded ARM core and OR/AND/CMP operator units in the
FPGA fabric. No behaviour is given for them and only the GEMV engine is used,
so they are absent here.

## The GEMV schedule and the memory layout

This is the part that decides the device's speed, and the part least visible
from the block list.

**Beats and interleaving.** Physical memory is interleaved over `NUM_CH`
channels at 64-byte granularity:

    channel      = pa[6 +: log2(NUM_CH)]
    channel word = pa >> (6 + log2(NUM_CH))

A host CXL.mem line (64 bytes) touches one channel. The engine always moves a
*beat*: the same channel word from every channel at once, `NUM_CH*64` bytes
(128 bytes for two channels). Beat address `a` covers bytes
`a*128 .. a*128+127`. Channel `j` supplies bits `[j*512 +: 512]`. A beat holds
`LANES = NUM_CH*16` consecutive 32-bit elements, little-endian, element `l` in
bits `[l*32 +: 32]`. One beat per cycle uses the full bandwidth of every
channel.

**Matrix layout.** A history row of `m` elements occupies `beats = m/32`
consecutive beats. The host pads `m` up to a whole beat. Row `i` starts
`i*stride` beats after the matrix base, and `stride >= beats` allows padding
between rows. The result row is `beats` consecutive beats at the
destination's base.

**Order of work.** For every output beat `c = 0..beats-1` the engine reads
beat `c` of rows `0, 1, ..., K-1` (addresses `src + i*stride + c`). Each
arriving beat is multiplied lane by lane with the coefficient `v[i]` of its
row and added to the lane sums. The first row restarts the sums, so no clear
cycle is needed. After row `K-1` the 32 sums are rescaled and written as beat
`c` of the result. Then the next column of beats starts. Every history
element is read exactly once. The vector is read `beats` times from the
on-chip buffer, never from DRAM. The only on-chip state that grows with the
problem is the vector (`K <= 255`). The lane accumulators are one beat wide
whatever `m` is.

**Vector load.** `OP_LOAD_VEC` runs the same read machinery with one row and
no MAC work. It reads `ceil(K/32)` consecutive beats (at most 8) and writes
each into the vector buffer's 32-element beat port. That takes a handful of
cycles plus one memory latency.

**Timing.** Reads are issued one per cycle, each row step adding `stride` to
the address. At most `MAX_OUT` (= `ENG_DEPTH`, 16) reads are in flight. That
covers a memory latency of up to about 16 cycles at full rate and keeps the
interconnect's response FIFOs from overflowing. A finished result beat is
written before any further read is issued. An undisturbed GEMV of `K` rows
and `B` beats takes `K*B` read cycles, `B` write cycles and one memory
latency, plus a few cycles. The testbenches check this: 31 x 4 beats in 135
cycles at latency 6. At `NUM_CH = 2` a beat per cycle is 128 B/cycle, or
48 GB/s at 375 MHz. That matches the roughly 48 GB/s peak GEMV throughput
reported for the FPGA prototype with DDR4.

## Number format

The publication does not state a number format. Elements and coefficients
here are 32-bit signed fixed point with 16 fraction bits (Q16.16). Each lane
forms the exact 64-bit product and accumulates it in 72 bits, which leaves
8 guard bits for up to 256 terms. The result is shifted right by 16 (rounding
toward minus infinity) and saturated to 32 bits. A floating-point version
would replace `mac_lane` and `gemv_engine.scale_sat` and keep everything
else.

## Commands

Commands (`cocoon_pkg::cmd_t`) arrive on a valid/ready port standing for the
CXL.io register interface. Each command yields one completion
(`cpl_t`: tag, opcode, error) on `cpl_valid`.

| opcode | fields used | effect |
|---|---|---|
| `OP_SET_OFFSET` | `src_id`, `value` = base byte address (128-byte aligned) | set the offset of matrix `src_id` |
| `OP_WRITE_VEC` | `rows` = index, `value[31:0]` = coefficient | one vector element |
| `OP_LOAD_VEC` | `src_id` = matrix holding the vector, `rows` = element count | loads elements `0..rows-1`; element `i` sits at byte `4i` of the matrix; completes after the last beat arrives |
| `OP_GEMV` | `src_id` history, `dst_id` result, `rows` = K, `beats`, `stride` | run the GEMV; completes when the last result beat is accepted by memory |
| `OP_NOP` | none | completes at once (ordering fence) |

A GEMV or load that names a matrix with no offset, or asks for more rows
than the vector buffer holds, starts nothing and completes with `err` set. Commands are
served strictly in arrival order. A vector load or vector writes therefore
belong to the GEMV that follows them even when several jobs share the
device. Each job must send its vector and its GEMV as one uninterrupted
group. The host must post the vector's CXL.mem writes before it sends
`OP_LOAD_VEC`. The interconnect forwards requests to a channel in the order
it accepts them, so the load then reads the new data, as long as the memory
controller keeps same-address order. A full queue holds off
CXL.io through `cmd_ready`. Completions have no back-pressure.

## Sharing the channels

The card is memory and accelerator at once. `nmp_interconnect` gives a host
CXL.mem request priority in any cycle in which it can be accepted. The engine
is granted only when every channel is ready and no host request is taken that
cycle, and `eng_blocked` marks the cycles it lost. Read responses carry their
source. Engine data wait in one FIFO per channel until all channels have
delivered their half of a beat. Host data return with the host's tag, lowest
channel first, so host reads to different channels may complete out of
order. At most `HOST_MAX` host reads are outstanding. Writes are posted and
get no response. A channel's ready must not depend on its valid, because
grants are made in lockstep across channels.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `NUM_CH` | 2 | DDR4 channels; lanes = `NUM_CH*16` | chosen: the diagram shows several controllers; two DDR4-3200 channels match the reported 48 GB/s |
| `VEC_DEPTH` | 255 | largest `K = b-1` | bands up to b = 256 are evaluated |
| `NUM_MAT` | 16 | matrices in the offset table | chosen |
| `CMDQ_DEPTH` | 16 | command queue | chosen |
| `ENG_DEPTH` | 16 | engine reads in flight, engine FIFO depth | chosen |
| `HOST_MAX` | 8 | host reads in flight | chosen |
| `PA_W` (package) | 40 | physical address bits (1 TiB) | chosen |

## Where this design departs from, or adds to, the published description

From the publication: the command path over CXL.io and the data path over
CXL.mem, a command queue served first come first served, per-matrix offset
translation, a vector buffer reused across the whole row, a GEMV engine of
MAC and accumulate units, memory-channel interleaving, the ring-buffer
history at row `t mod (b-1)`, and host-side pre-scaling and vector rotation.

Chosen here: the number format; the command set and encoding, including
the extra one-coefficient-per-command path for the vector; the beat
schedule, with output-stationary accumulation over rows; the interleave
granularity and address mapping; host-first arbitration; the depths and
widths in the table above; the error completion; and writing the result into
CXL memory rather than into a dedicated readout buffer. The publication says
only that the host reads the result. The number of lanes and channels is not
stated either; two channels and 32 lanes are an estimate from the reported
throughput.

Two sentences of the evaluation disagree on how much history is offloaded in
the single-device runs: the figure caption says over 100 GB, the text over
200 GB. Nothing in the RTL depends on this. Both fit the address space.

Not implemented: the CXL controller, the DDR4 controllers and DRAM, the ARM
core and the OR/AND/CMP operator units. Also not implemented is the
embedding-table side of the framework (pre-computing and coalescing noise for
cold embedding rows), which is GPU/CPU software.

## Does it hold the evaluated workloads?

The device must hold `K = b-1` coefficients and address the part of the
history placed on it. The largest band evaluated, b = 256 (OPT-350M on one
device, OPT-1.3B and GPT-XL across four devices), needs 255 coefficients,
which is exactly `VEC_DEPTH`. Row lengths up to 2^32 beats (137 G elements)
are expressible. A 40-bit address space covers 1 TiB per device. The single
device runs place 100–200 GB in CXL memory and the four-device runs about
200 GB per device, so all fit. The DRAM capacity of a particular board is
outside the RTL. The published prototype could not hold OPT-1.3B at b = 64,
and that point was projected. At 48 GB/s, one GEMV over 200 GB of history
takes about 4 s.

## Simulating

Everything is plain SystemVerilog-2017 and runs on Verilator 5 (two-state,
`--timing`). Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/cocoon_pkg.sv tb/tb_cocoon_nmp_top.sv --top-module tb_cocoon_nmp_top
    ./obj_dir/Vtb_cocoon_nmp_top

| testbench | what it shows |
|---|---|
| `tb_cmd_queue` | FIFO order, occupancy, full back-pressure |
| `tb_va_pa_trans` | translation and miss flag on both ports |
| `tb_vector_buffer` | a full 255-entry vector, overwrite, 32-element beat writes mixed with element writes, out-of-range reads |
| `tb_gemv_engine` | random shapes against an integer reference GEMV, saturation, stalls, the read limit, cycle count, vector loads followed by a GEMV with the loaded vector |
| `tb_nmp_interconnect` | 64-byte interleave (back-door check of channel contents), concurrent host and engine reads, engine writes read back as lines, engine held off by host |
| `tb_nmp_ctrl` | each opcode's effect, translated GEMV and load arguments, in-order completions, refused GEMVs and loads |
| `tb_cocoon_nmp_top` | the whole step loop of the recurrence for 20 steps with K = 7 (ring wrap), compared with a reference recurrence, with the vector loaded from CXL memory on even steps and sent as commands on odd steps; also CXL.mem traffic during GEMVs, a full command queue, a translation miss, two queued jobs and the read limit; counts each of these and fails if one never happens |
| `tb_cocoon_nmp_bands` | the loop at every other evaluated band, b = 16, 32, 56, 64, 112 and 128, on one device, each from a fresh zero history through a ring wrap; every vector loaded from CXL memory; rows densely packed (stride = row length); each GEMV's cycle count checked |
| `tb_cocoon_nmp_full` | the same loop at b = 256 (K = 255, full vector buffer) for 258 steps with rows of 64 elements; every undisturbed GEMV's cycle count is checked |

`tb/mem_channel_model.sv` models a memory controller and its DIMM. It has
sparse storage, a fixed read latency and random stalls, and it returns reads
in order. The end-to-end tests use it for both channels.

All testbenches pass with random initial register contents. The reference
results are computed inside the testbenches from their own record of past
noises, not read back from the device. A full-scale run with the hundreds of
millions of elements per row that real models have has not been
simulated. The row length is a command field,
and longer rows repeat the same column loop.
