# DataMaestro: decoupled data streaming for a GeMM accelerator, in SystemVerilog

A dataflow accelerator is only as fast as the operands that reach it. An
8x8x8 multiply-accumulate array needs two 512-bit operand tiles every cycle,
plus a 2048-bit initial value and a 2048-bit result every K steps. If the
accelerator fetched these itself, every bank conflict in the scratchpad
would stall the array.

DataMaestro is a streaming engine that sits between a multi-banked
scratchpad and one accelerator port. It separates *access* from *execute*:

* it computes the addresses of an N-dimensional affine access pattern on its
  own;
* it issues the memory requests early;
* it buffers the returned words in FIFOs, and from these the accelerator
  takes one wide word per cycle.

Each DataMaestro has three parts:

* a cheap N-D address generator;
* memory channels, each prefetching on its own (fine-grained prefetch);
* a bit-permuting address remapper that changes the bank interleaving at
  run time.

Optional datapath extensions between the FIFOs and the accelerator, such as a
tile transposer and a broadcaster, reshape the data as it flows past.

This repository holds RTL for the engine and for the evaluation system built
around it. That system has five DataMaestros, a tensor-core-like 8x8x8 GeMM
core, a quantizer, an interleaved crossbar and a 128KB scratchpad. The
architecture follows the DataMaestro paper by Yi, Deng et al. (KU Leuven).
The microarchitectural details the paper does not give are this design's
own. They are listed under [Where this RTL departs from or goes beyond the
paper](#where-this-rtl-departs-from-or-goes-beyond-the-paper).

## The evaluation system

```
                 host / DMA port (ext_req, ext_gnt, ext_rsp)
                                |
   +----------------------------+-----------------------------------+
   |          interleaved crossbar (89 ports -> 2048 banks)         |
   |          scratchpad: 2048 banks x 8 words x 64 bit = 128KB     |
   +----+----------+-----------+------------+----------------+------+
        | 8 ch     | 8 ch      | 32 ch      | 32 ch          | 8 ch
      DM A       DM B        DM C         DM D             DM E
     (read)     (read)      (read)       (write)          (write)
   Transposer  Transposer  Broadcaster     ^                ^
        |512       |512        |2048       | 2048           | 512
        v          v           v           |                |
      +-----------------------------+      |           +---------+
      |  GeMM 8x8x8: D = A x B + C  |------+--(mode)-->|quantizer|
      +-----------------------------+   cfg_quant_en   +---------+
```

| DataMaestro | mode  | temporal dims | spatial bounds | channels | data FIFO depth | extension   |
|-------------|-------|---------------|----------------|----------|-----------------|-------------|
| A           | read  | 6             | [8]            | 8        | 8               | Transposer  |
| B           | read  | 3             | [8]            | 8        | 8               | Transposer  |
| C           | read  | 3             | [8,4]          | 32       | 1               | Broadcaster |
| D           | write | 3             | [8,4]          | 32       | 1               | none        |
| E           | write | 3             | [8]            | 8        | 1               | none        |

All five use 64-bit bank words, a 2048-bank memory and the addressing-mode
list [2048, 512] banks per group. Every channel has a 4-deep address FIFO
(`ABF`, a parameter of `dm_system`).

The GeMM result goes either to DataMaestro D as int32 tiles, or through the
quantizer to DataMaestro E as int8 tiles. The choice is made at run time by
`cfg_quant_en`. Operand C is used once per output tile and D is produced
once per output tile. So C, D and E only need one word every K steps, which
is why their data FIFOs are one word deep.

`dm_system` does not include the host core and the DMA. The host's
configuration writes are modelled as top-level ports, one `stream_cfg_t`
struct per DataMaestro plus the accelerator settings. The host/DMA's memory
traffic uses one extra crossbar port (`ext_*`).

## Address generation

A DataMaestro walks the loop nest

```
for x_t[D_t-1] < B_t[D_t-1] ... for x_t[0] < B_t[0]:          (temporal, 1 per cycle)
  parfor channel c = (x_s[0], x_s[1], ...):                    (spatial, N_C at once)
     addr = Addr_B + sum_i S_t[i]*x_t[i] + sum_j S_s[j]*x_s[j]
```

The temporal bounds, temporal strides, spatial strides and base are set at
run time. The number of dimensions and the spatial bounds are fixed at
design time.

**Temporal AGU (`dm_temporal_agu`).** There is no counter-to-index division
and no multiplier. Each dimension is a pair of counters:

* a *bound counter* holds the loop index;
* a *stride counter* holds `S_t[i] * x_t[i]`, by adding `S_t[i]` at every
  step and clearing to 0 when the dimension wraps.

Dimension 0 steps whenever an address is taken. Dimension i+1 steps when all
dimensions below it are at their last index in the same step ("overflow").
An adder tree sums the base and all stride counters. The AGU produces an
address only when every channel's address FIFO has room (*QueueReady*), so
all channels see the same temporal sequence. `finish` pulses after the last
address. A bound of 0 counts as 1.

**Spatial AGU (`dm_spatial_agu`).** Channel `c` has fixed spatial indices.
They are the mixed-radix digits of `c`, with `BS[0]` the fastest digit. Its
address is the temporal address plus `S_s[j]` times those constants. For
`BS = [8,4]`, channel `c` gets `TA + S_s[0]*(c mod 8) + S_s[1]*(c div 8)`.

Worked example: a 4x4x4 GeMM on a 2x2x2 array, checked in the testbenches.
The settings are `B_t = [2,2,2]`, `S_t = [4,0,8]`, `B_s = [2,2]`,
`S_s = [1,2]`. The temporal addresses are 0,4,0,4,8,12,8,12. In each cycle
the four channels get TA+0 .. TA+3.

A 6-D temporal AGU on DataMaestro A can express the access pattern of a
convolution directly over an input stored as C/8 x H x W x 8. This is
"implicit im2col": the GeMM core sees only GeMM tiles, and no unrolled copy
of the input is ever made. One 64-bit word holds the 8 channels of one
channel group at one pixel. The mapping onto the core is:

* m: 8 neighbouring output pixels in a row;
* k: 8 input channels;
* n: 8 output channels.

DataMaestro A's 8 channels fetch 8 pixels S words apart (spatial stride
8*S bytes, where S is the convolution stride). Its six temporal loops, from
innermost to outermost, are:

```
fx (FX, stride 8)       fy (FY, 8*W)          channel group (C/8, 8*H*W)
out-ch tile (N/8, 0)    pixel tile (OX/8, 64*S)   output row (OY, 8*W*S)
```

The first three loops together form the K loop of one output tile.

## Fine-grained prefetch: the read channel

This is the part where the timing matters most. A read DataMaestro does not
fetch its 8 or 32 words in lockstep. Each channel has its own address FIFO,
memory interface controller (`dm_mic_read`), crossbar port and data FIFO. A
channel that loses arbitration for a bank delays only itself, and the other
channels keep running ahead. A wide word goes to the accelerator when every
channel FIFO holds a word. All heads are then popped together, and channel
c becomes bits `[64c +: 64]`.

The controller has two halves.

* **Request side (RSC).** It raises a read request for the address at the
  head of the address FIFO and holds it until the crossbar grants it. The
  grant pops the address.
* **Outstanding Request Manager (ORM).** It counts *reserved* data-FIFO
  slots: +1 per granted request, -1 per word popped by the consumer. The RSC
  may request only while `reserved - popped_now < D_DBf`. Every in-flight
  word therefore has a slot waiting, and the FIFO cannot overflow. A slot
  freed in a cycle can be re-requested in that same cycle.

Memory read latency is one cycle (request granted in cycle t, data in the
FIFO at the end of t+1, visible in t+2). This gives the following rates and
latencies:

* A data FIFO of 2 or more words sustains one wide word per cycle.
* A 1-deep FIFO sustains one word every two cycles. This is enough for C, D
  and E.
* With no conflicts, the first word leaves a reader 4 cycles after `start`,
  plus one cycle per enabled extension.

**Channel enable** (`ch_en`, an addition of this design). A disabled read
channel consumes its addresses without touching memory and delivers zeros.
DataMaestro C uses this with the Broadcaster. It fetches one 8 x int32 bias
row with 4 of its 32 channels, and the Broadcaster copies that row to all 8
rows. This saves 28 of 32 memory accesses per C tile.

**Write side (`dm_writer`, `dm_mic_write`).** A wide word is accepted when
every channel's data FIFO has room, and channel c's slice goes to FIFO c.
Each channel's controller writes whenever both its address head and its
data head are present. The grant pops both. With 1-deep FIFOs a writer
accepts one word every two cycles. The writer's ready signal depends only on
the FIFO state. If it also accepted a word whenever a full FIFO was being
drained in the same cycle, it would run at full rate. But then ready would
depend on the crossbar grant, which depends on the readers' requests, which
depend on the accelerator's pops. Those pops depend on ready, so the signals
would form a combinational loop.

## Addressing modes and the remapper

The crossbar always decodes a physical address as fully interleaved
(MSB to LSB):

```
[16:14] wordline (3 bits) | [13:3] bank (11 bits, 2048 banks) | [2:0] byte
```

With banks grouped G at a time, logical addresses are interleaved inside a
group and contiguous from one group to the next:

```
logical  = [group | wordline | bank-in-group | byte]
physical = [wordline | group | bank-in-group | byte]
```

For a power-of-two G this is only a rewiring of bits. `dm_addr_remapper`
wires one permutation per entry of its group list and selects one with the
run-time mode `R_S`:

* G = 2048 is the identity (fully interleaved).
* G = 512 gives four 32KB regions, each spread over its own 512 banks.
  Operands placed in different regions can never conflict.
* G = 1 would be non-interleaved (a bank holds contiguous addresses). The
  module supports it, but the evaluation system's list has only 2048 and
  512.

The remapper sits after the spatial AGU, one per channel. The host must load
and read memory with the same permutation. The system testbench shows this.

## Datapath extensions

An extension (`dm_ext_transposer`, `dm_ext_broadcaster`) is a valid/ready
stage with three parts:

* a run-time bypass, a multiplexer between the custom logic and a straight
  wire;
* the custom logic;
* one pipeline register, which sustains one word per cycle.

Extensions chain in a fixed order, Transposer then Broadcaster. Each one is
generated only if its design-time flag is set.

* **Transposer.** Transposes an 8x8 tile of bytes. Input element (r,c) at
  bits `(8r+c)*8` moves to `(8c+r)*8`.
* **Broadcaster.** Repeats the low `SRC_W` = 256 bits across the 2048-bit
  word.

## Memory subsystem

`dm_xbar` gives every port access to every bank. The arbitration is done
per port, not per bank:

* Port `(prio + k) mod NM` has rank k.
* A requesting port is granted when no lower-ranked requesting port wants
  the same bank.
* `prio` advances by one every cycle.

The result is the same as a round-robin arbiter per bank. With 89 ports and
2048 banks, though, 89x89 comparators cost far less than 2048 arbiters.
Granted ports drive `dm_spm` directly. A read's data returns on the same
port one cycle after the grant.

`dm_spm` holds the banks as one array. No two granted ports share a bank, so
each bank sees at most one access per cycle, as a single-port SRAM macro
would. In silicon it would be a set of SRAM macros.

The evaluation system lists 2048 banks for a 128KB memory of 64-bit words.
Taken literally, each bank holds only 8 words. This RTL follows those
numbers. The bank count is `dm_pkg::NUM_BANKS` and the size is `MEM_BYTES`.
The derived widths follow automatically if you change them.

## Accelerators

* **`dm_gemm`.** 8x8x8 signed int8 multiply-accumulate with int32
  accumulation, computing D = A x B + C.
  * Layouts: `A[m][k]` at bits `(8m+k)*8`, `B[k][n]` at `(8k+n)*8`, and
    `C`/`D[m][n]` at `(8m+n)*32`.
  * A K step is taken when A and B are valid, and C too on the first step.
    On the last step the result register must also be free.
  * After `cfg_k_tiles` steps the tile is output; `cfg_tiles` tiles follow
    one `start`.
* **`dm_quant`.** For each of 64 lanes it computes
  `sat8(((x * mult + 2^(shift-1)) >>> shift) + zp)`, with one register
  stage. The formula is this design's own: the paper gives only
  "E = Rescale(D)".

## Programming a GeMM

`tb/tb_dm_system.sv` is the reference for configuring a run. For
M x N x K = 8MT x 8NT x 8KT it programs:

| stream | base | loop 0 (inner)  | loop 1             | loop 2            | spatial strides |
|--------|------|-----------------|--------------------|-------------------|-----------------|
| A      | 0x00000 | KT, stride 64 | NT, stride 0     | MT, stride 64*KT  | 8               |
| B (B^T stored, Transposer on) | 0x08000 | KT, 64 | NT, 64*KT | MT, 0 | 8             |
| C bias + Broadcaster, ch_en=0xF | 0x10000 | NT, 32 | MT, 0 | -          | 8, 64           |
| C full tiles, Broadcaster bypassed | 0x10000 | NT, 256 | MT, 256*NT | -  | 8, 64           |
| D      | 0x18000 | NT, 256       | MT, 256*NT         | -                 | 8, 64           |
| E      | 0x18000 | NT, 64        | MT, 64*NT          | -                 | 8               |

The GeMM core gets `cfg_k_tiles = KT` and `cfg_tiles = MT*NT`. Unused
temporal loops are set to bound 1. After one `start` pulse every unit runs;
`busy` falls when the last result has been written.

## Measured behaviour

These are cycle counts from `tb_dm_system` at the default parameters, from
`start` until `busy` falls, including pipeline fill. Utilisation is K steps
divided by cycles.

| GeMM M x N x K | C source   | output | mode          | K steps / cycles | utilisation |
|----------------|------------|--------|---------------|------------------|-------------|
| 64x64x64       | broadcast  | D      | grouped (512) | 512 / 519        | 98.7%       |
| 64x64x64       | broadcast  | D      | interleaved   | 512 / 523        | 97.9%       |
| 32x32x32       | broadcast  | D      | grouped       | 64 / 71          | 90.1%       |
| 32x32x32       | broadcast  | D      | interleaved   | 64 / 73          | 87.7%       |
| 32x32x8        | full tiles | D      | interleaved   | 16 / 46          | 34.8%       |
| 128x128x64 (one BERT-Base attention head, 128 tokens) | broadcast | D | grouped | 2048 / 2056 | 99.6% |
| 64x64x768 (slice of a ViT-B-16 MLP layer) | broadcast | D | grouped | 6144 / 6152 | 99.9% |

`tb_dm_system_conv` runs convolutions with 3x3 kernels in the same way:

| input         | channels in/out | stride | mode        | K steps / cycles | utilisation |
|---------------|-----------------|--------|-------------|------------------|-------------|
| 10x10         | 16 / 16         | 1      | grouped     | 288 / 295        | 97.6%       |
| 10x10         | 16 / 16         | 1      | interleaved | 288 / 306        | 94.1%       |
| 17x17         | 16 / 16         | 2      | interleaved | 288 / 306        | 94.1%       |
| 17x17         | 16 / 16         | 2      | grouped     | 288 / 295        | 97.6%       |
| 18x18         | 8 / 8           | 1      | grouped     | 288 / 295        | 97.6%       |
| 10x10 (ResNet-18 stage 2 slice) | 128 / 64 | 1 | grouped, input and weights share a group | 9216 / 10871 | 84.8% |
| 10x10 (same)  | 128 / 64        | 1      | grouped, separate groups | 9216 / 9223 | 99.9% |
| 17x17 (ResNet-18 stage 3 slice) | 128 / 32 | 2 | grouped | 4608 / 4622 | 99.7% |
| 10x10 (VGG-16 block 3 slice) | 256 / 32 | 1 | grouped | 9216 / 9371 | 98.4% |

The network slices are 8x8 output patches with part of the output channels.
They are sized so that one slice fills most of the 128KB scratchpad. Whole
layers need tiling from off-chip memory, which is the job of the host and
the DMA. The two ResNet rows show why the addressing mode exists. In grouped
mode, a stream placed in a bank group of its own never conflicts with the
other streams. Counts vary by a few cycles from run to run, because the
crossbar's rotating priority depends on the cycle in which a run starts.

The loss at small sizes is mostly pipeline fill of about 7 cycles. In the
interleaved mode, A at 0x00000 and B at 0x08000 map to the same banks and
conflict. The grouped mode puts them in different bank groups. With K = 8
every K step produces a 2048-bit result. The writer's 1-deep FIFOs then
limit the run to one result every two cycles, and the back-pressure reaches
the readers: the ORM throttles and the AGU stalls. With a K loop
of two or more tiles, the 1-deep C, D and E buffers keep up, as the runs
above show.

## Where this RTL departs from or goes beyond the paper

These follow the paper:

* the loop-nest address model and the dual-counter temporal AGU with
  overflow chaining;
* spatial addresses computed from design-time bounds and run-time strides;
* per-channel memory interface controllers with an ORM that reserves FIFO
  slots;
* wide-word gathering;
* bypassable, cascaded extensions with pipeline cuts;
* addressing-mode switching by bit permutation and a multiplexer;
* the five-DataMaestro system with its design-time parameters, the 8x8x8
  GeMM and the D-or-quantizer routing.

These are this design's own choices:

* memory latency of one cycle and in-order responses;
* crossbar arbitration and port-lane memory organisation;
* address FIFO depth 4 (the paper gives none for the evaluation system);
* the channel-enable input;
* which slice the Broadcaster copies (the low 256 bits);
* the order of chained extensions;
* the rescale formula;
* the GeMM step protocol and operand layouts;
* full-word writes with no byte strobes;
* configuration through ports instead of host-written CSRs;
* `busy`/`start`/`finish` handshakes; counter width 16.

Not built:

* the RISC-V host and the DMA/AXI port. A crossbar port is left for them.
* the addressing-mode list's non-interleaved entry (the paper lists only
  [2048, 512]). It is a parameter change away:
  `GROUPS = '{2048, 512, 1, 1}`, `NMODES = 3`, with `stream_cfg_t.mode`
  widened.

## Files

| file | content |
|------|---------|
| `rtl/dm_pkg.sv` | constants, `mem_req_t`/`mem_rsp_t`, `stream_cfg_t` |
| `rtl/dm_fifo.sv` | first-word-fall-through FIFO (address and data buffers) |
| `rtl/dm_temporal_agu.sv`, `rtl/dm_spatial_agu.sv` | address generation |
| `rtl/dm_addr_remapper.sv` | addressing-mode bit permutation |
| `rtl/dm_mic_read.sv`, `rtl/dm_mic_write.sv` | per-channel memory interface controllers |
| `rtl/dm_ext_transposer.sv`, `rtl/dm_ext_broadcaster.sv` | datapath extensions |
| `rtl/dm_reader.sv`, `rtl/dm_writer.sv` | DataMaestro in read and write mode |
| `rtl/dm_xbar.sv`, `rtl/dm_spm.sv` | crossbar and banked scratchpad |
| `rtl/dm_gemm.sv`, `rtl/dm_quant.sv` | GeMM core and quantizer |
| `rtl/dm_system.sv` | evaluation system top |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_dm_system_conv.sv` | convolutions through implicit im2col on the full system |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes on its
own; a watchdog ends a hung run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_dm_system \
    rtl/dm_pkg.sv rtl/dm_system.sv tb/tb_dm_system.sv -Mdir obj -o sim
./obj/sim
```

Verilator finds the other modules in `rtl/` through `-I`. The same command
works for any `tb_<module>`; `tb_dm_system_conv` uses `rtl/dm_system.sv`
in the same way. The system testbench builds in about 1.5
minutes and runs in about ten seconds. It covers:

* GeMMs from 16x16x16 to 64x64x64, plus the two Transformer layer slices;
* both addressing modes and both result paths;
* Transposer and Broadcaster, each active and bypassed.

It fails if any of the following never happens: a bank conflict, ORM
throttling, AGU back-pressure or a GeMM stall.

Testbenches drive inputs on the falling clock edge and sample just after
it. Verilator models only two states, so every register the design reads
is reset. The scratchpad is not reset: the testbenches write memory before
they read it.
