# A mixed-criticality SoC interconnect and accelerator fabric in SystemVerilog

This RTL implements the parts of a heterogeneous edge SoC that make it *time-predictable*
and *reliable*. Several software domains share one chip:

- a safety domain;
- a secure domain;
- a pair of host cores running virtual machines;
- a floating-point vector cluster;
- an integer cluster whose cores can be grouped for redundancy.

Time-critical tasks must keep a bounded latency while other tasks flood the same memories,
and a hardware fault in a redundant core group must be repaired in a few tens of cycles.

Four mechanisms deliver this, and they are what this RTL is about:

1. **Traffic shaping at every initiator** (`tsu`). Long bursts are cut into short
   fragments, writes are buffered until complete, and each initiator's bandwidth per
   period is capped.
2. **Memories that can be split between tasks in space**:
   - an L2 scratchpad with an interleaved and a contiguous view of the same banks
     (`dcspm`);
   - a last-level cache whose sets are partitioned per task id (`dpllc`).
3. **Adaptive modular redundancy in the integer cluster** (`hmr_unit`). Twelve cores run
   independently, as six checked pairs, or as four voted triples.
4. **Hardware fast recovery** (`hfr_unit`). An ECC-protected shadow copy of each core
   group's architectural state is restored in about 20 cycles after a mismatch.

The processor cores themselves are not part of this RTL:

- the safety and host CPUs;
- the cluster cores;
- the vector arithmetic units.

Their connections are ports of the modules that would host them. The top level is
`carfield_soc`.

## System view

```
 secure  safe   host0  host1  serial  sys DMA  vector cl.  AMR cl.
   |      |      |      |      |        |         |          |
  TSU    TSU    TSU    TSU    TSU      TSU       TSU        TSU      (one per initiator)
   +------+------+------+------+--------+---------+----------+
                     64-bit AXI4 crossbar (axi_xbar)
   +-----------+-----------+-----------+-----------+-----------+
 L2 port 0   L2 port 1    DPLLC      vector L1    AMR L1     peripherals
 (dcspm)     (dcspm)    -> HyperRAM  (slave)      (slave)    (default route)
```

Address map:

| Base        | Size    | Target                                                    |
|-------------|---------|-----------------------------------------------------------|
| 0x5000_0000 | 256 KiB | AMR cluster L1                                            |
| 0x5180_0000 | 128 KiB | vector cluster L1                                         |
| 0x7800_0000 | 2 MiB   | L2 port 0 (interleaved view, then the contiguous view at +1 MiB) |
| 0x7820_0000 | 2 MiB   | L2 port 1 (same layout)                                   |
| 0x8000_0000 | 1 GiB   | HyperRAM through the DPLLC                                |
| anything else | —     | peripheral port                                           |

All configuration goes over one simple register bus (`reg_req_t`: valid, write, 16-bit
address, 32-bit data; the response is combinational). Address bits [15:12] select the unit:

| Page  | Unit                  |
|-------|-----------------------|
| 0–7   | TSU of initiators 0–7 |
| 8     | DPLLC                 |
| 9     | system DMA            |
| 10    | AMR cluster           |
| 11    | vector cluster        |

Each module's header comment lists its registers. The whole design runs on one clock.

AXI channels are packed structs in `soc_pkg`:

- 32-bit address, 64-bit data, 4-bit ID;
- a 4-bit user field, which carries the cache partition id.

## Why a long burst hurts, and how the shaper bounds it

The crossbar (`axi_xbar`) arbitrates each target round robin. It stays locked to the
winner until the burst ends: R last for reads, B for writes. A DMA that issues 256-beat
bursts therefore holds a memory for at least 256 cycles, whatever priority anyone else has.

The traffic shaper unit (`tsu`) sits in front of every initiator and chains three stages:

- **Granular burst splitter** (`tsu_gbs`):
  - Cuts an INCR burst into fragments of `GRAN` beats.
  - The first fragment leaves in the cycle the burst arrives, so splitting adds no latency.
  - The initiator's AR/AW handshake completes with that first fragment, so it can take R
    beats at once. The remaining fragments come from a stored copy of the request.
  - Upstream the burst still looks whole: the inner `last` flags are masked and the B
    responses of the fragments are merged (the worst one wins).
- **Write buffer** (`tsu_wb`, 16 beats):
  - Holds AW until all of the burst's W beats are in the buffer.
  - A slow writer therefore never locks a target while it trickles data in.
  - A burst longer than the buffer is forwarded once the buffer is full.
- **Traffic regulation unit** (`tsu_tru`):
  - Counts the bytes granted per direction in a period of `PERIOD` cycles.
  - Holds back a request whose cost, `(len+1) << size`, would exceed the budget.
  - The first request of a period always passes, so no request can starve.

After reset the splitter and the regulator are off.

In the end-to-end test the system DMA streams 256-beat bursts through L2 while the safety
domain reads single words from L2. The worst read latency is 262 cycles with the shaper
off and 14 cycles with 8-beat fragments.

## The L2 scratchpad: one set of banks, two views

`dcspm` has four 64-bit banks of 256 KiB each, grouped in pairs, with SECDED ECC per word.
The same storage appears at two address ranges:

- **Interleaved view** (offset 0 to 1 MiB): word *w* is in bank *w* mod 4, row *w*/4.
  Streams spread over all banks.
- **Contiguous view** (offset 1 to 2 MiB): each 256 KiB range is one bank. Software that
  places two tasks in different banks gives each a private path.

There are two AXI ports, one crossbar target each. The second port sees the same windows
2 MiB higher. Each bank arbitrates the two ports round robin.

With private banks both ports stream at the full rate, 128 bits per cycle in total. On one
shared bank they take turns: in the testbench, 64 beats per port take 67 cycles on private
banks and 131 cycles on a shared bank.

## The partitionable last-level cache

`dpllc` is a 128 KiB cache in front of the HyperRAM:

- 8 ways × 256 sets × 64-byte lines;
- write-back and write-allocate;
- one miss at a time;
- round-robin victim selection per set.

The partition id of a request comes from the AXI user field. Partition *p* may only place
lines in sets `START[p] .. START[p]+NSETS[p]-1`, and the set index is the line address
modulo `NSETS[p]`. A partition with `NSETS = 0` uses the whole cache, which is the reset
state.

Tags hold the full line address, so data stays correct when the layout changes: a line can
then simply be missed.

Writing *p* to the FLUSH register walks partition *p*'s sets. It writes back the dirty
lines and invalidates them, and leaves the other partitions untouched.

The testbench shows why this matters:

- A critical task holds 512 lines and an interfering task streams 2048 lines.
- With no partitions the critical task afterwards misses on all 512 lines.
- With two 128-set partitions it misses on none.

## Redundancy in the integer cluster

`amr_cluster` contains:

- the checker/voter `hmr_unit`;
- six `hfr_unit` recovery units, one per possible main core;
- a 32-bank, 256 KiB ECC-protected L1 with a one-cycle interconnect (`tcdm_spm`);
- a cluster DMA;
- an AXI slave path and an AXI master path.

Each of the twelve cores is reduced to a request bundle (`core_req_t`) and a response
bundle (`core_rsp_t`). The unit has three modes:

- **INDIP**: every core drives its own L1 port.
- **DLM** (dual lockstep): core *i* is checked against core *i+6* every cycle.
  - The shadow receives the main core's responses.
  - On a mismatch the request is dropped for that cycle, so nothing unchecked reaches
    memory, and the pair's error line rises.
- **TLM** (triple lockstep): cores *i*, *i+4* and *i+8* are voted bit by bit.
  - One faulty core is outvoted, and its fault line tells which one.

An error in a group starts that group's `hfr_unit`. The recovery unit works as follows:

- **Back-up**: in every cycle that passes the check, the core's register-file writes (two
  ports), its PC and its CSR writes are copied into SECDED-protected shadow registers. In a
  cycle with an error nothing is copied.
- **Recovery FSM** (IDLE → RESET → HALT → RESTORE):
  - RESET pulses the group's reset.
  - HALT waits for the cores to report that they have halted.
  - RESTORE writes back two registers per cycle (16 cycles), the CSRs alongside them, and
    the PC in the last cycle.
- **Timing**: with a core that halts one cycle after being told to, the cores resume
  19 cycles after the error.

The mode register sits at cluster offset 0x000. Software has to bring the cores to a
common state before switching modes; no sequencer for that is built.

## The vector cluster

`vector_cluster` holds:

- two private vector register files (`vrf`). Each is 2 KiB (32 × 512 bits) in four banks
  of 256-bit rows, with three read ports and one write port per bank;
- a 16-bank, 128 KiB L1 reached through eight 64-bit load/store ports;
- a cluster DMA;
- AXI slave and master paths.

The vector units, their sequencers and FPUs, and the scalar cores are not built. The VLSU
and VRF ports are module ports.

## Where this RTL departs from the source design

- **Cores not built**: the CPUs, the cluster cores, the vector arithmetic units, the
  instruction caches and the event unit.
- **Other parts not built**: the secure-domain IP, the interrupt controllers, the
  peripherals, the HyperBus controller, the PLLs and the clock-domain crossings. The
  memory-side AXI port of the DPLLC and the peripheral port are top-level ports instead.
- **One clock** for the whole design.
- **One DMA engine for every DMA** (`dma`, one-dimensional, 64 bits per cycle, reads a
  burst and then writes it).
  - The source design gives the vector cluster a 512-bit-per-cycle DMA.
  - The 512-bit DMA is not reproduced.
- **Design choices of this RTL**, where the source is silent:
  - the address map;
  - the register maps;
  - the arbitration policy (round robin, locked per burst);
  - the cache organisation (8 ways, 64-byte lines, blocking);
  - the bank organisation of the L2;
  - the pairing of lockstep cores;
  - the timing of each recovery step.
- **Not enforced**: the source reports a mode-switch time of 82–183 cycles for the
  redundancy modes. Here the mode changes at once, and the time would be spent by software
  on the cores.
- **Core count**: one figure of the source shows eight integer cores where the text shows
  twelve; twelve are built.

## Files

- `rtl/soc_pkg.sv` holds:
  - the AXI, register-bus and core-port types;
  - the SECDED Hamming encode and decode functions, used by every ECC memory.
- `rtl/` has one module per file:
  - helpers: `sync_fifo`, `axi_to_mem`, `axi_demux2`, `mem_split64`, `ecc_sram`;
  - the blocks above.
- `tb/` has one self-checking testbench per block, plus two models:
  - an AXI initiator model (`axi_bfm`);
  - a behavioural AXI memory (`axi_mem_model`), which stands in for the HyperRAM.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_carfield_soc` drives the top at its default parameters. It makes every mechanism
happen and reports how often each one did:

- L2 views, both L2 ports at once, and the peripheral route;
- burst splitting, write-buffer hold and regulation stalls;
- LLC misses, hits, partition isolation and flush;
- both DMAs, L1 bank conflicts and VLSU accesses;
- mode switches, a DLM mismatch, a TLM vote and fast recoveries.

It simulates in under a minute.

## Simulating

With Verilator 5, put the package first and give the testbench last:

```
verilator --binary --timing --assert --top-module tb_dpllc \
    rtl/soc_pkg.sv rtl/dpllc.sv tb/axi_mem_model.sv tb/axi_bfm.sv tb/tb_dpllc.sv
./obj_dir/Vtb_dpllc
```

For the top, pass every file in `rtl/` (package first) together with the two models and
`tb/tb_carfield_soc.sv`. Building the top takes about a minute; the simulation takes a few
seconds.
