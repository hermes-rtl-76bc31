# HERMES memory hierarchy in SystemVerilog

Machine-learning kernels stream large tensors through memory, so their speed on a
small RISC-V system is set by the memory system more than by the cores. HERMES
("High-Performance RISC-V Memory Hierarchy for ML Workloads", P. Suryadevara) proposes
a hierarchy in which four RISC-V cores and a matrix accelerator of the Gemmini kind
share one large last-level cache that is kept coherent. A stride prefetcher loads
lines before they are needed. Behind the cache sits a hybrid main memory: DRAM for
capacity and HBM for bandwidth.

The paper evaluates this hierarchy in a simulator. It gives cache sizes,
associativities, the coherence protocol and the memory mix, but no microarchitecture.
This RTL is one way to build that configuration. Every size that the paper states is
the default parameter value. Every mechanism the paper names and that can be built
from what it says is here. Everything else (line size, message formats, handshakes,
timing, replacement policy, address map) is this implementation's own choice. Each
such choice is marked in this document and in the header comment of its file.

## What is in the hierarchy

```
 core 0..3 (64-bit loads/stores)              accelerator (64-byte line reads/writes)
     |                                              |
 l1_cache   32 KB, 8-way, write-through             |
     |                                              |
 l2_cache  256 KB, 8-way, write-back, MESI          |
     |  GetS / GetM / PutM      ^ snoops            |
     +------------------------+ | +-----------------+
                              v | v
                l3_cache  8 MB, 16-way, shared, inclusive,
                          MESI directory, round-robin over 5 ports
                          + stride_prefetcher
                              |
                hybrid_mem_ctrl -- DRAM channel (8 GB, addresses 0 .. 8 GB)
                                -- HBM channel  (4 GB, addresses 8 .. 12 GB)
```

| Parameter (`hermes_top`) | Default | From the paper? |
|---|---|---|
| `L1_BYTES`, `L1_WAYS` | 32 KB, 8 | yes, per core |
| `L2_BYTES`, `L2_WAYS` | 256 KB, 8 | yes, per core |
| `L3_BYTES`, `L3_WAYS` | 8 MB, 16 | yes, shared |
| `DRAM_BYTES`, `HBM_BYTES` | 8 GB, 4 GB | yes |
| number of cores (`NCORES` in `hermes_pkg`) | 4 | yes |
| coherence protocol | MESI | yes |
| `PREFETCH` | 1 (on) | the prefetcher is from the paper; the switch is not |
| line size | 64 bytes | no |
| physical address | 34 bits (16 GB space, 12 GB mapped) | no |
| core word | 64 bits with byte strobes | no |
| replacement | true LRU in every cache | no |

All parameters can be changed at full size. Each cache requires its size to be a
power-of-two multiple of `64 * WAYS`.

The cores, the accelerator and the DRAM and HBM devices are outside this RTL.
`hermes_top` brings out their connections as ports:

- `core_req*` and `core_resp*`, one set per core;
- `acc_req*` and `acc_resp*` for the accelerator;
- `dram_*` and `hbm_*` for the two memory channels.

## Where each level keeps its state

The **L1** holds no dirty data. Stores write through to the L2. A store that hits
also updates the L1 copy; a store that misses does not allocate. The L1 therefore
needs only a valid bit per line. When the L2 loses or evicts a line, it sends a
one-cycle back-invalidation (`inv_valid`, `inv_addr`). The L1 always accepts it, so
it never holds a line that its L2 does not.

The **L2** is the coherent private cache. Each of its lines is in I, S, E or M.
- A read hit in S, E or M is served locally.
- A store hit in M is served locally. A store hit in E also, after a silent upgrade
  from E to M.
- A store hit in S, and every miss, goes to the L3: GetS for reads, GetM for stores.
- Before a miss is filled, the L2 removes its LRU victim. A clean victim (S or E) is
  dropped without a message. An M victim is written back with PutM.

The **L3** holds the directory. Each L3 line carries a sharer bit per core and an
`excl` bit. `excl` means the single listed core may hold the line in E or M, so the
L3 copy may be stale. The line also carries a dirty bit (it differs from memory) and
a `pf` bit (installed by the prefetcher and not yet used). The L3 is inclusive: to
evict a line, it first invalidates every listed core.

## How a request is served (the coherence protocol)

The L3 serves one request at a time. Its state machine:

1. **Accept.** A round-robin arbiter picks among the five request ports: cores 0–3,
   then the accelerator as port 4. A pending prefetch is taken only when no port is
   requesting.
2. **Lookup.** The tags are read combinationally. Every demand access trains the
   prefetcher with its port number and line address.
3. **Miss.** The L3 takes its LRU way and sends `SNP_INV` to every core listed for
   the old line. Dirty snoop data replace the L3 copy. A dirty line is written to
   memory. Then the new line is read from memory. A prefetch that would have to
   invalidate a core's copy is dropped instead.
4. **Coherence.** The snoops depend on the request:

   | Request | Snoops | Result |
   |---|---|---|
   | GetS from core c | `SNP_DOWN` to the owner if `excl` | c added. Grant E if c is the only sharer, else S |
   | GetM from core c | `SNP_INV` to every other sharer | c is the only sharer, `excl`. Grant M |
   | PutM from core c | none | accepted only if c is the `excl` owner. Otherwise stale and dropped |
   | RD (accelerator) | `SNP_DOWN` to the owner if `excl` | line returned. The accelerator is not recorded |
   | WR (accelerator) | `SNP_INV` to every sharer | full line written, dirty, no sharers |

   The L3 snoops one core at a time: it holds `snoop_valid[i]` until `snoop_ack[i]`.
   The answer says whether the data are dirty. Dirty data replace the L3 copy, except
   for WR, where the whole line is overwritten anyway.
5. **Final.** The directory entry, the data and the LRU state are written. One
   response pulse goes out on `cresp_valid[port]` with the line and the granted state.

A GetM always carries the whole line, even when the requester already holds it in S.
A snoop may have invalidated that S copy while the GetM waited for arbitration, so
the L2 always fills from the response.

### The races, and why they are safe

- **Clean lines dropped silently.** The directory may list a core that no longer
  holds the line. A snoop to such a core returns "not dirty". Because the line was
  clean, the L3 copy is current. The only cost is that a later GetS by another core
  is granted S rather than E.
- **PutM racing a snoop.** While a PutM waits for arbitration, the evicting L2 keeps
  the line in M. A snoop that arrives meanwhile still finds the dirty data. If the
  snoop was an invalidation, the L3 has passed ownership on by the time it serves
  the PutM. It then recognises the PutM as stale from the directory and drops it.
- **Snoops while a request is outstanding.** An L2 answers snoops in three states:
  idle, waiting for its request to be accepted (the L3 may be busy with another
  core), and waiting for its GetS/GetM answer. The last case matters: to make room
  for core c's miss, the L3 may evict a line that core c itself holds, and it must
  invalidate that copy before it can answer c. An L2 that refused snoops while
  waiting would deadlock here.
- **Back-invalidation and L1 answers.** The L2 never sends an L1 answer and a
  back-invalidation in the same cycle. An assertion in `l1_cache` checks this.

## The accelerator port

The accelerator has no private cache. It reads and writes whole 64-byte lines
through port 4 of the L3, with the coherent RD and WR requests shown above. It
therefore sees every store a core has made, and a core that reads after an
accelerator write gets the new data, because its old copy was invalidated.

The paper's block diagram draws the accelerator between the L3 and main memory.
Its text instead says that the shared L3 is where cores and accelerator share data.
This implementation follows the text.

## Stride prefetcher

The prefetcher keeps one entry per L3 port, because no program counter reaches the
L3. Each entry holds the last line address, the last stride (signed, in lines) and a
2-bit confidence. When a port repeats the same non-zero stride, the confidence rises.
At `CONF_MIN` (default 1) the line `L + stride` becomes a candidate. In practice the
third access of a regular stream (`A`, `A+s`, `A+2s`) triggers a fetch of `A+3s`.

A new candidate replaces one that the L3 has not yet taken. Candidates outside the
mapped memory are dropped. The L3 installs the prefetched line with its `pf` bit set
and reports `pf_fill_o`. A later demand hit on such a line reports `pf_hit_o`.

The paper also mentions prefetching based on machine learning. It gives nothing to
build it from, so it is not implemented.

## Hybrid memory

`hybrid_mem_ctrl` routes each line request by address:

| Address range | Channel | Address sent to the channel |
|---|---|---|
| 0 to 8 GB | DRAM | unchanged |
| 8 GB to 12 GB | HBM | address minus 8 GB |
| above 12 GB | none | answered at once with zero data and a one-cycle `err_o` |

Software decides what lives in HBM by where it places it. The controller counts the
lines each channel moves (`dram_lines`, `hbm_lines`).

A channel is a valid/ready request followed by one response pulse. Writes also get a
response. The controller allows one request in flight.

## Timing

All storage uses arrays with a combinational read port. After reset, each cache
clears one set of tags per cycle: 64 cycles for the L1, 512 for the L2, 8192 for the
L3. `hermes_top.ready_o` rises when all caches have finished. Requests made before
that wait.

Latencies are counted from the clock edge that accepts the request to the edge that
raises the response pulse:

| Case | Latency |
|---|---|
| L1 read hit | 2 cycles |
| L3 hit without snoops | 3 cycles |
| each snoop at the L3 | about 3 more cycles |
| L3 miss | the memory round trip, plus a write-back round trip if the victim is dirty |

Each port has one request in flight. This is a functional model of the paper's
organisation, not a reproduction of its performance numbers. The paper's latency,
bandwidth, hit-rate and energy figures come from its simulator, and nothing here
reproduces or checks them.

## Not implemented

- **Tensor-aware caching.** The paper gives its goal (fewer evictions of tensor data)
  but no mechanism. All caches use plain LRU.
- **Machine-learning prefetcher.** The paper names it without describing it.
- **Cores, accelerator, DRAM and HBM devices.** They are external. The testbenches
  use a behavioural memory channel, `tb/tb_mem_model.sv`, with a fixed latency and a
  sparse store.

## Files

| File | Contents |
|---|---|
| `rtl/hermes_pkg.sv` | widths, MESI and message types, word merge helpers |
| `rtl/lru_ctrl.sv` | LRU age update and victim choice for one set |
| `rtl/l1_cache.sv`, `rtl/l2_cache.sv`, `rtl/l3_cache.sv` | the three cache levels |
| `rtl/stride_prefetcher.sv` | the prefetcher |
| `rtl/hybrid_mem_ctrl.sv` | the DRAM/HBM split |
| `rtl/hermes_top.sv` | the whole hierarchy |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_hermes_top.sv` | end-to-end test at reduced cache sizes |
| `tb/tb_hermes_full.sv` | one complete sharing operation at the default (full) sizes |
| `tb/tb_ml_kernels.sv` | convolution, recurrent and attention kernels at the default sizes |
| `tb/tb_mem_model.sv` | behavioural memory channel |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each also has a
cycle watchdog that counts as a failure. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/hermes_pkg.sv tb/tb_hermes_top.sv --top-module tb_hermes_top -o sim
./obj_dir/sim
```

Replace `tb_hermes_top` with any other testbench name.

The testbenches check the following:

- **L1** (`tb_l1_cache`): hit latency, write-through behaviour, back-invalidation,
  LRU eviction, and random traffic against a reference memory.
- **L2** (`tb_l2_cache`): all MESI transitions, PutM, silent drops, snoop answers,
  and random traffic with snoops arriving at random times.
- **L3** (`tb_l3_cache`): grants, snoop targets, stale PutM, accelerator reads and
  writes, round-robin order, prefetch fill and hit, hit latency, and 1500 random
  operations that force evictions. It uses a 16 KB, 4-way L3 and a model of four
  private caches. The model also checks that the directory never snoops a core it
  should not list.
- **Whole hierarchy** (`tb_hermes_top`): runs four cores and the accelerator
  concurrently through false sharing, true sharing, producer/consumer hand-over in
  both directions, strided streams in DRAM and in HBM, and L2-thrashing writes. It
  fails if any counted mechanism never occurred: hits at each level, both snoop
  types, PutM, dirty L3 eviction, prefetch fill and hit, L1 back-invalidation, port
  conflicts, and traffic on both channels.
- **Full size** (`tb_hermes_full`): runs the default sizes through one complete
  sharing operation.
- **ML kernels** (`tb_ml_kernels`): runs one small integer kernel from each of the
  three workload classes the hierarchy targets, at the default sizes. The accelerator
  writes weights into HBM and activations into DRAM as full lines. The four cores
  then compute, each on its own rows: a 3x3 convolution of a 16x16 input, four
  recurrent steps `h = W h + x` with a 16x16 `W`, and 16x16 attention scores
  `Q K^T`. In the recurrent kernel every core reads, at each step, the state the
  other cores wrote in the step before, so each step moves modified lines between
  cores. The accelerator reads every result back, and the testbench compares it
  with its own calculation. It prints the hits at each level per kernel. A typical
  run gives L1 hit rates of 95-98 %, because each loaded line serves eight words
  and the weights are reused.

## Known limits

- Each port has one outstanding request, and the L3 serves one request at a time.
  A real high-bandwidth design would pipeline the L3 and use MSHRs. The paper does
  not say how its L3 is organised.
- Every cache reads its tags and data combinationally. Synthesis for a real SRAM
  macro would need a registered read and one more pipeline stage per lookup.
- The L3 answers a port on a shared response bus. Only one response is in flight at
  a time, so the bus is never contended.
