# Learned coherence selection for accelerators in a many-accelerator SoC

An accelerator that shares memory with processors can reach that memory in
several ways. Each one trades coherence work against bandwidth and latency.
This design uses four such ways, called *coherence modes*:

| mode (`coh_mode_e`) | code | path of a request | who keeps data coherent |
|---|---|---|---|
| `NON_COH_DMA` | 0 | straight to the memory controller of the partition, past all caches | software flushes the caches before the run |
| `LLC_COH_DMA` | 1 | to the last-level cache (LLC) partition | software flushes the private caches; the LLC serves the request |
| `COH_DMA` | 2 | to the LLC partition; the LLC first recalls the line from any private cache that holds it | hardware |
| `FULLY_COH` | 3 | through the accelerator tile's own private cache | hardware (MESI) |

No mode is best everywhere. The best mode depends on:

- the size of the data set compared with the L2 and the LLC;
- how many other accelerators are running;
- which memory partitions they use;
- the modes those other accelerators run in.

This RTL therefore picks the mode for **each invocation** at run time, using a
small Q-learning agent:

- Before an accelerator starts, the agent looks at the state of the system.
- It picks one of the four modes and writes it into the tile's coherence configuration register.
- When the accelerator finishes, hardware monitors measure how well the run went.
- That result becomes a reward, which updates the agent's table of expected rewards.

Everything runs in one clock domain. All state changes on the rising edge.
`rst_n` is an asynchronous, active-low reset.

## The system around the agent

The top, `cohmeleon_soc`, is sized by default like the main evaluation SoC:

- 12 accelerator tiles;
- 4 memory tiles, each with one LLC partition of 512 kB and one DRAM channel;
- 64 kB private L2 caches;
- 4 processors, so 16 private caches can hold a line.

```
              inv_* (driver side)          APB (16-bit address)
                    |                            |
        +-----------v-----------+        tile decode paddr[15:8]
        | rl_agent              |                |
        |  state_encoder        |<-- sys_status_tracker
        |  q_table (972 x 16b)  |
        |  reward_unit/seq_div  |
        +-----------+-----------+
                    | mode, grant
   accelerator tile k (x12)                      memory tile m (x4)
   +--------------------------------+            +----------------------------+
   | tile_apb_regs (coh. register,  |            | kind == K_MEM ? -> mc_*    |
   |   3 cycle counters)            |            |   else llc_dma_recall      |
   | traffic_gen --> coh_dma_router |--noc_xbar->|     dir_* / recall_* /     |
   | acc_perf_monitor      |  pc_*  |            |     llc_*                  |
   +-----------------------|--------+            | mem_access_monitor         |
                           v                     | tile_apb_regs (1 counter)  |
                    private cache (outside)      +----------------------------+
```

Some parts are outside the RTL and are reached through ports:

- the private caches (`pc_*`);
- the LLC with its directory (`llc_*`, `dir_*`, `recall_*`, `llc_ddr_access`);
- the memory controllers (`mc_*`);
- the processors.

Those parts are existing infrastructure that the coherence mechanism sits on.
The testbench `tb_cohmeleon_soc` gives each of them a simple behavioural model.

The network-on-chip is replaced by `noc_xbar`:

- It routes each request to the memory tile that owns its address. The partition number is `addr[29:28]` (`PART_LSB = 28`).
- It gives one grant per memory tile, round-robin among the waiting requests.
- It has no latency model.

### Invocation flow

1. **Request.** The driver side raises `inv_valid`. It holds these fields until `inv_ready`:
   - `inv_acc`, the accelerator;
   - `inv_fp[m]`, the footprint in bytes that the invocation has in memory partition *m*;
   - `inv_cfg`, the accelerator's job.
2. **Sense.** The agent forms the state of this invocation from the live status tracker and the requested footprint.
3. **Decide.** The agent then chooses a mode.
4. **Actuate (the `inv_ready` cycle).** Several things happen in this cycle:
   - The mode appears on `inv_mode`, and `inv_explored` shows whether the choice was random.
   - The mode is written into the tile's coherence register.
   - The status tracker records the invocation.
   - The tile's cycle counters restart.
   - A snapshot is taken of every memory tile's off-chip access counter.

   The accelerator starts one cycle later.
5. **Complete.** When the accelerator finishes, the top presents its completion to the agent:
   - its cycle counts;
   - the change in each memory tile's access counter since the snapshot.

   If several accelerators finish, the lowest-numbered one goes first. The agent computes the reward and, while training, updates the table. The tracker then drops the invocation, and `acc_irq[k]` pulses for one cycle.

The agent handles one thing at a time, and a pending completion goes before a
new request. With the default sizes:

- a decision takes 3 cycles when the agent explores (random mode);
- it takes 11 cycles when it exploits (four table reads);
- a reward takes at most 68·(N_MEM+6) = 680 cycles. The longest seen in simulation was 673.

`agent_busy` is high whenever the agent is not idle.

## The learning state

Each invocation is described by five attributes. Each attribute has three
levels.

| attribute | meaning | level 0 / 1 / 2 |
|---|---|---|
| `fully_coh_acc` | active fully-coherent accelerators in the SoC | 0 / 1 / 2 or more |
| `non_coh_per_tile` | average number of active non-coherent accelerators on the partitions this invocation uses | 0 / 1 / 2 or more |
| `to_llc_per_tile` | average number of active accelerators going through the LLC partitions this invocation uses | 0 / 1 / 2 or more |
| `tile_footprint` | average bytes per used partition, counting active accelerators plus this invocation | ≤ L2 / ≤ LLC partition / larger |
| `acc_footprint` | bytes of this invocation | ≤ L2 / ≤ LLC partition / larger |

- A partition is "used" when `inv_fp[m] != 0`.
- Every mode except non-coherent DMA counts as going through the LLC.
- An "average" level is the floor of sum/n. `state_encoder` computes it without a divider by comparing the sum with n and 2n.
- The state index is the base-3 number `81·fc + 27·nc + 9·llc + 3·tile + acc`, giving 243 states.
- The Q-table holds one 16-bit value per state and mode, 972 entries, at address `4·state + mode`.

`sys_status_tracker` holds the live picture, one register set per accelerator:

- whether the accelerator is active;
- its mode;
- its footprint on each partition.

From these it derives the per-partition counts and footprint sums
combinationally.

## Choosing a mode: epsilon-greedy

While `train_en` is high, the agent explores with probability ε:

- It compares 15 bits of a 32-bit LFSR with ε.
- If the LFSR value is smaller, it takes a random mode from two other LFSR bits.

Otherwise it exploits:

- It reads the four Q-values of the state and takes the largest.
- On a tie it takes the lowest mode code.

With `train_en` low the agent always exploits and never writes the table. This
is the frozen policy that is used once the agent has learned.

Not every accelerator has to support every mode. The agent input `inv_avail`
has one bit per mode, and only the modes whose bit is set take part in either
choice:

- An exploring draw that lands on an unsupported mode moves on to the next supported one, in code order, wrapping round.
- The argmax compares only the supported modes.

The top sets `inv_avail` from the parameter `ACC_HAS_CACHE`. All three DMA
modes are always available. Fully coherent is available only for accelerators
whose bit is set, because that mode needs a private cache. By default every
accelerator has one.

## Measuring an invocation and the reward

Each accelerator tile counts three things:

- **active cycles:** the accelerator is busy;
- **communication cycles:** a memory request is waiting to be accepted or waiting for its response;
- **total cycles:** from the grant until the completion has been handled.

All three restart at the grant. Total cycles cover only the hardware's view of
the invocation. Time that software spends around it, such as driver calls and
cache flushes, is not counted.

Each memory tile counts its DRAM accesses in a free-running, wrapping counter.
Two things count as an access:

- an `llc_ddr_access` pulse from the LLC, for a refill or a write-back;
- a non-coherent request accepted by the memory controller.

The top subtracts the snapshot taken at the grant. This gives the right delta
even if the counter wrapped once.

Off-chip accesses cannot be tied to the accelerator that caused them. They are
therefore shared out in proportion to footprint:

    ddr(k,m) = delta(m) · fp(k,m) / Σ_active fp(acc,m)

For invocation *i* of accelerator *k*:

- exec = total cycles / footprint
- comm = communication cycles / total cycles
- mem = Σ_m ddr(k,m) / footprint
- R_exec = min exec / exec
- R_comm = min comm / comm
- R_mem = 1 − (mem − min mem) / (max mem − min mem)
- **R = x·R_exec + y·R_comm + z·R_mem**

The minima and maxima are taken over all invocations of that accelerator so far,
including this one. Two corner cases that the formulas leave open are defined
here:

- a run with no communication gets R_comm = 1;
- when max = min, for example on the first run, R_mem = 1.

The weights default to x, y, z = 67.5 %, 7.5 %, 25 %. They are parameters
`W_EXEC`, `W_COMM` and `W_MEM` in UQ1.15; the alternative setting
12.5 / 12.5 / 75 % is 4096 / 4096 / 24576.

After the reward, the recorded (state, mode) entry of that accelerator is
updated:

    Q ← (1 − α)·Q + α·R

Every update also lowers ε and α:

- by `eps_step` and `alpha_step`, stopping at zero;
- software sets each step to start value / number of training updates, so that both decay linearly to zero over the training run.

At `train_reset`:

- ε and α return to 0.5 and 0.25;
- the Q-table is cleared, one entry per cycle (972 cycles, `agent_busy` high);
- the reward history is cleared.

### Number formats

| quantity | format |
|---|---|
| rewards, Q-values, ε, α, weights | UQ1.15 (1.0 = 32768) |
| footprints | bytes, 32 bits |
| exec and mem | scaled by 2^16 |
| comm | scaled by 2^15 |

All divisions share one 64-bit serial divider (`seq_div`), which produces one
bit per cycle.

## Memory paths and the coherent-DMA recall

`coh_dma_router` sits between the accelerator and the rest of the chip. It
looks at the tile's mode register:

- A fully-coherent request goes to the private-cache port.
- Any other request goes to the crossbar, tagged with a kind:
  - `K_MEM` for non-coherent DMA;
  - `K_LLC` for LLC-coherent DMA;
  - `K_LLC_COH` for coherent DMA.

Each request is one 32-bit word and gets exactly one response; writes get an
acknowledge. Only one request is outstanding at a time. The router takes the
response only from the port the request went to, and an assertion checks that
the mode does not change while a request is open.

In the memory tile, `K_MEM` requests go to the memory controller. All other
requests go to `llc_dma_recall`, which handles one request at a time:

1. For `K_LLC_COH` only, it raises `dir_lookup` for one cycle and samples `dir_sharers`, the private caches that hold the line.
2. If any cache holds the line, it holds `recall_valid` with the address and holder mask until `recall_done`.
3. It hands the request to the LLC (`llc_req_valid`/`ready`).
4. It returns the LLC's response.

`K_LLC` requests skip steps 1 and 2. The point is ordering: a coherent-DMA
request never reaches the LLC before the holders have given up the line.

## Registers (APB)

Every tile's registers share one APB3 region:

- `paddr[15:8]` selects the tile: accelerator tiles 0–11, then memory tiles 12–15.
- `paddr[7:0]` selects the register.
- `pready` is always 1.
- Unmapped offsets and unmapped tiles return `pslverr`.

| tile | offset | register |
|---|---|---|
| accelerator | 0x00 | coherence configuration, bits [1:0], read/write (the agent also writes it at every grant) |
| accelerator | 0x04 / 0x08 / 0x0C | active / communication / total cycles, read-only |
| memory | 0x00 | reads 0 |
| memory | 0x04 | off-chip access count, read-only, wraps |

## The traffic-generator accelerator

`traffic_gen` stands in for a real accelerator. Its job (`tg_cfg_t`) sets these
fields:

- access pattern: streaming, strided or irregular;
- burst length;
- compute cycles after each burst;
- reuse, the number of passes;
- reads per write;
- stride;
- access fraction, for irregular patterns;
- in-place or separate output;
- input and output base addresses;
- size in words.

It runs as follows:

- It reads in bursts and computes after each burst.
- It writes only in the last pass.
- Each written word is the XOR of the words read since the previous write, so the written data depends on the data returned.
- A strided walk wraps to the next column.
- The irregular pattern reads words·fraction/256 pseudo-random words.

## What follows the paper and what is this design's own

**Taken from the design being reproduced:**

- the four modes and their paths;
- coherent DMA implemented as a recall from the LLC;
- the five state attributes with their bins, giving 243 states and 972 table entries;
- epsilon-greedy choice, ε₀ = 0.5 and α₀ = 0.25 with linear decay to zero, and table entries starting at zero;
- the update rule;
- the three reward measures, their ratio forms and the default weights;
- the footprint-proportional attribution of off-chip accesses;
- cycle counters cleared at start and access counters read before and after;
- monitors and the coherence register as memory-mapped registers on each tile's APB;
- the SoC0 sizes;
- the list of traffic-generator parameters.

**Departures and own choices:**

- **The agent is hardware.** The original runs sensing, decision, reward and learning as software in the accelerator invocation library on a processor. Here `sys_status_tracker`, `state_encoder`, `q_table`, `reward_unit` and `rl_agent` do it on chip. The invocation port stands for the driver.
- **Fixed point** is used throughout instead of floating point.
- **Decay per update.** ε and α decay per Q update, by a step that software chooses.
- **Interfaces.** The register map, the request/response handshakes, the one-word requests and the one-outstanding-request rule are all own choices.
- **Crossbar.** A round-robin crossbar replaces the mesh network-on-chip.
- **Traffic generator.** How the generator's parameters combine, and the field widths, are own choices.
- **Averages and tie-break.** The floor rule for "average" levels and the tie-break of the argmax are own choices.
- **Tile footprint** counts the invocation's own footprint.
- **Corner cases.** R_comm = 1 when there is no communication, and R_mem = 1 when max = min.
- **Two access sources** per memory tile.

**Not in the RTL:**

- processors, private caches, the LLC and its directory, memory controllers and DRAM;
- the TLB, the real accelerators and the peripherals;
- software cache flushes, which non-coherent and LLC-coherent DMA rely on before a run.

The comparison policies (random, fixed, hand-tuned) are not part of the design
and are not included.

## Sizes and configurations

Every size is a parameter of `cohmeleon_soc`:

- `N_ACC`, `N_MEM`, `N_CPU`;
- `L2_BYTES`, `LLC_SLICE_BYTES`;
- `PART_LSB`;
- `ACC_HAS_CACHE`.

The defaults are those of SoC0. The other evaluated SoCs have 7 to 16
accelerators, 2 or 4 memory tiles, 256 or 512 kB LLC partitions and 32 or 64 kB
L2s. They need these parameters changed. One of them has five accelerators
without a private cache, which is what `ACC_HAS_CACHE` expresses. The
invocation's accelerator field holds up to 16 accelerators. The 16-accelerator
configuration is simulated end to end by `tb_cohmeleon_soc3`.

The workload classes are small (< L2), medium (< one LLC partition), large
(< whole LLC) and extra-large. The 32-bit footprint and the 24-bit word count of
the traffic generator (64 MB) hold all four classes.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_acc_perf_monitor` | random activity against reference counts |
| `tb_mem_access_monitor` | two sources, wrap-around deltas |
| `tb_tile_apb_regs` | register map, hardware writes, errors |
| `tb_coh_dma_router` | every mode's port and kind, stalls, responses on the wrong port ignored |
| `tb_llc_dma_recall` | lookup only for coherent DMA, exact holder mask, no LLC request before `recall_done` |
| `tb_sys_status_tracker` | aggregates against a reference active set |
| `tb_state_encoder` | levels against reference averages by real division, boundary cases |
| `tb_q_table` | clear sweep length and contents, random read/write |
| `tb_reward_unit` | attribution and reward against a reference model with its own history, latency bound |
| `tb_rl_agent` | random exploration covers all modes and respects the supported set, update arithmetic, ε/α decay, exploitation picks the argmax of the supported modes, nothing learned with training off |
| `tb_traffic_gen` | exact address sequences and write data for each pattern |

`tb_cohmeleon_app` runs the top at its default parameters with an application
shaped like the evaluation workload:

- Each phase runs several threads in parallel.
- Each thread passes one data set through a chain of accelerators. A stage's output buffer is the next stage's input.
- Threads share the 12 accelerators.

Training phases of all four size classes come first. The test run then repeats
the thread counts and sizes of the published phase analysis (10 threads small,
4 medium, 6 large, 3 of mixed size) and adds 2 threads extra-large.

The memory model behind the ports keeps state, so the modes really differ in
cost:

- 64 kB private caches with write-invalidate;
- 512 kB LLC partitions;
- a directory that reports the caches really holding a line;
- recalls that take the line away;
- the driver's flushes, applied at the grant.

It checks the following:

- every output buffer of the streaming chains, word by word, against a reference of the generator;
- the footprint level sensed for each size class;
- the DRAM access counters;
- that recalls only target caches that hold the line.

It prints cycles and DRAM accesses per phase and the modes chosen per size
class. It needs about 60 s.

`tb_cohmeleon_soc` also runs the top at its default parameters. It needs about
10 s of simulation.

- **The models.** It surrounds the top with:
  - private caches;
  - LLCs that miss to DRAM at random;
  - directories reporting random holders;
  - recall completion;
  - memory controllers.
- **The driver.** It invokes accelerators with random jobs, with up to six running at once. Footprints are below the L2, above the L2 and above an LLC partition.
  - 96 invocations train the agent, with ε and α decaying to zero.
  - 24 more run with training off.
- **Per-request checks.** Every request must arrive on the path of the mode its accelerator was granted. Each accelerator uses its own address range, bits [27:24], so this can be checked.
- **Register and counter checks:**
  - the coherence register read over APB equals the granted mode;
  - communication ≤ active < total for every invocation;
  - the memory-tile access counters equal the accesses the models made;
  - there is one interrupt per invocation.
- **Mechanism counts.** It counts and prints each mechanism: exploration, exploitation, Q updates, each of the four modes, each path, recalls, contention at a memory tile, concurrency, and each footprint level. A mechanism that never happened counts as a failure.

To build and run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/cohm_pkg.sv tb/tb_cohmeleon_soc.sv --top-module tb_cohmeleon_soc -o sim
    ./obj_dir/sim

`tb_cohmeleon_soc3` runs the same test on the top sized like the evaluation
SoC with 16 accelerators:

- 4 processors;
- 4 memory tiles with 256 kB LLC partitions;
- 64 kB private caches.

Accelerators 11 to 15 have no private cache. Which five lack one in the
original SoC is not known, so this choice is arbitrary. The test checks that
those five are invoked in training and in the test run, and that they are
never granted the fully-coherent mode. It needs about 13 s. Restricted mode
sets are also tested at the agent, with random sets in `tb_rl_agent`.

`tb_rl_agent` and `tb_cohmeleon_soc` look at a few internal signals by
hierarchical name (the Q-table array, the agent's state attributes).

### Warnings that remain

- Assertions use `disable iff (!rst_n)`, so Verilator reports the reset as used both synchronously and asynchronously (SYNCASYNCNET). This affects only the checks.
- A few outputs are left unconnected at the top because nothing outside needs them: the tracker's per-accelerator mode and active bits, the agent's component rewards, and the divider's remainder MSB. Some package constants are also unused in a given file. These produce "unused" warnings.
