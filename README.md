# HBM analytics engines on an FPGA: SystemVerilog design

This repository holds synthesizable SystemVerilog for an FPGA data-analytics system that sits in front of High Bandwidth Memory (HBM). It follows the design in "High Bandwidth Memory on FPGAs: A Data Analytics Perspective" (Kara et al.).

The system has five parts:

- an **HBM-shim**, which turns the 32 AXI3 ports of the HBM IP (256 bits each, two stacks of 4 GiB) into 16 ports of 512 bits;
- **two datamovers**, which copy data between host memory and HBM;
- a **control unit**, which gives the host a register interface;
- **14 compute-engine slots**;
- **three compute engines**:
  - range selection (14 engines);
  - hash join (7 engines, each using two ports);
  - minibatch SGD for ridge and logistic regression (14 engines).

As in the paper, one build holds one kind of engine. The top-level parameter `ENGINE` picks the kind.

The HBM IP, the OpenCAPI endpoint and the host are not part of the RTL. The top brings their interfaces out as ports. The testbenches supply behavioural models for them.

## Files

| File | Contents |
|---|---|
| `rtl/hbm_pkg.sv` | Constants, configuration type, 256/512-bit AXI3 channel structs, fixed-point multiply |
| `rtl/hbm_analytics_top.sv` | Top level: control unit, shim, datamovers, engine slots |
| `rtl/hbm_shim.sv`, `rtl/hbm_shim_port.sv` | HBM-shim; each port joins HBM ports k and k+16 |
| `rtl/control_unit.sv` | Register file, start/stop pulses, sticky done, latched results |
| `rtl/datamover.sv` | Host ↔ HBM copy, built from `dma_read` and `dma_write` |
| `rtl/dma_read.sv`, `rtl/dma_write.sv` | Streaming AXI3 burst readers/writers with FIFOs |
| `rtl/sync_fifo.sv` | First-word-fall-through FIFO |
| `rtl/selection_engine.sv` | Range selection: scheduler FSM, ingress and egress pipelines |
| `rtl/select_core.sv`, `rtl/select_buffer.sv`, `rtl/select_gather.sv` | The 16 select lanes, the index buffer, and the gather stage |
| `rtl/join_engine.sv` | Hash join: build, then probe, then write |
| `rtl/join_hash_table.sv` | Chained hash table, 16 replicas |
| `rtl/join_build.sv` | Serial insert of S |
| `rtl/join_probe_lane.sv` | One probe pipeline (16 per engine) |
| `rtl/join_assemble.sv` | Lane FIFOs and the row builder with dummy padding |
| `rtl/sgd_engine.sv` | SGD engine: epoch/minibatch control with no stale model |
| `rtl/sgd_dot.sv`, `rtl/sgd_scalar.sv`, `rtl/sgd_update.sv` | Dot product, scalar engine, and gradient/model update |
| `tb/tb_<module>.sv` | One self-checking testbench per module |
| `tb/tb_hbm_analytics_top.sv`, `tb/sys_harness.sv` | End-to-end test of all three builds |
| `tb/tb_hbm_full.sv` | Top at its default parameters (selection build) |
| `tb/axi_mem_model.sv`, `tb/hbm_model.sv` | Behavioural host memory and HBM IP |

Every file starts with a comment that covers four things:

- what the module does;
- how it works;
- its interface and timing;
- which parts follow the paper and which are this design's own choice.

## Architecture

### Address space and the HBM-shim

The HBM IP has 32 ports, numbered 0–31, each 256 bits wide. Ports 0–15 lead to stack 0 (addresses 0 to 4 GiB). Ports 16–31 lead to stack 1 (4 GiB to 8 GiB).

Shim port k (k = 0…15) presents one 512-bit AXI3 port. A line at shim byte address A is split in two:

- bits [255:0] go to address A/2 on HBM port k;
- bits [511:256] go to address A/2 + 4 GiB on HBM port k+16.

So each half of a line stays in its own stack, and no access crosses between stacks. The shim address space is 8 GiB. Shim port p maps its "own" physical channels at p × 512 MiB to (p+1) × 512 MiB.

The shim accepts an address or write beat only when both HBM ports have taken it. It returns read data or a write response only when both ports have one.

AXI3 is used as a subset:

- INCR bursts of 1–16 beats, always full width;
- no IDs, no byte strobes;
- no burst crosses a 4 KiB page.

### Port assignment

| Shim port | Unit | Use |
|---|---|---|
| 0, 1 | units 0, 1 | datamovers 0 and 1 |
| 2 … 15 | units 2 … 15 | compute slots 0 … 13 |

Datamovers use full 64-bit addresses, so they can reach all of HBM.

Engines take 32-bit addresses from their configuration words. These addresses are **relative to the engine's own port region**: the top adds p × 512 MiB on shim port p. An engine therefore works on "its own" HBM channels. This is the partitioned placement that the paper shows to be needed for full bandwidth.

Join engine j reads on port 2+2j and writes on port 3+2j. Its output address is relative to the region of port 3+2j.

### Control unit (register map)

The register address is `{unit[3:0], reg[3:0]}`. A read returns data one cycle after `reg_rd`, together with `reg_rvalid`.

| reg | name | meaning |
|---|---|---|
| 0–11 | CFG0–CFG11 | Configuration words, read/write; meaning is set by the unit (below) |
| 12 | CTRL | Write bit0 = start, bit1 = stop. Each is a one-cycle pulse to the unit. A start clears DONE. |
| 13 | STATUS | bit0 = busy (live), bit1 = done (sticky) |
| 14, 15 | RESULT0/1 | Values the unit presented when it signalled done |

Each unit is started and polled on its own. The host can run any mix of units in parallel and build barriers in software.

**Datamover** (units 0, 1)
- Configuration:
  - CFG0/1: source address, low/high word.
  - CFG2/3: destination address, low/high word.
  - CFG4: number of lines.
  - CFG5 bit0: direction (0 = host → HBM, 1 = HBM → host).
- Results: RESULT0 = lines written, RESULT1 = cycles taken.

**Range selection** (units 2–15)
- Configuration: CFG0 = input offset, CFG1 = number of lines, CFG2 = lower bound, CFG3 = upper bound, CFG4 = output offset.
- Results: RESULT0 = matches, RESULT1 = output lines.

**Join** (units 2, 4, …, 14)
- Configuration:
  - CFG0 = S offset, CFG1 = number of S keys;
  - CFG2 = L offset, CFG3 = number of L lines;
  - CFG4 = output offset (in the write port's region);
  - CFG5 bit0 = handle collisions.
- Results: RESULT0 = matched pairs, RESULT1 = output lines.
- The odd unit of each pair (3, 5, …, 15) mirrors DONE and RESULT0. Its RESULT1 reports the number of collision-chain steps.

**SGD** (units 2–15)
- Configuration:
  - CFG0 = data offset;
  - CFG1 = m samples, CFG2 = n features (a multiple of 16);
  - CFG3 = epochs, CFG4 = minibatch size B;
  - CFG5 = α, CFG6 = 2αλ;
  - CFG7 bit0 = logistic (otherwise ridge);
  - CFG8 = model output offset.
- Results: RESULT0 = epochs done, RESULT1 = samples processed.

### Range selection engine

For each item of 32-bit signed integers, the engine writes the item's index if `lower < x < upper`.

**Ingress.** A DMA read streams 512-bit lines from HBM into a FIFO. The select core tests all 16 items of a line in one cycle. Each lane l owns column l of the index buffer and its own match counter. So all 16 lanes can store a match in the same cycle, and the core never stalls.

**Egress.** After BUFFER_SIZE (1024) lines, or at the end of the input, the scheduler switches to egress.

- The gather stage reads row r of all 16 columns at once and builds one 512-bit line.
- Word l of that line is lane l's r-th index, or the dummy word `0xFFFFFFFF` if lane l has fewer matches.
- A chunk gives as many lines as its busiest lane has matches.
- A DMA write streams the lines to HBM. Then ingress resumes.

Ingress and egress alternate, as in the paper.

**Stop.** A stop request takes effect at the next chunk boundary. Input still in flight is drained.

**Measured behaviour:**
- 0 % selectivity: 2500 lines in 2542 cycles on one engine. That is one line per cycle.
- 14 engines at default size: 4096 lines each in 4136 cycles, which is 13.9 lines per cycle together.
- 100 % selectivity: the time roughly doubles, because each chunk is also written out.

### Join engine

The join reads the small side S (32-bit keys) and the large side L, and outputs matching (L position, S position) pairs.

**Build.** The engine clears the HASH_TABLE_SIZE (8192) buckets, one per cycle. It then reads S and passes each line through a 16-to-1 multiplexer. Each key is inserted serially, one every two cycles:

- `storage[i] = key`;
- `next[i] = bucket[h]`;
- `bucket[h] = i`.

Here i is the key's position in S, and h is the low 13 bits of the key. Every write goes to all 16 replicas of the table.

**Probe.** L streams in one line per cycle. Each of the 16 probe lanes owns one table replica and looks up one key per cycle.

- Collision handling off: the lane compares only the chain head. This is one result per key at II = 1, and it is exact when S is unique and no two S keys share a hash.
- Collision handling on: the lane walks the whole chain, one slot per cycle, and stalls meanwhile.

**Assemble.** The assemble stage collects the per-lane result FIFOs into rows.

- If some lanes still have more entries for their key, those lanes advance. The lanes that have finished their key wait, showing a dummy.
- A row with any match is written as two lines:
  - the 16 positions in L;
  - the 16 matching positions in S.
- Non-matches are the dummy `0xFFFFFFFF`.
- Rows with no match at all are dropped.

**S larger than the table.** If S has more than 8192 keys, software runs several build/probe passes over slices of S.

**Measured behaviour.** With 4096 keys in S (the paper's size) and 600 lines of L, the job takes 17017 cycles: 8192 clear cycles, plus 8192 insert cycles (two per key), plus about 600 probe cycles, plus pipeline latency. Probing therefore runs at one line of L per cycle.

### SGD engine

The engine follows Algorithm 3 of the paper.

**Data layout.** Each sample is one label line (word 0 = b) followed by n/16 feature lines.

**Per sample:**
1. The Dot module forms ⟨x, a_i⟩ with 16 multipliers, an adder tree and an accumulator.
2. The scalar engine forms α·(S(z) − b). S is the identity for ridge regression and the sigmoid for logistic regression.
3. The Update module accumulates g += scalar·a_i into a gradient memory, while the sample's feature lines are replayed from a samples FIFO.

**Per minibatch.** After every B samples, the model is updated: x ← x − α·g − (2αλ)·x, and g is cleared.

**No stale model.** The engine reads the next minibatch's samples only after the model update of the previous one has completed. This matches the paper's choice to avoid stale updates. As the paper notes, low-dimensional data and small minibatches then cannot fill the pipeline.

**Output.** After the last epoch, the model is written to HBM.

**Number format.** Numbers are 32-bit signed fixed point with 16 fraction bits (Q16.16). Products are shifted back by 16 bits, and sums are kept in 64 bits. The sigmoid is the PLAN piecewise-linear approximation (maximum error below 0.02).

## Parameters

| Parameter | Default | Where | Note |
|---|---|---|---|
| `ENGINE` | `ENG_SELECTION` | top | one engine kind per build |
| `BUFFER_SIZE` | 1024 | top, selection | lines per ingress chunk (paper) |
| `HASH_TABLE_SIZE` | 8192 | top, join | entries per replica (paper: "limited to 8192 tuples") |
| `MAX_DIMENSIONALITY` | 2048 | top, SGD | model size; the largest dataset in the paper has 2048 features |
| `PARALLELISM` | 16 | package | 32-bit words per 512-bit line (paper) |
| `NUM_CE`, `NUM_DM` | 14, 2 | package | compute slots and datamovers (paper) |

## Verification

Each module has a self-checking testbench, `tb/tb_<module>.sv`.

- Each compares the module against an independent software model.
- Each checks cycle counts where a rate is expected:
  - one line per cycle for the DMA engines, the selection lanes and gather;
  - II = 1 for probe lanes without collisions;
  - one key per two cycles for build;
  - a row per cycle (or per two cycles with matches) for assemble.
- Each prints `TB_RESULT checks=… failures=…` and has a watchdog.

Every testbench was also run against a copy of its module with a deliberate bug, and each one reported failures.

`tb_hbm_analytics_top` runs complete jobs on all three builds, with register accesses, datamover copies in both directions, parallel engines, and result copies back to host memory. It counts the mechanisms it exercised and fails if one did not happen:

- datamover jobs in both directions;
- cycles with several engines busy;
- dummy padding;
- several buffer chunks per selection engine;
- join chain walking;
- SGD minibatch updates;
- both HBM stacks being used equally.

`tb_hbm_full` instantiates the top with all defaults. It runs 14 selection engines at 4096 lines each and checks the aggregate rate and every result line.

Example with Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/hbm_pkg.sv tb/tb_selection_engine.sv \
          --top-module tb_selection_engine -o sim && ./obj_dir/sim
```

## Differences from the paper and limitations

- **Floating point.** The SGD engine uses Q16.16 fixed point and a piecewise-linear sigmoid, where the paper uses 32-bit floating point with exp and a divider. Convergence behaviour is therefore close to, but not identical with, the paper's.
- **Hash table size.** The paper states it two ways:
  - "limited to 8192 tuples (16 KiB)";
  - S = "4096 (16 KB)" in its figure captions.

  This design uses 8192 entries per replica.
- **Unstated details.** The following are this design's own choices, because the paper does not give them:
  - the hash function (low key bits);
  - the dummy value;
  - the output formats;
  - the register map;
  - the burst policy;
  - the shim's stack offset value (4 GiB).
- **SGD dimensions.** The number of features must be a multiple of 16. Datasets are padded with zero features (for example, 126 becomes 128).
- **Multi-class SGD.** Multi-class data, such as the 10 classes of MNIST, is trained as separate one-vs-rest binary models.
- **Join output size.** A join whose every L tuple matches produces twice the size of L as output. With the paper's largest L (2 GB over 7 engines), that would overrun a single 512 MiB write region.
- **Not built.** These are outside the FPGA logic the paper designs:
  - the HBM IP (memory controllers, crossbar, PHY);
  - the OpenCAPI endpoint;
  - the host.

  The microbenchmark traffic generators that the paper uses to characterise the HBM IP are not part of the analytics system and are not built either.
- **No timing closure.** No clock or timing constraints are given. The paper runs the engines at 200–300 MHz. Timing closure at that speed has not been checked.
