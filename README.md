# ShadowScope+ — in-GPU kernel validation from performance-counter side channels

A GPU kernel that has been tampered with leaves a different footprint in the
microarchitecture. It may run extra instructions, touch memory differently, or
skip a layer of a neural network. ShadowScope+ watches that footprint with
hardware and checks it against a trusted reference while the kernel runs.

- Every streaming multiprocessor (SM) gets a small performance monitoring unit
  (PMU). The PMU counts eight selectable events in fixed sampling windows.
- At the end of each window the PMU sends its counts over the on-chip
  interconnect (ICNT) to one central **Validator**.
- The Validator sums the counts of all SMs that run the kernel, window by
  window.
- It compares each sum with a **golden model**: the per-window sums of a
  trusted run, stored in device memory.
- If any metric is further from the golden value than a programmed
  threshold, the Validator tells the kernel dispatcher to stop the kernel.
  It also raises an alarm for the host driver.

The same PMUs also work without the Validator. In **profiling mode** a small
DMA engine per SM writes the window samples into a ring buffer in device
memory. That mode is how the golden model is recorded in the first place.

This repository holds synthesizable SystemVerilog for the PMU, the ICNT paths
and the Validator, wired into one top (`shadowscope_top`). It also holds
self-checking testbenches. The SMs, kernel dispatcher, L2 cache, DRAM and host
are outside this design and appear as ports. Defaults follow a Fermi
(GTX480-class) GPU with 15 SMs.

## Data flow and sample format

```
 SM s events ──► 8 × (8:1 select ─► 32-bit counter) ─┐
 cycle counter (ts) ─────────────────────────────────┼─► output buffer (8 entries)
                                                      │        │
                           mode = profiling ◄─────────┘        └──► mode = validation
                                  │                                       │
                           DMA → ICNT(mem) → ring buffer          ICNT(val) → Validator
```

One **sample entry** (`ssp_pkg::sample_t`) is 289 bits:

| field  | bits | meaning                                                   |
|--------|------|-----------------------------------------------------------|
| `last` | 1    | this window was closed by the end of the kernel            |
| `ts`   | 32   | cycle count since kernel start at the end of the window    |
| `cntr` | 8×32 | event counts of the window, counter 0 in the low bits      |

In memory, both the ring-buffer entries and the golden-model entries use the
36-byte payload `{ts, cntr[7], …, cntr[0]}` without the `last` bit. Entry *i*
of a region sits at `base + 36·i`.

## The PMU (`sm_pmu`)

- **Event selection and counting (`pmu_counter`).** Each of the eight counters
  has its own group of eight one-bit event inputs (`sm_events_i[s][c][0..7]`)
  and a 3-bit select register. While the kernel runs on the SM, the counter
  adds 1 in every cycle in which the selected event is high. Which SM signal
  goes to which input is left to the integrator.
- **Windows (`pmu_window_ctrl`).** A 32-bit cycle counter restarts at 0 when
  the kernel starts on the SM. A window closes after `REG_PERIOD` cycles, or
  when the kernel ends, whichever comes first. `REG_PERIOD = 0` gives one
  window per kernel.
  - In the closing cycle, the counter values *including that cycle's events*
    are written to the buffer with `ts = cycles elapsed`. The counters then
    restart at zero. No event is lost or counted twice at a boundary.
  - A kernel end that coincides with a period boundary yields a single entry,
    marked `last`.
- **Output buffer (`pmu_out_buffer`).** An 8-entry FIFO of sample entries.
  - If a window closes while the buffer is full, the new entry is **dropped**.
    The drop is counted in a saturating 16-bit counter, and `pmu_dropped_o`
    shows it at the top.
  - A kernel cannot be held up by its monitor, so dropping is the only
    choice that keeps monitoring off the critical path.
- **Routing.** `REG_MODE[0]` selects the buffer's consumer.
  - 1 = validation: the buffer head goes to the Validator over the ICNT.
  - 0 = profiling: the buffer head goes to the DMA engine (`pmu_dma`).
  - The DMA engine writes one 36-byte entry per beat into a ring of
    `REG_RINGSIZE` entries at `REG_RINGBASE`. It overwrites the oldest entry
    after a wrap and counts the wraps. Writing `REG_RINGBASE` restarts the
    ring at index 0.

### Register map

Registers are written through the configuration port of the top:
`cfg_we_i`, `cfg_target_i`, `cfg_addr_i` and `cfg_wdata_i`.

`cfg_target_i` selects where the write goes:

| `cfg_target_i` | destination        |
|----------------|--------------------|
| `0 … NUM_SM-1` | the PMU of that SM |
| `NUM_SM`       | all PMUs at once   |
| `NUM_SM+1`     | the Validator      |

Registers of each PMU:

| addr | PMU register | meaning |
|------|--------------|---------|
| 0–7  | `REG_EVSEL0+c` | event select of counter *c* |
| 8    | `REG_PERIOD` | window length in cycles (0: kernel end only) |
| 9    | `REG_MODE` | bit 0: 1 = validation, 0 = profiling |
| 10   | `REG_RINGBASE` | ring buffer base byte address (also resets the ring) |
| 11   | `REG_RINGSIZE` | ring buffer length in entries |

Registers of the Validator:

| addr | Validator register | meaning |
|------|--------------------|---------|
| 0    | `VREG_THRESH` | distance threshold, shared by all eight metrics |
| 1    | `VREG_ENABLE` | bit 0: validate launched kernels |

## Why timestamps line up across SMs

The Validator has to add up "window *k*" from 15 different PMUs. It recognises
the packets of one window by their `ts`, which it uses as a cache tag.

That works only if every PMU stamps window *k* with the same value. The design
guarantees this in two ways:

- The cycle counter counts *cycles since kernel start* and is not a free-running
  clock.
- The dispatcher is required to start all SMs of a kernel in the same cycle
  (`launch_i` with `launch_mask_i`) and to end them together (`kend_i`).

A dispatcher that starts SMs at different cycles would need a start offset per
SM. That is not built.

## The Validator (`validator`)

`launch_i` starts validation, but only while `VREG_ENABLE` is set. It carries
the kernel id, the mask of active SMs, and the golden model's base address and
length in windows. On a launch:

- the PMU buffers and the ICNT path are flushed of leftovers from an earlier
  kernel;
- the aggregation cache is cleared;
- the fetch buffer starts loading the golden model.

### Aggregation cache (`val_aggr_cache`)

The cache has four fully associative blocks. Each block holds
`{last, ts (tag), act (8 bit), 8 × 32-bit sums}`.

- **Miss.** A packet that misses allocates a block with its counts and
  `act = active − 1`.
- **Hit.** A packet that hits adds its eight counts with eight 32-bit adders
  and decrements `act`.
- **Completion.** When `act` reaches 0, every active PMU has reported. The
  block moves to a one-entry output register and is freed.
- **Stall.** If a packet misses and no block is free, or the output register
  is still occupied, the cache holds its input. The ICNT then backs up into
  the PMU buffers, and `cache_stall_o` shows the stall.

Four blocks are enough when all SMs report each window within a few cycles of
each other. They are not enough when one SM falls far behind (see *Limits*).

### Golden-model fetch buffer (`val_fetch_buffer`)

The fetch buffer holds four entries. It reads entry after entry from
`gbase + 36·i`, up to `glen` entries, with one read outstanding at a time. It
refills as entries are consumed. After a restart, answers to reads issued
before the restart are discarded.

### Compare (`val_compare`)

The compare block is combinational: eight subtractors and eight magnitude
comparators.

- For each metric, `distance = |aggregated − golden|`.
- A window **deviates** if any distance is *strictly greater* than
  `VREG_THRESH`.
- The per-metric over-threshold flags are reported as `alarm_metrics_o`.

### Verdicts

Windows are matched to golden entries **in order**: the *i*-th completed
window is compared with the *i*-th golden entry. For each window:

| event | result |
|-------|--------|
| window deviates | `stop_o` pulse to the dispatcher; `alarm_o` with `alarm_kid_o` and reason `FAIL_DEVIATION` |
| a window arrives after the golden model is used up | stop + alarm, reason `FAIL_WINDOWS` (extra phase) |
| the `last` window arrives before the golden model is used up | stop + alarm, reason `FAIL_WINDOWS` (skipped phase or layer) |
| the `last` window matches and the counts agree | `pass_o` pulse |

Timing of the outputs:

- `windows_ok_o` counts the matched windows.
- `stop_o` and `pass_o` come one cycle after the deciding window meets its
  golden entry.
- `alarm_o` stays high until the next validated launch.
- `busy_o` (`val_busy_o` at the top) is high from the launch until a verdict
  has been given and the leftover packets are drained. The dispatcher should
  wait for it to fall before the next validated launch.

## Interconnect (`icnt_arbiter`)

The GPU's real network is not part of this design. Each path is modelled as the
simplest thing that carries the traffic: a round-robin N:1 arbiter with a
registered output. It has one cycle of latency and moves one packet per cycle.

There are two instances:

- PMUs → Validator;
- DMA engines → device-memory write port.

Golden-model reads use their own read port (`mem_rd_*`).

## Where this design departs from, or adds to, the published description

The following are taken from the published description:

- eight 8:1 selectors and eight 32-bit counters per PMU;
- a 32-bit cycle counter;
- 8 × 36-byte PMU buffer entries;
- a DMA engine to a ring buffer in profiling mode;
- packets over the ICNT in validation mode;
- an aggregation cache tagged by `ts`, with an 8-bit active count and eight
  adders;
- a 4-entry golden fetch buffer;
- eight subtractors, eight comparators and one threshold;
- stop-and-report on deviation;
- 15 SMs.

The following are choices of this design:

- the `last` bit carried with each entry (one bit more than 36 bytes);
- `ts` counted from kernel start; all SMs started in the same cycle;
- four cache blocks (the description says only "small");
- `act = active − 1` on allocation;
- in-order window matching and the window-count check (`FAIL_WINDOWS`);
- drop-on-full in the PMU buffer; stall-on-full in the cache;
- flushing leftovers on a validated launch;
- the register map, the 16-bit golden length and the 8-bit kernel id;
- the memory and ICNT handshakes (valid/ready, one 36-byte beat per entry).

The deviation measure is `|a − g| > threshold` per metric, as the hardware
description gives it. The offline evaluation of the same work scores whole
traces with normalized dynamic time warping (DTW). That scoring is analysis
software and is not built here.

## Limits

- **Bandwidth.** The PMU→Validator path moves one packet per cycle. With
  `NUM_SM` active PMUs, the window period must be at least `NUM_SM` cycles
  (15 at the default), or the PMU buffers overflow. Lost windows then make
  the kernel fail its check. The end-to-end test provokes this on purpose
  with 2-cycle windows.
- **A silent PMU.** If a PMU in the launch mask never reports (for example,
  it was left in profiling mode), no window completes. The cache fills and
  stalls, and the Validator waits until the next validated launch clears it.
  There is no timeout.
- **One kernel at a time.** There is one set of active counts and one golden
  stream. Concurrent validated kernels are not supported.
- **Sizes.** A kernel is limited to 2³² cycles (about 6 s at 700 MHz) and
  65,535 windows.

## Files

| file | content |
|------|---------|
| `rtl/ssp_pkg.sv` | sizes, `sample_t`, register and reason encodings |
| `rtl/pmu_counter.sv`, `pmu_window_ctrl.sv`, `pmu_out_buffer.sv`, `pmu_dma.sv` | PMU parts |
| `rtl/sm_pmu.sv` | one SM's PMU with its registers and routing |
| `rtl/icnt_arbiter.sv` | one ICNT path |
| `rtl/val_aggr_cache.sv`, `val_fetch_buffer.sv`, `val_compare.sv` | Validator parts |
| `rtl/validator.sv` | the Validator |
| `rtl/shadowscope_top.sv` | the whole design, default `NUM_SM = 15` |
| `tb/tb_<block>.sv` | a self-checking test per block |
| `tb/tb_dnn_layers.sv` | layer-by-layer validation of two network inferences |
| `tb/dev_mem_model.sv` | behavioural device memory with random latency |

Each testbench prints `TB_RESULT checks=… failures=…` and has a watchdog.

`tb_shadowscope_top` runs the full-size design at its default parameters. It
takes the design through the following steps:

1. a profiling run, checking the ring buffers;
2. building the golden model from those buffers;
3. a benign run with different noise, which passes;
4. a deviating phase, which is stopped;
5. a skipped phase, which fails with `FAIL_WINDOWS`;
6. PMU buffer overflow;
7. a cache stall caused by a silent PMU;
8. recovery.

It counts how often each mechanism occurred.

`tb_dnn_layers` runs neural-network inference the way a framework issues it:
one kernel per layer, each with its own golden model.

- A 10-layer network uses all 15 SMs; an 8-layer network uses 12 SMs.
- Each network is run once benign, where every layer must pass.
- Each network is then run with its second layer skipped. The kernel that runs
  in the second layer's place must be stopped and reported under the second
  layer's id.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/ssp_pkg.sv \
    $(ls rtl/*.sv | grep -v ssp_pkg) tb/dev_mem_model.sv \
    tb/tb_shadowscope_top.sv --top-module tb_shadowscope_top
./obj_dir/Vtb_shadowscope_top
```

Replace the testbench and top name to run a block test. The full-size
end-to-end test builds in well under a minute and runs in a fraction of a second. Verilator
warns about unused bits and about `rst_n` being used both as an asynchronous
reset and inside assertion `disable iff` clauses. Neither affects the logic.
