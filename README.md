# Temporal fence with Microreset: RTL for on-core time protection

Two programs that take turns on one core share its caches, TLBs, branch
predictors and the small bits of state hidden behind them: replacement LFSRs,
pseudo-LRU trees, arbiter pointers. A program can leave a trace in that state
and a later program can time it. This is a covert channel across the boundary
the operating system draws between them. The fix here is to partition the core
in time. At every switch between security domains, the OS executes one
instruction, the temporal fence `fence.t`. It does two things:

1. It brings every piece of non-architectural state back to a fixed value. It
   does not flush a hand-picked list of structures. Instead, every flip-flop
   in the core gets a synchronous `clear` input, called **Microreset**, and
   only the architectural state is left out: register files, the CSR file, and
   the controller that drives the clear. Memories that cannot be reset (cache
   SRAMs) are overwritten line by line first. Dirty data is written back before
   that.
2. It makes the context-switch latency independent of history. Writing back a
   dirty L1 data cache takes longer the more lines are dirty, and the next
   program could time that. So `fence.t` does not complete until a fixed
   number of cycles (`cspad`) after the timer interrupt that started the
   switch.

This repository holds synthesizable SystemVerilog for these mechanisms and for
the stateful on-core components they act on. The components are sized like a
64-bit in-order RISC-V application core: an 8-way 32 KiB write-back L1D, a
4-way 16 KiB L1I, 16-entry ITLB and DTLB, a 64-entry BHT and a 16-entry BTB.
The pipeline, register files, CSR file, page-table walker, interrupt
controller and L2 are not part of it. Their connections are ports of the top
module `tp_core`.

## The fence.t sequence

`fence.t` is a U-type instruction in the custom-0 opcode space (`0001011`).
Its 20-bit immediate is meant as a bitmap for selecting components. Microreset
clears everything anyway, so the bitmap is decoded (`fencet_imm_o`) but not
used. The controller (`fencet_controller`) steps through one state per step:

| state       | what happens | ends when |
|-------------|--------------|-----------|
| (issue)     | The pipeline is told to flush (`flush_pipeline_o`). `pc + 4` is stored in a register that Microreset does not touch. | same cycle |
| `FT_WB`     | The L1D first finishes a request it accepted before `fence.t`. It then scans all 256 sets and writes back every dirty line. Each line is then clean but still valid. | L1D reports done |
| `FT_DRAIN`  | Nothing new is issued. Outstanding refills and write-backs complete. | at least `DRAIN_CYCLES` = 16 cycles **and** both caches idle |
| `FT_CLEAR`  | Both caches overwrite tags, valid/dirty bits and data with zeros, one set per cycle. | both report done (one cycle per set plus one: 257 cycles) |
| `FT_URST`   | `urst` is high, clearing every non-architectural flip-flop. | exactly `URST_CYCLES` = 16 cycles |
| `FT_PAD`    | Wait for the pad counter. | `cspad` cycles after the interrupt edge |
| `FT_RESUME` | `resume_valid_o` with `resume_pc_o` = saved PC. | one cycle |

From the cycle after `fence.t` is taken until `FT_RESUME` ends,
`fencet_busy_o` is high. While it is high the core accepts no fetch, no data
request, no TLB refill and no predictor update.

Why hold Microreset for 16 cycles rather than one: in a pipelined core a
one-cycle flush reaches the components at different times. A component that
is not yet cleared can then pass its state to one that already is. Holding the
clear over several cycles closes that path. The 16 cycles match the figure
reported for the original implementation.

### Timing guarantee

Let T be the first cycle in which `timer_irq_i` is high. `tp_pad_timer` makes
`pad_done` high from cycle T + `cspad` on. The controller leaves `FT_PAD` in
that cycle. So `resume_valid_o` is high in cycle **T + cspad + 1**, as long as
the sequence itself ended by then. `cspad` must therefore cover the worst case:
interrupt handling and scheduling in software, plus a fully dirty L1D write-back,
drain, clear and Microreset. The value derived for a write-back L1D is
`cspad = 22000`. With a 4-cycle L2, the write-back of all 2048 lines takes
about 12.5k cycles in this RTL, the clear 257, and drain and Microreset 16
each. With `cspad = 0` padding is off and `fence.t` ends as soon as its steps
are done.

`cspad` is a 32-bit machine-mode CSR at address `0x7C0`. The address is this
design's choice. `cspad`, the pad counter and the interrupt edge detector all
survive Microreset. Clearing the edge detector while the interrupt is still
high would look like a new interrupt edge.

## What Microreset reaches

`urst` from the controller is wired to the `clear_i` input of:

* `l1_dcache`, `l1_icache`: FSM, request and victim registers, sweep pointer,
  and each cache's `lfsr8` replacement LFSR (back to seed `0x01`). The SRAM
  arrays are not on it; they are cleared in `FT_CLEAR`.
* `tlb` (two instances): all entries invalid and zeroed, and the `plru_tree`
  reset to all zeros.
* `bht`: all counters to `01` (weakly not taken). `btb`: all entries invalid.
* `rr_arbiter`: priority pointer to the load unit.
* the response-routing register in `tp_core`.

Every clearable register uses the same pattern:

```systemverilog
always_ff @(posedge clk_i or negedge rst_ni)
  if (!rst_ni)      q <= RESET;
  else if (clear_i) q <= RESET;   // Microreset
  else              q <= d;
```

A block that has state but no `clear_i` is, by construction, declared
architectural. Only `fencet_controller` and `tp_pad_timer` are like that.
When you add a new stateful block, give it `clear_i` and connect it to `urst`.
Otherwise it becomes a timing channel.

## Components

| module | role | size (default) |
|--------|------|----------------|
| `tp_pkg` | widths (RV64, Sv39: 39-bit VA, 56-bit PA), request structs, controller state enum | |
| `fencet_decoder` | recognises `fence.t`, extracts the immediate | combinational |
| `fencet_controller` | the sequence above | `URST_CYCLES` = `DRAIN_CYCLES` = 16 |
| `tp_pad_timer` | `cspad` CSR and pad counter | 32 bit |
| `l1_dcache` | write-back, write-allocate, blocking data cache with write-back scan and clear sweep | 8 ways, 32 KiB, 16-byte lines |
| `l1_icache` | read-only blocking instruction cache with clear sweep, 32-bit fetch | 4 ways, 16 KiB, 16-byte lines |
| `lfsr8` | x^8+x^6+x^5+x^4+1 LFSR. It gives the victim way when no way of the set is invalid. | 8 bit |
| `tlb` | fully associative, combinational lookup, first-invalid then pseudo-LRU refill | 16 entries |
| `plru_tree` | tree pseudo-LRU | 15 node bits for 16 entries |
| `bht` | 2-bit saturating counters, index `pc[6:1]` | 64 entries |
| `btb` | direct-mapped, untagged, index `pc[4:1]` | 16 entries |
| `rr_arbiter` | round-robin: load unit (0), store unit (1), MMU (2) onto the L1D port | 3 requesters |
| `tp_core` | top: all of the above | |

### Cache protocol

Requests use valid/ready. A cache accepts one request in its idle state. It
looks the request up in the next cycle, and on a hit answers in that same
cycle with a one-cycle `rsp_valid_o`. A store gets an acknowledge. So the hit
latency is one cycle after acceptance. On a miss the victim is the first
invalid way, otherwise the way the LFSR picks. A dirty victim is written back,
the line is refilled, and the lookup is replayed. The L2 side moves one
128-bit line per request (`mem_req_t`). Every request, read or write, gets
exactly one `mem_rsp_valid_i` pulse. An assertion in each cache flags a
response that arrives while none is awaited. The arrays have no reset. After
`rst_ni` each cache runs its clear sweep once (256 cycles) before it accepts
requests.

### Top-level interfaces

* `instr_valid_i / instr_i / instr_pc_i`: the instruction being issued.
  `fence.t` is detected here.
* `if_*`: fetch with a virtual address. The ITLB translates it in the same
  cycle. On an ITLB miss, `if_tlb_miss_o` is raised, and the walker refills
  through `itlb_upd_*`.
* `dtlb_*`: combinational data translation for the load/store unit.
* `dc_req_*[2:0]`: physical-address data requests. The response goes to the
  port that was granted (`dc_rsp_valid_o[i]`). The data bus is shared.
* `bp_pc_i`, `bht_*`, `btb_*`: branch prediction and training.
* `csr_*`: access to `cspad`. `timer_irq_i`: the CLINT timer interrupt.
* `dmem_*`, `imem_*`: the two L1-to-L2 line ports.
* `dc_miss_o`, `dc_wb_line_o`, `ic_miss_o`: event pulses for performance
  counting and tests.

## Where this RTL departs from, or goes beyond, the described design

* **Configuration.** Only the write-back L1D is built. The write-through
  variant, and the write buffer with its two round-robin arbiters, are not.
  The write-back variant is the one whose `fence.t` has a write-back step and
  needs the large pad (22000 cycles; the write-through pad would be about
  3700).
* **Basic and full flush.** The two selective-flush alternatives are not built.
  Only Microreset is.
* **The core around it** is abstract: ports take the place of a real pipeline,
  page-table walker, register files and CSR file. Microreset therefore
  reaches only the state built here. In a full core the same clear input must
  also go to every pipeline register, the load/store unit's buffers, the miss
  handlers, and so on.
* **Own choices** where the description gives no detail: opcode value and CSR
  address; bitmap ignored; blocking caches with write-allocate; one set per
  cycle for the scan and the clear; drain of at least 16 cycles; LFSR
  polynomial and seed; PLRU encoding; BHT index and reset value; untagged BTB;
  TLB without ASIDs, superpages or permissions; reset of `cspad` to 0;
  `pc + 4` as the resume address.
* The pad interval always starts at the timer interrupt. The alternative start
  at a privilege switch out of U-mode is not built. That start was used only
  to benchmark the IPC fast path.
* The cycle and instruction counters, which `fence.t` advances, live in the
  CSR file and are not modelled.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one ends by printing `TB_RESULT checks=N failures=M`, and each has a watchdog.
`tb_mem_model.sv` is a behavioural L2 model (not synthesizable). It gives a
fixed latency and, for never-written lines, a hash pattern of the address.

* `tb_fencet_decoder`: field extraction and opcode match on random words.
* `tb_lfsr8`: the sequence against a reference polynomial, period 255, clear.
* `tb_plru_tree`: the victim against a heap-indexed reference tree, and clear.
* `tb_rr_arbiter`: grants against a reference model, fairness, clear.
* `tb_tlb`, `tb_bht`, `tb_btb`: translation, replacement, saturation,
  aliasing, sfence and clear.
* `tb_tp_pad_timer`: `pad_done` exactly `cspad` cycles after the interrupt
  edge. A held interrupt does not restart the count. `cspad = 0` disables
  padding.
* `tb_fencet_controller`: order and length of every step against cache and
  memory models, including a slow drain, no padding, and a pad shorter than
  the sequence.
* `tb_l1_dcache`, `tb_l1_icache`, at full size: random traffic over four times
  the capacity against reference memories, one-cycle hits, a fully dirty
  write-back (2048 lines) after which L2 holds every stored word, and clear
  sweeps.
* `tb_tp_core`, end to end at default parameters with `cspad = 22000`. A
  "Trojan" phase trains every structure, with all three data ports
  contending. Two context switches follow: one with 7 dirty lines on top of
  mixed traffic, one with all 2048 lines dirty. Both must end exactly
  `cspad + 1` = 22001 cycles after the interrupt. After each, the test checks
  that every L1 set is invalid, both LFSRs are at their seed, the TLBs and
  PLRU trees are empty, the BHT is weakly not taken, the BTB is empty, the
  arbiter pointer is 0, `cspad` is kept, and all stored data is in L2. In
  the first switch a store miss is accepted in the cycle before `fence.t`
  issues. It completes while the fence runs, and the write-back step writes
  its line to L2. With
  `cspad = 0` the same test shows the channel padding closes: 558 cycles with
  a clean cache against 4158 with 600 dirty lines. Every mechanism (misses,
  dirty evictions, `fence.t` write-backs, port conflicts, TLB refills, drain,
  clear, Microreset, pad stall, blocked requests, sfence) is counted and must
  happen at least once.

* `tb_channel_bench`, also at default parameters: the prime-and-probe
  experiment on the L1D, L1I, DTLB, BTB and BHT. A spy fills the structure.
  After a context switch, a Trojan touches s entries, where s is the secret.
  After a switch back, the spy measures its probe. Each experiment runs in
  three modes:
  * Plain switches: the measurement follows s. The L1D probe of 2048 lines
    takes 4096 cycles for s = 0 and 7373 for s = 256. The BHT keeps 64..0
    taken predictions.
  * `fence.t` with `cspad = 22000`: every measurement is the same for every
    secret. The L1D probe takes 18432 cycles, all misses. Every switch takes
    22001 cycles.
  * `fence.t` without padding: the measurements stay constant, but the switch
    back to the spy grows from 3625 to 5161 cycles as the Trojan dirties 0 to
    256 lines.

  The kernel's share of a switch is modelled as a fixed 3077 cycles. That is
  the interrupt-to-`fence.t` time measured on the original system. This
  testbench runs for about two minutes.

To run one with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/tp_pkg.sv tb/tb_tp_core.sv --top-module tb_tp_core -o sim
./obj_dir/sim
```

`tb_tp_core` builds in about 15 s and runs in a few seconds. Its simulations
model the core's own timing only. The L2 model has a fixed 4-cycle latency, so
absolute write-back times differ from those of a real memory system.
