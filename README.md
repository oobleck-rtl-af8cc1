# Oobleck: modular accelerators that keep working when a stage fails

## The idea

A large fixed-function accelerator is a single point of failure. If one transistor in
it wears out, the whole unit is useless, and in a data centre that usually means
replacing the chip. Oobleck avoids this by building the accelerator as a chain of small
sub-accelerators f1, f2, ..., fn. Composed, they compute the original function:
f = fn o ... o f2 o f1. Each sub-accelerator also has an equivalent in software.

In normal operation, data flows from one sub-accelerator straight into the next over
latency-insensitive valid/ready links. Each sub-accelerator also has a second way in and
out: a consumer queue (software to hardware) and a producer queue (hardware to
software) in a modified Cohort engine. Cohort is a queue-based interface between
software threads and accelerators.

When stage k is found faulty, software writes two configuration bits:

* on stage k-1, *to producer queue*: its result goes to software instead of stage k;
* on stage k+1, *from consumer queue*: it waits for data from software instead of stage k.

Software runs fk on the word and pushes the result into stage k+1's consumer queue, and
the rest of the chain carries on in hardware. The faulty stage never sees data again.
Any set of stages can be bypassed this way. The more stages remain healthy, the closer
the degraded accelerator stays to full speed. The cost is one round trip through
software per run of faulty stages.

Each stage has a two-bit configuration:

| bit | name      | meaning when set                                                    |
|-----|-----------|---------------------------------------------------------------------|
| 1   | `from_cq` | take input from this stage's consumer queue, not the previous stage |
| 0   | `to_pq`   | send the result to this stage's producer queue, not the next stage  |

At reset, stage 0 has `from_cq` = 1, the last stage has `to_pq` = 1, and every other
stage has 00. This is the fault-free chain.

## What is built

All RTL is SystemVerilog-2017 in `rtl/`, one module or package per file.

| file | role |
|------|------|
| `oobleck_pkg.sv` | stage configuration struct, tile kinds, word widths |
| `cohort_queue.sv` | valid/ready FIFO; one consumer or producer queue |
| `oobleck_bypass.sv` | combinational router around one sub-accelerator, driven by the two bits |
| `cohort_engine.sv` | per-stage queue pairs and configuration registers; software push, pop (round robin, tagged with the stage) and config-write ports |
| `rr_arbiter.sv` | round-robin arbiter; it holds its grant while the consumer stalls |
| `li_reg.sv` | one-entry valid/ready output register used by the compute stages |
| `passthrough_stage.sv` | emulates a stage of a given latency; data passes unchanged |
| `checksum_stage.sv` | the two-cycle population-count pipeline from the Viscosity example |
| `aes_pkg.sv`, `aes_stage.sv` | AES-128 rounds; a stage runs a contiguous range of rounds |
| `fft_stage.sv` | one radix-2 decimation-in-frequency butterfly stage of a 64-point FFT |
| `dct_stage.sv` | one of ten butterfly steps of an 8x8 AAN scaled 2-D DCT |
| `oobleck_tile.sv` | one modular accelerator: NSTAGES sub-accelerators, their bypass routers and a Cohort engine |
| `oobleck_top.sv` | the accelerator complex: six tiles behind one software port |

### The tiles of `oobleck_top`

| tile | accelerator | stages | word |
|------|-------------|--------|------|
| 0 | FFT, 64-point radix-2, 16-bit complex, Q1.14 twiddles | 6 | 2048 bits |
| 1 | AES-128, one round per stage (round 0 = initial key addition) | 11 | 256 bits {state, round key} |
| 2 | AES-128, rounds 0-2, 3-6, 7-10 | 3 | 256 bits |
| 3 | pass-through, `pass_latency` cycles per stage | 12 | 64 bits |
| 4 | checksum (population count) | 1 | 64 bits |
| 5 | 2-D DCT, five steps on rows, then five on columns | 10 | 2048 bits (64 x 32-bit) |

A pass-through chain of fewer than 12 stages runs on tile 3: software sets `to_pq` on
its last stage and takes the result from there.

### Top-level interface

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `sw_cq_valid` / `sw_cq_ready` | in / out | 1 | push handshake |
| `sw_cq_tile`, `sw_cq_stage`, `sw_cq_data` | in | 3, 4, 2048 | consumer queue addressed and the word |
| `sw_pq_valid` / `sw_pq_ready` | out / in | 1 | pop handshake |
| `sw_pq_tile`, `sw_pq_stage`, `sw_pq_data` | out | 3, 4, 2048 | where the word came from, and the word |
| `cfg_we`, `cfg_tile`, `cfg_stage`, `cfg_wdata` | in | 1, 3, 4, 2 | write one stage's `{from_cq, to_pq}` |
| `pass_latency` | in | 20 | cycles per pass-through stage |
| `stage_fire` | out | 6 x 16 | input handshake of every stage, for observation |

Narrow tiles use the low bits of the 2048-bit word. The pop port serves tiles in round
robin, and within a tile it serves stages in round robin.

### Timing

* The bypass routers are combinational, so a healthy chain adds no cycles between
  stages.
* Queues are FIFOs of `CQ_DEPTH` = 4 words.
* AES, FFT and DCT stages compute in one combinational step with a registered output.
  They take one word per cycle, with one cycle of latency.
* The checksum takes one word per cycle, and its result comes one cycle later.
* A pass-through stage holds one word. That word leaves exactly `pass_latency` cycles
  after it was accepted.

Measured in the end-to-end test, with software pushing and popping through the ports:

* a fault-free 12 x 100-cycle pass-through chain takes 1203 cycles;
* a 4 x 750-cycle chain takes 3002 cycles.

## What follows the paper and what is this design's choice

**Follows the paper**

* Splitting f into f1..fn.
* Neighbour bypass links plus a consumer/producer queue pair per stage.
* The meaning of the two configuration bits, and how a fault is bypassed.
* The case studies' stage counts: FFT 6, AES 11 and 3, DCT 10.
* The 3-stage AES split: key expansion and two rounds, then four and four.
* The pass-through accelerator used for the sweeps.
* The checksum's `<(y != 0); true>` handshake.

**This design's choices** (the paper does not specify them)

* The 64-point FFT size (inferred from six radix-2 stages).
* The number formats (16-bit FFT, 32-bit DCT with 4 fraction bits, Q1.14 constants).
* AES-128 as the key size, and carrying the round key in the word between stages.
* Reading "the fastest known DCT" as the Arai-Agui-Nakajima algorithm. Its output is
  scaled per coefficient by 8 s(u) s(v), with s(0) = 1 and s(k) = sqrt(2) cos(k pi/16),
  as JPEG encoders fold into quantisation.
* Queue depth.
* One cycle per compute stage.
* Putting all tiles behind one port.

**Pass-through latency.** The paper gives two readings of the per-stage latency. One is
100 cycles per stage; the other is the operation's software cycles divided by a 100x
speedup (3,000 cycles for a 300,000-cycle operation). Because `pass_latency` is an
input, both readings run on one build.

**Deliberate simplification.** The Cohort queues are on-chip FIFOs. In the paper they
live in cache-coherent memory and are moved by Cohort's memory engine.

## What is not built

* The host processor and the software fallbacks. In simulation, the testbenches play
  this role.
* Fault detection. The paper assumes faults are found by other means.
* The memory-side half of the Cohort engine.
* The hot-spare FPGA fallback. Like software, it would sit behind the queue ports, so
  the accelerator side needs no change.
* The Viscosity compiler.
* The data-centre cost model.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`.

* `tb_cohort_queue`: random push/pop against a model, including full and empty.
* `tb_oobleck_bypass`: all four configurations against the expected routing.
* `tb_cohort_engine`: per-stage queues, stage tags and round-robin popping.
* `tb_passthrough_stage`: exact latency at 100 cycles and at random values, busy and
  stall behaviour.
* `tb_checksum_stage`: population count, zero suppression, one word per cycle.
* `tb_aes_stage`: FIPS-197 Appendix B and C.1 vectors through 11 one-round stages and
  through the 3-stage split.
* `tb_fft_stage`: random inputs through six stages against a floating-point DFT/64.
* `tb_dct_stage`: random 8x8 blocks through ten stages against the floating-point DCT
  with the AAN scale, to within 1.
* `tb_oobleck_tile`: an 11-stage AES tile under six fault sets, with the testbench doing
  the software fallback.
* `tb_oobleck_top`: the whole complex at its default parameters. It covers:
  * every tile, fault-free and with faults;
  * two faults in one chain;
  * a full consumer queue;
  * a stalled pop port;
  * two tiles finishing together;
  * checksum zero suppression;
  * shorter pass-through chains.

  It fails if any of these mechanisms never occurred.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/oobleck_pkg.sv rtl/aes_pkg.sv \
    tb/tb_oobleck_top.sv --top-module tb_oobleck_top -Mdir obj
./obj/Vtb_oobleck_top
```
