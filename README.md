# Spatz cluster: compact RISC-V vector units sharing an L1 scratchpad

This repository holds synthesizable SystemVerilog for a small vector-processing cluster. The
cluster has two "Spatz" vector units. Each unit executes a subset of the RISC-V Vector extension
(RVV 1.0, 64-bit elements at most). The two units share a 128 KiB multi-banked scratchpad.
The scalar cores that feed the vector units are not part of this RTL. Each core's
instruction-offload interface is a port of the cluster, so a core model or a testbench drives it.

## Configuration (defaults)

| Item | Value |
|---|---|
| Vector units per cluster | 2 |
| FP64 FMA lanes per unit (F) | 4 |
| Integer units per unit | 1 (64 bit/cycle, SIMD 8/16/32/64) |
| Vector length | 512 bit (VLENB = 64 B), 32 registers, 2 KiB VRF per unit |
| VRF | 2 banks, each a latch-based 3-read/1-write array of 32 rows x 32 bytes |
| Memory ports per unit | F + 1 = 5, each 64 bit (4 vector, 1 scalar FP) |
| Interconnect | 10 x 16 crossbar, 64 bit, round-robin per bank |
| Scratchpad | 16 banks x 8 KiB = 128 KiB, word-interleaved, 1-cycle read latency |

The parameters live in `rtl/spatz_pkg.sv` (unit) and on `spatz_cluster` (core count, banks).

## Block diagram

```
 core0 X-if ──► spatz ──5 ports──┐
 core1 X-if ──► spatz ──5 ports──┤
                                 ▼
                      spatz_xbar (10 x 16, 64 bit)
                                 ▼
                       16 x spm_bank (8 KiB)

 spatz = spatz_controller ─┬─ spatz_fpu_sequencer (FP register file, fld/fsd, 1 port)
                           ├─ spatz_vau   (4 x spatz_fma64 + spatz_ipu, 4-stage pipe)
                           ├─ spatz_vlsu  (4 ports, per-port reorder queues)
                           └─ spatz_vsldu (slides)
         all three units ── spatz_vrf (2 x vrf_scm) ── spatz_scoreboard
```

## Files

| File | Purpose |
|---|---|
| `rtl/spatz_pkg.sv` | Constants, request/response structs, operation enum, helper functions |
| `rtl/vrf_scm.sv` | Latch-array register bank. It has write-data sampling flops and clock gates per row and per byte column. Each cell is 8 latches opened by AND(row clock, column clock). Three combinational read muxes. |
| `rtl/spatz_vrf.sv` | Two banks; even/odd halves of every vector register. Fixed-priority read-port and write-port allocation. |
| `rtl/spatz_scoreboard.sv` | Word-granular RAW/WAW/WAR checks between in-flight instructions (chaining) |
| `rtl/spatz_fma64.sv` | Combinational IEEE-754 binary64 fused multiply-add, round to nearest even |
| `rtl/spatz_ipu.sv` | SIMD integer add/sub/mul/macc/move |
| `rtl/spatz_vau.sv` | Vector arithmetic unit: one 256-bit VRF word per cycle, 4-cycle pipeline |
| `rtl/spatz_vlsu.sv` | Vector loads/stores, unit-stride and constant-stride, with a reorder buffer |
| `rtl/spatz_vsldu.sv` | vslideup / vslidedown (64-bit elements) |
| `rtl/spatz_fpu_sequencer.sv` | Scalar FP register file, pending bits, fld/fsd |
| `rtl/spatz_controller.sv` | Decoder, vl/vtype, dispatch, memory-ordering interlock |
| `rtl/spatz.sv` | One vector unit |
| `rtl/spm_bank.sv` | One 8 KiB scratchpad bank |
| `rtl/spatz_xbar.sv` | Crossbar |
| `rtl/spatz_cluster.sv` | Top level |

## Interfaces

**Instruction offload (per core).** The core presents `issue_valid_i` together with `issue_i`.
`issue_i` carries the 32-bit instruction and the values of rs1 and rs2. The unit answers with
`issue_ready_o` and `issue_accept_o`:
- Supported instructions make `issue_ready_o` high only once they can be dispatched. They are
  taken on the cycle valid and ready are both high.
- Unsupported encodings answer ready with accept low, and are dropped.

`vsetvli`/`vsetivli` return the new vl on `result_valid_o`/`result_o`.

**Memory ordering.**
- The core raises `lsu_busy_i` while its own load/store unit is busy. Vector and FP memory
  instructions are held while it is high.
- `spatz_mem_busy_o` tells the core to hold its own memory accesses.
- `busy_o` is high while any instruction is still in flight.

**Memory ports (inside the cluster).** Each port uses a valid/gnt handshake.
- A read returns `rsp.valid` with the data one cycle after the grant. Reads on one port come
  back in order.
- Writes get no response.
- Byte address bits [6:3] select the bank and bits [16:7] the row.

## Instruction subset

- **Configuration:** vsetvli, vsetivli. SEW is 8, 16, 32 or 64; LMUL is 1 to 8.
- **Integer** (any SEW):
  - vadd .vv/.vx/.vi
  - vsub .vv/.vx
  - vmul .vv/.vx
  - vmacc .vv/.vx
  - vmv.v.v/.x/.i
- **Floating point** (SEW 64):
  - vfadd .vv/.vf
  - vfsub .vv/.vf
  - vfmul .vv/.vf
  - vfmacc .vv/.vf
- **Memory:**
  - unit-stride vle/vse, for 8/16/32/64-bit elements;
  - strided vlse64/vsse64;
  - fld/fsd.
- **Permutation:** vslideup and vslidedown, .vx and .vi forms, SEW 64.

The following are not supported:
- masked forms;
- reductions and widening/narrowing operations;
- indexed loads and stores;
- FP formats other than fp64, and dot-product extensions;
- scalar FP arithmetic.

## How it works

**VRF and words.**
- A vector register is two 256-bit words, one in each bank.
- Every unit walks the words of its register group in ascending order: one word per cycle, four
  64-bit elements.
- The VAU reads vs1, vs2 and vd of a word in one cycle from the three read ports of one bank.
- In the same cycle, the VLSU or the slide unit can use the other bank.

**Chaining and hazards.**
- Each in-flight instruction publishes the word ranges it reads and writes, and how far it has
  progressed.
- The scoreboard lets a read of word *a* proceed once every older instruction has written *a*.
- It lets a write proceed once every older instruction has written and read *a*.
- A consumer therefore starts as soon as the first word of its operand exists. For example, a
  vfmacc can run a few cycles behind the vle that feeds it.

**VAU.**
- Floating-point words pass through four FMA lanes and a 4-stage pipeline.
  - vfadd is computed as a·1 + b.
  - vfmul is computed as a·b + (−0).
- Integer words use the single 64-bit integer unit, so a word takes four cycles.
- A new instruction is accepted once the previous one has read all of its operands. Its
  results drain in the meantime.

**VLSU.**
- Lane p of each word goes to memory port p.
- Each port issues its requests in order, up to four outstanding.
- Responses land in a per-port queue. A word is written to the VRF only when every active lane
  has its data. This reorders responses that different banks return at different times.
- Stores read one word into a buffer and send its lanes as the ports are granted.

**Slide unit.**
- It reads the source words once, in order.
- It keeps the previous source word and an output register.
- It builds each output word by rotating the lanes of two consecutive source words.

## Timing summary

| Path | Latency |
|---|---|
| VRF write → readable | next cycle |
| FP op, operand read → result write | 4 cycles |
| Scratchpad read, grant → data | 1 cycle |
| Throughput | one 256-bit VRF word per cycle per unit; integer ops 1/4 of that |

## Verification

Every testbench in `tb/` is self-checking and prints a `TB_RESULT` line.

- **`tb_spatz_cluster`**
  - Drives both vector units at the full default size with the same kernel, running concurrently.
  - The kernel covers axpy, strided load, add, slides, mul/sub, an integer multiply-accumulate
    and scalar FP load/store.
  - It checks every stored word bit-exactly.
  - It counts each of these and fails if any never happened: chaining, scoreboard stalls,
    reorder-buffer waits, bank conflicts, memory-ordering stalls, issue backpressure,
    slide-unit writes and FP-port accesses.
- **`tb_spatz_fma64`, `tb_spatz_ipu`, `tb_vrf_scm`, `tb_spm_bank`, `tb_spatz_xbar`:** unit
  tests with random stimulus against reference models.

## Known limitations and design choices

- The scalar cores, the instruction cache and a DMA engine are outside this RTL.
- The FMA flushes subnormals to zero, returns a canonical NaN, and raises no exception flags.
- The scoreboard tracks progress per 256-bit word rather than per element.
- The `vrf_scm` bank uses latches and clock gates written in plain RTL. A real implementation
  would map the gates to library clock-gating cells. Lint reports non-blocking assignments
  inside latch processes; these are intended.
- Scratchpad addresses wrap modulo 128 KiB.
