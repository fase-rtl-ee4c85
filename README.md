# FASE FPGA side: controller and CPU interface in SystemVerilog

## The idea

FASE runs unmodified user programs (ELF binaries) on processor cores that sit
in an FPGA, without putting an operating system on the FPGA. The cores run only
user code. Whenever a core takes a system call or an exception, it drops into
M-mode and stops fetching. A host PC, connected over a slow UART, handles the
system call as an operating system would, then sends the core back to user
code.

Two pieces of hardware make this possible:

* A very small **CPU interface** on every core:
  * **Priv** reports the privilege level.
  * **Reg** reads and writes architectural registers through the register file ports.
  * **Inject** feeds single non-branch instructions into the pipeline while
    **StopFetch** holds the fetch unit. **InjectBusy** says the pipeline is
    not yet empty.
  * An optional **Interrupt** line.

  Everything else (CSR access, loads and stores, TLB flushes) is done by
  injecting ordinary instructions. It therefore follows the core's own memory
  model and coherence protocol.
* A **controller** that speaks the Host-Target Protocol (HTP) on the UART. One
  HTP request stands for a whole sequence of port operations. For example,
  "write this page" becomes 512 × (recv, sd, addi). A page therefore crosses
  the UART as 4 KiB of data plus a few header bytes instead of thousands of
  port commands. The controller also filters redundant futex wakes in
  hardware (HFutex), so they never reach the host.

This repository holds the FPGA side: the controller, the UART, and the logic a
core needs to expose the CPU interface. It uses the evaluated configuration:

* 4 cores;
* 100 MHz;
* 921600 bit/s in an 8N2 frame;
* RV64 with 4 KiB pages.

## Block diagram

```
 uart_rxd ─► fase_uart_rx ─► RX buffer ─► fase_main_fsm ───────► fase_op_engine ─► fase_cpu_select ─► CPU port of core i
                              (fifo)      Recv/Parse/Op/Send     (operation FSMs)                       │
 uart_txd ◄─ fase_uart_tx ◄─ TX buffer ◄─ Arg Regs / Resp Regs        │   ▲  ▲                          ▼
                              (fifo)  ◄───── PageR stream ────────────┘   │  │              fase_core_adapter (per core)
                                           fase_exc_queue (state monitor, ─┘  │              IQ mux + fetch clutch,
                                             Exception Event Queue,          │              reissue gate, register
                                             StopFetch lines)                │              port muxes, Priv, Interrupt
                                           fase_hfutex_mask ─────────────────┘
                                           fase_perf_counters (Tick, UTick)
```

| file | block |
|---|---|
| `rtl/fase_pkg.sv` | Shared types: the CPU-port structs, the pipeline-side structs, HTP opcodes and their formats, and the RV64 instruction encoders |
| `rtl/fase_uart_rx.sv`, `rtl/fase_uart_tx.sv` | 8N2 UART with a bit period of round(100 MHz / 921600) = 109 cycles |
| `rtl/fase_byte_fifo.sv` | RX and TX buffers (64 bytes each) |
| `rtl/fase_main_fsm.sv` | Main state machine: Recv → Parse → Op → Send, plus the Arg Regs and Resp Regs |
| `rtl/fase_op_engine.sv` | Operation state machines, written as one micro-programmed executor |
| `rtl/fase_cpu_select.sv` | Steers the single CPU port of the engine to one core |
| `rtl/fase_exc_queue.sv` | State monitor, Exception Event Queue and the StopFetch lines |
| `rtl/fase_hfutex_mask.sv` | Per-core HFutex mask cache: 4 entries, fully associative |
| `rtl/fase_perf_counters.sv` | Tick and per-core UTick counters |
| `rtl/fase_controller.sv` | The controller: all of the above |
| `rtl/fase_core_adapter.sv` | The logic added inside a core to expose the CPU interface |
| `rtl/fase_top.sv` | UART, controller and one adapter per core |

## The CPU interface inside a core (`fase_core_adapter`)

The adapter copies the modification made to the Rocket pipeline:

* **IQ multiplexer and fetch clutch.**
  * When StopFetch is low, the instruction queue is fed by the fetch unit.
  * When StopFetch is high, `fetch_ready` is held low and the IQ takes only the
    injected instruction.
  * Injected instructions are tagged, so the core does not move its fetch PC
    for them.
* **Single-instruction injection.** Inject-ready is high only when StopFetch
  is high, the pipeline is empty and the IQ can take an entry. So at most one
  injected instruction is ever in flight. This keeps the core's replay
  ("reissue") behaviour under stalls from ever seeing an injected
  instruction.
* **Reissue gate.** A front-end request that is a reissue is suppressed while
  StopFetch is high. Other front-end requests pass, such as the redirect that
  `mret` makes, so fetch restarts at `mepc` when StopFetch drops.
* **Register port multiplexers.** While StopFetch is high and the pipeline is
  empty, a Reg access takes the register file's read and write ports.
  * A read returns its data in the same cycle.
  * A write happens in the handshake cycle.

The pipeline side is a generic struct of signals (`pipe_in_t` /
`pipe_out_t`). The core itself is not part of this design.

## StopFetch rules

StopFetch of a core is high:

* from reset;
* whenever the core is not in U-mode;
* from the cycle the core leaves U-mode until the controller has finished a
  Redirect for it.

It is therefore low only while user code runs. The hold between leaving U-mode
and the Redirect means a core cannot start fetching trap-handler code on its
own. The controller uses the CPU port of a core only while that core's
StopFetch is high.

## Host-Target Protocol on the wire

The set of requests and what they do come from the paper. The byte format is
this design's own.

A request is built as follows:

1. One opcode byte.
2. A CPU ID byte, for every request except Next and Tick.
3. An index byte, for RegR and RegW (the register number) and for Interrupt
   (the level).
4. Zero, one or two 64-bit argument words, little endian.

The response is zero, one or four 64-bit words, little endian.

| op | request | arguments | response |
|---|---|---|---|
| 01 | Redirect | cpu, target address | – |
| 02 | Next | – | cpu, mcause, mepc, mtval |
| 03 | SetMMU | cpu, satp word (mode, asid, ppn packed) | – |
| 04 | FlushTLB | cpu | – |
| 05 | SyncI | cpu | – |
| 06 / 07 / 08 | HFSet / HFClr / HFClrAll | cpu, address (none for HFClrAll) | – |
| 09 / 0A | RegR / RegW | cpu, register, [data] | [data] |
| 0B / 0C | MemR / MemW | cpu, address, [data] | [data] |
| 0D | PageS | cpu, ppn, value | – |
| 0E | PageCP | cpu, source ppn, destination ppn | – |
| 0F | PageR | cpu, ppn | 512 words streamed |
| 10 | PageW | cpu, ppn, then 512 words streamed | – |
| 11 / 12 | Tick / UTick | – / cpu | tick count |
| 13 | Interrupt | cpu, level | – |

A byte that is not an opcode is skipped.

A request may need the CPU port of a core that is running user code, or of a
core that does not exist. Such a request runs in **nop mode**:

* it consumes and produces exactly the same bytes as a normal request;
* it leaves the core alone;
* its register reads return all ones.

So the byte stream never loses its framing.

## Operation state machines (`fase_op_engine`)

Every request is a short micro-program over three kinds of step: register
access, inject-and-drain, and stream a word from or to the UART buffers.
Scratch registers are saved first and restored last. "x1 = v" is a Reg write,
"$inst" is an injection, "send" is a Reg read into the Resp Regs or the TX
buffer.

* **Redirect:**
  1. Save x1 and x2.
  2. x1 = target; x2 = 3<<11.
  3. `$csrrc mstatus,x2`, then `$csrw mepc,x1`.
  4. Restore x1 and x2.
  5. `$mret`.
  6. Release StopFetch.
* **Next:**
  1. Wait on the Exception Event Queue.
  2. Save x1–x3.
  3. `$csrr` mcause, mepc and mtval into x1–x3.
  4. Send x1–x3.
  5. Restore x1–x3.
  6. HFutex test, see below.
* **SetMMU:** x1 = satp; `$csrw satp,x1`. **FlushTLB:** `$sfence.vma`.
  **SyncI:** `$fence.i`.
* **MemR:** x1 = addr; `$ld x2,0(x1)`; send x2. **MemW:** x1 = addr;
  x2 = data; `$sd x2,0(x1)`.
* **PageS:** x1 = ppn<<12; x2 = val; 512 × { `$sd x2,0(x1)`;
  `$addi x1,x1,8` }.
* **PageCP:** 512 × { `$ld x3,0(x1)`; `$sd x3,0(x2)`; two `$addi` }.
* **PageR** and **PageW** are batched, 8 words per iteration (parameter
  `BATCH`). x1..x9 are saved first and restored at the end.
  * PageR: 64 × { `$ld x2,0(x1)` … `$ld x9,56(x1)`; `$addi x1,x1,64`;
    send x2..x9 to the TX buffer as 8 bytes each }.
  * PageW: 64 × { 8 × (receive 8 bytes from the RX buffer; write the word
    into the next of x2..x9); `$sd x2,0(x1)` … `$sd x9,56(x1)`;
    `$addi x1,x1,64` }.
  The page words flow straight between the UART buffers and the core while
  the request runs.

Timing with a core model that executes an instruction in 2 cycles:

* A register access costs 1 cycle.
* An injection costs 5 cycles: handshake, a gap cycle, and waiting for
  InjectBusy to fall.
* PageS therefore takes 5640 cycles, or 56 µs at 100 MHz.
* PageW of a page takes 9125 cycles when the RX buffer never runs dry. Most
  of that is the 8 cycles per word spent taking bytes from the buffer. In a
  real system the UART is far slower, so the link sets the pace.

## Hardware futex (HFutex)

After Next has read mcause of the trapped core, the engine checks for an ecall
from U-mode. If it is one, the engine reads a7, a1 and a0.

Suppose all of the following hold:

* the call is futex (a7 = 98);
* the command in a1 is FUTEX_WAKE (a1 & 0x7F = 1);
* a0 hits that core's mask.

Then the engine completes the call itself:

1. It writes a0 = 0.
2. It runs the Redirect micro-program to mepc + 4.
3. It goes back to waiting on the queue.

The host never sees the call. In every other case the event is reported to
the host.

The host keeps the masks up to date:

* It sets an address after a futex wake that woke nobody.
* It clears an address on all cores after a successful futex wait on it.
* It clears a core's whole mask on a thread switch.

Each core has 4 entries. A new address goes into the first free entry, or a
round-robin victim when the mask is full. The entries hold the address as the
core saw it in a0.

## Where this design departs from, or goes beyond, the paper

* **Redirect:** the paper's table writes `csrs mstatus,3<<11`. That would set
  MPP to M, and `mret` would stay in M-mode. The text says Redirect resumes
  user code, so this design clears MPP (`csrrc`) instead.
* **SetMMU:** the table writes `ppn&(asid<<44)&(mode<<60)`. This is read as an
  OR, and the host sends the packed satp value.
* **Batching:** the paper batches 8 or 16 registers per iteration in
  PageRW. This design uses 8 for PageR and PageW. PageS and PageCP keep the
  one-word loops of the table.
* **PageS time:** the paper quotes about 0.01 ms for a PageSet. The 56 µs
  measured here is set by the single-instruction injection and the core
  model's drain time.
* **Own choices where the paper is silent:**
  * the wire format and opcode values;
  * nop mode;
  * the HFutex mask size and replacement;
  * buffer depths;
  * lowest-ID-first queuing of simultaneous exceptions;
  * the StopFetch hold until release;
  * the generic pipeline-side signal set.
* **Interrupt:** a per-core level register, set and cleared by the Interrupt
  request.

## Not in this design

* The Rocket cores, their caches, the TileLink bus, the L2 cache and the DDR4
  memory are existing or vendor parts that the paper uses but does not design.
  The adapter marks the boundary.
* The host runtime is software.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_fase_top` is the full-size end-to-end test, with default parameters:
  * It plays the host over the real serial line at 921600 bit/s.
  * It runs four behavioural RV64 core models (`tb/tb_rv_core.sv`) on a shared
    memory.
  * It loads programs and starts three of them.
  * It serves their write, futex and exit calls while they run concurrently.
  * It checks HFutex filtering and un-filtering, every page operation, nop
    mode, Interrupt, Tick and UTick.
  * It counts every mechanism, and fails any that never happened.
* The other testbenches exercise one block each, against models written in the
  testbench. Where the paper gives a rate, the cycle counts are checked:
  * 11 bit times per UART byte;
  * register-access, injection, PageS and batched PageW cycle counts in the
    engine.
* For each module a deliberately broken copy was run against its testbench,
  and every one was caught.

To run a testbench with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_fase_top \
  rtl/fase_pkg.sv tb/tb_asm_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/tb_rv_core.sv tb/tb_fase_top.sv
./obj_dir/Vtb_fase_top
```
