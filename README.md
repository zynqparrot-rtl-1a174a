# ZynqParrot-style co-emulation shell in SystemVerilog

A processor or accelerator block is usually built as one part of a larger
chip. To evaluate it on an FPGA on its own, the rest of the system has to be
supplied by software on a host: memory, I/O and the test harness. Host
software is slow and unpredictable. Left alone, that would change what the
block under test sees: a memory response would arrive 500 cycles late one run
and 5000 the next. Timing measurements would mean nothing, and runs would not
repeat.

This RTL implements the shell that solves that problem. It follows the
ZynqParrot "scale-down" approach: the device under test (DUT) runs on its own
clock, and the shell **stops that clock** whenever the host has not kept up.
It stops it when an outbound FIFO is full. It stops it when a modelled memory
latency is still unknown, or has expired before the host delivered the data.
It stops it when a profiling sample cannot be stored. While the clock is
stopped, nothing in the DUT moves. The DUT therefore sees an ideal
environment whose timing is set by models the host computes, not by how fast
the host happens to be. Every run is cycle-for-cycle the same.

On top of that mechanism, the shell provides:

- FIFOs and control/status registers (CSRs) that the host reaches over an
  AXI4-Lite port (GP0 on a Zynq);
- a hardware timer that replays host-computed memory latencies;
- a PC and stall-class sampling profiler;
- stall-class event counters;
- toggle coverage registers;
- a UART bridge, so a board with no hard CPU can drive the same register
  interface over a serial line.

## Clock domains and the gating rule

There are three clocks:

| Clock | Who uses it |
|---|---|
| `aclk` | The host port, the register file and the UART bridge. |
| `dut_clk` | Free running. All shell logic on the DUT side of the clock crossings uses it. |
| `dut_gclk` | The gated copy of `dut_clk`. Only the DUT uses it. |

The core of the design is one combinational signal:

```
clk_en = run & ~|gate_req          (gating_fsm)
```

`run` is bit 0 of the control CSR. There are four `gate_req` sources, in this
order:

0. The user output FIFO is full.
1. The memory request FIFO is full.
2. The model timer.
3. The profiler.

`clk_en` is high in a `dut_clk` cycle exactly when the rising edge that ends
that cycle will also reach the DUT.

`clock_gate` registers `clk_en` on the **falling** edge of `dut_clk` and ANDs
it with the clock. This gives a glitch-free gated clock without a latch. On
an FPGA this gate maps to a clock-buffer enable.

Every register on the shell side of the DUT domain runs on the ungated
`dut_clk` and advances only when `clk_en` is high. This covers the FIFO
pushes and pops of the DUT ports, the timer count, the profiler count, the
counters and the coverage bits. Shell and DUT thus share one notion of
"executed cycle". The shell can also still act while the DUT is frozen, for
example to drain a pending profiler word or to notice a late response.

Because `clk_en` is combinational, a gate request raised in cycle *t* stops
the edge at the end of cycle *t*. This is the point to hold on to when
changing the design. Each gate source raises its request in the same cycle
in which it discovers it cannot proceed, and it never relies on a registered
request a cycle later. For example, the timer raises its request in the very
cycle a latency expires with no response waiting. If it waited one more
cycle, the DUT would run past the cycle its response was due in.

`gating_fsm` also counts executed and gated cycles (input CSRs 9 and 10). The
host reads them to measure the slowdown.

## The shell: FIFOs and registers (`pshell`)

The host side of every FIFO is **non-blocking**:

- A read of an empty DUT-to-host FIFO returns 0 at once.
- A write to a full host-to-DUT FIFO is dropped at once.

For every FIFO, a count register tells the host how many words it may safely
read, or how many it may safely write. Well-behaved software polls this
credit first. A hung or buggy DUT therefore can never stall the AXI bus, and
never lock up the host CPU.

The DUT side of each FIFO is an ordinary ready/valid (valid/yumi) port. The
FIFOs are `async_fifo` instances: Gray-coded pointers, two-flop
synchronisers, and first-word fall-through on the read side.

CSRs cross the clock domains in `csr_sync`:

- The source holds the value in a register, then flips a toggle.
- The destination sees the synchronised toggle change and captures the held
  value. It also raises a one-cycle update pulse.
- The toggle is acknowledged back to the source.

A write to an output CSR is answered only once the previous write to that
CSR has crossed. Input CSRs are resampled continuously from the DUT domain.

Every word of the host port uses the same pattern: FIFO *k* has its data at
word 2*k* and its count at word 2*k*+1. The host-to-DUT FIFOs come first,
then the DUT-to-host FIFOs. The output CSRs follow, then the input CSRs. With
the top level's allocation, the byte addresses are:

| Byte address | Register |
|---|---|
| 0x00 / 0x04 | Host-to-DUT FIFO 0 (user data, `dut_in_*`): data / free slots |
| 0x08 / 0x0C | Host-to-DUT FIFO 1 (memory responses): data / free slots |
| 0x10 / 0x14 | DUT-to-host FIFO 0 (user data, `dut_out_*`): data / words waiting |
| 0x18 / 0x1C | DUT-to-host FIFO 1 (memory requests): data / words waiting |
| 0x20 / 0x24 | DUT-to-host FIFO 2 (profiler samples): data / words waiting |
| 0x28 | Control. Bit 0 is `run`. Bit 1 clears the stall counters and bit 2 clears the coverage; both act on the write that sets them. |
| 0x2C | Latency of the outstanding memory request. Writing it starts the countdown. |
| 0x30 | Profiler sample interval. 0 turns sampling off; 1 samples every cycle. |
| 0x34 | Index of the coverage word to read. |
| 0x38, 0x3C | User output CSRs (`dut_csr_o[0..1]`) |
| 0x40–0x5C | Stall counters, one per event class (see below) |
| 0x60 | Coverage word selected at 0x34 |
| 0x64 / 0x68 | Executed DUT cycles / gated DUT cycles |
| 0x6C, 0x70 | User input CSRs (`dut_csr_i[0..1]`) |

Unmapped words read as 0, and every access is answered with OKAY. At most one
read and one write are outstanding.

`pshell` on its own takes the numbers of FIFOs and CSRs as parameters. Its
defaults (2, 3, 6 and 13) are what the top level needs. The overlay's
reference configuration is one FIFO each way and two CSRs each way, and the
`pshell` testbench runs exactly that configuration.

## The timed memory channel (`model_timer`)

This is the least obvious part of the design. The aim is that a memory
request from the DUT gets its response after exactly the latency a host-side
model computes (for example, a detailed DRAM model). This must hold whether
the host is fast or slow.

The sequence, in DUT cycles:

1. In cycle *r*, the DUT pushes a request into the memory request FIFO. The
   timer leaves IDLE.
2. From cycle *r*+1, the timer holds `gate_req` (WAIT_LAT). The DUT stays
   frozen until the host has read the request, run its model and written the
   latency *L* to 0x2C.
3. The update pulse of that write starts the countdown (COUNT). The DUT runs
   meanwhile, so it can overlap other work with the access.
   - If the host pushed the response data into host-to-DUT FIFO 1 early, the
     data waits there.
   - The data is shown to the DUT (`dut_mem_resp_v`) in DUT cycle *r* + *L*
     and consumed at the end of that cycle.
4. If the count reaches that cycle and no data is there yet, the timer gates
   the DUT in that same cycle (WAIT_RESP). The data is then delivered in the
   same DUT cycle once it arrives.

Either way, the DUT observes a latency of exactly *L*. A latency of 0 counts
as 1. Only one request is outstanding at a time: `dut_mem_req_ready` is low
until the response has been delivered.

## Profiling and counters

**Sampling profiler (`perf_profiler`).** The DUT presents a PC (39 bits) and
an event class every cycle. The event classes are defined in `zp_pkg`:

- commit
- I-cache miss
- D-cache miss
- branch mispredict
- taken branch
- FMA use
- load use
- other

On every *SI*-th executed cycle, where *SI* is the interval CSR, the profiler
writes two words into DUT-to-host FIFO 2:

1. `PC[31:0]`
2. `{event[2:0], 0…, PC[38:32]}`

If the FIFO is full, the DUT is gated in that cycle. It keeps showing the
same PC and event until the words fit. Samples are therefore never lost, and
sampling never changes what the DUT does. A smaller interval only costs
wall-clock time. While the interval is 0, the cycle count is held at 0, so the
first sample after sampling is switched on is the *SI*-th cycle.

**Stall counters (`stall_counters`).** There is one 32-bit counter per event
class. Each counter advances only in executed cycles, so the counters give a
cycle stack of the whole run: the counters sum to the executed-cycle count.
They are cleared by control bit 1.

**Coverage (`coverage_collector`).** There are 3284 single-bit sticky
registers. Bit *i* sets once select input *i* has changed value between two
executed cycles. A toggle is needed, not a particular level. The value before
the first executed cycle after reset or clear is not counted as a change. The
host reads the bits as 32-bit words through 0x34/0x60 and clears them with
control bit 2. How the select signals are found in a real DUT is up to the
instrumentation flow. Here they are simply a port.

## UART bridge (`uart_bridge`)

On an FPGA without a hard CPU, the same register interface is reached over a
serial line. The bridge is an AXI4-Lite master on a 16550-compatible UART
register block at `UART_BASE` (default 0x1000). It uses RBR/THR at +0x00 and
LSR at +0x14, with 32-bit spacing. It polls LSR:

- When a reply byte is waiting and THR is empty, it sends the byte.
- Otherwise, when a received byte is ready, it reads it.

Commands are byte strings, little-endian:

| Command | Bytes | Reply |
|---|---|---|
| Write | `0x01`, 4 address bytes, 4 data bytes | None |
| Read | `0x00`, 4 address bytes | 4 data bytes, least significant first |

The bridge issues each command on a second AXI4-Lite master port, the
"pseudo-GP0". At the top level this port is muxed in front of `pshell` when
`use_uart` is high. The shell answers every access in bounded time, so the
bridge cannot hang either.

## Files

All files are in `rtl/` and `tb/`.

| RTL file | Role |
|---|---|
| `zp_pkg.sv` | Shared types: AXI4-Lite request/response structs, event-class and state enums |
| `async_fifo.sv`, `csr_sync.sv` | Clock-domain crossing |
| `clock_gate.sv`, `gating_fsm.sv` | The gated DUT clock |
| `pshell.sv` | The host-facing register file with FIFOs and CSRs |
| `model_timer.sv`, `perf_profiler.sv`, `stall_counters.sv`, `coverage_collector.sv` | The DUT-domain mechanisms |
| `uart_bridge.sv` | The serial pseudo-GP0 master |
| `zynqparrot_top.sv` | Ties everything together. The DUT attaches to its `dut_*` ports and takes `dut_gclk` as its clock. |

Each block has its own self-checking testbench, `tb/<module>_tb.sv`. Each one
prints `TB_RESULT checks=… failures=…` and has a watchdog.
`tb/uart16550_model.sv` is a behavioural register model of a UART. It is used
by the bridge and top-level tests.

`tb/zynqparrot_top_tb.sv` runs the whole design at its default parameters. It
uses a small behavioural DUT: 2000 executed cycles, with sample interval 10.
The host side drains the FIFOs slowly and answers memory requests both early
and late. The test counts each mechanism: FIFO-full gating, waiting for a
latency, early and late responses, profiler gating, the software stop, and
UART mode. It fails if any of them never happened. It also checks:

- every memory latency, to the cycle;
- every data word and every sample;
- all counters and all coverage words.

## Simulating

Each test is a top-level module with no ports. With Verilator 5, for
example:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl --top-module zynqparrot_top_tb \
          rtl/zp_pkg.sv tb/uart16550_model.sv tb/zynqparrot_top_tb.sv
./obj_dir/Vzynqparrot_top_tb
```

For the other tests, substitute the testbench name. Each test ends with its
`TB_RESULT` line.

The simulation is two-state. Every register that is read is reset, or given
an initial value in the testbench.

The only register without a reset is the falling-edge enable flop in
`clock_gate`. It takes its value one half-cycle after the first edge of the
DUT clock. Its file explains why that is safe.

## Where this departs from the paper, and what it does not contain

These parts of the design come from the ZynqParrot description:

- non-blocking host / blocking DUT FIFOs with credit counts;
- CSR synchronisers;
- DUT clock gating on host backpressure;
- the model-timer behaviour (stop, program the latency, resume, pause until
  the correct cycle, re-gate on a late response);
- sampled PC/event profiling with gating as backpressure;
- per-class stall counters;
- single-bit toggle coverpoints (3284 of them);
- the UART pseudo-GP0 bridge with its command/response shift registers.

These are this design's own choices, not taken from the paper:

- every encoding;
- the register map;
- the channel allocation;
- the UART byte format and register offsets;
- the two-word sample format;
- the 39-bit PC;
- FIFO depth 16 and 32-bit counters;
- the exact event classes (the paper's stall-stack legend plus "commit");
- one outstanding timed request.

Known differences and limits:

- **Input CSRs are continuously resampled** rather than written on request.
  A multi-word value, such as two counters, is not read atomically. Stop the
  DUT (control bit 0) before reading a consistent set.
- **A clear is not instantaneous.** Clearing counters or coverage, or
  changing the interval, takes effect a few DUT cycles after the host's
  write completes, because of the crossing.
- **Only one timed memory channel** is built, with one request in flight.
  The description implies a memory model with parallel tasks but gives no
  structure for more.
- **The gating decision is combinational** (`clk_en`), with a small
  falling-edge register in the clock gate. The overlay diagram shows a
  "gating FSM" on the host side. Here its state is only the `run` bit plus
  the gate sources' own states.
- **Not contained:**
  - the host CPU and its software;
  - the UART IP itself (only a test model);
  - the DUT (BlackParrot, in the evaluation);
  - the "catch-up ALU" studied as a DUT change;
  - the simulation-only host transport.

  Commit tracing for golden-model comparison is not a separate block. It is
  done by streaming commit records through a user DUT-to-host FIFO, which
  gates on backpressure like any other.
