# Stitch: hardware parameter stitching for parameterized quantum circuits

Many quantum experiments run thousands of circuits that share one pulse
structure. Randomized compiling, randomized benchmarking, cycle benchmarking
and gate set tomography are examples. A standard compiler breaks every
single-qubit gate into two physical X(pi/2) pulses and three *virtual-Z*
gates, so circuits of the same structure differ only in their virtual-Z
phases. A virtual-Z is not a pulse. It is a phase offset applied to the
following pulses. Compiling and loading every circuit separately is
therefore mostly repeated work.

Hardware-assisted parameterized circuit execution avoids that work. It was
published as "Hardware-Assisted Parameterized Circuit Execution" for the
QubiC FPGA control system. The host compiles one **template** per structure.
In the template, every virtual-Z is replaced by an instruction that asks an
FPGA function processor for "my next phase" (QubiC's `alu_fproc` with
function ID 10). The phases of every circuit are **peeled** off and loaded
into per-qubit parameter memories on the FPGA. While the template runs, the
**Stitch** module returns the right phase to each processor core within two
500 MHz clock cycles. It repeats the same phases for every shot and can move
on to the next circuit's phases without help from software.

This repository is synthesizable SystemVerilog for the Stitch module. The
host software (the part that finds equivalent circuits and peels the phases)
and the ARM-side scheduler are software and are not included. The
testbenches model the scheduler's bus traffic.

## Block map

```
             100 MHz                  |             500 MHz
 ARM ──AXI4-Lite──► axi_local_bus ──(toggle handshake)──► lb_req (14-bit word addr)
 (scheduler)        └─────────── mem_controller ──────────────┐
                                                 mem_switch ◄─┘
                                   addr[13:11] picks memory,  addr[10:0] word
                                        │ port A  (×8)          │ control space
                                        ▼                       ▼
                                  param_mem[0..7]        stitch_logic registers
                                  2048 × 32, dual port          │
                                        │ port B  (×8)          │ cfg, start
                                        ▼                       ▼
                           stitch_logic = 8 × stitch_channel ◄──┘
                               │ fproc_req / fproc_resp (×8)   │ meas_req / meas_resp (×8)
                               ▼                               ▼
                     processor cores (one per qubit)   measurement function processor
```

| Module | Role |
|---|---|
| `stitch_top` | The whole Stitch module. It is the design's top. |
| `mem_controller` | `axi_local_bus` followed by `mem_switch`. |
| `axi_local_bus` | AXI4-Lite slave. It turns each access into one local-bus access in the 500 MHz domain. |
| `mem_switch` | Decodes the 14-bit local address into a memory and a word, and returns read data. |
| `param_mem` | True dual-port RAM, 2048 × 32 bits, one per qubit. |
| `stitch_logic` | Control registers plus eight `stitch_channel`s. |
| `stitch_channel` | One qubit: serves parameter requests through a prefetch buffer, counts shots and sets, and passes measurement requests through. |
| `stitch_pkg` | Widths, the parameter ID (10), bus structs and the register enum. |

## How a run proceeds

1. The scheduler writes the phases of one circuit, or of several
   structurally equivalent circuits, into each qubit's memory over AXI.
2. For each qubit it writes the control codes: `BASE`, `COUNT`, `SHOTS` and
   `SETS`. Then it writes `CTRL = 1` to start the channel.
3. The channel starts prefetching at `BASE`.
4. The scheduler starts the circuit. On each of the `SHOTS` shots, the qubit's
   core issues `COUNT` parameter requests, one for each former virtual-Z
   gate. Each request gets the next phase.
5. `STATUS.done` rises once every word of every shot and set has been
   delivered. `DELIVERED` and `STALLS` count what happened.

Loading and execution must not overlap. The memories are dual-ported, but
nothing orders a load against a read of the same word. In the original
system the scheduler guarantees this by software sequencing.

## The stitch channel (the part that matters)

Each qubit has an independent channel. It has three parts.

**Sequencer.** A fetch pointer walks the memory in the order the core will
ask:

```
for set   in 0 .. SETS-1:            base_s = BASE + set*COUNT   (mod 2048)
  for shot in 0 .. SHOTS-1:
    for i  in 0 .. COUNT-1:          deliver mem[base_s + i]
```

Repeating the same `COUNT` words for each shot is the shot repetition of the
original design. Choosing a new `BASE` switches to another parameter set.
Choosing a `COUNT` below what was loaded repeats a partial set. Setting
`SETS > 1` runs several structurally equivalent circuits, stored back to
back, without reprogramming between them. The three-level loop and the
register encoding are this implementation's own. The original states only
that the stitch logic counts the parameters of a circuit, repeats them for
a given number of shots, and can repeat a partial set or switch sets under
control codes from the scheduler.

**Prefetch buffer.** The buffer has two entries and is fed from memory
port B. The fetch engine issues a read whenever the buffer entries plus the
read in flight, minus this cycle's pop, are fewer than two. Memory reads
take one cycle, and a word arriving at an empty buffer can go straight to
the core in the same cycle. The resulting timing:

```
clk          _/‾\_/‾\_/‾\_/‾\_/‾\_
req.valid    ‾‾‾‾\___________        (id = 10)
resp.ready   ____/‾‾‾\_______        one cycle after the request
resp.data    ----< P[n] >-----
```

A request is answered in the cycle after it is made. The original quotes
completion "within two clock cycles (4 ns)". Requests on consecutive cycles
are also sustained. A core must keep one request outstanding at a time; an
assertion checks this. A request that finds the buffer empty is held as
*pending*. This happens only right after start, before the first read
returns. The request is answered as soon as the word arrives, and `STALLS`
counts it. A request in the very cycle of the start pulse is kept, not lost.

**Overrun.** A request after the last word of the last set, or to a channel
never started (`COUNT`, `SHOTS` or `SETS` zero), gets the value 0 after one
cycle and sets the sticky `STATUS.overrun` bit. This keeps a core from
hanging on a mis-programmed channel. The original does not say what happens
in this case.

**Measurement pass-through.** Requests whose ID is not 10 are forwarded
combinationally on `meas_req`. These are IDs 0–7, the mid-circuit
measurement and feed-forward requests of QubiC. The reply on `meas_resp` is
merged back into `fproc_resp`. Because each core has only one request
outstanding, the two kinds of reply never collide; an assertion checks this.
The measurement function processor itself is existing QubiC logic and lies
outside this module.

## Memory controller and address map

`axi_local_bus` takes one AXI4-Lite transaction at a time and crosses it to
500 MHz with a toggle request/acknowledge handshake. The payload and the
read data are held stable while their toggle crosses, so only single bits
pass through the two-flop synchronisers. A write then takes about 4 AXI
cycles from address and data to `BVALID`. The original instead reuses a
vendor AXI clock-converter IP.

AXI byte address fields (all 32-bit word accesses; `WSTRB` is ignored;
responses are always OKAY):

| AXI bits | Meaning |
|---|---|
| [1:0] | ignored (word aligned) |
| [12:2] | word within a memory, 0–2047 (local address bits [10:0]) |
| [15:13] | qubit / memory 0–7 (local address bits [13:11]) |
| [16] | 0 = parameter memory, 1 = control register |
| [31:17] | ignored |

The split of the 14-bit local address into 3 select bits and 11 word bits is
from the original. Putting it at byte-address bits [15:2] and adding the
control space at bit 16 are this implementation's choices. Reads of
parameter memory over AXI use the memory's spare port A read path, which the
original reserves for debugging.

### Control registers (AXI bit 16 = 1)

The qubit is in AXI bits [15:13]. The register is in bits [4:2] (local
address bits [2:0]).

| Reg | Name | Access | Reset | Meaning |
|---|---|---|---|---|
| 0 | BASE | R/W | 0 | first word of the parameter set |
| 1 | COUNT | R/W | 0 | parameters per circuit, 0–2048 |
| 2 | SHOTS | R/W | 1 | shots per set (16 bits) |
| 3 | SETS | R/W | 1 | consecutive sets of COUNT words (8 bits) |
| 4 | CTRL | W | – | bit 0 = 1: start or re-arm the channel with the registers above |
| 5 | STATUS | R | 0 | bit 0 running, bit 1 done, bit 2 overrun |
| 6 | DELIVERED | R | 0 | phases delivered since start |
| 7 | STALLS | R | 0 | requests that found the buffer empty |

A start clears the buffer, the counters and the flags.

## Interfaces, clocks and reset

* `aclk` / `aresetn` belong to the AXI side, 100 MHz in the original.
  `clk` / `rst_n` belong to everything else, 500 MHz, the rate of the QubiC
  processor cores. Both resets are synchronous and active low, and each is
  used in its own domain.
* `fproc_req[q]` is `{valid, id[7:0]}`, a one-cycle strobe.
  `fproc_resp[q]` is `{ready, data[31:0]}`, a one-cycle strobe. The original
  gives the 8-bit ID and the 32-bit data; the strobe handshake is assumed.
* `meas_req[q]` and `meas_resp[q]` have the same types, towards the
  measurement function processor.
* All per-qubit buses are packed arrays of the structs in `stitch_pkg`.

## Sizes and capacity

| Parameter | Default | Origin |
|---|---|---|
| qubits `NQ` | 8 | original |
| words per qubit | 2048 × 32 bits (8 KB, two 36 Kb BRAMs) | original |
| local bus | 14 bits = 3 select + 11 word | original |
| fproc ID / data | 8 / 32 bits, parameter ID 10 | original |
| SHOTS / SETS width | 16 / 8 bits | own choice |
| prefetch depth | 2 | own choice |

The original loads one circuit's phases per qubit at a time. Measured
against that, all of the protocols it reports fit the 2048-word memories.
Per-qubit phase counts are worked out from the published parameter totals
and the 3-virtual-Z-per-gate decomposition:

* Randomized benchmarking at depth 384 needs 3 × 385 = 1155 words.
* Randomized compiling at depth 100 needs about 303 words.
* Cycle benchmarking needs at most about 143 words.
* Two-qubit GST needs about 105 words on average.

All use at most 8 qubits. Storing several circuits for `SETS > 1` is limited
by the same 2048 words.

## Where this departs from the original

* The clock crossing is a toggle handshake inside `axi_local_bus` rather
  than a vendor clock-converter IP.
* The control-register space and its encoding, the overrun behaviour, the
  fproc strobe handshake and the two-entry prefetch depth are not given in
  the original and were chosen here.
* The original resource figures for the 8-qubit Stitch module are 1695
  LUTs, 2236 registers and 16 BRAMs. This RTL was not fitted to an FPGA, so
  those figures are not reproduced or compared.
* The original connects the stitch logic to QubiC's existing function
  processor for measurements. Here the measurement side is reduced to a
  per-core request/reply port pair.
* Memory port B's write side, reserved for debugging in the original, is
  present in `param_mem` but never driven by the stitch logic.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_param_mem` | fill and read back on both ports; read-first behaviour; random dual-port traffic against a reference array |
| `tb_mem_switch` | memory select from the 3 MSBs; word address; no aliasing; read mux; one-cycle read valid; control space |
| `tb_axi_local_bus` | AW/W in either order; slow BREADY/RREADY; exactly one local access per AXI access; address mapping; write latency bound |
| `tb_mem_controller` | AXI writes land in the right memory word and nowhere else; AXI read-back; control space |
| `tb_stitch_logic` | exact phase order across shots and sets for all 8 channels in parallel; one-cycle replies including back-to-back requests; stall after start; measurement pass-through; overrun; status and counters; base switch with a partial count |
| `tb_stitch_top` | end to end at full default size (8 qubits, 2048 words): scheduler over AXI, eight cores running RB-style templates with measurements; counts each mechanism (prefetch hit, stall, measurement, shot repeat, set advance, base switch, partial set, overrun, AXI read-back, full 2048-word depth) and fails if one never occurs |

`tb_workloads` runs the evaluated protocols through the full-size module.
Each protocol uses its published width and shot count. Phases per qubit
come from the gate decomposition or from the published parameter totals:

| Protocol | Qubits | Phases per qubit | Shots |
|---|---|---|---|
| RB at depth 384 | 8 | 1155 | 100 |
| RC20 at depth 100 | 8 | 303 | 50 |
| FRC | 8 | 303 | 1 |
| CB | 8 | 18 | 100 |
| GST | 2 | 105 | 1000 |

FRC preloads six randomizations and runs them as six sets. The test checks
every phase and every reply time. With one request every two cycles (the
request plus the template's 4 ns delay), each core is served one phase per
two cycles, with no stalls.

Run any of them with plain Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -Irtl --top-module tb_stitch_top rtl/stitch_pkg.sv tb/tb_stitch_top.sv
./obj_dir/Vtb_stitch_top
```

The full-size end-to-end test simulates about 0.2 ms of design time and runs
in well under a second. Lint with
`verilator --lint-only -Wall -y rtl -Irtl rtl/stitch_pkg.sv rtl/stitch_top.sv`.
The remaining lint warnings are the unused `WSTRB` input and one unused bit
of the control bus. Both are intended.

To resize the design, change `NQ` or `MEM_AW` in `stitch_pkg`. The 3-bit
memory select is `LB_AW - MEM_AW`, so more than 8 qubits needs a wider local
bus.
