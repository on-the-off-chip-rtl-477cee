# RLDC: a predictable RLDRAM3 memory controller for multi-core real-time systems

A real-time task's worst-case execution time can only be bounded if every
memory access it makes is bounded as well. With DDR DRAM that bound is loose:
an access can need a precharge, an activate and a read or write. Which of these
it needs depends on what earlier requests left in the row buffer. On top of
that come more than twenty timing rules and a long bus turnaround. Reduced
Latency DRAM (RLDRAM3) removes most of this. The row and column address go to
the device in one step, and the device opens and closes rows by itself. So
every access is a single READ or WRITE command. Only two kinds of timing rule
remain:

* **bank cycle time** `tRC`: the shortest time between two commands to the same bank;
* **data-bus spacing**: a burst must not overlap the one before it on the
  shared data bus.

RLDC is a small controller built on that fact. Several processing elements
(PEs) share one RLDRAM3 device. The controller puts each PE's requests in a
queue of its own. Each cycle it serves the queue heads in round-robin order,
and a set of down-counters, one per timing rule, says which heads may go. The
result is a latency bound you can write in one line. With `N` PEs the bound is
`(N-1)*tRC + tCL` when all PEs share all banks. It is smaller when each PE has
banks of its own.

This repository holds synthesizable SystemVerilog for the controller's command
path, a behavioural model of the device's command interface, and
self-checking testbenches.

## Timing that the design is built around

All times are controller clock cycles. The defaults are RLDRAM3-1600 values
at a 1.5 ns clock.

| Parameter | Meaning | Cycles |
|---|---|---|
| `T_RC` | command to command, same bank | 6 |
| `T_RL` | READ to first data beat | 13 |
| `T_WL` | WRITE to first data beat | 14 |
| `BL`   | burst length; one burst holds the bus `BL/2` cycles | 8 (4) |

Every rule on the data bus follows from one condition: a burst starts no
earlier than the previous burst ends. A READ issued at `t` holds the bus during
`[t+13, t+17)`, and a WRITE at `t` holds it during `[t+14, t+18)`. That gives
the minimum spacing between two commands:

| previous → next | spacing | formula |
|---|---|---|
| READ → READ   | 4 | `BL/2` |
| WRITE → WRITE | 4 | `BL/2` |
| READ → WRITE  | 3 | `tRL - tWL + BL/2` |
| WRITE → READ  | 5 | `tWL - tRL + BL/2` |
| any → any, same bank | 6 | `tRC` |

A command may issue only when every earlier command is far enough back. Each
spacing is fixed by the type of the earlier command, so only the newest READ,
the newest WRITE and the newest command to each bank can be limiting.

## From request to command pins

```
 request ─► processor_decoder ─┬─► command_generation ──┐
 (pe, op, addr)                └─► address_mapping ─────┴─► pe_buffer[0..N-1] ─► rr_arbiter ─► cs_n/we_n/ref_n, ba, a
                                        ▲                                             ▲
                              mem_config_reg (layout bit)                     timing_checker
```

| Block | File | What it does |
|---|---|---|
| Processor decoder | `rtl/processor_decoder.sv` | Reads the PE Id carried with the request and selects that PE's buffer. It accepts the request (`req_ready`) only if the Id names an existing PE and its buffer has room. |
| Command generation | `rtl/command_generation.sv` | Turns a read into READ and a write into WRITE, as the device pins `{CS#, WE#, REF#}` = `LHH` / `LLH`. NOP is `CS#` high. |
| Address mapping | `rtl/address_mapping.sv` | Splits the address into bank and in-bank address under the current layout (see below). |
| Configuration register | `rtl/mem_config_reg.sv` | Holds the layout bit: 1 selects bank partitioning, 0 bank sharing. |
| Per-PE buffers | `rtl/pe_buffer.sv` | One FIFO per PE of `{command, bank, address}` entries, first-word-fall-through, with a same-cycle bypass. |
| Timing checker | `rtl/timing_checker.sv` | Holds a counter for each timing rule and computes a `ready` flag for every queue head. |
| Round-robin arbiter | `rtl/rr_arbiter.sv` | Chooses one ready head per cycle and drives it onto the pins. |
| Top | `rtl/rldc_top.sv` | Wires the blocks together. |
| Shared constants and types | `rtl/rldc_pkg.sv` | Default sizes, the timing values, the command encoding and the spacing function. |

The whole path from the request port to the command pins is combinational. A
request that reaches an idle controller, and that no rule blocks, is therefore
issued in the same cycle it arrives. Its data starts exactly `tRL` or `tWL`
cycles later. That is the best-case latency the analysis assumes. The bypass in
`pe_buffer` makes this possible. If the buffer is empty, the entry being pushed
is already visible at the head. If the arbiter takes it in that cycle, it is
never stored. If you need a registered interface, add a register stage in front
of the decoder. Every latency below then grows by one cycle.

## The timing checker's counters

`timing_checker` keeps `NUM_BANKS + 2` small down-counters. Each counter stops
at zero.

* `bank_cnt[b]`: any command to bank `b` loads `T_RC - 1`.
* `rd_cnt`, the cycles until a READ may issue: a READ loads `BL/2 - 1`, a WRITE loads `(tWL - tRL + BL/2) - 1`.
* `wr_cnt`, the cycles until a WRITE may issue: a WRITE loads `BL/2 - 1`, a READ loads `(tRL - tWL + BL/2) - 1`.

A counter is loaded on the clock edge that ends the issue cycle, so it holds
`gap - 1` in the next cycle and reaches zero in cycle `t + gap`. A new load
never lowers a count that is still running, so a constraint left by an older
command survives. A head is ready when its bank counter is zero and the
counter for its command type is zero. All heads are checked in parallel each
cycle.

Two worked examples from the end-to-end test:

* **One bank, four PEs:** W, R, W, R go out at cycles 0, 6, 12 and 18. The last read's data starts at 31.
* **Four banks, four PEs:** W, R, W, R go out at cycles 0, 5, 8 and 13. The gaps are W→R 5, R→W 3 and W→R 5. The last read's data starts at 26.

## Arbitration and the latency bound

The arbiter keeps a pointer to the PE that holds the current round-robin slot.
It starts its search there. The PE after the one that issued gets the next
slot.

The design description gives two rules that do not fully agree:

1. If the head in the current slot is not ready, the arbiter checks the next PE in the schedule.
2. The worst-case analysis assumes that a request waits for each of the other `N-1` PEs at most once.

Rule 1 is work-conserving: a ready PE may issue in place of a blocked one.
The blocked PE can then lose its slot again and again. For example, a read
that waits for the 5-cycle W→R gap can keep losing to writes that need only
4 cycles. In that case rule 2 no longer holds. The parameter `SKIP_NOT_READY`
chooses which rule the arbiter follows:

* `1'b1` (default) follows rule 1. A PE whose head is not ready is passed over in the same cycle.
* `1'b0` follows rule 2. The slot stays with the first PE, from the pointer on, that has a request, until that request is ready. PEs with nothing queued are passed over.

The bounds, with `tCL` = `tRL` for a read and `tWL` for a write:

* bank sharing: `(N-1)*tRC + tCL`, so 31 cycles (46.5 ns) for a read with 4 PEs;
* bank partitioning: `ceil((N-1)/2)*(tWL-tRL+BL/2) + floor((N-1)/2)*(tRL-tWL+BL/2) + tCL`, so 26 cycles (39 ns) for a read with 4 PEs.

`tb/tb_rldc_bounds.sv` measured the worst latencies below. Each PE is in-order:
it has one request outstanding and waits until that request's data starts.
Each run served 20,000 random requests. The figures are read cycles, with the
bound in brackets.

| PEs | sharing, strict | sharing, default | partitioning, strict | partitioning, default |
|---|---|---|---|---|
| 1 | 13 (13) | 13 (13) | 13 (13) | 13 (13) |
| 2 | 17 (19) | 17 (19) | 17 (18) | 17 (18) |
| 4 | 27 (31) | 31 (31) | 25 (26) | 24 (26) |
| 8 | 43 (55) | **178** (55) | 39 (42) | **71** (42) |

With the strict slot, every run stays within its bound. With the default,
8 PEs go well past it. The end-to-end test `tb/tb_rldc_top.sv` shows the same
effect at 4 PEs. There a PE may send its next request as soon as the previous
one is issued, and reads reach 92 cycles. Choose `SKIP_NOT_READY = 0` if you
need the analytical bound. The default keeps the behaviour as the arbitration
itself is described.

## Memory layouts and the address map

A request address is `{in-bank address [ADDR_W-1:0], bank field
[log2(NUM_BANKS)-1:0]}`. So neighbouring blocks fall in different banks.

* **Bank sharing** (`partition = 0`): `ba` = bank field. Any PE can reach any
  bank, so PEs can share data. A request may then wait `tRC` behind each
  other PE.
* **Bank partitioning** (`partition = 1`, the reset value): PE `p` owns banks
  `p*B ... p*B + B - 1`, where `B = NUM_BANKS/NUM_PE`, so 4 banks each at the
  defaults. The bank is `p*B + (bank field mod B)`. The upper bits of the bank
  field are ignored, so each PE sees its own quarter of the device. PEs never
  conflict on a bank, and only bus spacing remains between them.
  `NUM_PE` must divide `NUM_BANKS`.

You change the layout by writing the register (`cfg_we` with `cfg_partition`).
The write waits until no request is buffered. While it waits, `cfg_pending` is
high and new requests are held off (`req_ready` low), so the buffers drain.
This way, no command in a queue was mapped under the other layout.

## Interface

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `req_valid`, `req_ready` | in, out | 1 | request handshake; a request is taken in a cycle where both are high |
| `req_pe` | in | log2(NUM_PE) | Id of the requesting PE |
| `req_op` | in | 1 | `OP_READ` or `OP_WRITE` (`rldc_pkg::op_e`) |
| `req_addr` | in | ADDR_W + log2(NUM_BANKS) | `{in-bank address, bank field}` |
| `cfg_we`, `cfg_partition` | in | 1 | layout write |
| `cfg_pending`, `partition` | out | 1 | layout write waiting; current layout |
| `rld_cs_n`, `rld_we_n`, `rld_ref_n` | out | 1 | device command; the device samples it on the clock edge that ends the issue cycle |
| `rld_ba`, `rld_a` | out | log2(NUM_BANKS), ADDR_W | bank and address |
| `issue`, `issue_pe` | out | 1, log2(NUM_PE) | a command goes out this cycle, and which PE it belongs to; a data path can use these to tag the burst that starts `tRL`/`tWL` later |

Parameters of `rldc_top`, with their defaults: `NUM_PE = 4`,
`NUM_BANKS = 16`, `ADDR_W = 20`, `BUF_DEPTH = 4`, `T_RC = 6`, `T_RL = 13`,
`T_WL = 14`, `BL = 8` and `SKIP_NOT_READY = 1`. At the defaults the design
synthesizes to about 380 word-level cells, 123 flip-flops and four
4 × 27-bit buffers.

## What is not here

* **Data path.** This design has no DQ bus, no write-data buffer and no read
  return. Such a path would start a burst `tRL` or `tWL` after each command, as
  tagged by `issue_pe`.
* **Refresh, mode-register programming and power-up.** The controller never
  sends REF or MRS.
* **The PHY, the pads and the RLDRAM3 device.** `tb/rldram_model.sv` models
  only the device's command timing, to check the controller.

## Choices this design makes

These points are not fixed by the controller's description and were chosen
here:

* the pin-level command encoding, taken from the RLDRAM3 command truth table;
* 16 banks and 20 address bits, as on an RLDRAM3 x36 device; with BL8 the device ignores some low address bits;
* the request format, the valid/ready handshake and the buffer depth of 4;
* the address bit layout and the order of banks under partitioning;
* counters loaded with `gap - 1`, which reproduces the cycle-exact schedules above;
* a one-cycle combinational path with a buffer bypass, chosen so that the best case is exactly `tCL`;
* how layout writes are deferred, and the reset layout (partitioning);
* the strict arbitration option.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. To build one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  --top-module tb_rldc_top rtl/rldc_pkg.sv tb/tb_rldc_top.sv -o sim
./obj_dir/sim
```

| Testbench | Checks |
|---|---|
| `tb_rldc_top` | The full design at its default parameters, compared every cycle with a cycle-accurate model of the scheduler. It reproduces the best case (13 and 14 cycles) and the schedules 0/5/8/13 and 0/6/12/18. It also runs the eight two-request cases, in which a READ or WRITE follows another command issued one cycle earlier, to another bank or to the same one. Their latencies are 13, 14, 16, 16, 17, 17, 18 and 19 cycles. A write hits the sharing bound of 32 cycles exactly. It then runs random traffic in both layouts and a backlog that fills the buffers during a deferred layout switch. Each mechanism (bypass, tRC stall, bus stall, round-robin skip, back-pressure, deferred write, layout switch, partition remap) must occur at least once. |
| `tb_rldc_bounds` | Worst and best latency for 1, 2, 4 and 8 PEs, in both layouts and under both arbitration options (the table above). |
| `tb_timing_checker` | Each spacing from the table above, then random traffic against a model. |
| `tb_rr_arbiter` | Both arbitration options against a pointer model. |
| `tb_pe_buffer`, `tb_processor_decoder`, `tb_address_mapping`, `tb_mem_config_reg`, `tb_command_generation` | Each block against a model of its own. |

The helpers `tb/rldram_model.sv` and `tb/rldc_traffic_check.sv` are used by the
testbenches. `rldram_model` flags any tRC violation, data-bus overlap or
REF/MRS command.

The testbenches model the processing elements only as random in-order
request streams. No application traces are run.
