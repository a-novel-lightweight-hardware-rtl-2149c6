# Instrumentation through the CoreSight context ID: FPGA-side trace decoder

Hardware monitors for software security (information-flow tracking, double-free
detection, control-flow checking) need the monitored program to send them
events. The usual way is a memory-mapped register in the FPGA, which on Linux
means mapping a physical address into every instrumented process. This design
uses a channel that already exists on ARM SoCs such as the Xilinx Zynq: the
CPU's **context ID register**. With context ID tracing enabled, the CoreSight
Program Trace Macrocell (PTM) copies that register into the trace stream each
time it emits an I-Sync packet. A kernel system call that writes a 32-bit value
into the register (`mcr p15, 0, rX, c13, c0, 1` then `isb`) therefore puts the
value into the trace, and the trace port (TPIU) carries it into the
programmable logic.

The RTL here is the programmable-logic half of that scheme. It decodes the raw
Program Flow Trace (PFT) on the fly and keeps two records in block RAM:

* the **decoded trace**: every program address the trace reveals (I-Sync
  addresses, branch targets, waypoints), usable for control-flow checking;
* the **instrumented data**: every context ID value, i.e. every event the
  program sent.

```
 ARM core ── PTM ── TPIU ──(trace port)──► data ─► pft_decoder ─┬─► mem_ctrl (1) ─► bram_dp: decoded trace
   (outside this RTL)                                           └─► mem_ctrl (2) ─► bram_dp: instrumented data
                                                                     read ports ◄── processor (via a bus-to-BRAM bridge)
```

Everything runs on one clock (250 MHz in the reference implementation) and
decodes one trace byte per cycle.

## What arrives on the trace port

The decoder sees the PFT byte stream that the PTM produces. The packets it
recognises, by header byte:

| Packet            | Header            | Rest of the packet                          | Decoded by        |
|-------------------|-------------------|---------------------------------------------|-------------------|
| a-sync            | ≥5 × `00`, `80`   | –                                           | global FSM        |
| I-Sync            | `08`              | 4 address bytes, info byte, 0/1/2/4 context ID bytes | I-Sync FSM |
| branch address    | `xxxxxxx1`        | header is address byte 0; up to 5 address bytes, optional exception bytes | branch FSM |
| waypoint update   | `72`              | 1–5 address bytes, optional info byte       | waypoint FSM      |
| atom              | `1xxxxxx0`        | –                                           | global FSM        |
| trigger           | `0C`              | –                                           | global FSM        |
| exception return  | `76`              | –                                           | global FSM        |
| ignore            | `66`              | –                                           | global FSM        |
| context ID        | `6E`              | CTXTID-sized value (skipped)                | global FSM        |
| VMID              | `3C`              | 1 byte (skipped)                            | global FSM        |
| timestamp         | `42` / `46`       | up to 9 continuation-flagged bytes (skipped) | global FSM       |

Multi-byte fields are least significant byte first. An I-Sync packet from a
real trace reads, for example,

```
08  78 04 01 00  21  f4 ee 03 00
hdr address       IB  context ID
    = 0x00010478      = 0x0003eef4   (the instrumented value)
```

Any other header byte is reserved: the decoder then declares itself out of
sync and ignores the stream until the next a-sync packet. After reset it is
also out of sync.

### Branch and waypoint addresses

Branch and waypoint packets carry only the address bits that changed. Each
address byte has 7 payload bits and a continuation flag in bit 7; the first
byte of a branch packet is also its header (bit 0 = 1), so it carries 6 bits.

| byte | ARM state      | Thumb state    |
|------|----------------|----------------|
| 0    | `[6:1]`→A[7:2]  | `[6:1]`→A[6:1]  |
| 1    | `[6:0]`→A[14:8] | `[6:0]`→A[13:7] |
| 2    | `[6:0]`→A[21:15]| `[6:0]`→A[20:14]|
| 3    | `[6:0]`→A[28:22]| `[6:0]`→A[27:21]|
| 4    | `0E001aaa`: A[31:29] | `0E01aaaa`: A[31:28] |

Bits not sent keep the value of the previous address. A fifth byte always ends
the address, fixes the instruction set (ARM or Thumb) and, with bit 6 (`E`)
set, announces one or two exception information bytes (branch) or one
information byte (waypoint). The instruction set in force otherwise comes from
bit 0 of the last I-Sync address or the last five-byte address. Jazelle state
is not supported.

With this layout the tail of the captured trace, `fd bc cf db 0d` and then
`01`, decodes to `0xb6e7bcf8` and `0xb6e7bc00`: a library address and then the
same address with the low byte cleared, which is the pattern found at the end
of decoded traces of the example program.

## The decoder: a global FSM and three packet FSMs

`pft_decoder` registers the input (`data` → `data_reg`), and every FSM works on
`data_reg`. The **global FSM** (`pft_global_fsm`) looks at each byte that can
be a header. For an I-Sync, branch address or waypoint packet it raises the
matching start signal (`start_i`, `start_b`, `start_w`) for one cycle and
hands the following bytes to that **packet FSM**; it then does nothing until
the packet FSM returns the matching stop signal (`stop_i`, `stop_b`,
`stop_w`). The other packet types are short or carry nothing the design needs,
so the global FSM decodes or skips them itself.

The point that makes the decoder keep up with the trace is where the stop
falls. A packet FSM raises stop, from a register, in the cycle *after* the
packet's last byte. In that cycle `data_reg` already holds the next packet's
header, and the global FSM decodes it in the same cycle it sees stop. So
packets follow one another with no idle cycle, and the decoder takes one byte
every cycle.

### I-Sync FSM

`pft_isync_fsm` has the states `WAIT_STATE → I_SYNC → I_SYNC_IB →
CTXTID_1 | CTXTID_2 | CTXTID_3 → WAIT_STATE`:

* `WAIT_STATE`: leaves on `start` (the header cycle).
* `I_SYNC`: counts the four address bytes; on the fourth the address is
  complete.
* `I_SYNC_IB`: the information byte. The next state depends only on the
  `CTXTID` parameter: `00` → back to `WAIT_STATE` (no context ID), `01` →
  `CTXTID_1` (1 byte), `10` → `CTXTID_2` (2 bytes), `11` → `CTXTID_3` (4 bytes).
* `CTXTID_n`: counts the context ID bytes; on the last one the instrumented
  value is complete (zero-extended when shorter than 4 bytes) and the FSM goes
  back to `WAIT_STATE`.

### Cycle by cycle

The I-Sync packet `08 c8 14 10 00 21 cd ab 34 12` followed by a branch
header `73`, with the header on `data` in cycle 0:

| cycle | data_reg | global FSM         | I-Sync FSM          | outputs (registered)                     |
|-------|----------|--------------------|---------------------|------------------------------------------|
| 1     | 08       | header: `start_i`  | WAIT → I_SYNC       |                                          |
| 2–5   | c8 14 10 00 | waiting         | I_SYNC (count 1–4)  |                                          |
| 6     | 21       | waiting            | I_SYNC_IB           | `trace_en`, `i_sync_address = 0x001014c8` |
| 7–10  | cd ab 34 12 | waiting         | CTXTID_3 (count 1–4)|                                          |
| 11    | 73       | `stop_i`: header → `start_b` | WAIT       | `instrument_enable`, `instrumented_data = 0x1234abcd` |

A packet of *n* bytes gives its result *n* + 1 cycles after its header was on
`data`: one cycle in the input register, *n* cycles to receive the bytes, and
the output register takes the last byte's combinational result. For the
longest packet used here, an I-Sync with a 4-byte context ID (*n* = 10), that
is 11 cycles. The packet FSMs present their results combinationally with the
last byte; `pft_decoder` registers them into its outputs.

### Outputs of the decoder

| signal              | meaning                                                            |
|---------------------|--------------------------------------------------------------------|
| `i_sync_address`    | current traced address, updated by I-Sync, branch and waypoint packets |
| `trace_en`          | one-cycle pulse: `i_sync_address` is new                           |
| `instrumented_data` | context ID of the last I-Sync packet                               |
| `instrument_enable` | one-cycle pulse: `instrumented_data` is new                        |
| `synced`, `pkt_event` | status and monitoring                                            |

The I-Sync address is passed on exactly as received (bit 0, the Thumb flag, is
kept). Branch and waypoint addresses are aligned (bit 0, and bit 1 in ARM
state, cleared).

## Memory controllers and memories

Each `mem_ctrl` writes one value per enable pulse into consecutive words of
its `bram_dp`, starting at word 0. The write reaches the RAM one cycle after
the pulse. When the memory is full the controller keeps the first `DEPTH`
values, drops the rest, holds `full` high and pulses `dropped` for each value
lost; only a reset starts it again at word 0. A reset clears the controllers,
not the memories.

`bram_dp` is a simple dual-port RAM: port A is the controller's write port,
port B is a read port with one cycle of latency for the processor. A read and
a write of the same word in one cycle return the old word. The contents start
at zero. The default depth, 2048 words of 32 bits, equals the two 36-Kbit
block RAM tiles each memory used in the reference implementation.

## Top level

`hw_instr_top` wires the decoder, the two controllers and the two memories.
The ARM core, the PTM, the TPIU and the pins between the processor and the
FPGA are not part of this RTL; the trace arrives on `data`. The memories' read
ports are top-level ports. In the reference system a vendor AXI-to-BRAM bridge
connects them to the processor bus so that Linux can read the results.

| Parameter   | Default | Meaning                                               |
|-------------|---------|-------------------------------------------------------|
| `CTXTID`    | `2'b11` | context ID size in the trace: 00/01/10/11 = 0/1/2/4 bytes; must match the PTM setting |
| `DATA_W`    | 32      | width of the trace port input (only bits 7:0 are decoded) |
| `MEM_DEPTH` | 2048    | words in each memory                                   |

Reset (`rst`) is synchronous and active high.

## How it departs from the published description

The published design gives the decoder's structure, the I-Sync state diagram,
the signal names and one timing example. Everything else had to be chosen.
The points to know:

* **Start is a pulse.** The timing example draws `start_i` as a level held
  while the I-Sync FSM works. Here each start is a one-cycle pulse in the
  header cycle, so a packet FSM that has returned to its wait state cannot be
  restarted by a stale start.
* **The header cycle does the work of the global FSM's "i-sync" state.** The
  example shows a one-cycle global `i-sync` state before `wait_state_i-sync`.
  Here the global FSM goes straight from the header to waiting, which takes no
  extra cycle.
* **Branch, waypoint and other packet formats** follow the PFT protocol as
  described above; the published text names these FSMs but not their formats.
  Exception numbers and information bytes are consumed but not output. Cycle
  counts (cycle-accurate mode) are not supported. The reference configuration
  does not enable that mode.
* **Latency.** The text gives *n* + 1 cycles with *n* at most 10, while a
  summary table writes (*n* + 1) ≤ 10. This RTL takes *n* + 1 cycles, which is
  11 for a 10-byte I-Sync packet.
* **One byte per cycle.** The port is 32 bits wide, as in the timing diagram,
  but only bits 7:0 are decoded: 2000 Mbit/s at 250 MHz. The 8000 Mbit/s quoted
  as maximum bandwidth would need four bytes per cycle, which this decoder
  does not do.
* **Every I-Sync records its context ID.** The start of a trace is an I-Sync
  too, so the instrumented data memory also receives whatever the context ID
  register held then (in the double-free test, a leading 0). The published
  memory dump starts directly with the first instrumented value.
* **The captured raw trace has seven context IDs**, with `dddddddd` twice. The
  published memory listing of that trace shows six. This decoder stores all
  seven.
* **Memory depth, full behaviour, reset, the Thumb flag handling, the
  out-of-sync state and the status outputs** are this design's own choices.

## Verification

Each module has a self-checking testbench in `tb/`; each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.
`tb/pft_tb_pkg.sv` holds a trace *encoder*. It turns target addresses and
context ID values into PFT bytes, choosing the fewest address bytes the
compression allows or more. It also records the values the decoder must
recover. Because it works in the opposite direction from the decoder, it
checks the decoder without sharing its code.

| testbench             | what it checks                                                   |
|-----------------------|------------------------------------------------------------------|
| `tb_pft_isync_fsm`    | all four context ID sizes, back-to-back packets, exact cycle of every valid and stop |
| `tb_pft_branch_fsm`   | 400 random branches, 1–5 bytes, ARM/Thumb switches, exception bytes |
| `tb_pft_waypoint_fsm` | 400 random waypoints, information bytes                          |
| `tb_pft_global_fsm`   | all eleven packet types cycle by cycle, loss and recovery of sync |
| `tb_pft_decoder`      | the timing example (values and the 11-cycle latency), a raw trace captured on hardware against hand-decoded addresses and values, a random stream |
| `tb_mem_ctrl`         | write sequence, count, full, dropped, restart after reset        |
| `tb_bram_dp`          | zero start, random traffic against a model, read-before-write    |
| `tb_hw_instr_top`     | end to end with 64-word memories: random stream with every packet type, read-back of both memories, overflow; counts each mechanism and fails if one never happened |
| `tb_hw_instr_full`    | end to end at default parameters: the double-free example program's trace; reads all 2 × 2048 words and finds region 1 freed twice but allocated once; then, after a reset, the raw trace captured on hardware, with both memories read back |

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pft_pkg.sv tb/pft_tb_pkg.sv tb/tb_hw_instr_full.sv --top-module tb_hw_instr_full
./obj_dir/Vtb_hw_instr_full
```

Replace the testbench name for the others. All finish within a second.

Size: a generic (not FPGA-specific) synthesis of `pft_decoder` gives 240
flip-flops, the same number of registers the reference implementation reports
for its decoder; each `mem_ctrl` gives 57 (the reference reports 79, for a
controller whose details are not published). Look-up-table counts from a
generic synthesis are not comparable with FPGA slice LUTs. Timing closure at
250 MHz has not been checked.

## Files

| file                       | content                                   |
|----------------------------|-------------------------------------------|
| `rtl/pft_pkg.sv`           | header encodings, packet kinds, address reconstruction |
| `rtl/pft_global_fsm.sv`    | global FSM                                |
| `rtl/pft_isync_fsm.sv`     | I-Sync packet FSM                         |
| `rtl/pft_branch_fsm.sv`    | branch address packet FSM                 |
| `rtl/pft_waypoint_fsm.sv`  | waypoint update packet FSM                |
| `rtl/pft_decoder.sv`       | decoder: input register, FSMs, output registers |
| `rtl/mem_ctrl.sv`          | memory controller                         |
| `rtl/bram_dp.sv`           | dual-port block RAM                       |
| `rtl/hw_instr_top.sv`      | top level                                 |
| `tb/pft_tb_pkg.sv`         | PFT trace encoder for the testbenches     |
| `tb/tb_*.sv`               | testbenches                               |
