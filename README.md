# GradPIM in SystemVerilog: parameter updates inside DDR4 bank groups

Training a neural network ends every minibatch with an *update phase*. In
this phase each weight θ, its momentum v and its gradient g are read,
combined and written back. The arithmetic is trivial, a few multiplies and
adds per parameter, but the phase moves every parameter across the memory
bus several times. It is bandwidth-bound and does not benefit from a faster
accelerator.

GradPIM moves that phase into the DRAM. Since DDR4, the banks of a device
are grouped into *bank groups*. Each bank group has its own local I/O gating
in front of the shared global I/O. Column accesses within a bank group must
be tCCD_L = 6 cycles apart. Accesses to different bank groups need only
tCCD_S = 4 cycles, because they share only the global path. So each bank
group has bandwidth of its own that the off-chip bus never sees.

The design puts a small unit next to the local I/O gating of every bank
group. The unit has:

- two 64-bit temporary registers (Reg0 and Reg1);
- a 64-bit quantization register (RegQ);
- a *scaler* that multiplies data read from the array by one of four
  programmable constants, each of the form 2^-n ± 2^-m;
- a small ALU that adds, subtracts, quantizes to 8 bits and dequantizes
  from 8 bits.

The memory controller drives these units with new DDR4 commands. The
commands are carried in the RFU (reserved for future use) code of the
standard command truth table. A unit only ever reaches the rows open in
the four banks of its own bank group, so all 16 bank groups of a 4-rank
channel can update their own share of the parameters at the same time.
Data never leaves the chip.

This repository contains the following RTL:

- the units and the device-level command decoding;
- a *buffer device* that turns one high-level command ("update these
  columns", "dequantize these gradients", "quantize these weights") into
  GradPIM command streams for every bank group;
- a scheduler that merges those streams onto the channel's single command
  bus, together with ordinary traffic from the accelerator's memory
  controller, under DDR4 timing;
- a channel top-level with 4 ranks of eight x8 devices.

The DRAM cell arrays are not RTL. They are a behavioural model used by the
testbenches.

## The update the hardware performs

The design targets momentum SGD with weight decay, with mixed precision. The
accelerator produces 8-bit gradients Q(g) and consumes 8-bit weights Q(θ).
The DRAM keeps 32-bit master copies. One training step runs three
procedures in every bank group:

1. **Dequantize**: g ← dequant(Q(g)).
2. **Update**:
   - v' ← α·v − η·g − ηβ·θ
   - θ' ← θ + v'
3. **Quantize**: Q(θ) ← quant(θ').

Here η is the learning rate, α the momentum and β the weight decay. The
scaler multiplies by constants only, so each of η, α and ηβ is one entry of
the four-entry scale table. The fourth entry is 1.0, used for plain reads.

Numbers are 32-bit two's-complement fixed point. Quantization is:

- Q(x) = saturate_int8(round_half_up(x / 2^16));
- dequant(q) = q · 2^16.

Scaling by 2^-n ± 2^-m is two arithmetic right shifts and one add or
subtract. Each shift truncates toward minus infinity. The reset values of
the table are:

| id | use  | value             | ≈        |
|----|------|-------------------|----------|
| 0  | 1.0  | 2^0               | 1        |
| 1  | η    | 2^-7 + 2^-9       | 0.00977  |
| 2  | α    | 2^0 − 2^-3        | 0.875    |
| 3  | ηβ   | 2^-18 + 2^-20     | 4.8e-6   |

An MRS to mode register 7 rewrites an entry:

- A[13:12] select the entry;
- A[11:10] select the operation (0: 2^-n, 1: 2^-n + 2^-m, 2: 2^-n − 2^-m, 3: zero);
- A[9:5] hold m;
- A[4:0] hold n.

An x8 device delivers 64 bits per column access, so a register holds two
32-bit lanes. A rank of eight devices therefore holds 64 bytes, one column
of the rank. A 32-bit word never straddles two devices: the parameters are
placed so that each device holds whole words. RegQ holds eight 8-bit values,
the quantized form of four registers' worth of data. Quarter p is
RegQ[16p+15:16p].

## Commands

Every GradPIM command is an RFU command:

- ACT_n = H, RAS_n = L, CAS_n = H, WE_n = H;
- BG and BA select the bank group and bank;
- A[9:0] give the column.

The operation is coded on four address pins:

- Op0 = A12, Op1 = A17;
- Param0 = A13, Param1 = A11;
- Src/Dst = A10.

| command     | Op0 Op1 | Param0 Param1 | effect |
|-------------|---------|---------------|--------|
| Scaled Read | L L     | scale id      | Reg[sd] ← scale_id(column) |
| DeQuant     | H L     | position      | Reg[sd] ← dequant(RegQ quarter) |
| Quant       | H H     | position      | RegQ quarter ← quant(Reg[sd]) |
| Writeback   | L H     | L L           | column ← Reg[sd] |
| Q.Reg       | L H     | H L           | A10 = L: RegQ ← column; A10 = H: column ← RegQ |
| Add         | L H     | H H           | Reg[sd] ← Reg0 + Reg1 |
| Sub         | L H     | L H           | Reg[sd] ← Reg[other] − Reg[sd] |

A two-bit scale id or position is {Param1, Param0}.

Sub has no source field. This design makes the destination the
subtrahend. With that choice the update runs with positive scale constants
only. The update of one column of one bank group (θ in bank 0, v in bank 1,
g in bank 2) is nine commands:

```
SRD  g  ×η   → Reg1
SRD  v  ×α   → Reg0
SUB          → Reg1 = αv − ηg
SRD  θ  ×ηβ  → Reg0
SUB          → Reg0 = (αv − ηg) − ηβθ = v'
WB   Reg0    → v
SRD  θ  ×1   → Reg1
ADD          → Reg1 = θ + v'
WB   Reg1    → θ
```

Dequantization of one quantized column (bank 3 holds Q(g)) expands it into
four g columns:

```
Q.Reg RD, then DEQ quarter 0→Reg0, DEQ 1→Reg1,
WB Reg0, DEQ 2→Reg0, WB Reg1, DEQ 3→Reg1, WB Reg0, WB Reg1
```

Quantization reverses this. It reads four θ columns, quantizes each into one
quarter of RegQ, and writes RegQ with Q.Reg WR. Both are nine commands per
quantized column. A quantized array uses the first quarter of its row:
quantized column q belongs to full columns 4q … 4q+3.

## Timing: what makes many bank groups work at once

Three spacing rules hold per bank group. Reads are the critical case.

- **Column commands** (Scaled Read, Writeback, Q.Reg) occupy the local
  I/O gating. They keep tCCD_L = 6 cycles apart within a bank group.
- **Rank spacing.** Column commands to different bank groups of a rank need
  only tCCD_S = 4 cycles between them. The shared command bus still carries
  one command per cycle.
- **Arithmetic** (Add, Sub, Quant, DeQuant) uses only the unit's ALU. It
  keeps tPIM = 5 cycles apart within a bank group and does not hold up
  column commands.
- A Scaled Read counts as complete after tCCD_L.

In the RTL, the units and the model return read data a fixed BG_RD_LAT = 4
cycles after the command. This must be less than tCCD_L, and an initial
assertion enforces it. The unit writes the scaled word into the register at
the end of that cycle. An ALU result is written one cycle after its command.

Every unit measures the spacing it sees. If the controller breaks a rule,
the unit raises a sticky `timing_err`.

### Scheduler

The scheduler (`pim_cmd_scheduler`) decides what goes on the bus each
cycle:

- **Host priority.** A command from the host, i.e. the accelerator's memory
  controller doing ordinary ACT/PRE/RD/WR/MRS, always wins the bus. The
  host keeps its own timing. A host RD or WR restarts the column timers of
  its bank group and rank.
- **Streams.** Otherwise the scheduler looks at 16 in-order streams, one per
  rank and bank group. Starting after the last stream served, it issues the
  first head command that passes all of these:
  - its bank group's tCCD_L timer;
  - its rank's tCCD_S timer;
  - its bank group's tPIM timer;
  - a register scoreboard. Each of Reg0, Reg1 and RegQ of each unit has a
    ready time: tCCD_L after a read into it, tPIM after an ALU result into
    it. A command waits until every register it reads or writes is ready.

The scoreboard matters because the procedures above are tightly dependent.
In one stream alone, the update column issues at offsets 0, 6, 12, 13, 19,
24, 30, 36, 41 cycles, and the scheduler testbench checks this exactly.
Interleaving 16 streams hides these gaps. A full-size channel runs
16 × 8 update columns (1152 commands) in about 1220 cycles, so the command
bus itself becomes the limit.

Outputs are registered. A command reaches the devices one cycle after it is
granted, and the host's write data are registered with it. `sched_ev`
reports, per cycle, why streams waited:

- bit 0: tCCD_L;
- bit 1: tCCD_S;
- bit 2: tPIM;
- bit 3: register dependence;
- bit 4: more than one stream eligible.

## Structure

```
gradpim_system                     one channel
├── pim_update_sequencer × 16      high-level command → GradPIM commands, per rank × bank group
├── pim_cmd_scheduler              host priority, round robin, tCCD_L/tCCD_S/tPIM, scoreboard
└── gradpim_device × (4 ranks × 8) one x8 DDR4 device's GradPIM logic
    ├── pim_cmd_decoder            DDR4 pins → ACT/PRE/RD/WR/MRS/GradPIM command
    └── gradpim_unit × 4           one per bank group
        ├── pim_scaler             ×(2^-n ± 2^-m) on the read path
        └── pim_alu                add, sub, quant, dequant
gradpim_pkg                        widths, enums, structs, the command encoder
```

Boundaries to the parts that are not RTL:

- **Cell arrays.** Each device sends ACT/PRE out on `row_cmd`. Every bank
  group sends column requests out on `bg_req` (`rd`, `wr`, `bank`, `col`,
  `wdata`). Read data come back on `bg_rdata`, BG_RD_LAT cycles later.
  `tb/dram_model.sv` plays the arrays in the testbenches. It has sparse
  storage, tracks open rows, and flags any column access to a closed bank.
- **Host.** The accelerator's memory controller drives
  `host_valid/host_cs_n/host_pins/host_wdata` and receives `rdata`. The
  buffer device's high-level commands arrive on `hl_valid/hl/hl_ready`,
  one port per stream.

A high-level command is {kind, first column, column count}. It works on
the rows the host has opened:

- θ in bank 0;
- v in bank 1;
- g in bank 2;
- Q(g) or Q(θ) in bank 3.

For dequantize and quantize, first and count must be multiples of four.
`pim_busy` stays high until the last command of the stream has been
issued.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M`. Example with plain verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
  rtl/gradpim_pkg.sv tb/gradpim_ref_pkg.sv tb/tb_gradpim_system.sv \
  --top-module tb_gradpim_system -Mdir obj && ./obj/Vtb_gradpim_system
```

`tb/gradpim_ref_pkg.sv` is the reference. It computes scaling,
quantization and the update with 64-bit integer division instead of
shifts, so it shares no code with the RTL.

| testbench | what it establishes |
|-----------|---------------------|
| tb_pim_cmd_decoder | every row of the command table and every DDR4 command, plus the package encoder, round trip on random fields |
| tb_pim_scaler | random words and all four scale operations against the reference |
| tb_pim_alu | add, sub in both directions, quant with saturation, dequant at all positions |
| tb_gradpim_unit | one unit with a cycle-exact array model: scaled reads, all ALU operations, Q.Reg, MRS, read latency BG_RD_LAT, timing_err on a tCCD_L or tPIM violation |
| tb_gradpim_device | four bank groups interleaved at one command per bank group every 8 cycles. The momentum update is checked against the reference, along with the elapsed cycle count and zero timing errors. |
| tb_pim_update_sequencer | the exact command lists of all three procedures and the handshake |
| tb_pim_cmd_scheduler | the exact issue cycles of one update column, then 16 random streams with random host commands: every grant checked against tCCD_L, tCCD_S, tPIM, the scoreboard, host priority and the bus contents |
| tb_gradpim_system | the full-size channel with all parameters at their defaults, through MRS, ACT, dequantize, update, PRE/ACT and quantize |

The last testbench also mixes in ordinary host WR/RD while the streams run.
It compares every array with the reference. It counts each mechanism, and
any mechanism that never happened counts as a failure:

- each command type;
- each kind of scheduler wait;
- host preemption;
- the ordinary read path;
- MRS;
- quantization saturation.

It runs in well under a second after a build of under a minute.

`tb_gradpim_workload` runs the same channel over a whole open row in every
bank group: 128 columns, i.e. 32768 parameters, the unit in which any
network's update proceeds. It checks all results, and checks that each
procedure stays within 15% of the command-bus bound (nine commands per
column and procedure, one command per cycle). Measured:

| procedure | cycles |
|-----------|--------|
| dequantize | 4667 |
| update | 19084 (bound 18432) |
| quantize | 4676 |

A round therefore takes 28.4k cycles, or 26.7 µs at tCK = 0.94 ns.

## How far it follows the source design

These parts follow the original description:

- the placement next to the bank group I/O gating;
- the three registers and their width (one column access);
- the scaler as 2^-n ± 2^-m with four ids set through MR7;
- the command set and its pin encoding;
- the tCCD_L/tCCD_S/tPIM rules, with DDR4-2133 values;
- the update, dequantize and quantize procedures;
- the channel configuration: 4 ranks, 4 bank groups of 4 banks, x8 devices.

The following are this design's own choices, because the source is silent
on them:

- the Sub operand order;
- the fixed-point format (16 fractional bits) and the rounding and
  saturation rules;
- the reset values of the scale table and the MR7 field layout;
- the bit order of the quarters in RegQ;
- a fixed read latency of 4 cycles;
- the scheduler's round robin and register scoreboard;
- the high-level command format and the bank assignment of the arrays;
- parallel ports in place of the serial link between accelerator and
  buffer device.

Known departures and omissions:

- **Host timing.** The scheduler trusts the host for its own row timing
  (tRCD, tRP, tRAS). It does not stop the host from issuing a column
  command too soon after a GradPIM column command in the same bank group.
  The units detect such a violation but do not prevent it.
- **Not built: GradPIM-Direct.** The source also describes a variant
  without a buffer device, in which the accelerator's memory controller
  issues GradPIM commands itself. That variant would reuse the devices
  unchanged and is not built as a separate top.
- **Address mapping is assumed, not built.** The layout belongs to the
  accelerator's memory controller. From most to least significant, the
  address fields are:
  - bank (2 bits);
  - row (16 bits);
  - bank group (2 bits);
  - column (10 bits);
  - byte (3 bits).

  The rank bits may go anywhere between the bank-group and bank fields.
  Arrays are aligned to bank boundaries, so that element i of θ, v and g
  lands in the same bank group, in different banks. The RTL takes this
  placement as given. The testbenches lay out data the same way.
- **Not built: the rest of the system.** The arrays, the DDR4 PHY and
  serial link, the accelerator (MAC array, on-chip buffers, im2col/col2im)
  and its memory controller have no RTL here.
- **Not modelled: refresh and row timing.** The array model opens and
  closes rows instantly.
- **Rows are managed by the host.** A high-level command works within one
  open row (at most 128 columns per bank). A network larger than one row
  per bank group is processed row by row, with PRE/ACT from the host in
  between.

## Capacity

With 8 Gb x8 devices, a 4-rank channel holds 32 GB. Each parameter needs
14 bytes: θ, v and g at 4 bytes each, plus Q(g) and Q(θ) at 1 byte each.
One round of high-level commands covers 32768 parameters: 128 columns × 2
words × 8 devices per bank group, × 16 bank groups.

The networks evaluated with this architecture fit comfortably. The
parameter counts below are common published figures, not taken from the
source:

| network      | parameters | memory needed | rounds | update phase at the measured rate |
|--------------|------------|---------------|--------|-----------------------------------|
| ResNet-18    | 11.7 M     | 164 MB        | 357    | 9.5 ms  |
| ResNet-50    | 25.6 M     | 358 MB        | 781    | 20.9 ms |
| MobileNet    | 4.2 M      | 59 MB         | 128    | 3.4 ms  |
| AlphaGo Zero | 23.6 M     | 330 MB        | 720    | 19.3 ms |

The times leave out row switching (PRE/ACT) between rounds.

An MLP of any size up to 2.3 G parameters would also fit. Minibatch size
(32, or 128 for the MLP) affects only the accelerator's phase, not the
update.
