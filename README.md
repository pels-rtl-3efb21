# PELS — a peripheral event linking system in SystemVerilog

In a battery-powered microcontroller most of the work is peripherals talking
to peripherals. A sensor interface finishes a transfer, and then a timer must
start, a GPIO must toggle or a status flag must be cleared. The usual way is
an interrupt: the core wakes up, runs a handler of a few register accesses
and goes back to sleep. That costs wake-up energy and tens of cycles of
latency. Fixed event routers (an event line from peripheral A wired through a
crossbar to an action input of peripheral B) are fast, but they only work for
peripherals designed with matching event inputs, and they cannot decide
anything.

PELS sits between these two. It is a tiny programmable event handler on the
peripheral bus. It has several independent **links**. A link waits for a
chosen combination of input events and then runs a short program of
48-bit commands from its own small instruction memory. The program can do
two kinds of things:

- **Instant actions** drive single-wire action lines straight into
  peripherals that have such inputs. They appear 2 clock cycles after the
  event.
- **Sequenced actions** are ordinary bus reads and writes to any peripheral
  register, including read-modify-write. With a zero-wait-state APB
  peripheral, a register update lands 7 cycles after the event.

A link can also read a register, mask it, compare it with a constant and
branch. This covers the most common event-linking job: read a sensor value
and act only if it crosses a threshold. The main CPU writes the link
programs once, through a configuration bus slave, and can then stay asleep.

This repository contains the synthesizable RTL of PELS, one self-checking
testbench per module and an end-to-end testbench of the default
configuration.

## Structure

```
               events_i[NUM_EVENTS-1:0]
                     │           ┌──────────── loop-back lines (one per link)
                     ▼           ▼
             ┌── broadcast to every link ──┐
             ▼                             ▼
   ┌───────────────── link 0 ──┐   ...   link NUM_LINKS-1
   │ trigger unit              │
   │   mask, AND/OR condition  │
   │ trigger FIFO              │
   │ instruction memory (SCM)  │
   │ execution unit (FSM)      │──► action groups ──► OR over links ──► actions_o
   └──────────┬────────────────┘                     (last group ──► loop-back)
              │ one bus request at a time
              ▼
        round-robin arbiter ──► APB master (psel_o, penable_o, ...)

   configuration APB slave (cfg_*) ──► masks, modes, bases, programs, status
```

| Module | Role |
|---|---|
| `pels_pkg` | command format, opcodes, bus request/response types |
| `pels_trigger` | event mask and AND/OR trigger condition, edge detection |
| `pels_trig_fifo` | queue of triggers that arrive while the link is busy |
| `pels_scm` | per-link instruction memory, built from flip-flops |
| `pels_exec` | the link's command interpreter |
| `pels_link` | trigger + FIFO + memory + execution unit |
| `pels_bus_arb` | round-robin arbiter of the links onto one APB master |
| `pels_cfg` | APB configuration slave (register map below) |
| `pels_top` | all of the above |

## From event to trigger

All input events go to every link. A link ANDs them with its private
**event mask**. It then applies one of two **trigger conditions**: OR (any
selected event is high) or AND (all selected events are high at once). An
all-zero mask never triggers.

The trigger is the *rising edge* of that condition. An event line that stays
high for many cycles therefore starts the link's program only once. A pulse
of one cycle is enough.

A trigger does not start the program directly. It goes into a small
**trigger FIFO** (depth 2 by default). While the link is idle, the execution
unit takes a trigger from the FIFO in the same cycle it arrives, so the FIFO
adds no latency. While a program runs, later triggers wait in the FIFO and
each one runs the program once more afterwards. A trigger that finds the
FIFO full is dropped. This sets a sticky **overflow** flag that the CPU can
read and clear.

The events a link sees are `{loopback[NUM_LINKS-1:0], events_i}`. Mask bit
`NUM_EVENTS + j` therefore selects "link j was triggered by another link"
(see [Link-to-link triggering](#link-to-link-triggering)).

## Commands

Each instruction memory line holds one 48-bit command:

```
 47    44 43                32 31                               0
┌────────┬────────────────────┬──────────────────────────────────┐
│ opcode │ field (12 bits)    │ operand (32 bits)                │
└────────┴────────────────────┴──────────────────────────────────┘
```

For bus commands the field is a *word offset*. The bus address is the
link's 18-bit base register, followed by the offset, followed by two zero
bits:

```
addr[31:0] = { BASE[17:0], field[11:0], 2'b00 }
```

Each link can therefore reach one 16 KiB window of the peripheral space
without needing a full 32-bit address in the command.

| Opcode | Name | Field | Operand | What it does |
|---|---|---|---|---|
| 0 | `end` | – | – | program finished, link goes idle |
| 1 | `write` | offset | value | bus write of the operand |
| 2 | `set` | offset | mask | read, OR with the mask, write back |
| 3 | `clear` | offset | mask | read, AND with the inverted mask, write back |
| 4 | `toggle` | offset | mask | read, XOR with the mask, write back |
| 5 | `capture` | offset | mask | read, store `value & mask` in the link's data register |
| 6 | `jump-if` | `[5:4]` comparison, `[3:0]` target line | constant | if `data <cmp> constant`, continue at the target line |
| 7 | `loop` | `[3:0]` target line | count | jump back to the target `count` more times, then fall through |
| 8 | `wait` | – | n | stay on this line for `n` extra cycles |
| 9 | `action` | `[11]` mode, `[7:0]` group | line mask | drive the masked action lines of the group |

Opcodes 10–15 behave like `end`.

- **Comparisons.** EQ=0, LT=1, GT=2, NE=3. They are unsigned and compare the
  data register with the operand.
- **Loops.** A loop with count `n` runs the loop body `n+1` times in total.
  Loops do not nest: one loop counter per link.
- **Action modes.** In pulse mode (mode bit 0) the selected lines are high
  for exactly one cycle. In toggle mode (mode bit 1) each selected line
  inverts and then holds its new level. This gives both a strobe for
  peripherals that want one and a level for peripherals that want one.
- **End of memory.** A program also ends after its last memory line, so a
  full memory needs no `end`. A jump to a line beyond the memory reads as
  `end`.
- **Helpers.** `pels_pkg::make_cmd(opc, field, operand)` and
  `pels_pkg::jump_field(cmp, target)` build commands in SystemVerilog.

### Example: threshold check after a sensor read

The following program clears a "data ready" flag, reads the low byte of a
sensor data register, and raises action line 8 only if the value is at most
50:

```
0: clear   FLAG,  0x0000_0001            // acknowledge the peripheral
1: capture DATA,  0x0000_00FF            // data = DATA & 0xFF
2: jump-if GT -> line 4, 50              // above threshold: skip the action
3: action  pulse, group 0, 0x0000_0100   // below or equal: fire action line 8
4: end
```

Replacing line 3 with `set GPIO, 0x100` gives the sequenced variant: the
same decision drives a GPIO through its register instead of an action line.
The end-to-end testbench runs both variants with random sensor values.

## Timing

Timing is the part of the design that matters most for a user, and the
easiest to get wrong when changing it. Every link has its own memory and the
memory is read combinationally, so no cycles are spent fetching commands.
Cycles are spent only in the bus and in deliberate waits.

### Instant action: 2 cycles

| Cycle | What happens |
|---|---|
| t | event high; trigger condition and edge detect are combinational; trigger written into the FIFO at the end of the cycle |
| t+1 | the FIFO is non-empty; the idle execution unit takes the trigger and executes line 0 (`action`) in the same cycle |
| t+2 | the action register drives `actions_o` |

### Sequenced action: 7 cycles

With a zero-wait-state APB peripheral and a free bus, a `set`, `clear` or
`toggle` at line 0 takes 7 cycles:

| Cycle | APB phase | Link state |
|---|---|---|
| t | – | event, trigger pushed |
| t+1 | – | line 0 requests the read |
| t+2 | read SETUP | |
| t+3 | read ACCESS, PREADY | modified value computed and stored |
| t+4 | – | write-back requested |
| t+5 | write SETUP | |
| t+6 | write ACCESS, PREADY | the peripheral register takes the new value at the end of this cycle |

### Cost of each command

These counts assume a free bus and no wait states. Each APB wait state adds
one cycle to the transfer it stalls. When several links use the bus at the
same time, a transfer waits for at most `NUM_LINKS-1` transfers of other
links.

| Command | Cycles |
|---|---|
| `action`, `jump-if`, `loop`, `end` | 1 |
| `wait n` | 1 + n |
| `write`, `capture` | 3 (request, SETUP, ACCESS) |
| `set`, `clear`, `toggle` | 6 (read 3, write 3) |

On a bus that answers in the same cycle, the same commands cost 2
(`set`/`clear`/`toggle`), 1 (`write`, `capture`) and 1 (the rest). This is
the floor that the APB handshake adds to. The block testbench of the
execution unit checks these counts with such a bus.

In the threshold example above, the commands up to and including the
`action` take 6 + 3 + 1 + 1 = 11 cycles. Add the trigger cycle before them
and the register cycle after them, and the action line rises 12 cycles after
the event when the value is at or below the threshold. The end-to-end
testbench checks this number.

## Link-to-link triggering

A link drives `NUM_ACT_GROUPS + 1` groups of 32 action lines.

- Groups `0 … NUM_ACT_GROUPS-1` are the external action lines. For each
  group, the lines of all links are ORed together onto `actions_o`.
- The last group, number `NUM_ACT_GROUPS`, is internal. Bit j of this group,
  ORed over all links, is fed back as an input event of every link, at event
  index `NUM_EVENTS + j`. By convention link j listens to it, so an `action`
  on that group with operand bit j set triggers link j two cycles later.
  Nothing enforces this convention. Any link may put any loop-back line in
  its mask.

This lets a short program hand work on to another link. That link may have
a different base address (a different peripheral window) or free memory
lines.

## Programming PELS

The CPU reaches PELS through an APB slave (`cfg_*` ports) with zero wait
states. `PADDR[11:8]` selects the link, and each link has a 256-byte page:

| Offset | Name | Access | Contents |
|---|---|---|---|
| 0x00 | CTRL | rw | bit 0 enable, bit 1 trigger condition (0 = OR, 1 = AND) |
| 0x04 | STATUS | r / w1c | bit 0 busy, bit 1 trigger pending, bit 2 overflow (write 1 to clear), bits 11:8 current line |
| 0x08 | BASE | rw | bits 17:0 base of the peripheral window |
| 0x0C | DATA | r | the data register (last `capture` or read-modify-write value) |
| 0x10 + 4k | MASKk | rw | event mask bits 32k+31 … 32k |
| 0x40 + 8i | LINEi_LO | w | operand of line i (held in a staging register) |
| 0x44 + 8i | LINEi_HI | w | bits 15:12 opcode, bits 11:0 field; writes the full command into line i |

- **Two-word line writes.** A command line is written with two stores: LO
  first, then HI. The HI store commits the whole 48-bit line in one cycle,
  so a running program never sees a half-written command.
- **Reprogramming.** Disable the link before you reprogram it.
- **Errors and unmapped reads.** Reads of write-only or unmapped offsets
  return 0. An access to a link index that does not exist returns PSLVERR.

With the default 32 events and 4 links, each mask is 36 bits: MASK0 holds
the external events and MASK1 bits 3:0 hold the four loop-back lines.

A typical setup of one link:

```
CTRL      <- 0                     // disable
BASE      <- peripheral_base >> 14
MASK0     <- (1 << event_index)
LINEi_LO  <- operand; LINEi_HI <- {opcode, field}   // for each line
CTRL      <- 1                     // enable, OR condition
```

## Peripheral bus port

All links share one APB master port. A link issues at most one transfer at
a time and holds the request until it is done. `pels_bus_arb` grants
requests round robin, starting after the link served last, and then runs a
normal APB transfer:

1. A registered SETUP cycle.
2. ACCESS cycles until PREADY.
3. One idle cycle.

The read data returns to the winning link in the cycle PREADY is seen.

PSLVERR is passed to the link but ignored: the program continues as if the
transfer had succeeded.

## Parameters

| Parameter of `pels_top` | Default | Range | Meaning |
|---|---|---|---|
| `NUM_LINKS` | 4 | 1–16 | parallel links |
| `NUM_LINES` | 6 | 1–16 | command lines per link |
| `NUM_EVENTS` | 32 | ≥1 | external input events |
| `NUM_ACT_GROUPS` | 1 | 1–255 | external 32-line action groups |
| `FIFO_DEPTH` | 2 | ≥1 | pending triggers per link |

- **Upper limits.** 16 lines and 16 links come from the 4-bit line number
  and the 4-bit link field of the configuration address.
- **Area.** The instruction memory grows by 48 flip-flops per line per link,
  so it dominates the area of large configurations. Generic synthesis with
  Yosys gives these flip-flop counts:

  | Links × lines | Flip-flops |
  |---|---|
  | 1 × 4 | 549 |
  | 4 × 6 | 2,306 |
  | 8 × 8 | 5,344 |

  Besides the memory, each link holds a 32-bit data register, 32-bit loop
  and wait counters, and its action-line registers.

## What follows the PELS publication and what is this design's own

This RTL implements the architecture described in the PELS publication
(Ottaviano et al., "PELS: A Lightweight and Flexible Peripheral Event
Linking System for Ultra-Low Power IoT Processors"). It is not the authors'
code.

**Taken from the publication:**

- the link structure (trigger unit with mask and AND/OR condition, private
  instruction memory, execution unit with a data register, comparator and
  write-back path);
- the command set;
- the 4/12/32-bit command format;
- the 18-bit base and 12-bit word offset;
- the 4-bit program counter;
- the non-nestable loop;
- the inter-link loop-back;
- APB as the peripheral bus protocol;
- the write-back one cycle after the read;
- the default 4 links × 6 lines;
- the 2-cycle and 7-cycle latencies, which this RTL reproduces exactly.

**Choices made here, where the publication gives no detail:**

- **Command encoding.** The opcode numbers and the packing of comparison,
  jump target, action mode and group into the 12-bit field. The order of
  the three command fields inside the 48-bit word is also a choice made
  here.
- **Extra comparison.** `jump-if` offers "not equal" in addition to the
  publication's less-than, equal and greater-than.
- **Trigger behaviour.** The trigger is edge-detected, an empty mask never
  triggers, and triggers are buffered in a FIFO with an overflow flag.
- **Meaning of "set or toggle" action lines.** This is read as a
  one-cycle pulse or a held toggle.
- **Sizes.** 32 external events and one external 32-line action group.
- **Loop-back.** It is a dedicated action group, one line per link.
- **Register map.** The whole configuration register map, including the
  two-write line store.
- **Bus access.** One APB master with a built-in round-robin arbiter. The
  publication instead connects each link to the SoC's peripheral
  interconnect, whose own round-robin arbitration does this job.
- **Instruction memory.** It is built from ordinary flip-flops. The
  publication uses a latch-based standard-cell memory. Swapping in a latch
  array only means replacing `pels_scm`, whose read is already
  combinational.

**Not included:**

- The surrounding microcontroller: CPU, interconnects, memories, DMA and
  peripherals.
- Threshold-type trigger conditions. The publication mentions them only as
  an example, and this design makes threshold decisions with
  `capture`/`jump-if` instead.
- Read-back of the instruction memory.
- Any reaction to PSLVERR.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_pels_trigger` | random events, masks and modes against a reference model |
| `tb_pels_trig_fifo` | random push/pop against a reference counter, overflow flag |
| `tb_pels_scm` | random writes and reads against a shadow copy |
| `tb_pels_exec` | every command, including the threshold program; exact cycle counts, read-modify-write under wait states, loop, wait, jump conditions, action modes, end of memory |
| `tb_pels_link` | the 2-cycle instant latency, masking, disable, AND mode, bus commands, FIFO buffering and overflow |
| `tb_pels_cfg` | the register map, line stores, status, PSLVERR |
| `tb_pels_bus_arb` | four random request generators against a peripheral with random wait states; strict round-robin order; APB protocol assertions |
| `tb_pels_top` | default configuration, programmed only through the configuration port; see below |

`tb_pels_top` measures the 2-cycle and 7-cycle latencies exactly. It also
runs both threshold programs, link-to-link triggering, all four links
contending for the bus, FIFO overflow, loop/wait and toggle actions. It
counts each of these mechanisms and reports a failure if any of them never
occurred.

`tb_pels_top_min` runs the smallest configuration, one link with four
lines. It uses the threshold program without its `end` line: the jump to
line 4 goes past the memory and ends the sequence there.

`tb/apb_periph_model.sv` is a behavioural APB register file with optional
random wait states. It stands in for the peripherals.

To simulate with Verilator 5 (`-y` lets it find the other modules by name):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pels_pkg.sv tb/tb_pels_top.sv --top-module tb_pels_top -o sim
./obj_dir/sim
```

For another testbench, replace `tb_pels_top` in the two places. The block
testbenches set their module's parameters themselves. The RTL also
synthesizes with Yosys through its SystemVerilog front end, with no latches
in the result.
