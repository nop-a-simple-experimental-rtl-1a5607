# NOP: a message-passing multithreaded stack processor in SystemVerilog

NOP ("Null Operand Parallel") is a small processor meant to be one node in
a large network of identical chips. It has no shared memory, no caches and no
interrupts. Each chip has four processing units, and each unit has a private
16K-word memory and eight hardware threads. The units talk only by sending
messages through channel ports. A circuit switch carries those messages
between units, to neighbouring chips over four external links, and to eight
peripheral lines. Instructions are single bytes with no operand fields, so
every operation works on the thread's stack.

This RTL builds the whole chip at its reference size:

| quantity | value |
|---|---|
| processing units | 4 |
| threads per unit | 8 |
| word size | 32 bits |
| words of local memory per unit | 16384 |
| channel ports per thread | 32 |
| external links | 4 |
| peripheral lines | 8 |

## Block structure

```
            ext links (4)     peripheral lines (8)
                 |  |               |  |
   +-------------+--+---------------+--+-------------+
   |                    nop_switch                   |--- nop_router_config
   +----+-----------+-----------+-----------+--------+   (processor id, table)
        |           |           |           |
     nop_pu      nop_pu      nop_pu      nop_pu      (units 0..3)
        |           |           |           |
   nop_memory  nop_memory  nop_memory  nop_memory    (16K x 32 each)
```

A processing unit (`nop_pu`) contains:
- the thread register files and the instruction sequencer;
- `nop_scheduler`, the round-robin thread picker;
- `nop_alu` and `nop_divider`;
- `nop_boot_rom`;
- `nop_port_in`, the per-port receive buffers;
- `nop_port_out`, the send stream with its path ownership.

`nop_pkg` holds the shared types: tokens, global port numbers and opcodes.
`nop_top` wires everything together.

## Threads and registers

Each thread has these registers:
- `ip`: 16 bits. Bits 15..2 are a word address. Bits 1..0 pick one of the four opcodes in that word, the least significant byte first.
- `sp`: 14 bits. The stack grows downwards.
- `ld0`/`ld1`: 14 bits. The data limits.
- `lc0`/`lc1`: 14 bits. The code and constant limits.
- `exc`: the global port that receives the thread's exception message.

Two pointers are derived: `cp = lc0 + 64` and `dp = ld0 + 64`. Every address
a program uses is relative to one of these, so a thread can be moved at run
time.

Threads that have been started take turns one instruction at a time, in
round-robin order. A thread stops for one of these reasons:
- `STOP`;
- its `ip` leaves `[lc0, lc1)`;
- a stack or data access leaves `[ld0, ld1)`;
- division by zero;
- reading an END token with `IN`;
- `START` when no thread is free;
- an undefined opcode (`0xB8`–`0xBF`).

Every reason except `STOP` marks the thread as faulty. A stopped thread then
sends one exception message to `exc`:

```
HEAD(exc)   DATA({faulty, 15'b0, ip})   END
```

After that the thread is free and `START` can reuse it.

## How an instruction runs

The unit has one single-port memory, and every stack operation goes through
it. So an instruction is a short sequence of memory steps:

| step | cycles | work |
|---|---|---|
| PICK | 1 | choose the thread, check `ip` against the code limits, read the code word |
| FETCH | 1 | select the opcode byte, read the top of stack |
| POP | 0–5 | one read per further operand |
| MEMA/MEMD | 0–2 | the extra read of `LD`, `LDC`, `LDX`, `DECLD`, `LDINC` |
| EXEC | 1 | compute the result, decide on a fault or a block, update the registers |
| WRITE | 0–3 | write the pushed words and the stored word |

Nothing is written before EXEC. This is what makes blocking cheap. If an
instruction cannot finish, EXEC drops it and leaves the thread untouched, and
the thread tries again on its next turn. Instructions that can block are:
- `IN` or `INMORE` with nothing buffered;
- `OUT`, `OUTEND` or `OUTPAUSE` while the unit's send path belongs to another port;
- `WAIT`, or `WAITTMO` before its time;
- `BREAK` while `debug_mode` is high.

Other threads keep running around a blocked one.

An opcode outside `0x80`–`0xBF` pushes itself, sign-extended, as a constant.
`COMBINE` (`b*192 + a`) builds larger constants from these. Opcodes
`0x80`–`0xB7` are the instruction set.

After reset, thread 0 of every unit runs the boot ROM at word `0x3fc0`:

```
0 IN   -64   0 INMORE   10 FJP   DUP   0 IN   EXCH ST   1 ADD   -12 UJP   POP   4 MUL JUMP
```

The ROM reads a start position from port 0. It then copies every further word
of the message to memory, starting at word 0, until END. Finally it jumps to
the start position. To load a unit, a host sends this message to global port
`{22'd0, unit, 3'd0, 5'd0}`. It can arrive through an external link or a
peripheral line.

Thread 0's state at reset:
- `lc = [0, 0x3fff)`;
- `ld = [0, 0x3fc0)`;
- `sp = 0x3fc0`;
- `exc` = peripheral line 1.

## Messages, tokens and paths

A global port number is 32 bits:

| bits 31..10 | 9..8 | 7..5 | 4..0 |
|---|---|---|---|
| processor id or routing command | unit | thread | port |

Every stream in the design carries tokens (`token_t`): a 32-bit word plus a
2-bit kind, with a valid/ready handshake. The kinds are:

| kind | meaning |
|---|---|
| HEAD | the destination global port; opens a path |
| DATA | one payload word |
| END | the end of the message; closes the path |
| PAUSE | closes the path but is not delivered; the message continues later |

`SETPORT` binds a destination to one of the thread's 32 ports. The first
`OUT` on that port then sends HEAD and DATA, and later `OUT`s send DATA only.
`OUTEND` sends END and `OUTPAUSE` sends PAUSE. A unit has a single send
stream. From its first word until END or PAUSE, it belongs to one
(thread, port). Any other port that tries to send in that time blocks. This
is how a path stays held from end to end while a message is under way.

On the receive side, each (thread, port) has a buffer of one token. While a
buffer is full, a new token for it waits in the switch, and so does the
whole path behind it. That backpressure is the only flow control in the
design.

### The switch

The switch routes each HEAD by its upper 22 bits:

| value | destination |
|---|---|
| 0 | local unit (bits 9..8) |
| 1 | peripheral line (bits 2..0); the HEAD is removed |
| 2 | router configuration block; the HEAD is removed |
| 3 | none; the message is discarded |
| 4..7 | external link 0..3; the HEAD's upper 22 bits are cleared, so it reaches a unit of the neighbouring chip |
| ≥ 8, equal to this chip's id | local unit |
| ≥ 8, any other id | the external link named by routing table entry `id[7:0]` |

A HEAD waits until its output is free. A free output goes to the
lowest-numbered input that wants it. The path then passes one token per cycle
until END or PAUSE has gone through.

The router configuration block takes plain DATA words:
- a word with bits 31..28 = 1 sets the processor id to its bits 21..0;
- a word with bits 31..28 = 2 sets the table entry named by its bits 15..8 to the link in its bits 1..0.

At reset the id is 8 and every table entry points to link 0.

## Departures from the processor description, and choices it leaves open

What comes from the description:
- the numbers in the table above;
- the register set and widths;
- the derived pointers;
- every opcode and its encoding;
- the boot ROM program;
- the global port layout and the routing command table;
- the END and PAUSE rules;
- round-robin scheduling.

This design fills in the rest:
- **Token encoding and the link protocol.** The description names only END and PAUSE. HEAD and the valid/ready handshake are this design's own.
- **Neighbour addressing.** The forwarded HEAD on routing commands 4..7 has its upper bits cleared. The peripheral line number is in bits 2..0.
- **Routing command 3** is discarded.
- **The configuration word format**, the 256-entry table and the reset id 8.
- **One send stream per unit** and a one-token receive buffer per port.
- **The multi-cycle instruction sequence.** A blocked instruction is retried, not suspended.
- **Range checks on every data access**, not only on `sp` and `ip`.
- **`lc0` in `CALL` and `JUMP`.** `lc0` is a word address and `ip` counts opcodes, so `lc0` is multiplied by 4 there. `START` does the same (`ip' = (b + lc0') * 4`).
- **The exception message format** and the reset `exc` (peripheral line 1).
- **`SIGN`.** The description's text and its formula disagree. The text says "true if negative". The formula copies bit 0. The RTL copies bit 31.
- **`LOG2` and `COUNT` push their result.** The formulas show no push.
- **Time and cycle counters.** `time` (`NOW`, `WAITTMO`) counts clock cycles. `cycles_t` counts completed instructions.
- **Event scan order.** `WAIT` checks the lowest port first. Within a port it checks output, then END, then input.
- **`BREAK`** stalls only while `debug_mode` is high.

Not built:
- a particular external link or peripheral electrical interface, since the description gives none;
- the host-side tools of the software simulator (tracing and file attachment).

## Files

- `rtl/nop_pkg.sv`: types, opcodes, constants.
- `rtl/nop_top.sv`: the chip.
- `rtl/nop_pu.sv`, `nop_scheduler.sv`, `nop_alu.sv`, `nop_divider.sv`, `nop_boot_rom.sv`, `nop_port_in.sv`, `nop_port_out.sv`: a processing unit.
- `rtl/nop_memory.sv`: local memory (an array with a one-cycle read).
- `rtl/nop_switch.sv`, `nop_router_config.sv`: the interconnect.
- `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints `TB_RESULT checks=N failures=M`.

The processing unit test (`tb_nop_pu`) and the chip test (`tb_nop_top`) build
their programs with a small assembler written in the testbench.

`tb_nop_top` runs the chip at its full default size:
1. It boots all four units: three through external link 0 and one through peripheral line 2.
2. Unit 0 writes the routing table and sends to a peripheral line, to a table-routed processor id and to a neighbour through a link. It also sends a message containing PAUSE.
3. Three senders compete for the same unit. One of them was created with `START`.
4. One unit divides by zero.

The test then checks every token that leaves the chip. It also counts that
each of these mechanisms happened at least once:
- boot;
- path contention;
- PAUSE;
- table routing;
- header removal;
- neighbour routing;
- configuration;
- blocking;
- a fault;
- START;
- a timer wait.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/nop_pkg.sv tb/tb_nop_top.sv \
          --top-module tb_nop_top -Mdir obj_top
obj_top/Vtb_nop_top
```

Use the same command for any other testbench. All testbenches finish in
seconds. The RTL is synthesizable. The per-unit memories are plain arrays,
which a synthesis flow should map onto SRAM macros.
