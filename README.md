# PaRTAA — a partitioned real-time multiprocessor in SystemVerilog

Avionics boxes increasingly host functions of different criticality on the
same hardware. A flight director and a moving-map display, for example, may
run side by side. That is only acceptable if a misbehaving low-criticality
function can neither corrupt the memory of a high-criticality one nor steal
its processor time. Such systems usually get this isolation from a
hypervisor. PaRTAA moves it into the hardware.

- **Time.** Each processor core carries three complete copies of its
  execution state, one per *partition*. A fixed, cycle-counted schedule
  decides which copy runs. A partition that is not scheduled is frozen
  mid-instruction and resumes exactly where it stopped. Switching costs no
  cycles, and no software can reach the schedule.
- **Space.** One data memory per processor is split into four segments by
  the two top address bits. The hardware, not the program, chooses those
  bits. A partition can address only its own protected segment and one
  shared segment.
- **Communication.** Four such processors are joined by a network-on-chip
  with a fixed time-slot schedule. Every partition has its own network
  interface and its own receive buffer per sender. The worst-case latency
  of every channel is therefore a simple formula known at design time.

This repository holds synthesizable RTL for the whole multiprocessor: four
processors × three partitions, the network, a global clock, cross-processor
status flags, and a UART "sampling port" for sensor input and output. It
also holds a self-checking testbench for every block and two end-to-end
testbenches.

```
            clock (64 bit) and processor-flag bus  ────────────────────────┐
   ┌────────────────┐ ┌────────────────┐ ┌────────────────┐ ┌────────────────┐
   │ processor 1    │ │ processor 2    │ │ processor 3    │ │ processor 4    │
   │ P1  P2  P3     │ │ P1  P2  P3     │ │ P1  P2  P3     │ │ P1  P2  P3     │
   │ SwCU, core,    │ │                │ │                │ │                │
   │ MCU, imem/dmem │ │      ...       │ │      ...       │ │      ...       │
   │ NI  NI  NI     │ │ NI  NI  NI     │ │ NI  NI  NI     │ │ NI  NI  NI     │
   └──┬───┬───┬─────┘ └──┬───┬───┬─────┘ └──┬───┬───┬─────┘ └──┬───┬───┬─────┘
      router 1            router 2            router 3            router 4
          └───────────────────┴────────┬──────────┴───────────────────┘
                                      hub (TDM slots + idle-slot passing)
   UART sampling port ◄─► read-only input buffers and output slots in every shared region
```

## 1. Time partitioning: the switching control unit and the frozen pipeline

`swcu` is a down-counter with three budgets, `BUDGET[0..2]`, given in
cycles. It emits the 2-bit *active-partition flag* `apf`:

- `01`, `10` and `11` select partitions 1, 2 and 3;
- `00` means nothing runs.

The partitions follow each other in the order 1, 2, 3, 1, … and each window
lasts exactly its budget. A zero budget drops that partition from the round.
`part_switch` pulses in the first cycle of every window. The budgets are
parameters, so no instruction can change them.

The core, `aero_core`, is a four-stage in-order pipeline: fetch (F),
decode (D), execute (E) and memory/write-back (M). Every piece of state
exists three times:

- the program counter;
- the F/D, D/E and E/M pipeline registers;
- the 16 × 32-bit register bank;
- the Z/N/C ALU flags;
- the stack pointer.

`apf` selects one copy through multiplexers, and only that copy is written
in a cycle. When the schedule moves on, the instructions of the old
partition stay in its pipeline registers untouched. When its window comes
round again they continue from the stage where they stopped. The results
are bit-identical to an uninterrupted run. Only wall-clock time changes, by
exactly the length of the other windows. For a task that needs τ cycles in
a window of τp cycles per period λ, the finish time is therefore:

    (ceil(τ/τp) − 1)·λ + (τ − (ceil(τ/τp) − 1)·τp)

The `hold` input, a GPIO pin on a board, forces `apf = 00` in all four
processors. Nothing executes while it is high, and the memories can be
loaded. Releasing it restarts every schedule at partition 1 while the
frozen state is kept. A reset clears the pipelines and sets every PC to 0.

## 2. Space partitioning: the memory map and the MCU

A partition issues 11-bit *word* addresses. Bit 10 chooses the region:

| bit 10 | region | physical address (12 bit) |
|---|---|---|
| 1 | own protected segment | `{apf, addr[9:0]}` |
| 0 | shared segment of this processor | `{2'b00, addr[9:0]}` |

That rule is the whole memory-control unit (`mcu`). It is combinational,
and each processor has two copies of it: one for the load/store port and
one for the stack port. No instruction encoding can name another
partition's segment, so isolation follows from the address width alone.

Inside the segments:

**Protected segment of partition k** (each partition sees its own copy)

| offset | meaning |
|---|---|
| 0x000 | write: set this partition's 10-bit flag (the 10 LSBs of the stored word); read: the flag |
| 0x001 | NI: destination NI number of the next packet |
| 0x002 | NI: write sends a packet carrying this word |
| 0x003 | NI: "fresh" bits, one per sending channel |
| 0x010 + c | NI: sampling buffer of channel c (c = 0..11); reading clears its fresh bit |
| 0x020–0x03F | stack (32 entries), reached through the second memory port |
| 0x040–0x3FF | private data |

**Shared segment of processor g**

| offset | meaning |
|---|---|
| 0x00 / 0x04 | global clock, low / high 32 bits (read-only) |
| 0x08, 0x12, 0x16, 0x20 | processor-flag words of processors 1, 2, 3, 4 (read-only) |
| 0x30–0x37 | UART sampling buffers of signals 0–7 (read-only) |
| 0x38–0x3F | UART output: a store to 0x38 + i queues the word as output signal i; a load returns 1 while this processor's sample still waits |
| everything else | ordinary shared memory, e.g. for partitions of one processor to hand results to each other |

Stores to the read-only addresses are dropped: they reach neither the
attachment nor the memory word beneath it. Stores to the UART output
addresses go to the UART only, not to memory. The four flag offsets are
irregular: the gaps are 10, 4 and 10 words. That is deliberate, since the
same numbers appear in the published map, and they are kept as printed.

## 3. The AEro core and its instruction set

The published description gives only the pipeline, the register-register
style (no immediate operands) and the 32-bit word. The encoding below is
this implementation's own:

```
[31:26] opcode  [25:22] rd  [21:18] rs1  [17:14] rs2     register ops
[31:26] opcode  [25:22] r               [10:0]  addr     LD / ST
[31:26] opcode                          [9:0]  target    JMP, BZ, BNZ, BN, CALL
```

| op | meaning | op | meaning |
|---|---|---|---|
| NOP | – | LD | rd = mem[addr] |
| ADD / SUB | rd = rs1 ± rs2, sets Z N C | ST | mem[addr] = r |
| AND / OR / XOR | logic, sets Z N | LDX | rd = mem[rs1] |
| SHL / SHR | rd = rs1 shifted by rs2[4:0] | STX | mem[rs1] = rs2 |
| JMP / BZ / BNZ / BN | jump, branch on Z, !Z, N | CALL / RET | push return address / pop it |

Constants come from data memory, as the architecture intends. A program
loads them before use.

**Static scheduling, no interlocks.** Nothing in the pipeline stalls, so
every instruction path takes a fixed number of cycles: one instruction
retires per cycle after a three-cycle fill. The price is two rules for the
compiler or the programmer:

- *Result distance.* A result written in M is passed straight into the
  register read in D. It is therefore available to the second instruction
  after the producer, never to the first one. Put one independent
  instruction (or NOP) between a producer and its consumer.
- *Two delay slots.* JMP, the conditional branches, CALL and RET resolve in
  E. The two instructions behind them, already in F and D, always execute.
  A conditional branch tests the flags left by the instruction just before
  it.

**Stack.** CALL writes its return address (`pc + 3`, past the delay slots)
through the data memory's second port into the partition's stack area, and
increments the partition's stack pointer. That port continuously reads the
top entry, so RET simply takes the value already on the port. The stack has
no overflow check: 32 nested calls is a programming limit.

**Instruction memory.** The instruction memory holds 4 × 1024 words and is
fetched at `{apf, pc}`. Each partition therefore owns a 1024-word segment
and starts at its own address 0.

## 4. Observing other partitions: processor flags and the global clock

Each partition owns 10 flag bits that only it can write, through protected
offset 0. The processor packs its flags into the word
`{apf[1:0], p3[9:0], p2[9:0], p1[9:0]}`, and that word is broadcast to the
shared region of *every* processor. The flags serve two purposes:

- health monitoring: another partition can see how far a task has got;
- hand-shaking across processors, for example "data sent" / "data
  received".

The end-to-end testbench uses the second: one partition spins on another
processor's flag before it reads the result that partition produced.

The 64-bit global cycle counter (`global_clock`) is read the same way. It
gives all partitions a common, cycle-exact time base.

## 5. The network: NI → router → hub → router → NI

**Network interface (`ni`, one per partition, 12 in all).** A store to
offset 0x002 captures the word, together with the destination from 0x001,
in a one-entry transmit buffer. The packet `{dest, src, data}` then travels
through a fixed pipeline and reaches its router `TX_LAT` = 4 edges after
the store. `src` is the NI's own number and is the *channel* identity.

On the receive side there is one buffer per channel. Each arriving packet
overwrites the buffer of its source channel. The channel's fresh bit is
set, and `rx_overwrite` pulses when an unread sample is lost. Reading the
buffer clears the fresh bit. This is sampling-port semantics: a consumer
always sees the newest value of each signal, no sender can displace
another sender's data, and data that arrive while the consumer is not
scheduled simply wait. Two consecutive sends from one partition must be at
least 3 cycles apart; an assertion checks this.

**Router (`router`, 4).** The router holds one pending packet per attached
NI and offers it to the hub. A new packet from the same NI that arrives
before the old one was granted replaces it and raises `overrun`. That
happens only when a channel sends faster than its reserved bandwidth. On
the way back, the router registers the hub's delivery and hands it to the
addressed NI.

**Hub (`hub`).** Time is divided into `S_TOTAL` = 12 slots of `T_SLOT` = 4
cycles. The table `SLOT_OWNER` assigns each slot to a channel; by default
slot i belongs to channel i. At the start of a slot the hub decides:

1. If the owner has a packet pending, it is granted (`gs_grant`). This is
   the guaranteed service.
2. Otherwise the slot is passed on to the requester that has waited
   longest, with the lower channel number winning a tie (`be_grant`). This
   is the best-effort service. Waiting time is an 8-bit saturating counter
   per channel, so priority grows dynamically with age.

The granted packet is delivered to the destination router one cycle later.
The packet needs no routing table, because the destination router is
`dest / 3`.

**Latency.** A channel owning `S_ch` of the `S_TOTAL` slots waits at most

    L = (floor((S_TOTAL − 1) / S_ch) + 1) · T_SLOT + 1

cycles for a hub grant and delivery. For the default table that is
(11 + 1) · 4 + 1 = 49 cycles. The fixed NI paths add 4 + 4 = 8 cycles, so
the end-to-end worst case is 57 cycles, or 1.14 µs at 50 MHz.

## 6. UART sampling port

`uart_sampling_port` receives 8N1 serial data at `CLKS_PER_BIT` = 434
clocks per bit (115200 baud at 50 MHz). A message is five bytes: a signal
id, then a 32-bit value, least-significant byte first. The value goes into
buffer `id`; ids ≥ 8 are ignored. A low stop bit raises `frame_err`, drops
the message being received, and resynchronises on the next start bit.

Each signal has its own buffer, so a sensor value waits for its consumer
even if other signals keep arriving. All processors read the buffers in
their shared region.

The transmit side has one output slot per processor. A store to shared
offset 0x38 + i puts `{i, word}` into the slot of that processor.

- A newer store replaces a sample that has not left yet, so the newest
  value is what gets sent.
- When the line is free, the waiting slots are served round-robin,
  starting after the last one sent.
- A sample goes out as one message in the receive format.
- `tx_pend` (readable at 0x38–0x3F) tells software whether its sample has
  left.

Each message lasts 50 bit times, and there is one idle cycle between
messages. A sample therefore starts within four message times of its
store (about 1.7 ms at 115200 baud) and is complete one message later.

## 7. Loading and start-up

The top level, `partaa_top`, has a simple parallel load port:

- `ld_proc` selects the processor;
- `ld_imem_we` / `ld_dmem_we` select the memory;
- `ld_addr` is `{segment, word}`, 12 bits;
- `ld_data` is the word.

The port is honoured only while `hold` is high. A typical sequence is:

1. Reset.
2. Raise `hold`.
3. Write all instruction segments, constants and initial data.
4. Drop `hold`.

Memories have no reset, so load every instruction word a program can
reach, including delay slots (write NOPs). The observation outputs `ev_*`
bring every mechanism's event out as a pulse:

- partition switch, retirement and taken branch;
- router overrun and NI overwrite;
- guaranteed and best-effort grants;
- UART update, framing error and end of a transmitted message.

## 8. Parameters

| parameter | default | where it comes from |
|---|---|---|
| processors × partitions | 4 × 3 | published architecture |
| data word, flag word, clock | 32, 32, 64 bit | published |
| partition flag | 10 bit | published |
| `BUDGET` (top) | processor 1: 100000, 100000, 50000; others 50000 each | the published use case gives 2 ms for the flight director and autopilot partitions and 1 ms for the engine display and moving map (at 50 MHz); unused partitions get 1 ms |
| NI path | 4 + 4 cycles | total of 8 published; the split is chosen |
| `S_TOTAL`, `T_SLOT`, `SLOT_OWNER` | 12, 4, slot i → NI i | chosen (one slot per channel) |
| data memory | 4 × 1024 words per processor | chosen |
| instruction memory | 4 × 1024 words per processor | chosen |
| registers | 16 × 32 bit per partition | published as a "32x16" register bank |
| UART | 434 clocks/bit, 8 signals | chosen |

At the default sizes, yosys' coarse synthesis of the whole top gives about
3.5 k word-level cells, 17.5 k flip-flop bits and 1 Mbit of memory (the 32
data and instruction memories). The published FPGA build reports
4137 ALMs and 8611 registers in total, 4493 of the registers in the core.
Here one processing element has about 4.1 k flip-flop bits. Of these,
about 1.5 k are its three register banks and 1.9 k its three NIs, which
each hold 12 receive buffers. The NoC adds about 0.9 k.

## 9. Where this RTL departs from, or goes beyond, the published design

- **Instruction set, hazard rule and delay slots** are invented here (§3).
  The published core has its own ISA and assembler, which were not
  released. Programs written for it will not run.
- **Partition schedule.** The schedule is one window per partition per
  round. Independent periods per partition are not supported.
- **Memory layout.** The exact offsets of the NI registers, the stack and
  the UART buffers are chosen here. They keep the published order:
  flag word, then MM-IO, then stack, then data.
- **Hub priority.** Waiting time is this implementation's reading of
  "dynamic priority".
- **Overflow and overwrite behaviour.** Router overrun and the fresh bits
  are additions that make lost samples visible.
- **Figure versus text on widths.** One figure labels the fetch bus 16 bits
  wide, while the text states a 32-bit ISA. The 32-bit width is used.
- **UART output slots.** One transmit slot per processor, with
  round-robin service, is this implementation's own arrangement.
- **Not built.**
  - the two serial download links of the original board (replaced by the
    load port);
  - board-level parts: clock oscillator, configuration, external memories.

## 10. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_swcu` | window lengths equal to the budgets, skipping of zero budgets, hold and restart |
| `tb_mcu` | the address rule for all flags and addresses |
| `tb_global_clock` | counting, carry into the high word |
| `tb_proc_flags` | 10-bit slicing, per-partition write, word layout |
| `tb_imem`, `tb_dmem` | segments, both ports, write collision |
| `tb_aero_core` | cycle-exact timing of one partition (3-cycle fill, store cycle of a loop); exact results with three partitions interleaved in random windows; the result-distance rule; CALL/RET; freeze at `apf = 00` |
| `tb_ni` | 4-cycle send path, sampling buffers, fresh bits, overwrite |
| `tb_router`, `tb_hub`, `tb_noc` | grants, best-effort passing, one-hot grants, lossless delivery under the guaranteed rate, worst-case latency against L, overrun on a burst |
| `tb_aero_pe` | one processor: loading under hold; flags, clock (cycle-exact value), UART input and output, and NI through the memory map; isolation of protected segments; read-only attachments; send timing |
| `tb_uart_sampling_port` | buffers per signal, overwrite, ignored ids, framing error, 50-bit message period; transmit order, replaced samples, pend/line timing, loopback into the receiver |
| `tb_partaa_top` | whole system, short budgets: a sensor value travels UART → processor 1 → NoC → processor 2 → shared memory and UART output → flag-synchronised reader; every window length is checked; every mechanism above must occur at least once |
| `tb_partaa_full` | the same scenario at the default parameters (2 ms / 1 ms windows, 115200 baud): about 460 000 cycles, several complete rounds |

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -yrtl -ytb rtl/partaa_pkg.sv tb/tb_partaa_top.sv --top-module tb_partaa_top
./obj_dir/Vtb_partaa_top
```

The testbenches assume nothing about power-up values: they also pass with
`+verilator+rand+reset+2`.
