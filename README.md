# PiDRAM hardware: software-driven processing-in-DRAM on commodity DDR3

Some processing-in-DRAM (PiM) techniques need no change to the DRAM chip at
all. They only need a memory controller willing to break the DRAM timing
rules on purpose:

- **RowClone** copies a whole DRAM row inside the chip. The controller
  activates the source row, precharges almost at once, then activates the
  destination row before the precharge has finished. The source row's data is
  still on the bitlines and is written into the destination row.
- **D-RaNGe** generates true random numbers. The controller reads a row much
  sooner after activation than tRCD allows. Some cells then return values that
  are random from one read to the next.

Ordinary computers cannot issue such command sequences, and no ordinary
software interface can ask for them. PiDRAM fixes both:

1. A small **PiM Operations Controller (POC)** sits on the CPU's memory bus as
   three memory-mapped registers. Software starts a PiM operation with two
   stores and tracks it with loads.
2. A **memory controller** executes each request as a DRAM command sequence
   with chosen, violated timings. The same controller still serves ordinary
   cache-line reads and writes.

This repository holds synthesizable SystemVerilog for that hardware: the
memory bus router, the POC, and the memory controller (command scheduler plus
random number buffer). It also holds self-checking testbenches and a
behavioural DDR3 model that reproduces the two timing-violation effects. Some
parts are outside it, with their signals brought out as ports:

- the CPU;
- the DDR3 PHY (the FPGA vendor's physical layer);
- the DRAM module itself;
- the software library and OS support that go with the hardware.

## Block structure

```
             CPU loads/stores (cpu_req / cpu_rsp)
                        |
                   +---------+   addr in POC window (4 KiB at 0x6000_0000)
                   | mem_bus |--------------------------+
                   +---------+                          |
                        | other addresses               v
                        |                      +-----------------+
                        |                      |   pidram_poc    |
                        |                      | instruction reg |
                        |                      | flag reg S/A/F  |
                        |                      | data reg        |
                        |                      +-----------------+
                        |                 pim_valid/instr |  ^ pim_ready (Ack)
                        v                                 v  | mc_fin (Fin)
     +------------------------------------------------------------------+
     | pidram_mc                                                        |
     |   +---------------------+  rng_push  +------------+  rng_valid/  |
     |   |    cmd_scheduler    |----------->| rng_buffer |--data/pop--> POC
     |   +---------------------+            +------------+              |
     +------------------------------------------------------------------+
                        | phy_cmd, phy_wdata      ^ phy_rd_valid/data
                        v                         |
                   DDR3 PHY (not here)  <-->  DDR3 DRAM module (not here)
```

| File | Role |
|---|---|
| `rtl/pidram_pkg.sv` | instruction format, register map, bus and DRAM-command structs, geometry, default timings |
| `rtl/pidram_top.sv` | top level: wires the blocks below |
| `rtl/mem_bus.sv` | sends each CPU request to the POC or to the memory controller |
| `rtl/pidram_poc.sv` | PiM Operations Controller |
| `rtl/pidram_mc.sv` | memory controller: scheduler + random number buffer |
| `rtl/cmd_scheduler.sv` | DRAM command scheduler, conventional and PiM sequences |
| `rtl/rng_buffer.sv` | FIFO of random numbers |
| `tb/ddr3_model.sv` | behavioural DDR3 model (simulation only) |
| `tb/tb_*.sv` | one self-checking testbench per block, plus `tb_pidram_top` end to end and `tb_pidram_workloads` for the cycle counts |

## How software runs a PiM operation

The POC has three 64-bit registers, all reached with ordinary loads and
stores. The registers and the three flags come from the published design.
The offsets and bit positions are this implementation's choices.

| Offset | Register | Contents |
|---|---|---|
| `0x000` | instruction | a PiDRAM instruction (format below); stores are ignored while Start is pending |
| `0x008` | flag | bit 0 **Start**, bit 1 **Ack**, bit 2 **Fin** |
| `0x010` | data | a load returns the next random number in bits 3:0, with bit 63 set if one was there; the load consumes it |

An operation proceeds as follows:

1. Software stores the instruction to the instruction register.
2. Software stores `1` to the flag register. Start rises, and Ack and Fin are
   cleared.
3. While Start is high, the POC offers the instruction to the memory
   controller (`pim_valid`/`pim_instr`, held steady).
4. The controller accepts it (`pim_ready`) in the same cycle as it issues the
   operation's first DRAM command. The POC then clears Start and sets
   **Ack**, meaning the operation has started.
5. The controller issues the operation's last DRAM command and pulses
   `mc_fin`. The POC sets **Fin**, meaning the last command has gone out.
6. Software polls the flag register. It returns either on Ack (non-blocking
   use: the next operation can be queued right away) or on Fin (blocking
   use).

There is a corner case when software queues a new operation before the
previous one has finished. A finish pulse that arrives while the new Start is
still pending belongs to the old operation. The POC drops it, so Fin always
refers to the operation that Ack refers to.

Random numbers come back through the data register. Whenever the data
register is empty, it refills from the head of the random number buffer.

### PiDRAM instruction (64 bits)

| Bits | Field | Used by |
|---|---|---|
| 3:0 | `op`: 1 = RowClone-Copy, 2 = D-RaNGe, others = no operation | all |
| 6:4 | `bank` | all |
| 20:7 | `src_row` | RowClone source; D-RaNGe row |
| 34:21 | `dst_row` | RowClone destination |
| 44:35 | `col` | D-RaNGe column of the line read |
| 53:45 | `bitsel` | D-RaNGe: lowest bit, within the 512-bit line, of the 4 random bits |
| 63:54 | reserved | |

Any other opcode is accepted, issues no DRAM command, and finishes (Fin) one
cycle later.

## The command scheduler: the central part

`cmd_scheduler` is a single finite-state machine. It issues at most one
DRAM command per clock on `phy_cmd`. Every wait is a down-counter loaded with
`T - 1` when a command is issued, so the next command goes out exactly `T`
cycles later. A separate counter tracks tRAS from the last ACT. All timings
are parameters in controller clock cycles.

### Conventional accesses (closed page)

A memory bus request is one 64-byte line, i.e. one BL8 burst on a 64-bit DDR3
bus. Its address is split as `{row[29:16], bank[15:13], line[12:6],
offset[5:0]}`.

```
read : ACT(bank,row) --tRCD-- RD(col) --(data back, >= tRTP)-- PRE --tRP-- idle
write: ACT(bank,row) --tRCD-- WR(col) --(CWL + 4 + tWR)------- PRE --tRP-- idle
                       PRE also waits until tRAS has passed since ACT
```

Every access opens and closes its row (closed-page policy). The read response
is passed on in the cycle the PHY returns the burst. A write is acknowledged
in the cycle its WR is issued.

### RowClone-Copy

```
cycle:     0            1         2               17         17+tRP
        ACT(src) -1- PRE -1- ACT(dst) ---tRAS--- PRE ---tRP--- idle
        ^Ack                                    ^Fin
```

- `T_RC_ACT_PRE` (1 cycle) sits far below tRAS. The precharge interrupts the
  source row's activation while its data is already on the bitlines.
- `T_RC_PRE_ACT` (1 cycle) sits far below tRP. The destination row opens
  before the bitlines have been equalised, so it is overwritten with the
  source data.
- After that the destination row gets a normal tRAS and is closed normally.

The copy works only when source and destination share a subarray, i.e. share
bitlines. Choosing such rows is software's job. The controller does not
check it.

Initialisation uses the same instruction. Software keeps one row per subarray
filled with the initial value (for example zero) and copies it over the
target row.

### D-RaNGe

```
cycle:   0                2                   2+RL            15        15+tRP
      ACT(row) --T_RNG_RCD-- RD(col) ... burst returns ... PRE --tRP-- idle
      ^Ack                               push 4 bits       ^Fin
```

`T_RNG_RCD` (2 cycles) is far below tRCD (6). Cells that are slow to reach
their full level then read back at random. The scheduler takes bits
`bitsel+3 : bitsel` of the returned 512-bit line and pushes them into the
random number buffer. `bitsel` should point at cells that profiling has
shown to be random. (In the model these are bits whose index mod 16 is
below 4.) Bit positions past bit 511 read as zero.

### Arbitration and stalls

A new request is taken only when the scheduler is idle, one at a time. The
last cycle of a tRP wait already counts as idle, so the next ACT follows a
PRE after exactly tRP cycles. Priority:

- A memory bus request goes first. A PiDRAM instruction is taken only when
  no bus request is waiting.
- A D-RaNGe instruction is not accepted while the random number buffer is
  full. Its Start stays high until software reads the data register, after
  which it proceeds.
- A bus request that arrives while a PiM sequence runs waits until the
  sequence and its tRP are over.

There is no refresh logic: the published design does not describe any.
A controller used with a real DRAM for longer than the refresh interval
needs it added.

## Memory bus and random number buffer

`mem_bus` has one request in flight at a time. It forwards a request in the
cycle it arrives and returns the response in the cycle it arrives. Requests
inside the 4 KiB window at `POC_BASE` go to the POC, which uses the low 64
bits of the line. All other requests go to the memory controller.

`rng_buffer` is a circular FIFO of 16 four-bit entries, with
`$clog2(DEPTH)+1`-bit pointers. The scheduler never pushes into it when it
is full, which an assertion checks.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| random number width `RNG_BITS` | 4 | published result: one 4-bit number per operation |
| banks / rows / columns / bus | 8 / 16384 / 1024 / 64 bit (1 GiB, 8 KiB rows) | chosen; typical of the board's DDR3 SODIMM |
| tRCD, tRP, tRAS, tWR, tRTP, CWL | 6, 6, 15, 6, 4, 5 cycles | chosen: DDR3-800 at the DRAM clock (2.5 ns) |
| `T_RC_ACT_PRE`, `T_RC_PRE_ACT` | 1, 1 cycle | chosen |
| `T_RNG_RCD` | 2 cycles | chosen |
| `RNG_DEPTH` | 16 | chosen |
| `POC_BASE` | `0x6000_0000` | chosen |

The violated timings that make RowClone and D-RaNGe work depend on the
individual DRAM chip. On real hardware they must be found by
characterisation; the values above only show the mechanism. The model's
subarray size (512 rows) is likewise an assumption.

## Performance against the published numbers

The published results are end-to-end numbers. They include the CPU,
caches and software, none of which is here. What the hardware itself needs,
assuming a 400 MHz controller clock:

- **RowClone** occupies the controller for 1 + 1 + 15 + 6 = 23 cycles per
  8 KiB row. A CPU copy of the same row takes 128 line reads plus 128 line
  writes, each about 24 controller cycles under the closed-page policy. In
  simulation (`tb_pidram_workloads`) the CPU-style copy takes 6252 cycles
  against 23 for RowClone. That is a 272x gap at the controller, which leaves
  room for the reported 118.5x copy and 88.7x initialisation speedups.
- **D-RaNGe**: the 4 bits are ready 2 + PHY read latency cycles after Ack. In
  simulation, with a 9-cycle PHY latency, that is 11 cycles (27.5 ns), well
  inside the reported 220 ns end-to-end latency. Back-to-back operations
  take tRAS + tRP = 21 cycles each, i.e. 4 bits per 52.5 ns = 76 Mb/s
  (measured in simulation: 76.2 Mb/s, every operation back to back). That
  is above the reported 8.30 Mb/s sustained rate, which is limited by the
  software loop.

## Where this departs from, or adds to, the published design

- **Interfaces.** The published design connects the POC and the controller to
  the CPU through the CPU system's own bus and a vendor PHY. Here both are
  reduced to simple valid/ready ports. The PHY port is one command per
  controller cycle, with whole 512-bit bursts.
- **Decoding.** The POC stores the instruction and passes it on unchanged.
  The scheduler decodes the opcode and fields. The published text says the
  POC "decodes and executes" instructions, but does not say where the fields
  are split.
- **Encodings and timings.** All encodings, offsets, bit positions, the
  address mapping and all timing values are chosen here. So are the
  "Start clears Ack/Fin" rule and the dropping of a stale finish.
- **Sequences.** The RowClone sequence (ACT, early PRE, early ACT) follows
  the command sequence published for RowClone on commodity DRAM, which the
  design cites. The published text does not give the cycle counts.
- **Missing parts.** No refresh, no multi-bank parallelism, no open-page
  policy, no cache-coherence support. Cache lines must be flushed by
  software before a copy. Nor is the subarray-aware memory allocator here
  (that is software).

## Simulating

All files are plain SystemVerilog-2017. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/pidram_pkg.sv tb/tb_pidram_top.sv --top-module tb_pidram_top
./obj_dir/Vtb_pidram_top
```

Replace `tb_pidram_top` with any other testbench in `tb/`. Each testbench
ends with a line `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it shows |
|---|---|
| `tb_rng_buffer` | the FIFO against a queue model: order, full, empty, pointer wrap |
| `tb_pidram_poc` | register read-back; the Start/Ack/Fin sequence; held instruction; stale finish dropped; data register order |
| `tb_mem_bus` | routing at and around the POC window; back-pressure; one request in flight; response data |
| `tb_cmd_scheduler` | exact command spacing for conventional, RowClone and D-RaNGe sequences; Ack/Fin cycles; copied data; selected random bits; buffer-full stall; arbitration |
| `tb_pidram_mc` | scheduler plus buffer: fill to full, stall, release, drain in order |
| `tb_pidram_top` | end to end at default parameters, driven like the software library |
| `tb_pidram_workloads` | the cycle counts quoted above: per-row RowClone vs. CPU copy, D-RaNGe latency and back-to-back rate |

`tb_pidram_top` covers the following, and checks that each one happens:

- full-row copy, and initialisation to zero;
- a copy across subarrays, which must change nothing;
- random numbers;
- return on Ack and return on Fin;
- a bus access waiting behind a PiM operation;
- a D-RaNGe held while the buffer is full;
- a load of an empty data register.

`tb/ddr3_model.sv` is the DRAM the testbenches run against. It keeps a sparse
array of lines; a line never written reads as a pattern made from its
address. It also applies the two effects:

- A PRE within tRAS of an ACT, followed by an ACT within tRP of that PRE,
  copies the first row into the second when both share a 512-row subarray.
- A RD within tRCD of an ACT randomises the bits whose index mod 16 is
  below 4.

Any other timing or protocol violation is counted, and the testbenches
require that count to stay zero.
