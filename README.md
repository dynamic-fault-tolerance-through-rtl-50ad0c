# Resource-pooling fault-tolerant MPSoC: RTL

## The idea

A conventional fault-tolerant processor fixes its redundancy in silicon: two or three
cores are wired together in lockstep, and a failed core takes its partners with it. This
design does the opposite. The chip is a pool of identical, almost independent tiles. Each
tile has its own core, its own local bus, its own small ECC-protected scratch memory and
its own interrupt controller, and it shares nothing with the other tiles except one global
crossbar leading to main memory and non-volatile (code) memory.

Redundancy is arranged in software. A critical thread runs as two or three replicas on
any set of tiles (DMR or TMR). The replicas do not run cycle by cycle in lockstep. Each one
runs on its own and, at a *checkpoint*, writes a checksum of its state into its tile's
**validation memory**. Every tile can read the validation memories of all other tiles, but
can write only its own. So each replica compares the checksums of its siblings against
its own, and a majority vote decides which replica is wrong. The off-chip supervisor then
resets or re-purposes the faulty tile, and the survivors re-form the group on whatever
tiles are healthy, copying state through main memory. Every tile, including a spare or
one running a low-priority task, can stand in for any other, so the fault tolerance of the
system degrades gradually instead of failing all at once.

The hardware in this repository is what makes that scheme safe and cheap:

* the tile, with its address map that is identical on every tile (code and data move
  between tiles unchanged);
* the validation memory, with its one-way protection and deferred ECC reporting;
* the MMU, which gives each tile a private read/write main-memory segment while making
  all of main memory readable to all tiles (for state migration);
* the checkpoint timer and interrupt controller;
* the debug bridge, through which the supervisor inspects and resets tiles;
* memory scrubbers in each tile and on main memory;
* an optional majority voter for replicated low-speed I/O lines.

The processor cores, peripheral controllers, main-memory and NV-memory controllers and
the supervisor are not part of this RTL. Their connections are ports of the top level,
and the testbenches drive them with behavioural stand-ins.

## Top level: `rp_mpsoc`

```
             core/periph/dbg ports of each tile
                 |        |        |
   +-------+  +-------+       +-------+
   |tile 0 |  |tile 1 |  ...  |tile 5 |      rp_tile x N_TILES
   +--+--+-+  +--+--+-+       +--+--+-+
      |  ^ RO    |  ^            |  ^
  mst |  | vmem  |  |            |  |
      v  |       v  |            v  |
   +-----------------------------------------+
   |           global crossbar (bus_xbar)    |
   +-----+----------+-------------+----------+
         |          |             |
     NV memory  main memory   global scrubber --raw port--> main memory
     (port)     (port)        (mem_scrubber)
```

`N_TILES` defaults to 6. The global crossbar has one master per tile. Its slaves are:

* the NV-memory port;
* the read-only port of each tile's validation memory;
* the global scrubber's registers;
* the main-memory port.

The global scrubber walks main memory through a separate raw-codeword port (`mm_scrub_*`),
because main-memory ECC lives in the external controller. It reports errors on
`gscrub_irq_o`, meant for the supervisor. The I/O voter (`io_voter`) sits beside the tiles
and has its own ports.

### Address maps

Every tile sees this map (`rp_pkg`):

| tile address  | region                                   | access       |
|---------------|------------------------------------------|--------------|
| `0x0000_0000` | NV memory (code, `NV_BYTES`)             | read/write   |
| `0x1000_0000` | own validation memory; status at +0x8000 | read/write   |
| `0x1100_0000` | interrupt controller / checkpoint timer  | read/write   |
| `0x1200_0000` | tile memory scrubber                     | read/write   |
| `0x2000_0000` | tile peripherals (port)                  | read/write   |
| `0x4000_0000` | validation memory of tile *t* at +t<<16  | read only    |
| `0x5000_0000` | global scrubber                          | read/write   |
| `0x8000_0000` | own main-memory segment (`SEG_BYTES`)    | read/write   |
| `0xC000_0000` | all of main memory                       | read only    |

The MMU translates these to the global map:

* the private segment at `0x8000_0000` becomes `0x8000_0000 + tile_id*SEG_BYTES`;
* the global window at `0xC000_0000` becomes `0x8000_0000 + offset`;
* remote validation memories go to `0x4000_0000 + t<<16`.

A write into a read-only window, or an access outside every window, is not forwarded. The
MMU answers it with `err` one cycle later. The only thing that distinguishes one tile from
another is the `tile_id` strap.

## The bus

All interconnect uses one simple valid/ready protocol (`bus_req_t`, `bus_rsp_t` in
`rp_pkg`):

* A master raises `valid` with `we`, `addr` and `wdata`. It holds them until the slave
  answers with `ready` for one cycle.
* The response (`rsp.valid`, `err`, `rdata`) arrives at least one cycle after acceptance.
* Each master has at most one transaction outstanding.

Assertions in `bus_xbar` and `validation_mem` check the hold rule.

`bus_xbar` is parameterised by master and slave counts and by packed base/mask tables. It
decodes by first match. Each slave has a round-robin arbiter that stays locked to the
winning master until that master's response has returned. With N masters contending, a
master therefore waits at most N-1 transactions. An address no slave matches is answered
with `err` by the crossbar itself.

The same module serves as the tile's local crossbar (2 masters: core and debug bridge) and
as the global one (one master per tile).

## Validation memory and ECC (`validation_mem`, `secded_enc`, `secded_dec`)

This is the core of the checkpoint scheme.

### Storage and ports

Each word is stored as a 39-bit SECDED codeword: 32 data bits, 6 Hamming check bits and one
overall parity bit. The arrangement is `{parity, check[5:0], data[31:0]}`. Data bits occupy
the non-power-of-two positions of a classic Hamming code, and the position table is
computed by a function in `rp_pkg`. A single-bit error is corrected and a double-bit error
is flagged.

The memory has two ports:

* **Port A, local.** The tile's crossbar uses it for read and write. The tile's scrubber
  shares it whenever the local side is idle.
* **Port B, remote.** The global crossbar uses it for the other tiles. It is read-only: a
  write is answered with `err` and changes nothing.

Both ports respond one cycle after acceptance.

### ECC reporting

The key rule concerns ECC errors seen by *remote* readers:

* Inside a checkpoint (`ckpt_active_i`, set by the tile's software through the interrupt
  controller), a remote syndrome must not disturb the owner tile while it is comparing
  checksums. The error is recorded instead: a count, the last address, and a pending flag.
  A single `def_irq_o` pulse is raised when the checkpoint ends.
* Outside a checkpoint, the pulse is immediate.

Syndromes on local reads raise `loc_ecc_o` at once. The tile handles its own errors.

Readers always receive corrected data, and a read of an uncorrectable word is answered with `err`. The stored word is repaired only by a write or by
the scrubber. The scrubber's write-back is dropped if the tile wrote the same word in
between, so a scrub never overwrites fresh data with stale data.

### Status registers

The status registers are read through port A at offset 0x8000:

| offset | register |
|---|---|
| +0 | deferred count |
| +4 | last deferred address |
| +8 | local syndrome count |

## Checkpoints and interrupts (`irq_ctrl`)

One controller per tile. It has eight pending bits:

| bit | event |
|---|---|
| 0 | checkpoint timer |
| 1 | supervisor-induced checkpoint |
| 2 | local validation-memory ECC |
| 3 | deferred remote syndromes |
| 4 | scrubber |
| 5-7 | peripherals |

Event pulses set their bit, and software clears it by writing 1. Writing 1 to `SET`
raises a bit by hand; the supervisor uses this, through the debug bridge, to induce a
checkpoint.

The checkpoint timer raises bit 0 every `CKPT_PERIOD` cycles, exactly. The default is
100 000 000, which is 1 s at an assumed 100 MHz. A period of 0 stops the timer, and writing
`TIMER` restarts it, so replicas can be re-aligned. The `CKPT_ACTIVE` register drives
the validation memory's deferral input.

Register map (word offsets):

| offset | register |
|---|---|
| 0x00 | PENDING (write 1 to clear) |
| 0x04 | ENABLE |
| 0x08 | CKPT_PERIOD |
| 0x0C | CKPT_ACTIVE |
| 0x10 | SET |
| 0x14 | TIMER |

## Scrubbers (`mem_scrubber`)

The same module serves each tile's validation memory and the global main memory. Every
`INTERVAL` cycles it reads one codeword through its raw port and decodes it. A
correctable error is written back corrected and counted. An uncorrectable one is counted
and left alone. Either raises a one-cycle `irq_o`.

The walk is sequential and wraps at `DEPTH`. Passes are counted.

Registers:

| offset | register |
|---|---|
| 0x00 | CTRL (bit 0 enable, on after reset) |
| 0x04 | INTERVAL |
| 0x08 | CE_CNT |
| 0x0C | UE_CNT |
| 0x10 | LAST (address) |
| 0x14 | PASSES |

## Debug bridge (`debug_bridge`)

This is the supervisor's window into a tile. A command (`DBG_READ`, `DBG_WRITE`,
`DBG_RESET`) arrives on a parallel valid/ready link.

* Reads and writes become a master transaction on the tile's local crossbar, so the
  supervisor sees exactly what the core sees. That includes the validation memory, the
  interrupt controller and, through the MMU, main memory.
* `DBG_RESET` sets or releases the core's reset from `wdata[0]`.

Each command gets one response. In a real system the link would be a serial debug
interface; the parallel form keeps the logic visible.

## I/O voter (`io_voter`)

This block is for low-speed interfaces (I2C- or SPI-like lines) driven by a replicated
thread. Each tile pushes samples of its W output lines into its own FIFO. When every tile in
the `member_i` mask has a sample waiting, one sample is popped from each. Each line is then
driven to the majority level.

* With an even member count, a tie keeps the previous level.
* `mismatch_o` marks members that disagreed with the vote.
* `overflow_o` is sticky per FIFO.
* FIFOs of non-members are flushed, so a tile can leave or join the group at run time.

The output is registered, one cycle after the pop.

## Tile (`rp_tile`)

The tile wires a local `bus_xbar` (masters: core, debug bridge) to five slaves:

* the validation memory (port A);
* `irq_ctrl`;
* the tile scrubber's registers;
* the peripheral port;
* the MMU, as the default route for everything else.

The scrubber's raw port goes to the validation memory, and the MMU's output becomes the
tile's global master. Port B of the validation memory is brought out for the global
crossbar. Reset of the core comes from the debug bridge only. The tile logic itself is reset
with the chip, so a tile's validation memory stays readable by the others while its core is
held in reset.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_TILES` | 6 | tiles (the prototype was built with 4, 6 and 8) |
| `VMEM_DEPTH` | 1024 | validation-memory words per tile |
| `SCRUB_INTERVAL` | 256 | cycles between scrub steps |
| `CKPT_PERIOD` | 100 000 000 | cycles between time-triggered checkpoints |
| `SEG_BYTES` | 128 MiB | private main-memory segment per tile |
| `NV_BYTES` | 16 MiB | NV window |
| `IO_W`, `IO_DEPTH` | 4, 16 | voter lines, FIFO depth |

Six tiles and the checkpoint rate come from the prototype. All the other sizes, the bus,
the register maps and the address map are choices of this implementation.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops through a watchdog if it hangs.

* `tb_secded`: all single- and double-bit errors over random words.
* `tb_bus_xbar`: decode, contention, round-robin fairness (the worst wait is checked) and
  the error slave.
* The other unit benches cover each register and corner named above.

The end-to-end benches share one scenario:

* `tb_rp_mpsoc` uses reduced sizes;
* `tb_rp_mpsoc_8t` is the same with eight tiles;
* `tb_rp_mpsoc_full` uses all defaults and takes about 40 s in verilator.

The scenario is `tb_mpsoc_scenario.svh`. Cores are replaced
by bus-functional tasks, and main memory by `tb_mem_model` (a sparse ECC memory with
injectable errors and random stalls). The scenario runs in this order:

1. Three replicas (tiles 0, 1, 2) reach a time-triggered checkpoint, write checksums, and
   read each other's. Tile 2's checksum is wrong, and the supervisor's majority read
   identifies it.
2. The supervisor resets tile 2 through its debug bridge. Tile 5 takes over by copying the
   replica state through the global read-only window.
3. A supervisor-induced checkpoint is run with the new group {0, 1, 5} and a DMR group
   {3, 4}.
4. Remote reads of a validation memory with an injected error during a checkpoint are
   deferred and reported once at its end.
5. The tile scrubber and the global scrubber repair planted upsets.
6. Read-only violations and unmapped addresses return errors.
7. Crossbar contention stalls occur.
8. The voter masks a replica with a wrong output.

Each of these mechanisms is counted, and a mechanism that never happened counts as a
failure.

To run a bench with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rp_pkg.sv \
    $(ls rtl/*.sv | grep -v rp_pkg) tb/tb_mem_model.sv tb/tb_rp_mpsoc_full.sv \
    --top-module tb_rp_mpsoc_full && obj_dir/Vtb_rp_mpsoc_full
```

Unit benches need only their module's files and the package.

## Where this departs from the source design, and what is missing

* The prototype used soft cores on an AXI interconnect and vendor ECC BRAM. Here the bus is
  a single-outstanding valid/ready bus, and ECC is an explicit SECDED(39,32) code.
* There is one main-memory port; the redundant main-memory controllers are outside.
  Main-memory ECC errors reach the supervisor only through the global scrubber interrupt.
* The checkpoint protocol itself (checksum computation, barrier, comparison, vote), the
  supervisor, the thread-mapping heuristic, configuration-memory scrubbing, and
  clock scaling or gating of idle tiles are software or vendor functions. The hardware
  supports them, but this RTL does not contain them.
* The hardware learns that a checkpoint is running from a register that software writes.
  The source design does not say how this is signalled.
* NV memory is writable from tiles.
* The validation memory is cleared at configuration, as FPGA block RAM is. It has no
  reset-time clearing.

Warnings that remain in lint:

* Unused parameters and signals, for example unused address bits.
* `SYNCASYNCNET`: reset is used both asynchronously in flops and in assertion
  `disable iff` clauses. This is intentional.
