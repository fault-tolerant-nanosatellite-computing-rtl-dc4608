# A tiled, software-lockstepped on-board computer for small satellites

Modern FPGAs and application processors give a nanosatellite far more
computing power than radiation-hardened parts, but they are upset by
radiation far more often. The architecture here does not try to make each
processor reliable. Instead it puts several small, isolated computers
("tiles") on one FPGA. Each tile runs replicas of the same application
threads. At checkpoints the tiles compare what they computed, and a
majority decision exposes a tile that went wrong. A small, slow, radiation
tolerant microcontroller outside the FPGA (the *supervisor*) then repairs
that tile: it resets it, copies a correct tile's state over, and
reconfigures it if faults keep coming back. This is *coarse-grain
lockstep*. The replicas do not run cycle by cycle in step. They only
agree at checkpoints, so the scheme works with ordinary, non-lockstep
processor cores.

The software does the comparing and the deciding. The hardware has to make
the scheme possible and cheap:

* tiles that cannot corrupt each other, each with its own reset and the same
  address map, so that a thread can move between tiles without change;
* a fast, write-protected place where each tile publishes its checkpoint
  data and every other tile can read it;
* shared main memory in which each tile owns one segment, can read all the
  others, and can be cut off by the supervisor;
* ECC and scrubbing on main memory, under the supervisor's control;
* voters that let replicated tiles drive one set of simple SPI and I2C
  devices even though the replicas are a few cycles apart.

This repository holds synthesizable SystemVerilog for those parts and
self-checking testbenches for each of them. The processor cores, the
vendor IP blocks (debug bridges, peripheral controllers, DDR controller
and PHY, non-volatile memory controllers) and the supervisor are outside the
RTL. They connect through ports of the top module `obc_mpsoc_top`.

The architecture was published as "Fault-Tolerant Nanosatellite Computing
on a Budget". The main configuration there has four MicroBlaze tiles on a
Kintex UltraScale+ XCKU5P, and the RTL defaults follow it. The text below
says where this RTL follows that description and where it makes its own
choices.

## Block structure

```
                     supervisor (off chip)
   sup_rst / sup_ckpt_req / isolate / seg_base / vote_mask / scrub_*   sup_m_*
        |                                                                 |
  +-----v---------------- tile t (x N_TILES) ------------------+          |
  | core_l --+                                                  |          |
  |          +--> tile_xbar --> state_memory (port A, R/W)      |          |
  | dbg -----+        |    --> tile_irq (checkpoint timer, IRQ) |          |
  |                   |    --> if_*  (I2C/SPI/GPIO controllers) |          |
  |                   +------> xs_*  ---------------------------+--> xs_ro_xbar --> state_memory
  |                                                             |    (read only)     port B of
  | core_m -----------------> tile_mmu ---------> gm_* ---------+--+               every tile
  | tile_reset_gen                                              |  |
  +-------------------------------------------------------------+  |
                                                                   v
                 ddr_scrubber ---------------------------> global_xbar <---- sup_m_*
                                                   |          |           |
                                          ddr_ecc_ctrl  ddr_ecc_ctrl   nv_failover <- nv_sel
                                            mem_*[0]      mem_*[1]      |        |
                                                                    nv_*[0]  nv_*[1]  (QSPI: FeRAM,
                                                                                     MRAM, NAND flash)

  per-tile SPI / I2C pins ----> io_voter (SPI), io_voter (I2C) ----> voted pins
```

| Module | Role |
|---|---|
| `obc_mpsoc_top` | Chip top: tiles, Xs, global crossbar, ECC front ends, scrubber, non-volatile fail-over, voters |
| `tile` | One compartment: reset generator, local crossbar, state memory, interrupt controller, MMU |
| `tile_xbar` | Tile-local crossbar: core and debug bridge to state memory, Xs, IRQ, peripherals |
| `state_memory` | Dual-ported BRAM: read/write for its tile, read-only for the system |
| `xs_ro_xbar` | "Xs": read-only crossbar from every tile to every state memory |
| `tile_irq` | Interrupt controller with the checkpoint timer and the supervisor checkpoint line |
| `tile_reset_gen` | Per-tile reset with supervisor reset request |
| `tile_mmu` | Own-segment window, read-only window, non-volatile window, isolation |
| `global_xbar` | Crossbar from tiles, scrubber and supervisor to the DDR channels and the NV memory |
| `ddr_ecc_ctrl` | SECDED encode/decode in front of one DDR channel, with write-back of corrected words |
| `ddr_scrubber` | Supervisor-controlled background reader that makes the ECC repair latent errors |
| `io_voter` | Buffered per-line majority voter for SPI or I2C |
| `nv_failover` | Switch between the duplicated non-volatile memory paths |
| `rr_arbiter` | Round-robin arbiter used by the crossbars |
| `obc_pkg`, `ecc_pkg` | Bus types, address map, SECDED code |

## The bus

All blocks use one simple bus, defined in `obc_pkg`. It stands in for the
AXI interconnect a vendor flow would use.

* Request `bus_req_t`: `valid`, `we`, `addr[31:0]`, `wdata[31:0]`,
  `wstrb[3:0]`. Every request has a separate `ready` that comes back from
  the slave. A request is taken in the cycle in which `valid && ready`.
  After that, the master drops `valid` or holds it until the response.
* Response `bus_rsp_t`: `valid`, `rdata[31:0]`, `err`. It is a one-cycle
  pulse. It comes at least one cycle after the request was taken.
* A master has at most one request outstanding. It may not change a request
  while it waits for `ready`. `tile_mmu` holds an assertion for this rule.

Errors are responses with `err` set. Examples are a write through a
read-only path, an address nobody decodes, an isolated tile, and an
uncorrectable ECC error. The core sees these as bus errors.

## Address map

Every tile sees the same map, so software cannot tell tiles apart. The
upper address byte selects the target:

| Tile address | Target | Access |
|---|---|---|
| `0x1000_0000` + off | own state memory | R/W, uncached |
| `0x1100_0000` + t·`0x1_0000` + off | state memory of tile t, through Xs | read only |
| `0x2000_0000` | interrupt controller (`tile_irq`) | R/W |
| `0x3000_0000` | peripheral controllers (`if_*` port) | R/W |
| `0x8000_0000` + off | own main-memory segment, at `seg_base` + off | R/W, cached |
| `0xA000_0000` + a | whole main memory, physical address a | read only |
| `0xC000_0000` + a | non-volatile memory, physical `0x4000_0000` + a | R/W |

The core's uncached local port (`core_l_*`) reaches the first four rows
through `tile_xbar`. Its cached memory port (`core_m_*`) reaches the last
three rows through `tile_mmu`. The debug bridge (`dbg_*`) is a second
master on `tile_xbar`. With it the supervisor reads and writes the state
memory, the interrupt controller and the peripherals of a tile without the
core's help.

The physical map on the global crossbar is DRAM at `0` to `MEM_BYTES` and
non-volatile memory at `0x4000_0000` to `0x5000_0000`. The supervisor's
direct port (`sup_m_*`) and the scrubber use physical addresses.

## Tiles

### State memory and Xs

Each tile has a `state_memory` of `SM_WORDS` 32-bit words (default 1024,
one block RAM). Port A is the tile's. It is reached by the core's local port
and by the debug bridge, has byte strobes and answers one cycle after it
takes a request. Port B is read only, and `xs_ro_xbar` drives it.

`xs_ro_xbar` is the only path between tiles apart from main memory. Each
tile has one master port on it. Requests are decoded to a target tile and a
word offset. Writes, tiles that do not exist and offsets past the end are
answered at once with `err`. A counter (`xs_blocked_writes`) records refused
writes. When several tiles read the same state memory in one cycle, a
round-robin arbiter serves one per cycle and the others wait on `ready`.
Read data comes back in the cycle after the grant. At a checkpoint, each
tile writes its checksum or thread descriptor to its own state memory and
reads everyone else's through Xs. No cache coherence and no DRAM access are
needed.

### Local crossbar

`tile_xbar` connects two masters (core, debug bridge) to four slaves (state
memory, Xs, interrupt controller, peripherals) by the upper address byte. It
handles one transaction at a time. The winner of the round-robin
arbitration is registered, which costs one cycle per access. Addresses on
no slave get an error response. The main-memory windows are not on this
crossbar. The debug bridge therefore has no path to main memory. The
supervisor has its own direct port to the memory controllers for that.

### Interrupts and checkpoints

Checkpoints are time triggered on each tile. The supervisor can also force
one. `tile_irq` has four word registers:

| Offset | Register | |
|---|---|---|
| `0x0` | PENDING | bit 0 checkpoint timer, bit 1 supervisor checkpoint, bits 2.. peripheral interrupts; write 1 to clear |
| `0x4` | ENABLE | interrupt enables |
| `0x8` | PERIOD | checkpoint period in cycles, 0 = off; writing restarts the timer |
| `0xC` | COUNT | current timer value (read only) |

The timer counts 0 .. PERIOD−1. When it reaches PERIOD−1 it pulses
`ckpt_tick` and sets pending bit 0. `sup_ckpt_req` comes from another clock
domain. It passes a three-flop synchroniser, and its rising edge sets bit 1.
Peripheral interrupt levels (`ext_irq`, one each for I2C, SPI and GPIO) are
latched into bits 2 and up. `irq` is the OR of enabled pending bits.

### Reset and isolation

`tile_reset_gen` resets a tile when the chip reset or the supervisor's
`sup_rst` is active. The reset is asserted at once, asynchronously. It is
released synchronously `RST_STRETCH` (16) cycles after both are gone. The
reset covers the tile's crossbar, interrupt controller, MMU and state memory
control. The state memory contents survive, so the supervisor can write a
good state into them before or after the reset.

`isolate` disconnects a tile from the global crossbar. `tile_mmu` then
answers every main-memory and non-volatile access with an error and passes
nothing on. A faulty tile can therefore not load the DRAM or the program
memory. Refused accesses are counted in `mmu_rejected`.

### MMU

`tile_mmu` is a fixed translation, not a paging unit. The own-segment
window is `SEG_BYTES` long (64 MiB) and is moved to `seg_base`, which the
supervisor sets per tile. The read-only window covers all `MEM_BYTES` of
DRAM (512 MiB) and refuses writes. The non-volatile window passes through.
Moving a thread to another tile therefore needs no change to its code or
pointers. The supervisor assigns the segment, and the tile always sees it
at `0x8000_0000`.

## Main memory

### Global crossbar and segment interleaving

`global_xbar` has `N_TILES + 2` masters: the tiles (after their MMUs), the
scrubber and the supervisor. It has `N_DDR + 1` slaves: one ECC front end
per DDR channel and the non-volatile memory path (through `nv_failover`).
Each slave has its own round-robin arbiter, so different channels serve
different masters at the same time. A slave is held from grant to response.

DRAM is interleaved by segment: physical segment *k* = addr / `SEG_BYTES`
is on channel *k* mod `N_DDR`. With the defaults, tiles 0 and 2 use
channel 0 and tiles 1 and 3 use channel 1. The load of the tiles is spread
over both channels, and a channel can be taken out of use by moving the
segments on it. Within a channel, the word address is

    local_word = (k / N_DDR) · (SEG_BYTES / 4) + (addr mod SEG_BYTES) / 4

### ECC

`ddr_ecc_ctrl` stores each 32-bit word as a 39-bit extended Hamming
codeword (`ecc_pkg`). Bits 1..38 hold check bits at the power-of-two
positions and data bits elsewhere, in order. Bit 0 is the overall parity.
The decoder corrects any single flipped bit and detects any two.

* Read: decode. When a bit was corrected, the corrected codeword is written
  back at once, so a single upset cannot stay in DRAM and later pair with a
  second one. `corr_count` counts these. A double error returns `err` and
  increments `uncorr_count`. `last_err_addr` holds the physical address of
  the last error of either kind.
* Full-word write: encode and write.
* Partial write: read, merge the strobed bytes, write. It is refused when
  the old word is uncorrectable.

The memory side (`mem_*`) is a word-addressed request/acknowledge port with
a separate read-data valid. It is meant to join the user interface of a
DDR controller configured without its own ECC.

### Scrubber

A word that is never read is never corrected. `ddr_scrubber` reads a range
`[scrub_start, scrub_end)` over and over, one word every `scrub_interval`
cycles. Each read goes through the ECC front end, which repairs what it
finds. The scrubber is a master on the global crossbar and competes with
the tiles like any other. Only the supervisor controls it, so a faulty tile
cannot stop it. `scrub_passes`, `scrub_words` and `scrub_errors` (double
errors met) are its status.

### Redundant non-volatile memory

The FeRAM (operating system code), MRAM (application code) and NAND flash
(payload data) hold what every tile boots and runs from. A functional
interrupt in their controller would stop the whole computer. So the
controllers and memories are built twice (`N_NV = 2`), and `nv_failover`
sits between the global crossbar and the two paths. The supervisor picks
the active path with `nv_sel`. Every new request goes there. A request
already taken finishes on the path that took it, so the switch is safe at
any moment. Error responses are counted per path (`nv_errors`) so that the
supervisor can see a failing controller. Keeping the two copies' contents
the same is left to the supervisor and software.

## Interface voting

A tile that went wrong between two checkpoints can still send bad data to
a sensor or actuator before the vote catches it. For simple SPI and I2C
devices, a per-line majority of the replicas' pins prevents this. The
problem is that replicas are not in step. Their transfers start a few
cycles apart, because the tiles wait on the crossbars and the DRAM for
different times.

`io_voter` solves this with one FIFO per tile:

1. Every input passes two synchroniser flops, because each tile is meant to
   run in its own clock domain.
2. A tile shows that it is transferring by its chip-select (`act`). While
   `act` is high, its lines are pushed into its FIFO every cycle.
3. The first push moves the voter from IDLE to DELAY. After `DEPTH − 1`
   cycles it enters STREAM. From then on it pops one sample from every
   non-empty FIFO per cycle. A replica that started up to `DEPTH − 1`
   cycles after the first therefore has its samples lined up with the
   first's.
4. Each line is decided by a majority of the tiles in `vote_mask`. A
   selected tile with an empty FIFO counts as showing the line's idle level
   and as inactive. The voted chip-select is the majority of "has data".
   The voter returns to IDLE when no FIFO has data and no tile is active.
5. A selected tile that disagrees with the result is counted in
   `minority_cycles`. A sample that arrives at a full FIFO is dropped and
   counted in `overflows`.

The output is registered. It follows the first replica by `DEPTH + 3`
cycles and is an exact copy of the majority waveform. With `DEPTH = 8` up
to 7 cycles of skew are absorbed. A replica that lags more is outvoted, in
the same way as a wrong one. `vote_mask` selects the current lockstep group,
for example three of four tiles with the fourth as a spare. The threshold
is ⌊n/2⌋+1 of the selected tiles.

In the top module one voter serves SPI (`act = ~spi_cs_n`, lines
`{mosi, sclk}`). A second serves I2C (`act = i2c_act`, lines
`{sda_oe, scl_oe}`, the open-drain pull-down enables). GPIO is not voted.

## One lockstep round, as the hardware sees it

The end-to-end testbench runs this sequence. It shows how software uses the
blocks:

1. All tiles run the same thread and write the same results to
   `0x8000_0000…`. Through the MMU and the interleaving they land in four
   segments on two channels. One tile computes one word wrong.
2. Each tile sums its results and writes the sum to its state memory. At
   the checkpoint each tile reads all four sums through Xs. The tile whose
   sum is in the minority is named by all.
3. The supervisor sets `isolate` for that tile and pulses `sup_rst`. It
   copies a good tile's segment into the faulty tile's segment through its
   direct memory port, and the good tile's state memory through the debug
   bridges. Then it clears `isolate`. At the next checkpoint all tiles
   agree.
4. In between, the testbench tries the protections (Xs write, read-only
   window write, isolated access). It injects single and double bit errors
   into DRAM and lets the scrubber repair a latent one. It raises
   supervisor and timer checkpoints. It accesses the non-volatile memory
   before and after a fail-over to the spare path, and the peripherals.
   Last, it sends a replicated SPI transfer (one tile wrong, tiles skewed
   by up to 6 cycles) and an I2C transfer with a three-tile vote mask.

## Parameters

| Parameter (top) | Default | Origin |
|---|---|---|
| `N_TILES` | 4 | main configuration of the published design (6 and 8 were also built there) |
| `N_DDR` | 2 | two DDR4 channels in the published design |
| `SM_WORDS` | 1024 | own choice: one 36 Kb block RAM per tile |
| `SEG_BYTES` | 64 MiB | own choice; power of two |
| `MEM_BYTES` | 512 MiB | own choice; multiple of `SEG_BYTES · N_DDR`, power of two |
| `VOTE_DEPTH` | 8 | own choice; sets the largest skew absorbed (7 cycles) |
| `RST_STRETCH` | 16 | own choice |
| `N_NV` | 2 | duplicated non-volatile memory paths |

Sizing notes:

* With 512 MiB and 64 MiB segments there are 8 segments, so up to 8 tiles
  each get one.
* A full scrub pass over 512 MiB at an interval of 16 cycles takes about
  2.7·10⁹ cycles, or roughly half a minute at 100 MHz.
* The voter delay of 11 cycles is well below one bit time of a 10 MHz SPI
  or a 400 kHz I2C bus at fabric clock rates.

## Where this RTL departs from the published architecture

* **One clock.** The published design gives each tile its own clock domain.
  Here everything runs on `clk`. The tile boundaries are where clock-domain
  crossings would go. The voters and the supervisor checkpoint line already
  synchronise their inputs. With one clock there is also no per-tile
  clock gating or frequency scaling, which separate tile clocks would
  allow.
* **Own bus instead of AXI.** The crossbars carry one transaction at a time
  per master and have no bursts. A vendor AXI crossbar would be used in
  practice.
* **Fixed MMU.** Only the behaviour described (own segment at a uniform
  address, read-only view of all memory, disconnection) is built. It uses
  simple windows.
* **Non-volatile fail-over on request only.** The published design
  duplicates the FeRAM/MRAM/flash controllers and their interconnect for
  fail-over. Here the duplicated paths start after the global crossbar,
  which itself is single. The switch-over happens when the supervisor
  commands it, not automatically.
* **Debug bridge reach.** The published text says the debug bridge gives
  the supervisor access to a tile "and its address space"; its tile
  diagram connects the bridge to the local crossbar only. The RTL follows
  the diagram: the bridge reaches state memory, interrupt controller and
  peripherals, and main memory is reached through the supervisor's direct
  port.
* **SECDED only.** The Reed-Solomon coding suggested for deep-space missions
  is not built.
* **Not built:** the processor cores and caches, debug bridges, clock
  generators, peripheral controllers, the tile-local memory scrubber shown
  only by name, the DDR controller/PHY and DRAM, the non-volatile memories
  and their controller, the configuration-memory scrubbing (SEM) and ICAP
  reconfiguration port, and the supervisor and its Stage 1–3 software. They
  are vendor IP, off-chip parts or software. Their signals are ports of
  `obc_mpsoc_top`.

## Simulation

Each block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=<n> failures=<m>`. `tb/tb_bus_slave.sv` (generic bus slave
with random latency) and `tb/tb_ddr_mem.sv` (DDR channel model with bit-flip
injection) are behavioural helpers. With Verilator 5:

    verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
        -y rtl -y tb rtl/obc_pkg.sv rtl/ecc_pkg.sv tb/tb_obc_mpsoc_top.sv \
        --top-module tb_obc_mpsoc_top --Mdir obj
    ./obj/Vtb_obc_mpsoc_top

Replace `tb_obc_mpsoc_top` with any other testbench name. `tb_obc_scale`
builds the chip with eight tiles, the largest configuration reported for
the architecture, and runs one lockstep round with recovery and a voted SPI
transfer. `tb_obc_mpsoc_top`
runs the whole chip at its default parameters in about a second. It counts
every mechanism it exercises (crossbar contention, Xs contention, timer
checkpoints, tile resets, majority decision, recovery, supervisor
checkpoint, debug-bridge state update, supervisor memory copy, read-only and
isolation refusals, Xs write block, ECC correction and detection, scrubbing,
non-volatile accesses and fail-over, peripheral accesses, outvoting, skew compensation, vote
mask). It fails if any of them never happened. The block testbenches use
smaller parameters where that shortens the run, and mix directed and random
(`$urandom`) stimulus against reference models written in the testbench.
