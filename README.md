# JANUS core: an FPGA torus for spin-glass Monte Carlo

Monte Carlo simulation of spin glasses spends almost all of its time in one
tiny kernel: visit a lattice site, look at its six neighbours and the six
couplings to them, compute the energy change of a proposed new spin value,
and accept or reject it against a random number. The kernel is bit-level,
embarrassingly regular, and needs no floating point, yet a processor does it
one site at a time. A JANUS core instead gives every site of a whole lattice
plane its own small piece of update logic, feeds those cells from on-chip
memories that deliver a full plane per clock, and gives every cell its own
32-bit random number per clock. One FPGA of this kind (an *SP*, simulation
processor) replaces on the order of a hundred processor cores; sixteen of
them, connected as a 4 x 4 torus and fed by one I/O processor (*IOP*), form
a core.

The SystemVerilog here describes such a core at the register-transfer
level: the IOP with its stream router, staging memory and SP interface, the
16 SPs with their nearest-neighbour links, and two SP configurations
("firmwares") — the 3D Edwards-Anderson Ising spin glass (Metropolis and
heat bath) and the 3D disordered 4-state Potts model (Metropolis).

## The core

```
            host stream (16-bit words)             return stream
                    |                                    ^
            +-------v------------------------------------+--------+
            |  IOP   stream_router --> device bus (devSel,dv,data) |
            |          |            |              |               |
            |      memory_if     sp_if        (program, sync,      |
            |          |          | ^          temperature: bus    |
            |     staging_mem     | |           brought out)       |
            +---------------------|-|------------------------------+
                  16 x 2-byte     v |  full-duplex links
            +------------------------------------------------------+
            |  SP0  -- SP1  -- SP2  -- SP3  --(wrap to SP0)         |
            |   |       |       |       |                           |
            |  SP4  -- SP5  -- SP6  -- SP7                          |
            |  ...                                   4-byte links,  |
            |  SP12 -- SP13 -- SP14 -- SP15          periodic in x,y|
            +------------------------------------------------------+
```

`janus_core` instantiates the IOP and a 4 x 4 grid of `sp_node`s. SP number
`n` sits at `x = n % 4`, `y = n / 4`. Each SP has one full-duplex link to the
IOP (16 bits per clock each way, `iop_word_t`) and four full-duplex links to
its neighbours (32 bits per clock, `nn_word_t`, two clocks of latency,
`nn_link`), with the rows and columns closed into rings. Everything runs on
one clock with an active-low asynchronous reset.

Every SP carries one engine, picked at elaboration by `sp_node`'s `FW`
parameter. In the default core the SPs named in `POTTS_SPS` (the bottom row,
SPs 12..15) carry the Potts engine and the other twelve the Ising engine, to
show that each SP can run its own task; any other mix is a parameter change.

## Simulating a lattice plane per clock

The heart of the design is `ising_engine` (and its Potts twin). Its
lattice of `LX x LY x LZ` sites (32 x 32 x 32 by default) is stored in
`bit_plane_mem` structures: one memory word holds a whole xy plane (bit
`y*LX + x`), and the word address is `z`. Reading address `z` therefore
delivers all `LX*LY` spins of plane `z` at once.

**Mixed replicas.** A spin-glass study runs two independent copies
(replicas A and B) of the same couplings. On a 3D cubic lattice every
neighbour of an even site (x+y+z even) is odd, so all even sites may be
updated together, then all odd ones. The engine stores the two replicas
interleaved: mixed replica M0 holds A's even sites and B's odd sites, M1
holds A's odd sites and B's even sites. All neighbours of any site of M0 are
in M1 and vice versa. A half-sweep updates every site of M0 using M1 as the
neighbour source, the next half-sweep updates M1 using M0, and no update ever
reads a value written in the same half-sweep. With 1024 cells a whole 32 x
32 plane is updated per clock.

**Memory structures.** The Ising engine has five: M0, M1 and the couplings
Jx, Jy, Jz (bit = 1 for J = +1). `Jx(x,y,z)` is the bond between `(x,y,z)`
and `(x+1,y,z)`, and likewise for y and z. The Potts engine has seven: two
bits for each mixed replica (M0.b0, M0.b1, M1.b0, M1.b1) and Jx, Jy, Jz.
Every structure has one read and one write port, the limit of a block RAM.

**The plane pipeline.** To update plane `z` of M0 a cell needs planes
`z-1, z, z+1` of M1 (its two z-neighbours and its four in-plane neighbours),
plane `z` of Jx, Jy, Jz, and the Jz bond to plane `z-1`. The engine keeps a
sliding window: the previous M1 plane and the previous Jz plane sit in
registers, so each clock reads only one new M1 plane (`z+1`), one Jx/Jy/Jz
triple and the old M0 plane, and writes back the plane computed in the
clock before. The in-plane neighbours come from rotating the plane word,
which gives the periodic boundary in x and y; the window wraps around in z.

A half-sweep takes `LZ + 3` clocks: two prologue clocks that fill the window
(planes `LZ-1` and `0`), `LZ` update clocks, one drain clock for the last
write. A sweep (both mixed replicas, i.e. every site of both replicas once)
takes `2*(LZ+3)` clocks; the engine counts them in `cycles` and the tests
check that number. At 32^3 a sweep is 70 clocks for 65 536 spin updates.

**Update cells.** `ising_update_cell` counts the satisfied bonds `m`
(bond `J*s*n > 0`, encoded as `s ^ n ^ J` with 1 = +1) and proposes the flip.
For Metropolis the table index is `m` (0..6, the energy change of a flip is
`4m - 12`) and the flip is taken when `rnd < LUT[m]`. For heat bath the
index is `(h + 6)/2` with `h` the local field, and the new spin is +1 when
`rnd < LUT[index]`, so the table holds the probability of spin up: both
algorithms use 7 entries and no arithmetic beyond a bit count. The
`potts_update_cell` computes `dE = sum_k J_k (delta(s,n_k) - delta(s_try,n_k))`
for a proposed value `s_try` (two random bits), in -6..6, and uses `dE + 6`
as the index into a 13-entry table. All probabilities are 32-bit unsigned
integers written by the host, so temperature and algorithm details live in
software; an entry of `2^32 - 1` stands for probability 1 (it misses by
2^-32).

Each `prob_lut` is a small distributed RAM with two read ports shared by two
neighbouring cells, so an engine has `LX*LY/2` copies of the table; the host
writes all copies at once.

**Random numbers.** `pr_rng_bank` supplies one 32-bit number per cell per
clock (two per cell for Potts) with the Parisi-Rapuano generator
`I(k) = I(k-24) + I(k-55)`, `R(k) = I(k) xor I(k-61)`. The bank is a set of
independent 62-word wheels (`pr_wheel`), each producing 24 numbers per clock
with 24 adders; 1024 numbers take 43 wheels. All wheel states form one shift
chain that the host fills with seeds (62 words per wheel, the first 62 seeds
go to wheel 0). The generator only advances while a plane is being computed,
so a run is reproducible from its seeds.

## Talking to an SP

The SP is a memory-mapped coprocessor: the host loads memories, table and
seeds, starts a run, polls, and reads memories back. Commands arrive on the
IOP link as 16-bit words; the header carries an opcode in `[15:12]`
(`janus_pkg::sp_op_e`) and an operand in `[11:0]`:

| opcode | operand | argument words | reply |
|---|---|---|---|
| `SP_WR16` | target | z, chunk, data | — |
| `SP_RD16` | target | z, chunk | 1 word |
| `SP_WR_LUT` | table entry | data[31:16], data[15:0] | — |
| `SP_SEED` | — | data[31:16], data[15:0] | — |
| `SP_RUN` | [0] heat bath (Ising) | number of sweeps | — |
| `SP_STATUS` | — | — | {busy, sweeps_done[14:0]}, cycles[15:0] |
| `SP_NN_SEND` | direction | data[31:16], data[15:0] | — |
| `SP_NN_READ` | direction | — | data[31:16], data[15:0] |

Memory access is in 16-bit chunks of a plane (`chunk` `c` covers bits
`16c .. 16c+15`). Targets are 0 M0, 1 M1, 2 Jx, 3 Jy, 4 Jz for Ising and 0/1
M0 bits, 2/3 M1 bits, 4/5/6 Jx/Jy/Jz for Potts. A command is accepted on
every clock; once its last word is in, it executes on the next clock while
the decoder takes the next header. Commands that touch the engine are
ignored while it runs. Replies go through an 8-entry FIFO back to the IOP;
each command's reply enters the FIFO as one entry, so the words of a
two-word reply always leave back to back.

The neighbour links are used as mailboxes: `SP_NN_SEND` puts one 32-bit word
on a link, and the last word that arrived from each direction can be read.
They are enough to check the torus wiring and to exchange small amounts of
data; a multi-SP lattice that exchanges boundary planes every half-sweep is
not built.

## The I/O processor

The host sends one stream of 16-bit words, cut into *worms*:

```
word 0       [7:0] device mask, bit i selects device ID i
word 1       payload length N
words 2..N+1 payload
```

`stream_router` strips header and length and puts the payload on the shared
device bus (`devsel`, `dv`, `data`, plus `first`/`last` marks) one clock
later. Device IDs are 0 or 3 for the memory interface, 1 or 2 for the
program interface, 4 for the SPs, 5 for synchronisation and 6 for
temperature.

* `memory_if` (ID 0 or 3): payload `{cmd, addr, ...}`; `cmd[15] = 0` writes
  the following words to consecutive addresses of `staging_mem` (64 Ki x 16
  bits by default); `cmd[15] = 1` returns `count` words from `addr`.
* `sp_if` (ID 4): the first payload word is a 16-bit SP mask, every later
  word is sent on all selected IOP-SP links at once, so a table, a seed set
  or a run command reaches all SPs with one worm. Each uplink enters a
  16-word FIFO and a round-robin arbiter merges them.
* `iop` merges the memory and SP replies (round robin) onto the return
  stream `tx_valid/tx_data/tx_ready`, tagged with the device (`tx_dev`) and
  SP (`tx_sp`) they came from. `tx_ready` provides back-pressure; an
  assertion checks that a presented word stays put until it is taken.
* Program, sync and temperature devices are not built: the device bus comes
  out of the core as `dev_bus` for them.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `janus_core` | `LX, LY, LZ` | 32, 32, 32 | Ising lattice per SP (LX*LY cells) |
| | `POTTS_SPS` | `16'hF000` | SPs carrying the Potts engine |
| | `PLX, PLY, PLZ` | 32, 16, 32 | Potts lattice per SP (512 cells) |
| | `STAGE_AW` | 16 | staging memory address width |
| | `NN_LAT` | 2 | neighbour link latency in clocks |
| `ising_engine`, `potts_engine` | `RNG_K` | 24 | numbers per generator wheel per clock |
| `sp_if` | `UP_DEPTH` | 16 | uplink FIFO depth |

`LX*LY` must be a multiple of 16 (the host chunk size).

## Where this design departs from the original

* **Lattice size.** The original SP holds Ising lattices up to 96^3 and Potts
  lattices up to 88^3 in memory, but has logic for only 1024 (Ising) or 512
  (Potts) parallel updates; how it splits a 96 x 96 plane over 1024 cells is
  not published. This design updates one whole plane per clock, so the
  default lattice is limited by the cell count: 32^3 for Ising, 32 x 16 x 32
  for Potts. Larger planes are a parameter change, but cost one cell per site.
* **Not built:** the glassy Potts model (permutation couplings), the graph
  colouring engine (a topology memory of neighbour pointers and a replicated
  colour memory), the magnetic-field and dilution terms of the Ising energy,
  the IOlink (Gbit Ethernet MAC and protocol), the program, sync and
  temperature devices, and run-time reconfiguration of an SP.
* **Own choices** where the original leaves the detail open: the worm format,
  the memory and SP command sets, broadcast as the SP interface's shared
  function, the reply tagging, the table index encodings, the generator's
  wheel structure and seeding chain, the two-clock pipeline prologue, the
  SP numbering, and the mailbox use of the neighbour links.
* The original system's throughput figure (16 ps per Ising spin per SP)
  corresponds to a clock of about 67 MHz for this pipeline; no clock
  frequency is assumed anywhere in the RTL.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog. The engine
testbenches (`tb_ising_engine` at 8 x 4 x 6, `tb_potts_engine`) carry a full
software model of the sweep — same mixed layout, same generator, same table
— and compare every plane after every run, as well as the `2*(LZ+3)`-clock
sweep time. `tb_janus_core` runs the whole core end to end at 4 x 4 x 4 per
SP (twelve Ising SPs, four Potts SPs): it loads a different random instance
into each SP, broadcasts a zero-temperature run and checks that no SP's
energy rises, runs heat bath with probability-one tables and checks the
result, exercises every neighbour link including the wrap-around, uses the
staging memory while SP replies compete for the return stream under random
back-pressure, and counts each of these mechanisms. The largest configuration
simulated end to end is that 4 x 4 x 4-per-SP core; the single-SP engines
were simulated at 8 x 4 x 6 sites. The
default 32^3 core builds and passes lint, but its simulation model is too
large to compile quickly and was not run.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/janus_pkg.sv \
    tb/tb_janus_core.sv --top-module tb_janus_core -Mdir obj_core
obj_core/Vtb_janus_core
```

Replace the testbench name for any other block. `tb/janus_host.svh` holds
the host-side tasks (worm building, SP commands, reply collection) used by
the core and IOP testbenches and is a good starting point for new tests.

Lint reports only unused-signal warnings (upper bits of the 16-bit
address words, unused package constants in small instances) and a note that
`rst_n` is used both as asynchronous reset and inside assertion `disable
iff` clauses; both are intended.
