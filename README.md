# Ianus: a spin-glass Monte Carlo board in SystemVerilog

Ianus is a dedicated computer for Monte Carlo simulation of the
three-dimensional Edwards-Anderson spin glass. Its key idea is that the whole
lattice, with spins, couplings and demons, fits in on-chip storage. Every
update is a handful of logic operations on single bits. So a chip can update
hundreds of spins every clock cycle without touching external memory. A board
holds 16 such "simulation processors" (SPs) in a 4×4 torus. A seventeenth
chip, the Input/Output Processor (IOP), is a message switch between the SPs
and a host computer.

This RTL models one board at its published size: a 64×64×64 periodic lattice
split into 16 pieces of 16×16×64 sites. Each SP has 128 update engines, so the
board updates 2048 spins per clock cycle. Two update algorithms are built:
the demon (microcanonical) algorithm and the heat-bath algorithm, each with
one 32-bit shift-register random generator per engine.

## 1. What is computed

Each site *i* carries a spin σᵢ = ±1. Each bond between nearest neighbours
carries a fixed coupling Jᵢⱼ = ±1. The energy is U = −Σ σᵢ Jᵢⱼ σⱼ. In
hardware, spins and couplings are single bits, with 1 meaning +1. A product
Jⱼ·sⱼ is therefore +1 exactly when the two bits are equal. The one number an
engine needs is *a*: how many of the six terms J·s are +1. The local field is
then h = 2a − 6.

* **Demon update** (`demon_engine`). Each site has a demon, an energy store
  that can never go below 0 or above a limit `demon_max`. Flipping σ changes
  the energy by ΔE = 2σh, always a multiple of 4. The demon therefore counts
  in steps of 4, and ΔE/4 = σ(a − 3).
  * If the flip releases energy, the demon takes it, provided it stays at or
    below `demon_max`.
  * If the flip costs energy, the demon pays for it, provided it has enough.
  * If neither holds, the spin keeps its value.
  * A flip that costs nothing is always made.
  * The demon algorithm needs no random numbers.
* **Heat-bath update** (`hb_engine`). The new spin is +1 with probability
  P(a) = e^{h/T} / (e^{h/T} + e^{−h/T}). There are only seven possible
  values of *a*. The host loads a seven-entry table holding P(a)·2³². The
  spin becomes +1 when a fresh 32-bit random word is below P(a). The old
  spin value is not used.

Both engines are purely combinational: neighbours in, new spin (and demon)
out in the same cycle.

## 2. The P/Q lattices

Spins can be updated together only if none of them is a neighbour of
another. A checkerboard gives that, but then only half the sites can work in
any cycle. Ianus runs **two replicas** of the system, with the same couplings
and independent spins, which spin-glass studies need anyway. It rearranges
them into two artificial lattices:

* **P** holds the black sites of replica 1 and the white sites of replica 2;
* **Q** holds the white sites of replica 1 and the black sites of replica 2.

Every neighbour of a P site is, in the same replica, a site of the other
colour, and those sit in Q at the neighbouring position. So *all* of P can be
updated at once from Q, then all of Q from P. No engine ever sits idle on a
site of the wrong colour, and no colour bookkeeping appears in the hardware:
site (x,y,z) of P simply reads sites (x±1,y,z), (x,y±1,z), (x,y,z±1) of Q.
One **sweep** is a half sweep of P followed by a half sweep of Q.

Each site has one demon, shared by its P and its Q spin. The number of demons
therefore equals the number of sites.

Care is needed when reading results. The P/Q arrangement mixes the replicas:
to recover replica 1, take P at black sites and Q at white sites. Take black
to mean x+y+z even in the board's global coordinates. The hardware neither knows nor
needs this; the host does.

## 3. Inside a simulation processor (`sim_processor`)

**Storage.** Per SP, at the default 16×16×64 piece:

| array    | shape                   | content                                      |
|----------|-------------------------|----------------------------------------------|
| `lat_mem`| 2 × 64 planes × 256 bits| P and Q spins                                |
| `j_mem`  | 64 × 256 × 6 bits       | the six couplings of every site              |
| `d_mem`  | 64 × 256 × 4 bits       | demons                                       |
| `halo`   | 2 × 4 × 64 × 16 bits    | neighbours' boundary rows, per lattice, direction, plane |
| generators | 128 × 64 × 32 bits    | one shift-register generator per engine      |

All six couplings are stored at every site. A bond that crosses an SP
boundary is therefore stored in both SPs, and the host must write the same
value at both ends.

**Schedule.** Updates proceed plane by plane along z. A plane has SX·SY =
256 sites. Each cycle the NE = 128 engines take the next 128 sites of the
current plane, in row order, so a plane takes 2 cycles. A half sweep takes
64 × 2 = 128 cycles, and a sweep 256 cycles plus the barrier waits (section
4). In a cycle, engine *e* works on site s = c·NE + e of plane z, where c is
the chunk within the plane. Its neighbours come from the other lattice:

* x±1 and y±1 from the same plane, or from a halo buffer when the site lies
  on the edge of the piece;
* z±1 from planes z±1, wrapping around inside the SP, since every SP spans
  the full z extent.

New spins and demons are written back at the end of the cycle. Nothing else
reads them until the next half sweep, so no pipeline hazards arise.

**Two algorithms in one SP.** Every engine slot holds both a demon engine
and a heat-bath engine. A run-time register, `ALG`, selects which one writes
back. The original machine reprograms its FPGAs for a new algorithm; this
register is the RTL's stand-in for that. The random generators advance only
while a heat-bath half sweep is running.

## 4. Halo links and the barrier between SPs

The SP at array position (i,j) owns global x in [16i, 16i+16) and global y
in [16j, 16j+16). Its four neighbours in the torus own the adjacent pieces.
It exchanges with them through four one-way **halo links** out (`hout`) and
four in (`hin`), indexed +x, −x, +y, −y.

* **Sending.** Two cycles after the last chunk of a plane is written, the
  SP sends four halo words at once: its x = 15 column towards +x, its x = 0
  column towards −x, and likewise its y rows. Each word is 16 bits plus a
  lattice tag. This happens while the next plane is being updated. At the
  default sizes it adds up to 4 × 16 bits every 2 cycles, 32 bits per cycle
  per SP.
* **Receiving.** Words go into `halo[lattice][direction][z]`. The write
  index z comes from a counter per lattice and direction, because planes
  always arrive in order 0…63.
* **Barrier.** A half sweep of lattice T starts only when all four counters
  of the *other* lattice have reached 64. At that moment they are cleared.
  This is the only synchronisation between SPs. No global start signal
  exists, and the SPs may receive their RUN commands at different times.

The barrier is safe for the following reason. A neighbour cannot get more
than one half sweep ahead: its next half sweep waits for this SP's halo
words. The halo buffer of one lattice is therefore never overwritten while
it is being read.

To keep the counts balanced, a run begins with a **PRE pass**: 64 cycles in
which the SP only sends its Q boundary planes. The first P half sweep needs
them. The **last Q half sweep** of a run sends nothing, because no half sweep
in this run will consume it. Every half sweep then uses exactly the 64 planes
the one before delivered. All SPs must be given the same sweep count.

An assertion flags a halo word arriving while its counter already shows a
full half sweep.

## 5. The board (`ianus_board`) and the IOP (`iop_crossbar`)

`ianus_board` places GX × GY = 4 × 4 SPs, numbered n = j·GX + i. It wires
each SP's `hin[+x]` to the `hout[−x]` of SP ((i+1) mod 4, j), and so on.
The wrap-around wiring gives the 64³ lattice periodic boundaries in x and y.
Periodicity in z is inside each SP.

The IOP is a 17-port crossbar. Port n serves SP n, and port 16 is the host.
Any port can send to any other, which covers host↔SP traffic and long-range
SP↔SP traffic.

* Each output has one register stage and a round-robin arbiter. The arbiter
  picks the first requester after the input it served last.
* A message waiting for one output never blocks another output.
* Messages between one pair of ports stay in order.
* Handshakes are valid/ready. A message offered must stay put until taken,
  and an assertion checks this.

## 6. Talking to an SP

A message (`msg_t` in `ianus_pkg`) carries a 2-bit opcode (WRITE, READ,
RESP), a 16-bit address and 32 bits of data. On the way in it also carries a
destination port; on the way out, the source port. An SP answers each READ
one cycle later with a RESP sent back to the port that asked. WRITEs get no
answer. An SP takes one request at a time: it accepts a new one only once its
previous answer has left.

| address            | meaning                                                      |
|--------------------|--------------------------------------------------------------|
| `0x0000 + z·SX·SY + y·SX + x` | site word of local site (x,y,z): `{demon[3:0], J[5:0], Q, P}`, J bit k for direction +x,−x,+y,−y,+z,−z |
| `0x8000` ALG       | 0 = demon, 1 = heat bath                                     |
| `0x8001` DMAX      | demon upper limit (reset: 15)                                |
| `0x8002…0x8008` LUT| heat-bath table P(a), a = 0…6 (reset: 2³¹, i.e. infinite temperature) |
| `0x8010` RUN       | write N ≠ 0: run N sweeps                                    |
| `0x8011` STATUS    | read: `{busy, 15'b0, sweeps completed}`                      |

A run goes like this:

1. Write every site.
2. Write ALG, and DMAX or the LUT, in every SP.
3. Write RUN with the same N to every SP.
4. Poll STATUS, or watch `sp_busy`, until all SPs are idle.
5. Read the sites back.

Site writes and register writes that reach an SP while it is busy are
ignored. Spins, couplings and demons are not reset; control registers are.

## 7. Random numbers (`sr_rng`)

Each engine has its own additive lagged-Fibonacci generator of the
Parisi–Rapuano type:

    I(k) = I(k−24) + I(k−55) mod 2³²,    R(k) = I(k) XOR I(k−61)

The last 64 words sit in a circular buffer. A step writes one word and reads
three, so nothing is shifted. On reset, the buffer is loaded with 64 words of
a xorshift32 sequence started from the instance's seed. Each engine's seed
is its SP's base seed plus e·0x9E3779B9, and each SP's base seed is
0x2545F491 + n·0x6C078965. Every engine therefore draws its own stream from
reset. The output `rnd` is the word of the step about to be taken, decoded
from the buffer registers. An enabled clock edge takes that step, so an
engine sees a fresh word in every heat-bath cycle, starting with the first
one after reset.

## 8. Performance at the default size

| quantity                          | this RTL                | published figure        |
|-----------------------------------|-------------------------|-------------------------|
| lattice per board                 | 64×64×64                | 64×64×64                |
| piece per SP                      | 16×16×64                | 16×16×64 (heat bath)    |
| engines per SP                    | 128                     | 128 (heat bath)         |
| spins per clock, board            | 2048                    | 2048 heat bath, 4096 demon |
| time per spin at a 5 ns clock     | 2.44 ps                 | ≈2.5 ps heat bath, <1.3 ps demon |
| halo traffic per SP               | 32 bits/cycle           | 32 bits/cycle (heat bath) |
| cycles per sweep                  | 256 + barrier waits; first sweep of a run also 64 PRE cycles | — |

A simulated full-size sweep took 327 cycles from the last RUN command to the
last SP going idle. That is 256 update cycles, 64 PRE cycles and a few
cycles of skew between SPs.

## 9. Where this RTL departs from the published design

* **Demon decomposition.** The published demon plan gives each SP a
  4×64×64 slab and updates a 4×1×64 slice (256 spins) per cycle. Here the
  demon algorithm uses the heat-bath decomposition and its 128 engines. It
  is therefore half as fast per cycle. The lattice and the demons (one per
  site) fit the same way.
* **Algorithm switch.** The algorithm is chosen by a register, not by
  reconfiguring the FPGA.
* **Not built.** The IOP's links to other boards (no protocol is
  published), the host computer and its software, and the early test
  engines (fully parallel L = 10, plane-parallel L = 14).
* **Own choices.** The message format, address map and register set. The
  halo link format, barrier, PRE pass and silent final half sweep. Storing
  six couplings per site. Demon units of 4 in 4 bits. A flip that costs
  nothing is always made. The 7-entry probability table. The generator's
  lags and its seeding.
* **Storage.** All storage is written as flip-flop arrays. A real FPGA
  build would map the spin, coupling and demon planes onto block RAM. The
  plane-at-a-time access pattern suits that.

## 10. Simulating

All files are IEEE 1800-2017 SystemVerilog. `rtl/ianus_pkg.sv` must be
compiled first. The testbenches compare against a software model in
`tb/ianus_ref_pkg.sv`, which performs the same P/Q half sweeps with the
energy worked out directly from U.

| testbench                 | what it checks                                                       | time |
|---------------------------|----------------------------------------------------------------------|------|
| `tb_demon_engine`         | every spin/demon/neighbour/coupling combination for three limits    | seconds |
| `tb_hb_engine`            | 200 000 random cases, plus frequencies against the table at T = 2   | seconds |
| `tb_sr_rng`               | 3000 steps against a software generator, enable held low at random  | seconds |
| `tb_iop_crossbar`         | random all-to-all traffic with random stalls, ordering, round-robin order | seconds |
| `tb_sim_processor`        | one 4×4×4 SP looped onto itself: loading, 2 demon sweeps, heat-bath sweeps at T = 0 and at T = 2 (the latter predicted with a software copy of every engine's generator), cycles per half sweep, ignored writes | seconds |
| `tb_ianus_board`          | 2×2 board of 4×4×4 SPs through the host port; counts every mechanism (demon pays, refuses, limit, halo words, neighbour waits, crossbar contention, back-pressure, mode switch) | under a minute |
| `tb_workload_hb32`        | the 32³ heat-bath test configuration: one SP with SX=SY=SZ=32 and 128 engines, one sweep at T = 2 checked site by site, 8 cycles per plane | ~20 s |
| `tb_workload_demon_slab`  | the demon slab rate: one SP with SX=4, SY=64, SZ=64 and 256 engines, 256 spins and 64 cycles per half sweep, two demon sweeps checked site by site | ~30 s |
| `tb_ianus_board_full`     | the default 4×4 board, 64³ lattice: one demon sweep checked site by site | build ~8 min, run seconds |

The board-level heat-bath check uses a zero-temperature table (P = 1 for
h > 0, else 0), which makes the result independent of the random stream. The
SP-level and 32³ tests run at T = 2 and follow every generator in software. The
full-size testbench places the lattice directly into the SPs' arrays through
hierarchical references and reads it back the same way. Loading 262 144
sites through the single host port would take most of a million cycles.

Example, for the reduced board:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/ianus_pkg.sv tb/ianus_ref_pkg.sv rtl/demon_engine.sv rtl/hb_engine.sv \
      rtl/sr_rng.sv rtl/sim_processor.sv rtl/iop_crossbar.sv rtl/ianus_board.sv \
      tb/tb_ianus_board.sv --top-module tb_ianus_board -o sim
    ./obj_dir/sim

Each testbench ends with the line `TB_RESULT checks=N failures=M`. Each has
a cycle watchdog that counts a failure if the test hangs.

## 11. Changing the parameters

* `SX`, `SY`, `SZ`, `NE` (per SP), and `GX`, `GY` (board). NE must divide
  SX·SY. A piece may hold at most 32 768 sites, the limit of the 15-bit site
  address. Halo words are max(SX, SY) bits wide.
* A single `sim_processor` with its halo outputs wired back to its own
  inputs (+x out to −x in, and so on) is a self-contained periodic lattice.
  `tb_sim_processor` uses it that way. A 32³ lattice with 128 engines, for
  example, is `SX=SY=SZ=32, NE=128`: 8 cycles a plane.
* `DEMON_W` in `ianus_pkg` sets the demon width; the 32-bit site word has room for up
  to 24 bits.
