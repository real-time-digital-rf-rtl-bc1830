# Real-time RF channel emulator with near-memory delay lines

This design emulates, in real time and one complex sample per clock, the
radio channel between a handful of objects: a transmitter, objects that
reflect its signal, and a receiver. Every signal that travels from one object
to another arrives later (by the path length divided by the speed of light),
weaker (antenna gains, radar cross-section, path loss), slightly smeared
(a fractional part of a sample period) and frequency-shifted (Doppler, when
the objects move). The emulator reproduces all four effects digitally, so
that real radios, or a software model of them, can be tested against a
scripted, moving RF scene.

The design follows a *direct path* model. Each object is a **node**. A node
takes the streams it receives from every other node, combines them into one
signal `v(t)` (what the object "hears"), and sends one output stream to
every other node, each with its own delay, filter, gain and Doppler term. The
long, per-destination delays are the expensive part. A node needs one input
sample stream and several outputs delayed by up to thousands of samples.
Here that delay line is built as a block of sub-banked SRAM with one write
pointer and many read pointers, the **SIMO-FIFO** (single input, multiple
output). Most of the control that makes it work sits next to the memories.

The geometry is treated as piecewise constant. Every `K` cycles a
**scenario update** (SU) switches every node, at the same clock edge, to a
new set of delays, gains, filter taps and Doppler frequencies. A slow serial
port loads the next sets in the background while the current scenario runs.

The RTL describes the four-node system of the test chip: one transmitter,
two passive objects and one receiver. Each node stores 16 × 1024 samples,
which at 518 MHz is about 9.5 km of one-way path.

```
            +--------- out0 ---------> Obj1.in0
   Tx  -----+--------- out1 ---------> Obj2.in0
            +--------- out2 ---------> Rx.in0

   Obj1.out0 -> Obj2.in1     Obj1.out1 -> Rx.in1     (Obj1.out2 unused)
   Obj2.out0 -> Obj1.in1     Obj2.out1 -> Rx.in2     (Obj2.out2 unused)
```

So the transmitter reaches the receiver directly, through either object, and
through object–object bounces (Tx→Obj1→Obj2→Rx and so on).

## Samples and arithmetic

A sample is 32 bits: `{re, im}`, two IEEE binary16 (fp16) numbers
(`cplx_t` in `rfe_pkg`). The fp16 multiplier and adder (`fp16_mul`,
`fp16_add`) flush subnormals to zero and truncate (round toward zero).
Overflow saturates to infinity of the right sign. NaN is never produced.
Rounding to nearest and subnormals are left out to keep the units small.

Gains are real fp16 values. Fractional-delay filter taps are 10-bit floats:
sign, the full 5-bit exponent and 4 mantissa bits. In other words, a tap is
the top 10 bits of an fp16 value, and `{c, 6'b0}` is its fp16 value. Doppler
coefficients are complex fp16 values.

## A node's datapath

**Passive object** (`passive_node`, 2 inputs, 3 outputs):

```
in_m --FDC_m--> x alpha_m --+
                            +-- adder tree --> v(t) --> SIMO-FIFO --+-- out0 delay --FDC--> x beta0*rho0 --> Doppler --> out0
in_n --FDC_n--> x alpha_n --+                                       +-- out1 ...
                                                                    +-- out2 ...
```

- **FDC** (`fdc_fir`) is a 4-tap FIR with 10-bit taps. It supplies the
  fraction of a sample that the integer delay cannot express. The tap
  pattern chooses which tap is the "zero lag" one. Programming only one tap
  gives a pure integer delay.
- `alpha` is the receive antenna gain toward that input's source.
- `beta x rho` is a single real coefficient per output: the transmit-side
  antenna gain lumped with the reflectivity and path loss.
- `gain_mul` is one registered fp16 × complex multiply.
- `adder_tree` is a binary tree with one register per level.

**Transmitter** (`tx_node`): the front part, up to `v(t)`, is replaced by a
digital RF generator (`drfg`). The output gain is the transmit antenna
gain `G_T`.

**Receiver** (`receiver`): one real gain `G_R` per input and an adder tree.
The sum is the emulator's output `rx_out`. It is also captured into an
on-chip memory for read-out over the serial port (see *Receiver capture*).

**Exact delays.** Each node has a fixed processing latency `NODE_LAT`. It
is 11 cycles in the transmitter, from the generator to the output, and 17
cycles in a passive node with two inputs (6 to `v(t)`, then 11). The node
subtracts this latency from the programmed delay. A physical delay of `D`
samples written for an output therefore makes a sample reappear exactly
`D` cycles later on that output, as long as the FDC is a single zero-lag
tap. The receiver adds 3 cycles.

Written out, with `c_ik` the taps of output `i` and `A_i` its Doppler term
(applied 2 cycles late because of the Doppler pipeline):

```
Tx:       out_i(t) = A_i(t-2) * G_i * sum_k c_ik * src(t - D_i + 1 - k)
Passive:  v(t)     = sum_m alpha_m * sum_k c_mk * in_m(t - 6 + 1 - k)
          out_i(t) = A_i(t-2) * beta_i * sum_k c_ik * v(t - D_i + 6 + 1 - k)
Rx:       r(t)     = sum_m G_m * in_m(t - 3)
```

The testbenches check the RTL against exactly these equations.

## The SIMO-FIFO: one write, many delayed reads

`simo_fifo` turns one input stream into `M` (here 3) output streams, each
delayed by its own buffer delay `tau_m`. Samples are never moved. A sample is
written once, at the write pointer `wp`. Output `m` reads the address
`wp - tau_m`, and that read pointer advances in step with `wp`, so the
distance between them stays constant for the whole scenario.

The storage is `P = 16` single-port SRAM sub-banks of `S = 1024` samples
(`sram_sp`). `wp`'s upper 4 bits select the sub-bank and its lower 10 bits
the row. Five kinds of unit share the work:

| unit | count | role |
|---|---|---|
| write tree | 1 | carries `{row, sample}` to all sub-banks; the one selected by `wp` stores it |
| `lddc` | P | one per sub-bank: owns that SRAM's read pointer while an output stream passes through it |
| `gddc` | 1 | write pointer, delay registers, collision grouping, start-up of the LDDCs at each SU, prefetch forwarding |
| `ddnoc` | 1 | routes the P sub-bank reads to the M outputs, with multicast |
| `pec` | M | per output: real-time register (RTR) and prefetch buffer (PB), adds an extra per-output offset |

**The LDDC ring.** A read stream is a token:
`{active, destination mask, row}`.

- At a scenario update the GDDC computes the start address `wp - tau` of
  each stream. It sends `{row, mask}` to the one LDDC whose sub-bank holds
  that address (the "configuration transfer" message).
- That LDDC then reads one row per cycle.
- After row `S-1` it hands the token to the next LDDC in the ring, which
  continues at its own row 0 in the next cycle.

No central unit tracks read addresses during a scenario: each pointer lives
in whichever LDDC currently holds it.

**Why delays are limited to `[S, (P-1)S]`.** An SRAM can read or write in a
cycle, not both. The sub-bank being written must never be read, so every
delay is at least one sub-bank (1024 samples). At most `P-1` sub-banks are
available for reading, which caps delays at 15360 samples.

Subtracting the node latency moves the programmable physical delays to
1035..15371 samples in the transmitter and 1041..15377 in a passive node.
An output whose delay falls outside the range is switched off for that
scenario and raises `range_err`. An assertion in `lddc` catches a
read/write clash that should not happen.

**DDNoC.** Each sub-bank read leaves its LDDC with the token's destination
mask. Output `m` takes the read whose mask has bit `m` set, through an
AND-OR multiplexer followed by a register. A mask with several bits set
delivers one read to several outputs. This multicast is what the collision
scheme below relies on.

**Latency.** From SRAM read to PEC output there are 4 cycles: SRAM, DDNoC,
RTR write and RTR read. `FIFO_LAT = 4` is part of the node latency above.

## Memory collisions: grouping and multicast

Two outputs whose delays differ by less than one sub-bank would, at some
point, need two different rows of the **same** single-port SRAM in the same
cycle. That is a memory collision. Near objects are common in a radio scene
(two cars side by side, a car and the radar next to it), so the design has to
handle them.

**Grouping (GDDC, one scenario ahead).** The GDDC sorts the enabled outputs
into groups:

1. Take the nearest ungrouped output (smallest `tau`) as the **group
   header**.
2. Add to its group every ungrouped output with a delay less than `S`
   samples larger.
3. Repeat until every output is in a group.

Only headers get an LDDC stream. The header's mask lists every member, so
its samples are multicast to all of them. A member `i` of a group with
header `h` needs the same stream delayed a little more, by
`off_i = tau_i - tau_h`.

**The RTR (`pec`).** Every output has a small dual-port buffer. The PEC
pointer advances every cycle with `wp`. Each arriving sample is written at
that pointer, and the output is read at `pointer - 1 - off_i`. The header
uses `off = 0`. A member reads `off_i` samples further back. The RTR holds
256 samples, so a group can span at most 252 samples; the rest is pipeline
margin. A wider span raises `coll_err`.

In short, collisions within 252 samples are fully resolved. Outputs 253 to
1023 samples apart are not.

The GDDC does this grouping during scenario N for scenario N+1, from a
second copy of the delay registers. Each scenario's group structure is
therefore ready at its SU, and `collision` reports that the coming scenario
contains a group.

## Prefetch across a scenario update

Grouping creates a problem at the start of each scenario. At the SU, the
header's new stream starts at `wp - tau_h`, and every member's RTR is filled
from that stream. But a member reads `off_i` samples *behind* the newest
entry. So for its first `off_i` cycles it needs samples that precede the
header's start point. The new stream never carried those samples, and the
old RTR contents belong to the old delays.

These `off_i` samples must be in the member's buffer before the scenario
starts. That is the job of the **prefetch buffer (PB)**. Each PEC has two
identical dual-port buffers:

- During scenario N, one of them is the RTR (feeding the output). The other
  is the PB, which collects what the member will need at the start of
  scenario N+1.
- At the SU the two swap roles. The prefetched samples become the start of
  the new RTR in zero time, with no bulk copy.

The write side swaps two cycles after the SU, when the first sample of the
new stream reaches the RTR. The read side swaps, with its new offset and
enable, one cycle after that.

**Where the prefetched samples come from.** The samples a member needs at
the start of scenario N+1 entered the node `tau_i` cycles before that
start. Two cases follow:

- **`tau_i` shorter than the scenario.** The samples have not arrived yet
  at the start of scenario N; they stream in during it.
  - The GDDC sees each one while it writes it into the SIMO-FIFO. During the
    window `tau_h < cycles-to-SU <= tau_i`, it also writes the sample
    straight into the member's PB.
  - The PB address is `wp + tau_h + 2` (mod 256), exactly where the RTR
    pointer of scenario N+1 will look for it.
  - **This case is built.**
- **`tau_i` longer than the scenario.** The samples are already in the SRAM
  at the start of scenario N. They would have to be read by an LDDC during
  cycles in which that sub-bank is idle.
  - **This case is not built.** The GDDC detects a group member that would
    need it and raises `pf_err`. That member's first `off_i` outputs of the
    scenario are then wrong; everything after them is correct.
  - A scenario length above the largest grouped delay (at most 15371
    cycles) avoids the case entirely.

Prefetch needs the look-ahead of a previous scenario, so there is none in
the first scenario after start.

Example (full size, scenario length `K` well above every delay):

- Tx outputs with buffer delays 3000 and 3010 form one group. Header delay
  3000, member offset 10.
- During the last 3010 to 3001 cycles of scenario N, the ten samples written
  into the Tx SIMO-FIFO are also copied into the member's PB.
- At the SU the buffers swap. The member's first ten outputs come from
  them, and from then on it reads the header's multicast stream ten
  entries behind.

## Scenario updates and configuration buffering

`scen_timer` produces `su` in the first cycle of every scenario (every `K`
running cycles) and `to_su`, the cycles left until the next one.

Every per-scenario value has three copies (`cdc`; the delay registers in
`gddc` work the same way):

| copy | contents |
|---|---|
| written | what the serial port last wrote; the scenario after next |
| next | scenario N+1, visible to the GDDC's look-ahead |
| active | scenario N, in use |

At each `su`, next→active and written→next. A value written during
scenario N therefore takes effect at the start of N+2. A `commit` pulse,
accepted only while stopped, copies the written set into both next and
active (for the delays, into next), so that a run starts from a defined
state.

The start-up order is:

1. Stop.
2. Write scenario 0.
3. Commit.
4. Write scenario 1.
5. Run.
6. From then on, write scenario `s+2` during scenario `s`.

The chip this design follows loads its buffered values on the falling clock
edge in the SU cycle. This RTL uses the rising edge of the same cycle,
which gives the same behaviour in a single-clock design.

## Doppler

Each output is multiplied by `A_i = exp(-j 2π f_i n)`, where `f_i` is a
32-bit phase step per sample (a fraction of a turn) and `n` is the sample
index. The term changes slowly, so one generator in `doppler` serves all
outputs of a node. It works in a 256-cycle window:

- The window is split into eight slots of 32 cycles. In slot `i < N_OUT`
  the generator computes output `i`'s next coefficient. It takes the phase
  `256·u·f_i mod 2^32` for the `u`-th update and looks up `{cos, sin}` in an
  8K-entry ROM, indexed by the phase's top 13 bits.
- New coefficients are buffered. At the end of the window all outputs switch
  to their new coefficient in the same cycle.

Coefficients start at 1 + j0. The ROM is computed at elaboration time with
`$cos`/`$sin`, so there is no table file. The complex multiply takes 2 cycles.

## Digital RF generator

`drfg` repeats a pattern of period `per` (1..2048 samples). The first
`on_len` samples of each period come from a 64-entry table of programmable
I/Q values; the rest are zero. Sample `k` of a period is `tab[k mod 64]` if
`k < on_len`.

64 of 2048 samples is the smallest duty cycle the generator is meant for
(3.125 %). `on_len = per` gives a continuous signal. The pattern restarts
when `run` rises.

## Receiver capture

The emulator's output runs at the clock rate, while the only way out of the
chip is the slow serial port. The receiver therefore stores a subsampled
copy of `rx_out`:

1. Wait `start` running cycles, then store one sample.
2. Store one more every `step` cycles, until the 1024-entry memory
   (`dpsram`) is full (`cap_done`).

Repeating the run with shifted `start` values collects every sample of a
longer output window.

## Serial interface and register map

`spi` takes 49-bit frames, MSB first on rising `sclk` while `cs_n` is low:
`{rw, addr[15:0], data[31:0]}`.

- **Write frame:** one bus write after the 49th bit.
- **Read frame:** a read strobe after the 17th bit. The 32 data bits come
  back on `miso`, changing on falling `sclk` edges.

The pins pass through two-flop synchronisers, so `sclk` must be much slower
than `clk` (the testbenches use 12 clocks per bit).

`addr[15:12]` selects the node: Tx 0, Obj1 1, Obj2 2, Rx 3, global 15.
`addr[11:0]` selects the register:

| offset | register | nodes |
|---|---|---|
| 0x000 + 4·in + tap | input FDC tap (10 bit) | passive |
| 0x020 + in | input gain `alpha` / `G_R` (fp16) | passive, Rx |
| 0x040 + 4·out + tap | output FDC tap (10 bit) | Tx, passive |
| 0x060 + out | output gain `G_T·rho` / `beta·rho` (fp16) | Tx, passive |
| 0x070 + out | Doppler phase step (32 bit) | Tx, passive |
| 0x080 + out | physical delay in samples, bit 31 = enable | Tx, passive |
| 0x100 / 0x101 / 0x102 | generator period / on-length / enable | Tx |
| 0x140 + k | generator sample `k` (`{re, im}`) | Tx |
| 0x200 / 0x201 | capture start / step | Rx |
| 0x400 + k | capture memory (read) | Rx |
| global 0x000 | scenario length `K` (reset 4096, minimum 2) | |
| global 0x001 | run | |
| global 0x002 | commit (pulse, while stopped) | |
| global 0x003 | status (read): `{scen_cnt[15:0], 3'b0, cap_done, status[11:0]}` | |

The FDC, gain, Doppler and delay registers are buffered as described
above. The generator and capture registers take effect immediately.

`status[11:0]` holds `{Obj2, Obj1, Tx}`, 4 bits each:
`{collision, pf_err, coll_err, range_err}`.

Resets:

- FDC taps are 0, so a node outputs nothing until it is programmed.
- Gains are 1.0.
- Doppler phase steps are 0.
- Delays are disabled.

## Files

- `rtl/rfe_pkg.sv` holds the shared types and the register map. Compile it
  first.
- Every other file in `rtl/` holds one module, named after the file. The
  top is `rfe_top`, with parameters `P`, `S`, `RTR_D` and `RX_D`.
- `tb/<module>_tb.sv` is the self-checking testbench of each module.
  `tb/rfe_tb_pkg.sv` holds fp16 helpers shared by the testbenches.
- The end-to-end test is `tb/rfe_top_tb_body.svh`. It is included twice:
  - `rfe_top_tb` runs a reduced size: `P=8`, `S=64`, 32-entry RTR, 256-entry
    capture, 7 scenarios.
  - `rfe_top_full_tb` runs the default, full size with 5 scenarios.
- `tb/rfe_exp2_tb.sv` replays the test chip's four-node dynamic
  measurement at full size (see below).

## Simulating

Verilator 5 with `--timing`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rfe_pkg.sv tb/rfe_tb_pkg.sv rtl/*.sv tb/rfe_top_tb.sv \
    --top-module rfe_top_tb -Mdir obj_top
./obj_top/Vrfe_top_tb
```

Replace `rfe_top_tb` with any other `*_tb`, and add the files it needs.
Listing all of `tb/*.sv` works too. Every testbench prints one line:
`TB_RESULT checks=<n> failures=<n>`. Each has a watchdog that ends the run
with a failure if it hangs.

The simulator is two-state, so everything that is read is reset or
initialised. The block testbenches run in seconds. The reduced end-to-end
test takes about 30 s, the full-size one about 35 s and the four-node
scene about 25 s.

## How far it has been checked

**Block testbenches.** Every block has one. Each compares the block with an
independent model written in the testbench:

- The fp16 units are checked against real arithmetic with the same
  truncation rules.
- The FIR, gain and Doppler are checked sample by sample.
- `lddc`, `ddnoc`, `pec`, `gddc` and `simo_fifo` are checked for exact
  delays under random delay sets, including collision groups and prefetch.
- Cycle counts are checked wherever the design has a fixed rate:
  - the 256-cycle Doppler update and its 32-cycle slots;
  - the SU period;
  - the node latencies;
  - exact delays.

Each testbench was also run against a copy of its module with one
deliberate bug inserted, and caught it.

**End-to-end test.** It programs the whole chip through the serial pins
only, with random gains, FDC taps, Doppler steps and delays, and
collision groups in the transmitter. It then checks every node output in
every cycle against the equations above, driven by the links the chip
itself produced. It also checks:

- the Doppler coefficients at each update;
- the scenario length;
- the status word;
- the capture memory contents read back over SPI.

It counts each mechanism and fails if one never happens:

- scenario updates;
- collision groups;
- prefetch writes;
- multicast reads;
- Doppler updates with non-zero rotation;
- generator pulses;
- multi-bounce traffic between the objects;
- SPI writes and reads;
- captures;
- an out-of-range delay.

**Four-node dynamic scene (`rfe_exp2_tb`).** This test reproduces the
measurement the original chip was demonstrated with:

- The transmitter sends a one-sample pulse every 2048 cycles.
- Object 1 and the receiver are 3000 and 3100 samples from the
  transmitter. They therefore form a collision group inside the
  transmitter's SIMO-FIFO.
- Object 2 is 5000 samples from the transmitter.
- The objects are 4000 samples apart. Object 1 is 2500 and object 2 is
  4000 samples from the receiver.
- The Tx→Obj1→Obj2→Rx echo arrives after 11000 samples.
- Object 2's reflectivity halves in the third scenario.
- Only the zero-lag filter tap is used, and Doppler is off.

Every receiver sample is compared with the sum over all propagation paths
of up to 12 object hops. This covers the direct path, single reflections
and the back-and-forth bounces, each with its own gain product and
exactly its summed delay.

The first scenario after start and a few cycles after each SU are excluded
from the sample comparison. These are the cycles in which delay lines
refill from the previous scenario's data.

**Synthesis.** The design passes Verilator lint and the slang front end of
Yosys. Generic synthesis of the full-size top gives about 16.5 k cells,
10.5 k flip-flop bits and 2.46 Mbit of memory (4 × 64 kB sample storage
plus RTR/PB and capture buffers). No timing or area closure was attempted.

## Where this design departs from the chip it models

- **Prefetch from SRAM is missing** (see above). Collision groups whose
  delays exceed the scenario length raise `pf_err`, and their members are
  wrong for the first `off` samples of each scenario.
- **No prefetch in the first scenario** after start.
- **Collision range:** the RTR/PB are 256 entries, as on the chip. Full
  protection would need 1024.
- **Latency:** a node adds 11 to 17 cycles. The original reports about
  0.24 µs per path, roughly 124 cycles at 518 MHz, so its pipeline is far
  deeper. Only the exactness of the delay matters to the emulation, and the
  node's own latency is subtracted.
- **Scenario update edge:** the chip loads its buffered values on the
  falling clock edge; here the rising edge of the SU cycle is used.
- **Doppler:** the original states that one generator serves up to 4
  outputs. The 256/32-cycle timing allows 8 slots, and this RTL simply
  leaves the unused ones idle.
- **Write tree:** the H-tree that distributes writes to the sub-banks is
  drawn as a plain broadcast without pipeline stages.
- **Own choices:** the number rounding rules, register map, serial frame,
  start-up protocol, capture scheme, capture depth, error flags and reset
  values. The original gives none of them.
- **Fixed system:** the system is the fixed four-node graph. Larger
  systems (more objects, several transmitters) would need a new top. Node
  modules take their input and output counts as parameters, but only the
  counts used here are tested.
- **Not modelled:** the clock oscillator and the host software that
  computes scenario parameters. The clock is an input, and the testbenches
  play the host's role over the serial pins.
