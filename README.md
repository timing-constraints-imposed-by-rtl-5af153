# Single-cycle feed-forward logic for photonic measurement-based quantum computing

In measurement-based quantum computing (MBQC) a quantum circuit is run by
measuring the qubits of a large entangled "cluster state" one by one.
Each measurement gives a random bit. Most measurement bases therefore have
to be adapted to earlier outcomes: a qubit meant to be measured at angle
θ is actually measured at φ = (−1)^s·θ, where the sign bit s is a parity
of some earlier outcomes. The outcomes also leave behind known Pauli
errors on each logical qubit, the *byproduct operators* Z^z X^x. These
have to be tracked as the circuit goes along and fixed up at gate
boundaries.

With photons as qubits, the cluster state arrives one column at a time,
one column per tick of the photon clock Xp, and a photon cannot be held
still. The outcomes of column n must therefore be turned into the sign
settings for column n+1 within one photon-clock period. That delay is set
by an optical delay line, so the speed of this logic bounds the clock
rate of the whole quantum computer.

This RTL is the digital part of such a system. It has one unit cell per
logical qubit, that is, per row of the cluster state. Each unit cell
does the following in every photon-clock cycle:

* takes one detector pulse (the outcome m of the photon just measured);
* outputs the sign bit s for the next photon in its row, a few gate delays
  after the outcome has been sampled;
* keeps the byproduct pair b = {x, z} up to date, using its own outcome and
  the outcomes of the rows directly above and below;
* at gate boundaries, applies the corrections that move the byproduct
  operators through the next gate. For a CNOT this means exchanging bits
  with the partner row; for a one-qubit gate it means taking a snapshot.

All of this is driven by a 16-bit program word per row and per round,
read from a small memory. The hardware knows nothing about gates: the
gate set lives entirely in the program. Two gates are supported by the
programs shown here: the arbitrary one-qubit rotation
U = Rx(ζ)Rz(η)Rx(ξ) (four measurements) and the CNOT between neighbouring
rows (six measurements). The identity ("wire", two measurements) pads
them to equal length.

The published design this follows reached 190 MHz on a Xilinx 7-series
FPGA. The model here keeps that clocking scheme; the default clock model
parameters are that operating point.

## The three clocks of a measurement round

This is the part that is hardest to get right. Everything happens within
one period of Xp. Two internal clocks are derived from Xp at fixed phase
offsets:

```
      0°                 180°              360°
 Xp  ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾__________________   photon arrives, word read on ↑
 m   ___‾‾_______________________________   detector pulse sets the latch
 Xs  ‾‾‾‾__________________‾‾‾‾‾‾‾‾‾‾‾‾‾‾   ↑ at 220°: sample, compute s and b
 Xr  ______________________________‾‾‾‾__   ↑ at 300°: corrections, clear latch
```

(One character is 10°. Xs has a 50 % duty cycle; Xr is high for only
40°, see the latch section below.)

| Edge | What is registered | Block |
|------|--------------------|-------|
| Xp ↑ | program word of this round (`rd_data <= mem[addr]`), address + 1, `run <= enable` | `program_memory`, `program_counter` |
| pulse | measurement latch set (level) | `measurement_latch` |
| Xs ↑ | byproduct pair: `ops <= ops ^ update ^ cc_term` | `byproduct_calc` |
| Xs ↑ | outcome shifted into the 3-bit history; mask A_m registered | `adaptive_setting` |
| Xs ↑ | stored-byproduct term of s registered (`byp_term`) | `stored_ops` |
| after Xs | `s = ^(A_m & S) ^ byp_term`, combinational | `adaptive_setting` |
| Xr ↑ | commutation/constant term `cc_term` computed from the partner's fresh pair | `comm_correct` |
| Xr ↑ | stored pair `ops_stored <= ops` if C[0] | `stored_ops` |
| Xr high | latch cleared | `measurement_latch` |

A few consequences are worth spelling out:

* **s is a round ahead.** The s that appears after Xs of round k is the sign
  for the photon measured in round k+1. It has to be stable through the
  next Xp edge, but the program word changes on that edge. That is why
  A_m and the A_b term are registered on Xs rather than used straight
  from the program word.
* **A correction is applied one Xs edge late.** The CNOT correction needs the
  partner's byproduct pair *after* this round's update. That pair only
  exists after Xs, so the correction term is computed on Xr and folded in
  at the *next* Xs edge, together with that round's ordinary update. A
  correction is therefore requested in the program word of the last
  round before a gate boundary. It takes effect at the first Xs of the
  new gate.
* **The snapshot is taken on Xr** of the last round of the previous gate.
  It is the pair after that round's update and before any correction.
* **Where timing is tight.** Two paths limit the clock rate. The first
  runs from the detector pulse to the byproduct register (Xp → Xs). The
  second runs from the Xs registers to the s pin, which must be valid
  before the next Xp. Moving the Xs phase shifts time from one path to
  the other. The phases 220°/300° are the published balance point at
  190 MHz. This RTL has no notion of delays; the clock model only places
  the edges.

## The program word

One 16-bit word per row per round, most significant field first:

```
 15     11 10  9 8     6 5     3 2     0
 [   C   ] [A_b] [ A_m ] [ B_x ] [ B_z ]
```

* **B_z, B_x**: which of the three latched outcomes {above, own, below}
  (bits 2, 1, 0) are XORed into z and x in this round.
* **A_m**: which entries of the outcome history S are XORed into s. S[2] is
  the outcome of *this* round, S[1] the previous one, S[0] the one before.
* **A_b**: which bits of the stored pair {x_s, z_s} (bits 1, 0) are XORed
  into s.
* **C**: control for gate boundaries.

| C bit | Meaning |
|-------|---------|
| 0 | store: copy the live pair into the stored pair (on Xr) |
| 1 | CNOT commutation correction; then bit 2 = this row is the control, bit 3 = the partner row is above (else below) |
| 4 | add constants; then bit 2 is added to z and bit 3 to x |

The control row takes z ^= z_target; the target row takes
x ^= x_control. Each row only reads its partner's pair, so the two rows
of a CNOT carry separate, mirrored C fields. Bits 1 and 4 must not both
be set; an assertion checks this, and if both are set anyway the
correction wins. C = 0 does nothing. The +1 constant of the CNOT pattern
is added with C = 10100 (add 1 to z) in the round that needs it.

### The words for the supported gates

Rounds are numbered from the first measurement of the gate. "Base" words
carry no boundary request. For a boundary request, OR one of the
following into the last word of the *previous* gate:

| Next gate on this row | OR into the last word of the previous gate |
|--------------------|-------------------------------|
| U | `0800` (store) |
| CNOT control, target below | `3000` |
| CNOT control, target above | `7000` |
| CNOT target, control above | `5000` |
| CNOT target, control below | `1000` |

| Gate (row) | Words, round 0 … |
|------------|------------------|
| wire (identity) | `0002 0010` |
| U | `0302 0510 0342 0010` |
| CNOT, control above target | control `0003 0010 a013 0002 0012 0010`, target `0002 0030 0022 0010 0002 0010` |
| CNOT, control below target | control `0006 0010 a016 0002 0012 0010`, target `0002 0018 000a 0010 0002 0010` |

For U, the three sign settings come out as s1 = m0 ⊕ z_s, s2 = m1 ⊕ x_s and
s3 = m0 ⊕ m2 ⊕ z_s. Here (x_s, z_s) is the pair stored at the start of the
gate. The pair then updates as z ^= m0 ⊕ m2 and x ^= m1 ⊕ m3. A CNOT
needs no adaptive signs (all its measurements are X or Y), so its A
fields are zero. Its byproduct update mixes the two rows, with c and t
denoting the outcomes of the control and target rows:

```
z_c ^= 1 ⊕ c0 ⊕ c2 ⊕ c3 ⊕ c4 ⊕ t0 ⊕ t2      x_c ^= c1 ⊕ c2 ⊕ c4 ⊕ c5
z_t ^= t0 ⊕ t2 ⊕ t4                          x_t ^= c1 ⊕ c2 ⊕ t1 ⊕ t3 ⊕ t5
```

The programs spread these sums over the six rounds. Only one row's
outcome can be seen per neighbour per round, so, for example, t0 enters
z_c through the B_z "below" bit in round 0.

### Worked example

This is U on qubit 0 followed by a CNOT with qubit 0 as control and
qubit 1 as target, over ten rounds. The outcomes are arbitrary; the
pair b is printed as {x, z}. The end-to-end testbench replays it on
every pair of rows and requires every entry to match.

| Round | m0 | P0 | s0 | b0 | m1 | P1 | s1 | b1 |
|---|---|------|---|----|---|------|---|----|
| 0 | 0 | 0302 | 0 | 00 | 0 | 0002 | 0 | 00 |
| 1 | 1 | 0510 | 1 | 10 | 1 | 0010 | 0 | 10 |
| 2 | 1 | 0342 | 1 | 11 | 0 | 0002 | 0 | 10 |
| 3 | 0 | 3010 | 0 | 11 | 1 | 5010 | 0 | 00 |
| 4 | 1 | 0003 | 0 | 10 | 0 | 0002 | 0 | 10 |
| 5 | 0 | 0010 | 0 | 10 | 1 | 0030 | 0 | 00 |
| 6 | 0 | a013 | 0 | 10 | 0 | 0022 | 0 | 00 |
| 7 | 1 | 0002 | 0 | 10 | 1 | 0010 | 0 | 10 |
| 8 | 1 | 0012 | 0 | 01 | 0 | 0002 | 0 | 10 |
| 9 | 1 | 0010 | 0 | 11 | 0 | 0010 | 0 | 10 |

Round 3 carries the boundary requests. `3010` is "x ^= own; correct as
control, partner below"; `5010` is the same for the target with the
partner above. Round 6 of the control is `a013`: C = 10100, which adds
the constant 1 to z, with B_x = own and B_z = own + below.

## Measurement latch

The detector amplifier gives a short pulse, not a level. `measurement_latch`
is a set/reset latch: the pulse sets it and Xr clears it, with reset
taking priority. It is a real level-sensitive latch, as the FPGA input
latch in the original design was. While Xr is high the latch is held
clear, so a photon arriving during that time would be lost. The clock
model therefore keeps Xr high for only 40° of the cycle, which ends the
high time before the next Xp edge. Synthesis reports one latch bit per
row; that latch is intended.

## Unit cell and neighbours

```
            m_above, ops_above (row i-1)
                     │
 outcome[i] ─► latch ─► control_system ──► s[i], b[i]
                     │        ▲
 program_memory ─────┘        │ program word (read on Xp)
                     │
            m_below, ops_below (row i+1)
```

`qubit_cell` holds a latch, a program memory and a `control_system`. In
`mbqc_core`, row i sees row i−1 as "above" and row i+1 as
"below". Each cell sends its latched outcome and live byproduct pair to
both neighbours. Row 0 has nothing above it, and row N−1 has nothing
below it; those inputs read as 0. `control_system` only splits the program
word and wires four parts together:

* `byproduct_calc`: the pair (x, z) and its Xs update;
* `comm_correct`: the Xr term for CNOT correction and constant addition;
* `stored_ops`: the snapshot register and its registered term of s;
* `adaptive_setting`: the outcome history and s.

All rows share one `program_counter`. Every row reads the word at the same
address, and each row's memory holds its own program.

## Top-level interface (`mbqc_digital_system`)

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `xp` | in | 1 | photon clock; one measurement round per period |
| `rst` | in | 1 | asynchronous, active high; clears all registers and the address |
| `enable` | in | 1 | sampled on Xp; a round runs in every Xp cycle that starts with enable high |
| `locked` | out | 1 | clock model has locked |
| `outcome` | in | N | detector pulse per row |
| `s` | out | N | sign setting for the next measurement of each row |
| `b` | out | N × {x, z} | byproduct pair of each row |
| `prog_we` | in | N | write strobe per row's program memory (on Xp) |
| `prog_waddr` | in | log2 DEPTH | write address |
| `prog_wdata` | in | 16 | program word |

Parameters: `N` (rows, default 20) and `DEPTH` (program words per row,
default 256).

To use the design:

1. Pulse `rst`.
2. Write every row's program through the load port.
3. Wait for `locked`.
4. Raise `enable`. Round k then uses word k.

Dropping `enable` pauses the program. The address and all state are held,
and outcomes arriving during the pause are ignored. When the program runs
past `DEPTH` the address wraps to 0.

The published design has 4N + 4 pins: per row m, s and the two byproduct
lines, plus Xp, locked, reset and enable. Apart from the load port, this
top has exactly those.

## Clock model

`clock_manager` is a behavioural model of the FPGA clock manager that
makes Xs and Xr. It is not synthesizable. Every Xp edge schedules Xs at
220° and Xr at 300° of the configured input period, and `LOCKED` rises
after four input edges. The phases, the period and the Xr high time are
parameters.

The top, `mbqc_digital_system`, is just this model plus `mbqc_core`. The
core holds all rows, the program counter and the neighbour wiring, and
takes Xs and Xr as inputs. To synthesize the design, synthesize
`mbqc_core` and drive its clocks from the vendor's clock macro, set to
the same phases. At N = 20 and DEPTH = 256, a generic Yosys synthesis of
the core gives about 690 cells and 269 flip-flops (13 per row plus the
counter). It also gives 20 latches and 20 × 4096 bits of program memory.

## Where this RTL departs from the published design, or fills gaps

* **Order of the outcome history.** The prose of the original describes
  m0 as the most recent outcome, with the mask bit A_m[i] selecting m_i.
  Its worked example program only produces the printed results when
  A_m[2] selects the newest outcome. The RTL follows the worked example.
* **Program storage.** The original used a ROM filled at build time. Here
  the memory is an array with a write port, and its depth (256) is a
  choice of this design; the original gives none.
* **Program counter and enable.** The original shows only a program
  address bus and an enable pin. The counter, and the use of the
  registered enable as a clock enable for all round logic, are this
  design's choices.
* **Latch release.** The original speaks only of "the rising edge of Xr"
  clearing the latch. The short Xr high time is this model's choice.
* **Reset.** The original omits reset from its diagrams. Here it is
  asynchronous and active high, and it clears every register. The program
  memory contents are not cleared.
* **Constant addition versus correction.** The original says C[1] and C[4]
  are mutually exclusive. Here an assertion checks that rule, and the
  correction wins if it is broken.
* **Not included.**
  * The serial readout of the byproduct operators. The original mentions
    it only as a way to save pins.
  * The analog side: detector amplifier, DACs and modulator drivers that
    turn s and θ into voltages, delay lines, and the cluster-state source.
    θ itself is not stored here; it belongs to the analog stage.
  * The final computational-basis measurement column. Its outcomes need
    only x of the final byproduct pair, which is available on `b`.

## Verification

Every module has its own self-checking testbench in `tb/`. Each one
prints `TB_RESULT checks=… failures=…` and has a watchdog. The expected
values are computed independently of the RTL structure, mostly from the
closed-form pattern equations above.

| Testbench | What it checks |
|-----------|----------------|
| `tb_measurement_latch` | set by pulse, held, cleared by Xr, reset wins over set |
| `tb_program_counter` | increments only while enabled, wraps, `run` follows enable |
| `tb_program_memory` | random writes and registered reads |
| `tb_byproduct_calc`, `tb_comm_correct`, `tb_stored_ops`, `tb_adaptive_setting` | each block against a reference model, random stimulus |
| `tb_control_system` | the worked example on two instances, plus random U gates |
| `tb_qubit_cell` | the worked example through latch and memory, plus neighbour wiring |
| `tb_clock_manager` | Xs/Xr edge positions (220°, 300°) and lock |
| `tb_mbqc_digital_system` | full size (N = 20, DEPTH = 256): the worked example on all ten row pairs, then 40 random layers of wires, U gates and CNOTs in both orientations, with a pause |
| `tb_fig1_circuit` | N = 3 and N = 1 builds running U + identity alongside a CNOT, 40 times over |

The full-size testbench counts how often each mechanism fires, and it
fails if any of them never fires. The mechanisms are: store, the four
correction directions, constant addition, a non-zero s, latch clearing
and an enable pause.

The system testbenches run Xp at 190 MHz, a period of 5.26 ns. Each
photon's pulse arrives 0.5 ns after an Xp edge. s and b are checked at
5.0 ns, after Xr and before the next photon. This checks that every
round completes within one clock period.

The testbenches run with a two-state simulator and registers starting at
random values, so every run also checks reset.

Limits on trust:

* Timing is not modelled. The clocks are ideal and the logic has no
  delay, so nothing here confirms the 190 MHz figure.
* The programs are checked against the pattern equations as written above
  and against the published worked example. They have not been checked
  against a quantum-state simulation.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/mbqc_pkg.sv tb/tb_mbqc_digital_system.sv --top-module tb_mbqc_digital_system
./obj_dir/Vtb_mbqc_digital_system
```

To run a different test, substitute any other testbench name. Add
`+verilator+rand+reset+2` to the run to start from random register
values. `-Wno-fatal` is needed because Verilator reports the intended
measurement latch (NOLATCH) once the latch is inlined into a larger
design.

To change the design:

* The number of rows and the program depth are the top's `N` and `DEPTH`
  parameters.
* The word layout and the C-field bit positions are in `rtl/mbqc_pkg.sv`.
* The clock phases are parameters of `clock_manager`.
