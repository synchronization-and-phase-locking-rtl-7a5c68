# Digital phase-locked drive clocks for a dual-harmonic AC dipole

The Mu2e proton beam reaches its production target as short pulses
1,695 ns apart. Any protons between pulses must be removed to a level of
about 10^-10 relative to the pulses. The last stage of that cleanup is an AC
dipole: a magnet whose field sweeps the beam into a collimator except near
the field's zero crossings. A pulse passes only if it arrives at a node.

The magnet is driven by two resonant supplies:

* a **294.985 kHz carrier**, whose half-period is exactly the pulse spacing
  of 1,695 ns, so that a node falls on every pulse;
* its **15th harmonic at 4.42 MHz**, added on top to flatten the field
  around each node so that the pulses themselves are not deflected.

Both supplies need a drive clock that changes state exactly when a pulse is
due. Whenever beam returns after a pause, both clocks must jump in phase to
match it.

This RTL makes both clocks from a single 100 MHz clock using only ordinary
logic, with no vendor PLL. It follows the control scheme described by
R. Hensley, E. Prebys and S. Tripathy ("Synchronization and Phase Locking of
Resonant Magnet Power Supplies for Mu2e Experiment at Fermilab"). The
SystemVerilog, and all the details that description leaves open, are this
design's own. The places where this design had to choose are listed under
[Where this design departs from or extends the description](#where-this-design-departs-from-or-extends-the-description).

## The numbers the design is built on

| quantity | value | in 100 MHz cycles |
|---|---|---|
| input clock | 100 MHz, 10 ns | 1 |
| output time grid (both clock edges used) | 5 ns | 0.5 |
| carrier half-period (pulse spacing) | 1,695 ns | 169.5 |
| carrier period | 3,390 ns | 339 |
| 4.42 MHz ideal period | 226 ns | 22.6 |
| 4.42 MHz ideal half-period | 113 ns | 11.3 |
| supercycle: five 4.42 MHz periods | 1,130 ns | 113 |
| phase accumulator | 12 bits, step 181 | |

The ideal 4.42 MHz half-period of 113 ns is not a multiple of 5 ns, so no
single 4.42 MHz edge can land at its ideal time. The design accepts that.
What it guarantees is that, every 1,695 ns, both clocks switch at exactly
the same instant, and that instant is the pulse centre.

## The 4.42 MHz generator (`hf_clkgen`)

This is the part that needs the most care.

### Phase accumulator

A 12-bit accumulator `phase` grows by 181 per input cycle, which is
4096 × 10 ns / 226 ns = 181.239 rounded down. One wrap of the accumulator is
one output period, about 22.6 input cycles.

The generator looks one step ahead. A new output period begins, with a
rising edge, in the cycle where the *next* addition would carry:
`phase >= 4096 − 181 = 3915`. That places each rising edge on the input cycle
at or just before its ideal time.

After 113 input cycles, exactly five ideal periods, the accumulator is forced
back to zero. Rounding 181.239 down to 181 loses 0.239 counts per cycle,
which adds up to 27 counts over 113 cycles. The restart discards that error
before it can grow. Because 27 is well under one 181-count step, no edge
moves because of it.

Over one supercycle (tick = input cycle 0 … 112) the accumulator gives:

| period | starts at tick | phase at start | length (cycles) | falling edge at tick |
|---|---|---|---|---|
| 1 | 0 | 0 (restart) | 22 | 11 |
| 2 | 22 | 3982 | 23 | 33.5 |
| 3 | 45 | 4049 | 22 | 56 |
| 4 | 67 | 3935 | 23 | 78.5 |
| 5 | 90 | 4002 | 23 | 101.5 |

That is 22 + 23 + 22 + 23 + 23 = 113 cycles, or 1,130 ns for five periods,
an average of 226 ns.

### Where the falling edge goes

Each half-period is either 110 ns or 115 ns, and four 110s plus six 115s add
up to 1,130 ns. A 220 ns period can therefore only be 110 + 110, and a 230 ns
period only 115 + 115. So the falling edge goes 11 cycles into a 22-cycle
period, or 11.5 cycles into a 23-cycle period. The .5 means a **falling**
edge of the 100 MHz clock.

The generator must know the period's length halfway through it. Eleven
cycles in, the period will end after 22 cycles exactly when the look-ahead
carry will fire 11 steps later, which means

    phase >= 4096 − 12 × 181 = 1924   →  fall now (110 ns)
    otherwise                          →  fall on the next falling clock edge (115 ns)

A small counter `k_q` tracks the cycle position within the period. In
15 consecutive periods (3,390 ns) there are nine of 230 ns and six of 220 ns.

### Phase jump

A one-cycle `restart` makes the next cycle tick 0: the accumulator, the tick
counter and the period position are cleared, and the output rises at once.
The generator runs freely at all other times, including during beam gaps.

## Putting edges on half cycles (`dual_edge_reg`)

Both generators drive their output through a one-bit register that can
change on either clock edge. It holds two flops and an XOR:

    rising edge:   p <= val_pos ^ n
    falling edge:  n <= val_neg ^ p
    q = p ^ n

Each flop reads the other while that one is stable, so every write sets an
**absolute** output level rather than toggling it. A phase jump therefore
never inverts an output by accident.

A request for the falling edge is registered at the rising edge before it,
so it lands half a cycle after requests for the rising edge. Only clk clocks
anything; no generated clock drives a flop.

The generators never write the output directly. Each cycle they announce, as
`ev_sel` (`EDGE_NONE`, `EDGE_POS` or `EDGE_NEG`) plus `ev_level`, the
transition to make at the coming rising edge or at the falling edge after
it. The output register makes that transition one register stage later.

## The carrier (`lf_clkgen`)

The carrier's half-period is 7.5 periods of the 4.42 MHz clock, which is 15
of its edges. `lf_clkgen` counts the 4.42 MHz edge announcements, not the
clock itself. On every 15th edge it announces its own transition, of the
same kind (rising or falling clock edge), so the two outputs switch at the
same instant. Because 15 is odd, carrier transitions fall alternately on a
rising and a falling edge of the 4.42 MHz clock.

**Which edge to start from matters.** Within a supercycle the 4.42 MHz edges
are at ticks 0, 11, 22, 33.5, 45, 56, 67, 78.5, 90 and 101.5. A carrier
half-period is 169.5 ticks, or 56.5 modulo 113. Only three pairs of edges are
exactly 56.5 ticks apart: (22, 78.5), (45, 101.5) and (90, 33.5).

If the carrier started on the rise at tick 0, its half-periods would come out
as 1,690 and 1,700 ns. The design therefore makes its first carrier
transition after a phase jump on edge 2, the rise at tick 22
(`FIRST_LF_EDGE = 2`). From then on every carrier half-period is exactly
1,695 ns, and each carrier transition coincides with a 4.42 MHz transition,
as the dual-harmonic waveform needs at its nodes.

After a restart the carrier output is set high, then first falls at tick 22
on a 4.42 MHz rising edge, then rises on a falling edge, and so on. After
`rst` it starts low, so its first transition is a rise.

## Phase jumps and their latency (`phase_sync`)

Beam arrives in eight spills in 380 ms, separated by 5 ms gaps, then nothing
for 1,020 ms, giving a 1.4 s macro-cycle. During a gap the clocks drift out
of phase with the beam that will return.

An upstream timing signal, `beam_sync` (active high, asynchronous), marks
each return. `phase_sync` passes it through a two-flop synchronizer and turns
its rising edge into a single `restart` pulse. It also counts the jumps in
`jump_count`.

The latency from `beam_sync` to the first carrier node is fixed:

| step | time after the first clock edge that samples `beam_sync` |
|---|---|
| synchronizer, edge detector | `restart` high after 2 more edges (20 ns) |
| restart taken, tick 0 begins | +10 ns |
| 4.42 MHz rise (start of supercycle) | +10 ns |
| first carrier transition (tick 22) | +220 ns |

In total that is 260 ns from the sampling edge, or 260–270 ns from an
asynchronous `beam_sync` edge. The 10 ns uncertainty is the usual
synchronizer ambiguity. The timing system must therefore raise `beam_sync`
about 270 ns before the first pulse centre.

The signal's own propagation delay from upstream still has to be measured on
the real installation. That delay is not compensated here; see the next
section.

## Where this design departs from or extends the description

* **Clock-enable cascading.** The original scheme clocks the carrier divider
  from the generated 4.42 MHz clock. Here the divider runs on the 100 MHz
  clock and counts edge announcements instead. The output edges land at the
  same instants, and the design has a single clock domain.
* **How the falling edge is chosen.** The description only says the logic
  "finds" whether 110 ns or 115 ns is right. The look-ahead rule above, the
  threshold of 1924 and the period-position counter are this design's way
  of doing it.
* **Carrier start edge** (`FIRST_LF_EDGE = 2`) and the carrier level after a
  jump are this design's choices, made so that every half-period is
  1,695 ns.
* **Duty cycle.** The description remarks that the 4.42 MHz duty cycle is
  not exactly 50 %. With 110/115 ns half-periods, each individual period here
  is symmetric. What is uneven is the period length, 220 or 230 ns.
* **Trigger format.** The form of the upstream timing signal is not given.
  This design takes a rising edge, uses a two-flop synchronizer, and adds a
  jump counter.
* **Not built:** compensation of the trigger's propagation delay, which is
  left open in the description; the power supplies, magnets, timing system
  and the FPGA board.
* **Reset:** synchronous, active high. It is not specified in the
  description.
* **Monitoring outputs** of the top (`super_start`, `phase_jump`,
  `jump_count`, `hf_tick`, `hf_phase`) are additions.

## Files and interfaces

| file | contents |
|---|---|
| `rtl/acd_pkg.sv` | constants (12-bit accumulator, step 181, 113-cycle supercycle, 11-cycle half, 15 edges, first carrier edge) and the `edge_sel_e` type |
| `rtl/dual_edge_reg.sv` | output register for both clock edges |
| `rtl/hf_clkgen.sv` | 4.42 MHz phase-accumulator generator |
| `rtl/lf_clkgen.sv` | 295 kHz carrier cascaded from the 4.42 MHz edges |
| `rtl/phase_sync.sv` | synchronizer and phase-jump trigger |
| `rtl/acd_clkgen_top.sv` | top level |

Top-level ports of `acd_clkgen_top`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 100 MHz |
| `rst` | in | 1 | synchronous reset, active high |
| `beam_sync` | in | 1 | beam-return timing signal, asynchronous |
| `hf_clk` | out | 1 | 4.42 MHz drive clock |
| `lf_clk` | out | 1 | 295 kHz drive clock |
| `super_start` | out | 1 | first cycle of each 113-cycle supercycle |
| `phase_jump` | out | 1 | one-cycle pulse when the phase is restarted |
| `jump_count` | out | 16 | phase jumps since reset (wraps) |
| `hf_tick` | out | 7 | cycle within the supercycle |
| `hf_phase` | out | 12 | accumulator value |

`hf_clk` and `lf_clk` change on both edges of `clk`. Anything that samples
them inside the FPGA must allow for that. They are meant for output pins.

The generators' parameters (`W`, `INC`, `SUPER`, `HALF` in `hf_clkgen`;
`HALF_EDGES`, `FIRST_EDGE` in `lf_clkgen`) default to the values above. To
retarget another input clock, choose `INC` ≈ 2^W × T_in / T_out and a
supercycle `SUPER` that holds a whole number of output periods. Then
recheck two things: the half-period rule (`HALF`), and which carrier start
edge gives equal carrier half-periods.

## Verification

Every testbench checks itself. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_dual_edge_reg` | 4,000 random cycles against a reference model, sampled in both half-cycles |
| `tb_hf_clkgen` | every half-period against the list 110,110,115,115,110,110,115,115,115,115 ns; nine 230 ns and six 220 ns periods in each 15; accumulator = 181·tick mod 4096 and lag under 28 counts on every cycle; rise one cycle after reset and after a jump; a jump made while the output is high |
| `tb_lf_clkgen` | every carrier half-period is 1,695 ns and spans 15 4.42 MHz edges; each carrier edge coincides with a 4.42 MHz edge; alternation between rising and falling 4.42 MHz edges; first edge after reset and after jumps made from either output level |
| `tb_phase_sync` | 300 asynchronous `beam_sync` pulses of random length: exactly one `restart` each, in the expected cycle; jump count |
| `tb_acd_clkgen_top` | end to end: 2 × 8 compressed spills with gaps that are not multiples of the carrier period. At each of 960 beam pulse centres both clocks switch exactly then. Counts phase jumps, jumps that moved the phase, falling-edge (115 ns) transitions, carrier edges on a falling 4.42 MHz edge, supercycles, and 22- and 23-cycle periods; each must occur |
| `tb_beam_macrocycle` | the real macro-cycle at full time scale: 8 spills of 43.125 ms (25,442 pulses) with 5 ms gaps, 1,020 ms beam off, then the next spill. All 228,978 pulse centres are checked as above. Runs about a minute |

The spill length is derived, not given: (380 ms − 7 × 5 ms) / 8.

The top has no parameters, so `tb_acd_clkgen_top` and `tb_beam_macrocycle`
both exercise the design exactly as synthesized.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -y rtl -y tb +libext+.sv rtl/acd_pkg.sv tb/tb_acd_clkgen_top.sv \
        --top-module tb_acd_clkgen_top -o sim
    ./obj_dir/sim

Swap in any other testbench name. The testbenches measure edge times with
`$realtime` and so need `--timing`.

The logic is small: about 60 flip-flops and 70 word-level cells for the
whole top.
