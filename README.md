# Clock Duty Cycle Modulation (CDCM) links in SystemVerilog

A readout system spread over many boards needs one reference clock everywhere,
with fixed skew and low jitter, plus a modest stream of synchronous messages
(triggers, commands). The usual approach sends data over a SerDes link. The
receiver then recovers a fast serial clock from the data transitions and
divides it down to the reference frequency. Every step of that chain can add
jitter or an unknown phase offset.

A CDCM link works the other way round. The signal on the wire *is* the
reference clock, at frequency F0. Its rising edges are never moved. The user
data ride on the position of the falling edge, which means on the duty cycle
of each period. Any ordinary PLL can lock on the rising edges and filter the
clock directly. The data are recovered by sampling the line in the middle of
each period, on a clock derived from that PLL by multiplication, not division.
A link that regenerates the stream (a repeater, or "fanout") needs only a PLL
and a row of D flip-flops. It needs no SerDes.

This repository holds synthesizable RTL for the digital side of such a link:

- the CDCM encoders;
- a test transmitter;
- a receiver with a PRBS15 bit-error counter;
- a fanout node that works either as a repeater or as a data extractor;
- a top level that chains transmitter, fanout and receiver.

The analog parts (PLL, clock buffers, optical modules) are represented by a
clock-recovery model that works at one-UI resolution, or by plain wires.

## 1. The CDCM word

Each carrier period is sent as N serial bits, called unit intervals (UI). The
serialiser sends bit 0 of the N-bit word first:

```
bit:    0   1   2 ........................ N-1
        0   1   1 1 1 ... 1   0 0 0 ... 0
            ^ rising edge: fixed, carries the clock
                          ^ falling edge: moves with the data
```

- Bit 0 is always `0` and bit 1 is always `1` (the *header*). The edge between
  them is the clock edge.
- Bits 2..N-1 are the *payload*: a run of ones and then zeros, with exactly one
  1-to-0 step. As a result, a word is fully described by its number of ones,
  `c`, counting the header `1`. The duty cycle is c/N.

Three codes are built. All of them are written "CDCM-N-Q", where Q is the
average number of user bits per period.

| code | ones `c` per word | use |
|---|---|---|
| CDCM-N-1, N even | N/2 − d for a 0, N/2 + d for a 1 | one bit per period; `d` is the modulation depth in UI (`d = 1` is the minimal distortion, ±1/N) |
| CDCM-N-1, N odd | (N−1)/2 − (d−1) for a 0, (N+1)/2 + (d−1) for a 1 | `d = 1` gives 50 % ± 1/2N |
| CDCM-N-1.5, N even | N/2 for idle, N/2 − 1 for a 0, N/2 + 1 for a 1 | idle periods are a pure 50 % clock |
| CDCM-N-Q (unary) | v + 1 for value v, with Q = floor(log2(N−1)) bits | maximal payload P = N−2. The best efficiency is CDCM-5-2 at 2/5 = 40 % |

Worked cases:

- **CDCM-3-1:** `0 1 D`.
- **CDCM-5-2:** payload `000 / 100 / 110 / 111` for the values 0..3.
- **CDCM-4-1.5:** payload `10` for idle, `00` for a 0, `11` for a 1.
- **CDCM-20-1.5:** payload 1⁹0⁹ for idle, 1⁸0¹⁰ for a 0, 1¹⁰0⁸ for a 1.
- **CDCM-20-1** (the main configuration): each depth step moves the falling
  edge by one UI, which is 5 % of the period. Depth 0..9 therefore gives the
  ten settings from 0 % to ±45 %. Depth 0 is a plain 50 % clock whatever the
  data.

When the user bit stream is balanced, the link is DC-balanced too. The optimal
sampling point for a CDCM-N-1 bit is half a period after the rising edge. In
this RTL that is UI index `1 + N/2` (UI 11 for N = 20).

**Manchester pre-encoding** is optional. Each user bit is held for two periods
and sent first as D, then as not-D. This keeps the stream balanced whatever
the data, at half the user rate. It is built as a toggle flip-flop XORed with
the bit.

## 2. How time is modelled: one clock cycle = one UI

This is the central modelling choice, and it affects every module.

In hardware, a CDCM transmitter uses two clocks. Its encoder runs at F0 and
its serialiser at N·F0. The receiver's PLL creates its own F0 and N·F0 from
the line. Here the whole design runs from a **single clock `clk` at the serial
rate N·F0**:

- One cycle is one UI. `ser_o`, `slave_o` and `cdcm_i` carry one bit per
  cycle.
- The carrier F0 appears only as one-cycle strobes: the transmitter's
  `f0_tick`, and the receiver's word-end and capture strobes. It also appears
  as the reproduced-clock outputs `clk_rep_o`, which are 50 % waveforms
  sampled once per UI.
- Because the receiving PLL is locked, the transmitter and receiver clocks
  have the same frequency, so sharing one simulation clock is exact. What the
  model cannot show is the sub-UI phase: jitter, PLL phase offset, path delays
  and the half-UI shift of a retiming flip-flop are all absent.

To put the design in an FPGA at the real rates, you would feed the encoder
words to a SerDes or OSERDES at F0 instead of using `cdcm_piso`. You would
also sample the line with a PLL-derived clock instead of the phase counter.
Everything between those two points is ordinary F0-rate logic.

## 3. Blocks

```
 cdcm_link_top
 ├─ cdcm_transmitter
 │   ├─ prbs15_gen            pattern source
 │   ├─ manchester_enc        optional pre-encoding
 │   ├─ cdcm_n1_encoder ┐
 │   ├─ cdcm_ternary_encoder  ├ word for the selected code
 │   ├─ cdcm_unary_encoder ┘
 │   └─ cdcm_piso             N bits out, bit 0 first; makes f0_tick
 ├─ cdcm_fanout               K slave ports, repeater or extractor
 │   └─ cdcm_clock_recovery
 └─ cdcm_receiver             on slave port 0
     ├─ cdcm_clock_recovery
     ├─ capture flip-flop ── manchester_dec ── prbs15_checker (prbs15_gen)
     └─ cdcm_sipo ── cdcm_decoder
```

`cdcm_pkg` holds the enums `code_e` (`CODE_N1`, `CODE_TERNARY`, `CODE_UNARY`)
and `pattern_e` (`PAT_ZERO`, `PAT_ONE`, `PAT_ALT`, `PAT_PRBS`, `PAT_IDLE`,
`PAT_USER`). It also holds the one-count functions of section 1.

### Transmitter (`cdcm_transmitter`)

The transmitter has three stages:

1. **Data source.** Constant 0 or 1, alternating bits, PRBS15
   (x¹⁵ + x¹⁴ + 1), idle, or the `user_data` input. With Manchester on, the
   source advances on the second period of each pair.
2. **Encoder.** It produces the N-bit word for the code selected at run time.
3. **`cdcm_piso`.** A free-running counter raises `f0_tick` every N cycles.
   The word present at that tick leaves on `ser_o` over the next N cycles,
   bit 0 first, with no gap between words.

`sent_valid`/`sent_data` report, in the tick cycle, the user bit or value
that was put into the word. This is handy for scoreboards. With the N-1 code
and `PAT_IDLE`, the depth is forced to 0, which sends a 50 % clock. The N-1.5
code exists only for even N; for odd N the transmitter falls back to N-1.

### Clock recovery (`cdcm_clock_recovery`): a model, not a PLL

This module keeps what a locked PLL does for the logic around it, at UI
resolution:

- A phase counter `ph` (0..N−1) runs freely. Index 0 is the header `0`.
- It looks only at **rising** edges of the line, and compares only **every
  PREDIV-th** one (PREDIV = 4 by default). This mimics a PLL with an input
  pre-divider, whose phase detector must not see the modulated falling edge.
- A compared edge must land on `ph = 1`. If it does not, the counter jumps so
  that it does, and lock drops.
- Lock is raised after `LOCK_CNT` compared edges in a row on the right phase.
  It drops if no edge arrives for 2·PREDIV periods.

Outputs, all aligned with the bit on `cdcm_i` in the same cycle:

- `ph_o`;
- `word_end_o` (index N−1);
- `cap_o` (index `cap_ui`);
- `clk_rep_o`, the reproduced clock: high for indices 1..N/2, the "0°"
  output.

Acquisition takes at most (2 + PREDIV·(LOCK_CNT+1))·N cycles, which is 440
for the defaults. The model has no loop filter and no jitter transfer. A phase
jump is noticed only at the next compared edge, up to PREDIV periods later.
Until then the old phase is kept, and lock is still reported.

### Receiver (`cdcm_receiver`)

The receiver has two parallel paths behind the recovered clock.

- **Capture flip-flop.** It samples the line at UI `cap_ui` of each period.
  `1 + N/2` is 180° after the rising edge, the theoretical optimum, and is the
  value all the testbenches use. In a real board, path delays shift the best
  phase. The prototype this design follows needed 135°, found by trial. In
  this zero-delay model, 135° (UI 8 for N = 20) lands inside the high time of
  both symbols at depths 1 and 2, so it fails. The top-level test shows this.
  - The captured bits go to an optional `manchester_dec`. This decoder pairs
    bits and slips by one bit after two violating pairs in a row.
  - They then go to `prbs15_checker`. Its state machine loads 15 received bits
    into a local PRBS15 generator (LOAD), requires 32 clean bits (VERIFY), then
    counts mismatches (RUN). Eight errors in a row send it back to LOAD.
    `chk_start`, or loss of lock, clears both 48-bit counters and restarts the
    check. 48 bits hold an 8-hour run at 125 Mbps (3.6·10¹² bits) many times
    over.
- **SIPO + decoder.** This path is needed for codes where more than one UI
  carries data (N-1.5, unary).
  - `cdcm_sipo` collects each word on `word_end`.
  - `cdcm_decoder` counts its ones and checks that the word is the legal
    pattern `0 1…1 0…0`.
  - For N-1 and N-1.5: `c > N/2` means 1, `c < N/2` means 0, and `c = N/2`
    means idle. For unary: value = c − 1.

Latency, counted from the transmitter's `f0_tick`:

- The captured bit is valid after `1 + cap_ui + 1` cycles, plus one cycle per
  repeater in the path. Through the top level's single fanout this is 14
  cycles.
- A decoded word is valid N + 1 cycles after the tick, plus one per repeater.
  Through the top level this is 22 cycles.

Both latencies are fixed by construction. The end-to-end test checks that
they are identical after ten resets.

### Fanout (`cdcm_fanout`)

The fanout contains the clock recovery plus one D flip-flop per slave port
(K = 2 by default, matching a board with one master and two slave ports). The
`extract` input selects the function. On a real board this selection is the
frequency of the PLL output that clocks the flip-flops:

- `extract = 0`, **repeater**. The flip-flops are clocked at the UI rate, so
  every UI is re-timed. The slave ports carry the CDCM stream one UI later.
  Repeaters can be chained or built into trees.
- `extract = 1`, **data extractor**. The flip-flops are clocked once per
  period at mid-period (UI 1 + N/2). The slave ports carry the plain user bit
  stream of a CDCM-N-1 link, one bit per period, with no carrier left.

## 4. Top level (`cdcm_link_top`)

The chain is transmitter → fanout → receiver on `slave_o[0]`. The other slave
ports, the serial line and every status signal are outputs. Parameters:

| parameter | default | meaning |
|---|---|---|
| `N` | 20 | UI per carrier period (CDCM-20-1, as in the 20-bit SerDes test transmitter) |
| `K` | 2 | fanout slave ports |
| `PREDIV` | 4 | clock-recovery pre-divider |
| `DW`, `QW` | derived | `$clog2(N)`; unary bits floor(log2(N−1)) = 4 |

Control inputs (`code`, `pattern`, `manchester_en`, `depth`,
`fanout_extract`, `rx_cap_ui`) are meant to be quasi-static. The receiver's
Manchester and unary modes follow the transmitter's settings. In extractor
mode the slave ports carry no carrier, so the receiver's status is
meaningless.

## 5. Departures and limits

- **Sub-UI timing is not modelled** (section 2). Jitter, skew in picoseconds,
  PLL lock range and loop bandwidth cannot be studied with this RTL.
- **One word rotation only.** The header is `01`, sent first, with a rising
  sensitive edge. The source design also allows any rotation of the word and
  inverted (falling-edge) variants.
- **CDCM-8-1 with Manchester.** The reference drawing of this transmitter puts
  3 or 5 ones in 8 UI (37.5 / 62.5 %). Its text says 43 / 57 %. This RTL
  follows the one counts (N = 8, depth 1 gives 3 and 5 ones).
- **The fanout re-times at the input's own UI rate.** Re-sampling a stream at
  a different multiple is not modelled. The demonstrator boards used this to
  turn a CDCM-20-1 input into a CDCM-3-1 output. A CDCM-3-1 chain does work
  with `N = 3`.
- **The fanout never alters the data.** Per-port data modification by an
  optional FPGA is not built.
- **These parts are this design's own additions.** They do not describe an
  existing implementation:
  - the receiver-side Manchester decoder;
  - the word decoder for N-1.5 and unary codes;
  - the PRBS checker's state machine details;
  - the lock rule of the clock-recovery model;
  - run-time selection of the code at one N.

## 6. Simulation

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<m>`. Each one also has a watchdog. With
Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cdcm_pkg.sv \
          tb/tb_cdcm_link_top.sv --top-module tb_cdcm_link_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_cdcm_link_top` | Whole link at default parameters. It exercises and counts: lock; ten resets, each relocking at the same 14-UI latency; PRBS15 error-free at depths 1..9; depth 0 as idle; 135° capture failing; Manchester; N-1.5 and unary decoding; repeater and extractor fanout. |
| `tb_cdcm_topologies` | A 4-hop repeater chain and a 2-level tree (trunk, two branches, two leaves) at N = 20, plus a CDCM-3-1 chain. Checks error-free leaves, one UI per hop, and zero relative skew between the tree leaves. |
| `tb_cdcm_transmitter` | Rebuilds the serial words for every code, pattern and depth. Checks the PRBS15 recurrence and Manchester pairs. |
| `tb_cdcm_receiver` | Stream built by the testbench. Checks every depth, counts injected errors one for one, shows the wrong capture phase, and checks Manchester, ternary and unary decoding. |
| `tb_cdcm_fanout` | Repeater copy one UI later; extractor update at mid-period. |
| `tb_cdcm_clock_recovery` | Lock time bound, phase/strobe alignment under random modulation, re-lock after phase jumps, loss of lock without edges. |
| `tb_cdcm_n1_encoder`, `tb_cdcm_ternary_encoder`, `tb_cdcm_unary_encoder` | Words against the code tables of section 1, for N = 3, 4, 5, 8, 16, 20. |
| `tb_cdcm_piso`, `tb_cdcm_sipo`, `tb_cdcm_decoder`, `tb_manchester_enc`, `tb_manchester_dec`, `tb_prbs15_gen`, `tb_prbs15_checker` | Leaf blocks. The PRBS generator is checked over its full 32767-bit period. |

To run another testbench, replace both the file and the `--top-module`
name. Each testbench prints its checks and ends with `$finish`. A watchdog
stops it with a failure if it hangs.

To change the design, set the top-level parameters from the command line when
the top itself is the Verilator top, for a lint or synthesis run:

```
verilator --lint-only -Irtl rtl/cdcm_pkg.sv rtl/cdcm_link_top.sv \
          --top-module cdcm_link_top -GN=8 -GPREDIV=2
```

The testbenches instantiate the top with its defaults. Their expected values
(the 14-UI latency, capture UI 11, one counts of 10 ± depth) are written for
N = 20. For another N, copy the instance and its expected values, as
`tb_cdcm_topologies` does for N = 3. The code, pattern, depth, Manchester
mode, fanout mode and capture phase are run-time inputs and need no rebuild.

The end-to-end test runs in a few seconds. Simulated runs cover 10⁴ to 10⁵
bits per configuration; 8-hour error-rate runs are out of reach of simulation.
