# SPINBIS — MTJ-based stochastic-computing Bayesian inference engine

This repository holds a SystemVerilog model of SPINBIS, described in
"SPINBIS: Spintronics based Bayesian Inference System with Stochastic
Computing". SPINBIS solves a Bayesian inference problem with stochastic
computing. Each probability is a random bitstream whose share of ones equals
the probability. An AND gate multiplies two independent streams.

The bitstreams come from a fixed array of stochastic bitstream generators
(SBGs). Each SBG is a magnetic tunnel junction (MTJ) whose write succeeds with
a fixed probability. A switch matrix connects every input terminal of the
inference logic to one SBG. A switch controller sets up that matrix. It lets
terminals share an SBG unless they meet in the same AND gate, where a shared
stream would be correlated.

The application built here is the publication's sensor-fusion (target-locating)
case:
- three sensors, each giving a distance and a bearing;
- six Gaussian likelihoods per grid position;
- per position, a chain of five ANDs giving a stream proportional to the
  posterior.

## Structure

```
spinbis_top
 ├─ sbg_array            M = L*PHI SBGs (default 32 levels x 10 = 320)
 │   ├─ sbg_phase_ctrl   shared write/read/latch enables (10-clock SBG cycle)
 │   └─ sbg  x M
 │       ├─ mtj_cell          behavioural MTJ + write circuit
 │       ├─ mtj_sense_amp     behavioural sense amplifier (reference (Rp+Rap)/2)
 │       └─ sbg_self_control  TG / DFF / XOR self-control logic
 ├─ conflict_set_mem     host-written list of conflict sets
 ├─ switch_controller    assigns an SBG row to every terminal
 ├─ switch_matrix        M x N crossbar, one ON crosspoint per column
 └─ df_sc_logic          N_POS chains of 5 AND gates (6 terminals each)
```

`spinbis_pkg` holds the shared constants, the `sbg_phase_t` enable bundle
and the `cs_entry_t` conflict-set entry (`{last, term[15:0]}`).

## Self-control SBG

An SBG cycle is 10 clocks of 1 ns:
- 7 clocks of Write En.;
- 3 clocks of Read En.

In the read window:
- the comparator latches on the first clock (C_clk);
- the transmission gate passes the state on the second (T_clk);
- the flip-flop updates on the third (D_clk).

The self-control logic keeps `last_state`. The next write is set from it:
- Rst.0 = `last_state`: an MTJ in AP is reset towards P.
- Wrt.1 = `~last_state`: an MTJ in P is written towards AP.

The output bit is `current_state XOR last_state`. So a one means "the write
switched the MTJ", which happens with the cell's probability in both
directions. No read-back reset is needed.

The first cycle after `run` rises only sets up the state, and its bit is
discarded. `bit_valid` first pulses 21 clocks after `run` rises, then once
every 10 clocks.

In the MTJ model:
- each Write En. pulse makes one switching attempt on its first clock;
- the attempt succeeds when a per-cell 32-bit xorshift value is below the
  cell's probability (Q16 input);
- the resistances are R_P = 2469 Ω and R_AP = 6173 Ω (RA = 5 Ω·µm², 45 nm ×
  45 nm, TMR = 150 %).

## SBG sharing (switch controller)

The array holds L probability kinds: level i is i/(L-1), with PHI SBGs each.
Row j has kind j / PHI.

The host writes:
- an 8-bit probability code per terminal (`in_we/in_addr/in_data`);
- a flat conflict-set list in which each entry is a terminal index, and the
  `last` bit closes a set.

A `start` pulse runs the controller. For each set it makes two passes over
the entries:
1. **Mark.** Rows already given to members of the set (by earlier sets) are
   marked used. If two members already hold the same row, `clash` is
   raised. This case cannot be repaired by a one-pass assignment, so the
   host should reorder the sets.
2. **Assign.** Each unassigned member gets its kind, the nearest level to
   `code*(L-1)/255`, made with L-1 threshold comparators. It then takes the
   first unused row of that kind. If none is free, `overflow` is raised and
   the terminal stays unconnected.

The used marks are cleared at the end of each set. The whole run takes
2·E+1 clocks for E entries, and then `done` pulses.

In the default data-fusion configuration, each terminal is in exactly one
set: the six likelihoods of one position. Equal likelihood values in
different positions end up on the same SBG.

The controller's result is one row index and a valid bit per column.
`switch_matrix` decodes these into the crosspoint controls: column k outputs
`|(onehot(sel[k]) & bs)`, and an unconnected column reads 0.

## Host protocol for the target-locating case

1. For every grid position p, compute the six likelihoods in the order d1,
   b1, d2, b2, d3, b3. Quantise them to 8 bits and write them to terminals
   6p..6p+5. The scale of each likelihood is free, since only ratios between
   positions matter.
2. Write one conflict set per position (terminals 6p..6p+5, with `last` on
   the sixth), set `n_entries`, pulse `start` and wait for `done`.
3. Raise `run` and count the ones of `r[p]` on each `bit_valid` for n bits.
   The position with the largest count is the estimate.

## Parameters (spinbis_top)

| Parameter | Default | Meaning |
|---|---|---|
| GRID | 32 | grid side; N_POS = GRID², N = 6·N_POS terminals |
| L | 32 | probability kinds |
| PHI | 10 | SBGs per kind; M = L·PHI = 320 |
| WRITE_CYC / READ_CYC | 7 / 3 | clocks of the write and read phases |

`N`, `M`, `CS_DEPTH` and the address widths are derived from these.
At the defaults:
- N = 6144, M = 320, which are the sizes given for the 32 × 32 grid.
- The switch matrix is 320 × 6144.
- The controller holds 6144 × 9-bit row selections.

A 64 × 64 grid needs `GRID=64`.

## Simulation

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line. To build one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_sbg \
    rtl/spinbis_pkg.sv tb/tb_sbg.sv -Mdir obj_sbg -o sim
obj_sbg/sim
```

- `tb_spinbis_top` runs the whole chain at a reduced size: 4 × 4 grid, 48
  SBGs, 256 bits. It counts SBG sharing, equal values inside one set, the
  discarded initial bit, overflow and clash.
- `tb_spinbis_full` runs the top at its default size: 32 × 32 grid, 6144
  terminals, 320 SBGs, 128 bits. It checks the following:
  - every connection;
  - that no set shares an SBG;
  - each position's ratio of ones, which must be within 0.22 of the product
    of its six quantised levels;
  - that the estimated location is the target cell.

  Building it takes about 7 minutes; it runs in a few seconds.

## Differences from the source design

- **No terminal clustering.** The source merges terminals with equal inputs
  and no shared conflict set into fewer matrix columns: 2817 for 32 × 32 and
  5557 for 64 × 64. The resulting map is not given, so this design keeps one
  column per terminal (6144).
- **Analogue parts are abstracted.**
  - The voltage divider that sets each SBG's write bias is not modelled; its
    effect is the constant probability input of each cell.
  - The sense amplifier is an ideal comparator.
  - Process variation of the MTJs is not modelled.
  - The simple (non-self-control) SBG is not built.
- **Sub-cycle timing rounded.** The source places C_clk, T_clk and D_clk at
  12.5, 13 and 14 ns of a 10 ns-write/read window. Here they are three
  consecutive 1 ns clocks of the read phase.
- **Levels, PHI and code width are this design's choice.** The source does
  not give the probability levels or how the 320 SBGs are split.
- **Assignment algorithm.** Taken literally, the source's pseudo-code never
  frees SBG marks between sets, and it reassigns terminals that are in
  several sets. This design follows the stated goal (no SBG repeated
  within a set) and the worked 9-terminal / 7-SBG example. It adds the
  `clash` and `overflow` flags for cases the source does not cover.
- **Likelihood computation is off-chip.** The Gaussian likelihoods (σ_d = 5
  + μ/10, σ_b = 14.0626°) are computed by the host. The testbenches do this
  in their host tasks.
- **Output counting is left to the user.**
