# A Relay-BP sliding-window decoder for the gross code

A quantum memory built on the [[144,12,12]] gross code measures 72 X-type and
72 Z-type checks every syndrome cycle. To be useful, an error decoder must keep up
with that stream and commit corrections while the experiment is still running.
This repository holds synthesizable SystemVerilog for one such decoder: the X
(or Z) half of a real-time decoder. It runs *Relay-BP* on a sliding window of
syndrome cycles and turns the committed corrections into updates of a 12-bit
logical Pauli frame.

Relay-BP is min-sum belief propagation with *memory*. Each error node mixes its
prior with its own previous marginal. The strength of that memory is redrawn at
random for every *leg*, and every leg starts from the marginals the previous one
ended with. A short chain of legs therefore explores many differently damped BP
runs without resetting. The lowest-weight valid solution found within the budget
wins.

The design is fully parallel: one check-node unit (CNU) per row and one
variable-node unit (VNU) per column of the windowed check matrix. One BP
iteration takes two clock cycles.

## The decoding graph

The gross code is the bivariate-bicycle code H = [A | B], defined on an
l × m = 12 × 6 torus by:

- A = x³ + y + y²
- B = y³ + x + x²

Each check touches three qubits through A and three through B. The window graph
spans W syndrome cycles and has two kinds of error node:

- **data-qubit error (t,q)**: flips the code checks of qubit q in cycle t
  (degree 3);
- **measurement error (t,k)**: flips check k in cycles t and t+1 (degree 2). In
  the last cycle of the window it flips only cycle t (degree 1).

Checks therefore have degree 8: six code slots, plus the measurement errors of
the same and the previous cycle. Checks in the first cycle have degree 7.

At W = 12 the graph has 864 checks and 2592 error nodes. This is a
*phenomenological* graph, a choice of this design. A circuit-level graph has
more columns and irregular degrees. The graph is never stored: `relay_pkg`
contains constant functions (`chk_nbr`, `var_chk`, `var_slot`, `var_cycle`)
that give every node's neighbours. Elaboration then wires every CNU and VNU
directly. Setting l = m = 6 instead gives the [[72,12,6]] code, which the
smaller testbenches use.

## Message arithmetic

All messages are 4-bit magnitudes with a separate sign bit:

- priors are unsigned;
- marginals are two's complement, saturated to ±15;
- the memory strength γ is carried as β = round((1−γ)·8), where 8 is the
  scale M = 2³.

**Check node (`cnu`).**

- The output sign of each edge is the check's syndrome bit XOR the signs of all
  other edges. It is computed as the total parity XOR the edge's own sign.
- The magnitudes are reduced to a smallest value (`min1`), a second-smallest
  (`min2`) and a one-hot selector `c` marking the edge that supplied `min1`.
- Both minima are scaled by α = 1 − 2⁻ᵗ as `min − (min >> t)`.

Only `{sign, c, min1, min2}` travels to the variable nodes. Each VNU picks its
own "exclusive minimum" as `c ? min2 : min1`.

**Variable node (`vnu`, `relay_adder`, `ms_mul`).**

- The node bias is Λ(t) = (1−γ)·Λ(0) + γ·M(t−1). It is computed as
  `M − (1−γ)M + (1−γ)Λ(0)` and saturated. In an initial iteration the bias is
  Λ(0) instead.
- The incoming check messages are added to the bias, giving σ_sum.
- Outputs:
  - each edge's outgoing message is sat(σ_sum − μ_edge);
  - the hard decision is ê = (σ_sum < 0);
  - the marginal register keeps sat(σ_sum) for the next iteration and the next
    leg.
- The products use a reduced-logic multiplier: bit k of the 4-bit operand
  contributes ⌊(β·2ᵏ)/8⌋. The fractional part of each partial product is
  dropped before the sum, so 15 × β = 7 gives 11, not 13.

**Memory strengths.**

- In the first leg every node uses β₀ = 7 (γ₀ = 0.125).
- In each later leg, every VNU draws its own β from a 16-bit Galois LFSR (taps
  0xB400):
  - β = β_min + ⌊lfsr[7:0] · (β_max − β_min + 1) / 256⌋;
  - the default range [3, 10] corresponds to γ between −0.25 and 0.625 (1 − β/8).
- Each VNU's LFSR has its own seed, so every node gets a different draw.
- The seeds are reloaded at the start of each decode, so a decode can be
  repeated exactly.

## The relay controller and its timing

`relay_ctrl` sequences one decode:

- an INIT iteration;
- CN and VN phases that alternate (one clock each);
- a convergence test after each VN phase;
- leg changes.

Limits:

- the first leg runs at most T0 = 80 iterations;
- each later leg runs at most Tr = 60 iterations;
- at most R = 600 legs are run;
- the decode stops once S = 1 valid solutions have been found.

The convergence checker compares H̃·ê with the window's detectors, with one
register stage. When a solution is valid, `solution_select` computes its weight
Σ ê_j·λ_j and keeps it if it is lighter than the best so far. A decode that
converges after k iterations raises `done` 2k + 6 clock edges after `start` was
sampled. The worst case is about 2·(80 + 599·60) ≈ 72 000 cycles.

## The window loop

The rows of the window come from a stream of *items*, produced by
`syndrome_mapping` (see below). `detector_window` turns each item into one
detector row:

| Item | Detector row |
|---|---|
| syndrome round s | s ⊕ s_prev |
| final data-qubit readout (codeword c) | s_prev ⊕ H·c |
| END | all zero |

The rows go into a circular history (default 16 rows). When the history is full,
the input is stalled. This back-pressure propagates all the way back to the
readout stream.

Once W rows are present, the decoder controller (`window_ctrl`) runs one decode
of the window rows D[t .. t+W−1]. The carried correction u is XOR-ed into the
window's first row. After the decode:

1. `commit_region` keeps only the error nodes of the first C cycles (the commit
   region).
2. It computes the new carry u: the flips those committed errors cause in cycle
   C. Only measurement errors of cycle C−1 contribute.
3. `pauli_frame` adds Δf = L·(XOR over cycles of the committed data errors) to
   the frame f and sends Δf out as a frame update.
4. The window start advances by C. The default is C = 8, run-time
   programmable.

A finite experiment ends with the codeword followed by W−1 END items. The END
rows let the last real cycles reach a commit region. For T detector rows in
total (rounds + codeword + END rows), exactly (T−W)/C + 1 windows are decoded,
when C divides T−W. After the last one, `obs_valid` rises with the corrected
logical observables o = L·c ⊕ f.

The frame uses XOR over cycles because a data-qubit error in cycle t stays on
the qubit. What matters for the logical frame is the XOR of all committed data
errors, multiplied by the logical readout matrix L. L is a K × 144 matrix
(K = 12), loaded through registers.

## Readout path and registers

**Readout (`syndrome_mapping`).** Readout bits arrive one per beat as
`{channel, bit}`, with a valid/ready handshake. A 256-entry table maps each
channel to either a syndrome bit or a codeword bit. A round or a codeword is
passed on once all of its bits have arrived. A beat with `rd_end` set inserts
an END item.

**Registers (`regs_trace`).** A simple synchronous bus gives access to:

- the identification word;
- a clear strobe that starts a new experiment;
- C, T0, Tr, R, S, β₀, β_min, β_max and the two priors (data and measurement,
  both 14 by default);
- the L matrix;
- the mapping table;
- the statistics: windows decoded, windows converged, total iterations;
- a 64-entry trace of time-stamped events (item taken, decode start and
  stop, frame update, observables valid).

The address map is given in the header of `rtl/regs_trace.sv`.

## Module map

```
gross_decoder_top
├── regs_trace            configuration, statistics, trace
├── syndrome_mapping      channel table -> rounds / codeword / END
└── windowing_decoder
    ├── detector_window   detectors, history, window + carry
    ├── window_ctrl       decode / commit / slide sequencing
    ├── relay_decoder
    │   ├── cnu ×NC
    │   ├── vnu ×NV  ── relay_adder ── ms_mul ×2
    │   ├── relay_ctrl
    │   ├── conv_checker
    │   └── solution_select
    ├── commit_region
    └── pauli_frame
```

`relay_pkg` holds the shared types, constants and graph functions. There is one
clock and an active-low asynchronous reset.

## What follows the published decoder, and what does not

**Taken from the published design:**

- the CNU/VNU data flow, including the deferred exclusive minimum;
- the α schedule;
- the relay adder with its init multiplexer and saturation;
- the reduced-logic multiplier;
- the 2-cycle iteration;
- the sliding-window algorithm: detectors, commit, carry and frame;
- the parameter values: 4-bit messages, scale 8, β₀ = 7, β range [3, 10],
  T0 = 80, Tr = 60, R = 600, S = 1, W = 12, C = 8.

**Choices made in this design:**

- **The decoding graph.** It is phenomenological and built from the code
  polynomials. A circuit-level window would change only the neighbour
  functions and the node counts.
- **Memory-strength draws.** The random number generator, the seeding and the
  exact mapping of a draw onto [β_min, β_max] are this design's.
- **Supporting blocks.** The handshakes, the history depth, the END convention,
  the register map, the trace format and the statistics are this design's.
- **Convergence skip.** When a new leg starts, its first convergence test is
  skipped.
- **Clocking.** One clock domain.
- **External interfaces.** There are no serial transceivers, host nest or
  clock-domain crossings. The readout stream and the frame outputs are plain
  ports of `gross_decoder_top`.
- **Only one decoder half.** The X and Z halves are independent copies of this
  top. Joint XYZ decoding with wider messages is not built.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently inside the testbench, ends with a line
`TB_RESULT checks=N failures=M`, and has a watchdog. Notable ones:

- `tb_relay_pkg`: rebuilds the window matrix directly from the polynomials and
  checks every neighbour function and node degree against it.
- `tb_relay_adder`: a cycle-accurate reference model of the bias, the
  multiplier, the LFSR and the marginal register.
- `tb_relay_decoder`: decodes random sparse errors on the [[72,12,6]] code with
  W = 3.
- `tb_windowing_decoder` and `tb_gross_decoder_top`: play a phenomenological
  memory experiment with isolated faults. They require the corrected
  observables to be exactly zero for a random L. They also check:
  - the frame against the XOR of the frame updates;
  - the window count;
  - the statistics registers.
- The end-to-end test also counts the mechanisms it must exercise and fails if
  any count stays zero:
  - back-pressure;
  - non-zero carries;
  - decodes that needed more than one relay leg (forced with T0 = 1);
  - committed windows;
  - END rows.
- `tb_gross_decoder_full`: runs the same experiment on the default-size top,
  with 2592 VNUs and a 12-cycle window.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  --top-module tb_gross_decoder_top -y rtl -y tb -Irtl \
  rtl/relay_pkg.sv tb/tb_gross_decoder_top.sv -o sim
./obj_dir/sim
```

The default-size design is large for Verilator: building `tb_gross_decoder_full`
took about 15 minutes of C++ compilation (8 jobs), after which the simulation
itself takes about two seconds. It passes, with every counted mechanism
occurring at full size as well.
