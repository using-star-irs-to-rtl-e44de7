# GNN beamforming accelerator with symbol-level random phase modulation for a STAR-IRS

## The idea

An indoor base station with N antennas ("Alice") serves one user ("Bob"). K eavesdroppers
("Eves") listen from outside the room. The wall between them carries a STAR-IRS. This is a
passive surface of L elements, and each element splits an incoming wave into two parts:

- a reflected part, sent back into the room;
- a transmitted part, passed through the wall.

Each part has its own amplitude and phase. The energy is conserved: β_r + β_t = 1 per element.

The security scheme has two halves:

1. **Optimise the surface and the beam.** The reflection coefficients Ω_r and the
   transmit beamformer w are chosen so that Bob receives a strong signal.
2. **Scramble what leaks through the wall.** The transmission coefficients Ω_t are
   rotated by a fresh random phase at every symbol. To an eavesdropper, the part of the
   signal that comes through the surface is then artificial noise, not a copy of the data.

The optimisation in step 1 is too slow to solve iteratively in real time. It is learned
offline by a small graph neural network (GNN), and this RTL runs only the trained network:

- **Input:** the channel state of Bob and of the Eves.
- **Output:** w, Ω_r and Ω_t in one pass.
- **Symbol-level modulation:** a small unit next to the network streams the rotated Ω_t
  to the surface driver once per symbol.

## The graph and what it implies

The network sees the scene as a graph of C = K + 2 nodes, in this order:

| Node | Meaning | Features |
|---|---|---|
| 0 | STAR-IRS | element-wise mean of the user rows (computed on chip by `node_mean`) |
| 1 | Bob | real and imaginary parts of the direct channel h (N values) and the cascaded channel d = vec(diag(f^H) G) (NL values): 2N + 2NL values |
| 2 .. K+1 | Eves | same layout as Bob |

The adjacency matrix is fixed:

- node 0 and node 1 point to each other;
- every Eve points to both node 0 and node 1;
- nothing points to an Eve.

Each of the two GCN layers computes H' = ReLU(Â H F + b), with Â = D^-1/2 (A+I) D^-1/2.
Â is a constant, so it is computed during elaboration (`gnn_pkg::a_hat`). It is never stored
as data.

The degree D can be defined in two ways. The source of this design defines it as the row
sum of A, and that is the default here. The usual GCN convention uses the row sum of A + I;
parameter `SELF_LOOP_DEG = 1` selects that instead.

With the default degree, the Â entries are:

| Row | Column 0 | Column 1 | Other columns |
|---|---|---|---|
| 0 (STAR-IRS) | 1 | 1 | 0 |
| 1 (Bob) | 1 | 1 | 0 |
| Eve | 1/√2 | 1/√2 | 1/2 on the diagonal |

Stored in Q2.14, these are 16384, 11585 and 8192.

One consequence of this matrix: rows 0 and 1 of Â are identical. After every GCN layer the
STAR-IRS node and the Bob node therefore hold the same embedding. The Eves reach these two
rows only through node 0's input, which is the mean over all users. The Eve rows of the
second layer's output are computed but never used.

The two output heads read different rows:

| Head | Reads row | Outputs | Post-processing | Result |
|---|---|---|---|---|
| Coefficient head `FC_v` | 0 | 3L | sigmoid | v = [β_r, cos θ_r, cos θ_t] |
| Beamforming head `FC_w` | 1 | 2N | layer normalisation, gain √P | w (real parts first, then imaginary parts) |

Because rows 0 and 1 are equal, the two heads see the same vector, and swapping them would
not change any result. The hardware still wires them as specified, so that a different Â,
such as one with `SELF_LOOP_DEG = 1` and other sizes, gives the intended behaviour.

## Dataflow and timing

`gnn_accel_top` splits one inference into a front stage and a back stage:

- **Front stage:** mean and GCN 1.
- **Back stage:** GCN 2, both heads (which run at the same time) and their post-processing.

Each stage runs its units one after another:

```
 host writes Bob/Eve rows ──► input buffer (one RAM bank per node)
 start ─► node_mean        bank 0 := mean(banks 1..C-1)                 F_IN + 2 cycles
       ─► gcn_layer (1)    F_IN → HID, all C nodes in parallel           HID·F_IN + 3
       ─► gcn_layer (2)    HID → HID                                     HID·HID + 3
       ─► fc_layer  (v) ─► 16 × sigmoid_pwl ─► coefficient buffer ─► star_coeff_unit ─► Ω_r, Ω_t
          fc_layer  (w) ─► layer_norm_unit (× w_gain) ─────────────────────────────► w
       ─► done
```

Every unit reads the buffer of the previous unit through a synchronous RAM port (read
latency 1). It writes its own output buffer, so no unit holds the data bus of another.

**Two inferences in flight.** The input buffer and the GCN 1 output buffer each have two
pages. This lets consecutive inputs overlap across the stages:

1. While the back stage finishes inference n, the front stage already works on n+1.
2. Meanwhile the host loads the rows of n+2 into the free input page.
3. A front stage that finishes early waits for the back stage to go idle, then hands over
   its GCN 1 page.

`ready` tells the host when a new `start` is accepted. `done` still pulses once per
inference, in order.

At the default sizes the front stage is the longer one (84,250 of 91,075 cycles), so the
overlap shortens the time between results only by the back stage, to 84,250 cycles. With
a larger hidden width or a shorter input, the back stage would dominate instead.

**GCN layer.** The layer walks one weight F[f][h] per clock, with h in the outer loop. That
weight is multiplied by feature f of every node at once, using C multiply-accumulate units.
When the walk over f ends, the C sums are:

1. rounded to 8 bits;
2. mixed by the constant Â, using C×C small constant multipliers;
3. added to the bias;
4. passed through ReLU;
5. written to address h of the C output banks.

The next h starts on the following clock. Only one weight RAM port is needed per layer, and
the layer never stalls.

**FC layer.** The layer computes LANES = 16 neurons per pass. It uses one input value per
clock and 16 weight banks (neuron o sits in bank o mod 16).

**Latency at the default sizes** (N = 8, L = 80, K = 2, HID = 64):

| Stage | Cycles |
|---|---|
| node_mean | 1,298 |
| GCN 1 | 82,947 |
| GCN 2 | 4,099 |
| coefficient head (FC + post-processing) | 962 + 1,761 |
| beamforming head (FC + layer normalisation) | about 1,270, hidden behind the coefficient head |
| controller hand-overs (front to back included) | 8 |
| **start to done (measured)** | **91,075** |
| **done to done, inferences overlapped (measured)** | **84,250** |

91,075 cycles is 0.91 ms at 100 MHz. The accelerator this design follows reported
8.992 ms (899,200 cycles at a 10 ns clock). The end-to-end testbenches check against that
budget.

Nearly all of the time is GCN 1, because 1296 × 64 weights are read one per clock. Reading
P weights per clock would divide that term by P. This needs P-wide weight RAMs and P × C
multipliers, and it is the obvious place to trade area for latency.

## Number formats

| Quantity | Format |
|---|---|
| features, weights, biases | signed 8 bit, Q2.5 (`FRAC_BITS = 5`) |
| MAC accumulators | signed 32 bit, 10 fraction bits |
| Â | Q2.14, constant |
| sigmoid outputs, Ω_r, Ω_t | signed 16 bit, Q1.14 |
| w, w_gain | Q4.11 (w signed, gain unsigned) |

Only the 8-bit word length comes from the reference design, which reports that 8-bit
inference stays within a few percent of floating point. The binary points are this
design's choice, as are the round-half-up requantisation and the saturation after each GCN
product and after aggregation. The hardware is fixed; only the weights have to be trained
for it. If the trained weights need a different range, move `FRAC_BITS` in `gnn_pkg`.

## Post-processing

**Sigmoid.** `sigmoid_pwl` uses four segments with slopes that are powers of two, mirrored
for negative inputs:

| Input range | Slope | Offset |
|---|---|---|
| [0, 1) | 1/4 | 0.5 |
| [1, 2.375) | 1/8 | 0.625 |
| [2.375, 5) | 1/32 | 0.84375 |
| 5 and above | saturates at 1.0 | |

The maximum error is below 0.02. The curve steps down by one 1/256 at 2.375, so it is not
strictly monotonic there.

**Amplitude and phase.** `star_coeff_unit` turns v into the coefficients for each element:

- Ω_r = √β_r · (cos θ_r + j√(1 − cos²θ_r))
- Ω_t = √(1 − β_r) · (cos θ_t + j√(1 − cos²θ_t))

This enforces β_r + β_t = 1 by construction. The sine is always taken as non-negative.
Because the sigmoid keeps cos θ in [0, 1], the phases lie in [0, π/2]. That limit belongs to
the network's output parametrisation, not to the hardware.

Each element uses four digit-serial square roots in parallel and takes 22 clocks.

**Layer normalisation.** `layer_norm_unit` computes y_i = g·(x_i − mean)/std over the 2N
values, with no ε and no learned scale or shift. It avoids an early division by centring
with d_i = M·x_i − Σx, so one square root and 2N divisions are enough. A constant input
gives zeros.

The gain g = `w_gain` is a run-time input, because the power budget is a system parameter.
The unit of P is the host's choice. A plain layer norm gives Σy² = 2N, so g = √(P/2N) meets
the total-power constraint exactly. g = √P scales the total power by 2N.
The top level samples `w_gain` together with `start` and carries it along with the
inference, so each of two overlapped inferences can use its own transmit power. With P in
watts, the −6 to 30 dBm range gives g = 8 to 512 LSB at N = 8; the Q4.11 output would only
saturate above roughly 270 W.

## Random phase modulation

At every `sym_tick`, `an_phase_mod` does the following:

1. takes 3 bits from a free-running 32-bit Galois LFSR (polynomial x³² + x²² + x² + x + 1) as
   the phase index p;
2. reads the stored Ω_t table;
3. streams every coefficient multiplied by e^{j2πp/8}, one per clock from element 0.

The first output comes 3 cycles after the tick, and `phase_idx` shows p. A tick that arrives
during a stream is ignored, so symbols must be at least L + 2 clocks apart.

The design follows the reference scheme in two ways:

- All elements share one phase per symbol, which keeps the control simple.
- Only the transmitted side is modulated; Ω_r is left alone.

The eight-point phase alphabet is this design's choice. Its mean is zero, which is what
turns the leaked component into zero-mean noise. A finer alphabet needs only a larger
rotation table in `rot()`.

The modulator reads a private copy of Ω_t that has two pages:

- `star_coeff_unit` writes the new Ω_t into the page the modulator is not using.
- After `done`, the modulator changes page on its next idle clock.

So the surface keeps being driven from the previous solution while a new one is computed,
and no symbol ever mixes the two. One assumption applies: the modulator must be able to
finish a symbol before the next inference starts writing Ω_t. That takes at least
HID² cycles, far more than the L + 2 cycles of a symbol.

## Using the top level

| Port | Use |
|---|---|
| `cfg_we`, `cfg_sel`, `cfg_row`, `cfg_col`, `cfg_data` | Load weights and biases once. `cfg_sel`: 0/1 GCN-1 weights/biases, 2/3 GCN-2, 4/5 coefficient head, 6/7 beamforming head. GCN weight F[f][h] is row h, column f. FC weight W[o][i] is row o, column i. A bias uses only the row. |
| `in_we`, `in_node`, `in_feat`, `in_data` | Write the feature rows of nodes 1..C−1 into the free input page. Write every row for every inference; the page is taken by the next accepted `start`. Do not write node 0; it is computed on chip. |
| `start`, `ready`, `busy`, `done` | Pulse `start` only while `ready` is high. `busy` is high while any stage works. `done` pulses once per inference when its results are stored. The results stay readable for at least HID² cycles after `done`, until the next inference's back stage overwrites them. |
| `w_gain` | Gain √P for the beamformer, Q4.11. Sampled in the cycle `start` is accepted. |
| `rd_sel`, `rd_addr`, `rd_data` | Read results, latency 1. `rd_sel` 0 = Ω_r[l], 1 = Ω_t[l], 2 = w[n]. `rd_data` is {im, re}. |
| `seed_we`, `seed` | Load a non-zero seed into the random phase source. |
| `sym_tick` | Symbol boundary. |
| `phase_idx` | Phase index of the current symbol. |
| `irs_valid`, `irs_idx`, `irs_coef` | Rotated transmission coefficients to the surface driver. |

The top is parameterised by N, L, K, the hidden width `HID` (default 64), the FC lane count
`LANES` (default 16, a power of two) and `SELF_LOOP_DEG`. Every RAM is a plain array in
`sp_ram` (one write port, one read port, read-old-data), which synthesis tools map onto
block RAM. At the defaults the memories total about 0.93 Mbit, most of it the 82,944 GCN-1
weights.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints a final
`TB_RESULT checks=… failures=…` line and stops itself through a watchdog.

| Testbench | What it runs |
|---|---|
| `tb_gnn_accel_top` | reduced sizes (N=2, L=6, K=3, HID=8, LANES=4), three inferences |
| `tb_gnn_accel_top_full` | defaults, two inferences; about 30 s of simulation |
| `tb_gnn_workload_sweep` | L = 200 and K = 7 together, the largest sizes of the element and eavesdropper sweeps, two inferences |

All three end-to-end testbenches share `gnn_tb_harness`. The harness:

- draws random weights and features;
- issues the inferences back to back, so that each one overlaps the previous one;
- computes the whole network in an independent reference model (real-valued Â, true square
  roots and divisions);
- compares every result within small tolerances;
- gives each inference a different transmit power (18, 30 and −6 dBm in turn, with
  g = √(P/2N)) and checks that Σ|w|² equals P within 2 % plus the rounding allowance;
- checks the start-to-done latency against the reference design's 899,200 cycles;
- checks that the done-to-done interval is shorter than one inference's latency;
- keeps the random phase modulator ticking throughout, and checks that every symbol is
  one complete coefficient set rotated by one phase;
- counts how often each mechanism occurred (mean row, ReLU clipping, each sigmoid segment,
  concurrent heads, energy split, random phases, overlapped inferences, coefficient-set
  switches, a change of transmit power) and fails if any count is zero.

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/gnn_pkg.sv rtl/*.sv \
          tb/tb_gnn_accel_top.sv -y tb --top-module tb_gnn_accel_top -Mdir obj
./obj/Vtb_gnn_accel_top
```

Replace the testbench name to run another one. Verilator has two-state logic, so every
register that is read is reset or written before use. Adding `+verilator+rand+reset+2` to
the run randomises everything else.

## Where this design departs from the reference accelerator

- **Limited interleaving.** Batch interleaving is limited to two inputs in flight, one per
  stage. Within a stage the layers run one after another, not as a layer-to-layer stream.
  The reference design does not say how deep its interleaving is.
- **Serial post-processing.** Post-processing is serial and digit-serial: 22 clocks per
  surface element, and one shared divider in the layer norm. The reference unrolls these
  loops to one result per clock. At the default sizes they cost about 3% of the latency.
- **Assumed sizes and formats.** The hidden width of 64, the 16 FC lanes, all binary points,
  the sigmoid segments and the phase alphabet are assumptions. The reference names none of
  them.
- **No bus interface.** There is no host-bus or burst interface. Plain load and read ports
  stand where a DMA or AXI wrapper would connect.
- **Fixed graph size.** The graph size is fixed when the design is built. Running with
  another number of eavesdroppers or surface elements requires a new build with other
  `K`/`L` parameters. The sweep testbench shows the design working at L = 200 and K = 7
  (219,987 cycles).

## Known warnings

The lint warnings that remain do not affect the circuit:

- the `busy` outputs of the square-root and divider helpers are not needed by the units
  that sequence them;
- package constants are reported as unused when a module that does not need them is
  linted on its own, and `W_FRAC` only documents the beamformer format;
- the top bits of some intermediate results cannot be set by the arithmetic, so they go
  unread: the digit-serial remainders, the squared cosines and the mean's quotient;
- the assertions sample the asynchronous reset inside `disable iff`, which Verilator reports
  as a mixed synchronous/asynchronous use of `rst_n`.
