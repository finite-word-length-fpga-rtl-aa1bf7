# A fixed-point fast-gradient MPC kernel for resistive-wall-mode control

Active control of the n = 1 resistive wall mode (RWM) in ITER uses the 27
in-vessel ELM coils as actuators. The controller is a model predictive controller
(MPC): every 0.75 ms sample it takes the estimated plant state and solves a
quadratic program (QP). The QP chooses the coil voltages over a prediction
horizon subject to the power-supply voltage limits. The QP is solved by a
*primal fast gradient method* (FGM). A PC needs about 0.1 ms per solve, which is
too slow for the faster plasmas of medium-sized tokamaks.

The RTL here implements that solver as an FPGA kernel in 27-bit fixed-point
arithmetic. The host streams in the 50-element state vector as doubles. The
kernel forms the QP's linear term, runs 20 FGM iterations on the 81 decision
variables and streams back the 27 coil commands as doubles. This takes 2011
clocks from the first input word to the last output word, or 6.7 µs at 300 MHz.
The published kernel this design follows needed up to 3136 clocks (10.45 µs).

## The problem being solved

The horizon is N = 80 samples. Move blocking reduces it to three intervals of
lengths 2, 2 and 76, so the decision vector is
ũ = [u₀ = u₁, u₂ = u₃, u₄ = … = u₇₉], 3 × 27 = 81 values. With the plant
dynamics substituted in (the *condensed* form), the problem is

    minimise ½ ũᵀ Hc ũ + fcᵀ ũ     subject to   umin ≤ ũ ≤ umax

where Hc is fixed and fc = Fc·x depends linearly on the current state estimate x.
A diagonal preconditioner L is chosen off line; Hcp = L⁻¹Hc then has its largest
eigenvalue equal to 1. The kernel iterates, starting from ũ⁰ = v¹ = 0:

    chi_i  = v_i − (Hcp v_i + fcp)                gradient step
    ũ_i    = clip(chi_i, umin, umax)              projection on the box
    v_i+1  = ũ_i + β_i (ũ_i − ũ_i−1)              acceleration
    if (v_i − ũ_i)ᵀ(ũ_i − ũ_i−1) > 0:             adaptive restart
        v_i+1 = ũ_i−1,  ũ_i = ũ_i−1

Here fcp = L⁻¹fc, and β_i is a sequence computed in advance. Some solvers scale
v, χ and ũ by L⁻¹. This one does not: it multiplies by Hcp directly. The vectors
then keep a common range, which would otherwise cost about 6 extra bits of word
width. After 20 iterations, the first 27 elements of ũ, the first blocked move,
are the output.

The kernel does not receive fcp itself. It receives the scaled state x (50
values, each in [−1, 1]) and computes fcp = Fp·x. Fp = L⁻¹Fc is an 81 × 50 matrix
prepared off line. This is one of this design's own choices (see *Departures*).

## Number formats

Every value is a signed 27-bit fixed-point word, the width of one DSP multiplier
input. `ap_fixed<W,I>` means W bits, of which I are integer bits including the
sign, so F = W − I bits are fraction.

| quantity | format | F | range | origin |
|---|---|---|---|---|
| Hcp elements | ap_fixed<27,−1> | 28 | [−0.25, 0.25) | published HLS code |
| v, χ, ũ, bounds, x, fcp, Hcp·v row result (`tvn`) | ap_fixed<27,2> | 25 | [−2, 2) | published HLS code (v, tvn); rest this design |
| product Hcp(r,j)·v(j) | ap_fixed<27,1> | 26 | [−1, 1) | published HLS code |
| adder tree levels | 27 + level bits | 26 | exact | equivalent to published code |
| β | ap_fixed<27,1> | 26 | [0, 1) used | this design |
| Fp elements | ap_fixed<27,−1> | 28 | [−0.25, 0.25) | this design |
| restart sum | 64-bit integer | 50 | exact | 64 bits as published |

Wherever a value is narrowed, it is rounded half toward +∞ (add half an LSB,
then floor). It is also saturated to the most positive or most negative code.
These are the AP_RND and AP_SAT modes. Only four places narrow a value:

* each product, from 53 to 26 fractional bits;
* the tree sum, from 26 to 25 fractional bits;
* the gradient step, which saturates only;
* the acceleration, from 51 to 25 fractional bits.

The products must be narrow for the row sum to land in 27 bits. Each tree level
is one bit wider than the level below, so the sum of 81 rounded products is
exact. `tvn` may share the range of v because Hcp has spectral radius 1.

The package `fgm_pkg` holds these constants and the `rnd_sat` helper.

## The row engine and the iteration schedule

Almost all of the work is the 81 × 81 product Hcp·v, and `mvm_tree` does it a
row at a time. In every clock it takes one full row of the matrix and the whole
vector and forms 81 products in parallel. A 7-level binary adder tree then sums
them, with one register per level. A row can enter every clock, and its result
comes out 9 clocks later (products, 7 levels, output rounding), tagged with its
row number.

The tree needs a whole matrix row per clock, so the matrix is stored one column
per memory (`coef_mem`): 81 memories of 81 words, all read at the same address.
The linear-term matrix Fp has its own 81 × 50 memory. Both matrix-vector
products use the same tree: Fp·x is sent through it with zeros in columns 50 to
80.

`fgm_core` sequences a solve:

1. **Linear term.** 81 rows of Fp·x go through the tree. The results are stored
   as fcp. This takes 91 clocks.
2. **Iteration i (×20).** 81 rows of Hcp·v_i are issued. As each result r leaves
   the tree, `fgm_elem` computes χ_r, clips it to the bounds of element r and
   forms the restart term (v_r − ũ_r)(ũ_r − ũ_prev,r). The term is exact, up to
   56 bits, and is added to a 64-bit accumulator. One clock after the last row,
   the sign of the sum decides the restart. In the same clock all 81 elements of
   v are updated, through 81 β multipliers, or v is reset to the previous ũ.
   This takes N + 11 = 92 clocks.
3. **Done.** ũ(0…26) is copied to the output register.

A solve takes 1 + 91 + 20 × 92 + 1 = 1933 clocks. The next iteration needs every
element of the new v, so iterations cannot overlap. Most of each iteration is
the 81 row issues; the tree latency and the restart decision add 11 clocks.

## Host interface (`rwm_ap`)

```
 s_axis_x ──► axis_vec_rx ──► fgm_core ──► axis_vec_tx ──► m_axis_u
 (50 doubles)  double→fixed      ▲         fixed→double   (27 doubles)
                                 │ coefficients
 s_axi_control ──► axil_ctrl ────┘ start / status
```

* **State in:** AXI4-Stream, one IEEE-754 double per 64-bit beat, 50 beats,
  TLAST on the last. The element count alone delimits vectors. If TLAST is on
  the wrong beat, `tlast_err` pulses. While a complete vector waits for the
  solver, TREADY is low.
* **Control out:** AXI4-Stream, 27 doubles, TLAST on the last. The conversion
  is exact.
* **AXI4-Lite control** (32-bit registers, 20-bit byte address):

| address | register |
|---|---|
| 0x00 | CTRL: bit0 ap_start (W1), bit1 ap_done (cleared by reading), bit2 ap_idle, bit7 auto_restart |
| 0x10 | SAMPLES completed |
| 0x14 | adaptive RESTARTS in the last sample |
| 0x18 | CLIPS (active bounds, summed over the iterations) in the last sample |
| 0x1C | LATENCY of the last sample in clocks |
| sel<<16 \| row<<9 \| col<<2 | coefficient write: sel 1 = Hcp, 2 = Fp, 3 = β (col = i), 4 = umin, 5 = umax (col = element); data in bits 26:0 |

Before the first sample, load Hcp, Fp, the 20 values of β and the bounds.
Writes are ignored while a solve runs. After reset the bounds are ±1.0 and β
is 0.

To start, write 1 to CTRL for a single sample, or 0x81 to keep serving samples.
In auto-restart mode the kernel waits for a state vector, solves it, sends the
result and pulses ap_done, then waits for the next vector. The host can stream
the next vector while the current one is being solved. A solve starts only once
the previous result has left.

Latency at the default sizes: 50 input beats, 1933 clocks of solve, then 27
output beats, 2011 clocks in all when the receiver does not stall. If the
receiver stalls, the count includes the stall.

## Files

| file | content |
|---|---|
| `rtl/fgm_pkg.sv` | sizes, formats, coefficient-port struct, rounding/saturation |
| `rtl/mvm_tree.sv` | row × vector multipliers and pipelined adder tree |
| `rtl/coef_mem.sv` | column-partitioned matrix memory |
| `rtl/fgm_elem.sv` | gradient step, projection and restart term for one element |
| `rtl/fgm_core.sv` | the solver: memories, vectors, schedule, acceleration, restart |
| `rtl/dbl2fix.sv`, `rtl/fix2dbl.sv` | double ↔ fixed converters |
| `rtl/axis_vec_rx.sv`, `rtl/axis_vec_tx.sv` | stream input and output of vectors |
| `rtl/axil_ctrl.sv` | AXI4-Lite registers and coefficient window |
| `rtl/rwm_ap.sv` | top level |
| `tb/fgm_ref_pkg.sv` | bit-exact integer model of the solver and a random test-QP generator |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fgm_accuracy` |

The sizes `N_OPT` (81), `N_X` (50), `N_U` (27) and `N_ITER` (20) are parameters
of `rwm_ap` and `fgm_core`. N_OPT may be at most 128, and N_X and N_U at most
N_OPT. The word formats are fixed in `fgm_pkg`.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. For example,
the full-size end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fgm_pkg.sv tb/fgm_ref_pkg.sv rtl/coef_mem.sv rtl/mvm_tree.sv rtl/fgm_elem.sv \
  rtl/fgm_core.sv rtl/dbl2fix.sv rtl/fix2dbl.sv rtl/axis_vec_rx.sv rtl/axis_vec_tx.sv \
  rtl/axil_ctrl.sv rtl/rwm_ap.sv tb/tb_rwm_ap.sv --top-module tb_rwm_ap -o sim
./obj_dir/sim
```

This runs in under a second. For another testbench, pass the package files,
the module under test with its submodules, and the testbench.

What the tests establish:

* **Arithmetic.** `tb_mvm_tree`, `tb_fgm_elem`, `tb_dbl2fix` and `tb_fix2dbl`
  check every output against integer or real-number models written separately
  from the RTL. The inputs include extremes that saturate and exact rounding
  ties.
* **Solver.** `tb_fgm_core` and `tb_rwm_ap` build a random, diagonally dominant
  81-variable QP with a Nesterov β sequence and bounds of ±0.5. They compare
  every output word bit for bit with `fgm_ref_pkg`, including the numbers of
  restarts and active bounds. They check the solve time (exactly 1933 clocks)
  and the end-to-end latency of an unstalled sample (exactly 2011 clocks).
  They also require every sample to stay at or below 3136 clocks.
  `tb_fgm_core` also writes coefficients during a solve and checks that the
  core ignores them. Adaptive restarts,
  clipping, input saturation, a misplaced TLAST, input back-pressure, output
  stalls, single-shot mode and auto-restart mode each occur at least once.
* **Accuracy.** `tb_fgm_accuracy` solves 12 states, from small to full-range,
  on the same kind of test QP. It compares all 81 final values with the same
  iteration run in double precision, using the exact β and the unrounded
  state. The error measure is the normalised RMS error
  sqrt(mean(((u − u*)/(umax − umin))²)). The test requires it to stay below
  1e-4, the accuracy the source design aimed for. On the test QP the worst case
  is about 3e-7. The original reached 5.2e-5 on the real ITER problem, whose
  conditioning is worse.
* **Interfaces and memory.** `tb_axis_vec_rx`, `tb_axis_vec_tx`, `tb_axil_ctrl`
  and `tb_coef_mem` check handshakes under random stalls, the register map and
  the memory. Assertions in the RTL check that stream and AXI4-Lite responses
  stay stable until they are accepted.

These tests show that the RTL computes exactly what the fixed-point algorithm
defines. They do not show how closely it tracks the real ITER controller: that
needs the controller's Hcp, Fp, bounds and β, which are not public. The test QP
is synthetic.

## Departures and own choices

The published work specifies the algorithm, the variant that avoids scaled
vectors, the 27-bit formats of H, v, the products and the row result, the
row-parallel multiply with a binary tree, column partitioning of H, 20
iterations from a cold start, AXI4-Stream double-precision I/O with an
AXI4-Lite control port, and a latency of 3136 clocks. Everything else here is
this design's own:

* **Linear term on chip.** The kernel forms fcp = Fp·x from the state. The
  source says only that the state vector is sent to the kernel and that the
  matrices are prepared off line. The 81 × 50 matrix Fp and its format are
  assumed. Fp shares the tree, and so the Hcp format, with Hcp. If the real Fp
  has elements of magnitude 0.25 or more, the off-line preparation must move a
  power of two from Fp into the bounds and the cost, or the Fp pass needs its
  own product shift.
* **Coefficients loaded at run time.** In the HLS original the QP data are
  compiled into the bitstream. Here they are loaded through AXI4-Lite, because
  their values are not given.
* **Product width.** The published text speaks of 35-bit products, but its code
  declares 27-bit products with one integer bit. This design follows the code.
  The word width is 27, as in the FPGA kernel, not the 26 bits of the earlier
  fixed-point study.
* **Formats of β, bounds, χ and Fp**, the register map, stream framing, reset
  values, and a schedule that keeps one solve from overlapping the previous
  output. The published kernel's internal schedule is not given. This one
  needs about a third fewer clocks than the published kernel: 2011 against 3136.
* **Single rounding of the row sum.** The last line of the published tree
  code is `tvn = (apf_tvn_t) vt2m[0] + vt2m[1]`. By C++ precedence, the cast
  rounds the first partial sum to 25 fractional bits before the last addition,
  and the assignment then rounds again. Which partial sum is rounded first
  depends on the published pairing, element j with element j + 41 and so on.
  This design rounds the exact sum once, as the text intends ("reached
  without loss of accuracy"). It pairs adjacent elements, and the order does
  not matter for an exact sum. The two can differ by one LSB (2^-25) in a row
  result.
* **Output.** Only the first 27 of the 81 optimised values are returned, since
  they are the ones applied to the coils.

The DSP48E2 multiplier mapping, the platform shell with its PCIe endpoint, and
the host software are not part of this RTL. Neither are the Kalman-filter state
estimator and the input/output scaling, which run in the host control system in
the source. The multipliers are written as plain `*`. The 27 × 27 products need
two DSP slices each on an UltraScale+ device. There are 81 such multipliers in
the tree and 81 in the acceleration, so about 324 DSP slices. The published
kernel reports 297 DSP slices and 83 block RAMs. The column memories here
are 131 memories of 81 words each: 81 for Hcp and 50 for Fp. Each maps to one
small block RAM or to distributed RAM. No FPGA synthesis was run to confirm
these counts.
