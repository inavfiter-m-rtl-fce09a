# Chebyshev functional-iteration strapdown navigation engine

This is synthesizable SystemVerilog for a strapdown inertial-navigation engine. It works in the Earth-fixed (ECEF) frame. Over each computing interval, it solves the attitude, velocity and position equations nearly exactly by *functional iteration on Chebyshev coefficients*.

Conventional navigation algorithms build the update from a few series terms, such as coning, sculling and scrolling corrections. This approach works differently:
- It fits the raw gyro and accelerometer increments of an interval with Chebyshev polynomials.
- It represents attitude, velocity and position over that interval by Chebyshev series of degree M.
- It iterates "integrate the right-hand side, re-evaluate" until the coefficients stop changing.

The key point of the matrix form is that everything except the right-hand side is a constant matrix:
- evaluating a series at the Chebyshev roots;
- integrating the right-hand side;
- forming the new coefficients.

Those matrices are computed once, here at elaboration time. What is left at run time is:
- point-wise products at M+1 sample points;
- a few (M+1)×(M+1) matrix-vector products per iteration.

That is what the hardware does.

Default configuration:
- N = 8 samples per interval: 100 Hz sampling and a 0.08 s interval.
- Series degree M = 9, which gives 10 Chebyshev-root points.
- At most 9 iterations.
- The iteration stops when the RMS change of the coefficients is at most 1e-16.

## 1. The mathematics the hardware implements

Time inside an interval [0, t_N] is mapped to τ ∈ [−1, 1]. Two sets of values are used:
- **Root points:** σ_k = cos((k + ½)π/(M+1)) for k = 0…M.
- **Chebyshev values:** F[k][i] = T_i(σ_k).

Three constant matrices are built from these:

| Matrix | Definition |
|---|---|
| `Z` | diag(½, 1, …, 1). This halves the zeroth Chebyshev coefficient. |
| `U` | diag(1, ½, ¼, …, 1/(2M)) |
| `D` | The Chebyshev integration stencil. Row 0 is 1, −¼, then (−1)^(i+1)/(i²−1). Row 1 is 2, 0, −1. Row r has +1 at column r−1 and −1 at column r+1. The last row has only +1 at column M−1. |

From these come two products:
- `Cs = U·D·Z·Fᵀ` maps samples of a right-hand side at the roots to the Chebyshev coefficients of its integral, apart from the constant term.
- `Cd = U·D` does the same starting from coefficients.

**Attitude.** The attitude quaternion obeys q' = ½ (q∘ω^b − ω^e∘q), where ω^e = (0, 0, Ω). One iteration with coefficients b does the following:

```
R_k      = q_l(σ_k) ∘ ω^b(σ_k) − ω^e ∘ q_l(σ_k)            (quaternion products)
b_{l+1}  = χ0 + t_N/(2(M+1)) · Cs · R                       χ0 = [q(0), 0, …, 0]
q_{l+1}(σ_k) = Σ_i F[k][i] b_{l+1,i}
```

**Velocity and position.** These obey v' = C_b^e f^b − 2ω^e×v + g^e(p) and p' = v, where C_b^e f^b is q∘f^b∘q*. One iteration does the following:

```
Y_k        = q(σ_k) ∘ f^b(σ_k) ∘ q*(σ_k) − 2 ω^e × v_l(σ_k) + g^e(p_l(σ_k))
s_{l+1}    = η0 + t_N/(M+1) · Cs · Y                        η0 = [v(0), 0, …]
ρ_{l+1}    = ς0 + t_N/2 · Cd · s_{l+1}                      ς0 = [p(0), 0, …]
v_{l+1}(σ_k) = (F s_{l+1})_k,  p_{l+1}(σ_k) = (F ρ_{l+1})_k
```

The first guess of every iteration is constant over the interval: q_0(t) = q(0), v_0(t) = v(0) and p_0(t) = p(0). The end of the interval is τ = 1, where every T_i equals 1. So the end values are simply the sums of the coefficients, and the engines accumulate those sums while they update the coefficients.

**Order of the processes.** Attitude is iterated to completion first. Only after that are velocity and position iterated, and they are iterated together. The attitude is then fixed, so the rotated specific force q∘f∘q* is formed once per interval, not once per iteration.

**Stopping rule.** Each process stops when

  √( Σ_i |Δcoef_i|² / (M+1) ) ≤ THR

or after MAX_IT iterations. In hardware the test is the same comparison squared, Σ|Δ|² ≤ THR²·(M+1), against a constant, so no square root is needed. The velocity/position process needs both its velocity and its position coefficients to meet the bound.

## 2. Fitting the sensor increments (`cheb_fit`)

The sensors deliver angle increments Δθ_n and velocity increments Δv_n over N equal sub-intervals. The rate ω^b(τ) and the specific force f^b(τ) are modelled as Chebyshev series of degree N−1. Their coefficients come from a least-squares fit to the increments.

With degree N−1 there are exactly N unknowns and N equations, so the least-squares solution is exact. It is the unique polynomial whose integral over each sub-interval equals the measured increment. Put another way, it is the derivative of the polynomial that interpolates the *cumulative* increments at the sub-interval boundaries τ_n = −1 + 2n/N.

Only its values at the roots σ_k are needed, and those are linear in the increments:

```
ω^b(σ_k) = Σ_n E[k][n] Δθ_n,
E[k][n]  = (2/t_N) Σ_{j=n..N} ℓ_j'(σ_k)
```

Here ℓ_j are the Lagrange basis polynomials on the nodes τ_0…τ_N. `inav_pkg::fit_weight` computes this sum. The hardware is therefore a single (M+1)×N matrix-vector product per sensor. It uses six multiply-accumulate lanes, one for each axis of ω and f, and takes (M+1)·N = 80 cycles.

No Chebyshev coefficients of the fit are ever formed. The testbench checks the result two ways:
- against exact polynomial rate profiles;
- against an explicit Gaussian-elimination least-squares solve of the Chebyshev system.

The relative error is about 4e-15.

## 3. Number format and constant tables

All state is signed fixed point: 96 bits with 64 fraction bits (`inav_pkg::fix_t`). That gives a range of ±2^31, which holds ECEF positions in metres, with a resolution of 5.4e-20.
- Products are formed at 192 bits, shifted right by 64 and truncated.
- Sums of squares for the stopping rule are kept at 192 bits. A threshold of 1e-16 therefore still means something: its square is 1e-32, which is about 2^-106 and lies inside the 2^-128 resolution of the squared values.

The method promises results close to double-precision round-off, and a narrower format would hide exactly the effects it is about. That is why the format is this wide.

The constant tables are computed with `real` arithmetic in constant functions and converted to fixed point when the design is elaborated:
- F;
- t_N/(2(M+1))·Cs and t_N/(M+1)·Cs;
- t_N/2·Cd;
- the fit matrix E.

The step length t_N is folded into the tables. Because of that, changing `T_N` or `M` only needs a re-elaboration; no table file has to be regenerated. Elaboration-time cosines come from a range-reduced Taylor series (`inav_pkg::rcos`), so no simulator math library is needed.

## 4. The engines

All three engines are serial: one point or one matrix element per clock, with combinational quaternion products. Each one has a one-cycle `start` and a one-cycle `done`. Inputs must stay stable from `start` to `done`, and outputs hold until the next `start`.

### `att_iter` — attitude iteration

| State | Cycles | Work |
|---|---|---|
| S_R | M+1 | Forms R_k = q_l(σ_k)∘ω^b(σ_k) − ω^e∘q_l(σ_k). |
| S_CS | (M+1)² | Computes b_{l+1} = χ0 + Cs'·R. It uses four lanes, one per quaternion component. It writes b in place, and alongside it accumulates the squared change and the end value Σb. |
| S_FQ | (M+1)² | Evaluates q_{l+1}(σ_k) = F b_{l+1}. |
| S_CHK | 1 | Stop or repeat. |

One iteration takes 2(M+1)² + (M+1) + 1 = 211 cycles at M = 9. The total is 1 + 211 × iterations cycles. Outputs:
- `q_pts`, the attitude at the roots, which is passed to the velocity stage;
- `q_end`, the attitude at τ = 1;
- the iteration count and a `converged` flag that says whether the threshold was met rather than the cap.

The quaternion is not re-normalised.

### `vp_iter` — velocity/position iteration

| State | Cycles | Work |
|---|---|---|
| S_A | M+1, once per interval | Forms a_k = q∘f∘q*. |
| S_G | (M+1) requests | Asks the gravity unit for g^e(p_l(σ_k)). |
| S_Y | M+1 | Forms Y_k. Because ω^e = (0, 0, Ω), the term 2ω^e×v is (−2Ωv_y, 2Ωv_x, 0). |
| S_CS | (M+1)² | Computes s_{l+1}. |
| S_CD | (M+1)² | Computes ρ_{l+1} from the *new* s_{l+1}. |
| S_FV | (M+1)² | Evaluates V and P together on six lanes. |
| S_CHK | 1 | Stop or repeat. |

Per iteration this is (M+1)(L+2) + (M+1) + 3(M+1)² + 1 cycles, where L is the gravity unit's latency: 351 cycles at L = 2. One interval costs at most 11 + 9 × 351 cycles.

**Gravity port.** Gravity depends on position through the conversion from ECEF to geodetic coordinates and a normal-gravity formula such as WGS-84. The method takes both from the geodesy literature, so here they sit outside the engine, behind a simple request/acknowledge port:
- The engine raises `g_req` and holds `g_pos` = p_l(σ_k) and `g_idx` = k until `g_ack`.
- It takes `g_val` (m/s², ECEF) on the acknowledge cycle.
- Assertions check that the request is held stable and that no acknowledge arrives without a request.

The testbenches connect `tb/grav_model.sv`, a double-precision behavioural model of WGS-84 normal gravity with a configurable latency.

### `imu_buffer` and `inav_top`

`imu_buffer` collects N samples from a valid/ready stream and offers them as one block. While the block waits, `in_ready` is low. The block is released the cycle after the fit has finished, so the next interval's samples are collected while the attitude and velocity iterations of the current one run.

`inav_top` sequences the stages for each interval: fit, then attitude, then velocity/position.
- It accepts a starting state (q, v, p) on `init_*` while idle.
- At the end of every interval it emits `out_valid` with q, v and p at the interval end, the two iteration counts and the two convergence flags.
- Those end values become the start values of the next interval.
- An assertion checks that at most one stage is busy at a time.

**Throughput.** At the defaults, the worst case per interval is 81 + 1 + 9·211 + 11 + 9·351 + 4 = 5,155 cycles at L = 2; typical intervals converge in 4–5 iterations and take 2,600–3,400 cycles. The sensor sample period is much longer than that:
- At 100 Hz the budget is 0.08 s per interval. Any clock above about 65 kHz keeps up.
- At 1000 Hz the budget is 8 ms. Any clock above about 0.65 MHz keeps up.

## 5. Where this design departs from, or goes beyond, the method as published

- **Position constant term.** One equation of the published derivation writes the constant term of the position coefficients with the previous velocity coefficients s_l. The neighbouring equations, and the final matrix form, use s_{l+1}. This design uses s_{l+1}.
- **Choices the method leaves open.**
  - Number format and width.
  - The serial datapath and its lane count.
  - The handshakes and the init port.
  - Reset behaviour: asynchronous, active low, clearing all state.
  - Ω = 7.292115e-5 rad/s.
  - How the velocity and position criteria combine: both must hold.
- **Closed-form fit.** The fit is done through the closed-form interpolation weights rather than by solving the least-squares system at run time. For the configuration used (fit degree N−1) the two are the same.
- **Outside the design.** The gravity and geodetic-conversion unit, the host link that streams samples and results (ethernet in the published FPGA set-up) and the FPGA programming hardware are not part of this RTL. The gravity port and the sample and result streams are the top-level ports that replace them.
- **No parallel datapath.** The method notes that the per-point evaluations are independent and could run in parallel. This design keeps them serial, which is ample for real time at 1000 Hz.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=… failures=…`, has a cycle watchdog and checks the block's exact cycle count. The reference is `tb/inav_ref_pkg.sv`, a double-precision model made of two parts:
- analytic quadratic rate and specific-force profiles, so the increments are known exactly;
- a fine-step RK4 integrator of the same differential equations, which gives a truth independent of the Chebyshev machinery.

| Testbench | What it exercises |
|---|---|
| `imu_buffer_tb` | Random gaps, back-pressure and data order over three blocks. |
| `cheb_fit_tb` | Polynomial profiles, and random data against a least-squares solve. |
| `att_iter_tb` | A slow profile (5 iterations, converged, quaternion error about 8e-16); a fast one; a violent one that hits the 9-iteration cap; a restart. Everything is compared against RK4. |
| `vp_iter_tb` | Gentle and manoeuvring intervals against RK4 (velocity about 1e-11 m/s, position about 2e-8 m); the gravity request count; the cycle formula. |
| `inav_top_tb` | Full default size, no parameter overrides. It streams five consecutive intervals through the top, as fast as it accepts samples, with a gravity latency of 3. |

Details of `inav_top_tb`:
- It compares each interval's q, v and p with RK4. The state is chained from one interval to the next.
- It counts each mechanism and fails if one never happened:
  - convergence by the threshold and by the cap, for both processes;
  - input back-pressure;
  - gravity requests.
- Reaching the velocity/position cap with a realistic gravity field is not possible in a single interval. The last interval therefore adds a steep artificial gradient to the test gravity field; the testbench header says so.
- It checks that every interval finishes within the 1000 Hz budget at 10 MHz (80,000 cycles).

`inav_flight_tb` runs the engine at its default sizes for 500 consecutive intervals, which is 40 s of navigation. The input is a continuous coning rate (0.5 rad/s, 2 Hz) and a sculling specific force (2 m/s², 2 Hz) on top of 1 g. The reference is an RK4 solution chained on its own from the initial state, not reset to the engine's output. Over the whole run:
- every interval met the criterion, with 7 attitude and 4 velocity/position iterations, in 2,977 cycles;
- the largest attitude error is 6e-14;
- the largest velocity error is 3e-11 m/s;
- the largest position error is 6e-7 m, most of which is the rounding of the double-precision reference at ECEF magnitudes.

To simulate one testbench with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module inav_top_tb \
    rtl/inav_pkg.sv tb/inav_ref_pkg.sv rtl/imu_buffer.sv rtl/cheb_fit.sv \
    rtl/att_iter.sv rtl/vp_iter.sv rtl/inav_top.sv tb/grav_model.sv tb/inav_top_tb.sv
./obj_dir/Vinav_top_tb
```

(The two packages must come first.) The full-size run takes well under a second.

**What has not been checked.**
- Runs longer than 40 s have not been simulated. A full 4000 s trajectory is 50,000 intervals, about 20 minutes of verilator time.
- No timing closure on an FPGA has been attempted. The combinational quaternion products, and the 96×96 multipliers feeding them, are long paths. A real implementation would pipeline them or share DSP-based multipliers.
