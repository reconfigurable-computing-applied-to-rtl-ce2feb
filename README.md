# FPGA kinematics for a bilateral haptic link (PHANToM Omni master and slave)

In a tactile-internet teleoperation link, an operator moves a *master* haptic
arm and a remote *slave* arm follows it. The slave then sends back the contact
force it meets, so that the operator feels it. Network delay takes most of the
latency budget, which is a few milliseconds for the round trip. What remains
goes to the per-sample computations at both ends: robot kinematics, Jacobians
and force models. This design puts all of those computations in hardware.
Every equation becomes its own spatially parallel floating-point circuit, so
a new sample is accepted on every clock and each result is ready one clock
later.

The arms are 3-DoF PHANToM Omni devices. The hardware has two halves:

* **HMD**, on the master side:
  * **FK-HMD** (forward kinematics) turns the master's joint angles into a tool
    position, which is sent over the network.
  * **KFF-HMD** (kinesthetic feedback force) turns the force received from the
    network into joint torques for the master's motors.
* **HSD**, on the slave side:
  * **IK-HSD** (inverse kinematics) turns the received tool position into joint
    references for the slave's joint controller.
  * **FK-HSD** computes where the slave tool really is.
  * **FBF-HSD** (feedback force) forms a spring-like contact force from the
    distance between the tool and the nearest object surface.

All values between blocks are IEEE-754 single precision (F32). Sines, cosines,
arctangents and arccosines are computed by CORDIC units in 16-bit fixed point.

## 1. Signal flow

```
            master side (hmd)                         slave side (hsd)
 theta^MD ──┬─> FK-HMD ──> c(n) ══ forward channel ══> v(n) ──> IK-HSD ──> theta^HSD ──> slave joint
  b(n)      │                                                                            controller
            │                                       theta^SD ──> FK-HSD ──> l(n) ─┐
            └─> KFF-HMD <── q(n) ══ backwards channel ══ h(n) <── FBF-HSD <───────┘
                   │                                                 ^
                   v                                     s^OBJ, h_x,y,z
               tau^HMD = p(n) to the master's motors
```

The letters are the sample streams of the discrete link model:

| Stream | Meaning |
|---|---|
| b(n) | master joint angles |
| c(n) | master tool position |
| v(n) | c(n) after the forward channel |
| g(n) | what the slave reports: its joint angles theta^SD and the nearest object point s^OBJ |
| l(n) | slave tool position |
| h(n) | contact force |
| q(n) | h(n) after the backwards channel |
| p(n) | master joint torques |

The network, both arms, the operator, the environment and the slave's joint
controller are outside the design. They connect through the ports of
`tactile_system`, the top module. So do the prediction/detection stages that a
complete link could place in front of IK-HSD and KFF-HMD: here, v(n) and q(n)
feed those modules directly.

## 2. The arm model

Segment lengths:
* L1 = L2 = 0.135
* L3 = 0.025
* L4 = L1 + 0.035 = 0.170

These are the Omni's published dimensions. They are used as plain numbers, in
the same unit as the tool coordinates (`tactile_pkg`).

| Module | Equations |
|---|---|
| FK | x = −sin θ1 (L1 cos θ2 + L2 sin θ3)<br>y = L1 sin θ2 − L2 cos θ3 + L3<br>z = L1 cos θ1 cos θ2 − L4 + L2 cos θ1 sin θ3 |
| IK | θ1 = −atan2(x, z + L4)<br>R = √(x² + (z+L4)²)<br>r = √(x² + (z+L4)² + (y−L3)²)<br>γ = acos((L1² − L2² + r²) / (2 L1 r))<br>β = atan2(y − L3, R)<br>α = acos((L1² + L2² − r²) / (2 L1 L2))<br>θ2 = γ + β<br>θ3 = θ2 + α − π/2 |
| KFF | τ = Jᵀ F, where J is the 3×3 Jacobian of FK (`jm.sv` lists its nine elements; J21 = 0) |
| FBF | F_k = h_k (k_obj − k_env), for k = x, y, z |

In the FBF equation, h_k is the object's elasticity along axis k. It is an
input, because it belongs to the object and may change from sample to sample.

## 3. Circuits, one per equation

Every output is computed by its own circuit, with its own operators and
trigonometric blocks. Nothing is shared or time-multiplexed.

| Circuit | Trigonometric blocks | Operators |
|---|---|---|
| x of FK (`fk.sv`) | 3 | 3 multipliers, 1 sign inversion, 1 adder |
| y of FK | 2 | 2 multipliers, 2 adders |
| z of FK | 3 | 4 multipliers, 2 adders |
| IK (`ik.sv`), all eight quantities | | each with its own circuit (`z + L4` is built three times) |
| Jacobian (`jm.sv`) | 16 in all | |
| τ_i (`kff.sv`), each torque | | 3 multipliers, 2 adders |

Constants that the circuits use with a minus sign are stored negated:
−L1, −L2, −L3, −L4 and −π/2. A subtraction of a constant is therefore an
addition.

The γ and α circuits each use a floating-point divider and an arccosine. R and
r each use a floating-point square root.

## 4. Number formats

**Floating point.** Four combinational single-precision operators: `fp_add`
(with a `sub` input), `fp_mul`, `fp_div` and `fp_sqrt`.
* All round to nearest, ties to even.
* A subnormal input reads as zero, and a subnormal result is flushed to +0.
* An exponent overflow gives infinity.
* NaN and infinity inputs are not treated specially. The kinematics never
  produce them for reachable arm poses.
* Multiplication, division and square root match an IEEE reference bit for
  bit. Addition is checked to within one unit in the last place.

**Fixed point.** Only inside the trigonometric function block:
* Format [s16.13]: 16 bits, 13 of them fractional.
* The range is just under ±4, with a resolution of 1.22e-4.
* Angles up to ±π fit. So do the arccosine argument and all positions and
  lengths of this arm.

## 5. The trigonometric function block (TFB)

`tfb.sv` is `f2fp` → `cordic` → `fp2f`. The parameter `FUNC` selects sin, cos,
atan2 or acos, matching the function each circuit needs. This block is where
all of the numerical error of the design comes from, so it deserves care.

**F2FP** (`f2fp.sv`) shifts the mantissa into the fixed-point grid. It rounds
half away from zero and saturates at ±(2¹⁵−1) LSB.

**FP2F** (`fp2f.sv`) is exact, because every [s16.13] value is an F32 number.

**CORDIC** (`cordic.sv`):
* It is fully unrolled, with ITER = 16 micro-rotations, one per bit of the
  word. Each step is two shifts and three add/subtracts.
* The words inside carry two extra integer bits, so the CORDIC gain of about
  1.647 cannot overflow. Results are saturated back to 16 bits.
* The arctangent table atan(2⁻ⁱ) and the gain compensation
  K = ∏ 1/√(1+2⁻²ⁱ) are computed during elaboration. The table uses the series
  atan(u) = Σ (−1)ᵏ u²ᵏ⁺¹/(2k+1) and the exact value π/4 for i = 0; K uses a
  Newton square root. So changing ITER or N needs no table edit.

**Rotation mode (sin, cos).**
* The vector starts at (K, 0) and is turned by the angle.
* Angles beyond ±π/2 are outside CORDIC's convergence range. They are first
  folded by ∓π, and the two results are negated.

**Vectoring mode (atan2).**
* The vector (x, y) is turned onto the positive x axis, and the angle used is
  accumulated.
* A vector in the left half-plane is first turned by ±π/2.

**acos.**
* acos(a) = atan2(√(1−a²), a). The steps are all in fixed point:
  1. Clamp a to [−1, 1].
  2. Square it and subtract the square from 1.
  3. Take a restoring integer square root of the result.
  4. Run the pair through the vectoring CORDIC.
* This avoids a separate arcsine/arccosine algorithm. Its accuracy degrades
  only for |a| → 1, where acos itself has an infinite slope.

**Accuracy to expect.**

| Function | Error |
|---|---|
| sin, cos | within a few LSB (about 5e-4) everywhere |
| atan2 | grows as the vector gets short, roughly 3 LSB / \|(x,y)\| |

The atan2 behaviour matters for IK. θ1 = −atan2(x, z+L4) is taken from
coordinates of a few centimetres, so the IK angles carry errors of up to about
1e-2 rad near the arm's singular poses. Their mean squared error over the
validation trajectory is about 1e-6 rad².

## 6. Timing and interfaces

Each module is one combinational datapath followed by one output register:

| Module | Latency | Path length reported for a Virtex-6 implementation |
|---|---|---|
| FK-HMD / FK-HSD (`fk`) | 1 clock | 47 ns |
| KFF-HMD (`kff_hmd`) | 1 clock | 70 ns |
| IK-HSD (`ik`) | 1 clock | 218 ns |
| FBF-HSD (`fbf`) | 1 clock | 21 ns |

Rules that apply to every module:
* Each module takes a sample when `in_valid` is 1.
* `out_valid` rises exactly one clock later, and the output holds until the
  next sample.
* A new sample may come on every clock.
* Reset is asynchronous and active low (`rst_n`). It clears the outputs and
  the valid flags.
* No clock frequency is assumed. The clock period must cover the longest
  combinational path. As a single-clock system, that is the IK path. A faster
  clock needs pipeline registers inside the modules, which this RTL does not
  have.

Top module `tactile_system`:
* Each side has its own sample strobe: `hmd_sample` and `hsd_sample`.
* All data ports are F32 structs from `tactile_pkg`:
  * `vec3_t` is {x, y, z}.
  * `joints_t` is {t1, t2, t3}.

| Output | Meaning | Latency after its sample |
|---|---|---|
| `pos_hmd` | c(n) | 1 clock |
| `tau_hmd` | p(n) | 1 clock |
| `theta_ref` | θ^HSD(n) | 1 clock |
| `pos_env` | l(n) | 1 clock |
| `force_hsd` | h(n) | 2 clocks |

The force takes two clocks because FBF-HSD needs l(n) from FK-HSD. The object
point and the elasticities are held in a register for that one clock (`hsd.sv`),
so that the force of sample n uses the object data of the same sample n.

The total hardware delay around the loop is:
* master: 1 clock (FK-HMD) + 1 clock (KFF-HMD)
* slave: 1 clock (IK-HSD) + 2 clocks (FK-HSD, then FBF-HSD)

That is five clocks, about 1 µs at a clock slow enough for IK, far below the
millisecond budget.

## 7. Where this RTL departs from, or adds to, its source description

* **Registers, valid flags and reset** are additions. The source gives each
  module's sampling period but no clocking scheme.
* **Operator details are design choices:** the F32 rounding and exception
  rules, the CORDIC iteration count, the guard bits and angle folding, the
  F2FP rounding, the acos construction, and the square-root and division
  algorithms.
* **The r equation.** As printed it is missing a parenthesis. The circuit
  built is r = √(x² + (z+L4)² + (y−L3)²), which is the quantity its diagram
  draws and the one that makes IK exact.
* **Start position.** At all joints zero, the FK equations give the tool
  position (0, −0.110, −0.035). The source quotes y = −0.107 for that pose.
  The equations were followed.
* **Object elasticities** are per-sample inputs.
* **Not built:** the prediction/detection stages and the slave's joint
  controller. Their function is left open by the source. The network and the
  devices are not hardware of this design.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one:
* compares against double-precision models of the same equations, in
  `tb/fp_ref_pkg.sv`, which includes its own F32 ↔ real conversion;
* checks latency and valid flags where a module has a register;
* ends with a line `TB_RESULT checks=<n> failures=<n>`;
* has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul`, `tb_fp_div`, `tb_fp_sqrt` | random operands over wide exponent ranges; add within 1 ULP, the others bit-exact; plus exact cases |
| `tb_f2fp`, `tb_fp2f` | rounding and saturation; exhaustive over all 65 536 codes |
| `tb_cordic`, `tb_tfb` | sin/cos over ±π, atan2 over all quadrants (tolerance grows as 1/\|v\|), acos over [−1, 1]; counts folded angles and left-half vectors |
| `tb_fk`, `tb_ik`, `tb_jm`, `tb_kff`, `tb_kff_hmd`, `tb_fbf` | random poses and forces; per-sample tolerances and mean-squared-error bounds; output hold between samples |
| `tb_hmd`, `tb_hsd` | both sides, with back-to-back samples and idle gaps; the two-clock force alignment |
| `tb_tactile_system` | the closed loop (below) |

`tb_tactile_system` runs the whole link at default parameters over the
1200-sample validation trajectory:
* Starting from all joints at zero, joint 1 turns to π/2, then joint 2 to π/4,
  then joint 3 to π/4, with 400 samples per movement, as linear ramps.
* Around the design, the testbench models:
  * a network channel in each direction: a delay of 3 samples forward and 2
    backwards, plus zero-mean noise of σ = 1e-5;
  * a slave that tracks its joint reference with one sample of lag;
  * a fixed object with an elasticity of 60 along each axis.
* Every output is checked at every sample.
* It checks that every mechanism happened at least once:
  * motion of each joint;
  * delayed data on both channels;
  * non-zero forces;
  * non-zero torques.

Mean squared errors from that run, per scalar output, against the
double-precision model fed with the same inputs:

| Module | MSE |
|---|---|
| FK-HMD | 2.9e-9 |
| FK-HSD | 3.1e-9 |
| IK-HSD | 7.1e-7 rad² |
| round trip θ^MD(n−3) → θ^HSD(n) | 6.7e-7 rad² |
| KFF-HMD | 4.4e-8 |
| FBF-HSD | 7.8e-15 |

These are of the same order as, or below, the figures published for an FPGA
implementation of the same circuits with the same [s16.13] trigonometry:
* FK: 0.8–2.3e-8
* IK: 2.7–3.7e-6
* KFF: 0.5–3.4e-7

To run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_tactile_system \
    rtl/tactile_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv tb/tb_tactile_system.sv -o sim
./obj_dir/sim
```

Replace the last testbench file and `--top-module` to run another one. The
end-to-end run takes under half a minute.

## 9. Files

**rtl/**

| File | Contents |
|---|---|
| `tactile_pkg.sv` | types (`f32_t`, `vec3_t`, `joints_t`, `jacobian_t`, `tfb_func_e`), F32 constants |
| `fp_add.sv`, `fp_mul.sv`, `fp_div.sv`, `fp_sqrt.sv` | F32 operators |
| `f2fp.sv`, `cordic.sv`, `fp2f.sv`, `tfb.sv` | trigonometric function block |
| `fk.sv`, `ik.sv`, `jm.sv`, `kff.sv`, `kff_hmd.sv`, `fbf.sv` | the kinematics and force modules |
| `hmd.sv`, `hsd.sv` | master-side and slave-side groupings |
| `tactile_system.sv` | top |

**tb/**

| File | Contents |
|---|---|
| `fp_ref_pkg.sv` | reference models and helpers |
| `tb_<module>.sv` | one testbench per module |
