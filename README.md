# A reconfigurable back end for sliding-window visual-inertial localization

A robot that localizes itself with a camera and an IMU keeps a short history of
*keyframes*: its poses at recent instants, together with the 3-D points
(*features*) those keyframes see. Each time a keyframe arrives, the back end
solves a small non-linear least-squares problem. It finds the keyframe states
and feature depths that best explain two kinds of measurement: where each
feature was seen in each image, and what the IMU integrated between
neighbouring keyframes. The oldest keyframe is then dropped. Its information is
not thrown away: it is folded into a *prior* that the next window starts from.

This RTL implements that back end as one accelerator. It is a
Levenberg-Marquardt (LM) solver plus a marginalization unit, and both share the
expensive linear-algebra blocks. Its structure follows the FPGA accelerator
described by Liu, Wan, Yu et al. ("An Energy-Efficient and Runtime-Reconfigurable
FPGA-Based Accelerator for Robotic Localization Systems"). The details those
authors do not give are filled in here and flagged below. The design is
*runtime reconfigurable*: a small table maps the number of tracked features to
three settings:
- the number of LM iterations;
- how many parallel Schur-elimination units are clocked;
- how many Cholesky update units are clocked.

Fewer features therefore cost fewer cycles and less switching activity.

## Problem size and number format

| quantity | default | where it comes from |
|---|---|---|
| keyframes in the window `N_KF` | 10 | a 150x150 system matrix at 15 states per keyframe |
| states per keyframe | 15 | position, orientation error, velocity, accelerometer bias, gyro bias |
| feature slots `NF` | 300 | the reconfiguration table covers up to 300 features |
| observations per feature `MAX_OBS` | 8 | own choice; bounds the camera storage |
| Schur units `NUM_SCHUR` | 47 | largest entry of the reconfiguration table |
| Cholesky update units `NUM_UPD` | 97 | largest entry of the reconfiguration table |
| features marginalized with a keyframe `NM1` | 32 | own choice |

Every datapath value is a 32-bit signed fixed-point number in Q16.16 format
(`slam_pkg::fx_t`). Multiplication and division saturate, and a division by
zero returns the saturated value. Square roots are exact integer roots. The
32-bit word matches a 150x150 matrix occupying 720 kb. The 16/16 split is this
design's choice. Scenes are expected in metres, with depths between roughly 0.1
and a few hundred metres.

## Data flow of one window

Everything enters as `cmd_t` words through a valid/ready input buffer
(`stream_fifo`). A window is described by these commands:

- `KF_Q`, `KF_P`, `KF_V`: the keyframe states;
- `FEAT`: each feature's host keyframe, normalised pixel coordinates and
  inverse depth λ;
- `OBS`: up to `MAX_OBS` observations of a feature, as keyframe and pixel;
- `IMU_DP`, `IMU_DV`, `IMU_DQ`: the IMU pre-integration between consecutive
  keyframes, with the interval dt;
- `EXT_Q`, `EXT_T`: the camera-to-IMU extrinsic;
- `PRIOR_H`, `PRIOR_R`: the prior, if it is not the one the accelerator made
  itself;
- `LUT` and `CFG`: table rows, and the feature count with the LM damping μ.

`RUN` then does the following:

1. **Look-up.** The feature count selects a table row, which gives the
   iteration count and the number of active units. The unit enables appear on
   the `schur_clk_en` and `upd_clk_en` outputs. These are the signals that
   drive the FPGA clock gates. Inside the RTL, a disabled unit simply holds its
   registers.
2. **Build the normal equations** `A Δ = b` in the RAMs of the Schur block.
   - *Visual terms.* The visual Jacobian works feature by feature. It loads a
     feature once: back-projection into the host frame and into the world.
     Then it streams that feature's observations. Each observation is moved
     into the observing keyframe's frame with the rotation already stored for
     that keyframe and projected. The result is a 2-row residual with its
     Jacobian. `dtd_evaluate` turns each 2x4 block into the lower triangle of
     DᵀD and into Dᵀe. These go to three places:
     - `U`: one scalar per feature, since each feature has a single inverse
       depth;
     - `W`: feature × state;
     - `V` and `b`.
   - *IMU terms.* `imu_jacobian` computes the position, velocity and attitude
     residuals of each keyframe pair. It stores a compact record: R_iᵀ, dt and
     the residuals. The blocks of the IMU Jacobian are all ±R_iᵀ or −R_iᵀ·dt,
     so the zero and identity blocks never need storing. `hessian_calc`
     expands a record into the 6x12 Jacobian over (p_i, v_i, p_j, v_j) and
     accumulates its Hessian and gradient.
   - *Prior and damping.* The prior is added as H_p and r_p − H_p·dx, where dx
     is the step taken since the prior was made. Then μ is added to every
     diagonal of V and U.
3. **Schur elimination.** `schur_elim` removes the inverse depths:
   S = V − W U⁻¹ Wᵀ and r = b_V − W U⁻¹ b_U. U is diagonal, so this costs
   one division per feature. Wᵀ is the transpose of W, so it is never stored.
4. **Cholesky.** `cholesky` factors S = L Lᵀ (see below). `subst_solve` then
   runs the forward and the backward substitution for dx.
5. **Update.** Positions and velocities take dx. Each inverse depth is
   back-substituted as Δλ = (b_U − Wᵀ dx) / U.
6. **Repeat** from step 2 for the number of iterations the table gave.
7. **Marginalization** (see below). The new prior is written back over the old
   one, shifted by 15 states so that it indexes the next window.
8. **Output.** Keyframe positions, inverse depths, H_p (lower triangle) and r_p
   leave through the output buffer as `out_t` words. `run_done` pulses at the
   end. `iters_done` and the reprojection cost of the first and last iteration
   (`cost_first`, `cost_last`) stay readable.

The visual and IMU Jacobians here cover position, velocity and inverse depth.
Orientation and bias states take part in the system only through the prior and
the damping. They are not updated. This is the main simplification of this RTL.

## Schur elimination with parallel units

S is symmetric and only its lower triangle is kept: `tri_idx(i, j)` gives the
address. For each selected feature, unit *k* of `n_active` takes rows
k, k+n, k+2n, … of S. It skips a row in one cycle when the feature's W entry
for that row is zero. Otherwise it updates one element S(i, j), j ≤ i, per
cycle. The `dim` input restricts the work to the first `dim` states, and
`feat_sel` restricts it to a subset of features. Marginalization uses both. A
RAM is cleared in one cycle by clearing a packed vector of per-word valid bits;
a word whose bit is clear reads as zero. The same trick is used for the W RAM,
for the marginalization operands and for the prior.

## Cholesky with one Evaluate and time-multiplexed Update units

Column *i* of L is produced by the **Evaluate** unit, one element per cycle:
first the square root of the pivot, then each element below it divided by that
root. Forming column *i* requires the trailing matrix to have been updated with
columns 0…i−1. The update work of column *i* is i(i−1)/2 multiply-subtracts
against i evaluations, so a single updater would dominate.

Here `n_active` Update units share the trailing columns i+1, i+2, …: unit *k*
owns columns i+1+k, i+1+k+n, and so on. Each unit walks down its column one row
per cycle, one row behind Evaluate, because it needs L(row, i) as soon as it
exists. Evaluate and Update therefore overlap within a column. The next column
starts when all units are idle. With 12 states, going from 1 update unit to 4
cuts the factorisation from 334 to 148 cycles. A non-positive pivot raises
`not_pd`.

## Marginalization by block inverse

The parameters that leave the window form M:
- the up-to-`NM1` features hosted by the oldest keyframe, whose block M11 is
  diagonal;
- the 15 states of the oldest keyframe (M22).

The other 135 states form A, and the coupling between the two sets is Z. The
prior is

    H_p = A − Z M⁻¹ Zᵀ,    r_p = b_A − Z M⁻¹ b_M.

Because M11 is diagonal, M⁻¹ follows from the Schur complement
S' = M22 − M21 M11⁻¹ M12. That is the same operation the NLS solver performs on
features and states. The top runs:
1. the shared `schur_elim` block on the first 15 states, with only the
   marginalized features selected;
2. the shared `cholesky` block to factor S';
3. `marginalization` for the remaining steps, one multiply-accumulate per
   cycle:
   - invert L;
   - S'⁻¹ = L⁻ᵀ L⁻¹;
   - P = M11⁻¹ M12;
   - the four blocks of M⁻¹;
   - T = Z M⁻¹;
   - H_p = A − T Zᵀ (lower triangle only);
   - r_p = b_A − T b_M.

## Runtime reconfiguration

`runtime_reconfig` holds 8 rows of {feature bound, iterations, Schur units,
update units}. The row used is the first one whose bound exceeds the feature
count. After reset the table holds:

| features | iterations | Schur units | update units |
|---|---|---|---|
| < 200 | 6 | 47 | 97 |
| 200–249 | 5 | 42 | 63 |
| 250–299 | 4 | 35 | 42 |
| ≥ 300 | 4 | 35 | 42 |

A `LUT` command rewrites any row at any time, including while a window is
being solved. The new row applies from the next `RUN`. Unit counts are clamped
to the number of units built.

## Interfaces and timing

- One clock. Asynchronous, active-low reset.
- Both streams use valid/ready handshakes. The input buffer applies
  back-pressure while a window is being solved, because commands are consumed
  only between runs.
- Block latencies (see each file's header):

| block | latency |
|---|---|
| `qm` | 2 cycles |
| `ctu` | 3 cycles |
| keyframe rotation write (`quat_to_rot`) | 2 cycles |
| visual residual and Jacobian | 13 cycles after the observation is accepted |
| IMU record | 6 cycles |
| `subst_solve` | dim·(dim+1) cycles plus a few |

- The Schur and Cholesky run times depend on the sparsity of W and on the
  number of active units. The testbenches print them.

## Departures from the described accelerator

- **Missing states.** Only the position/velocity and inverse-depth parts of the
  Jacobians are computed. There are no rotation, host-pose or bias Jacobians,
  so orientations and biases are not refined.
- **Weights.** Information weights are unit. There is no robust kernel.
- **No separate sparse storage.** The camera and IMU contributions to S are not
  stored separately in sparse form. One dense triangular RAM holds S.
- **Own choices.** The co-observation limit (8) and the number of marginalized
  feature slots (32) are this design's own.
- **Clock gating as enables.** Clock gating is represented by enable masks. The
  FPGA clock buffers are not instantiated.
- **Outside the RTL.** The vision front end and the DDR memory are not part of
  it. The host supplies what they would.
- **Not tuned for BRAM.** The RAMs are plain arrays with several access ports
  in the same cycle, for clarity. An FPGA mapping would need banking so that
  each Schur or update unit gets its own port. Synthesis of the full-size top
  is slow for the same reason.

## Verification

Each block has a self-checking testbench in `tb/`. These compare against
double-precision models computed inside the testbench: finite-difference
Jacobians, reference Cholesky and solves, and a dense reference for the
marginalization. They also check latencies. Each prints
`TB_RESULT checks=N failures=M`.

`tb_slam_accel` runs the whole accelerator end to end at reduced size (4
keyframes, 16 features). `tb_slam_accel_full` runs it at the default size
(10 keyframes, 300 feature slots, 40 features used).

The end-to-end test:
- builds a synthetic scene with exact observations and IMU terms;
- perturbs the keyframe positions and solves two windows;
- changes the table between the windows: window 2 gets 3 iterations and half
  the units;
- checks that the reprojection cost falls, that the position error to ground
  truth falls, the iteration counts, the number and sign of the output words,
  and that no pivot fails;
- counts each mechanism and fails if one never occurs:
  - feature reuse;
  - Schur runs with all units and with fewer, clock-gated units;
  - full-size and marginalization-size Cholesky runs;
  - marginalization;
  - prior relinearization;
  - table rewrite;
  - input back-pressure;
  - output back-pressure.

To run a testbench with Verilator:

    verilator --binary --timing -y rtl -y tb rtl/slam_pkg.sv tb/tb_util_pkg.sv \
        tb/tb_slam_accel.sv --top-module tb_slam_accel
    ./obj_dir/Vtb_slam_accel

The reduced end-to-end test takes about 15 s to build and run. The full-size
test takes about 20 s.
