// tb_slam_accel_full -- the end-to-end test of tb_slam_accel run on the
// accelerator at its default (full) size: 10 keyframes, 300 feature slots,
// 47 Schur elimination units, 97 Cholesky update units.  The top is
// instantiated without any parameter override; the local constants below
// only mirror its defaults for the stimulus and the expected counts.
// 40 features are used, so the default lookup-table row (fewer than 200
// features: 6 iterations, 47 Schur units, 97 update units) applies in
// window 1.  Checks and mechanism counters are those of tb_slam_accel.
//
// tb_slam_accel -- end-to-end test of the accelerator on a synthetic scene.
//
// A ground-truth trajectory of N_KF keyframes (small rotations, forward
// motion) and NFEAT world points is generated; every point is hosted by one
// keyframe (pixel coordinates and inverse depth from the true pose) and
// observed, without noise, by up to MAX_OBS other keyframes.  IMU
// pre-integration terms are computed from the true states, so the true
// window has zero residual.  The positions of all keyframes except the
// first are then perturbed and the window is solved:
//   window 1: default lookup table -> 6 LM iterations, then marginalization;
//   window 2: a new table row installed at run time (3 iterations, fewer
//             Schur and update units), solved with the prior produced by
//             window 1.
// Checked: the reprojection cost falls by at least 10x and the position
// error to ground truth falls; the iteration count follows the table; the
// output stream carries the expected numbers of positions, inverse depths,
// H_p and r_p words; H_p has a positive diagonal; no pivot fails.
// Mechanisms counted (each must occur): feature reuse (fewer feature loads
// than observations), Schur runs with all and with fewer units (clock-gated
// units), Cholesky runs at full size and at marginalization size,
// marginalization, relinearised prior, lookup-table rewrite, input-buffer
// back-pressure and output-buffer back-pressure.
module tb_slam_accel_full;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N_KF = 10, NF = 300, MAX_OBS = 8, NUM_SCHUR = 47, NUM_UPD = 97, NM1 = 32;
  localparam int NFEAT = 40;
  localparam int NV = N_KF * 15, NA = NV - 15;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  cmd_t in_cmd = '0;
  out_t out_word;
  logic busy, run_done, not_pd;
  logic [3:0] iters_done;
  fx_t cost_first, cost_last;
  logic [NUM_SCHUR-1:0] schur_clk_en;
  logic [NUM_UPD-1:0] upd_clk_en;

  slam_accel dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_cmd, .out_valid, .out_ready, .out_word,
    .busy, .run_done, .iters_done, .cost_first, .cost_last, .not_pd, .schur_clk_en, .upd_clk_en);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_feat_loads = 0, n_obs = 0, n_schur_full = 0, n_schur_gated = 0, n_chol_full = 0,
      n_chol_marg = 0, n_marg = 0, n_prior_relin = 0, n_lut_write = 0, n_in_stall = 0,
      n_out_stall = 0;
  int o_pos = 0, o_lam = 0, o_hp = 0, o_rp = 0, hp_diag_bad = 0;
  real pos_out [N_KF*3];

  always @(posedge clk) if (rst_n) begin
    if (dut.vj_feat_loaded) n_feat_loads++;
    if (dut.vj_res_valid) n_obs++;
    if (dut.sc_start && dut.sc_dim == ($clog2(NV+1))'(NV)) begin
      if (int'(dut.n_schur) == NUM_SCHUR) n_schur_full++; else n_schur_gated++;
    end
    if (dut.u_chol.start && int'(dut.u_chol.dim) == NV) n_chol_full++;
    if (dut.u_chol.start && int'(dut.u_chol.dim) == 15) n_chol_marg++;
    if (dut.mg_done) n_marg++;
    if (dut.sc_acc_we && dut.sc_tgt == TGT_BV && dut.pb[dut.sc_ai] != '0) n_prior_relin++;
    if (dut.u_rr.tbl_we) n_lut_write++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (out_valid && out_ready) begin
      unique case (out_word.tag)
        OUT_POS: begin pos_out[out_word.i] = fr(out_word.val); o_pos++; end
        OUT_LAMBDA: o_lam++;
        OUT_HP: begin o_hp++; if (out_word.i == out_word.j && out_word.val <= 0) hp_diag_bad++; end
        default: o_rp++;
      endcase
    end
  end

  // random back-pressure on the output side
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  task automatic send(input cmd_op_e op, input int a, input int b,
                      input fx_t d0, input fx_t d1, input fx_t d2, input fx_t d3);
    in_cmd = '{op: op, a: 16'(a), b: 16'(b), d0: d0, d1: d1, d2: d2, d3: d3};
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // ground truth
  rq_t kq [N_KF]; rv_t kp [N_KF]; rv_t kv [N_KF]; rv_t pert [N_KF];
  rq_t qic; rv_t tic;
  rv_t pert2 [N_KF];
  bit q2_done = 0;
  real dtv = 0.1;

  function automatic rv_t to_cam(input int k, input rv_t pw);
    rv_t d, pimu, o;
    for (int i = 0; i < 3; i++) d[i] = pw[i] - kp[k][i];
    pimu = rq_rot(rq_conj(kq[k]), d);
    for (int i = 0; i < 3; i++) d[i] = pimu[i] - tic[i];
    o = rq_rot(rq_conj(qic), d);
    return o;
  endfunction

  function automatic real pos_err();
    real e; e = 0.0;
    for (int k = 0; k < N_KF; k++) for (int i = 0; i < 3; i++)
      e += (pos_out[k*3+i] - kp[k][i]) * (pos_out[k*3+i] - kp[k][i]);
    return $sqrt(e);
  endfunction

  task automatic load_window();
    rv_t g; g = '{0.0, 0.0, -9.81};
    send(CMD_EXT_Q, 0, 0, to_fx(qic[0]), to_fx(qic[1]), to_fx(qic[2]), to_fx(qic[3]));
    send(CMD_EXT_T, 0, 0, to_fx(tic[0]), to_fx(tic[1]), to_fx(tic[2]), 0);
    for (int k = 0; k < N_KF; k++) begin
      send(CMD_KF_Q, k, 0, to_fx(kq[k][0]), to_fx(kq[k][1]), to_fx(kq[k][2]), to_fx(kq[k][3]));
      send(CMD_KF_P, k, 0, to_fx(kp[k][0] + pert[k][0]), to_fx(kp[k][1] + pert[k][1]),
           to_fx(kp[k][2] + pert[k][2]), 0);
      send(CMD_KF_V, k, 0, to_fx(kv[k][0]), to_fx(kv[k][1]), to_fx(kv[k][2]), 0);
    end
    for (int k = 0; k + 1 < N_KF; k++) begin
      rv_t a, b, dp, dv; rq_t dq;
      for (int i = 0; i < 3; i++) begin
        a[i] = kp[k+1][i] - kp[k][i] - kv[k][i]*dtv + 0.5*g[i]*dtv*dtv;
        b[i] = kv[k+1][i] - kv[k][i] + g[i]*dtv;
      end
      dp = rq_rot(rq_conj(kq[k]), a); dv = rq_rot(rq_conj(kq[k]), b);
      dq = rq_mul(rq_conj(kq[k]), kq[k+1]);
      send(CMD_IMU_DP, k, 0, to_fx(dp[0]), to_fx(dp[1]), to_fx(dp[2]), to_fx(dtv));
      send(CMD_IMU_DV, k, 0, to_fx(dv[0]), to_fx(dv[1]), to_fx(dv[2]), 0);
      send(CMD_IMU_DQ, k, 0, to_fx(dq[0]), to_fx(dq[1]), to_fx(dq[2]), to_fx(dq[3]));
    end
    for (int f = 0; f < NFEAT; f++) begin
      int h, no; rv_t pw, pc;
      h = f % N_KF;
      // a world point 3-6 m in front of the host camera
      pc = '{urand(-1.0, 1.0), urand(-1.0, 1.0), urand(3.0, 6.0)};
      begin
        rv_t pimu, t1;
        pimu = rq_rot(qic, pc); for (int i = 0; i < 3; i++) pimu[i] += tic[i];
        t1 = rq_rot(kq[h], pimu); for (int i = 0; i < 3; i++) pw[i] = t1[i] + kp[h][i];
      end
      send(CMD_FEAT, f, h, to_fx(pc[0]/pc[2]), to_fx(pc[1]/pc[2]), to_fx(1.0/pc[2]), 0);
      no = 0;
      for (int s = 1; s < N_KF && no < MAX_OBS; s++) begin
        int j; rv_t cj;
        j = (h + s) % N_KF;
        cj = to_cam(j, pw);
        send(CMD_OBS, f, no, fx_t'(j), to_fx(cj[0]/cj[2]), to_fx(cj[1]/cj[2]), 0);
        no++;
      end
    end
  endtask

  initial begin
    #2.0e11;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real err0, err1, err2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    qic = rq_norm('{1.0, 0.02, -0.03, 0.01}); tic = '{0.05, -0.02, 0.01};
    for (int k = 0; k < N_KF; k++) begin
      kq[k] = rq_norm('{1.0, urand(-0.05, 0.05), urand(-0.05, 0.05), urand(-0.05, 0.05)});
      kp[k] = '{0.3 * k, urand(-0.1, 0.1), urand(-0.1, 0.1)};
      kv[k] = '{0.0, 0.0, 0.0};
      for (int i = 0; i < 3; i++) pert[k][i] = (k == 0) ? 0.0 : urand(-0.05, 0.05);
    end
    // velocities consistent with the positions
    for (int k = 0; k < N_KF; k++) for (int i = 0; i < 3; i++)
      kv[k][i] = (k + 1 < N_KF) ? (kp[k+1][i] - kp[k][i]) / dtv : kv[k-1][i];
    err0 = 0.0;
    for (int k = 0; k < N_KF; k++) for (int i = 0; i < 3; i++) err0 += pert[k][i]*pert[k][i];
    err0 = $sqrt(err0);
    // prior: weak information on every state, strong on the first keyframe
    for (int i = 0; i < NV; i++)
      send(CMD_PRIOR_H, i, i, to_fx(i < 15 ? 100.0 : 0.05), 0, 0, 0);
    send(CMD_CFG, NFEAT, 0, to_fx(0.01), 0, 0, 0);
    load_window();
    // ---- window 1
    send(CMD_RUN, 0, 0, 0, 0, 0, 0);
    // window 2 (new table row, new perturbation) is queued while window 1
    // is being solved, so the input buffer fills up and back-pressures
    for (int k = 1; k < N_KF; k++) for (int i = 0; i < 3; i++) pert2[k][i] = urand(-0.05, 0.05);
    fork begin
      logic [35:0] row;
      row = {16'd200, 4'd3, 8'(NUM_SCHUR/2), 8'(NUM_UPD/2)};
      send(CMD_LUT, 0, 0, fx_t'(row[31:0]), fx_t'({28'd0, row[35:32]}), 0, 0);
      pert = pert2;
      load_window();
      q2_done = 1;
    end join_none
    @(posedge run_done);
    repeat (40) @(negedge clk);
    err1 = pos_err();
    $display("window 1: iterations %0d cost %f -> %f, position error %f -> %f",
             iters_done, fr(cost_first), fr(cost_last), err0, err1);
    checks++; if (iters_done != 4'd6) begin failures++; $display("iterations %0d", iters_done); end
    checks++; if (!(fr(cost_last) * 10.0 < fr(cost_first))) failures++;
    checks++; if (!(err1 < 0.8 * err0)) failures++;
    checks++; if (not_pd) failures++;
    checks++; if (o_pos != 3*N_KF || o_lam != NFEAT || o_hp != NA*(NA+1)/2 || o_rp != NA) begin
      failures++; $display("outputs pos %0d lam %0d hp %0d rp %0d", o_pos, o_lam, o_hp, o_rp);
    end
    checks++; if (hp_diag_bad != 0) begin failures++; $display("H_p diagonal entries <= 0: %0d", hp_diag_bad); end
    o_pos = 0; o_lam = 0; o_hp = 0; o_rp = 0;
    wait (q2_done);
    err0 = 0.0;
    for (int k = 0; k < N_KF; k++) for (int i = 0; i < 3; i++) err0 += pert2[k][i]*pert2[k][i];
    err0 = $sqrt(err0);
    send(CMD_RUN, 0, 0, 0, 0, 0, 0);
    @(posedge run_done);
    repeat (40) @(negedge clk);
    err2 = pos_err();
    $display("window 2: iterations %0d cost %f -> %f, position error %f -> %f",
             iters_done, fr(cost_first), fr(cost_last), err0, err2);
    checks++; if (iters_done != 4'd3) begin failures++; $display("iterations %0d", iters_done); end
    checks++; if (!(fr(cost_last) < fr(cost_first))) failures++;
    checks++; if (not_pd) failures++;
    checks++; if (o_hp != NA*(NA+1)/2) failures++;
    $display("mechanisms: feature loads %0d observations %0d schur full %0d schur gated %0d chol full %0d chol marg %0d marg %0d prior relin %0d lut writes %0d in stalls %0d out stalls %0d",
             n_feat_loads, n_obs, n_schur_full, n_schur_gated, n_chol_full, n_chol_marg, n_marg,
             n_prior_relin, n_lut_write, n_in_stall, n_out_stall);
    checks++; if (!(n_feat_loads < n_obs)) failures++;
    checks++; if (n_schur_full == 0) failures++;
    checks++; if (n_schur_gated == 0) failures++;
    checks++; if (n_chol_full == 0) failures++;
    checks++; if (n_chol_marg == 0) failures++;
    checks++; if (n_marg != 2) failures++;
    checks++; if (n_prior_relin == 0) failures++;
    checks++; if (n_lut_write == 0) failures++;
    checks++; if (n_in_stall == 0) failures++;
    checks++; if (n_out_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
