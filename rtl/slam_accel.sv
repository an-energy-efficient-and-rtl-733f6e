// slam_accel -- runtime-reconfigurable localization back end: sliding-window
// Levenberg-Marquardt (NLS) solver followed by marginalization.
//
// Data and commands arrive through the input buffer (cmd_t words, see
// slam_pkg): keyframe states, features with their observations, IMU
// pre-integration terms, camera extrinsics, the prior (H_p, r_p) left by the
// previous window, lookup-table rows and the number of features in use.
// CMD_RUN then solves the window:
//   1. lookup: the runtime_reconfig table gives, for the feature count, the
//      number of LM iterations and of active Schur and Cholesky update units.
//   2. each iteration builds the normal equations in the Schur block's RAMs:
//      visual Jacobians (feature-stationary: a feature is loaded once, then
//      all its observations stream) pass through D^T D evaluate into U, W,
//      V, b; IMU Jacobians of every keyframe pair pass through the Hessian
//      calculation into V, b; the prior is accumulated (relinearised as
//      r_p - H_p dx, dx = step taken since the prior was made); LM damping
//      is added to the diagonals.
//   3. Schur elimination -> S, r; copy to Cholesky -> L; substitution ->
//      dx; positions and velocities are updated, inverse depths are
//      back-substituted from U, W and b_U.
//   4. after the last iteration the system is rebuilt once more (without
//      damping) and the oldest keyframe is marginalized together with the
//      features it hosts: the operands are copied to the marginalization
//      block, the same Schur block (restricted to the first 15 states and to
//      those features) forms S', the same Cholesky block factors it, and the
//      marginalization block produces H_p and r_p.  They become the prior
//      of the next window, indexed for the window without the oldest
//      keyframe (remaining states shift down by 15).
//   5. the output buffer returns keyframe positions, inverse depths and the
//      new prior (out_t words).
// The block structure and reuse follow the paper's system architecture; the
// command set, the sequencing and the copy steps between RAMs are this
// design's choices.  schur_clk_en/upd_clk_en are the clock-gate enables of
// the Schur and update units (the gates themselves are FPGA clock buffers,
// outside this RTL); inside, disabled units simply hold their state.
module slam_accel
  import slam_pkg::*;
#(
  parameter int N_KF      = 10,
  parameter int NF        = 300,
  parameter int MAX_OBS   = 8,
  parameter int NUM_SCHUR = 47,
  parameter int NUM_UPD   = 97,
  parameter int NM1       = 32
) (
  input  logic clk,
  input  logic rst_n,
  // input buffer side (front end / DDR)
  input  logic in_valid,
  output logic in_ready,
  input  cmd_t in_cmd,
  // output buffer side (DDR)
  output logic out_valid,
  input  logic out_ready,
  output out_t out_word,
  // status
  output logic busy,
  output logic run_done,
  output logic [3:0] iters_done,
  output fx_t  cost_first,
  output fx_t  cost_last,
  output logic not_pd,
  output logic [NUM_SCHUR-1:0] schur_clk_en,
  output logic [NUM_UPD-1:0]   upd_clk_en
);
  localparam int NV  = N_KF * STATE_DIM;
  localparam int NA  = NV - STATE_DIM;
  localparam int NT  = NV * (NV + 1) / 2;
  localparam int KW  = $clog2(N_KF);
  localparam int VW  = $clog2(NV);
  localparam int FFW = $clog2(NF);
  localparam vec3_t GRAV = '{x: '0, y: '0, z: -fx_t'(642908)};  // -9.81 m/s^2

  // ------------------------------------------------------------------
  // input buffer
  // ------------------------------------------------------------------
  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic [$clog2(17)-1:0] in_level;
  stream_fifo #(.WIDTH($bits(cmd_t)), .DEPTH(16)) u_in_buf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_cmd),
    .out_valid(cmd_valid), .out_ready(cmd_ready), .out_data(cmd), .level(in_level));

  // output buffer
  logic ob_valid, ob_ready;
  out_t ob_word;
  logic [$clog2(17)-1:0] out_level;
  stream_fifo #(.WIDTH($bits(out_t)), .DEPTH(16)) u_out_buf (
    .clk, .rst_n, .in_valid(ob_valid), .in_ready(ob_ready), .in_data(ob_word),
    .out_valid, .out_ready, .out_data(out_word), .level(out_level));

  // ------------------------------------------------------------------
  // window state
  // ------------------------------------------------------------------
  quat_t kf_q [N_KF];
  vec3_t kf_p [N_KF];
  vec3_t kf_v [N_KF];
  vec3_t imu_dp [N_KF];
  vec3_t imu_dv [N_KF];
  quat_t imu_dq [N_KF];
  fx_t   imu_dt [N_KF];
  logic [KW-1:0] feat_host [NF];
  fx_t   feat_u [NF];
  fx_t   feat_v [NF];
  fx_t   feat_l [NF];
  logic [KW-1:0] obs_kf [NF][MAX_OBS];
  fx_t   obs_u [NF][MAX_OBS];
  fx_t   obs_v [NF][MAX_OBS];
  logic [$clog2(MAX_OBS+1)-1:0] obs_n [NF];
  fx_t   prior_h [NT];
  // prior_h words are cleared through valid bits (unwritten words read as 0)
  logic [NT-1:0] ph_v;
  function automatic fx_t ph_get(input int n);
    return ph_v[n] ? prior_h[n] : '0;
  endfunction
  fx_t   prior_r [NV];
  fx_t   pb [NV];
  fx_t   dx_acc [NV];
  quat_t q_ic;
  vec3_t t_ic;
  rot_t  r_ic;
  int    n_feat;
  fx_t   mu;
  logic [NF-1:0] all_sel, marg_sel;

  assign r_ic = quat_rot(q_ic);
  always_comb for (int f = 0; f < NF; f++) all_sel[f] = (f < n_feat);

  // ------------------------------------------------------------------
  // sequencer
  // ------------------------------------------------------------------
  typedef enum logic [5:0] {
    T_IDLE, T_LOOKUP, T_CLR, T_KF, T_KF_WAIT, T_FEAT, T_FEAT_WAIT, T_OBS, T_OBS_WAIT,
    T_DTD, T_IMU, T_IMU_WAIT, T_HESS, T_HESS2, T_PRIOR, T_PRIOR_B, T_DAMP_V, T_DAMP_U,
    T_SCHUR, T_SCHUR_WAIT, T_COPY, T_CHOL, T_CHOL_WAIT, T_SUBST, T_SUBST_WAIT, T_UPD,
    T_LAM, T_MCLR, T_MLD_F, T_MLD_Z, T_MLD_A, T_MLD_B, T_MSCHUR, T_MSCHUR_WAIT,
    T_MCOPY, T_MCHOL, T_MCHOL_WAIT, T_MRUN, T_MRUN_WAIT, T_OUT_POS, T_OUT_LAM,
    T_OUT_HP, T_OUT_RP
  } st_e;
  st_e st;
  int  ci, cj, cf, cs, mslot;
  logic [3:0] iter;
  logic marg_pass;
  fx_t  acc, cost;

  assign busy = (st != T_IDLE);
  assign cmd_ready = (st == T_IDLE);

  // ------------------------------------------------------------------
  // runtime reconfiguration
  // ------------------------------------------------------------------
  logic [3:0] n_iter;
  logic [$clog2(NUM_SCHUR+1)-1:0] n_schur;
  logic [$clog2(NUM_UPD+1)-1:0]   n_upd;
  runtime_reconfig #(.DEPTH(8), .MAX_SCHUR(NUM_SCHUR), .MAX_UPD(NUM_UPD)) u_rr (
    .clk, .rst_n,
    .tbl_we(cmd_valid && cmd_ready && cmd.op == CMD_LUT), .tbl_idx(cmd.a[2:0]),
    .tbl_row(lut_row_t'({cmd.d1[3:0], cmd.d0})),
    .lookup(st == T_LOOKUP), .n_feat(16'(n_feat)),
    .n_iter, .n_schur, .n_upd, .schur_clk_en, .upd_clk_en);

  // ------------------------------------------------------------------
  // visual Jacobian and residual
  // ------------------------------------------------------------------
  logic vj_kf_we, vj_feat_ready, vj_feat_loaded, vj_obs_ready, vj_res_valid;
  logic [KW-1:0] vj_res_kf;
  logic [7:0] vj_res_tag;
  fx_t vj_e [2];
  fx_t vj_jl [2];
  fx_t vj_jp [2][3];
  logic [KW-1:0] kf_sel;
  assign kf_sel = KW'(ci);
  assign vj_kf_we = (st == T_KF);

  visual_jacobian #(.N_KF(N_KF), .TAG_W(8)) u_vj (
    .clk, .rst_n,
    .kf_we(vj_kf_we), .kf_idx(kf_sel), .kf_q(kf_q[kf_sel]), .kf_p(kf_p[kf_sel]),
    .r_ic, .t_ic,
    .feat_valid(st == T_FEAT && cf < n_feat), .feat_ready(vj_feat_ready),
    .feat_host(feat_host[FFW'(cf)]), .feat_u(feat_u[FFW'(cf)]), .feat_v(feat_v[FFW'(cf)]),
    .feat_l(feat_l[FFW'(cf)]), .feat_loaded(vj_feat_loaded),
    .obs_valid(st == T_OBS && cs < int'(obs_n[FFW'(cf)])), .obs_ready(vj_obs_ready),
    .obs_kf(obs_kf[FFW'(cf)][cs[$clog2(MAX_OBS)-1:0]]),
    .obs_u(obs_u[FFW'(cf)][cs[$clog2(MAX_OBS)-1:0]]),
    .obs_v(obs_v[FFW'(cf)][cs[$clog2(MAX_OBS)-1:0]]),
    .obs_tag(8'(cs)),
    .res_valid(vj_res_valid), .res_kf(vj_res_kf), .res_tag(vj_res_tag),
    .res_e(vj_e), .res_jl(vj_jl), .res_jp(vj_jp));

  // D^T D evaluate of the visual path: D = [J_lambda | J_p]
  fx_t vd [2][4];
  always_comb
    for (int r = 0; r < 2; r++) begin
      vd[r][0] = vj_jl[r];
      for (int c = 0; c < 3; c++) vd[r][1+c] = vj_jp[r][c];
    end
  logic dtd_busy, dtd_ov, dtd_og, dtd_done;
  logic [2:0] dtd_a, dtd_b;
  fx_t  dtd_val;
  dtd_evaluate #(.ROWS(2), .COLS(4)) u_dtd (
    .clk, .rst_n, .start(st == T_OBS_WAIT && vj_res_valid), .d(vd), .e(vj_e),
    .busy(dtd_busy), .out_valid(dtd_ov), .out_grad(dtd_og), .out_a(dtd_a), .out_b(dtd_b),
    .out_val(dtd_val), .done(dtd_done));

  // ------------------------------------------------------------------
  // IMU Jacobian and residual, Hessian calculation
  // ------------------------------------------------------------------
  logic imu_ready, imu_ov;
  imu_rec_t imu_rec;
  logic [KW-1:0] pair_sel, pair_nx;
  assign pair_sel = KW'(cs);
  assign pair_nx  = KW'(cs + 1);
  imu_jacobian #(.N_PAIR(N_KF)) u_imu (
    .clk, .rst_n, .in_valid(st == T_IMU && cs < N_KF - 1), .in_ready(imu_ready),
    .in_pair(pair_sel), .q_i(kf_q[pair_sel]), .q_j(kf_q[pair_nx]),
    .p_i(kf_p[pair_sel]), .p_j(kf_p[pair_nx]), .v_i(kf_v[pair_sel]), .v_j(kf_v[pair_nx]),
    .dp(imu_dp[pair_sel]), .dv(imu_dv[pair_sel]), .dq(imu_dq[pair_sel]), .dt(imu_dt[pair_sel]),
    .grav(GRAV), .out_valid(imu_ov), .rd_pair(pair_sel), .rd_rec(imu_rec));

  logic hc_busy, hc_valid, hc_is_b, hc_done;
  logic [VW-1:0] hc_row, hc_col;
  fx_t hc_val;
  hessian_calc #(.N_KF(N_KF), .NV(NV)) u_hess (
    .clk, .rst_n, .start(st == T_IMU_WAIT && imu_ov), .pair(pair_sel), .rec(imu_rec),
    .busy(hc_busy), .acc_valid(hc_valid), .acc_is_b(hc_is_b), .acc_row(hc_row),
    .acc_col(hc_col), .acc_val(hc_val), .done(hc_done));

  // ------------------------------------------------------------------
  // Schur elimination with the S / r RAM
  // ------------------------------------------------------------------
  logic sc_acc_we, sc_busy, sc_done, sc_start;
  schur_tgt_e sc_tgt;
  logic [VW-1:0] sc_ai, sc_aj, sc_ri, sc_rj;
  logic [FFW-1:0] sc_af, sc_rf;
  fx_t  sc_aval, sc_s, sc_b, sc_u, sc_bu, sc_w;
  logic [$clog2(NV+1)-1:0] sc_dim;
  logic [VW-1:0] vbase;
  assign vbase = VW'(int'(vj_res_kf) * STATE_DIM);

  always_comb begin
    sc_acc_we = 1'b0; sc_tgt = TGT_V; sc_ai = '0; sc_aj = '0; sc_af = FFW'(cf); sc_aval = '0;
    unique case (st)
      T_DTD: begin
        sc_acc_we = dtd_ov;
        if (dtd_og) begin
          sc_aval = -dtd_val;
          if (dtd_a == 3'd0) sc_tgt = TGT_BU;
          else begin sc_tgt = TGT_BV; sc_ai = vbase + VW'(dtd_a - 3'd1); end
        end else begin
          sc_aval = dtd_val;
          if (dtd_a == 3'd0) sc_tgt = TGT_U;
          else if (dtd_b == 3'd0) begin sc_tgt = TGT_W; sc_ai = vbase + VW'(dtd_a - 3'd1); end
          else begin
            sc_tgt = TGT_V; sc_ai = vbase + VW'(dtd_a - 3'd1); sc_aj = vbase + VW'(dtd_b - 3'd1);
          end
        end
      end
      T_HESS, T_HESS2: begin
        sc_acc_we = hc_valid; sc_tgt = hc_is_b ? TGT_BV : TGT_V;
        sc_ai = hc_row; sc_aj = hc_col; sc_aval = hc_val;
      end
      T_PRIOR: begin
        sc_acc_we = 1'b1; sc_tgt = TGT_V; sc_ai = VW'(ci); sc_aj = VW'(cj);
        sc_aval = ph_get(tri_idx(ci, cj));
      end
      T_PRIOR_B: begin
        sc_acc_we = 1'b1; sc_tgt = TGT_BV; sc_ai = VW'(ci); sc_aval = prior_r[VW'(ci)] + pb[VW'(ci)];
      end
      T_DAMP_V: begin
        sc_acc_we = 1'b1; sc_tgt = TGT_V; sc_ai = VW'(ci); sc_aj = VW'(ci); sc_aval = mu;
      end
      T_DAMP_U: begin
        sc_acc_we = 1'b1; sc_tgt = TGT_U; sc_af = FFW'(ci); sc_aval = mu;
      end
      default: ;
    endcase
  end

  always_comb begin
    sc_ri = VW'(ci); sc_rj = VW'(cj); sc_rf = FFW'(cf);
    unique case (st)
      T_MLD_F: sc_ri = (ci < NV) ? VW'(ci) : '0;
      T_MLD_Z: begin sc_ri = VW'(STATE_DIM + ci); sc_rj = VW'(cj); end
      T_MLD_A: begin sc_ri = VW'(STATE_DIM + ci); sc_rj = VW'(STATE_DIM + cj); end
      default: ;
    endcase
  end

  assign sc_start = (st == T_SCHUR) || (st == T_MSCHUR);
  assign sc_dim   = (st == T_MSCHUR || st == T_MSCHUR_WAIT) ? ($clog2(NV+1))'(STATE_DIM)
                                                           : ($clog2(NV+1))'(NV);
  schur_elim #(.NV(NV), .NF(NF), .NUM_SCHUR(NUM_SCHUR)) u_schur (
    .clk, .rst_n, .clr(st == T_CLR),
    .acc_we(sc_acc_we), .acc_tgt(sc_tgt), .acc_i(sc_ai), .acc_j(sc_aj), .acc_f(sc_af),
    .acc_val(sc_aval),
    .start(sc_start), .dim(sc_dim), .n_active(n_schur),
    .feat_sel(marg_pass ? marg_sel : all_sel), .busy(sc_busy), .done(sc_done),
    .rd_i(sc_ri), .rd_j(sc_rj), .rd_f(sc_rf),
    .rd_s(sc_s), .rd_b(sc_b), .rd_u(sc_u), .rd_bu(sc_bu), .rd_w(sc_w));

  // ------------------------------------------------------------------
  // Cholesky decomposition, substitution
  // ------------------------------------------------------------------
  logic ch_busy, ch_done, ch_not_pd, ch_we;
  logic [VW-1:0] ch_ri, ch_rj;
  fx_t ch_l;
  logic [$clog2(NV+1)-1:0] ch_dim;
  assign ch_we  = (st == T_COPY) || (st == T_MCOPY);
  assign ch_dim = (st == T_MCHOL || st == T_MCHOL_WAIT) ? ($clog2(NV+1))'(STATE_DIM)
                                                       : ($clog2(NV+1))'(NV);
  cholesky #(.N(NV), .NUM_UPD(NUM_UPD)) u_chol (
    .clk, .rst_n, .we(ch_we), .wr_i(VW'(ci)), .wr_j(VW'(cj)), .wr_val(sc_s),
    .start(st == T_CHOL || st == T_MCHOL), .dim(ch_dim), .n_active(n_upd),
    .busy(ch_busy), .done(ch_done), .not_pd(ch_not_pd),
    .rd_i(ch_ri), .rd_j(ch_rj), .rd_l(ch_l));

  logic ss_busy, ss_done;
  logic [VW-1:0] ss_li, ss_lj;
  fx_t  ss_x;
  subst_solve #(.N(NV)) u_subst (
    .clk, .rst_n, .we(st == T_COPY && ci == cj), .wr_idx(VW'(ci)), .wr_val(sc_b),
    .start(st == T_SUBST), .dim(($clog2(NV+1))'(NV)), .busy(ss_busy), .done(ss_done),
    .l_i(ss_li), .l_j(ss_lj), .l_val(ch_l), .rd_idx(VW'(ci)), .rd_x(ss_x));

  // ------------------------------------------------------------------
  // marginalization
  // ------------------------------------------------------------------
  logic mg_busy, mg_done, mg_we;
  marg_tgt_e mg_tgt;
  logic [15:0] mg_i, mg_j;
  fx_t mg_val, mg_h, mg_r;
  logic [$clog2(STATE_DIM)-1:0] mg_li, mg_lj;
  logic [$clog2(NA)-1:0] mg_ri, mg_rj;

  always_comb begin
    mg_we = 1'b0; mg_tgt = MT_M11; mg_i = '0; mg_j = '0; mg_val = '0;
    unique case (st)
      T_MLD_F: if (cf < n_feat && feat_host[FFW'(cf)] == '0 && mslot < NM1 && sc_u != '0) begin
        mg_we = 1'b1;
        if (ci < STATE_DIM) begin mg_tgt = MT_M12; mg_i = 16'(mslot); mg_j = 16'(ci); mg_val = sc_w; end
        else if (ci < NV) begin mg_tgt = MT_Z; mg_i = 16'(ci - STATE_DIM); mg_j = 16'(mslot); mg_val = sc_w; end
        else if (ci == NV) begin mg_tgt = MT_M11; mg_i = 16'(mslot); mg_val = sc_u; end
        else begin mg_tgt = MT_BM; mg_i = 16'(mslot); mg_val = sc_bu; end
      end
      T_MLD_Z: begin mg_we = 1'b1; mg_tgt = MT_Z; mg_i = 16'(ci); mg_j = 16'(NM1 + cj); mg_val = sc_s; end
      T_MLD_A: begin mg_we = 1'b1; mg_tgt = MT_A; mg_i = 16'(ci); mg_j = 16'(cj); mg_val = sc_s; end
      T_MLD_B: begin
        mg_we = 1'b1;
        if (ci < STATE_DIM) begin mg_tgt = MT_BM; mg_i = 16'(NM1 + ci); end
        else begin mg_tgt = MT_BA; mg_i = 16'(ci - STATE_DIM); end
        mg_val = sc_b;
      end
      default: ;
    endcase
  end

  assign mg_ri = ($clog2(NA))'(ci);
  assign mg_rj = ($clog2(NA))'(cj);
  marginalization #(.NM1(NM1), .NM2(STATE_DIM), .NA(NA)) u_marg (
    .clk, .rst_n, .clr(st == T_MCLR), .ld_we(mg_we), .ld_tgt(mg_tgt), .ld_i(mg_i), .ld_j(mg_j),
    .ld_val(mg_val), .start(st == T_MRUN), .busy(mg_busy), .done(mg_done),
    .l_i(mg_li), .l_j(mg_lj), .l_val(ch_l), .rd_i(mg_ri), .rd_j(mg_rj), .rd_h(mg_h), .rd_r(mg_r));

  // the Cholesky read port serves the substitution or the marginalization
  always_comb begin
    if (st == T_SUBST_WAIT) begin ch_ri = ss_li; ch_rj = ss_lj; end
    else begin ch_ri = VW'(mg_li); ch_rj = VW'(mg_lj); end
  end

  // ------------------------------------------------------------------
  // output buffer writer
  // ------------------------------------------------------------------
  always_comb begin
    ob_valid = 1'b0; ob_word = '0;
    unique case (st)
      T_OUT_POS: begin
        ob_valid = 1'b1; ob_word.tag = OUT_POS; ob_word.i = 16'(ci);
        ob_word.val = v_get(kf_p[KW'(ci / 3)], ci % 3);
      end
      T_OUT_LAM: if (ci < n_feat) begin
        ob_valid = 1'b1; ob_word.tag = OUT_LAMBDA; ob_word.i = 16'(ci); ob_word.val = feat_l[FFW'(ci)];
      end
      T_OUT_HP: begin
        ob_valid = 1'b1; ob_word.tag = OUT_HP; ob_word.i = 16'(ci); ob_word.j = 16'(cj); ob_word.val = mg_h;
      end
      T_OUT_RP: begin
        ob_valid = 1'b1; ob_word.tag = OUT_RP; ob_word.i = 16'(ci); ob_word.val = mg_r;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // sequencer
  // ------------------------------------------------------------------
  // advance (ci, cj) over a lower triangle of size n; returns 1 at the end
  function automatic logic tri_last(input int i, input int j, input int n);
    return (i == n - 1) && (j == i);
  endfunction

  fx_t dl;
  always_comb dl = fx_div(sc_bu - acc, sc_u);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; ci <= 0; cj <= 0; cf <= 0; cs <= 0; mslot <= 0; iter <= '0;
      marg_pass <= 1'b0; acc <= '0; cost <= '0; run_done <= 1'b0; iters_done <= '0;
      cost_first <= '0; cost_last <= '0; not_pd <= 1'b0;
      n_feat <= 0; mu <= '0; q_ic <= '{w: FX_ONE, x: '0, y: '0, z: '0}; t_ic <= '0;
      marg_sel <= '0;
      for (int k = 0; k < N_KF; k++) begin
        kf_q[k] <= '{w: FX_ONE, x: '0, y: '0, z: '0}; kf_p[k] <= '0; kf_v[k] <= '0;
        imu_dp[k] <= '0; imu_dv[k] <= '0; imu_dq[k] <= '{w: FX_ONE, x: '0, y: '0, z: '0};
        imu_dt[k] <= '0;
      end
      for (int f = 0; f < NF; f++) begin
        feat_host[f] <= '0; feat_u[f] <= '0; feat_v[f] <= '0; feat_l[f] <= FX_ONE; obs_n[f] <= '0;
        for (int s = 0; s < MAX_OBS; s++) begin obs_kf[f][s] <= '0; obs_u[f][s] <= '0; obs_v[f][s] <= '0; end
      end
      ph_v <= '0;
      for (int i = 0; i < NV; i++) begin prior_r[i] <= '0; pb[i] <= '0; dx_acc[i] <= '0; end
    end else begin
      run_done <= 1'b0;
      unique case (st)
        // -------------------------------------------------- commands
        T_IDLE: if (cmd_valid) begin
          unique case (cmd.op)
            CMD_KF_Q: kf_q[KW'(cmd.a)] <= '{w: cmd.d0, x: cmd.d1, y: cmd.d2, z: cmd.d3};
            CMD_KF_P: kf_p[KW'(cmd.a)] <= '{x: cmd.d0, y: cmd.d1, z: cmd.d2};
            CMD_KF_V: kf_v[KW'(cmd.a)] <= '{x: cmd.d0, y: cmd.d1, z: cmd.d2};
            CMD_FEAT: begin
              feat_host[FFW'(cmd.a)] <= KW'(cmd.b);
              feat_u[FFW'(cmd.a)] <= cmd.d0; feat_v[FFW'(cmd.a)] <= cmd.d1; feat_l[FFW'(cmd.a)] <= cmd.d2;
            end
            CMD_OBS: begin
              obs_kf[FFW'(cmd.a)][cmd.b[$clog2(MAX_OBS)-1:0]] <= KW'(cmd.d0);
              obs_u[FFW'(cmd.a)][cmd.b[$clog2(MAX_OBS)-1:0]]  <= cmd.d1;
              obs_v[FFW'(cmd.a)][cmd.b[$clog2(MAX_OBS)-1:0]]  <= cmd.d2;
              if (int'(cmd.b) + 1 > int'(obs_n[FFW'(cmd.a)]))
                obs_n[FFW'(cmd.a)] <= ($clog2(MAX_OBS+1))'(int'(cmd.b) + 1);
            end
            CMD_IMU_DP: begin imu_dp[KW'(cmd.a)] <= '{x: cmd.d0, y: cmd.d1, z: cmd.d2}; imu_dt[KW'(cmd.a)] <= cmd.d3; end
            CMD_IMU_DV: imu_dv[KW'(cmd.a)] <= '{x: cmd.d0, y: cmd.d1, z: cmd.d2};
            CMD_IMU_DQ: imu_dq[KW'(cmd.a)] <= '{w: cmd.d0, x: cmd.d1, y: cmd.d2, z: cmd.d3};
            CMD_EXT_Q:  q_ic <= '{w: cmd.d0, x: cmd.d1, y: cmd.d2, z: cmd.d3};
            CMD_EXT_T:  t_ic <= '{x: cmd.d0, y: cmd.d1, z: cmd.d2};
            CMD_PRIOR_H: begin
              prior_h[tri_idx(int'(cmd.a), int'(cmd.b))] <= cmd.d0;
              ph_v[tri_idx(int'(cmd.a), int'(cmd.b))] <= 1'b1;
            end
            CMD_PRIOR_R: prior_r[VW'(cmd.a)] <= cmd.d0;
            CMD_CFG: begin n_feat <= (int'(cmd.a) > NF) ? NF : int'(cmd.a); mu <= cmd.d0; end
            CMD_RUN: begin
              st <= T_LOOKUP; iter <= '0; marg_pass <= 1'b0; not_pd <= 1'b0;
              for (int i = 0; i < NV; i++) dx_acc[i] <= '0;
            end
            default: ;
          endcase
        end
        T_LOOKUP: st <= T_CLR;
        // -------------------------------------------------- build the system
        T_CLR: begin
          ci <= 0; cost <= '0;
          for (int i = 0; i < NV; i++) pb[i] <= '0;
          st <= T_KF;
        end
        T_KF: begin
          if (ci == N_KF - 1) begin ci <= 0; st <= T_KF_WAIT; end
          else ci <= ci + 1;
        end
        T_KF_WAIT: begin
          // let the last rotation matrix reach the R RAM
          if (ci == 2) begin ci <= 0; cf <= 0; st <= T_FEAT; end
          else ci <= ci + 1;
        end
        T_FEAT: begin
          if (cf >= n_feat) begin cs <= 0; st <= T_IMU; end
          else if (vj_feat_ready) st <= T_FEAT_WAIT;
        end
        T_FEAT_WAIT: if (vj_feat_loaded) begin cs <= 0; st <= T_OBS; end
        T_OBS: begin
          if (cs >= int'(obs_n[FFW'(cf)])) begin cf <= cf + 1; st <= T_FEAT; end
          else if (vj_obs_ready) st <= T_OBS_WAIT;
        end
        T_OBS_WAIT: if (vj_res_valid) begin
          cost <= cost + fx_mul(vj_e[0], vj_e[0]) + fx_mul(vj_e[1], vj_e[1]);
          st <= T_DTD;
        end
        T_DTD: if (dtd_done) begin cs <= cs + 1; st <= T_OBS; end
        T_IMU: begin
          if (cs >= N_KF - 1) begin ci <= 0; cj <= 0; st <= T_PRIOR; end
          else if (imu_ready) st <= T_IMU_WAIT;
        end
        T_IMU_WAIT: if (imu_ov) st <= T_HESS;
        T_HESS: if (hc_done) st <= T_HESS2;
        T_HESS2: begin cs <= cs + 1; st <= T_IMU; end
        T_PRIOR: begin
          // V += H_p and pb = -H_p dx (relinearised prior)
          pb[VW'(ci)] <= pb[VW'(ci)] - fx_mul(ph_get(tri_idx(ci, cj)), dx_acc[VW'(cj)]);
          if (cj != ci)
            pb[VW'(cj)] <= pb[VW'(cj)] - fx_mul(ph_get(tri_idx(ci, cj)), dx_acc[VW'(ci)]);
          if (tri_last(ci, cj, NV)) begin ci <= 0; cj <= 0; st <= T_PRIOR_B; end
          else if (cj == ci) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_PRIOR_B: begin
          if (ci == NV - 1) begin
            ci <= 0;
            st <= marg_pass ? T_MCLR : T_DAMP_V;
          end else ci <= ci + 1;
        end
        T_DAMP_V: if (ci == NV - 1) begin ci <= 0; st <= T_DAMP_U; end else ci <= ci + 1;
        T_DAMP_U: if (ci >= n_feat - 1) begin ci <= 0; st <= T_SCHUR; end else ci <= ci + 1;
        // -------------------------------------------------- solve
        T_SCHUR: st <= T_SCHUR_WAIT;
        T_SCHUR_WAIT: if (sc_done) begin ci <= 0; cj <= 0; st <= T_COPY; end
        T_COPY: begin
          if (tri_last(ci, cj, NV)) begin ci <= 0; cj <= 0; st <= T_CHOL; end
          else if (cj == ci) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_CHOL: st <= T_CHOL_WAIT;
        T_CHOL_WAIT: if (ch_done) begin
          if (ch_not_pd) not_pd <= 1'b1;
          st <= T_SUBST;
        end
        T_SUBST: st <= T_SUBST_WAIT;
        T_SUBST_WAIT: if (ss_done) begin ci <= 0; st <= T_UPD; end
        T_UPD: begin
          // apply the step to positions and velocities
          if (ci % STATE_DIM < 3 || (ci % STATE_DIM >= 6 && ci % STATE_DIM < 9)) begin
            dx_acc[VW'(ci)] <= dx_acc[VW'(ci)] + ss_x;
            if (ci % STATE_DIM < 3) begin
              unique case (ci % STATE_DIM)
                0: kf_p[KW'(ci / STATE_DIM)].x <= kf_p[KW'(ci / STATE_DIM)].x + ss_x;
                1: kf_p[KW'(ci / STATE_DIM)].y <= kf_p[KW'(ci / STATE_DIM)].y + ss_x;
                default: kf_p[KW'(ci / STATE_DIM)].z <= kf_p[KW'(ci / STATE_DIM)].z + ss_x;
              endcase
            end else begin
              unique case (ci % STATE_DIM)
                6: kf_v[KW'(ci / STATE_DIM)].x <= kf_v[KW'(ci / STATE_DIM)].x + ss_x;
                7: kf_v[KW'(ci / STATE_DIM)].y <= kf_v[KW'(ci / STATE_DIM)].y + ss_x;
                default: kf_v[KW'(ci / STATE_DIM)].z <= kf_v[KW'(ci / STATE_DIM)].z + ss_x;
              endcase
            end
          end
          if (ci == NV - 1) begin ci <= 0; cf <= 0; acc <= '0; st <= T_LAM; end
          else ci <= ci + 1;
        end
        T_LAM: begin
          // d_lambda_f = (b_U,f - W_f . dx) / U_f
          if (cf >= n_feat) begin
            if (iter == 4'd0) cost_first <= cost;
            cost_last <= cost;
            iter <= iter + 4'd1;
            iters_done <= iter + 4'd1;
            if (iter + 4'd1 >= n_iter) marg_pass <= 1'b1;
            st <= T_CLR;
          end else if (ci < NV) begin
            acc <= acc + fx_mul(sc_w, ss_x);
            ci <= ci + 1;
          end else begin
            if (sc_u != '0) feat_l[FFW'(cf)] <= feat_l[FFW'(cf)] + dl;
            acc <= '0; ci <= 0; cf <= cf + 1;
          end
        end
        // -------------------------------------------------- marginalization
        T_MCLR: begin
          ci <= 0; cf <= 0; mslot <= 0; marg_sel <= '0;
          st <= T_MLD_F;
        end
        T_MLD_F: begin
          if (cf >= n_feat) begin ci <= 0; cj <= 0; st <= T_MLD_Z; end
          else if (feat_host[FFW'(cf)] == '0 && mslot < NM1 && sc_u != '0) begin
            if (ci == NV + 1) begin
              marg_sel[FFW'(cf)] <= 1'b1; mslot <= mslot + 1; ci <= 0; cf <= cf + 1;
            end else ci <= ci + 1;
          end else cf <= cf + 1;
        end
        T_MLD_Z: begin
          if (ci == NA - 1 && cj == STATE_DIM - 1) begin ci <= 0; cj <= 0; st <= T_MLD_A; end
          else if (cj == STATE_DIM - 1) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_MLD_A: begin
          if (tri_last(ci, cj, NA)) begin ci <= 0; cj <= 0; st <= T_MLD_B; end
          else if (cj == ci) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_MLD_B: if (ci == NV - 1) begin ci <= 0; st <= T_MSCHUR; end else ci <= ci + 1;
        T_MSCHUR: st <= T_MSCHUR_WAIT;
        T_MSCHUR_WAIT: if (sc_done) begin ci <= 0; cj <= 0; st <= T_MCOPY; end
        T_MCOPY: begin
          if (tri_last(ci, cj, STATE_DIM)) begin ci <= 0; cj <= 0; st <= T_MCHOL; end
          else if (cj == ci) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_MCHOL: st <= T_MCHOL_WAIT;
        T_MCHOL_WAIT: if (ch_done) begin
          if (ch_not_pd) not_pd <= 1'b1;
          st <= T_MRUN;
        end
        T_MRUN: st <= T_MRUN_WAIT;
        T_MRUN_WAIT: if (mg_done) begin
          ci <= 0; cj <= 0;
          ph_v <= '0;
          for (int i = 0; i < NV; i++) prior_r[i] <= '0;
          st <= T_OUT_POS;
        end
        // -------------------------------------------------- results
        T_OUT_POS: if (ob_ready) begin
          if (ci == 3 * N_KF - 1) begin ci <= 0; st <= T_OUT_LAM; end else ci <= ci + 1;
        end
        T_OUT_LAM: begin
          if (ci >= n_feat) begin ci <= 0; cj <= 0; st <= T_OUT_HP; end
          else if (ob_ready) ci <= ci + 1;
        end
        T_OUT_HP: if (ob_ready) begin
          prior_h[tri_idx(ci, cj)] <= mg_h;
          ph_v[tri_idx(ci, cj)] <= 1'b1;
          if (tri_last(ci, cj, NA)) begin ci <= 0; cj <= 0; st <= T_OUT_RP; end
          else if (cj == ci) begin ci <= ci + 1; cj <= 0; end
          else cj <= cj + 1;
        end
        T_OUT_RP: if (ob_ready) begin
          prior_r[VW'(ci)] <= mg_r;
          if (ci == NA - 1) begin ci <= 0; st <= T_IDLE; run_done <= 1'b1; end
          else ci <= ci + 1;
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
