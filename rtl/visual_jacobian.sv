// visual_jacobian -- visual Jacobian and residual unit, three levels.
//
// A feature is parameterised by its pixel coordinates (u, v) in normalised
// camera coordinates of its host keyframe i and its inverse depth lambda.
// Every observation of the feature in keyframe j yields a 2-vector residual
// E = proj(P_cj) - (u_j, v_j) and the Jacobians of E with respect to lambda
// (J_l, 2x1) and to the position p_j of keyframe j (J_p, 2x3).
//
// Keyframe level: quat_to_rot turns each keyframe quaternion into R once and
//   keeps it in the R RAM together with the keyframe position.
// Feature level: P_ci = (u, v, 1) / lambda (divider); one CTU forms
//   a = R_ic * P_ci (point in IMU frame without offset), then
//   P_w = R_i * (a + t_ic) + p_i (point in world) and b = R_i * a, from which
//   dP_w/dlambda = -b / lambda.  P_w and dP_w/dlambda are held for all
//   observations of the feature (feature-stationary dataflow).
// Observation level: two CTUs in series (inverse mode) take five vectors
//   through world -> IMU_j -> camera_j: the point P_w with translations, and
//   dP_w/dlambda and the three unit vectors without.  A final stage divides
//   by depth (1/z) and applies the 2x3 projection Jacobian
//   [1/z 0 -x/z^2; 0 1/z -y/z^2] to produce E, J_l and J_p = -d E / d P_w.
//
// The split into keyframe/feature/observation levels, the reuse of R and of
// P_w, the dividers and the two three-stage CTUs follow the paper's visual
// Jacobian circuit.  The measurement model (inverse-depth reprojection) and
// the restriction of the pose Jacobian to the position of the observing
// keyframe are this design's choices; rotation and host-pose Jacobians are
// not produced.
// Timing: a feature takes about 8 cycles, then one observation is accepted
// every 13 cycles (res_valid pulses 13 cycles after obs_valid && obs_ready).
module visual_jacobian
  import slam_pkg::*;
#(
  parameter int N_KF  = 10,
  parameter int TAG_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // keyframe state write (keyframe level)
  input  logic                    kf_we,
  input  logic [$clog2(N_KF)-1:0] kf_idx,
  input  quat_t                   kf_q,
  input  vec3_t                   kf_p,
  // camera-IMU extrinsics
  input  rot_t                    r_ic,
  input  vec3_t                   t_ic,
  // feature level
  input  logic                    feat_valid,
  output logic                    feat_ready,
  input  logic [$clog2(N_KF)-1:0] feat_host,
  input  fx_t                     feat_u,
  input  fx_t                     feat_v,
  input  fx_t                     feat_l,
  output logic                    feat_loaded,
  // observation level
  input  logic                    obs_valid,
  output logic                    obs_ready,
  input  logic [$clog2(N_KF)-1:0] obs_kf,
  input  fx_t                     obs_u,
  input  fx_t                     obs_v,
  input  logic [TAG_W-1:0]        obs_tag,
  // results
  output logic                    res_valid,
  output logic [$clog2(N_KF)-1:0] res_kf,
  output logic [TAG_W-1:0]        res_tag,
  output fx_t                     res_e  [2],
  output fx_t                     res_jl [2],
  output fx_t                     res_jp [2][3]
);
  localparam int KW = $clog2(N_KF);
  localparam vec3_t V_ZERO = '0;
  logic obs_busy;

  // ---------------- keyframe level ----------------
  vec3_t p_ram [N_KF];
  rot_t  r_host, r_obs;
  logic [KW-1:0] host_q, obs_q;
  logic  kf_done_unused;

  quat_to_rot #(.N_KF(N_KF)) u_kf (
    .clk, .rst_n,
    .wr_valid(kf_we), .wr_kf(kf_idx), .wr_q(kf_q), .wr_done(kf_done_unused),
    .rd_kf(host_q), .rd_r(r_host), .rd2_kf(obs_q), .rd2_r(r_obs));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_KF; k++) p_ram[k] <= '0;
    end else if (kf_we) begin
      p_ram[kf_idx] <= kf_p;
    end
  end

  // ---------------- feature level ----------------
  typedef enum logic [2:0] {F_IDLE, F_A, F_WAIT_A, F_B, F_WAIT_B, F_READY} fstate_t;
  fstate_t fst;
  vec3_t p_ci, a_vec, p_w, dpw_dl;
  fx_t   lam;
  logic  f_in_valid, f_out_valid;
  logic [1:0] f_in_tag, f_out_tag;
  rot_t  f_r;
  vec3_t f_t, f_x, f_y;
  logic  got_b, got_w;

  always_comb begin
    f_in_valid = 1'b0; f_in_tag = '0;
    f_r = r_ic; f_t = '0; f_x = p_ci;
    unique case (fst)
      F_A: begin f_in_valid = 1'b1; f_in_tag = 2'd0; f_r = r_ic; f_t = '0; f_x = p_ci; end
      F_B: begin f_in_valid = 1'b1; f_in_tag = 2'd1; f_r = r_host; f_t = '0; f_x = a_vec; end
      default: ;
    endcase
  end

  // second issue of the feature level (P_w) goes one cycle after b
  logic issue_w;
  rot_t  f_r_mux;
  vec3_t f_t_mux, f_x_mux;
  logic  f_v_mux;
  logic [1:0] f_tag_mux;
  always_comb begin
    f_v_mux = f_in_valid; f_tag_mux = f_in_tag; f_r_mux = f_r; f_t_mux = f_t; f_x_mux = f_x;
    if (issue_w) begin
      f_v_mux = 1'b1; f_tag_mux = 2'd2; f_r_mux = r_host;
      f_t_mux = p_ram[host_q]; f_x_mux = v_add(a_vec, t_ic);
    end
  end

  ctu #(.TAG_W(2)) u_ctu_f (
    .clk, .rst_n, .in_valid(f_v_mux), .inv(1'b0), .r(f_r_mux), .t(f_t_mux),
    .x(f_x_mux), .in_tag(f_tag_mux), .out_valid(f_out_valid), .y(f_y), .out_tag(f_out_tag));

  assign feat_ready  = (fst == F_IDLE) || (fst == F_READY && !obs_busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; p_ci <= '0; a_vec <= '0; p_w <= '0; dpw_dl <= '0; lam <= FX_ONE;
      host_q <= '0; issue_w <= 1'b0; got_b <= 1'b0; got_w <= 1'b0; feat_loaded <= 1'b0;
    end else begin
      issue_w <= 1'b0;
      feat_loaded <= 1'b0;
      unique case (fst)
        F_IDLE, F_READY: if (feat_valid && feat_ready) begin
          p_ci.x <= fx_div(feat_u, feat_l);
          p_ci.y <= fx_div(feat_v, feat_l);
          p_ci.z <= fx_div(FX_ONE, feat_l);
          lam    <= feat_l;
          host_q <= feat_host;
          fst    <= F_A;
        end
        F_A: fst <= F_WAIT_A;
        F_WAIT_A: if (f_out_valid && f_out_tag == 2'd0) begin
          a_vec <= f_y;
          fst <= F_B;
        end
        F_B: begin
          issue_w <= 1'b1;
          got_b <= 1'b0; got_w <= 1'b0;
          fst <= F_WAIT_B;
        end
        F_WAIT_B: begin
          if (f_out_valid && f_out_tag == 2'd1) begin
            dpw_dl.x <= -fx_div(f_y.x, lam);
            dpw_dl.y <= -fx_div(f_y.y, lam);
            dpw_dl.z <= -fx_div(f_y.z, lam);
            got_b <= 1'b1;
          end
          if (f_out_valid && f_out_tag == 2'd2) begin
            p_w <= f_y;
            got_w <= 1'b1;
          end
          if (got_b && got_w) begin
            fst <= F_READY;
            feat_loaded <= 1'b1;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // ---------------- observation level ----------------
  logic [2:0] issue_cnt, coll_cnt;
  logic       issuing;
  fx_t        ou, ov;
  logic [TAG_W-1:0] otag;
  vec3_t      o1_x, o1_y, o2_y;
  logic       o1_v, o1_ov, o2_ov;
  logic [2:0] o1_tag, o1_otag, o2_otag;
  vec3_t      buf_v [5];
  logic       reduce_go;

  assign obs_ready = (fst == F_READY) && !obs_busy;

  always_comb begin
    o1_v = issuing;
    o1_tag = issue_cnt;
    unique case (issue_cnt)
      3'd0: o1_x = p_w;
      3'd1: o1_x = dpw_dl;
      3'd2: o1_x = '{x: FX_ONE, y: '0, z: '0};
      3'd3: o1_x = '{x: '0, y: FX_ONE, z: '0};
      default: o1_x = '{x: '0, y: '0, z: FX_ONE};
    endcase
  end

  ctu #(.TAG_W(3)) u_ctu_o1 (
    .clk, .rst_n, .in_valid(o1_v), .inv(1'b1), .r(r_obs),
    .t(issue_cnt == 3'd0 ? p_ram[obs_q] : V_ZERO), .x(o1_x), .in_tag(o1_tag),
    .out_valid(o1_ov), .y(o1_y), .out_tag(o1_otag));

  ctu #(.TAG_W(3)) u_ctu_o2 (
    .clk, .rst_n, .in_valid(o1_ov), .inv(1'b1), .r(r_ic),
    .t(o1_otag == 3'd0 ? t_ic : V_ZERO), .x(o1_y), .in_tag(o1_otag),
    .out_valid(o2_ov), .y(o2_y), .out_tag(o2_otag));

  // projection stage
  fx_t iz, xn, yn;
  fx_t jr [5][2];
  always_comb begin
    iz = fx_div(FX_ONE, buf_v[0].z);
    xn = fx_mul(buf_v[0].x, iz);
    yn = fx_mul(buf_v[0].y, iz);
    for (int c = 0; c < 5; c++) begin
      jr[c][0] = fx_mul(iz, buf_v[c].x - fx_mul(xn, buf_v[c].z));
      jr[c][1] = fx_mul(iz, buf_v[c].y - fx_mul(yn, buf_v[c].z));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obs_busy <= 1'b0; issuing <= 1'b0; issue_cnt <= '0; coll_cnt <= '0;
      obs_q <= '0; ou <= '0; ov <= '0; otag <= '0; reduce_go <= 1'b0;
      res_valid <= 1'b0; res_kf <= '0; res_tag <= '0;
      for (int c = 0; c < 5; c++) buf_v[c] <= '0;
      for (int r = 0; r < 2; r++) begin
        res_e[r] <= '0; res_jl[r] <= '0;
        for (int c = 0; c < 3; c++) res_jp[r][c] <= '0;
      end
    end else begin
      res_valid <= 1'b0;
      reduce_go <= 1'b0;
      if (obs_valid && obs_ready) begin
        obs_busy <= 1'b1; issuing <= 1'b1; issue_cnt <= '0; coll_cnt <= '0;
        obs_q <= obs_kf; ou <= obs_u; ov <= obs_v; otag <= obs_tag;
      end
      if (issuing) begin
        if (issue_cnt == 3'd4) issuing <= 1'b0;
        else issue_cnt <= issue_cnt + 3'd1;
      end
      if (o2_ov) begin
        buf_v[o2_otag] <= o2_y;
        coll_cnt <= coll_cnt + 3'd1;
        if (coll_cnt == 3'd4) reduce_go <= 1'b1;
      end
      if (reduce_go) begin
        res_valid <= 1'b1;
        res_kf    <= obs_q;
        res_tag   <= otag;
        res_e[0]  <= xn - ou;
        res_e[1]  <= yn - ov;
        res_jl[0] <= jr[1][0];
        res_jl[1] <= jr[1][1];
        for (int c = 0; c < 3; c++) begin
          res_jp[0][c] <= -jr[2+c][0];
          res_jp[1][c] <= -jr[2+c][1];
        end
        obs_busy <= 1'b0;
      end
    end
  end
endmodule
