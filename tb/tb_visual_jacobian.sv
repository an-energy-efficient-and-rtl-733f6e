// tb_visual_jacobian -- a small scene (4 keyframes, random extrinsics,
// features 2-6 m in front of their host camera) is run through the unit.
// For every observation the residual is compared with a double-precision
// reprojection, and J_lambda and J_p with central finite differences of that
// reprojection (so the analytic Jacobian of the RTL is checked against an
// independent numerical one).  Also checked: one feature_loaded per feature
// (the feature point is computed once and reused) and one result per
// observation with a 13-cycle observation latency.
module tb_visual_jacobian;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N_KF = 4;
  logic clk = 0, rst_n = 0;
  logic kf_we = 0, feat_valid = 0, feat_ready, feat_loaded, obs_valid = 0, obs_ready, res_valid;
  logic [1:0] kf_idx = 0, feat_host = 0, obs_kf = 0, res_kf;
  quat_t kf_q; vec3_t kf_p; rot_t r_ic; vec3_t t_ic;
  fx_t feat_u, feat_v, feat_l, obs_u, obs_v;
  logic [7:0] obs_tag = 0, res_tag;
  fx_t res_e [2]; fx_t res_jl [2]; fx_t res_jp [2][3];
  int checks = 0, failures = 0, loads = 0, cyc = 0;

  rq_t kq [N_KF]; rv_t kp [N_KF]; rq_t qic; rv_t tic;

  visual_jacobian #(.N_KF(N_KF), .TAG_W(8)) dut (.clk, .rst_n, .kf_we, .kf_idx, .kf_q, .kf_p,
      .r_ic, .t_ic, .feat_valid, .feat_ready, .feat_host, .feat_u, .feat_v, .feat_l, .feat_loaded,
      .obs_valid, .obs_ready, .obs_kf, .obs_u, .obs_v, .obs_tag, .res_valid, .res_kf, .res_tag,
      .res_e, .res_jl, .res_jp);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (feat_loaded) loads++;
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reprojection of feature (host h, u, v, lambda) into keyframe j at position pj
  function automatic rv_t proj(input int h, input real u, input real v, input real l,
                               input int j, input rv_t pj);
    rv_t pc, pi, pw, d, pij, pcj, o;
    pc = '{u/l, v/l, 1.0/l};
    pi = rq_rot(qic, pc); for (int k = 0; k < 3; k++) pi[k] += tic[k];
    pw = rq_rot(kq[h], pi); for (int k = 0; k < 3; k++) pw[k] += kp[h][k];
    for (int k = 0; k < 3; k++) d[k] = pw[k] - pj[k];
    pij = rq_rot(rq_conj(kq[j]), d);
    for (int k = 0; k < 3; k++) d[k] = pij[k] - tic[k];
    pcj = rq_rot(rq_conj(qic), d);
    o = '{pcj[0]/pcj[2], pcj[1]/pcj[2], pcj[2]};
    return o;
  endfunction

  task automatic chk(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!near(got, exp, tol)) begin failures++; $display("%s: %f exp %f", what, got, exp); end
  endtask

  initial begin
    int dummy;
    {kf_q, kf_p, t_ic, feat_u, feat_v, feat_l, obs_u, obs_v} = '0;
    r_ic = ROT_I;
    // extrinsics: small rotation and offset
    qic = rq_norm('{1.0, urand(-0.1, 0.1), urand(-0.1, 0.1), urand(-0.1, 0.1)});
    tic = '{urand(-0.1, 0.1), urand(-0.1, 0.1), urand(-0.1, 0.1)};
    r_ic = quat_rot(q_fx(qic)); t_ic = v_fx(tic);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N_KF; k++) begin
      kq[k] = rq_norm('{1.0, urand(-0.1, 0.1), urand(-0.1, 0.1), urand(-0.1, 0.1)});
      kp[k] = '{urand(-0.5, 0.5), urand(-0.5, 0.5), urand(-0.5, 0.5)};
      @(negedge clk); kf_we = 1; kf_idx = 2'(k); kf_q = q_fx(kq[k]); kf_p = v_fx(kp[k]);
    end
    @(negedge clk); kf_we = 0;
    repeat (3) @(negedge clk);
    for (int f = 0; f < 5; f++) begin
      int h; real u, v, l;
      h = f % N_KF; u = urand(-0.3, 0.3); v = urand(-0.3, 0.3); l = urand(1.0/6.0, 0.5);
      while (!feat_ready) @(negedge clk);
      feat_valid = 1; feat_host = 2'(h); feat_u = to_fx(u); feat_v = to_fx(v); feat_l = to_fx(l);
      @(negedge clk); feat_valid = 0;
      for (int o = 0; o < 3; o++) begin
        int j, c0; rv_t pr, pp, pm, pjv; real ou, ov, eps;
        j = (h + 1 + o) % N_KF;
        pr = proj(h, u, v, l, j, kp[j]);
        ou = pr[0] + urand(-0.01, 0.01); ov = pr[1] + urand(-0.01, 0.01);
        while (!obs_ready) @(negedge clk);
        obs_valid = 1; obs_kf = 2'(j); obs_u = to_fx(ou); obs_v = to_fx(ov); obs_tag = 8'(f*4 + o);
        c0 = cyc;
        @(negedge clk); obs_valid = 0;
        while (!res_valid) @(negedge clk);
        checks++; if (cyc - c0 != 13) begin failures++; $display("obs latency %0d", cyc - c0); end
        checks++; if (res_kf != 2'(j) || res_tag != 8'(f*4 + o)) failures++;
        chk("e0", fr(res_e[0]), pr[0] - ou, 2e-3);
        chk("e1", fr(res_e[1]), pr[1] - ov, 2e-3);
        // numerical Jacobians
        eps = 1e-4;
        pp = proj(h, u, v, l + eps, j, kp[j]); pm = proj(h, u, v, l - eps, j, kp[j]);
        chk("jl0", fr(res_jl[0]), (pp[0] - pm[0]) / (2*eps), 0.02 + 0.01*abs_r((pp[0]-pm[0])/(2*eps)));
        chk("jl1", fr(res_jl[1]), (pp[1] - pm[1]) / (2*eps), 0.02 + 0.01*abs_r((pp[1]-pm[1])/(2*eps)));
        for (int c = 0; c < 3; c++) begin
          pjv = kp[j]; pjv[c] += eps; pp = proj(h, u, v, l, j, pjv);
          pjv = kp[j]; pjv[c] -= eps; pm = proj(h, u, v, l, j, pjv);
          chk("jp0", fr(res_jp[0][c]), (pp[0] - pm[0]) / (2*eps), 5e-3);
          chk("jp1", fr(res_jp[1][c]), (pp[1] - pm[1]) / (2*eps), 5e-3);
        end
      end
    end
    checks++; if (loads != 5) begin failures++; $display("feature loads %0d", loads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real abs_r(input real x);
    return (x < 0.0) ? -x : x;
  endfunction
endmodule
