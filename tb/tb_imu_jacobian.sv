// tb_imu_jacobian -- random keyframe pairs and pre-integration terms; the
// stored record (R_i^T, dt, position/velocity/attitude residuals) is checked
// against double-precision evaluation of the pre-integration residual, and
// the 6-cycle latency from in_valid to out_valid is checked.
module tb_imu_jacobian;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int NP = 9;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [3:0] in_pair = 0, rd_pair = 0;
  quat_t q_i, q_j, dq;
  vec3_t p_i, p_j, v_i, v_j, dp, dv, grav;
  fx_t dt;
  imu_rec_t rd_rec;
  int checks = 0, failures = 0, cyc = 0;

  imu_jacobian #(.N_PAIR(NP)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_pair, .q_i, .q_j,
      .p_i, .p_j, .v_i, .v_j, .dp, .dv, .dq, .dt, .grav, .out_valid, .rd_pair, .rd_rec);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!near(got, exp, tol)) begin failures++; $display("%s: %f exp %f", what, got, exp); end
  endtask

  initial begin
    rv_t g;
    g = '{0.0, 0.0, -9.81};
    grav = v_fx(g);
    {q_i, q_j, dq, p_i, p_j, v_i, v_j, dp, dv, dt} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NP; n++) begin
      rq_t qi, qj, rdq, qe;
      rv_t pi, pj, vi, vj, rdp, rdv, a, b, rp, rv;
      real rdt;
      int c0;
      qi = rq_rand(); qj = rq_rand(); rdq = rq_rand();
      for (int k = 0; k < 3; k++) begin
        pi[k] = urand(-5, 5); pj[k] = pi[k] + urand(-1, 1);
        vi[k] = urand(-2, 2); vj[k] = vi[k] + urand(-0.5, 0.5);
        rdp[k] = urand(-1, 1); rdv[k] = urand(-1, 1);
      end
      rdt = urand(0.05, 0.2);
      @(negedge clk);
      q_i = q_fx(qi); q_j = q_fx(qj); dq = q_fx(rdq);
      p_i = v_fx(pi); p_j = v_fx(pj); v_i = v_fx(vi); v_j = v_fx(vj);
      dp = v_fx(rdp); dv = v_fx(rdv); dt = to_fx(rdt); in_pair = 4'(n);
      in_valid = 1; c0 = cyc;
      @(negedge clk); in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++; if (cyc - c0 != 6) begin failures++; $display("latency %0d", cyc - c0); end
      // reference
      for (int k = 0; k < 3; k++) begin
        a[k] = pj[k] - pi[k] - vi[k]*rdt + 0.5*g[k]*rdt*rdt;
        b[k] = vj[k] - vi[k] + g[k]*rdt;
      end
      rp = rq_rot(rq_conj(qi), a);
      rv = rq_rot(rq_conj(qi), b);
      qe = rq_mul(rq_conj(rdq), rq_mul(rq_conj(qi), qj));
      rd_pair = 4'(n); #1;
      for (int k = 0; k < 3; k++) begin
        chk("rp", vfr(rd_rec.rp, k), rp[k] - rdp[k], 5e-3);
        chk("rv", vfr(rd_rec.rv, k), rv[k] - rdv[k], 5e-3);
        chk("rq", vfr(rd_rec.rq, k), 2.0*qe[k+1], 5e-3);
      end
      begin
        rv_t e, col;
        for (int j = 0; j < 3; j++) begin
          e = '{0.0, 0.0, 0.0}; e[j] = 1.0;
          col = rq_rot(rq_conj(qi), e);   // column j of R_i^T
          chk("rt0", vfr(rd_rec.rt.r0, j), col[0], 2e-3);
          chk("rt1", vfr(rd_rec.rt.r1, j), col[1], 2e-3);
          chk("rt2", vfr(rd_rec.rt.r2, j), col[2], 2e-3);
        end
      end
      chk("dt", fr(rd_rec.dt), rdt, 1e-4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
