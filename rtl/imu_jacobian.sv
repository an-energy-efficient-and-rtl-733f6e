// imu_jacobian -- IMU Jacobian and residual unit with its Jacobian RAM.
//
// For the keyframe pair (i, j = i+1) it evaluates the IMU pre-integration
// residual
//   r_p = R_i^T (p_j - p_i - v_i dt + g dt^2 / 2) - dp
//   r_v = R_i^T (v_j - v_i + g dt) - dv
//   r_q = 2 * vec( dq^* (x) q_i^* (x) q_j )
// Stage 1 holds three parallel paths, as in the paper's IMU circuit: the
// position and velocity paths (rotation matrix from q_i, vector sums,
// rotation) and the rotation path made of two quaternion multipliers (qm).
// Stage 2 subtracts the pre-integrated terms and the Jacobian & residual
// writer stores one compact record per pair.  Only the non-trivial parts of
// the Jacobian are stored: the blocks of the residual with respect to
// p_i, v_i, p_j, v_j are all -R_i^T, -R_i^T dt or +R_i^T, so the record keeps
// R_i^T and dt once, never the zero and identity blocks; the rotation error
// quaternion is kept for the attitude Jacobian.  The residual equations are
// the standard pre-integration ones; the record layout is this design's.
// Interface: in_valid starts one pair (inputs held by the caller until
// in_ready returns), out_valid pulses when the record is written, 6 cycles
// later; rd_pair reads a stored record asynchronously.
module imu_jacobian
  import slam_pkg::*;
#(
  parameter int N_PAIR = 9
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic [$clog2(N_PAIR)-1:0] in_pair,
  input  quat_t q_i,
  input  quat_t q_j,
  input  vec3_t p_i,
  input  vec3_t p_j,
  input  vec3_t v_i,
  input  vec3_t v_j,
  input  vec3_t dp,
  input  vec3_t dv,
  input  quat_t dq,
  input  fx_t   dt,
  input  vec3_t grav,
  output logic  out_valid,
  input  logic [$clog2(N_PAIR)-1:0] rd_pair,
  output imu_rec_t rd_rec
);
  imu_rec_t ram [N_PAIR];
  logic  busy;

  logic [$clog2(N_PAIR)-1:0] pair_q;
  quat_t qi_q, qj_q, dq_q;
  vec3_t dp_q, dv_q;
  fx_t   dt_q;
  rot_t  rt1;
  vec3_t pos1, vel1;
  logic  qm1_v, qm2_v, qm2_ov;
  quat_t qm1_o, qm2_o;
  logic  qm_start;

  // stage 1, rotation path: (q_i^* (x) q_j), then dq^* (x) (...)
  qm u_qm1 (.clk, .rst_n, .in_valid(qm_start), .qa(q_conj(qi_q)), .qb(qj_q),
            .out_valid(qm1_v), .q(qm1_o));
  qm u_qm2 (.clk, .rst_n, .in_valid(qm1_v), .qa(q_conj(dq_q)), .qb(qm1_o),
            .out_valid(qm2_ov), .q(qm2_o));
  assign qm2_v = qm2_ov;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pair_q <= '0; out_valid <= 1'b0; qm_start <= 1'b0;
      qi_q <= '0; qj_q <= '0; dq_q <= '0; dp_q <= '0; dv_q <= '0; dt_q <= '0;
      rt1 <= ROT_I; pos1 <= '0; vel1 <= '0;
      for (int k = 0; k < N_PAIR; k++) ram[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      qm_start <= 1'b0;
      if (in_valid && !busy) begin
        busy <= 1'b1; pair_q <= in_pair; qm_start <= 1'b1;
        qi_q <= q_i; qj_q <= q_j; dq_q <= dq; dp_q <= dp; dv_q <= dv; dt_q <= dt;
        // stage 1, position and velocity paths
        rt1  <= rot_transpose(quat_rot(q_i));
        pos1 <= v_add(v_sub(v_sub(p_j, p_i), v_scale(v_i, dt)),
                      v_scale(grav, fx_mul(dt, dt) >>> 1));
        vel1 <= v_add(v_sub(v_j, v_i), v_scale(grav, dt));
      end
      // stage 2: residuals and the Jacobian & residual writer
      if (busy && qm2_v) begin
        ram[pair_q].rt   <= rt1;
        ram[pair_q].dt   <= dt_q;
        ram[pair_q].rp   <= v_sub(rot_apply(rt1, pos1), dp_q);
        ram[pair_q].rv   <= v_sub(rot_apply(rt1, vel1), dv_q);
        ram[pair_q].rq   <= '{x: 2*qm2_o.x, y: 2*qm2_o.y, z: 2*qm2_o.z};
        ram[pair_q].qerr <= qm2_o;
        out_valid <= 1'b1;
        busy <= 1'b0;
      end
    end
  end

  assign rd_rec = ram[rd_pair];
endmodule
