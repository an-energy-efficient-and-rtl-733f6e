// hessian_calc -- IMU Hessian matrix calculation.
//
// Reads the compact IMU Jacobian record of keyframe pair (k, k+1), expands
// it into the 6 x 12 Jacobian of the position and velocity residuals with
// respect to (p_k, v_k, p_k+1, v_k+1):
//           p_k       v_k          p_k+1   v_k+1
//   r_p  [ -R^T    -R^T dt        R^T      0   ]
//   r_v  [  0      -R^T           0        R^T ]
// and runs it through a dtd_evaluate unit.  Every result is mapped to its
// place in the sliding-window system (state layout per keyframe:
// p 0-2, q 3-5, v 6-8, ba 9-11, bg 12-14) and emitted as an accumulate
// request: H(row, col) += val for the Hessian (lower triangle, row >= col)
// and b(row) += val for the right-hand side, b = -J^T r.  Unit residual
// weights are used (no covariance); the attitude and bias Jacobians are not
// expanded.  The block is only named in the paper; which Jacobian blocks it
// expands and the weighting are this design's choices.
// Timing: 90 results, one per cycle, starting 2 cycles after start.
module hessian_calc
  import slam_pkg::*;
#(
  parameter int N_KF = 10,
  parameter int NV   = N_KF * STATE_DIM
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic [$clog2(N_KF)-1:0] pair,
  input  imu_rec_t rec,
  output logic     busy,
  output logic     acc_valid,
  output logic     acc_is_b,
  output logic [$clog2(NV)-1:0] acc_row,
  output logic [$clog2(NV)-1:0] acc_col,
  output fx_t      acc_val,
  output logic     done
);
  localparam int VW = $clog2(NV);
  fx_t d [6][12];
  fx_t e [6];
  logic dtd_busy, ov, og, dtd_start;
  logic [3:0] oa, ob;
  fx_t  oval;
  logic [$clog2(N_KF)-1:0] pair_q;

  always_comb begin
    for (int r = 0; r < 6; r++) for (int c = 0; c < 12; c++) d[r][c] = '0;
    for (int c = 0; c < 3; c++) begin
      d[0][c] = -v_get(rec.rt.r0, c);
      d[1][c] = -v_get(rec.rt.r1, c);
      d[2][c] = -v_get(rec.rt.r2, c);
      d[0][3+c] = -fx_mul(v_get(rec.rt.r0, c), rec.dt);
      d[1][3+c] = -fx_mul(v_get(rec.rt.r1, c), rec.dt);
      d[2][3+c] = -fx_mul(v_get(rec.rt.r2, c), rec.dt);
      d[0][6+c] = v_get(rec.rt.r0, c);
      d[1][6+c] = v_get(rec.rt.r1, c);
      d[2][6+c] = v_get(rec.rt.r2, c);
      d[3][3+c] = -v_get(rec.rt.r0, c);
      d[4][3+c] = -v_get(rec.rt.r1, c);
      d[5][3+c] = -v_get(rec.rt.r2, c);
      d[3][9+c] = v_get(rec.rt.r0, c);
      d[4][9+c] = v_get(rec.rt.r1, c);
      d[5][9+c] = v_get(rec.rt.r2, c);
    end
    e[0] = rec.rp.x; e[1] = rec.rp.y; e[2] = rec.rp.z;
    e[3] = rec.rv.x; e[4] = rec.rv.y; e[5] = rec.rv.z;
  end

  dtd_evaluate #(.ROWS(6), .COLS(12)) u_dtd (
    .clk, .rst_n, .start(dtd_start), .d, .e, .busy(dtd_busy),
    .out_valid(ov), .out_grad(og), .out_a(oa), .out_b(ob), .out_val(oval), .done);

  // local column (block p_k, v_k, p_k+1, v_k+1) -> global state index
  function automatic logic [VW-1:0] gidx(input logic [3:0] c, input logic [$clog2(N_KF)-1:0] k);
    int blk, kf, off;
    blk = int'(c) / 3;
    kf  = int'(k) + ((blk >= 2) ? 1 : 0);
    off = ((blk == 1) || (blk == 3)) ? 6 : 0;
    return VW'(kf * STATE_DIM + off + int'(c) % 3);
  endfunction

  assign busy = dtd_busy || dtd_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dtd_start <= 1'b0; pair_q <= '0;
      acc_valid <= 1'b0; acc_is_b <= 1'b0; acc_row <= '0; acc_col <= '0; acc_val <= '0;
    end else begin
      dtd_start <= start && !busy;
      if (start && !busy) pair_q <= pair;
      acc_valid <= ov;
      acc_is_b  <= og;
      acc_row   <= gidx(oa, pair_q);
      acc_col   <= og ? '0 : gidx(ob, pair_q);
      acc_val   <= og ? -oval : oval;
    end
  end
endmodule
