// quat_to_rot -- keyframe level of the visual Jacobian datapath.
//
// For every keyframe of the sliding window the orientation quaternion is
// turned once into a rotation matrix R and stored in the R RAM, from which
// the feature and observation levels read it for every observation of that
// keyframe (keyframe-level reuse).  A write takes two cycles: stage 1
// registers the squared and cross products of the quaternion, stage 2 forms
// the nine matrix entries and writes them.  The RAM has one asynchronous read
// port (rd_kf -> rd_r); a second read port (rd2) serves the observation level.
// The quaternion-to-matrix formula is the standard one for unit quaternions;
// the RAM organisation and the two-stage split are this design's choices.
module quat_to_rot
  import slam_pkg::*;
#(
  parameter int N_KF = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_valid,
  input  logic [$clog2(N_KF)-1:0] wr_kf,
  input  quat_t                   wr_q,
  output logic                    wr_done,
  input  logic [$clog2(N_KF)-1:0] rd_kf,
  output rot_t                    rd_r,
  input  logic [$clog2(N_KF)-1:0] rd2_kf,
  output rot_t                    rd2_r
);
  rot_t ram [N_KF];
  fx_t  xx, yy, zz, xy, xz, yz, wx, wy, wz;
  logic v1;
  logic [$clog2(N_KF)-1:0] kf1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; wr_done <= 1'b0; kf1 <= '0;
      {xx, yy, zz, xy, xz, yz, wx, wy, wz} <= '0;
      for (int k = 0; k < N_KF; k++) ram[k] <= ROT_I;
    end else begin
      v1 <= wr_valid;
      wr_done <= v1;
      if (wr_valid) begin
        kf1 <= wr_kf;
        xx <= fx_mul(wr_q.x, wr_q.x); yy <= fx_mul(wr_q.y, wr_q.y); zz <= fx_mul(wr_q.z, wr_q.z);
        xy <= fx_mul(wr_q.x, wr_q.y); xz <= fx_mul(wr_q.x, wr_q.z); yz <= fx_mul(wr_q.y, wr_q.z);
        wx <= fx_mul(wr_q.w, wr_q.x); wy <= fx_mul(wr_q.w, wr_q.y); wz <= fx_mul(wr_q.w, wr_q.z);
      end
      if (v1) begin
        ram[kf1].r0 <= '{x: FX_ONE - 2*(yy+zz), y: 2*(xy-wz), z: 2*(xz+wy)};
        ram[kf1].r1 <= '{x: 2*(xy+wz), y: FX_ONE - 2*(xx+zz), z: 2*(yz-wx)};
        ram[kf1].r2 <= '{x: 2*(xz-wy), y: 2*(yz+wx), z: FX_ONE - 2*(xx+yy)};
      end
    end
  end

  assign rd_r  = ram[rd_kf];
  assign rd2_r = ram[rd2_kf];
endmodule
