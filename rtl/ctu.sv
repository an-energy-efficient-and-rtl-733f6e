// ctu -- coordinate transform unit (CTU) of the visual Jacobian datapath.
//
// Forward mode (inv = 0): y = R * x + t, moving a point into a parent frame.
// Inverse mode (inv = 1): y = R^T * (x - t), moving a point into a child
// frame.  The unit is fully pipelined with three register stages, as the
// "CTU 3 stages" label of the observation level gives: stage 1 forms the
// nine products, stage 2 sums each row, stage 3 adds the translation.  In
// inverse mode the translation is subtracted before the products, and the
// transposed matrix is used; mixing both modes in one unit is this design's
// choice.  A free tag travels with each operand for the caller's bookkeeping.
// Latency 3 cycles, one transform per cycle.
module ctu
  import slam_pkg::*;
#(
  parameter int TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             inv,
  input  rot_t             r,
  input  vec3_t            t,
  input  vec3_t            x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output vec3_t            y,
  output logic [TAG_W-1:0] out_tag
);
  rot_t  m;
  vec3_t d;
  fx_t   prod [3][3];
  fx_t   rowsum [3];
  vec3_t t1, t2;
  logic  inv1, inv2, v1, v2;
  logic [TAG_W-1:0] tag1, tag2;

  always_comb begin
    m = inv ? rot_transpose(r) : r;
    d = inv ? v_sub(x, t) : x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      inv1 <= 1'b0; inv2 <= 1'b0;
      t1 <= '0; t2 <= '0; y <= '0;
      tag1 <= '0; tag2 <= '0; out_tag <= '0;
      for (int i = 0; i < 3; i++) begin
        rowsum[i] <= '0;
        for (int j = 0; j < 3; j++) prod[i][j] <= '0;
      end
    end else begin
      // stage 1: products
      v1 <= in_valid; inv1 <= inv; t1 <= t; tag1 <= in_tag;
      for (int j = 0; j < 3; j++) begin
        prod[0][j] <= fx_mul(v_get(m.r0, j), v_get(d, j));
        prod[1][j] <= fx_mul(v_get(m.r1, j), v_get(d, j));
        prod[2][j] <= fx_mul(v_get(m.r2, j), v_get(d, j));
      end
      // stage 2: row sums
      v2 <= v1; inv2 <= inv1; t2 <= t1; tag2 <= tag1;
      for (int i = 0; i < 3; i++) rowsum[i] <= prod[i][0] + prod[i][1] + prod[i][2];
      // stage 3: translation
      out_valid <= v2; out_tag <= tag2;
      y.x <= inv2 ? rowsum[0] : rowsum[0] + t2.x;
      y.y <= inv2 ? rowsum[1] : rowsum[1] + t2.y;
      y.z <= inv2 ? rowsum[2] : rowsum[2] + t2.z;
    end
  end
endmodule
