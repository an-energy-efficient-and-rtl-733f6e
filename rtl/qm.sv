// qm -- quaternion multiplier (QM), q = qa (x) qb (Hamilton product).
//
// The operand quaternions are captured in input registers, the sixteen
// component products are formed and registered, and a second stage adds
// them with the signs of the Hamilton product.  This follows the QM detail of
// the IMU Jacobian datapath (operand registers, a bank of multipliers, adder
// trees); the exact split into two register stages is this design's choice.
// Interface: in_valid/qa/qb in, out_valid/q out, fully pipelined (one product
// per cycle), latency 2 cycles.  Q16.16 arithmetic from slam_pkg.
module qm
  import slam_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  quat_t qa,
  input  quat_t qb,
  output logic  out_valid,
  output quat_t q
);
  fx_t  p [4][4];   // p[i][j] = qa[i] * qb[j], component order w, x, y, z
  logic v1;

  function automatic fx_t comp(input quat_t a, input int i);
    return (i == 0) ? a.w : (i == 1) ? a.x : (i == 2) ? a.y : a.z;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
      q <= '0;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) p[i][j] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) p[i][j] <= fx_mul(comp(qa, i), comp(qb, j));
      out_valid <= v1;
      if (v1) begin
        q.w <= p[0][0] - p[1][1] - p[2][2] - p[3][3];
        q.x <= p[0][1] + p[1][0] + p[2][3] - p[3][2];
        q.y <= p[0][2] - p[1][3] + p[2][0] + p[3][1];
        q.z <= p[0][3] + p[1][2] - p[2][1] + p[3][0];
      end
    end
  end
endmodule
