// tb_quat_to_rot -- writes random keyframe orientations and checks every
// stored rotation matrix against the double-precision rotation of the three
// unit vectors by the quaternion, through both read ports.
module tb_quat_to_rot;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N_KF = 10;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_done;
  logic [3:0] wr_kf = 0, rd_kf = 0, rd2_kf = 0;
  quat_t wr_q;
  rot_t rd_r, rd2_r;
  int checks = 0, failures = 0, dones = 0;
  rq_t qs [N_KF];

  quat_to_rot #(.N_KF(N_KF)) dut (.clk, .rst_n, .wr_valid, .wr_kf, .wr_q, .wr_done,
                                  .rd_kf, .rd_r, .rd2_kf, .rd2_r);
  always #5 clk = ~clk;
  always @(negedge clk) if (wr_done) dones++;
  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real rget(input rot_t m, input int i, input int j);
    vec3_t row;
    row = (i == 0) ? m.r0 : (i == 1) ? m.r1 : m.r2;
    return vfr(row, j);
  endfunction

  initial begin
    wr_q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < N_KF; k++) begin
      qs[k] = rq_rand();
      wr_valid = 1; wr_kf = 4'(k); wr_q = q_fx(qs[k]);
      @(negedge clk);
    end
    wr_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (dones != N_KF) begin failures++; $display("dones %0d", dones); end
    for (int k = 0; k < N_KF; k++) begin
      rd_kf = 4'(k); rd2_kf = 4'(N_KF - 1 - k);
      #1;
      for (int j = 0; j < 3; j++) begin
        rv_t e, col, col2;
        e = '{0.0, 0.0, 0.0}; e[j] = 1.0;
        col = rq_rot(qs[k], e);
        col2 = rq_rot(qs[N_KF - 1 - k], e);
        for (int i = 0; i < 3; i++) begin
          checks++;
          if (!near(rget(rd_r, i, j), col[i], 1e-3) || !near(rget(rd2_r, i, j), col2[i], 1e-3)) begin
            failures++;
            $display("kf %0d R[%0d][%0d] %f exp %f", k, i, j, rget(rd_r, i, j), col[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
