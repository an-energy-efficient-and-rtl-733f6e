// tb_hessian_calc -- feeds random IMU records for two keyframe pairs and
// checks every accumulate request against J^T J and -J^T r of the explicit
// 6 x 12 position/velocity Jacobian, evaluated in double precision and
// placed at the global state indices; checks that each of the 78 Hessian
// and 12 right-hand-side entries is produced exactly once.
module tb_hessian_calc;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N_KF = 4, NV = N_KF * 15;
  logic clk = 0, rst_n = 0, start = 0, busy, acc_valid, acc_is_b, done;
  logic [1:0] pair = 0;
  imu_rec_t rec;
  logic [5:0] acc_row, acc_col;
  fx_t acc_val;
  int checks = 0, failures = 0, nout = 0;
  real H [NV][NV];
  real bb [NV];
  int seen [NV][NV];
  int seenb [NV];

  hessian_calc #(.N_KF(N_KF), .NV(NV)) dut (.clk, .rst_n, .start, .pair, .rec, .busy,
      .acc_valid, .acc_is_b, .acc_row, .acc_col, .acc_val, .done);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (acc_valid) begin
    nout++;
    checks++;
    if (acc_is_b) begin
      seenb[acc_row]++;
      if (!near(fr(acc_val), bb[acc_row], 3e-3)) begin
        failures++; $display("b[%0d] %f exp %f", acc_row, fr(acc_val), bb[acc_row]);
      end
    end else begin
      seen[acc_row][acc_col]++;
      if (acc_row < acc_col || !near(fr(acc_val), H[acc_row][acc_col], 3e-3)) begin
        failures++; $display("H[%0d][%0d] %f exp %f", acc_row, acc_col, fr(acc_val), H[acc_row][acc_col]);
      end
    end
  end

  initial begin
    rec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2; k++) begin
      rq_t q; real rt [3][3]; real dtv; real r [6]; real J [6][NV]; int gi [12];
      q = rq_rand(); dtv = urand(0.05, 0.3);
      for (int j = 0; j < 3; j++) begin
        rv_t e, col;
        e = '{0.0, 0.0, 0.0}; e[j] = 1.0;
        col = rq_rot(rq_conj(q), e);
        for (int i = 0; i < 3; i++) rt[i][j] = col[i];
      end
      for (int i = 0; i < 6; i++) r[i] = urand(-1, 1);
      rec.rt.r0 = '{x: to_fx(rt[0][0]), y: to_fx(rt[0][1]), z: to_fx(rt[0][2])};
      rec.rt.r1 = '{x: to_fx(rt[1][0]), y: to_fx(rt[1][1]), z: to_fx(rt[1][2])};
      rec.rt.r2 = '{x: to_fx(rt[2][0]), y: to_fx(rt[2][1]), z: to_fx(rt[2][2])};
      rec.dt = to_fx(dtv);
      rec.rp = '{x: to_fx(r[0]), y: to_fx(r[1]), z: to_fx(r[2])};
      rec.rv = '{x: to_fx(r[3]), y: to_fx(r[4]), z: to_fx(r[5])};
      // explicit Jacobian at global indices
      for (int i = 0; i < 6; i++) for (int c = 0; c < NV; c++) J[i][c] = 0.0;
      for (int i = 0; i < 3; i++) for (int c = 0; c < 3; c++) begin
        J[i][k*15 + c]       = -rt[i][c];
        J[i][k*15 + 6 + c]   = -rt[i][c] * dtv;
        J[i][(k+1)*15 + c]   =  rt[i][c];
        J[3+i][k*15 + 6 + c] = -rt[i][c];
        J[3+i][(k+1)*15 + 6 + c] = rt[i][c];
      end
      for (int a = 0; a < NV; a++) begin
        bb[a] = 0.0; seenb[a] = 0;
        for (int i = 0; i < 6; i++) bb[a] -= J[i][a] * r[i];
        for (int b = 0; b < NV; b++) begin
          H[a][b] = 0.0; seen[a][b] = 0;
          for (int i = 0; i < 6; i++) H[a][b] += J[i][a] * J[i][b];
        end
      end
      nout = 0;
      @(negedge clk); pair = 2'(k); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++; if (nout != 90) begin failures++; $display("outputs %0d", nout); end
      // every touched block entry exactly once
      gi = '{k*15, k*15+1, k*15+2, k*15+6, k*15+7, k*15+8,
             (k+1)*15, (k+1)*15+1, (k+1)*15+2, (k+1)*15+6, (k+1)*15+7, (k+1)*15+8};
      for (int a = 0; a < 12; a++) begin
        checks++; if (seenb[gi[a]] != 1) failures++;
        for (int b = 0; b <= a; b++) begin
          checks++;
          if (seen[gi[a]][gi[b]] != 1) begin failures++; $display("entry %0d,%0d seen %0d", gi[a], gi[b], seen[gi[a]][gi[b]]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
