// tb_marginalization -- builds a random positive-definite information
// matrix with a diagonal feature block, loads M11 (2 of 3 feature slots
// used), M12, Z, A, b_M, b_A, serves the Cholesky factor of
// S' = M22 - M21 M11^-1 M12 through the L port and checks H_p and r_p
// against A - Z M^-1 Z^T and b_A - Z M^-1 b_M, with M^-1 obtained by
// Gauss-Jordan elimination in double precision.  Run twice with fresh data.
module tb_marginalization;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int NM1 = 3, NM2 = 4, NA = 5, NU = 2;   // NU feature slots in use
  localparam int NM = NU + NM2;
  logic clk = 0, rst_n = 0, clr = 0, ld_we = 0, start = 0, busy, done;
  marg_tgt_e ld_tgt = MT_M11;
  logic [15:0] ld_i = 0, ld_j = 0;
  fx_t ld_val = 0, l_val, rd_h, rd_r;
  logic [1:0] l_i, l_j;
  logic [2:0] rd_i = 0, rd_j = 0;
  int checks = 0, failures = 0;
  fx_t Lf [NM2][NM2];

  marginalization #(.NM1(NM1), .NM2(NM2), .NA(NA)) dut (.clk, .rst_n, .clr, .ld_we, .ld_tgt,
      .ld_i, .ld_j, .ld_val, .start, .busy, .done, .l_i, .l_j, .l_val, .rd_i, .rd_j, .rd_h, .rd_r);
  assign l_val = Lf[l_i][l_j];
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic ld(input marg_tgt_e t, input int i, input int j, input real v);
    ld_we = 1; ld_tgt = t; ld_i = 16'(i); ld_j = 16'(j); ld_val = to_fx(v);
    @(negedge clk);
    ld_we = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      localparam int T = NM + NA;
      real H [T][T]; real b [T]; real Mi [NM][2*NM]; real Sp [NM2][NM2]; real L [NM2][NM2];
      real Hp [NA][NA]; real rp [NA];
      // information matrix: order [features (diagonal block), M22 states, A states]
      for (int i = 0; i < T; i++) begin
        b[i] = urand(-1, 1);
        for (int j = 0; j <= i; j++) begin
          H[i][j] = (i < NU && j < NU && i != j) ? 0.0 : urand(-0.5, 0.5);
          H[j][i] = H[i][j];
        end
        H[i][i] = urand(3, 5);
      end
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) H[i][j] = fr(to_fx(H[i][j]));
      // S' and its Cholesky factor (the job of the shared Schur and Cholesky blocks)
      for (int i = 0; i < NM2; i++) for (int j = 0; j < NM2; j++) begin
        Sp[i][j] = H[NU+i][NU+j];
        for (int f = 0; f < NU; f++) Sp[i][j] -= H[NU+i][f] * H[f][NU+j] / H[f][f];
      end
      for (int j = 0; j < NM2; j++) begin
        real s;
        for (int i = 0; i < NM2; i++) L[i][j] = 0.0;
        s = Sp[j][j];
        for (int k = 0; k < j; k++) s -= L[j][k]*L[j][k];
        L[j][j] = $sqrt(s);
        for (int i = j+1; i < NM2; i++) begin
          s = Sp[i][j];
          for (int k = 0; k < j; k++) s -= L[i][k]*L[j][k];
          L[i][j] = s / L[j][j];
        end
      end
      for (int i = 0; i < NM2; i++) for (int j = 0; j < NM2; j++) Lf[i][j] = to_fx(L[i][j]);
      // M^-1 by Gauss-Jordan
      for (int i = 0; i < NM; i++) for (int j = 0; j < 2*NM; j++)
        Mi[i][j] = (j < NM) ? H[i][j] : ((j - NM == i) ? 1.0 : 0.0);
      for (int c = 0; c < NM; c++) begin
        real p; p = Mi[c][c];
        for (int j = 0; j < 2*NM; j++) Mi[c][j] /= p;
        for (int i = 0; i < NM; i++) if (i != c) begin
          real f; f = Mi[i][c];
          for (int j = 0; j < 2*NM; j++) Mi[i][j] -= f * Mi[c][j];
        end
      end
      for (int i = 0; i < NA; i++) begin
        rp[i] = b[NM+i];
        for (int k = 0; k < NM; k++) for (int l = 0; l < NM; l++) rp[i] -= H[NM+i][k]*Mi[k][NM+l]*b[l];
        for (int j = 0; j < NA; j++) begin
          Hp[i][j] = H[NM+i][NM+j];
          for (int k = 0; k < NM; k++) for (int l = 0; l < NM; l++)
            Hp[i][j] -= H[NM+i][k]*Mi[k][NM+l]*H[l][NM+j];
        end
      end
      // load: features go to slots 0..NU-1, M22 states after the NM1 feature slots in Z/b_M
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int f = 0; f < NU; f++) begin
        ld(MT_M11, f, 0, H[f][f]);
        ld(MT_BM, f, 0, b[f]);
        for (int c = 0; c < NM2; c++) ld(MT_M12, f, c, H[f][NU+c]);
        for (int r = 0; r < NA; r++) ld(MT_Z, r, f, H[NM+r][f]);
      end
      for (int c = 0; c < NM2; c++) begin
        ld(MT_BM, NM1 + c, 0, b[NU+c]);
        for (int r = 0; r < NA; r++) ld(MT_Z, r, NM1 + c, H[NM+r][NU+c]);
      end
      for (int r = 0; r < NA; r++) begin
        ld(MT_BA, r, 0, b[NM+r]);
        for (int c = 0; c <= r; c++) ld(MT_A, r, c, H[NM+r][NM+c]);
      end
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int i = 0; i < NA; i++) begin
        rd_i = 3'(i);
        for (int j = 0; j <= i; j++) begin
          rd_j = 3'(j); #1;
          checks++;
          if (!near(fr(rd_h), Hp[i][j], 1e-2)) begin failures++; $display("Hp[%0d][%0d] %f exp %f", i, j, fr(rd_h), Hp[i][j]); end
        end
        checks++;
        if (!near(fr(rd_r), rp[i], 1e-2)) begin failures++; $display("rp[%0d] %f exp %f", i, fr(rd_r), rp[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
