// tb_schur_elim -- builds a random system (V, b_V, diagonal U, b_U, sparse
// W) through the accumulate port (every value written as two halves, so
// accumulation is exercised), eliminates all features and checks S and r
// against S = V - W U^-1 W^T, r = b_V - W U^-1 b_U in double precision.
// The same system is then solved with 1 and with 3 active units (same
// result, fewer cycles with more units), and with a feature subset and
// dim = 6, as marginalization uses it (rows >= 6 must stay untouched).
module tb_schur_elim;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int NV = 12, NF = 6, NS = 3;
  logic clk = 0, rst_n = 0, clr = 0, acc_we = 0, start = 0, busy, done;
  schur_tgt_e acc_tgt = TGT_V;
  logic [3:0] acc_i = 0, acc_j = 0, rd_i = 0, rd_j = 0;
  logic [2:0] acc_f = 0, rd_f = 0;
  fx_t acc_val = 0, rd_s, rd_b, rd_u, rd_bu, rd_w;
  logic [3:0] dim = 4'(NV);
  logic [1:0] n_active = 2'(NS);
  logic [NF-1:0] feat_sel = '1;
  int checks = 0, failures = 0, cyc = 0;
  real V [NV][NV]; real bv [NV]; real U [NF]; real bu [NF]; real W [NF][NV];
  int cycles_run [2];

  schur_elim #(.NV(NV), .NF(NF), .NUM_SCHUR(NS)) dut (.clk, .rst_n, .clr, .acc_we, .acc_tgt,
      .acc_i, .acc_j, .acc_f, .acc_val, .start, .dim, .n_active, .feat_sel, .busy, .done,
      .rd_i, .rd_j, .rd_f, .rd_s, .rd_b, .rd_u, .rd_bu, .rd_w);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic acc2(input schur_tgt_e t, input int i, input int j, input int f, input real v);
    for (int h = 0; h < 2; h++) begin
      acc_we = 1; acc_tgt = t; acc_i = 4'(i); acc_j = 4'(j); acc_f = 3'(f);
      acc_val = to_fx(h == 0 ? v * 0.25 : v * 0.75);
      @(negedge clk);
    end
    acc_we = 0;
  endtask

  task automatic load();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < NV; i++) begin
      for (int j = 0; j <= i; j++) acc2(TGT_V, i, j, 0, V[i][j]);
      acc2(TGT_BV, i, 0, 0, bv[i]);
    end
    for (int f = 0; f < NF; f++) begin
      acc2(TGT_U, 0, 0, f, U[f]);
      acc2(TGT_BU, 0, 0, f, bu[f]);
      for (int i = 0; i < NV; i++) if (W[f][i] != 0.0) acc2(TGT_W, i, 0, f, W[f][i]);
    end
  endtask

  task automatic run_check(input int nact, input int dm, input logic [NF-1:0] sel, input int slot);
    int c0;
    real S [NV][NV]; real r [NV];
    @(negedge clk); n_active = 2'(nact); dim = 4'(dm); feat_sel = sel; start = 1; c0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    if (slot >= 0) cycles_run[slot] = cyc - c0;
    for (int i = 0; i < NV; i++) begin
      r[i] = bv[i];
      for (int j = 0; j < NV; j++) S[i][j] = V[i][j];
    end
    for (int f = 0; f < NF; f++) if (sel[f])
      for (int i = 0; i < dm; i++) begin
        r[i] -= W[f][i] * bu[f] / U[f];
        for (int j = 0; j < dm; j++) S[i][j] -= W[f][i] * W[f][j] / U[f];
      end
    for (int i = 0; i < NV; i++) begin
      rd_i = 4'(i);
      for (int j = 0; j <= i; j++) begin
        rd_j = 4'(j); #1;
        checks++;
        if (!near(fr(rd_s), S[i][j], 5e-3)) begin failures++; $display("S[%0d][%0d] %f exp %f", i, j, fr(rd_s), S[i][j]); end
      end
      checks++;
      if (!near(fr(rd_b), r[i], 5e-3)) begin failures++; $display("r[%0d] %f exp %f", i, fr(rd_b), r[i]); end
    end
    // U, b_U and W are kept for back-substitution
    for (int f = 0; f < NF; f++) begin
      rd_f = 3'(f); rd_i = 4'(f); #1;
      checks++;
      if (!near(fr(rd_u), U[f], 1e-3) || !near(fr(rd_bu), bu[f], 1e-3) || !near(fr(rd_w), W[f][f], 1e-3))
        failures++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      bv[i] = urand(-2, 2);
      for (int j = 0; j <= i; j++) begin V[i][j] = urand(-1, 1); V[j][i] = V[i][j]; end
      V[i][i] += 8.0;
    end
    for (int f = 0; f < NF; f++) begin
      U[f] = urand(2, 5); bu[f] = urand(-1, 1);
      for (int i = 0; i < NV; i++) W[f][i] = (($urandom % 3) == 0) ? 0.0 : urand(-1, 1);
    end
    load(); run_check(3, NV, '1, 0);
    load(); run_check(1, NV, '1, 1);
    checks++;
    if (!(cycles_run[0] < cycles_run[1])) begin
      failures++; $display("3 units %0d cycles, 1 unit %0d cycles", cycles_run[0], cycles_run[1]);
    end
    load(); run_check(2, 6, 6'b010110, -1);
    $display("cycles: 3 units %0d, 1 unit %0d", cycles_run[0], cycles_run[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
