// tb_cholesky -- factors random symmetric positive-definite matrices and
// checks every element of L against a double-precision Cholesky
// factorisation.  Runs with 4 and with 1 active update units (same L, fewer
// cycles with more units), with dim smaller than the RAM, and with a matrix
// that is not positive definite (not_pd must be raised).
module tb_cholesky;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 12, NU = 4;
  logic clk = 0, rst_n = 0, we = 0, start = 0, busy, done, not_pd;
  logic [3:0] wr_i = 0, wr_j = 0, rd_i = 0, rd_j = 0;
  fx_t wr_val = 0, rd_l;
  logic [3:0] dim = 4'(N);
  logic [2:0] n_active = 3'(NU);
  int checks = 0, failures = 0, cyc = 0;
  real A [N][N];
  int cyc_run [2];

  cholesky #(.N(N), .NUM_UPD(NU)) dut (.clk, .rst_n, .we, .wr_i, .wr_j, .wr_val, .start, .dim,
      .n_active, .busy, .done, .not_pd, .rd_i, .rd_j, .rd_l);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_run(input int dm, input int nact, input int slot, input bit expect_pd);
    real L [N][N];
    int c0;
    @(negedge clk);
    for (int i = 0; i < dm; i++) for (int j = 0; j <= i; j++) begin
      we = 1; wr_i = 4'(i); wr_j = 4'(j); wr_val = to_fx(A[i][j]);
      @(negedge clk);
    end
    we = 0; dim = 4'(dm); n_active = 3'(nact); start = 1; c0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    if (slot >= 0) cyc_run[slot] = cyc - c0;
    checks++;
    if (not_pd == expect_pd) begin failures++; $display("not_pd = %0d", not_pd); end
    if (!expect_pd) return;
    // reference
    for (int j = 0; j < dm; j++) begin
      real s;
      s = A[j][j];
      for (int k = 0; k < j; k++) s -= L[j][k] * L[j][k];
      L[j][j] = $sqrt(s);
      for (int i = j + 1; i < dm; i++) begin
        s = A[i][j];
        for (int k = 0; k < j; k++) s -= L[i][k] * L[j][k];
        L[i][j] = s / L[j][j];
      end
    end
    for (int i = 0; i < dm; i++) for (int j = 0; j <= i; j++) begin
      rd_i = 4'(i); rd_j = 4'(j); #1;
      checks++;
      if (!near(fr(rd_l), L[i][j], 3e-3)) begin failures++; $display("L[%0d][%0d] %f exp %f", i, j, fr(rd_l), L[i][j]); end
    end
    rd_i = 0; rd_j = 1; #1;
    checks++; if (rd_l != '0) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j <= i; j++) begin A[i][j] = urand(-1, 1); A[j][i] = A[i][j]; end
      A[i][i] += 6.0;
    end
    load_run(N, NU, 0, 1);
    load_run(N, 1, 1, 1);
    checks++;
    if (!(cyc_run[0] < cyc_run[1])) begin failures++; $display("cycles %0d vs %0d", cyc_run[0], cyc_run[1]); end
    load_run(5, 2, -1, 1);
    A[3][3] = -1.0;
    load_run(6, NU, -1, 0);
    $display("cycles: %0d units %0d, 1 unit %0d", NU, cyc_run[0], cyc_run[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
