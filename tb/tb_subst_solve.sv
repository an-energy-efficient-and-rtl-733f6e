// tb_subst_solve -- serves a random well-conditioned lower-triangular L
// through the L port, loads r, and checks the solution of L L^T x = r
// against double-precision forward and backward substitution; also checks
// the dim*(dim+1)-cycle run time within a few cycles of control overhead.
module tb_subst_solve;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, we = 0, start = 0, busy, done;
  logic [3:0] wr_idx = 0, l_i, l_j, rd_idx = 0;
  fx_t wr_val = 0, l_val, rd_x;
  logic [3:0] dim = 4'(N);
  int checks = 0, failures = 0, cyc = 0;
  real L [N][N]; real r [N];
  fx_t Lf [N][N];

  subst_solve #(.N(N)) dut (.clk, .rst_n, .we, .wr_idx, .wr_val, .start, .dim, .busy, .done,
      .l_i, .l_j, .l_val, .rd_idx, .rd_x);
  assign l_val = Lf[l_i][l_j];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) Lf[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      real y [N]; real x [N]; int c0, dm;
      dm = (trial == 2) ? 6 : N;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          L[i][j] = (j < i) ? urand(-0.5, 0.5) : (j == i) ? urand(1.0, 2.0) : 0.0;
          Lf[i][j] = to_fx(L[i][j]);
          L[i][j] = fr(Lf[i][j]);
        end
        r[i] = urand(-3, 3);
      end
      @(negedge clk);
      for (int i = 0; i < dm; i++) begin
        we = 1; wr_idx = 4'(i); wr_val = to_fx(r[i]); @(negedge clk);
      end
      we = 0; dim = 4'(dm); start = 1; c0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if ((cyc - c0) > dm*(dm+1) + 4 || (cyc - c0) < dm*(dm+1)) begin
        failures++; $display("cycles %0d for dim %0d", cyc - c0, dm);
      end
      for (int i = 0; i < dm; i++) begin
        y[i] = r[i];
        for (int k = 0; k < i; k++) y[i] -= L[i][k] * y[k];
        y[i] /= L[i][i];
      end
      for (int i = dm - 1; i >= 0; i--) begin
        x[i] = y[i];
        for (int k = i + 1; k < dm; k++) x[i] -= L[k][i] * x[k];
        x[i] /= L[i][i];
      end
      for (int i = 0; i < dm; i++) begin
        rd_idx = 4'(i); #1;
        checks++;
        if (!near(fr(rd_x), x[i], 3e-3)) begin failures++; $display("x[%0d] %f exp %f", i, fr(rd_x), x[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
