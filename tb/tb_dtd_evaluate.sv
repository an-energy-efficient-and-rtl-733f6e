// tb_dtd_evaluate -- drives random 3 x 5 blocks D and residuals e and checks
// the emitted stream: lower triangle of D^T D in row order, then D^T e,
// each value against a double-precision dot product, and the result count
// and timing (first result one cycle after start).
module tb_dtd_evaluate;
  import slam_pkg::*;
  import tb_util_pkg::*;
  localparam int R = 3, C = 5;
  logic clk = 0, rst_n = 0, start = 0;
  fx_t d [R][C];
  fx_t e [R];
  logic busy, out_valid, out_grad, done;
  logic [2:0] out_a, out_b;
  fx_t out_val;
  int checks = 0, failures = 0, idx = 0, cyc = 0, first = -1, dones = 0;
  real rd [R][C];
  real re [R];

  dtd_evaluate #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .start, .d, .e, .busy, .out_valid,
      .out_grad, .out_a, .out_b, .out_val, .done);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (out_valid) begin
    int ea, eb; bit eg; real ev;
    if (first < 0) first = cyc;
    // expected position in the stream
    if (idx < C*(C+1)/2) begin
      int n; n = idx; ea = 0;
      while (n > ea) begin n -= ea + 1; ea++; end
      eb = n; eg = 0;
    end else begin ea = idx - C*(C+1)/2; eb = 0; eg = 1; end
    ev = 0.0;
    for (int r = 0; r < R; r++) ev += eg ? rd[r][ea]*re[r] : rd[r][ea]*rd[r][eb];
    checks++;
    if (out_grad != eg || int'(out_a) != ea || (!eg && int'(out_b) != eb) || !near(fr(out_val), ev, 2e-3)) begin
      failures++;
      $display("idx %0d: got g%0d a%0d b%0d %f exp g%0d a%0d b%0d %f", idx, out_grad, out_a, out_b,
               fr(out_val), eg, ea, eb, ev);
    end
    idx++;
    if (done) dones++;
  end

  initial begin
    int c0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 4; blk++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        re[r] = urand(-2.0, 2.0); e[r] = to_fx(re[r]);
        for (int c = 0; c < C; c++) begin rd[r][c] = urand(-3.0, 3.0); d[r][c] = to_fx(rd[r][c]); end
      end
      idx = 0; first = -1;
      start = 1; c0 = cyc;
      @(negedge clk);
      start = 0;
      wait (done); @(negedge clk); @(negedge clk);
      checks++; if (idx != C*(C+1)/2 + C) begin failures++; $display("count %0d", idx); end
      checks++; if (first - c0 != 2) begin failures++; $display("first at %0d", first - c0); end
    end
    checks++; if (dones != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
