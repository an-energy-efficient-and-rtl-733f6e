// tb_qm -- checks the quaternion multiplier against a double-precision
// Hamilton product for random unit quaternions, fed back to back, and checks
// the two-cycle latency.
module tb_qm;
  import slam_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  quat_t qa, qb, q;
  int checks = 0, failures = 0;
  rq_t ra [64], rb [64];
  int sent = 0, got = 0, cyc = 0, first_out = -1;

  qm dut (.clk, .rst_n, .in_valid, .qa, .qb, .out_valid, .q);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (out_valid) begin
    rq_t e;
    if (first_out < 0) first_out = cyc;
    e = rq_mul(ra[got], rb[got]);
    checks++;
    if (!(near(fr(q.w), e[0], 1e-3) && near(fr(q.x), e[1], 1e-3) &&
          near(fr(q.y), e[2], 1e-3) && near(fr(q.z), e[3], 1e-3))) begin
      failures++;
      $display("mismatch %0d: got %f %f %f %f exp %f %f %f %f", got, fr(q.w), fr(q.x), fr(q.y), fr(q.z),
               e[0], e[1], e[2], e[3]);
    end
    got++;
  end

  initial begin
    int start_cyc;
    qa = '0; qb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 64; n++) begin
      ra[n] = rq_rand(); rb[n] = rq_rand();
    end
    @(negedge clk);
    start_cyc = cyc;
    for (int n = 0; n < 64; n++) begin
      in_valid = 1; qa = q_fx(ra[n]); qb = q_fx(rb[n]);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (got != 64) begin failures++; $display("got %0d results", got); end
    checks++;
    if (first_out - start_cyc != 2) begin failures++; $display("latency %0d", first_out - start_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
