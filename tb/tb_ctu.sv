// tb_ctu -- checks the coordinate transform unit in both modes against a
// double-precision reference: forward y = R x + t and inverse
// y = R^T (x - t), with random rotations, back-to-back operands, tags, and
// the three-cycle latency.
module tb_ctu;
  import slam_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, inv = 0, out_valid;
  rot_t r;
  vec3_t t, x, y;
  logic [3:0] in_tag = 0, out_tag;
  int checks = 0, failures = 0, cyc = 0, first_out = -1, got = 0;
  rv_t ex [32];

  ctu #(.TAG_W(4)) dut (.clk, .rst_n, .in_valid, .inv, .r, .t, .x, .in_tag, .out_valid, .y, .out_tag);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (out_valid) begin
    if (first_out < 0) first_out = cyc;
    checks++;
    if (!(near(vfr(y,0), ex[got][0], 2e-3) && near(vfr(y,1), ex[got][1], 2e-3) &&
          near(vfr(y,2), ex[got][2], 2e-3)) || out_tag != 4'(got)) begin
      failures++;
      $display("mismatch %0d: %f %f %f exp %f %f %f", got, vfr(y,0), vfr(y,1), vfr(y,2),
               ex[got][0], ex[got][1], ex[got][2]);
    end
    got++;
  end

  initial begin
    int c0;
    r = ROT_I; t = '0; x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    c0 = cyc;
    for (int n = 0; n < 32; n++) begin
      rq_t q; rv_t rt, rx, d;
      q = rq_rand();
      for (int i = 0; i < 3; i++) begin rt[i] = urand(-3.0, 3.0); rx[i] = urand(-5.0, 5.0); end
      r = quat_rot(q_fx(q)); t = v_fx(rt); x = v_fx(rx);
      inv = n[0];
      if (!inv) begin
        ex[n] = rq_rot(q, rx);
        for (int i = 0; i < 3; i++) ex[n][i] += rt[i];
      end else begin
        for (int i = 0; i < 3; i++) d[i] = rx[i] - rt[i];
        ex[n] = rq_rot(rq_conj(q), d);
      end
      in_valid = 1; in_tag = 4'(n);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    checks++; if (got != 32) begin failures++; $display("got %0d", got); end
    checks++; if (first_out - c0 != 3) begin failures++; $display("latency %0d", first_out - c0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
