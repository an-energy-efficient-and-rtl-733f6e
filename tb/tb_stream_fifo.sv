// tb_stream_fifo -- pushes a numbered sequence through the buffer with
// random stalls on both sides and checks order, completeness, that the
// buffer reports full at its depth and that nothing is lost while full.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  logic [4:0] level;
  int checks = 0, failures = 0, expect_v = 0, sent = 0, saw_full = 0;

  stream_fifo #(.WIDTH(16), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data, .level);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != 16'(expect_v)) begin failures++; $display("got %0d exp %0d", out_data, expect_v); end
      expect_v++;
    end
    if (in_valid && in_ready) sent++;
    if (!in_ready) begin
      saw_full++;
      if (level != 5'd16) failures++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: fill without reading
    @(negedge clk);
    for (int n = 0; n < 20; n++) begin
      in_valid = 1; in_data = 16'(sent);
      @(negedge clk);
    end
    in_valid = 0;
    // phase 2: random traffic
    for (int n = 0; n < 2000; n++) begin
      in_valid = ($urandom % 3) != 0;
      in_data = 16'(sent);
      out_ready = ($urandom % 2) != 0;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (40) @(negedge clk);
    checks++; if (expect_v != sent) begin failures++; $display("sent %0d got %0d", sent, expect_v); end
    checks++; if (saw_full == 0) begin failures++; $display("never full"); end
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
