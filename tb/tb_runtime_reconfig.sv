// tb_runtime_reconfig -- checks the reset contents of the lookup table
// (feature ranges 0-200, 200-250, 250-300 and beyond), the clock-gate enable
// masks, clamping to the unit counts, and a table row rewritten at run time.
module tb_runtime_reconfig;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0, tbl_we = 0, lookup = 0;
  logic [2:0] tbl_idx = 0;
  lut_row_t tbl_row = '0;
  logic [15:0] n_feat = 0;
  logic [3:0] n_iter;
  logic [5:0] n_schur;
  logic [6:0] n_upd;
  logic [46:0] schur_clk_en;
  logic [96:0] upd_clk_en;
  int checks = 0, failures = 0;

  runtime_reconfig #(.DEPTH(8), .MAX_SCHUR(47), .MAX_UPD(97)) dut (.clk, .rst_n, .tbl_we, .tbl_idx,
      .tbl_row, .lookup, .n_feat, .n_iter, .n_schur, .n_upd, .schur_clk_en, .upd_clk_en);
  always #5 clk = ~clk;
  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic look(input int nf, input int it, input int s, input int u);
    @(negedge clk); n_feat = 16'(nf); lookup = 1;
    @(negedge clk); lookup = 0;
    checks++;
    if (int'(n_iter) != it || int'(n_schur) != s || int'(n_upd) != u) begin
      failures++; $display("nf %0d: %0d %0d %0d exp %0d %0d %0d", nf, n_iter, n_schur, n_upd, it, s, u);
    end
    checks++;
    if ($countones(schur_clk_en) != s || $countones(upd_clk_en) != u ||
        (s > 0 && !schur_clk_en[0]) || (s < 47 && schur_clk_en[s])) begin
      failures++; $display("enable masks wrong for %0d", nf);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    look(0, 6, 47, 97);
    look(150, 6, 47, 97);
    look(199, 6, 47, 97);
    look(200, 5, 42, 63);
    look(249, 5, 42, 63);
    look(260, 4, 35, 42);
    look(1000, 4, 35, 42);
    // software installs a new row for 200-250 features
    @(negedge clk); tbl_we = 1; tbl_idx = 3'd1;
    tbl_row = '{bound: 16'd250, iters: 4'd3, n_schur: 8'd20, n_upd: 8'd30};
    @(negedge clk); tbl_we = 0;
    look(220, 3, 20, 30);
    look(100, 6, 47, 97);
    // counts above the number of built units are clamped
    @(negedge clk); tbl_we = 1; tbl_idx = 3'd0;
    tbl_row = '{bound: 16'd200, iters: 4'd2, n_schur: 8'd200, n_upd: 8'd150};
    @(negedge clk); tbl_we = 0;
    look(10, 2, 47, 97);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
