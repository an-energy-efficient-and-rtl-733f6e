// runtime_reconfig -- lookup table and clock-gate enables of the runtime
// reconfigurable technique.
//
// An offline-built table maps the number of feature points seen in the
// current environment to the number of NLS (LM) iterations, the number of
// active Schur elimination blocks and the number of active Cholesky update
// modules.  Row r applies when the feature count is below its bound and not
// below the bound of row r-1 (rows are searched in order; a row with bound 0
// is empty).  The table is written through its own port (tbl_*) whenever
// software has a new entry, independently of the solver, so an update costs
// the solver nothing; a lookup strobe latches the configuration for the next
// window.  The enables drive the clock gates of the Schur and update units:
// unit k runs only when k is below the configured count.
// Reset contents are the three rows printed in the paper's lookup table
// (0-200: 6/47/97, 200-250: 5/42/63, 250-300: 4/35/42).  The paper's table
// continues ("..."); this design holds the last printed row for all larger
// counts.  Table depth (8 rows of 16+4+8+8 bits = 288 bits, close to the
// quoted 0.3 kb) and row format are this design's choices.
// Timing: configuration valid one cycle after lookup.
module runtime_reconfig
  import slam_pkg::*;
#(
  parameter int DEPTH     = 8,
  parameter int MAX_SCHUR = 47,
  parameter int MAX_UPD   = 97
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tbl_we,
  input  logic [$clog2(DEPTH)-1:0] tbl_idx,
  input  lut_row_t tbl_row,
  input  logic lookup,
  input  logic [15:0] n_feat,
  output logic [3:0] n_iter,
  output logic [$clog2(MAX_SCHUR+1)-1:0] n_schur,
  output logic [$clog2(MAX_UPD+1)-1:0]   n_upd,
  output logic [MAX_SCHUR-1:0] schur_clk_en,
  output logic [MAX_UPD-1:0]   upd_clk_en
);
  lut_row_t tbl [DEPTH];
  lut_row_t hit;

  always_comb begin
    hit = tbl[0];
    for (int r = DEPTH - 1; r >= 0; r--)
      if (tbl[r].bound != 16'd0 && n_feat < tbl[r].bound) hit = tbl[r];
  end

  function automatic lut_row_t row(input int b, input int it, input int s, input int u);
    lut_row_t x;
    x.bound = 16'(b); x.iters = 4'(it); x.n_schur = 8'(s); x.n_upd = 8'(u);
    return x;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < DEPTH; r++) tbl[r] <= '0;
      tbl[0] <= row(200, 6, 47, 97);
      tbl[1] <= row(250, 5, 42, 63);
      tbl[2] <= row(300, 4, 35, 42);
      tbl[3] <= row(16'hffff, 4, 35, 42);
      n_iter <= 4'd6;
      n_schur <= ($clog2(MAX_SCHUR+1))'(MAX_SCHUR);
      n_upd <= ($clog2(MAX_UPD+1))'(MAX_UPD);
    end else begin
      if (tbl_we) tbl[tbl_idx] <= tbl_row;
      if (lookup) begin
        n_iter <= hit.iters;
        n_schur <= (int'(hit.n_schur) > MAX_SCHUR) ? ($clog2(MAX_SCHUR+1))'(MAX_SCHUR)
                                                  : ($clog2(MAX_SCHUR+1))'(hit.n_schur);
        n_upd <= (int'(hit.n_upd) > MAX_UPD) ? ($clog2(MAX_UPD+1))'(MAX_UPD)
                                            : ($clog2(MAX_UPD+1))'(hit.n_upd);
      end
    end
  end

  always_comb begin
    for (int k = 0; k < MAX_SCHUR; k++) schur_clk_en[k] = (k < int'(n_schur));
    for (int k = 0; k < MAX_UPD; k++)   upd_clk_en[k]   = (k < int'(n_upd));
  end
endmodule
