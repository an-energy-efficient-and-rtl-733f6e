// schur_elim -- Schur elimination with parallel, runtime-selectable units,
// and the RAMs of the normal equations.
//
// The normal equations of one Gauss-Newton/LM step are
//     [ U   W^T ] [d_lambda]   [ b_U ]
//     [ W   V   ] [ d_x    ] = [ b_V ]
// with one inverse-depth parameter per feature, so U is diagonal.  This block
// keeps V and b_V (the S and r RAM; V is symmetric and only its lower
// triangle is stored), U and b_U per feature and W as one column per
// feature; W^T is never stored because it is the transpose of W.  The
// accumulate port (acc_*) lets the Jacobian, Hessian and prior paths add
// their contributions.  On start, features whose feat_sel bit is set are
// eliminated one by one:
//     S = V - W U^-1 W^T,   r = b_V - W U^-1 b_U
// which costs one division per feature (U is diagonal) instead of a matrix
// inverse.  n_active of the NUM_SCHUR units work in parallel: unit k takes
// rows k, k+n_active, ... of S, skips a row in one cycle when the feature
// has no entry in it, and otherwise updates one element S(i, j), j <= i, per
// cycle.  Units with k >= n_active keep their registers unchanged (their
// clock would be gated).  Only rows and columns below dim take part, which
// lets marginalization reuse the block on the first keyframe's states.
// The diagonal U, W^T = X sharing and the runtime number of Schur blocks
// follow the paper; the row interleaving is this design's choice.
// Read ports are asynchronous.  Timing: per selected feature 2 cycles plus,
// for the busiest unit, one cycle per skipped row and (i+1) per used row i.
module schur_elim
  import slam_pkg::*;
#(
  parameter int NV        = 150,
  parameter int NF        = 300,
  parameter int NUM_SCHUR = 47
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  // accumulate port: target V (i, j), b_V (i), U (f), b_U (f) or W (f, i)
  input  logic acc_we,
  input  schur_tgt_e acc_tgt,
  input  logic [$clog2(NV)-1:0] acc_i,
  input  logic [$clog2(NV)-1:0] acc_j,
  input  logic [$clog2(NF)-1:0] acc_f,
  input  fx_t  acc_val,
  // elimination control
  input  logic start,
  input  logic [$clog2(NV+1)-1:0] dim,
  input  logic [$clog2(NUM_SCHUR+1)-1:0] n_active,
  input  logic [NF-1:0] feat_sel,
  output logic busy,
  output logic done,
  // read ports
  input  logic [$clog2(NV)-1:0] rd_i,
  input  logic [$clog2(NV)-1:0] rd_j,
  input  logic [$clog2(NF)-1:0] rd_f,
  output fx_t  rd_s,
  output fx_t  rd_b,
  output fx_t  rd_u,
  output fx_t  rd_bu,
  output fx_t  rd_w
);
  localparam int NT = NV * (NV + 1) / 2;
  localparam int FW_ = $clog2(NF);

  fx_t s  [NT];
  fx_t bv [NV];
  fx_t u  [NF];
  fx_t bu [NF];
  fx_t w  [NF][NV];

  typedef enum logic [1:0] {S_IDLE, S_NEXT, S_INV, S_RUN} st_e;
  st_e st;
  logic [FW_-1:0] f;
  fx_t  inv_u;
  int   urow [NUM_SCHUR];
  int   ucol [NUM_SCHUR];
  logic [NUM_SCHUR-1:0] udone;
  int   nact, dimi;

  assign nact = int'(n_active);
  assign dimi = int'(dim);
  assign busy = (st != S_IDLE);

  // Per-word valid bits stand for "this word has been written since the last
  // clear"; an invalid word reads as zero, so clearing the large RAMs costs a
  // single cycle without resetting the RAM words themselves.
  logic [NT-1:0]    s_v;
  logic [NF*NV-1:0] w_v;

  function automatic fx_t sget(input int t);
    return s_v[t] ? s[t] : '0;
  endfunction

  function automatic fx_t wget(input int g, input int i);
    return w_v[g*NV + i] ? w[g][i] : '0;
  endfunction

  // control, small vectors and valid bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; f <= '0; inv_u <= '0; done <= 1'b0; udone <= '1;
      for (int k = 0; k < NUM_SCHUR; k++) begin urow[k] <= 0; ucol[k] <= 0; end
      s_v <= '0; w_v <= '0;
      for (int i = 0; i < NV; i++) bv[i] <= '0;
      for (int g = 0; g < NF; g++) begin u[g] <= '0; bu[g] <= '0; end
    end else begin
      done <= 1'b0;
      if (clr) begin
        s_v <= '0; w_v <= '0;
        for (int i = 0; i < NV; i++) bv[i] <= '0;
        for (int g = 0; g < NF; g++) begin u[g] <= '0; bu[g] <= '0; end
      end else if (acc_we && st == S_IDLE) begin
        unique case (acc_tgt)
          TGT_V:  s_v[tri_idx(int'(acc_i), int'(acc_j))] <= 1'b1;
          TGT_BV: bv[acc_i] <= bv[acc_i] + acc_val;
          TGT_U:  u[acc_f] <= u[acc_f] + acc_val;
          TGT_BU: bu[acc_f] <= bu[acc_f] + acc_val;
          TGT_W:  w_v[int'(acc_f)*NV + int'(acc_i)] <= 1'b1;
          default: ;
        endcase
      end

      unique case (st)
        S_IDLE: if (start) begin
          st <= S_NEXT; f <= '0;
        end
        S_NEXT: begin
          // skip features that are not selected or carry no information
          if (feat_sel[f] && u[f] != '0) st <= S_INV;
          else if (f == FW_'(NF-1)) begin st <= S_IDLE; done <= 1'b1; end
          else f <= f + 1'b1;
        end
        S_INV: begin
          inv_u <= fx_div(FX_ONE, u[f]);
          for (int k = 0; k < NUM_SCHUR; k++) begin
            urow[k] <= k; ucol[k] <= 0;
            udone[k] <= (k >= nact) || (k >= dimi);
          end
          st <= S_RUN;
        end
        S_RUN: begin
          for (int k = 0; k < NUM_SCHUR; k++) begin
            if (!udone[k] && k < nact) begin
              if (urow[k] >= dimi) udone[k] <= 1'b1;
              else if (wget(int'(f), urow[k]) == '0) begin
                urow[k] <= urow[k] + nact; ucol[k] <= 0;
              end else begin
                s_v[tri_idx(urow[k], ucol[k])] <= 1'b1;
                if (ucol[k] == urow[k]) begin
                  bv[urow[k]] <= bv[urow[k]] - fx_mul(fx_mul(wget(int'(f), urow[k]), inv_u), bu[f]);
                  urow[k] <= urow[k] + nact; ucol[k] <= 0;
                end else ucol[k] <= ucol[k] + 1;
              end
            end
          end
          if (&udone) begin
            if (f == FW_'(NF-1)) begin st <= S_IDLE; done <= 1'b1; end
            else begin f <= f + 1'b1; st <= S_NEXT; end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // S and W words (no reset; see the valid bits above)
  always_ff @(posedge clk) begin
    if (!clr && acc_we && st == S_IDLE) begin
      if (acc_tgt == TGT_V)
        s[tri_idx(int'(acc_i), int'(acc_j))] <= sget(tri_idx(int'(acc_i), int'(acc_j))) + acc_val;
      if (acc_tgt == TGT_W)
        w[acc_f][acc_i] <= wget(int'(acc_f), int'(acc_i)) + acc_val;
    end
    if (!clr && st == S_RUN) begin
      for (int k = 0; k < NUM_SCHUR; k++) begin
        if (!udone[k] && k < nact && urow[k] < dimi && wget(int'(f), urow[k]) != '0)
          s[tri_idx(urow[k], ucol[k])] <= sget(tri_idx(urow[k], ucol[k]))
              - fx_mul(fx_mul(wget(int'(f), urow[k]), inv_u), wget(int'(f), ucol[k]));
      end
    end
  end

  assign rd_s  = sget(tri_idx(int'(rd_i), int'(rd_j)));
  assign rd_b  = bv[rd_i];
  assign rd_u  = u[rd_f];
  assign rd_bu = bu[rd_f];
  assign rd_w  = wget(int'(rd_f), int'(rd_i));
endmodule
