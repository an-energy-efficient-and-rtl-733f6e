// subst_solve -- substitution and solve for the pose update dp.
//
// With the Cholesky factor L of the Schur complement S (read from the
// cholesky block through the l_i/l_j/l_val port) and the reduced right-hand
// side r (loaded through the write port), it solves S dp = r as
//   forward  L y = r:      y_i = (r_i - sum_{k<i} L(i,k) y_k) / L(i,i)
//   backward L^T dp = y:   dp_i = (y_i - sum_{k>i} L(k,i) dp_k) / L(i,i)
// with one multiply-accumulate per cycle and one division per row.  y
// overwrites r and dp overwrites y in the same vector RAM.  The block is
// only named; the sequential organisation is this design's choice.
// Timing: dim*(dim+1) cycles plus a few for control; done pulses at the end.
// The result is read through rd_idx -> rd_x.
module subst_solve
  import slam_pkg::*;
#(
  parameter int N = 150
) (
  input  logic clk,
  input  logic rst_n,
  input  logic we,
  input  logic [$clog2(N)-1:0] wr_idx,
  input  fx_t  wr_val,
  input  logic start,
  input  logic [$clog2(N+1)-1:0] dim,
  output logic busy,
  output logic done,
  output logic [$clog2(N)-1:0] l_i,
  output logic [$clog2(N)-1:0] l_j,
  input  fx_t  l_val,
  input  logic [$clog2(N)-1:0] rd_idx,
  output fx_t  rd_x
);
  localparam int AW = $clog2(N);
  fx_t x [N];
  typedef enum logic [1:0] {X_IDLE, X_FWD, X_BWD} st_e;
  st_e st;
  int  i, k, dimi;
  fx_t acc;
  logic first;

  assign dimi = int'(dim);
  assign busy = (st != X_IDLE);

  // L address: forward reads row i, backward reads column i
  always_comb begin
    if (st == X_BWD) begin l_i = AW'(k); l_j = AW'(i); end
    else             begin l_i = AW'(i); l_j = AW'(k); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; i <= 0; k <= 0; acc <= '0; done <= 1'b0; first <= 1'b0;
      for (int n = 0; n < N; n++) x[n] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        X_IDLE: begin
          if (we) x[wr_idx] <= wr_val;
          if (start) begin st <= X_FWD; i <= 0; k <= 0; first <= 1'b1; end
        end
        X_FWD: begin
          fx_t a0;
          a0 = first ? x[i] : acc;
          if (k == i) begin
            x[i] <= fx_div(a0, l_val);
            first <= 1'b1; k <= 0;
            if (i == dimi - 1) begin st <= X_BWD; k <= dimi - 1; end
            else i <= i + 1;
          end else begin
            acc <= a0 - fx_mul(l_val, x[k]);
            first <= 1'b0;
            k <= k + 1;
          end
        end
        X_BWD: begin
          fx_t a0;
          a0 = first ? x[i] : acc;
          if (k == i) begin
            x[i] <= fx_div(a0, l_val);
            first <= 1'b1;
            if (i == 0) begin st <= X_IDLE; done <= 1'b1; end
            else begin i <= i - 1; k <= dimi - 1; end
          end else begin
            acc <= a0 - fx_mul(l_val, x[k]);
            first <= 1'b0;
            k <= k - 1;
          end
        end
        default: st <= X_IDLE;
      endcase
    end
  end

  assign rd_x = x[rd_idx];
endmodule
