// cholesky -- Cholesky decomposition S = L L^T with one Evaluate unit and
// NUM_UPD time-multiplexed Update units.
//
// The symmetric matrix is loaded through the write port into a lower-
// triangular RAM and factored in place; afterwards the RAM holds L.
// Iteration i:
//   Evaluate  L(i,i) = sqrt(S(i,i)), then L(j,i) = S(j,i) / L(i,i) for
//             j = i+1 .. dim-1, one element per cycle (i divisions and one
//             square root per column, as in the paper's operation count).
//   Update    S(j,k) -= L(j,i) * L(k,i) for i < k <= j < dim, the i(i-1)/2
//             part.  Trailing column k is handled by update unit
//             (k-i-1) mod n_active; a unit walks its column from row k
//             downwards, one multiply-subtract per cycle, then takes its next
//             column.  Units with index >= n_active stay idle (clock-gated).
// Evaluate and Update are pipelined: an update unit starts on column k as
// soon as Evaluate has produced L(k,i), and then trails Evaluate row by row,
// so the Update work of iteration i overlaps its Evaluate phase (the
// staggered E/U stages of the paper's execution pipeline).  The next
// iteration starts when all units of this one are finished.
// The Evaluate/Update split, sqrt + divide in Evaluate, multiply-subtract in
// Update, time multiplexing and the runtime unit count follow the paper; the
// column-to-unit assignment is this design's choice.  not_pd is set if a
// pivot is not positive.  The read port returns L(i,j) for i >= j, else 0.
module cholesky
  import slam_pkg::*;
#(
  parameter int N       = 150,
  parameter int NUM_UPD = 97
) (
  input  logic clk,
  input  logic rst_n,
  input  logic we,
  input  logic [$clog2(N)-1:0] wr_i,
  input  logic [$clog2(N)-1:0] wr_j,
  input  fx_t  wr_val,
  input  logic start,
  input  logic [$clog2(N+1)-1:0] dim,
  input  logic [$clog2(NUM_UPD+1)-1:0] n_active,
  output logic busy,
  output logic done,
  output logic not_pd,
  input  logic [$clog2(N)-1:0] rd_i,
  input  logic [$clog2(N)-1:0] rd_j,
  output fx_t  rd_l
);
  localparam int NT = N * (N + 1) / 2;
  fx_t a [NT];

  typedef enum logic [1:0] {C_IDLE, C_START, C_RUN} st_e;
  st_e st;
  int  col, ev_j, dimi, nact;
  fx_t lii;
  int  ucol [NUM_UPD];
  int  urow [NUM_UPD];
  logic [NUM_UPD-1:0] uact;

  assign dimi = int'(dim);
  assign nact = int'(n_active);
  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; col <= 0; ev_j <= 0; lii <= FX_ONE; done <= 1'b0; not_pd <= 1'b0;
      uact <= '0;
      for (int k = 0; k < NUM_UPD; k++) begin ucol[k] <= 0; urow[k] <= 0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          st <= C_START; col <= 0; not_pd <= 1'b0;
        end
        C_START: begin
          // begin iteration col: Evaluate at the diagonal, units on the
          // first n_active trailing columns
          ev_j <= col;
          for (int k = 0; k < NUM_UPD; k++) begin
            ucol[k] <= col + 1 + k;
            urow[k] <= col + 1 + k;
            uact[k] <= (k < nact) && (col + 1 + k < dimi);
          end
          st <= C_RUN;
        end
        C_RUN: begin
          // Evaluate unit
          if (ev_j < dimi) begin
            if (ev_j == col) begin
              if (a[tri_idx(col, col)] <= 0) not_pd <= 1'b1;
              lii <= fx_sqrt(a[tri_idx(col, col)]);
            end
            ev_j <= ev_j + 1;
          end
          // Update units, trailing the Evaluate unit
          for (int k = 0; k < NUM_UPD; k++) begin
            if (uact[k] && urow[k] < ev_j) begin
              if (urow[k] == dimi - 1) begin
                ucol[k] <= ucol[k] + nact;
                urow[k] <= ucol[k] + nact;
                if (ucol[k] + nact >= dimi) uact[k] <= 1'b0;
              end else urow[k] <= urow[k] + 1;
            end
          end
          if (ev_j >= dimi && uact == '0) begin
            if (col == dimi - 1) begin st <= C_IDLE; done <= 1'b1; end
            else begin col <= col + 1; st <= C_START; end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // matrix RAM (no reset: every word is written before it is used)
  always_ff @(posedge clk) begin
    if (we && st == C_IDLE) a[tri_idx(int'(wr_i), int'(wr_j))] <= wr_val;
    if (st == C_RUN) begin
      if (ev_j < dimi) begin
        if (ev_j == col) a[tri_idx(col, col)] <= fx_sqrt(a[tri_idx(col, col)]);
        else             a[tri_idx(ev_j, col)] <= fx_div(a[tri_idx(ev_j, col)], lii);
      end
      for (int k = 0; k < NUM_UPD; k++)
        if (uact[k] && urow[k] < ev_j)
          a[tri_idx(urow[k], ucol[k])] <= a[tri_idx(urow[k], ucol[k])]
              - fx_mul(a[tri_idx(urow[k], col)], a[tri_idx(ucol[k], col)]);
    end
  end

  assign rd_l = (rd_i >= rd_j) ? a[tri_idx(int'(rd_i), int'(rd_j))] : '0;
endmodule
