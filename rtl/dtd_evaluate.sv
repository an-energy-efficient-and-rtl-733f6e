// dtd_evaluate -- D^T D evaluate unit.
//
// Given a block of Jacobian rows D (ROWS x COLS) and the matching residuals
// e (ROWS), it produces the Hessian contribution D^T D and the gradient
// contribution D^T e that the block adds to the normal equations.  D and e
// are captured on start; the unit then emits one result per cycle: first the
// lower triangle of D^T D row by row (out_grad = 0, element (out_a, out_b)
// with out_b <= out_a), then the COLS entries of D^T e (out_grad = 1, index
// out_a).  Each result is a ROWS-term dot product formed in one cycle.  The
// unit serves both the visual path (D = [J_lambda | J_p], 2 x 4) and the IMU
// Hessian calculation.  Only the block's name and position between the
// Jacobian RAMs and the Schur/Hessian blocks are given; its streaming
// organisation is this design's choice.
// Timing: COLS*(COLS+1)/2 + COLS results, the first one cycle after start;
// done pulses with the last result.
module dtd_evaluate
  import slam_pkg::*;
#(
  parameter int ROWS = 2,
  parameter int COLS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  d [ROWS][COLS],
  input  fx_t  e [ROWS],
  output logic busy,
  output logic out_valid,
  output logic out_grad,
  output logic [$clog2(COLS+1)-1:0] out_a,
  output logic [$clog2(COLS+1)-1:0] out_b,
  output fx_t  out_val,
  output logic done
);
  localparam int CW = $clog2(COLS+1);
  fx_t dq [ROWS][COLS];
  fx_t eq [ROWS];
  logic [CW-1:0] a, b;
  logic grad;
  fx_t acc;

  always_comb begin
    acc = '0;
    for (int r = 0; r < ROWS; r++)
      acc += grad ? fx_mul(dq[r][a], eq[r]) : fx_mul(dq[r][a], dq[r][b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; a <= '0; b <= '0; grad <= 1'b0;
      out_valid <= 1'b0; out_grad <= 1'b0; out_a <= '0; out_b <= '0; out_val <= '0; done <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        eq[r] <= '0;
        for (int c = 0; c < COLS; c++) dq[r][c] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; a <= '0; b <= '0; grad <= 1'b0;
        dq <= d; eq <= e;
      end else if (busy) begin
        out_valid <= 1'b1;
        out_grad  <= grad;
        out_a     <= a;
        out_b     <= b;
        out_val   <= acc;
        if (!grad) begin
          if (b == a) begin
            b <= '0;
            if (a == CW'(COLS-1)) begin a <= '0; grad <= 1'b1; end
            else a <= a + 1'b1;
          end else b <= b + 1'b1;
        end else begin
          if (a == CW'(COLS-1)) begin busy <= 1'b0; done <= 1'b1; end
          else a <= a + 1'b1;
        end
      end
    end
  end
endmodule
