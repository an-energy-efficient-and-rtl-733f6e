// marginalization -- prior generation H_p = A - Z M^-1 Z^T, r_p = b_A - Z M^-1 b_M.
//
// M collects the parameters that leave the sliding window: NM1 features
// (their block M11 is diagonal, one inverse depth each) and the NM2 states of
// the oldest keyframe (M22).  A is the Hessian of the NA remaining states, Z
// couples them to M.  M is inverted block-wise:
//   S' = M22 - M21 M11^-1 M12         (computed by the shared Schur block)
//   S' = L L^T                         (computed by the shared Cholesky block)
//   M^-1 = [ D + P S'^-1 P^T   -P S'^-1 ]     D = M11^-1,  P = D M12
//          [ -S'^-1 P^T          S'^-1  ]
// This block holds the remaining pieces of the marginalization circuit: the
// matrix-inverse unit (L^-1 by substitution, then S'^-1 = L^-T L^-1), the
// matrix multiplier (M^-1, then T = Z M^-1, then T Z^T and T b_M) and the
// matrix adder (A - T Z^T, b_A - T b_M), with RAMs for the operands and
// results.  One multiply-accumulate per cycle; each result element is
// written when its sum is complete.  L is read through the l_i/l_j/l_val
// port from the Cholesky block.  Operands are loaded with ld_* (clr first:
// unused feature slots then have M11 = 1 and zero couplings, so they drop
// out).  H_p and r_p are read through rd_i/rd_j.
// The partition of M, the diagonal M11 and the reuse of Schur elimination
// and Cholesky follow the paper; the step order is this design's choice.
// Only the first row of the L^-1 step has no element below the diagonal;
// that step therefore starts at row 1.
// Timing: about NM2^3/3 + NM1*NM2^2*2 + NA*NM^2 + NA^2*NM/2 + NA*NM cycles.
module marginalization
  import slam_pkg::*;
#(
  parameter int NM1 = 32,
  parameter int NM2 = STATE_DIM,
  parameter int NA  = 135
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic ld_we,
  input  marg_tgt_e ld_tgt,
  input  logic [15:0] ld_i,
  input  logic [15:0] ld_j,
  input  fx_t  ld_val,
  input  logic start,
  output logic busy,
  output logic done,
  output logic [$clog2(NM2)-1:0] l_i,
  output logic [$clog2(NM2)-1:0] l_j,
  input  fx_t  l_val,
  input  logic [$clog2(NA)-1:0] rd_i,
  input  logic [$clog2(NA)-1:0] rd_j,
  output fx_t  rd_h,
  output fx_t  rd_r
);
  localparam int NM = NM1 + NM2;
  localparam int NTA = NA * (NA + 1) / 2;

  fx_t m11 [NM1];
  fx_t m12 [NM1][NM2];
  fx_t z   [NA][NM];
  fx_t am  [NTA];
  fx_t bm  [NM];
  fx_t ba  [NA];
  fx_t li  [NM2][NM2];
  fx_t sinv[NM2][NM2];
  fx_t p   [NM1][NM2];
  fx_t minv[NM][NM];
  fx_t t   [NA][NM];
  fx_t hp  [NTA];
  fx_t rp  [NA];

  // Z and A are cleared through per-word valid bits (an unwritten word reads
  // as zero), so clr takes one cycle without resetting the RAM words.
  logic [NA*NM-1:0] z_v;
  logic [NTA-1:0]   am_v;
  function automatic fx_t zget(input int r, input int c);
    return z_v[r*NM + c] ? z[r][c] : '0;
  endfunction
  function automatic fx_t aget(input int n);
    return am_v[n] ? am[n] : '0;
  endfunction

  typedef enum logic [3:0] {
    M_IDLE, M_DINV, M_LINV, M_SINV, M_P, M_M12, M_M11, M_M22, M_T, M_H, M_R
  } step_e;
  step_e st;
  int  i, j, k;
  fx_t acc;

  assign busy = (st != M_IDLE);

  // loop bounds of each step: i < imax, j < jmax(i), k in [kbeg, kend)
  function automatic int imax_f(input step_e s);
    unique case (s)
      M_DINV, M_LINV, M_SINV, M_M22: return NM2;
      M_P, M_M12, M_M11:             return NM1;
      default:                       return NA;
    endcase
  endfunction
  function automatic int jmax_f(input step_e s, input int ii);
    unique case (s)
      M_DINV, M_R:                return 1;
      M_LINV:                     return ii;
      M_SINV, M_M11, M_M22, M_H:  return ii + 1;
      M_P, M_M12:                 return NM2;
      default:                    return NM;
    endcase
  endfunction
  function automatic int kbeg_f(input step_e s, input int ii, input int jj);
    unique case (s)
      M_LINV: return jj;
      M_SINV: return ii;
      default: return 0;
    endcase
  endfunction
  function automatic int kend_f(input step_e s, input int ii);
    unique case (s)
      M_LINV:               return ii;
      M_SINV, M_M12, M_M11: return NM2;
      M_T, M_H, M_R:        return NM;
      default:              return 0;
    endcase
  endfunction
  function automatic step_e next_f(input step_e s);
    unique case (s)
      M_DINV: return M_LINV;
      M_LINV: return M_SINV;
      M_SINV: return M_P;
      M_P:    return M_M12;
      M_M12:  return M_M11;
      M_M11:  return M_M22;
      M_M22:  return M_T;
      M_T:    return M_H;
      M_H:    return M_R;
      default: return M_IDLE;
    endcase
  endfunction

  // L port address
  always_comb begin
    if (st == M_LINV && k < i) begin l_i = ($clog2(NM2))'(i); l_j = ($clog2(NM2))'(k); end
    else                       begin l_i = ($clog2(NM2))'(i); l_j = ($clog2(NM2))'(i); end
  end

  // product term of the current step
  fx_t term;
  always_comb begin
    unique case (st)
      M_LINV:  term = fx_mul(l_val, li[k][j]);
      M_SINV:  term = fx_mul(li[k][i], li[k][j]);
      M_M12:   term = fx_mul(p[i][k], sinv[k][j]);
      M_M11:   term = fx_mul(minv[i][NM1+k], p[j][k]);
      M_T:     term = fx_mul(zget(i, k), minv[k][j]);
      M_H:     term = fx_mul(t[i][k], zget(j, k));
      M_R:     term = fx_mul(t[i][k], bm[k]);
      default: term = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; i <= 0; j <= 0; k <= 0; acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == M_IDLE) begin
        if (start) begin st <= M_DINV; i <= 0; j <= 0; k <= 0; acc <= '0; end
      end else if (k < kend_f(st, i)) begin
        acc <= acc + term;
        k <= k + 1;
      end else begin
        // sum complete: write the element of this step
        unique case (st)
          M_DINV: li[i][i] <= fx_div(FX_ONE, l_val);
          M_LINV: li[i][j] <= -fx_mul(li[i][i], acc);
          M_SINV: begin sinv[i][j] <= acc; sinv[j][i] <= acc; end
          M_P:    p[i][j] <= fx_div(m12[i][j], m11[i]);
          M_M12:  begin minv[i][NM1+j] <= -acc; minv[NM1+j][i] <= -acc; end
          M_M11:  begin
            minv[i][j] <= ((i == j) ? fx_div(FX_ONE, m11[i]) : '0) - acc;
            minv[j][i] <= ((i == j) ? fx_div(FX_ONE, m11[i]) : '0) - acc;
          end
          M_M22:  begin minv[NM1+i][NM1+j] <= sinv[i][j]; minv[NM1+j][NM1+i] <= sinv[i][j]; end
          M_T:    t[i][j] <= acc;
          M_H:    hp[tri_idx(i, j)] <= aget(tri_idx(i, j)) - acc;
          M_R:    rp[i] <= ba[i] - acc;
          default: ;
        endcase
        acc <= '0;
        // advance (i, j), skipping empty rows
        if (j + 1 < jmax_f(st, i)) begin
          j <= j + 1; k <= kbeg_f(st, i, j + 1);
        end else begin
          int ni;
          ni = i + 1;
          if (ni < imax_f(st)) begin
            i <= ni; j <= 0; k <= kbeg_f(st, ni, 0);
          end else begin
            step_e ns;
            ns = next_f(st);
            st <= ns; i <= 0; j <= 0; k <= 0;
            if (ns == M_LINV) begin i <= 1; k <= kbeg_f(M_LINV, 1, 0); end
            if (ns == M_IDLE) done <= 1'b1;
          end
        end
      end
    end
  end

  // operand RAMs
  always_ff @(posedge clk) begin
    if (clr) begin
      for (int f = 0; f < NM1; f++) begin
        m11[f] <= FX_ONE;
        for (int c = 0; c < NM2; c++) m12[f][c] <= '0;
      end
      z_v <= '0;
      for (int n = 0; n < NM; n++) bm[n] <= '0;
      for (int n = 0; n < NA; n++) ba[n] <= '0;
      am_v <= '0;
    end else if (ld_we) begin
      unique case (ld_tgt)
        MT_M11: m11[ld_i[$clog2(NM1)-1:0]] <= ld_val;
        MT_M12: m12[ld_i[$clog2(NM1)-1:0]][ld_j[$clog2(NM2)-1:0]] <= ld_val;
        MT_Z: begin
          z[ld_i[$clog2(NA)-1:0]][ld_j[$clog2(NM)-1:0]] <= ld_val;
          z_v[int'(ld_i[$clog2(NA)-1:0])*NM + int'(ld_j[$clog2(NM)-1:0])] <= 1'b1;
        end
        MT_A: begin
          am[tri_idx(int'(ld_i), int'(ld_j))] <= ld_val;
          am_v[tri_idx(int'(ld_i), int'(ld_j))] <= 1'b1;
        end
        MT_BM:  bm[ld_i[$clog2(NM)-1:0]] <= ld_val;
        MT_BA:  ba[ld_i[$clog2(NA)-1:0]] <= ld_val;
        default: ;
      endcase
    end
  end

  assign rd_h = hp[tri_idx(int'(rd_i), int'(rd_j))];
  assign rd_r = rp[rd_i];
endmodule
