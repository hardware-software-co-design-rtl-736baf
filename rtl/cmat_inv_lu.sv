// cmat_inv_lu: inverse of an N x N complex matrix by LU decomposition with
// partial pivoting, in the Q16.16 complex format.
//
// The pre-processing inverts A_sq = A^H A with the factorization
// P A_sq = L D U (L unit lower, D diagonal, U unit upper), so that
// A_sq^-1 = U^-1 D^-1 L^-1 P. The unit works in place on a register copy of the
// matrix with one complex multiplier, one complex subtracter and one serial
// divider, one operation per cycle:
//   for each column k: pick the row at or below k whose element in column k has
//     the largest |re|+|im| and swap it into row k (pivoting); form the pivot
//     reciprocal 1/d_k = conj(d_k)/|d_k|^2 with the divider; scale column k
//     below the pivot by 1/d_k (the L multipliers); subtract the rank-one update
//     from the trailing sub-matrix.
//   for each column j of the result: forward substitution L y = P e_j, then
//     back substitution with U and D^-1.
// Inversion takes about N^3 cycles plus N divisions of 81 cycles (a few
// thousand cycles for N = 14). start loads a_in; done pulses when inv holds the
// inverse, which stays until the next start. swaps counts the row exchanges of
// the last inversion. The paper chooses LU decomposition and this formula; the
// sequencing, the pivot rule (|re|+|im| instead of the modulus) and the number
// format are this design's. A singular or nearly singular matrix saturates.
module cmat_inv_lu
  import dlwss_pkg::*;
#(
  parameter int N = 14
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t a_in [N][N],
  output logic  busy,
  output logic  done,
  output cplx_t inv [N][N],
  output int    swaps
);
  typedef enum logic [3:0] {S_IDLE, S_PIV, S_SWAP, S_DIV, S_DIVW, S_LCOL, S_UPD,
                            S_FWD, S_BWD} state_t;
  state_t state;

  cplx_t mat  [N][N];      // in place: L below the diagonal, D*U on and above
  cplx_t dinv [N];         // 1/d_k
  int    perm [N];         // row i of P*A_sq is row perm[i] of A_sq
  int    k, i, j, m, piv;
  logic  first;
  cplx_t acc;
  logic [CX_W:0] best;

  // pivot magnitude |re| + |im|
  function automatic logic [CX_W:0] l1(input cplx_t a);
    logic [CX_W-1:0] ar, ai;
    ar = a.re[CX_W-1] ? CX_W'(-a.re) : CX_W'(a.re);
    ai = a.im[CX_W-1] ? CX_W'(-a.im) : CX_W'(a.im);
    return {1'b0, ar} + {1'b0, ai};
  endfunction

  // divider for 1/|d|^2: |d|^2 has 32 fraction bits, 2^64/|d|^2 has 32 too
  logic          div_start, div_busy, div_done;
  logic [79:0]   div_den;
  logic [47:0]   div_quo;
  cwide_t        mag2;
  assign mag2    = cmul_wide(mat[k][k], cconj(mat[k][k]));
  assign div_den = 80'(mag2.re);
  fx_div #(.NW(80), .QW(48)) u_div (
    .clk, .rst_n, .start(div_start), .num(80'(1) << 64), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));

  // reciprocal of the pivot: conj(d) * (1/|d|^2), the latter with 32 fraction bits
  cplx_t  recip;
  always_comb begin
    logic signed [2*CX_W+7:0] r;
    r = (2*CX_W+8)'(signed'({1'b0, div_quo}));
    recip.re = sat_part(((2*CX_W+8)'(mat[k][k].re) * r) >>> 32);
    recip.im = sat_part(-(((2*CX_W+8)'(mat[k][k].im) * r) >>> 32));
  end

  // element of P e_j for the forward substitution
  cplx_t e_val;
  always_comb begin
    e_val = '0;
    if (perm[i] == j) e_val.re = cpart_t'(1 << CX_F);
  end

  assign busy = (state != S_IDLE);
  assign div_start = (state == S_DIV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; swaps <= 0;
      k <= 0; i <= 0; j <= 0; m <= 0; piv <= 0; first <= 1'b0; acc <= '0; best <= '0;
      for (int r = 0; r < N; r++) begin
        perm[r] <= r; dinv[r] <= '0;
        for (int c = 0; c < N; c++) begin
          mat[r][c] <= '0; inv[r][c] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mat <= a_in;
          for (int r = 0; r < N; r++) perm[r] <= r;
          swaps <= 0;
          k <= 0; i <= 0; piv <= 0; best <= '0;
          state <= S_PIV;
        end
        // scan column k from row k down for the largest element
        S_PIV: begin
          if (i == k || l1(mat[i][k]) > best) begin
            best <= l1(mat[i][k]);
            piv  <= i;
          end
          if (i == N-1) state <= S_SWAP;
          else          i <= i + 1;
        end
        S_SWAP: begin
          if (piv != k) begin
            for (int c = 0; c < N; c++) begin
              mat[k][c]   <= mat[piv][c];
              mat[piv][c] <= mat[k][c];
            end
            perm[k]   <= perm[piv];
            perm[piv] <= perm[k];
            swaps     <= swaps + 1;
          end
          state <= S_DIV;
        end
        S_DIV:  state <= S_DIVW;
        S_DIVW: if (div_done) begin
          dinv[k] <= recip;
          i <= k + 1;
          if (k == N-1) begin
            i <= 0; j <= 0; m <= 0; first <= 1'b1;
            state <= S_FWD;
          end else state <= S_LCOL;
        end
        // L multipliers: column k below the pivot times 1/d_k
        S_LCOL: begin
          mat[i][k] <= cmul(mat[i][k], dinv[k]);
          if (i == N-1) begin
            i <= k + 1; j <= k + 1;
            state <= S_UPD;
          end else i <= i + 1;
        end
        // trailing update: a_ij -= l_ik * u_kj
        S_UPD: begin
          mat[i][j] <= csub(mat[i][j], cmul(mat[i][k], mat[k][j]));
          if (j == N-1) begin
            j <= k + 1;
            if (i == N-1) begin
              k <= k + 1; i <= k + 1; best <= '0;
              state <= S_PIV;
            end else i <= i + 1;
          end else j <= j + 1;
        end
        // forward substitution for column j: y_i = (P e_j)_i - sum_{m<i} l_im y_m
        S_FWD: begin
          if (m < i) begin
            acc   <= csub(first ? e_val : acc, cmul(mat[i][m], inv[m][j]));
            first <= 1'b0;
            m     <= m + 1;
          end else begin
            inv[i][j] <= first ? e_val : acc;
            first <= 1'b1;
            m     <= 0;
            if (i == N-1) begin
              m <= N-1;
              state <= S_BWD;
            end else i <= i + 1;
          end
        end
        // back substitution: x_i = (y_i - sum_{m>i} (d_i u_im) x_m) / d_i
        S_BWD: begin
          if (m > i) begin
            acc   <= csub(first ? inv[i][j] : acc, cmul(mat[i][m], inv[m][j]));
            first <= 1'b0;
            m     <= m - 1;
          end else begin
            inv[i][j] <= cmul(first ? inv[i][j] : acc, dinv[i]);
            first <= 1'b1;
            m     <= N-1;
            if (i == 0) begin
              if (j == N-1) begin
                done  <= 1'b1;
                state <= S_IDLE;
              end else begin
                j <= j + 1; i <= 0; m <= 0;
                state <= S_FWD;
              end
            end else i <= i - 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
