// cmat_conj_transpose: complex conjugate transpose, T = M^H, of an R x C matrix
// in the Q16.16 complex format.
//
// As the paper describes for its Conjugate block, every element is processed in
// parallel: output element [c][r] is the input element [r][c] with its
// imaginary part negated (saturating, so -(-2^15) becomes 2^15 - 2^-16).
// Purely combinational; the matrices are held in registers by the caller.
module cmat_conj_transpose
  import dlwss_pkg::*;
#(
  parameter int R = 8,    // rows of M (K, number of ADCs)
  parameter int C = 14    // columns of M (N, number of bands)
) (
  input  cplx_t m [R][C],
  output cplx_t t [C][R]
);
  always_comb
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        t[c][r] = cconj(m[r][c]);
endmodule
