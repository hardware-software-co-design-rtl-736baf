// cmat_mult: complex matrix multiplication P = L x R for an M x KD by KD x NC
// product in the Q16.16 complex format.
//
// The unit walks the output in row-major order. For output (i, j) it asks the
// caller for row i of L and column j of R (l_row, r_col), which must be
// presented on lvec/rvec one cycle later (a synchronous buffer read). The KD
// complex products of the row-column dot product are formed in parallel and
// summed by an adder tree at full precision, then truncated to Q16.16 and
// saturated. Results appear on res_* two cycles after their address, one per
// cycle, so a product takes M*NC + 2 cycles after start; done pulses with the
// last result. The paper parallelizes each row-column dot product on the FPGA;
// computing one output element per cycle with KD parallel multipliers is this
// design's reading of that. The defaults are the first product of the
// pre-processing, A^H x A with K = 8 ADCs and N = 14 bands.
module cmat_mult
  import dlwss_pkg::*;
#(
  parameter int M  = 14,   // rows of L and of the result
  parameter int KD = 8,    // inner dimension
  parameter int NC = 14    // columns of R and of the result
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output int    l_row,
  output int    r_col,
  input  cplx_t lvec [KD],
  input  cplx_t rvec [KD],
  output logic  res_valid,
  output int    res_i,
  output int    res_j,
  output cplx_t res
);
  logic run, v1;
  int   i1, j1;

  assign busy = run || v1 || res_valid;

  // dot product of the operands that arrived this cycle
  cwide_t dot;
  always_comb begin
    cwide_t p;
    dot = '0;
    for (int k = 0; k < KD; k++) begin
      p = cmul_wide(lvec[k], rvec[k]);
      dot.re = dot.re + p.re;
      dot.im = dot.im + p.im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; v1 <= 1'b0; res_valid <= 1'b0; done <= 1'b0;
      l_row <= 0; r_col <= 0; i1 <= 0; j1 <= 0; res_i <= 0; res_j <= 0; res <= '0;
    end else begin
      done <= 1'b0;
      // stage 0: address
      if (start && !busy) begin
        run <= 1'b1; l_row <= 0; r_col <= 0;
      end else if (run) begin
        if (r_col == NC-1) begin
          r_col <= 0;
          if (l_row == M-1) run <= 1'b0;
          else              l_row <= l_row + 1;
        end else r_col <= r_col + 1;
      end
      // stage 1: operands arrive
      v1 <= run;
      i1 <= l_row; j1 <= r_col;
      // stage 2: result
      res_valid <= v1;
      if (v1) begin
        res   <= cwide_to_cplx(dot);
        res_i <= i1;
        res_j <= j1;
        if (i1 == M-1 && j1 == NC-1) done <= 1'b1;
      end
    end
  end
endmodule
