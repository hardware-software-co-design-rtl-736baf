// tb_cmat_inv_lu: self-checking test of the LU matrix inverter.
//
// Inverts several random 5x5 complex matrices (one with a zero in the top-left
// corner, which cannot be factored without a row exchange) and checks that
// A * inv(A) is the identity to within 2^-8 per element, computing the product
// here in floating point. It checks that pivoting happened and that each
// inversion ends within the expected cycle budget.
module tb_cmat_inv_lu;
  import dlwss_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cplx_t a_in [N][N];
  cplx_t inv [N][N];
  int swaps;
  always #5 clk = ~clk;

  cmat_inv_lu #(.N(N)) dut (.*);

  int checks = 0, failures = 0, total_swaps = 0;

  function automatic real rv(input cpart_t p); return real'(p) / 65536.0; endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int cyc;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          a_in[r][c].re = cpart_t'($signed($urandom_range(131072)) - 65536);
          a_in[r][c].im = cpart_t'($signed($urandom_range(131072)) - 65536);
        end
      for (int r = 0; r < N; r++) a_in[r][r].re = a_in[r][r].re + cpart_t'(2*65536);
      if (t == 0) a_in[0][0] = '0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > N*N*N + 4*N*N + N*90 + 20) begin failures++; $display("slow: %0d cycles", cyc); end
      total_swaps += swaps;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          real sr, si, er, ei;
          sr = 0; si = 0;
          for (int q = 0; q < N; q++) begin
            sr += rv(a_in[r][q].re)*rv(inv[q][c].re) - rv(a_in[r][q].im)*rv(inv[q][c].im);
            si += rv(a_in[r][q].re)*rv(inv[q][c].im) + rv(a_in[r][q].im)*rv(inv[q][c].re);
          end
          er = sr - ((r == c) ? 1.0 : 0.0);
          ei = si;
          checks++;
          if (er > 0.004 || er < -0.004 || ei > 0.004 || ei < -0.004) begin
            failures++;
            $display("matrix %0d: (A*inv)[%0d][%0d] = %f + j%f", t, r, c, sr, si);
          end
        end
    end
    checks++;
    if (total_swaps == 0) begin failures++; $display("no pivoting"); end
    $display("row exchanges: %0d", total_swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
