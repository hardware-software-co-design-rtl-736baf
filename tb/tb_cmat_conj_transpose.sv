// tb_cmat_conj_transpose: checks T = M^H element by element on random 3x5
// matrices, including the saturating negation of the most negative part.
module tb_cmat_conj_transpose;
  import dlwss_pkg::*;
  localparam int R = 3, C = 5;
  cplx_t m [R][C];
  cplx_t t [C][R];
  cmat_conj_transpose #(.R(R), .C(C)) dut (.m, .t);
  int checks = 0, failures = 0;
  initial begin
    for (int n = 0; n < 20; n++) begin
      foreach (m[r, c]) begin m[r][c].re = $urandom; m[r][c].im = $urandom; end
      m[0][1].im = 32'sh80000000;
      #1;
      foreach (m[r, c]) begin
        longint ni;
        ni = -longint'(m[r][c].im);
        if (ni > 64'sh7fffffff) ni = 64'sh7fffffff;
        checks++;
        if (t[c][r].re != m[r][c].re || longint'(t[c][r].im) != ni) begin
          failures++; $display("element %0d,%0d wrong", r, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
