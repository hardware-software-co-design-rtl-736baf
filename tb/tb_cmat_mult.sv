// tb_cmat_mult: multiplies random 4x3 by 3x5 complex matrices held in the
// testbench (served with one cycle of read latency) and compares every result
// with an integer reference; checks the M*NC+2 cycle latency and the order.
module tb_cmat_mult;
  import dlwss_pkg::*;
  localparam int M = 4, KD = 3, NC = 5;
  logic clk = 0, rst_n = 0, start = 0, busy, done, res_valid;
  int l_row, r_col, res_i, res_j;
  cplx_t lvec [KD], rvec [KD], res;
  cplx_t L [M][KD];
  cplx_t R [KD][NC];
  always #5 clk = ~clk;
  cmat_mult #(.M(M), .KD(KD), .NC(NC)) dut (.*);
  always_ff @(posedge clk)
    for (int k = 0; k < KD; k++) begin
      lvec[k] <= L[l_row % M][k];
      rvec[k] <= R[k][r_col % NC];
    end
  int checks = 0, failures = 0, nres = 0, cyc = 0;
  function automatic longint part_ref(input int i, input int j, input bit im);
    longint s = 0;
    for (int k = 0; k < KD; k++)
      if (!im) s += longint'(L[i][k].re)*R[k][j].re - longint'(L[i][k].im)*R[k][j].im;
      else     s += longint'(L[i][k].re)*R[k][j].im + longint'(L[i][k].im)*R[k][j].re;
    s = s >>> 16;
    if (s > 64'sh7fffffff) s = 64'sh7fffffff;
    if (s < -64'sh80000000) s = -64'sh80000000;
    return s;
  endfunction
  initial begin
    foreach (L[a, b]) begin L[a][b].re = $signed($urandom_range(1 << 20)) - (1 << 19); L[a][b].im = $signed($urandom_range(1 << 20)) - (1 << 19); end
    foreach (R[a, b]) begin R[a][b].re = $signed($urandom_range(1 << 20)) - (1 << 19); R[a][b].im = $signed($urandom_range(1 << 20)) - (1 << 19); end
    L[0][0].re = 32'sh7fffffff; R[0][0].re = 32'sh7fffffff;   // saturating result
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    forever begin
      cyc++;
      if (res_valid) begin
        checks++;
        if (res_i != nres / NC || res_j != nres % NC ||
            longint'(res.re) != part_ref(res_i, res_j, 0) || longint'(res.im) != part_ref(res_i, res_j, 1)) begin
          failures++; $display("result %0d (%0d,%0d) wrong", nres, res_i, res_j);
        end
        nres++;
      end
      if (done) break;
      @(negedge clk);
    end
    checks++;
    if (nres != M*NC || cyc != M*NC + 2) begin failures++; $display("%0d results in %0d cycles", nres, cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
