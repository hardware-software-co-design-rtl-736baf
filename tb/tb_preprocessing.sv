// tb_preprocessing: end-to-end test of the pre-processing stage.
//
// A random 6x3 complex sensing matrix A (full column rank) and a sparse 3x7
// complex spectrum X (one band empty) give the samples Y = A X, rounded to
// Q16.16. Since A_pinv A = I, the stage must return X itself, split into real
// and imaginary planes and divided by the largest part magnitude. That expected
// value is computed here directly from X, independently of the stage's matrix
// algebra, and every output word must match it to within 2^-7. The output is
// drained with random back-pressure; the word count and tlast are checked.
module tb_preprocessing;
  import dlwss_pkg::*;
  localparam int K = 6, N = 3, Q = 7;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  int inv_swaps;
  always #5 clk = ~clk;
  preprocessing #(.K(K), .N(N), .Q(Q)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0;
  real ar [K][N], ai [K][N], xr [N][Q], xi [N][Q];
  real mx;

  function automatic logic [31:0] fx(input real v);
    return 32'($rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  task automatic send(input real re, input real im);
    @(negedge clk);
    s_tdata = {fx(im), fx(re)}; s_tvalid = 1;
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    #1 s_tvalid = 0;
  endtask

  initial begin
    mx = 0;
    foreach (ar[k, n]) begin
      ar[k][n] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      ai[k][n] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
    end
    foreach (xr[n, q]) begin
      xr[n][q] = (n == 1) ? 0.0 : (real'($urandom_range(4000)) - 2000.0) / 1000.0;
      xi[n][q] = (n == 1) ? 0.0 : (real'($urandom_range(4000)) - 2000.0) / 1000.0;
      if (xr[n][q] > mx) mx = xr[n][q];
      if (-xr[n][q] > mx) mx = -xr[n][q];
      if (xi[n][q] > mx) mx = xi[n][q];
      if (-xi[n][q] > mx) mx = -xi[n][q];
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) send(ar[k][n], ai[k][n]);
    for (int q = 0; q < Q; q++)
      for (int k = 0; k < K; k++) begin
        real yr, yi;
        yr = 0; yi = 0;
        for (int n = 0; n < N; n++) begin
          yr += ar[k][n]*xr[n][q] - ai[k][n]*xi[n][q];
          yi += ar[k][n]*xi[n][q] + ai[k][n]*xr[n][q];
        end
        send(yr, yi);
      end
    for (int c = 0; c < 2; c++)
      for (int n = 0; n < N; n++)
        for (int q = 0; q < Q; q++) begin
          real e, g;
          forever begin
            @(negedge clk);
            m_tready = ($urandom_range(2) != 0);
            #1;
            if (m_tvalid && !m_tready) n_stall++;
            if (m_tvalid && m_tready) break;
          end
          e = (c == 0 ? xr[n][q] : xi[n][q]) / mx;
          g = real'($signed(m_tdata)) / 65536.0;
          checks++;
          if (g - e > 0.0078 || e - g > 0.0078 || m_tlast != (c == 1 && n == N-1 && q == Q-1)) begin
            failures++; $display("ch %0d band %0d sample %0d: got %f exp %f", c, n, q, g, e);
          end
          @(posedge clk);
        end
    #1 m_tready = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall"); end
    $display("row exchanges in the inversion: %0d", inv_swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
