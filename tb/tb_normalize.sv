// tb_normalize: feeds a frame of random complex values, requests the
// reciprocal, then checks y = x / max|part| (to within one output LSB) for
// every part of the frame, the 81-cycle reciprocal latency and the clear.
module tb_normalize;
  import dlwss_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, upd = 0, calc = 0, ready;
  cplx_t upd_x;
  logic [31:0] max_abs;
  cpart_t x_in;
  act_t y_out;
  always #5 clk = ~clk;
  normalize dut (.*);
  int checks = 0, failures = 0;
  cplx_t frame [40];
  initial begin
    int mx, cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      mx = 0;
      foreach (frame[i]) begin
        frame[i].re = $signed($urandom_range(1 << (20 + f))) - (1 << (19 + f));
        frame[i].im = $signed($urandom_range(1 << (20 + f))) - (1 << (19 + f));
        if ((frame[i].re < 0 ? -frame[i].re : frame[i].re) > mx) mx = frame[i].re < 0 ? -frame[i].re : frame[i].re;
        if ((frame[i].im < 0 ? -frame[i].im : frame[i].im) > mx) mx = frame[i].im < 0 ? -frame[i].im : frame[i].im;
        upd = 1; upd_x = frame[i];
        @(negedge clk);
      end
      upd = 0;
      checks++;
      if (max_abs != mx) begin failures++; $display("max %0d exp %0d", max_abs, mx); end
      calc = 1; @(negedge clk); calc = 0; cyc = 1;
      while (!ready) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 81) begin failures++; $display("reciprocal took %0d cycles", cyc); end
      @(negedge clk);
      foreach (frame[i]) for (int p = 0; p < 2; p++) begin
        real e;
        x_in = p ? frame[i].im : frame[i].re;
        #1;
        e = real'(x_in) / real'(mx) * 65536.0;
        checks++;
        if (real'(y_out) - e > 1.0 || real'(y_out) - e < -1.0) begin
          failures++; $display("x=%0d y=%0d exp %f", x_in, y_out, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
