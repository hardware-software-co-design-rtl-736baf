// fx_div: sequential unsigned divider, quo = min(floor(num / den), 2^QW - 1).
//
// Restoring long division, one quotient bit per cycle: done pulses NW+1
// cycles after the start cycle, when quo is valid, and quo holds the result
// until the next start. A zero divisor gives the saturated quotient. Fixed-point
// scaling is left to the caller, who pre-shifts the dividend (for instance
// num = 2^48 and den = x in Q16.16 gives 1/x with 32 fraction bits). The
// paper's matrix inversion and normalization need division; it does not say how
// it is done, and this simple serial divider is this design's choice.
module fx_div #(
  parameter int NW = 80,   // dividend / divisor width
  parameter int QW = 48    // quotient width (saturated)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [NW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] quo
);
  logic [NW-1:0] n_sh, q;
  logic [NW-1:0] rem;
  logic [NW-1:0] d;
  int            cnt;

  logic [NW:0] trial;
  assign trial = {rem, n_sh[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      n_sh <= '0; q <= '0; rem <= '0; d <= '0; cnt <= 0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; n_sh <= num; d <= den; rem <= '0; q <= '0; cnt <= 0;
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d}) begin
          rem <= NW'(trial - {1'b0, d});
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial[NW-1:0];
          q   <= {q[NW-2:0], 1'b0};
        end
        if (cnt == NW-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1;
      end
    end
  end

  // saturate the final quotient; a zero divisor yields all ones
  always_comb begin
    if (d == '0)               quo = '1;
    else if (q[NW-1:QW] != '0) quo = '1;
    else                       quo = q[QW-1:0];
  end
endmodule
