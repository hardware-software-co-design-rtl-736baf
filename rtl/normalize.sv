// normalize: scales the pseudo-recovered spectrum into [-1, 1] for the CNN.
//
// The paper ends the pre-processing with a normalization block whose rule it
// does not give; this design divides every real and imaginary part by the
// largest magnitude among them (max-abs scaling), which needs one division per
// frame instead of one per sample. While the spectrum is produced, each complex
// result is presented on upd/upd_x and the running maximum of |re| and |im| is
// kept (clr restarts it). A calc pulse then computes recip = 2^48 / max with the
// serial divider (1/max with 32 fraction bits, 81 cycles); ready pulses when it
// is done. After that, y = x * recip, truncated to 16 fraction bits, converts
// any Q16.16 part x to the <25,9> activation format combinationally. An
// all-zero frame gives all-zero outputs.
module normalize
  import dlwss_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  logic   upd,
  input  cplx_t  upd_x,
  input  logic   calc,
  output logic   ready,
  output logic [CX_W-1:0] max_abs,
  input  cpart_t x_in,
  output act_t   y_out
);
  function automatic logic [CX_W-1:0] mag(input cpart_t p);
    return p[CX_W-1] ? CX_W'(-p) : CX_W'(p);
  endfunction

  logic [CX_W-1:0] upd_mag;
  always_comb begin
    logic [CX_W-1:0] a, b;
    a = mag(upd_x.re);
    b = mag(upd_x.im);
    upd_mag = (a > b) ? a : b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         max_abs <= '0;
    else if (clr)                       max_abs <= '0;
    else if (upd && upd_mag > max_abs)  max_abs <= upd_mag;
  end

  logic        div_busy;
  logic [47:0] recip;
  fx_div #(.NW(80), .QW(48)) u_div (
    .clk, .rst_n, .start(calc), .num(80'(1) << 48), .den(80'(max_abs)),
    .busy(div_busy), .done(ready), .quo(recip));

  always_comb begin
    logic signed [CX_W+49:0] p;
    p = ((CX_W+50)'(x_in) * (CX_W+50)'(signed'({1'b0, recip}))) >>> 32;
    if (p > (CX_W+50)'(2**(ACT_W-1) - 1))       y_out = act_t'(2**(ACT_W-1) - 1);
    else if (p < -(CX_W+50)'(2**(ACT_W-1)))     y_out = act_t'(-(2**(ACT_W-1)));
    else                                        y_out = act_t'(p);
  end
endmodule
