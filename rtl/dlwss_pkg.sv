// dlwss_pkg: number formats and arithmetic helpers shared by the DLWSS
// (deep-learning wideband spectrum sensing) accelerator blocks.
//
// CNN datapath (conv and FC layers): fixed point <W,I> = W bits of which I are
// integer bits including sign. Activations use <25,9> and weights <16,2>, the
// word lengths the paper recommends (activation <25,9> keeps floating-point
// accuracy; weights fixed to <16,2>). A product of an activation and a weight
// therefore has ACT_F+WGT_F = 30 fraction bits; accumulators keep all of them.
//
// Pre-processing datapath: complex numbers with Q16.16 real and imaginary parts
// (32 bits each). This format is a choice of this design; the paper does not give
// the word length of its pre-processing block.
package dlwss_pkg;

  // ---- CNN formats ----
  localparam int ACT_W = 25;              // activation word length W_a
  localparam int ACT_I = 9;               // activation integer bits I_a
  localparam int ACT_F = ACT_W - ACT_I;   // 16 fraction bits
  localparam int WGT_W = 16;              // weight word length W_w
  localparam int WGT_I = 2;               // weight integer bits I_w
  localparam int WGT_F = WGT_W - WGT_I;   // 14 fraction bits
  localparam int ACC_W = 56;              // accumulator, ACT_F+WGT_F fraction bits
  localparam int AXIS_W = 32;             // stream word of the CNN/FC IPs

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Arithmetic right shift of an accumulator by WGT_F, then saturation into
  // the activation format.
  function automatic act_t acc_to_act(input acc_t a);
    acc_t s;
    s = a >>> WGT_F;
    if (s > acc_t'(2**(ACT_W-1) - 1))       return act_t'(2**(ACT_W-1) - 1);
    else if (s < -acc_t'(2**(ACT_W-1)))     return act_t'(-(2**(ACT_W-1)));
    else                                    return act_t'(s);
  endfunction

  // Bias in activation format aligned to the accumulator's fraction bits.
  function automatic acc_t act_to_acc(input act_t b);
    return acc_t'(b) <<< WGT_F;
  endfunction

  // ---- Pre-processing complex format ----
  localparam int CX_W = 32;               // width of one part
  localparam int CX_F = 16;               // fraction bits of one part

  typedef logic signed [CX_W-1:0] cpart_t;
  typedef struct packed {
    cpart_t im;
    cpart_t re;
  } cplx_t;

  // Saturate a wide signed value into one complex part.
  function automatic cpart_t sat_part(input logic signed [2*CX_W+7:0] v);
    if (v > (2*CX_W+8)'(2**(CX_W-1) - 1))        return cpart_t'(2**(CX_W-1) - 1);
    else if (v < -(2*CX_W+8)'(2**(CX_W-1)))      return cpart_t'(-(2**(CX_W-1)));
    else                                         return cpart_t'(v);
  endfunction

  // Complex product at full precision: 2*CX_F fraction bits per part.
  typedef struct packed {
    logic signed [2*CX_W+7:0] im;
    logic signed [2*CX_W+7:0] re;
  } cwide_t;

  function automatic cwide_t cmul_wide(input cplx_t a, input cplx_t b);
    cwide_t r;
    r.re = (2*CX_W+8)'(a.re) * (2*CX_W+8)'(b.re) - (2*CX_W+8)'(a.im) * (2*CX_W+8)'(b.im);
    r.im = (2*CX_W+8)'(a.re) * (2*CX_W+8)'(b.im) + (2*CX_W+8)'(a.im) * (2*CX_W+8)'(b.re);
    return r;
  endfunction

  // Wide (2*CX_F fraction bits) back to Q16.16 with truncation and saturation.
  function automatic cplx_t cwide_to_cplx(input cwide_t w);
    cplx_t r;
    r.re = sat_part(w.re >>> CX_F);
    r.im = sat_part(w.im >>> CX_F);
    return r;
  endfunction

  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    return cwide_to_cplx(cmul_wide(a, b));
  endfunction

  function automatic cplx_t csub(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat_part((2*CX_W+8)'(a.re) - (2*CX_W+8)'(b.re));
    r.im = sat_part((2*CX_W+8)'(a.im) - (2*CX_W+8)'(b.im));
    return r;
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = sat_part(-(2*CX_W+8)'(a.im));
    return r;
  endfunction

endpackage
