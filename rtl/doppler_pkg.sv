// doppler_pkg: number formats and complex arithmetic shared by the Doppler
// accelerator.
//
// Every value after the input stage is a complex number with two signed
// 32-bit parts in Q16.16 (16 integer bits, 16 fraction bits). The slow-time
// input samples arrive as Q1.15 I/Q pairs packed in one 32-bit word
// (real part in bits 15:0, imaginary part in bits 31:16). Angles are carried
// in "turns": a signed 16-bit value where 2^16 is one full turn (2*pi).
//
// The complex multiplier (CM) is built, as in the paper's figure, from four
// real multipliers, one subtractor (real part) and one adder (imaginary
// part). The complex adder (CA) adds real and imaginary parts separately.
// The paper gives no word lengths; Q16.16 is this design's own choice.
package doppler_pkg;

  localparam int FRAC = 16;             // fraction bits of fx_t
  localparam int K    = 2;              // number of resolved targets (paper: K = 2)

  typedef logic signed [31:0] fx_t;     // Q16.16
  typedef logic signed [63:0] fxw_t;    // Q32.32, full-precision product
  typedef logic signed [15:0] turn_t;   // angle, 2^16 = one turn

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  typedef struct packed {
    fxw_t re;
    fxw_t im;
  } cplxw_t;

  // Algorithm loaded in the reconfigurable region.
  typedef enum logic [0:0] {
    ARCH_FFT    = 1'b0,
    ARCH_ESPRIT = 1'b1
  } arch_e;

  localparam cplx_t CZERO = '{re: '0, im: '0};

  // Q1.15 I/Q word to Q16.16 complex.
  function automatic cplx_t from_iq16(input logic [31:0] w);
    cplx_t c;
    c.re = fx_t'(signed'(w[15:0])) <<< 1;
    c.im = fx_t'(signed'(w[31:16])) <<< 1;
    return c;
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    return '{re: a.re, im: -a.im};
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    return '{re: a.re + b.re, im: a.im + b.im};
  endfunction

  function automatic cplx_t csub(input cplx_t a, input cplx_t b);
    return '{re: a.re - b.re, im: a.im - b.im};
  endfunction

  function automatic cplx_t chalf(input cplx_t a);
    return '{re: a.re >>> 1, im: a.im >>> 1};
  endfunction

  // Full-precision complex product, Q32.32.
  function automatic cplxw_t cmul_w(input cplx_t a, input cplx_t b);
    cplxw_t p;
    p.re = fxw_t'(a.re) * fxw_t'(b.re) - fxw_t'(a.im) * fxw_t'(b.im);
    p.im = fxw_t'(a.re) * fxw_t'(b.im) + fxw_t'(a.im) * fxw_t'(b.re);
    return p;
  endfunction

  function automatic cplxw_t caddw(input cplxw_t a, input cplxw_t b);
    return '{re: a.re + b.re, im: a.im + b.im};
  endfunction

  // Wide Q32.32 back to Q16.16 (truncating).
  function automatic cplx_t cnarrow(input cplxw_t a);
    cplx_t c;
    c.re = fx_t'(a.re >>> FRAC);
    c.im = fx_t'(a.im >>> FRAC);
    return c;
  endfunction

  // Complex multiplier, Q16.16 result.
  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    return cnarrow(cmul_w(a, b));
  endfunction

  // Velocity from an angle per PRI: v = turns * vscale, where the
  // configured vscale = lambda / (2 * T_PRI) in Q16.16 m/s.
  function automatic fx_t turns_to_vel(input turn_t t, input fx_t vscale);
    fxw_t p;
    p = fxw_t'(t) * fxw_t'(vscale);
    return fx_t'(p >>> 16);
  endfunction

endpackage
