// rbd_pkg: number format and complex arithmetic shared by the residual-based
// detector (MINRES / CR) datapath.
//
// Every value in the detector is a complex number whose real and imaginary
// parts are two's-complement fixed-point numbers of DW bits with FRAC
// fractional bits (Q15.16 by default). The source algorithm description gives
// no word length; this format is a choice of this design, sized so that a
// channel matrix scaled to unit-power columns (A close to the identity) stays
// well inside range.
//
// Rounding rules, used identically everywhere:
//   * products keep the full 2*DW+1 bit result and are shifted right by FRAC
//     (arithmetic shift, i.e. rounding toward minus infinity), then cut to DW;
//   * sums wrap at DW bits (no saturation);
//   * the complex division c = n / d is computed as n*conj(d) / |d|^2 with the
//     full-precision products, the quotient truncated toward zero. A zero
//     divisor gives c = 0 (a converged residual makes some divisors vanish).
package rbd_pkg;

  parameter int unsigned DW   = 32;  // bits per real or imaginary part
  parameter int unsigned FRAC = 16;  // fractional bits

  typedef logic signed [DW-1:0] fix_t;

  typedef struct packed {
    fix_t re;
    fix_t im;
  } cplx_t;

  // Detection algorithm selected on the unified unit.
  typedef enum logic {
    ALG_MINRES = 1'b0,
    ALG_CR     = 1'b1
  } alg_e;

  // Operation of an iterative module (Fig. "iterative module": y = x + a*b).
  typedef enum logic [1:0] {
    IT_HOLD = 2'd0,  // keep y
    IT_INIT = 2'd1,  // y <= x
    IT_MAC  = 2'd2,  // y <= x + a*b
    IT_MSC  = 2'd3   // y <= x - a*b
  } it_op_e;

  localparam cplx_t CZERO = '{re: '0, im: '0};

  function automatic cplx_t cadd(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re + b.re;
    r.im = a.im + b.im;
    return r;
  endfunction

  function automatic cplx_t csub(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re - b.re;
    r.im = a.im - b.im;
    return r;
  endfunction

  function automatic cplx_t cconj(cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = -a.im;
    return r;
  endfunction

  // Full-precision complex product, scaled by 2^FRAC*2^FRAC (not yet rounded).
  function automatic logic signed [2*DW:0] cmul_re_full(cplx_t a, cplx_t b);
    logic signed [2*DW:0] p;
    p = a.re * b.re - a.im * b.im;
    return p;
  endfunction

  function automatic logic signed [2*DW:0] cmul_im_full(cplx_t a, cplx_t b);
    logic signed [2*DW:0] p;
    p = a.re * b.im + a.im * b.re;
    return p;
  endfunction

  // Complex product rounded back to the DW/FRAC format.
  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    cplx_t r;
    logic signed [2*DW:0] pr, pi;
    pr = cmul_re_full(a, b);
    pi = cmul_im_full(a, b);
    pr = pr >>> FRAC;
    pi = pi >>> FRAC;
    r.re = pr[DW-1:0];
    r.im = pi[DW-1:0];
    return r;
  endfunction

  // Complex division n / d = n * conj(d) / |d|^2; zero divisor gives zero.
  function automatic cplx_t cdiv(cplx_t n, cplx_t d);
    cplx_t r;
    logic signed [2*DW+FRAC+1:0] nr, ni, mag, qr, qi;
    nr  = n.re * d.re + n.im * d.im;
    ni  = n.im * d.re - n.re * d.im;
    mag = d.re * d.re + d.im * d.im;
    if (mag == 0) begin
      r = CZERO;
    end else begin
      nr = nr <<< FRAC;
      ni = ni <<< FRAC;
      qr = nr / mag;
      qi = ni / mag;
      r.re = qr[DW-1:0];
      r.im = qi[DW-1:0];
    end
    return r;
  endfunction

endpackage
