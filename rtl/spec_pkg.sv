// spec_pkg: types, sizes and arithmetic helpers shared by the spectral sparse
// convolution engine.
//
// Every datum is 16-bit two's-complement fixed point, the number format the
// engine is built around. The split between integer and fraction bits
// (FRAC_W) is this design's choice. A spectral value is a complex pair
// (cplx_t). Products are shifted right by FRAC_W (truncation toward minus
// infinity) and every result that goes back into 16 bits saturates; both are
// this design's choices.
package spec_pkg;

  parameter int DATA_W  = 16;  // fixed-point word
  parameter int FRAC_W  = 8;   // fraction bits (design choice)
  parameter int TW_FRAC = 14;  // fraction bits of FFT twiddle constants
  parameter int CNT_W   = 16;  // width of layer-size counters (channels, kernels, tiles)

  typedef logic signed [DATA_W-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // States of the streaming controller.
  typedef enum logic [2:0] {
    ST_IDLE,
    ST_READ_INPUT,
    ST_READ_KERNEL,
    ST_PROC_CONV,
    ST_DONE_CONV,
    ST_PROC_IFFT,
    ST_WRITE_OUT,
    ST_DONE
  } ctrl_state_e;

  // Saturate a wide signed value into a 16-bit word.
  function automatic fx_t sat_fx(input logic signed [47:0] v);
    if (v > 48'sd32767) return fx_t'(16'sh7fff);
    if (v < -48'sd32768) return fx_t'(16'sh8000);
    return fx_t'(v[DATA_W-1:0]);
  endfunction

  // Fixed-point complex product (a*b) >>> FRAC_W, saturated.
  function automatic cplx_t cmul_fx(input cplx_t a, input cplx_t b);
    logic signed [47:0] rr, ii, ri, ir;
    cplx_t y;
    rr = 48'(a.re) * 48'(b.re);
    ii = 48'(a.im) * 48'(b.im);
    ri = 48'(a.re) * 48'(b.im);
    ir = 48'(a.im) * 48'(b.re);
    y.re = sat_fx((rr - ii) >>> FRAC_W);
    y.im = sat_fx((ri + ir) >>> FRAC_W);
    return y;
  endfunction

  // Saturating complex sum.
  function automatic cplx_t cadd_fx(input cplx_t a, input cplx_t b);
    cplx_t y;
    y.re = sat_fx(48'(a.re) + 48'(b.re));
    y.im = sat_fx(48'(a.im) + 48'(b.im));
    return y;
  endfunction

endpackage
