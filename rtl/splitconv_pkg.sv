// splitconv_pkg: types, constants and arithmetic helpers shared by the
// FFT-based split-convolution engine.
//
// All spectral data is carried as complex fixed-point numbers: two signed
// DW-bit words (real, imaginary) with FRAC fractional bits. Integer pixels and
// weights enter the datapath shifted left by FRAC. Twiddle factors are held
// with TW_FRAC fractional bits. The word widths and the twiddle precision are
// this design's own choice, picked so that 3x3 convolutions of 8-bit data over
// hundreds of input channels are reproduced exactly after rounding. The
// transform size is a parameter of the modules (FFT_N, default 8), not of the
// package; a row of a transform is written cplx_t [FFT_N-1:0].
package splitconv_pkg;

  // fixed-point format of the spectral datapath
  localparam int unsigned DW      = 64;  // bits per real or imaginary part
  localparam int unsigned FRAC    = 20;  // fractional bits
  localparam int unsigned TW_FRAC = 30;  // fractional bits of the twiddles

  typedef logic signed [DW-1:0] fx_t;
  typedef logic signed [31:0]   tw_t;    // one twiddle component, Q1.30

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // which unit feeds the shared 2-D transform engine and which consumes it
  typedef enum logic [1:0] {
    PH_IDLE   = 2'd0,
    PH_FILTER = 2'd1,  // padded filter -> FFT -> filter-spectrum buffer
    PH_PATCH  = 2'd2,  // padded patch  -> FFT -> Hadamard accumulate
    PH_INV    = 2'd3   // accumulated spectrum -> IFFT -> crop and write
  } phase_t;

  // integer value v in the fixed-point format
  function automatic cplx_t to_cplx(input logic signed [31:0] v);
    cplx_t y;
    y.re = fx_t'(v) <<< FRAC;
    y.im = '0;
    return y;
  endfunction

  // x * (c_re + j c_im), twiddle in Q1.TW_FRAC, round-half-up back to FRAC bits
  function automatic cplx_t cmul_tw(input cplx_t x, input tw_t c_re, input tw_t c_im);
    logic signed [DW+32:0] pr, pi;
    cplx_t y;
    pr = x.re * c_re - x.im * c_im;
    pi = x.re * c_im + x.im * c_re;
    pr = pr + (DW+33)'(64'sd1 <<< (TW_FRAC - 1));
    pi = pi + (DW+33)'(64'sd1 <<< (TW_FRAC - 1));
    y.re = fx_t'(pr >>> TW_FRAC);
    y.im = fx_t'(pi >>> TW_FRAC);
    return y;
  endfunction

  // twiddle W_n^k = exp(-j*2*pi*k/n) in Q1.TW_FRAC (elaboration-time use)
  function automatic tw_t tw_re(input int unsigned k, input int unsigned n);
    real v;
    v = $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(n)) * real'(64'd1 << TW_FRAC);
    return tw_t'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
  endfunction

  function automatic tw_t tw_im(input int unsigned k, input int unsigned n);
    real v;
    v = -$sin(2.0 * 3.14159265358979323846 * real'(k) / real'(n)) * real'(64'd1 << TW_FRAC);
    return tw_t'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
  endfunction

  // complex product of two fixed-point values, rescaled to FRAC fractional bits
  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    logic signed [2*DW-1:0] rr, ii, ri, ir;
    cplx_t y;
    rr = a.re * b.re;
    ii = a.im * b.im;
    ri = a.re * b.im;
    ir = a.im * b.re;
    y.re = fx_t'((rr - ii) >>> FRAC);
    y.im = fx_t'((ri + ir) >>> FRAC);
    return y;
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    cplx_t y;
    y.re = a.re + b.re;
    y.im = a.im + b.im;
    return y;
  endfunction

  function automatic cplx_t csub(input cplx_t a, input cplx_t b);
    cplx_t y;
    y.re = a.re - b.re;
    y.im = a.im - b.im;
    return y;
  endfunction

  function automatic cplx_t conj(input cplx_t a);
    cplx_t y;
    y.re = a.re;
    y.im = -a.im;
    return y;
  endfunction

  // reverse the low 'bits' bits of i
  function automatic int unsigned bitrev(input int unsigned i, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int b = 0; b < bits; b++) r |= ((i >> b) & 1) << (bits - 1 - b);
    return r;
  endfunction

endpackage
