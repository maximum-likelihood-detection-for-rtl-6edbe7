// npss_ref_pkg: floating-point reference models used by the testbenches.
//
// npss(k) returns the time-domain NPSS at 240 kHz, sample k = 0..188: the
// 11-symbol Zadoff-Chu sequence with code ccov, subcarriers at
// (n - 5.5) * 15 kHz, 128-sample symbols and 9/10-sample cyclic prefixes on
// the 1.92 MHz grid, sampled every 8th 1.92 MHz sample. It is the same
// definition from which the detector's reference ROM was computed.
//
// The sequence definition is the standard NB-IoT NPSS; the floating-point
// models (complex product, DFT helpers) are this testbench's own.
package npss_ref_pkg;
  localparam real PI = 3.14159265358979323846;

  typedef struct {
    real re;
    real im;
  } cplx_t;

  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re * b.re - a.im * b.im;
    r.im = a.re * b.im + a.im * b.re;
    return r;
  endfunction

  function automatic cplx_t cexpj(real ph);
    cplx_t r;
    r.re = $cos(ph);
    r.im = $sin(ph);
    return r;
  endfunction

  function automatic cplx_t npss(int k);
    int    ccov [11] = '{1, 1, 1, 1, -1, -1, 1, 1, 1, -1, 1};
    int    cp    [11] = '{9, 9, 9, 9, 10, 9, 9, 9, 9, 9, 9};
    int    u     [11];
    int    acc, q;
    real   tau;
    cplx_t v, t;
    acc = 0;
    for (int i = 0; i < 11; i++) begin
      u[i] = acc + cp[i];
      acc += cp[i] + 128;
    end
    tau = 8.0 * k;
    q = 0;
    while (q < 10 && tau >= real'(u[q] + 128)) q++;
    v = '{0.0, 0.0};
    for (int n = 0; n < 11; n++) begin
      t = cexpj(-5.0 * PI * n * (n + 1) / 11.0);
      t.re *= ccov[q];
      t.im *= ccov[q];
      t = cmul(t, cexpj(2.0 * PI * (n - 5.5) * (tau - u[q]) / 128.0));
      v.re += t.re;
      v.im += t.im;
    end
    return v;
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // uniform noise in [-a, a]
  function automatic real unoise(real a);
    return a * (2.0 * ($urandom % 65536) / 65535.0 - 1.0);
  endfunction
endpackage
