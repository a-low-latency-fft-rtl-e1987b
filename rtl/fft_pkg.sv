// fft_pkg: word formats and elaboration-time helpers shared by the FFT-IFFT cascade.
//
// A sample is a complex number held as two signed DW-bit parts (cplx_t). A coefficient
// (twiddle factor or filter bin H) is a complex number of two signed CW-bit parts in
// fixed point with CFRAC fraction bits, so 1.0 is 2**CFRAC and is represented exactly.
// The word widths are this design's choice; the paper gives none.
// twiddle() computes exp(-+j*2*pi*k/n) at elaboration time, so the twiddle tables are
// built from this formula for any transform size and no table file is needed.
package fft_pkg;

  localparam int DW    = 24;        // bits per real / imaginary part of a sample
  localparam int CW    = 18;        // bits per real / imaginary part of a coefficient
  localparam int CFRAC = CW - 2;    // coefficient fraction bits: 1.0 == 2**CFRAC

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [CW-1:0] re;
    logic signed [CW-1:0] im;
  } coef_t;

  localparam real PI = 3.14159265358979323846;

  function automatic int rnd(real v);
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  // W_n^k = exp(-j*2*pi*k/n) for the forward transform, its conjugate for the inverse.
  function automatic coef_t twiddle(int k, int n, bit inverse);
    real th;
    int  c, s;
    coef_t w;
    th  = 2.0 * PI * real'(k) / real'(n);
    c   = rnd($cos(th) * real'(2 ** CFRAC));
    s   = rnd($sin(th) * real'(2 ** CFRAC));
    w.re = CW'(c);
    w.im = inverse ? CW'(s) : CW'(-s);
    return w;
  endfunction

  // Cycles from the first butterfly input of a 2-parallel N-point FFT/IFFT to its first
  // output: the delay lines of the DSD units, N/4 + N/8 + ... + 1 = N/2 - 1, plus one
  // cycle per stage when the stage outputs are registered.
  function automatic int mdc_latency(int n, int pipe);
    return n / 2 - 1 + pipe * $clog2(n);
  endfunction

endpackage
