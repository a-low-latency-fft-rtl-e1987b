// tb_ref_pkg: floating-point reference maths for the testbenches.
//
// dft() is a direct O(N^2) discrete Fourier transform in double precision (forward:
// X[k] = sum x[n] exp(-j 2 pi k n / N); inverse: the same with +j and no 1/N), used as
// the independent model the fixed-point hardware is compared against. bitrev() reverses
// the low `bits` bits of an index.
package tb_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic void dft(input real xr[], input real xi[], input bit inverse,
                              output real yr[], output real yi[]);
    int  n = xr.size();
    real cs[], sn[];
    cs = new[n];
    sn = new[n];
    yr = new[n];
    yi = new[n];
    for (int i = 0; i < n; i++) begin
      cs[i] = $cos(2.0 * PI * real'(i) / real'(n));
      sn[i] = inverse ? $sin(2.0 * PI * real'(i) / real'(n)) : -$sin(2.0 * PI * real'(i) / real'(n));
    end
    for (int k = 0; k < n; k++) begin
      real ar = 0.0, ai = 0.0;
      for (int m = 0; m < n; m++) begin
        int idx = (k * m) % n;
        ar += xr[m] * cs[idx] - xi[m] * sn[idx];
        ai += xr[m] * sn[idx] + xi[m] * cs[idx];
      end
      yr[k] = ar;
      yi[k] = ai;
    end
  endfunction

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
