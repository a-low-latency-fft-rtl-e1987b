// cplx_mult: complex multiplier p = a * w (the circled-x multipliers of the cascade).
//
// a is a sample (cplx_t), w a fixed-point coefficient (coef_t, CFRAC fraction bits). The
// four real products are summed at full width, rounded to nearest by adding half an LSB
// before the right shift by CFRAC, and saturated to DW bits. The same unit serves as
// the twiddle multiplier inside the FFT/IFFT stages and as the pointwise multiplier by
// the filter spectrum H. The paper only draws the multipliers; the four-multiplier form,
// the rounding and the saturation are this design's choice. Purely combinational.
module cplx_mult
  import fft_pkg::*;
(
  input  cplx_t a,
  input  coef_t w,
  output cplx_t p
);

  localparam int PW = DW + CW + 1;
  localparam logic signed [PW-1:0] HALF = PW'(1) <<< (CFRAC - 1);
  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (DW - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (DW - 1));

  logic signed [PW-1:0] pr, pi, qr, qi;

  function automatic logic signed [DW-1:0] sat(logic signed [PW-1:0] v);
    if (v > MAXV) return MAXV[DW-1:0];
    if (v < MINV) return MINV[DW-1:0];
    return v[DW-1:0];
  endfunction

  always_comb begin
    pr = PW'(a.re) * PW'(w.re) - PW'(a.im) * PW'(w.im);
    pi = PW'(a.re) * PW'(w.im) + PW'(a.im) * PW'(w.re);
    qr = (pr + HALF) >>> CFRAC;
    qi = (pi + HALF) >>> CFRAC;
    p.re = sat(qr);
    p.im = sat(qi);
  end

endmodule
