// bf2: radix-2 decimation-in-frequency butterfly (the "BF" blocks A-D of the cascade).
//
// s = (a + b) / 2 and d = (a - b) / 2. The sum and difference are formed one bit wider
// and, with SCALE set, shifted right by one (truncation), so a stage can never overflow
// and a log2(N)-stage transform is scaled by 1/N. The twiddle factor that follows the
// difference in a DIF stage is applied outside, by cplx_mult. The paper gives the
// butterfly's function; the per-stage halving and the truncation are this design's
// choice. Purely combinational.
module bf2
  import fft_pkg::*;
#(
  parameter bit SCALE = 1'b1       // 1: halve both outputs; 0: keep the low DW bits
) (
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t s,
  output cplx_t d
);

  logic signed [DW:0] sr, si, dr, di;

  always_comb begin
    sr = (DW+1)'(a.re) + (DW+1)'(b.re);
    si = (DW+1)'(a.im) + (DW+1)'(b.im);
    dr = (DW+1)'(a.re) - (DW+1)'(b.re);
    di = (DW+1)'(a.im) - (DW+1)'(b.im);
    if (SCALE) begin
      s.re = sr[DW:1];  s.im = si[DW:1];
      d.re = dr[DW:1];  d.im = di[DW:1];
    end else begin
      s.re = sr[DW-1:0]; s.im = si[DW-1:0];
      d.re = dr[DW-1:0]; d.im = di[DW-1:0];
    end
  end

endmodule
