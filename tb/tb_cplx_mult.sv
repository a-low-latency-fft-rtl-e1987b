// tb_cplx_mult: checks the complex multiplier against a double-precision model.
//
// Random samples times random coefficients, twiddle-like unit coefficients (1, -j) and
// full-scale operands that must saturate. Expected: floor(x + 0.5) of the exact product
// divided by 2^CFRAC, clamped to the DW-bit range, per real and imaginary part.
`timescale 1ns/1ps
module tb_cplx_mult;
  import fft_pkg::*;

  cplx_t a, p;
  coef_t w;
  int checks = 0, failures = 0;

  cplx_mult u_dut (.a, .w, .p);

  function automatic real model(real v);
    real mx = real'((64'sd1 <<< (DW - 1)) - 1);
    real mn = -real'(64'sd1 <<< (DW - 1));
    v = $floor(v / real'(1 << CFRAC) + 0.5);
    if (v > mx) v = mx;
    if (v < mn) v = mn;
    return v;
  endfunction

  task automatic apply(int ar, int ai, int wr, int wi);
    real er, ei;
    a.re = DW'(ar); a.im = DW'(ai); w.re = CW'(wr); w.im = CW'(wi);
    #1;
    er = model(real'(ar) * real'(wr) - real'(ai) * real'(wi));
    ei = model(real'(ar) * real'(wi) + real'(ai) * real'(wr));
    checks += 2;
    if (real'(p.re) != er || real'(p.im) != ei) begin
      failures++;
      if (failures < 10)
        $display("(%0d,%0d)*(%0d,%0d): got (%0d,%0d) expected (%.0f,%.0f)",
                 ar, ai, wr, wi, p.re, p.im, er, ei);
    end
  endtask

  initial begin
    int mx = (1 << (DW - 1)) - 1;
    int one = 1 << CFRAC;
    apply(12345, -6789, one, 0);
    apply(12345, -6789, 0, -one);
    apply(mx, mx, (1 << (CW - 1)) - 1, (1 << (CW - 1)) - 1);   // saturates high
    apply(-mx, -mx, (1 << (CW - 1)) - 1, -(1 << (CW - 1)));    // saturates
    for (int i = 0; i < 500; i++)
      apply(int'($signed(DW'($urandom))), int'($signed(DW'($urandom))),
            int'($signed(CW'($urandom))), int'($signed(CW'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
