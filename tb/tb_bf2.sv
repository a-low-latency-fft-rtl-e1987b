// tb_bf2: checks the radix-2 butterfly against integer arithmetic on wide numbers.
//
// Random and extreme operand pairs (full-scale positive and negative) are applied to a
// halving butterfly and to a non-halving one; the expected outputs are floor((a+-b)/2)
// and the low DW bits of a+-b, worked out in 64-bit integers.
`timescale 1ns/1ps
module tb_bf2;
  import fft_pkg::*;

  cplx_t a, b, s1, d1, s0, d0;
  int checks = 0, failures = 0;

  bf2 #(.SCALE(1'b1)) u_half (.a, .b, .s(s1), .d(d1));
  bf2 #(.SCALE(1'b0)) u_full (.a, .b, .s(s0), .d(d0));

  function automatic longint fdiv2(longint v);
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  function automatic longint wrap(longint v);
    longint m = 64'sd1 <<< DW;
    v = v % m;
    if (v >= m / 2) v -= m;
    if (v < -m / 2) v += m;
    return v;
  endfunction

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic apply(longint ar, longint ai, longint br, longint bi);
    a.re = DW'(ar); a.im = DW'(ai); b.re = DW'(br); b.im = DW'(bi);
    #1;
    chk("s.re", longint'(s1.re), fdiv2(ar + br));
    chk("s.im", longint'(s1.im), fdiv2(ai + bi));
    chk("d.re", longint'(d1.re), fdiv2(ar - br));
    chk("d.im", longint'(d1.im), fdiv2(ai - bi));
    chk("s0.re", longint'(s0.re), wrap(ar + br));
    chk("d0.im", longint'(d0.im), wrap(ai - bi));
  endtask

  initial begin
    longint mx = (64'sd1 <<< (DW - 1)) - 1;
    longint mn = -(64'sd1 <<< (DW - 1));
    apply(mx, mx, mx, mx);
    apply(mn, mn, mn, mn);
    apply(mx, mn, mn, mx);
    apply(3, -3, 0, 0);
    for (int i = 0; i < 500; i++)
      apply(longint'($signed(DW'($urandom))), longint'($signed(DW'($urandom))),
            longint'($signed(DW'($urandom))), longint'($signed(DW'($urandom))));
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
