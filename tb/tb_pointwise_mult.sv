// tb_pointwise_mult: checks the H multiplier and its bin numbering.
//
// For N = 16 (combinational) and N = 64 (registered), every position k of a frame must
// request bins bitrev(k) and bitrev(k) + N/2 (the bins the FFT emits on that position),
// and each lane must equal the rounded product with the coefficient of its bin,
// computed in double precision. The registered unit must show the product one cycle
// later.
`timescale 1ns/1ps
module tb_pointwise_mult;
  import fft_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  cplx_t in_u, in_l;
  coef_t h16 [16], h64 [64];

  logic [2:0] pos_a;  logic [3:0] bu_a, bl_a;  cplx_t ou_a, ol_a;
  logic [4:0] pos_b;  logic [5:0] bu_b, bl_b;  cplx_t ou_b, ol_b;

  pointwise_mult #(.N(16), .PIPE(1'b0)) u_a (.clk, .rst_n, .en, .pos(pos_a), .h_bin_u(bu_a), .h_bin_l(bl_a),
    .h_u(h16[bu_a]), .h_l(h16[bl_a]), .in_u, .in_l, .out_u(ou_a), .out_l(ol_a));
  pointwise_mult #(.N(64), .PIPE(1'b1)) u_b (.clk, .rst_n, .en, .pos(pos_b), .h_bin_u(bu_b), .h_bin_l(bl_b),
    .h_u(h64[bu_b]), .h_l(h64[bl_b]), .in_u, .in_l, .out_u(ou_b), .out_l(ol_b));

  function automatic cplx_t model(cplx_t a, coef_t w);
    cplx_t p;
    p.re = DW'($rtoi($floor((real'(a.re) * real'(w.re) - real'(a.im) * real'(w.im)) / real'(1 << CFRAC) + 0.5)));
    p.im = DW'($rtoi($floor((real'(a.re) * real'(w.im) + real'(a.im) * real'(w.re)) / real'(1 << CFRAC) + 0.5)));
    return p;
  endfunction

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic chkc(string what, cplx_t got, cplx_t exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got (%0d,%0d) expected (%0d,%0d)", what, got.re, got.im, exp.re, exp.im);
    end
  endtask

  function automatic cplx_t rnd_c();
    cplx_t c;
    c.re = DW'(int'($urandom_range(1 << (DW - 1))) - (1 << (DW - 2)));
    c.im = DW'(int'($urandom_range(1 << (DW - 1))) - (1 << (DW - 2)));
    return c;
  endfunction

  initial begin
    cplx_t pu, pl, eu, el;
    for (int i = 0; i < 16; i++) h16[i] = coef_t'({CW'($urandom_range(80000) - 40000), CW'($urandom_range(80000) - 40000)});
    for (int i = 0; i < 64; i++) h64[i] = coef_t'({CW'($urandom_range(80000) - 40000), CW'($urandom_range(80000) - 40000)});
    pos_a = '0; pos_b = '0; in_u = '0; in_l = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    eu = '0; el = '0;
    for (int c = 0; c < 96; c++) begin
      @(negedge clk);
      pos_a = 3'(c);
      pos_b = 5'(c);
      in_u = rnd_c();
      in_l = rnd_c();
      #1;
      chk("N16 bin_u", int'(bu_a), bitrev(c % 8, 3));
      chk("N16 bin_l", int'(bl_a), bitrev(c % 8, 3) + 8);
      chk("N64 bin_u", int'(bu_b), bitrev(c % 32, 5));
      chk("N64 bin_l", int'(bl_b), bitrev(c % 32, 5) + 32);
      chkc("N16 out_u", ou_a, model(in_u, h16[bitrev(c % 8, 3)]));
      chkc("N16 out_l", ol_a, model(in_l, h16[bitrev(c % 8, 3) + 8]));
      if (c > 0) begin
        chkc("N64 out_u (registered)", ou_b, eu);
        chkc("N64 out_l (registered)", ol_b, el);
      end
      eu = model(in_u, h64[bitrev(c % 32, 5)]);
      el = model(in_l, h64[bitrev(c % 32, 5) + 32]);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
