// tb_dsd: checks the delay-switch-delay unit cycle by cycle against a history model.
//
// Two units, D = 1 and D = 4, receive random samples, a random switch setting and a
// random enable. Counting only enabled cycles, the expected outputs are
//   out_l(t) = sw(t) ? in_u(t) : in_l(t-D)
//   out_u(t) = sw(t-D) ? in_l(t-2D) : in_u(t-D)
// and they are compared once the history is D*2 cycles deep. It also runs the unit as
// the paper's N = 16 preprocessing regrouper (D = 4, switch high in the second half of
// each 8-cycle frame) and checks that butterfly A_k receives (x_k, x_{k+8}) on cycle 4+k.
`timescale 1ns/1ps
module tb_dsd;
  import fft_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- random test, two sizes ----
  localparam int DS [2] = '{1, 4};
  logic  en, sw;
  cplx_t in_u, in_l;
  cplx_t ou [2], ol [2];

  for (genvar g = 0; g < 2; g++) begin : g_d
    dsd #(.D(DS[g])) u_dut (.clk, .rst_n, .en, .sw, .in_u, .in_l, .out_u(ou[g]), .out_l(ol[g]));
  end

  cplx_t hu [$], hl [$];
  logic  hs [$];

  task automatic chk(string what, cplx_t got, cplx_t exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  // ---- preprocessing scenario ----
  logic  p_sw;
  cplx_t p_u, p_l, q_u, q_l;
  dsd #(.D(4)) u_pre (.clk, .rst_n, .en(1'b1), .sw(p_sw), .in_u(p_u), .in_l(p_l), .out_u(q_u), .out_l(q_l));

  function automatic cplx_t mk(int v);
    cplx_t c;
    c.re = DW'(v);
    c.im = DW'(-v);
    return c;
  endfunction

  initial begin
    en = 0; sw = 0; in_u = '0; in_l = '0; p_sw = 0; p_u = '0; p_l = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // random stream
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      en   = ($urandom_range(3) != 0);
      sw   = $urandom_range(1) == 1;
      in_u = cplx_t'({$urandom, $urandom});
      in_l = cplx_t'({$urandom, $urandom});
      #1;
      if (en) begin
        int t;
        hu.push_back(in_u); hl.push_back(in_l); hs.push_back(sw);
        t = hu.size() - 1;
        for (int g = 0; g < 2; g++) begin
          automatic int d = DS[g];
          if (t >= 2 * d) begin
            chk("out_l", ol[g], hs[t] ? hu[t] : hl[t - d]);
            chk("out_u", ou[g], hs[t - d] ? hl[t - 2 * d] : hu[t - d]);
          end
        end
      end
      @(posedge clk);
    end
    en = 0;
    // two frames of the N = 16 regrouping: position p of 8, lanes per the cascade's input order
    for (int c = 0; c < 32; c++) begin
      automatic int p = c % 8;
      automatic int f = c / 8;
      @(negedge clk);
      p_sw = (p >= 4);
      p_u  = (p < 4) ? mk(100 * f + p)     : mk(100 * f + p + 4);
      p_l  = (p < 4) ? mk(100 * f + p + 4) : mk(100 * f + p + 8);
      #1;
      if (c >= 4 && c < 28) begin
        automatic int k = (c - 4) % 8;
        automatic int ff = (c - 4) / 8;
        chk("A_k upper", q_u, mk(100 * ff + k));
        chk("A_k lower", q_l, mk(100 * ff + k + 8));
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
