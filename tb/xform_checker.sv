// xform_checker: drives one 2-parallel transform (mdc_fft or asap_ifft) with back-to-back
// frames and checks every output pair against a double-precision DFT.
//
// INV = 0 instantiates mdc_fft: on position k it sends (x_k, x_{k+N/2}) and expects, N/2-1
// (+log2 N with PIPE) enabled cycles later, (X_b / N, X_{b+N/2} / N) with b = bitrev(k),
// i.e. the spectrum in bit-reversed order. INV = 1 instantiates asap_ifft: on position k
// it sends the bit-reversed spectrum pair (Y_b, Y_{b+N/2}) and expects (y_k / N, y_{k+N/2}
// / N) in natural order, y being the inverse DFT. The output is compared on exactly the
// cycle the latency formula gives, so a schedule or latency error is a failure. The
// enable is dropped at random (STALL_PCT) to check that the pipeline freezes cleanly.
module xform_checker
  import fft_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int N         = 16,
  parameter bit PIPE      = 1'b0,
  parameter bit INV       = 1'b0,
  parameter int FRAMES    = 3,
  parameter int STALL_PCT = 0,
  parameter int TOL       = 16   // LSBs on outputs near 2^20: the 2^-17 twiddle precision
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int LOGN = $clog2(N);
  localparam int HALF = N / 2;
  localparam int LAT  = HALF - 1 + int'(PIPE) * LOGN;

  logic                 en;
  logic [LOGN-2:0]      pos;
  cplx_t                in_u, in_l, out_u, out_l;

  if (INV) begin : g_ifft
    asap_ifft #(.N(N), .PIPE(PIPE)) u_dut (.clk, .rst_n, .en, .pos, .in_u, .in_l, .out_u, .out_l);
  end else begin : g_fft
    mdc_fft #(.N(N), .PIPE(PIPE)) u_dut (.clk, .rst_n, .en, .pos, .in_u, .in_l, .out_u, .out_l);
  end

  int  xr [FRAMES][N];
  int  xi [FRAMES][N];
  real er [FRAMES][N];
  real ei [FRAMES][N];

  function automatic cplx_t mk(int f, int i);
    cplx_t c;
    if (f >= FRAMES) return '0;
    c.re = DW'(xr[f][i]);
    c.im = DW'(xi[f][i]);
    return c;
  endfunction

  task automatic cmp(cplx_t got, real r, real i, int f, int idx);
    real e = rabs(real'(got.re) - r);
    if (rabs(real'(got.im) - i) > e) e = rabs(real'(got.im) - i);
    checks++;
    if (e > real'(TOL)) begin
      failures++;
      if (failures < 10)
        $display("xform N=%0d INV=%0d PIPE=%0d frame %0d index %0d: got (%0d,%0d) expected (%.1f,%.1f)",
                 N, INV, PIPE, f, idx, int'(got.re), int'(got.im), r, i);
    end
  endtask

  initial begin
    real ar[], ai[], yr[], yi[];
    ar = new[N];
    ai = new[N];
    checks = 0; failures = 0; done = 1'b0;
    en = 1'b0; pos = '0; in_u = '0; in_l = '0;
    for (int f = 0; f < FRAMES; f++) begin
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(1 << (DW - 1))) - (1 << (DW - 2));
        xi[f][n] = int'($urandom_range(1 << (DW - 1))) - (1 << (DW - 2));
        ar[n] = real'(xr[f][n]);
        ai[n] = real'(xi[f][n]);
      end
      dft(ar, ai, INV, yr, yi);
      for (int n = 0; n < N; n++) begin
        er[f][n] = yr[n] / real'(N);
        ei[f][n] = yi[n] / real'(N);
      end
    end
    @(posedge rst_n);
    for (int cnt = 0; cnt < (FRAMES + 1) * HALF + LAT + 1; ) begin
      @(negedge clk);
      en = (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);
      if (en) begin
        automatic int f = cnt / HALF;
        automatic int k = cnt % HALF;
        automatic int o = cnt - LAT;          // output sample index due this cycle
        automatic int b = bitrev(k, LOGN - 1);
        pos = (LOGN - 1)'(k);
        if (INV) begin
          in_u = mk(f, b);
          in_l = mk(f, b + HALF);
        end else begin
          in_u = mk(f, k);
          in_l = mk(f, k + HALF);
        end
        #1;
        if (o >= 0 && o / HALF < FRAMES) begin
          automatic int of = o / HALF;
          automatic int ok = o % HALF;
          automatic int ob = INV ? ok : bitrev(ok, LOGN - 1);
          cmp(out_u, er[of][ob],        ei[of][ob],        of, ob);
          cmp(out_l, er[of][ob + HALF], ei[of][ob + HALF], of, ob + HALF);
        end
        cnt++;
      end
      @(posedge clk);
    end
    done = 1'b1;
  end

endmodule
