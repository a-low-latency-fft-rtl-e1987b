// cascade_driver: stimulus, H source and output checker for one fft_ifft_cascade.
//
// It sends FRAMES frames of random complex samples (per channel) in the cascade's input
// lane order, then zeros to drain the pipeline. It serves the filter spectrum H as a
// combinational table indexed by the cascade's h_bin outputs. With STALL_PCT > 0 it drops
// in_valid on that percentage of cycles, so the pipeline is frozen at random points.
// Every output sample of the first FRAMES frames is compared with an independent
// floating-point model, y[n] = (1/N^2) * sum_k DFT(x)[k] * H[k] * exp(+j 2 pi k n / N),
// to within TOL LSBs per part; out_pos is checked for every sample, and the number of
// enabled cycles before the first output is checked against the latency formula. From
// then on every enabled cycle must deliver an output pair (two samples per clock).
// It reports its counts on its outputs and raises done when every frame is checked.
module cascade_driver
  import fft_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int N         = 16,
  parameter int CHANNELS  = 1,
  parameter bit PIPE      = 1'b0,
  parameter int FRAMES    = 3,
  parameter int STALL_PCT = 0,
  parameter int TOL       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 in_valid,
  output cplx_t                in_u,
  output cplx_t                in_l,
  input  logic [$clog2(N)-1:0] h_bin_u,
  input  logic [$clog2(N)-1:0] h_bin_l,
  output coef_t                h_u,
  output coef_t                h_l,
  input  logic                 out_valid,
  input  logic [$clog2(N)-1:0] out_pos,
  input  cplx_t                out_u,
  input  cplx_t                out_l,
  output logic                 done,
  output int                   checks,
  output int                   failures,
  output int                   stalls,
  output int                   frames_out,
  output real                  max_err
);

  localparam int LOGN = $clog2(N);
  localparam int FL   = (CHANNELS == 2) ? N : N / 2;      // cycles per frame
  localparam int EXP_LAT = ((CHANNELS == 2) ? 2 * N - 2 : (5 * N) / 4 - 2)
                           + int'(PIPE) * (2 * LOGN + 1);

  int  xr [FRAMES][2][N];
  int  xi [FRAMES][2][N];
  real yr [FRAMES][2][N];
  real yi [FRAMES][2][N];
  int  hr [N];
  int  hi [N];
  int  vcnt;          // enabled cycles so far
  int  ocnt;          // output samples (cycles) seen
  bit  first_seen;

  function automatic int rnd_s(int mag);
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

  // ---- build stimulus and reference ----
  initial begin
    real ar[], ai[], fr[], fi[], zr[], zi[], rr[], ri[];
    ar = new[N]; ai = new[N]; zr = new[N]; zi = new[N];
    for (int k = 0; k < N; k++) begin
      hr[k] = rnd_s(45000);
      hi[k] = rnd_s(45000);
    end
    for (int f = 0; f < FRAMES; f++)
      for (int c = 0; c < CHANNELS; c++) begin
        for (int n = 0; n < N; n++) begin
          xr[f][c][n] = rnd_s(1 << (DW - 2));
          xi[f][c][n] = rnd_s(1 << (DW - 2));
          ar[n] = real'(xr[f][c][n]);
          ai[n] = real'(xi[f][c][n]);
        end
        dft(ar, ai, 1'b0, fr, fi);
        for (int k = 0; k < N; k++) begin
          real sc = 1.0 / real'(1 << CFRAC);
          zr[k] = (fr[k] * real'(hr[k]) - fi[k] * real'(hi[k])) * sc;
          zi[k] = (fr[k] * real'(hi[k]) + fi[k] * real'(hr[k])) * sc;
        end
        dft(zr, zi, 1'b1, rr, ri);
        for (int n = 0; n < N; n++) begin
          yr[f][c][n] = rr[n] / real'(N) / real'(N);
          yi[f][c][n] = ri[n] / real'(N) / real'(N);
        end
      end
  end

  // ---- H table ----
  always_comb begin
    h_u.re = CW'(hr[h_bin_u]);
    h_u.im = CW'(hi[h_bin_u]);
    h_l.re = CW'(hr[h_bin_l]);
    h_l.im = CW'(hi[h_bin_l]);
  end

  // ---- input ----
  function automatic cplx_t sample(int f, int c, int n);
    cplx_t v;
    if (f >= FRAMES) return '0;
    v.re = DW'(xr[f][c][n]);
    v.im = DW'(xi[f][c][n]);
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_u     <= '0;
      in_l     <= '0;
      vcnt     <= 0;
      stalls   <= 0;
    end else begin
      int f, p, v;
      if (in_valid) vcnt <= vcnt + 1;
      v = in_valid ? vcnt + 1 : vcnt;             // index of the sample offered next
      if (STALL_PCT > 0 && vcnt > 0 && $urandom_range(99) < STALL_PCT) begin
        in_valid <= 1'b0;
        stalls   <= stalls + 1;
      end else begin
        in_valid <= 1'b1;
        f = v / FL;
        p = v % FL;
        if (CHANNELS == 2) begin
          in_u <= sample(f, 0, p);
          in_l <= sample(f, 1, p);
        end else if (p < N / 4) begin
          in_u <= sample(f, 0, p);
          in_l <= sample(f, 0, p + N / 4);
        end else begin
          in_u <= sample(f, 0, p + N / 4);
          in_l <= sample(f, 0, p + N / 2);
        end
      end
    end

  // ---- output check ----
  task automatic cmp(cplx_t got, real er, real ei, string what);
    real e = rabs(real'(got.re) - er);
    if (rabs(real'(got.im) - ei) > e) e = rabs(real'(got.im) - ei);
    if (e > max_err) max_err = e;
    checks++;
    if (e > real'(TOL)) begin
      failures++;
      if (failures < 10)
        $display("cascade_driver N=%0d CH=%0d: %s got (%0d,%0d) expected (%.1f,%.1f)",
                 N, CHANNELS, what, got.re, got.im, er, ei);
    end
  endtask

  initial begin
    checks = 0; failures = 0; max_err = 0.0; ocnt = 0; frames_out = 0;
    done = 1'b0; first_seen = 1'b0;
  end

  always @(posedge clk) begin
    // Throughput: once the first result is out, every enabled cycle carries two samples.
    if (rst_n && first_seen && in_valid && !out_valid && !done) begin
      failures++;
      $display("cascade_driver N=%0d CH=%0d: no output on an enabled cycle", N, CHANNELS);
    end
    if (rst_n && out_valid && !done) begin
      int f, p;
      if (!first_seen) begin
        first_seen = 1'b1;
        checks++;
        if (vcnt != EXP_LAT) begin
          failures++;
          $display("cascade_driver N=%0d CH=%0d: first output after %0d cycles, expected %0d",
                   N, CHANNELS, vcnt, EXP_LAT);
        end
      end
      f = ocnt / FL;
      p = ocnt % FL;
      checks++;
      if (int'(out_pos) != p) begin
        failures++;
        $display("cascade_driver: out_pos %0d expected %0d", out_pos, p);
      end
      if (CHANNELS == 2) begin
        cmp(out_u, yr[f][0][p], yi[f][0][p], $sformatf("f%0d ch0 y[%0d]", f, p));
        cmp(out_l, yr[f][1][p], yi[f][1][p], $sformatf("f%0d ch1 y[%0d]", f, p));
      end else begin
        cmp(out_u, yr[f][0][p],         yi[f][0][p],         $sformatf("f%0d y[%0d]", f, p));
        cmp(out_l, yr[f][0][p + N / 2], yi[f][0][p + N / 2], $sformatf("f%0d y[%0d]", f, p + N / 2));
      end
      ocnt++;
      if (p == FL - 1) frames_out++;
      if (ocnt == FRAMES * FL) done = 1'b1;
    end
  end

endmodule
