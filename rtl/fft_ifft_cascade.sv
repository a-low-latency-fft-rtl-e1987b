// fft_ifft_cascade: buffer-free 2-parallel FFT -> H -> IFFT cascade (fast convolution).
//
// The cascade computes y = IFFT(FFT(x) . H) for frames of N complex samples at two
// samples per cycle. Its point is the schedule of the IFFT: the 2-parallel FFT (mdc_fft)
// emits its spectrum in bit-reversed order, and the IFFT (asap_ifft) is folded so that
// it consumes the pairs in exactly that order, as soon as they appear. No reorder buffer
// sits between the two, and the IFFT still returns its samples in natural order.
//
// CHANNELS = 1 (single 2-parallel stream):
//   input regrouping DSD(N/4) -> mdc_fft -> pointwise_mult -> asap_ifft
//   Input frame, position p = 0..N/2-1 (enabled cycles since the first one, mod N/2):
//     p <  N/4: in_u = x[p],       in_l = x[p+N/4]
//     p >= N/4: in_u = x[p+N/4],   in_l = x[p+N/2]
//   Output frame, out_pos = k = 0..N/2-1: out_u = y[k], out_l = y[k+N/2].
//   Latency (first in to first out) 1.25N - 2 cycles with PIPE = 0.
// CHANNELS = 2 (two channels interleaved, one sample of each per cycle):
//   channel interleaving DSD(N/2) -> mdc_fft -> pointwise_mult -> asap_ifft
//   -> channel de-interleaving DSD(N/2)
//   Input frame, position n = 0..N-1: in_u = x[n] of channel 0, in_l = x[n] of channel 1.
//   Output frame, out_pos = n: out_u = y[n] of channel 0, out_l = y[n] of channel 1.
//   Latency 2N - 2 cycles at the output (1.5N - 2 at the IFFT output) with PIPE = 0.
// PIPE = 1 registers every butterfly stage and the H product, adding 2*log2(N) + 1 cycles.
//
// The filter spectrum H is supplied from outside: the cascade drives the two bin numbers
// it needs (h_bin_u, h_bin_l) and reads the coefficients h_u, h_l in the same cycle.
// Both channels use the same H. The result is scaled by 1/N^2 overall: each of the
// 2*log2(N) butterflies halves, so y = (x (*) h) / N with h = IDFT(H) and (*) circular
// convolution.
//
// Flow control: the whole pipeline advances only on cycles with in_valid high; a cycle
// with in_valid low freezes every register, so input may pause at any point. Frames
// follow each other back to back (in enabled cycles) from the first valid cycle after
// reset. out_valid is high on enabled cycles once the first frame has reached the
// output; to drain the last frame, keep feeding samples (zeros, for example).
//
// What follows the paper: the stage structure, the DSD sizes, the folding sets (natural
// order in the FFT, bit-reversed in the IFFT), the preprocessing and interleaving DSDs and
// the resulting memory, multiplexer and latency counts. This design's own choices: word
// widths and scaling, the input lane order that makes the preprocessing DSD(N/4) produce
// the FFT schedule of the paper, the H interface, the valid/enable flow control and the
// optional pipeline registers.
module fft_ifft_cascade
  import fft_pkg::*;
#(
  parameter int N        = 1024,
  parameter int CHANNELS = 1,
  parameter bit PIPE     = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  cplx_t                in_u,
  input  cplx_t                in_l,
  output logic [$clog2(N)-1:0] h_bin_u,
  output logic [$clog2(N)-1:0] h_bin_l,
  input  coef_t                h_u,
  input  coef_t                h_l,
  output logic                 out_valid,
  output logic [$clog2(N)-1:0] out_pos,
  output cplx_t                out_u,
  output cplx_t                out_l
);

  localparam int LOGN     = $clog2(N);
  localparam int PB       = LOGN - 1;
  localparam int PRE_D    = (CHANNELS == 2) ? N / 2 : N / 4;
  localparam int FFT_LAT  = mdc_latency(N, int'(PIPE));
  localparam int IFFT_LAT = mdc_latency(N, int'(PIPE));
  localparam int POST_D   = (CHANNELS == 2) ? N / 2 : 0;
  localparam int IFFT_OUT = PRE_D + FFT_LAT + int'(PIPE) + IFFT_LAT;
  localparam int LATENCY  = IFFT_OUT + POST_D;
  localparam int FW       = $clog2(LATENCY + 1);

  initial begin
    assert (CHANNELS == 1 || CHANNELS == 2) else $fatal(1, "fft_ifft_cascade: CHANNELS must be 1 or 2");
    assert (N >= 8 && (1 << LOGN) == N) else $fatal(1, "fft_ifft_cascade: N must be a power of two >= 8");
  end

  logic en;
  assign en = in_valid;

  // ---- timing: enabled cycles since reset (mod N) and fill state ----
  logic [LOGN-1:0] t;
  logic [FW-1:0]   fill;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      t    <= '0;
      fill <= '0;
    end else if (en) begin
      t <= t + 1'b1;
      if (fill != FW'(LATENCY)) fill <= fill + 1'b1;
    end

  assign out_valid = en && (fill == FW'(LATENCY));
  assign out_pos   = (CHANNELS == 2) ? t - LOGN'(LATENCY) : {1'b0, PB'(t - LOGN'(LATENCY))};

  // ---- input regrouping (1 channel) or channel interleaving (2 channels) ----
  logic  pre_sw;
  cplx_t a_u, a_l;

  assign pre_sw = (CHANNELS == 2) ? t[LOGN-1] : t[LOGN-2];

  dsd #(.D(PRE_D)) u_pre (
    .clk, .rst_n, .en, .sw(pre_sw),
    .in_u, .in_l, .out_u(a_u), .out_l(a_l)
  );

  // ---- forward FFT, natural-order folding set ----
  logic [PB-1:0] fft_pos, pm_pos, ifft_pos;
  cplx_t         f_u, f_l, z_u, z_l, y_u, y_l;

  assign fft_pos  = PB'(t - LOGN'(PRE_D));
  assign pm_pos   = fft_pos - PB'(FFT_LAT);
  assign ifft_pos = pm_pos - PB'(PIPE);

  mdc_fft #(.N(N), .PIPE(PIPE)) u_fft (
    .clk, .rst_n, .en, .pos(fft_pos),
    .in_u(a_u), .in_l(a_l), .out_u(f_u), .out_l(f_l)
  );

  // ---- pointwise product with H, straight from the FFT, no buffer ----
  pointwise_mult #(.N(N), .PIPE(PIPE)) u_pm (
    .clk, .rst_n, .en, .pos(pm_pos),
    .h_bin_u, .h_bin_l, .h_u, .h_l,
    .in_u(f_u), .in_l(f_l), .out_u(z_u), .out_l(z_l)
  );

  // ---- inverse FFT, ASAP (bit-reversed) folding set ----
  asap_ifft #(.N(N), .PIPE(PIPE)) u_ifft (
    .clk, .rst_n, .en, .pos(ifft_pos),
    .in_u(z_u), .in_l(z_l), .out_u(y_u), .out_l(y_l)
  );

  // ---- channel de-interleaving (2 channels only) ----
  if (CHANNELS == 2) begin : g_deint
    logic [LOGN-1:0] q;
    assign q = t - LOGN'(IFFT_OUT);
    dsd #(.D(POST_D)) u_post (
      .clk, .rst_n, .en, .sw(q[LOGN-1]),
      .in_u(y_u), .in_l(y_l), .out_u(out_u), .out_l(out_l)
    );
  end else begin : g_direct
    assign out_u = y_u;
    assign out_l = y_l;
  end

endmodule
