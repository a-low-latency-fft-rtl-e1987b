// asap_ifft: 2-parallel folded radix-2 DIF IFFT with the ASAP folding set, the unit that
// lets the FFT output feed the IFFT with no reorder buffer between them.
//
// The FFT delivers its spectrum in bit-reversed order: at position k the pair
// (Y_b, Y_{b+N/2}), b = bitrev(k), which is exactly the input pair of IFFT butterfly A_b.
// So stage A takes the butterflies in bit-reversed order as they arrive, and so does
// every later stage (paper Eq. (3): even butterflies first, then odd). In that order the
// two partners of a stage-s+1 butterfly leave stage s 2^s cycles apart, so the DSD sizes
// run 1, 2, 4, ..., N/4 -- the reverse of the FFT -- and the total delay is the same
// N/2 - 1 cycles. The twiddles are conjugated and indexed by bitrev(pos).
// Input: on position k the pair (Y_bitrev(k), Y_bitrev(k)+N/2). Output,
// mdc_latency(N, PIPE) cycles later: on output position k the pair (y_k, y_{k+N/2}),
// i.e. time samples in natural order, scaled by 1/N. Everything advances only on en.
module asap_ifft
  import fft_pkg::*;
#(
  parameter int N    = 1024,
  parameter bit PIPE = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [$clog2(N)-2:0] pos,     // position (arrival index) of the input pair
  input  cplx_t                in_u,
  input  cplx_t                in_l,
  output cplx_t                out_u,
  output cplx_t                out_l
);

  localparam int LOGN = $clog2(N);
  localparam int PB   = LOGN - 1;

  initial assert (N >= 4 && (1 << LOGN) == N) else $fatal(1, "asap_ifft: N must be a power of two >= 4");

  function automatic int stage_offset(int s);
    int o = 0;
    for (int i = 0; i < s; i++) o += (1 << i) + int'(PIPE);
    return o;
  endfunction

  cplx_t xu [LOGN];
  cplx_t xl [LOGN];

  assign xu[0] = in_u;
  assign xl[0] = in_l;

  for (genvar s = 0; s < LOGN; s++) begin : g_st
    localparam int OFF = stage_offset(s);
    logic [PB-1:0] p;
    cplx_t         bu, bl;

    assign p = pos - PB'(OFF);

    fft_stage #(.N(N), .STAGE(s), .INVERSE(1'b1), .BITREV(1'b1), .PIPE(PIPE)) u_stage (
      .clk, .rst_n, .en, .pos(p), .a(xu[s]), .b(xl[s]), .u(bu), .l(bl)
    );

    if (s < LOGN - 1) begin : g_dsd
      localparam int D = 1 << s;
      logic [PB-1:0] pd;
      assign pd = p - PB'(PIPE);
      dsd #(.D(D)) u_dsd (
        .clk, .rst_n, .en, .sw(pd[s]),
        .in_u(bu), .in_l(bl), .out_u(xu[s+1]), .out_l(xl[s+1])
      );
    end else begin : g_out
      assign out_u = bu;
      assign out_l = bl;
    end
  end

endmodule
