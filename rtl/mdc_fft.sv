// mdc_fft: 2-parallel folded radix-2 DIF FFT (feed-forward, multi-path delay commutator).
//
// log2(N) stages A, B, C, ...; each is one butterfly plus a twiddle multiplier on the
// difference output (fft_stage), and between stage s and s+1 sits a DSD unit of size
// N/2^(s+2) (N/4, N/8, ..., 1). This is the folding set of the paper's Eq. (1): every
// stage executes its N/2 butterflies in natural order, one per cycle, and stage s+1
// starts N/2^(s+2) cycles after stage s.
// Input: on the cycle with pos = k the lanes carry the pair (x_k, x_{k+N/2}) of butterfly
// A_k. Output, mdc_latency(N, PIPE) cycles later: on output position k the lanes carry
// (X_b, X_{b+N/2}) with b = bitrev(k) over log2(N)-1 bits, i.e. the spectrum in
// bit-reversed order. The output is scaled by 1/N (one halving per butterfly stage).
// Frames follow each other without gaps; pos counts enabled cycles modulo N/2 and
// defines the frame phase. Everything advances only on en.
module mdc_fft
  import fft_pkg::*;
#(
  parameter int N    = 1024,
  parameter bit PIPE = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [$clog2(N)-2:0] pos,     // index of the butterfly at the input
  input  cplx_t                in_u,
  input  cplx_t                in_l,
  output cplx_t                out_u,
  output cplx_t                out_l
);

  localparam int LOGN = $clog2(N);
  localparam int PB   = LOGN - 1;

  initial assert (N >= 4 && (1 << LOGN) == N) else $fatal(1, "mdc_fft: N must be a power of two >= 4");

  // Cycles from the input of stage 0 to the input of stage s.
  function automatic int stage_offset(int s);
    int o = 0;
    for (int i = 0; i < s; i++) o += (N >> (i + 2)) + int'(PIPE);
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

    fft_stage #(.N(N), .STAGE(s), .INVERSE(1'b0), .BITREV(1'b0), .PIPE(PIPE)) u_stage (
      .clk, .rst_n, .en, .pos(p), .a(xu[s]), .b(xl[s]), .u(bu), .l(bl)
    );

    if (s < LOGN - 1) begin : g_dsd
      localparam int D  = N >> (s + 2);
      localparam int DB = $clog2(D);
      logic [PB-1:0] pd;
      assign pd = p - PB'(PIPE);
      dsd #(.D(D)) u_dsd (
        .clk, .rst_n, .en, .sw(pd[DB]),
        .in_u(bu), .in_l(bl), .out_u(xu[s+1]), .out_l(xl[s+1])
      );
    end else begin : g_out
      assign out_u = bu;
      assign out_l = bl;
    end
  end

endmodule
