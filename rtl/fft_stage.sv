// fft_stage: one folded radix-2 DIF stage of a 2-parallel FFT or IFFT: a bf2 butterfly
// followed by the twiddle multiplication of its difference output.
//
// Stage STAGE (0 = A) of an N-point transform has N/2 butterflies, all folded onto this
// one butterfly; pos tells which one is at the input this cycle. Butterfly j of stage s
// has twiddle W_N^(m * 2^s) with m = j mod N/2^(s+1) (conjugated for the IFFT). The FFT
// processes its butterflies in natural order (j = pos); the ASAP IFFT processes them in
// bit-reversed order (j = bitrev(pos)), set by BITREV. The twiddle table has N/2^(s+1)
// entries computed at elaboration (fft_pkg::twiddle); the last stage has none (W = 1).
// With PIPE set both outputs are registered (one cycle); otherwise the stage is
// combinational, as in the paper's schedules where a butterfly takes no cycle.
module fft_stage
  import fft_pkg::*;
#(
  parameter int N       = 16,
  parameter int STAGE   = 0,
  parameter bit INVERSE = 1'b0,
  parameter bit BITREV  = 1'b0,
  parameter bit PIPE    = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [$clog2(N)-2:0]     pos,
  input  cplx_t                    a,
  input  cplx_t                    b,
  output cplx_t                    u,
  output cplx_t                    l
);

  localparam int LOGN = $clog2(N);
  localparam int PB   = LOGN - 1;          // bits of a butterfly index
  localparam int M    = N >> (STAGE + 1);  // distinct twiddles in this stage

  cplx_t s, d, dt;

  bf2 u_bf (.a, .b, .s, .d);

  if (M > 1) begin : g_tw
    localparam int MB = $clog2(M);
    coef_t          rom [M];
    logic [PB-1:0]  j;
    coef_t          w;

    for (genvar k = 0; k < M; k++) begin : g_rom
      localparam coef_t WK = twiddle(k << STAGE, N, INVERSE);
      assign rom[k] = WK;
    end

    always_comb begin
      for (int i = 0; i < PB; i++) j[i] = BITREV ? pos[PB-1-i] : pos[i];
    end
    assign w = rom[j[MB-1:0]];

    cplx_mult u_mul (.a(d), .w, .p(dt));
  end else begin : g_notw
    assign dt = d;
  end

  if (PIPE) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        u <= '0;
        l <= '0;
      end else if (en) begin
        u <= s;
        l <= dt;
      end
  end else begin : g_comb
    assign u = s;
    assign l = dt;
  end

endmodule
