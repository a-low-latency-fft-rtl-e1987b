// pointwise_mult: multiplies the FFT output by the filter spectrum H, bin by bin.
//
// At position k the FFT lanes carry bins b = bitrev(k) (upper) and b + N/2 (lower). The
// unit tells the coefficient source which bins it needs (h_bin_u, h_bin_l, combinational
// from pos) and multiplies each lane by the coefficient returned on h_u / h_l in the same
// cycle. H is thus an input of the cascade, as in the paper's figures, where it enters
// the two multipliers from outside; the bin-index handshake is this design's choice.
// With PIPE set the products are registered (one cycle), otherwise combinational.
module pointwise_mult
  import fft_pkg::*;
#(
  parameter int N    = 1024,
  parameter bit PIPE = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [$clog2(N)-2:0] pos,
  output logic [$clog2(N)-1:0] h_bin_u,
  output logic [$clog2(N)-1:0] h_bin_l,
  input  coef_t                h_u,
  input  coef_t                h_l,
  input  cplx_t                in_u,
  input  cplx_t                in_l,
  output cplx_t                out_u,
  output cplx_t                out_l
);

  localparam int PB = $clog2(N) - 1;

  logic [PB-1:0] b;
  cplx_t         pu, pl;

  always_comb begin
    for (int i = 0; i < PB; i++) b[i] = pos[PB-1-i];
  end
  assign h_bin_u = {1'b0, b};
  assign h_bin_l = {1'b1, b};

  cplx_mult u_mul_u (.a(in_u), .w(h_u), .p(pu));
  cplx_mult u_mul_l (.a(in_l), .w(h_l), .p(pl));

  if (PIPE) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        out_u <= '0;
        out_l <= '0;
      end else if (en) begin
        out_u <= pu;
        out_l <= pl;
      end
  end else begin : g_comb
    assign out_u = pu;
    assign out_l = pl;
  end

endmodule
