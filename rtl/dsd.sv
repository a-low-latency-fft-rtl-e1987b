// dsd: delay-switch-delay commutator between two 2-parallel lanes.
//
// The lower input is first delayed by D cycles; a 2x2 switch then either passes both
// lanes straight (sw = 0) or crosses them (sw = 1); finally the upper lane is delayed by
// D cycles. With sw toggled every D enabled cycles this pairs on one cycle two samples
// that entered D cycles apart, which is how a folded DIF stage hands butterfly outputs to
// the next stage, and (with D = N/4 or N/2) how the input is regrouped or two channels are
// interleaved and de-interleaved. Memory: 2*D words; two 2:1 multiplexers. The caller
// supplies sw from its position counter. out_l follows in_u combinationally when
// crossed, out_u is always a delay-line output. All state advances only when en is high.
// The unit and its delay sizes follow the paper; the switch-control convention is this
// design's.
module dsd
  import fft_pkg::*;
#(
  parameter int D = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  sw,       // 1: cross the lanes this cycle
  input  cplx_t in_u,
  input  cplx_t in_l,
  output cplx_t out_u,
  output cplx_t out_l
);

  cplx_t ld, su, sl;

  delay_line #(.W($bits(cplx_t)), .D(D)) u_dl_in (
    .clk, .rst_n, .en, .din(in_l), .dout(ld)
  );

  always_comb begin
    su = sw ? ld   : in_u;
    sl = sw ? in_u : ld;
  end

  delay_line #(.W($bits(cplx_t)), .D(D)) u_dl_out (
    .clk, .rst_n, .en, .din(su), .dout(out_u)
  );

  assign out_l = sl;

endmodule
