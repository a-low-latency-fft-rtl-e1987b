// tb_fft_ifft_cascade: end-to-end test of the FFT-IFFT cascade in four configurations.
//
// Single-stream (CHANNELS = 1) and two-channel interleaved (CHANNELS = 2) cascades, each
// with and without pipeline registers, run several back-to-back frames of random data
// through FFT, H product and IFFT, with random input stalls on two of them. Each output
// is compared with a floating-point circular-convolution model and the first-output
// latency is checked (1.25N - 2 and 2N - 2 cycles without pipeline registers). It also
// counts that each mechanism occurred: stalls, back-to-back frames, both channel modes.
`timescale 1ns/1ps
module tb_fft_ifft_cascade;
  import fft_pkg::*;

  localparam int NCFG = 4;
  localparam int CN [NCFG] = '{16, 16, 64, 32};
  localparam int CC [NCFG] = '{1, 2, 1, 2};
  localparam bit CP [NCFG] = '{1'b0, 1'b0, 1'b1, 1'b1};
  localparam int CS [NCFG] = '{0, 20, 15, 0};
  localparam int FRAMES = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done   [NCFG];
  int   chk    [NCFG];
  int   fail   [NCFG];
  int   stl    [NCFG];
  int   fout   [NCFG];
  real  merr   [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int N = CN[g];
    logic                 in_valid, out_valid;
    cplx_t                in_u, in_l, out_u, out_l;
    logic [$clog2(N)-1:0] h_bin_u, h_bin_l, out_pos;
    coef_t                h_u, h_l;

    fft_ifft_cascade #(.N(N), .CHANNELS(CC[g]), .PIPE(CP[g])) u_dut (
      .clk, .rst_n, .in_valid, .in_u, .in_l, .h_bin_u, .h_bin_l, .h_u, .h_l,
      .out_valid, .out_pos, .out_u, .out_l
    );

    cascade_driver #(.N(N), .CHANNELS(CC[g]), .PIPE(CP[g]), .FRAMES(FRAMES),
                     .STALL_PCT(CS[g])) u_drv (
      .clk, .rst_n, .in_valid, .in_u, .in_l, .h_bin_u, .h_bin_l, .h_u, .h_l,
      .out_valid, .out_pos, .out_u, .out_l,
      .done(done[g]), .checks(chk[g]), .failures(fail[g]), .stalls(stl[g]),
      .frames_out(fout[g]), .max_err(merr[g])
    );
  end

  int checks = 0, failures = 0;

  task automatic report();
    int stall_runs = 0, ch2_runs = 0, multi = 0;
    for (int g = 0; g < NCFG; g++) begin
      $display("config %0d: N=%0d CHANNELS=%0d PIPE=%0d checks=%0d failures=%0d stalls=%0d frames=%0d max_err=%.2f LSB",
               g, CN[g], CC[g], CP[g], chk[g], fail[g], stl[g], fout[g], merr[g]);
      checks   += chk[g];
      failures += fail[g];
      if (stl[g] > 0) stall_runs++;
      if (CC[g] == 2 && fout[g] == FRAMES) ch2_runs++;
      if (fout[g] >= 2) multi++;
    end
    $display("mechanisms: stalled runs=%0d, two-channel runs=%0d, back-to-back multi-frame runs=%0d",
             stall_runs, ch2_runs, multi);
    checks += 3;
    if (stall_runs == 0) failures++;
    if (ch2_runs == 0) failures++;
    if (multi != NCFG) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);
    repeat (2) @(posedge clk);
    report();
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: not all configurations finished");
    failures++;
    report();
  end

endmodule
