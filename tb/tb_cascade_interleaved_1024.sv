// tb_cascade_interleaved_1024: end-to-end run of the two-channel interleaved cascade ("Proposed II") at N = 1024.
//
// Three back-to-back frames of random samples go through the cascade with random input
// stalls (10% of cycles); every output sample is compared with a floating-point
// circular-convolution model and the first-output latency is checked against the
// closed-form value. Stalls and completed frames are counted and must both occur.
`timescale 1ns/1ps
module tb_cascade_interleaved_1024;
  import fft_pkg::*;

  localparam int N = 1024;
  localparam int FRAMES = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid, out_valid, done;
  cplx_t                in_u, in_l, out_u, out_l;
  logic [$clog2(N)-1:0] h_bin_u, h_bin_l, out_pos;
  coef_t                h_u, h_l;
  int                   chk, fail, stl, fout;
  real                  merr;
  int                   checks = 0, failures = 0;

  fft_ifft_cascade #(.CHANNELS(2)) u_dut (
    .clk, .rst_n, .in_valid, .in_u, .in_l, .h_bin_u, .h_bin_l, .h_u, .h_l,
    .out_valid, .out_pos, .out_u, .out_l
  );

  cascade_driver #(.N(N), .CHANNELS(2), .PIPE(1'b0), .FRAMES(FRAMES), .STALL_PCT(10)) u_drv (
    .clk, .rst_n, .in_valid, .in_u, .in_l, .h_bin_u, .h_bin_l, .h_u, .h_l,
    .out_valid, .out_pos, .out_u, .out_l,
    .done, .checks(chk), .failures(fail), .stalls(stl), .frames_out(fout), .max_err(merr)
  );

  task automatic report();
    $display("N=%0d CHANNELS=2: checks=%0d failures=%0d stalls=%0d frames=%0d max_err=%.2f LSB",
             N, chk, fail, stl, fout, merr);
    checks   += chk + 2;
    failures += fail;
    if (stl == 0) failures++;
    if (fout != FRAMES) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (2) @(posedge clk);
    report();
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: cascade did not finish");
    failures++;
    report();
  end

endmodule
