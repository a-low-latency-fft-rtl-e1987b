// tb_asap_ifft: checks the ASAP IFFT: bit-reversed spectrum pairs in, natural-order time samples out.
//
// Three configurations (N = 16 without and with pipeline registers, N = 64 with random
// enable stalls) each run three back-to-back frames of random data; every output pair
// is compared, on the exact cycle the latency N/2 - 1 (+ log2 N with registers) predicts,
// with a double-precision DFT scaled by 1/N.
`timescale 1ns/1ps
module tb_asap_ifft;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done [3];
  int   chk  [3];
  int   fail [3];
  int   checks = 0, failures = 0;

  xform_checker #(.N(16), .PIPE(1'b0), .INV(1'b1))                 u_c0 (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  xform_checker #(.N(16), .PIPE(1'b1), .INV(1'b1))                 u_c1 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  xform_checker #(.N(64), .PIPE(1'b0), .INV(1'b1), .STALL_PCT(20)) u_c2 (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]));

  task automatic report();
    for (int g = 0; g < 3; g++) begin
      checks   += chk[g];
      failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2]);
    report();
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    report();
  end
endmodule
