`timescale 1ns/1ps
// tb_bitonic_ctrl: complete in-memory bitonic networks of several sizes.
// Unary networks with 16-bit streams must take exactly the cycle counts of the
// paper's Table 2 for bit-stream length 16: 26 (N=4), 76 (N=8), 538 (N=32); for
// N=16 the table prints 194 while its own formula S*(1+PC_b)+CP gives 204,
// which is what is checked. Binary networks (4-bit words) are checked against
// the same formula with this design's unit latency PC_b = 4*4+17 = 33.
// Every output of every random round is compared with a reference sort.
module tb_bitonic_ctrl;
  import imc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NH = 6;
  int c [NH], f [NH];
  logic fin [NH];
  int checks, failures;

  // PC_t = S*(1+PC_b) + 2*(S-1)*N/2
  bitonic_harness #(.N(4),  .ROWS(16), .MODE(MODE_UNARY),  .EXP_CYCLES(26))  h0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  bitonic_harness #(.N(8),  .ROWS(16), .MODE(MODE_UNARY),  .EXP_CYCLES(76))  h1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  bitonic_harness #(.N(16), .ROWS(16), .MODE(MODE_UNARY),  .EXP_CYCLES(204)) h2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  bitonic_harness #(.N(32), .ROWS(16), .MODE(MODE_UNARY),  .EXP_CYCLES(538)) h3 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .finished(fin[3]));
  bitonic_harness #(.N(4),  .ROWS(4),  .MODE(MODE_BINARY), .EXP_CYCLES(3*34 + 2*2*2))   h4 (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .finished(fin[4]));
  bitonic_harness #(.N(16), .ROWS(4),  .MODE(MODE_BINARY), .EXP_CYCLES(10*34 + 2*9*8))  h5 (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .finished(fin[5]));

  initial begin
    repeat (100000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < NH; i++) begin checks += c[i]; failures += f[i]; end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    checks = 0; failures = 0;
    for (int i = 0; i < NH; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
