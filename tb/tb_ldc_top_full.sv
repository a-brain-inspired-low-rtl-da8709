// tb_ldc_top_full: end-to-end test of the LDC accelerator at its default
// (MNIST) size: N = 784 features, K = 10 classes, D_V = 4, D_F = 64. Two
// inferences, each repeated back to back; expected latency N+K+4 = 798
// cycles (3.99 us at 200 MHz). See ldc_e2e_body.svh.
module tb_ldc_top_full;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = LDC_N, K = LDC_K, DV = LDC_DV, DF = LDC_DF, VB = LDC_VAL_BITS;
  localparam int unsigned RUNS = 2;

  `include "tb/ldc_e2e_body.svh"

  ldc_top dut (.*);
  // watchdog
  initial begin
    repeat (40 * (RUNS + 1) * (4 * N + M + K + 100)) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
