// tb_ldc_top: end-to-end test of the LDC accelerator at the size of the
// cardiotocography (CTG) model: N = 21 features, K = 3 classes, D_V = 4,
// D_F = 64. Six inferences with fresh random tables; expected latency
// N+K+4 = 28 cycles (0.14 us at 200 MHz). See ldc_e2e_body.svh.
module tb_ldc_top;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = 21, K = 3, DV = 4, DF = 64, VB = 8, RUNS = 6;

  `include "tb/ldc_e2e_body.svh"

  ldc_top #(.N(N), .K(K), .DV(DV), .DF(DF), .VAL_BITS(VB)) dut (.*);
  // watchdog
  initial begin
    repeat (40 * (RUNS + 1) * (4 * N + M + K + 100)) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
