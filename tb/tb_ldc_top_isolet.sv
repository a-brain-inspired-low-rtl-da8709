// tb_ldc_top_isolet: end-to-end test of the LDC accelerator at the size of
// the largest model of the evaluated set, the ISOLET voice-recognition model:
// N = 617 features, K = 26 classes, D_V = 4, D_F = 128 (n = 32). It also
// covers the UCIHAR model (N = 561, K = 6, same D_F), which differs only in
// size. Two inferences, each repeated back to back; expected latency
// N+K+4 = 647 cycles. See ldc_e2e_body.svh.
module tb_ldc_top_isolet;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = 617, K = 26, DV = 4, DF = 128, VB = 8, RUNS = 2;

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
