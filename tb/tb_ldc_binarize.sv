// tb_ldc_binarize: self-checking test of the threshold comparator.
// Two instances, N = 784 (even: a tie at N/2 is possible) and N = 21 (odd).
// The reference takes the sign of the bipolar sum N - 2*m with sgn(0) = +1,
// +1 encoded as bit 0. Counts at and around N/2 are always included.
module tb_ldc_binarize;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned DF = LDC_DF;
  localparam int unsigned NA = LDC_N, CWA = $clog2(NA + 1);
  localparam int unsigned NB = 21,    CWB = $clog2(NB + 1);

  int checks = 0, failures = 0;

  logic [DF-1:0][CWA-1:0] acc_a;
  logic [DF-1:0][CWB-1:0] acc_b;
  logic [DF-1:0]          sq_a, sq_b;

  ldc_binarize                   dut_a (.acc(acc_a), .sq(sq_a));
  ldc_binarize #(.N(NB), .DF(DF)) dut_b (.acc(acc_b), .sq(sq_b));

  function automatic logic ref_bit(input int n, input int m);
    return (n - 2 * m >= 0) ? 1'b0 : 1'b1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int d = 0; d < int'(DF); d++) begin
        int ma, mb;
        // first vectors sweep the counts around the threshold
        ma = (t < 4) ? int'(NA / 2) - 2 + t + (d % 2) : int'($urandom_range(NA));
        mb = (t < 4) ? int'(NB / 2) - 2 + t + (d % 2) : int'($urandom_range(NB));
        acc_a[d] = CWA'(ma);
        acc_b[d] = CWB'(mb);
      end
      #1;
      for (int d = 0; d < int'(DF); d++) begin
        checks += 2;
        if (sq_a[d] !== ref_bit(NA, int'(acc_a[d]))) begin
          failures++; $display("FAIL N=%0d m=%0d", NA, acc_a[d]);
        end
        if (sq_b[d] !== ref_bit(NB, int'(acc_b[d]))) begin
          failures++; $display("FAIL N=%0d m=%0d", NB, acc_b[d]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
