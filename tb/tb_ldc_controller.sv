// tb_ldc_controller: self-checking test of the global-counter controller.
// For several starts it records, cycle by cycle, every strobe and address and
// compares them with the expected timeline (cycle 0 = start accepted):
// samp_re at 1..N with i = c-1, im_re at 2..N+1 with i = c-2, acc_en at
// 3..N+2, acc_clr at 0, am_re at N+2..N+K+1 with k = c-N-2, sim_valid at
// N+3..N+K+2, ready low from 1 to N+K+4.
module tb_ldc_controller;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = LDC_N, K = LDC_K, NW = addr_w(N), KW = addr_w(K);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          rst_n = 1'b0, start = 1'b0, ready;
  logic          samp_re, im_re, acc_clr, acc_en, am_re, sim_valid;
  logic [NW-1:0] samp_addr, im_addr;
  logic [KW-1:0] am_addr, sim_k;

  ldc_controller dut (.*);

  task automatic chk(input bit cond, input string what, input int c);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, c);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int run = 0; run < 3; run++) begin
      int n = int'(N), k = int'(K);
      repeat (run) @(posedge clk);
      #1 chk(ready, "ready before start", -1);
      start <= 1'b1;
      for (int c = 0; c <= n + k + 6; c++) begin
        #1;
        chk(acc_clr == (c == 0), "acc_clr", c);
        chk(ready == (c == 0 || c > n + k + 4), "ready", c);
        chk(samp_re == (c >= 1 && c <= n), "samp_re", c);
        if (samp_re) chk(int'(samp_addr) == c - 1, "samp_addr", c);
        chk(im_re == (c >= 2 && c <= n + 1), "im_re", c);
        if (im_re) chk(int'(im_addr) == c - 2, "im_addr", c);
        chk(acc_en == (c >= 3 && c <= n + 2), "acc_en", c);
        chk(am_re == (c >= n + 2 && c <= n + k + 1), "am_re", c);
        if (am_re) chk(int'(am_addr) == c - n - 2, "am_addr", c);
        chk(sim_valid == (c >= n + 3 && c <= n + k + 2), "sim_valid", c);
        if (sim_valid) chk(int'(sim_k) == c - n - 3, "sim_k", c);
        @(posedge clk);
        start <= 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
