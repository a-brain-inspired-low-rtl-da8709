// tb_ldc_accumulator: self-checking test of the encoder accumulator.
// Runs N additions of random bound vectors with en toggling at random, then a
// clear, and compares every counter with an integer model after each cycle.
// A second inference with all-ones vectors checks the counter reaches N
// without overflow.
module tb_ldc_accumulator;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = LDC_N, DF = LDC_DF, CW = $clog2(N + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                  rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [DF-1:0]         bound = '0;
  logic [DF-1:0][CW-1:0] acc;
  int                    model [DF];

  ldc_accumulator dut (.*);

  function automatic logic [DF-1:0] rnd();
    logic [DF-1:0] v;
    for (int b = 0; b < int'(DF); b += 32) v = {v, 32'($urandom)};
    return v;
  endfunction

  task automatic compare(input string what);
    for (int d = 0; d < int'(DF); d++) begin
      checks++;
      if (int'(acc[d]) != model[d]) begin
        failures++;
        if (failures < 10) $display("FAIL %s d=%0d got %0d expected %0d", what, d, acc[d], model[d]);
      end
    end
  endtask

  task automatic run(input bit all_ones);
    int added;
    clr <= 1'b1; en <= 1'b0;
    @(posedge clk);
    clr <= 1'b0;
    foreach (model[d]) model[d] = 0;
    #1 compare("clear");
    added = 0;
    while (added < int'(N)) begin
      logic e;
      logic [DF-1:0] b;
      e = all_ones ? 1'b1 : 1'($urandom_range(3) != 0);
      b = all_ones ? '1 : rnd();
      en <= e; bound <= b;
      @(posedge clk);
      if (e) begin
        added++;
        for (int d = 0; d < int'(DF); d++) model[d] += int'(b[d]);
      end
      #1 compare("add");
    end
    en <= 1'b0;
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
    @(posedge clk);
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
