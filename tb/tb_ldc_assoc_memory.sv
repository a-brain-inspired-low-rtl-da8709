// tb_ldc_assoc_memory: self-checking test of the associative memory.
// Writes K random class vectors, reads each back (one-cycle latency), checks
// that rdata holds while re is low and that a rewrite takes effect.
module tb_ldc_assoc_memory;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned K = LDC_K, DF = LDC_DF, AW = addr_w(K);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DF-1:0] wdata = '0, rdata;
  logic [DF-1:0] ref_mem [K];

  ldc_assoc_memory dut (.*);

  function automatic logic [DF-1:0] rnd();
    logic [DF-1:0] v;
    for (int b = 0; b < int'(DF); b += 32) v = {v, 32'($urandom)};
    return v;
  endfunction

  task automatic check(input logic [DF-1:0] got, input logic [DF-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic write_all();
    for (int k = 0; k < int'(K); k++) begin
      ref_mem[k] = rnd();
      we <= 1'b1; waddr <= AW'(k); wdata <= ref_mem[k];
      @(posedge clk);
    end
    we <= 1'b0;
  endtask

  task automatic read_all();
    for (int k = int'(K) - 1; k >= 0; k--) begin
      re <= 1'b1; raddr <= AW'(k);
      @(posedge clk);
      re <= 1'b0;
      #1 check(rdata, ref_mem[k], $sformatf("read C_%0d", k));
      @(posedge clk);
      #1 check(rdata, ref_mem[k], $sformatf("hold C_%0d", k));
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    write_all();
    read_all();
    write_all();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
