// tb_ldc_sample_buffer: self-checking test of the sample buffer.
// Writes N random 8-bit feature values, reads them back in a shuffled order,
// checks the one-cycle read latency and that rdata holds while re is low.
module tb_ldc_sample_buffer;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = LDC_N, VB = LDC_VAL_BITS, AW = addr_w(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [VB-1:0] wdata = '0, rdata;
  logic [VB-1:0] ref_mem [N];

  ldc_sample_buffer dut (.*);

  task automatic check(input logic [VB-1:0] got, input logic [VB-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int i = 0; i < int'(N); i++) begin
      ref_mem[i] = VB'($urandom);
      we <= 1'b1; waddr <= AW'(i); wdata <= ref_mem[i];
      @(posedge clk);
    end
    we <= 1'b0;
    for (int n = 0; n < 2 * int'(N); n++) begin
      int a;
      a = (n < int'(N)) ? n : int'($urandom_range(N - 1));
      re <= 1'b1; raddr <= AW'(a);
      @(posedge clk);
      re <= 1'b0;
      #1 check(rdata, ref_mem[a], $sformatf("read %0d", a));
      // rdata must hold while re is low
      raddr <= AW'((a + 1) % N);
      @(posedge clk);
      #1 check(rdata, ref_mem[a], $sformatf("hold %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
