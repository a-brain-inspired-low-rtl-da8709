// tb_ldc_popcount_tree: self-checking test of the tree adder.
// Widths 64 (power of two), 21 and 1; all-zero, all-one and random vectors,
// compared with a bit-by-bit count.
module tb_ldc_popcount_tree;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned WA = LDC_DF, WB = 21;

  int checks = 0, failures = 0;

  logic [WA-1:0]          ba;
  logic [WB-1:0]          bb;
  logic                   bc;
  logic [$clog2(WA+1)-1:0] ca;
  logic [$clog2(WB+1)-1:0] cb;
  logic                   cc;

  ldc_popcount_tree          dut_a (.bits(ba), .count(ca));
  ldc_popcount_tree #(.W(WB)) dut_b (.bits(bb), .count(cb));
  ldc_popcount_tree #(.W(1))  dut_c (.bits(bc), .count(cc));

  function automatic int ones(input logic [WA-1:0] v, input int w);
    int c = 0;
    for (int i = 0; i < w; i++) c += int'(v[i]);
    return c;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      ba = {32'($urandom), 32'($urandom)};
      bb = WB'($urandom);
      bc = 1'($urandom);
      if (t == 0) begin ba = '0; bb = '0; bc = 1'b0; end
      if (t == 1) begin ba = '1; bb = '1; bc = 1'b1; end
      #1;
      checks += 3;
      if (int'(ca) != ones(ba, WA)) begin failures++; $display("FAIL W=%0d got %0d", WA, ca); end
      if (int'(cb) != ones(WA'(bb), WB)) begin failures++; $display("FAIL W=%0d got %0d", WB, cb); end
      if (cc !== bc) begin failures++; $display("FAIL W=1"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
