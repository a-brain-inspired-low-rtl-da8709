// tb_ldc_mult: self-checking test of the XOR multiplier.
// Two instances: binding (64-bit feature vector, 4-bit value vector stacked
// 16 times) and bitwise product (64 x 64). The reference multiplies the
// bipolar values (+1 for bit 0, -1 for bit 1) as integers.
module tb_ldc_mult;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned DF = LDC_DF, DV = LDC_DV;

  int checks = 0, failures = 0;

  logic [DF-1:0] a1, y1, a2, b2, y2;
  logic [DV-1:0] b1;

  ldc_mult                     dut_bind (.a(a1), .b(b1), .y(y1));
  ldc_mult #(.WA(DF), .WB(DF)) dut_sim  (.a(a2), .b(b2), .y(y2));

  function automatic int bip(input logic x);
    return x ? -1 : 1;
  endfunction

  function automatic logic [DF-1:0] rnd();
    logic [DF-1:0] v;
    for (int b = 0; b < int'(DF); b += 32) v = {v, 32'($urandom)};
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      a1 = rnd(); b1 = DV'($urandom); a2 = rnd(); b2 = rnd();
      if (t == 0) begin a1 = '0; b1 = '1; a2 = '1; b2 = '1; end
      #1;
      for (int d = 0; d < int'(DF); d++) begin
        int p1, p2;
        p1 = bip(a1[d]) * bip(b1[d % DV]);
        p2 = bip(a2[d]) * bip(b2[d]);
        checks += 2;
        if (bip(y1[d]) != p1) begin failures++; $display("FAIL bind t=%0d d=%0d", t, d); end
        if (bip(y2[d]) != p2) begin failures++; $display("FAIL sim t=%0d d=%0d", t, d); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
