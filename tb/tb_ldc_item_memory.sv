// tb_ldc_item_memory: self-checking test of the item memory.
// Fills the N feature vectors and the 256-entry value table with random data,
// then reads both tables in the same cycles, as the encoder does, and checks
// the one-cycle latency and the hold behaviour of both read ports.
module tb_ldc_item_memory;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned N = LDC_N, DF = LDC_DF, DV = LDC_DV, VB = LDC_VAL_BITS;
  localparam int unsigned AW = addr_w(N), M = 1 << VB;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          f_we = 1'b0, v_we = 1'b0, f_re = 1'b0, v_re = 1'b0;
  logic [AW-1:0] f_waddr = '0, f_raddr = '0;
  logic [VB-1:0] v_waddr = '0, v_raddr = '0;
  logic [DF-1:0] f_wdata = '0, f_rdata;
  logic [DV-1:0] v_wdata = '0, v_rdata;
  logic [DF-1:0] ref_f [N];
  logic [DV-1:0] ref_v [M];

  ldc_item_memory dut (.*);

  function automatic logic [DF-1:0] rnd();
    logic [DF-1:0] v;
    for (int b = 0; b < int'(DF); b += 32) v = {v, 32'($urandom)};
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    // both tables are written in parallel
    for (int i = 0; i < int'(N); i++) begin
      ref_f[i] = rnd();
      f_we <= 1'b1; f_waddr <= AW'(i); f_wdata <= ref_f[i];
      if (i < int'(M)) begin
        ref_v[i] = DV'($urandom);
        v_we <= 1'b1; v_waddr <= VB'(i); v_wdata <= ref_v[i];
      end else begin
        v_we <= 1'b0;
      end
      @(posedge clk);
    end
    f_we <= 1'b0; v_we <= 1'b0;
    for (int n = 0; n < 2 * int'(N); n++) begin
      int a, v;
      a = (n < int'(N)) ? n : int'($urandom_range(N - 1));
      v = int'($urandom_range(M - 1));
      f_re <= 1'b1; f_raddr <= AW'(a);
      v_re <= 1'b1; v_raddr <= VB'(v);
      @(posedge clk);
      f_re <= 1'b0; v_re <= 1'b0;
      f_raddr <= AW'((a + 1) % N); v_raddr <= VB'(v + 1);
      #1;
      checks += 2;
      if (f_rdata !== ref_f[a]) begin failures++; $display("FAIL F_%0d", a); end
      if (v_rdata !== ref_v[v]) begin failures++; $display("FAIL V_%0d", v); end
      @(posedge clk);
      #1;
      checks += 2;
      if (f_rdata !== ref_f[a]) begin failures++; $display("FAIL hold F_%0d", a); end
      if (v_rdata !== ref_v[v]) begin failures++; $display("FAIL hold V_%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
