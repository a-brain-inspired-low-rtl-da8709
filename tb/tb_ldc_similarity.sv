// tb_ldc_similarity: self-checking test of the similarity pipeline.
// Streams the K class vectors one per cycle against a random query, with a
// gap between two bursts, and checks every Hamming distance, its class index
// and the two-cycle latency from in_valid to hd_valid.
module tb_ldc_similarity;
  timeunit 1ns;
  timeprecision 1ps;
  import ldc_pkg::*;
  localparam int unsigned K = LDC_K, DF = LDC_DF, KW = addr_w(K), DW = $clog2(DF + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          rst_n = 1'b0, in_valid = 1'b0;
  logic [KW-1:0] in_k = '0;
  logic [DF-1:0] sq = '0, ck = '0;
  logic          hd_valid;
  logic [KW-1:0] hd_k;
  logic [DW-1:0] hd;

  ldc_similarity dut (.*);

  // expected results, indexed by the cycle they must appear in
  int exp_hd [int];
  int exp_k  [int];
  int cycle = 0, seen = 0;

  function automatic int hamming(input logic [DF-1:0] a, input logic [DF-1:0] b);
    int c = 0;
    for (int d = 0; d < int'(DF); d++) c += (a[d] != b[d]) ? 1 : 0;
    return c;
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  // outputs are checked mid-cycle, when 'cycle' numbers the current cycle
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (hd_valid != exp_hd.exists(cycle)) begin
        failures++;
        $display("FAIL cycle %0d: hd_valid=%0b", cycle, hd_valid);
      end else if (hd_valid) begin
        seen++;
        checks += 2;
        if (int'(hd) != exp_hd[cycle]) begin failures++; $display("FAIL hd got %0d exp %0d", hd, exp_hd[cycle]); end
        if (int'(hd_k) != exp_k[cycle]) begin failures++; $display("FAIL hd_k got %0d exp %0d", hd_k, exp_k[cycle]); end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  task automatic burst(input int gap_at);
    sq <= {32'($urandom), 32'($urandom)};
    tick();
    for (int k = 0; k < int'(K); k++) begin
      logic [DF-1:0] c;
      if (k == gap_at) begin
        in_valid <= 1'b0;
        tick();
      end
      c = {32'($urandom), 32'($urandom)};
      if (k == 0) c = sq;          // distance 0
      if (k == 1) c = ~sq;         // distance DF
      in_valid <= 1'b1; in_k <= KW'(k); ck <= c;
      // presented in the cycle numbered 'cycle'; visible two cycles later
      exp_hd[cycle + 2] = hamming(sq, c);
      exp_k[cycle + 2]  = k;
      tick();
    end
    in_valid <= 1'b0;
    repeat (4) tick();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 20; r++) burst((r % 2) ? 3 : -1);
    checks++;
    if (seen != 20 * int'(K)) begin failures++; $display("FAIL saw %0d distances", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
