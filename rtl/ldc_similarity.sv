// ldc_similarity: pipelined similarity check of the query vector against the
// class vectors, one class per cycle.
//
// For each class vector C_k coming out of the associative memory it computes
// the Hamming distance Hamm(S_q, C_k) * D_F = popcount(S_q XOR C_k): an XOR
// multiplier (ldc_mult with n = 1) followed by a tree adder
// (ldc_popcount_tree). The smallest distance marks the predicted class; the
// argmin itself is left to the host, which receives the K distances.
//
// Timing: C_k is presented with in_valid/in_k in cycle t. The XOR result is
// registered at the end of t, the popcount at the end of t+1, so hd_valid,
// hd_k and hd appear in cycle t+2. A new class can enter every cycle.
// The two register stages are this design's choice. Asynchronous active-low
// reset clears the valid flags.
module ldc_similarity
  import ldc_pkg::*;
#(
  parameter int unsigned K  = LDC_K,
  parameter int unsigned DF = LDC_DF,
  localparam int unsigned KW = addr_w(K),
  localparam int unsigned DW = $clog2(DF + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [KW-1:0] in_k,
  input  logic [DF-1:0] sq,
  input  logic [DF-1:0] ck,
  output logic          hd_valid,
  output logic [KW-1:0] hd_k,
  output logic [DW-1:0] hd
);

  logic [DF-1:0] prod, prod_q;
  logic          prod_valid;
  logic [KW-1:0] prod_k;
  logic [DW-1:0] count;

  ldc_mult #(.WA(DF), .WB(DF)) u_mult (
    .a (sq),
    .b (ck),
    .y (prod)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_valid <= 1'b0;
      prod_k     <= '0;
      prod_q     <= '0;
    end else begin
      prod_valid <= in_valid;
      if (in_valid) begin
        prod_k <= in_k;
        prod_q <= prod;
      end
    end
  end

  ldc_popcount_tree #(.W(DF)) u_tree (
    .bits  (prod_q),
    .count (count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd_valid <= 1'b0;
      hd_k     <= '0;
      hd       <= '0;
    end else begin
      hd_valid <= prod_valid;
      if (prod_valid) begin
        hd_k <= prod_k;
        hd   <= count;
      end
    end
  end

endmodule
