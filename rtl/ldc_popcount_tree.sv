// ldc_popcount_tree: tree adder that counts the ones of a W-bit vector.
//
// Used on S_q XOR C_k it gives the Hamming distance between the query vector
// and a class vector. The input is padded with zeros to P, the next power of
// two. Level 0 holds the P single bits; each of the P/2^l adders of level l
// adds two neighbouring sums of level l-1, so sums grow by one bit per level
// and the count leaves a balanced binary tree of $clog2(P) adder levels.
// Purely combinational. Counting with a tree of adders follows the original
// accelerator; the zero padding is this design's choice.
module ldc_popcount_tree
  import ldc_pkg::*;
#(
  parameter int unsigned W = LDC_DF
) (
  input  logic [W-1:0]           bits,
  output logic [$clog2(W+1)-1:0] count
);

  localparam int unsigned OW     = $clog2(W + 1);
  localparam int unsigned LEVELS = (W <= 1) ? 0 : $clog2(W);
  localparam int unsigned P      = 1 << LEVELS;

  for (genvar l = 0; l <= int'(LEVELS); l++) begin : g_lvl
    // P >> l sums of l+1 bits each
    logic [(P >> l)-1:0][l:0] s;
    if (l == 0) begin : g_leaf
      assign s = (P)'(bits);
    end else begin : g_add
      for (genvar j = 0; j < int'(P >> l); j++) begin : g_node
        assign s[j] = (l + 1)'(g_lvl[l-1].s[2*j]) + (l + 1)'(g_lvl[l-1].s[2*j+1]);
      end
    end
  end

  assign count = OW'(g_lvl[LEVELS].s[0]);

endmodule
