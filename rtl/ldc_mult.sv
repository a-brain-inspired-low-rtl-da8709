// ldc_mult: bipolar multiplication of two binary-coded vectors by XOR.
//
// With +1 stored as 0 and -1 as 1, the product of two bipolar elements is the
// XOR of their bits. Operand b is WB bits wide and is stacked WA/WB times to
// line up with the WA-bit operand a: y[d] = a[d] ^ b[d mod WB].
//   * In the encoder (WA = D_F, WB = D_V) this is the element-wise binding of
//     feature vector F_i with its value vector V_{f_i}: each of the n = D_F/D_V
//     sub-vectors F_i^j is multiplied with the same V_{f_i}.
//   * In the similarity check (WA = WB = D_F) it is the plain bitwise product
//     of the query vector S_q and a class vector C_k.
// Purely combinational. WA must be a multiple of WB. XOR multiplication and
// the stacking of the value vector follow the original design.
module ldc_mult
  import ldc_pkg::*;
#(
  parameter int unsigned WA = LDC_DF,
  parameter int unsigned WB = LDC_DV
) (
  input  logic [WA-1:0] a,
  input  logic [WB-1:0] b,
  output logic [WA-1:0] y
);

  localparam int unsigned REP = WA / WB;  // n, number of stacked copies

  initial begin
    if (WA % WB != 0) $error("ldc_mult: WA (%0d) must be a multiple of WB (%0d)", WA, WB);
  end

  assign y = a ^ {REP{b}};

endmodule
