// ldc_accumulator: the adder and "non-binary S" register of the encoder.
//
// It keeps one counter per dimension of the sample vector (D_F counters). Each
// cycle with en high it adds the bound vector F_i o V_{f_i} produced by the
// XOR multiplier: counter d grows by one when bit d is 1, i.e. when the
// bipolar product is -1. After the N features, counter d holds m_d, the number
// of -1 products, so the bipolar sum of Eq. (1) in dimension d is N - 2*m_d.
//
// Interface: clr (synchronous, first in priority) zeroes all counters at the
// start of an inference; en adds bound in the same clock edge. acc is the
// registered counter array, counter d in acc[d]. Counters are $clog2(N+1)
// bits, enough for N additions. Asynchronous active-low reset.
// The adder with feedback follows the original accelerator; counting the -1
// products, the counter width and the reset are this design's choices.
module ldc_accumulator
  import ldc_pkg::*;
#(
  parameter int unsigned N  = LDC_N,
  parameter int unsigned DF = LDC_DF,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  en,
  input  logic [DF-1:0]         bound,
  output logic [DF-1:0][CW-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clr) begin
      acc <= '0;
    end else if (en) begin
      for (int d = 0; d < int'(DF); d++) begin
        acc[d] <= acc[d] + CW'(bound[d]);
      end
    end
  end

endmodule
