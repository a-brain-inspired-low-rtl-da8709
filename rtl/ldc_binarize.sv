// ldc_binarize: threshold comparator that turns the non-binary sample vector
// into the binary query vector S_q.
//
// Eq. (1) takes the sign of the bipolar sum N - 2*m_d in each dimension, with
// sgn(0) = +1. The comparator checks the number of agreeing (+1) products,
// p_d = N - m_d, against the threshold tau = N/2: p_d >= tau gives +1, stored
// as bit 0. That is equivalent to 2*m_d <= N, so the output bit is
// sq[d] = (2*m_d > N). Comparing with 2*m_d keeps tau = N/2 exact for odd N.
//
// Purely combinational; acc[d] is counter d of ldc_accumulator. The
// comparator and tau = N/2 follow the original accelerator; comparing 2*m_d
// with N is this design's way of keeping the tie rule exact.
module ldc_binarize
  import ldc_pkg::*;
#(
  parameter int unsigned N  = LDC_N,
  parameter int unsigned DF = LDC_DF,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [DF-1:0][CW-1:0] acc,
  output logic [DF-1:0]         sq
);

  always_comb begin
    for (int d = 0; d < int'(DF); d++) begin
      sq[d] = ({acc[d], 1'b0} > (CW + 1)'(N));
    end
  end

endmodule
