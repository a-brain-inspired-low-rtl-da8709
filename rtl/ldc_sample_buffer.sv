// ldc_sample_buffer: holds the query sample, N quantized feature values.
//
// The host writes the N feature values f_1..f_N (8 bits each, the value range
// [0,255]) before an inference. During encoding the global counter reads one
// value per cycle at address i; the value read addresses the value table of
// the item memory in the next cycle.
//
// Interface: one write port (we/waddr/wdata) and one read port (re/raddr);
// rdata is registered and appears the cycle after re, holding its value while
// re is low, like an FPGA block RAM. Contents are not reset.
//
// The architecture only shows the sample entering the item memory; holding it
// in a host-written buffer is a choice of this design.
module ldc_sample_buffer
  import ldc_pkg::*;
#(
  parameter int unsigned N        = LDC_N,
  parameter int unsigned VAL_BITS = LDC_VAL_BITS
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [addr_w(N)-1:0]  waddr,
  input  logic [VAL_BITS-1:0]   wdata,
  input  logic                  re,
  input  logic [addr_w(N)-1:0]  raddr,
  output logic [VAL_BITS-1:0]   rdata
);

  logic [VAL_BITS-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> (int'(waddr) < N));
  a_raddr: assert property (@(posedge clk) re |-> (int'(raddr) < N));

endmodule
