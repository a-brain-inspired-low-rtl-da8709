// ldc_assoc_memory: the associative memory (AM) of the LDC classifier.
//
// It holds the K trained class vectors C_1..C_K, D_F bits each (bipolar +1
// stored as 0, -1 as 1). During the similarity check the global counter reads
// one class vector per cycle at address k.
//
// Interface: a host write port and a read port. The read is synchronous:
// rdata appears the cycle after re and holds while re is low (block-RAM
// behaviour). Contents are not reset. The write port is this design's choice.
module ldc_assoc_memory
  import ldc_pkg::*;
#(
  parameter int unsigned K  = LDC_K,
  parameter int unsigned DF = LDC_DF
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [addr_w(K)-1:0]  waddr,
  input  logic [DF-1:0]         wdata,
  input  logic                  re,
  input  logic [addr_w(K)-1:0]  raddr,
  output logic [DF-1:0]         rdata
);

  logic [DF-1:0] mem [K];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> (int'(waddr) < K));
  a_raddr: assert property (@(posedge clk) re |-> (int'(raddr) < K));

endmodule
