// ldc_item_memory: the item memory (IM) of the LDC classifier.
//
// It holds the two trained tables used for encoding:
//   * the N feature vectors F_1..F_N, D_F bits each, addressed by the
//     feature index i;
//   * the value table, the output of the trained ValueBox for each of the
//     2^VAL_BITS possible feature values, D_V bits each, addressed by the
//     feature value f_i. One value table is shared by all features.
// Bit d of a vector is its element d+1; bipolar +1 is stored as 0 and -1 as 1.
//
// Interface: a write port per table for the host, and a read port per table.
// Reads are synchronous: data appear the cycle after the enable and hold
// while it is low (block-RAM behaviour). Both tables can be read in the same
// cycle, which the encoder does: F_i and V_{f_i} arrive together.
// Contents are not reset. The host write ports are this design's choice.
module ldc_item_memory
  import ldc_pkg::*;
#(
  parameter int unsigned N        = LDC_N,
  parameter int unsigned DF       = LDC_DF,
  parameter int unsigned DV       = LDC_DV,
  parameter int unsigned VAL_BITS = LDC_VAL_BITS
) (
  input  logic                  clk,
  // host writes
  input  logic                  f_we,
  input  logic [addr_w(N)-1:0]  f_waddr,
  input  logic [DF-1:0]         f_wdata,
  input  logic                  v_we,
  input  logic [VAL_BITS-1:0]   v_waddr,
  input  logic [DV-1:0]         v_wdata,
  // reads
  input  logic                  f_re,
  input  logic [addr_w(N)-1:0]  f_raddr,
  output logic [DF-1:0]         f_rdata,
  input  logic                  v_re,
  input  logic [VAL_BITS-1:0]   v_raddr,
  output logic [DV-1:0]         v_rdata
);

  localparam int unsigned M = 1 << VAL_BITS;  // number of feature values

  logic [DF-1:0] feat_mem [N];
  logic [DV-1:0] val_mem  [M];

  always_ff @(posedge clk) begin
    if (f_we) feat_mem[f_waddr] <= f_wdata;
    if (f_re) f_rdata <= feat_mem[f_raddr];
  end

  always_ff @(posedge clk) begin
    if (v_we) val_mem[v_waddr] <= v_wdata;
    if (v_re) v_rdata <= val_mem[v_raddr];
  end

  a_f_waddr: assert property (@(posedge clk) f_we |-> (int'(f_waddr) < N));
  a_f_raddr: assert property (@(posedge clk) f_re |-> (int'(f_raddr) < N));

endmodule
