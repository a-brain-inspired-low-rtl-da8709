// ldc_top: low-dimensional computing (LDC) classifier inference accelerator.
//
// An LDC classifier encodes a sample of N quantized features into a D_F-bit
// query vector S_q and compares it with K class vectors:
//   S_q = sgn( sum_i  F_i o stack_n(V_{f_i}) ),   hd_k = popcount(S_q ^ C_k)
// where V_f is the D_V-bit value vector of feature value f, F_i the D_F-bit
// feature vector of feature i, n = D_F/D_V, and the predicted class is the k
// with the smallest distance. All vectors are trained offline and loaded by
// the host.
//
// The datapath is sequential over the features so that a single multiplier
// suffices:
//   sample buffer -> item memory (F_i, V_{f_i}) -> XOR multiplier ->
//   accumulator ("non-binary S") -> threshold comparator (tau = N/2) -> S_q
//   associative memory (C_k) -> XOR multiplier -> tree adder -> hd_k
// One global-counter controller sequences both halves.
//
// Host interface (this design's choice):
//   * Load: while ready is high, ld_en writes ld_data (low bits used) to word
//     ld_addr of the memory chosen by ld_sel (ldc_pkg::ld_sel_e): the sample
//     value f_i, the value vector V_f, the feature vector F_i or the class
//     vector C_k.
//   * Run: a one-cycle start while ready is high. The K distances follow, one
//     per cycle, as hd_valid/hd_k/hd; done marks the last.
// Timing: start in cycle 0, hd for class k in cycle N+5+k, done in cycle
// N+K+4 (798 cycles, 3.99 us at 200 MHz, for N = 784, K = 10; 28 cycles for
// N = 21, K = 3). ready rises again in cycle N+K+5.
// Asynchronous active-low reset; memory contents survive it.
module ldc_top
  import ldc_pkg::*;
#(
  parameter int unsigned N        = LDC_N,
  parameter int unsigned K        = LDC_K,
  parameter int unsigned DV       = LDC_DV,
  parameter int unsigned DF       = LDC_DF,
  parameter int unsigned VAL_BITS = LDC_VAL_BITS,
  localparam int unsigned NW      = addr_w(N),
  localparam int unsigned KW      = addr_w(K),
  localparam int unsigned DW      = $clog2(DF + 1),
  localparam int unsigned LD_AW   = (NW > VAL_BITS) ? ((NW > KW) ? NW : KW)
                                                    : ((VAL_BITS > KW) ? VAL_BITS : KW),
  localparam int unsigned LD_DW   = (DF > VAL_BITS) ? DF : VAL_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  // host load port
  input  logic             ld_en,
  input  ld_sel_e          ld_sel,
  input  logic [LD_AW-1:0] ld_addr,
  input  logic [LD_DW-1:0] ld_data,
  // inference control
  input  logic             start,
  output logic             ready,
  // Hamming distances, one class per cycle
  output logic             hd_valid,
  output logic [KW-1:0]    hd_k,
  output logic [DW-1:0]    hd,
  output logic             done
);

  localparam int unsigned CW = $clog2(N + 1);

  // ---------------------------------------------------------------- control
  logic          samp_re, im_re, acc_clr, acc_en, am_re, sim_valid;
  logic [NW-1:0] samp_addr, im_addr;
  logic [KW-1:0] am_addr, sim_k;

  ldc_controller #(.N(N), .K(K)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .ready     (ready),
    .samp_re   (samp_re),
    .samp_addr (samp_addr),
    .im_re     (im_re),
    .im_addr   (im_addr),
    .acc_clr   (acc_clr),
    .acc_en    (acc_en),
    .am_re     (am_re),
    .am_addr   (am_addr),
    .sim_valid (sim_valid),
    .sim_k     (sim_k)
  );

  // ---------------------------------------------------------------- encoding
  logic [VAL_BITS-1:0]   f_val;
  logic [DF-1:0]         feat_vec, bound, sq;
  logic [DV-1:0]         val_vec;
  logic [DF-1:0][CW-1:0] acc;

  ldc_sample_buffer #(.N(N), .VAL_BITS(VAL_BITS)) u_sample (
    .clk   (clk),
    .we    (ld_en && ld_sel == LD_SAMPLE),
    .waddr (NW'(ld_addr)),
    .wdata (ld_data[VAL_BITS-1:0]),
    .re    (samp_re),
    .raddr (samp_addr),
    .rdata (f_val)
  );

  ldc_item_memory #(.N(N), .DF(DF), .DV(DV), .VAL_BITS(VAL_BITS)) u_im (
    .clk     (clk),
    .f_we    (ld_en && ld_sel == LD_FEATURE),
    .f_waddr (NW'(ld_addr)),
    .f_wdata (ld_data[DF-1:0]),
    .v_we    (ld_en && ld_sel == LD_VALUE),
    .v_waddr (ld_addr[VAL_BITS-1:0]),
    .v_wdata (ld_data[DV-1:0]),
    .f_re    (im_re),
    .f_raddr (im_addr),
    .f_rdata (feat_vec),
    .v_re    (im_re),
    .v_raddr (f_val),
    .v_rdata (val_vec)
  );

  ldc_mult #(.WA(DF), .WB(DV)) u_bind (
    .a (feat_vec),
    .b (val_vec),
    .y (bound)
  );

  ldc_accumulator #(.N(N), .DF(DF)) u_acc (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (acc_clr),
    .en    (acc_en),
    .bound (bound),
    .acc   (acc)
  );

  ldc_binarize #(.N(N), .DF(DF)) u_bin (
    .acc (acc),
    .sq  (sq)
  );

  // ------------------------------------------------------ similarity check
  logic [DF-1:0] class_vec;

  ldc_assoc_memory #(.K(K), .DF(DF)) u_am (
    .clk   (clk),
    .we    (ld_en && ld_sel == LD_CLASS),
    .waddr (KW'(ld_addr)),
    .wdata (ld_data[DF-1:0]),
    .re    (am_re),
    .raddr (am_addr),
    .rdata (class_vec)
  );

  ldc_similarity #(.K(K), .DF(DF)) u_sim (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (sim_valid),
    .in_k       (sim_k),
    .sq         (sq),
    .ck         (class_vec),
    .hd_valid (hd_valid),
    .hd_k     (hd_k),
    .hd       (hd)
  );

  assign done = hd_valid && (hd_k == KW'(K - 1));

  // Memories are written only while the datapath is idle.
  a_load_when_idle: assert property (@(posedge clk) disable iff (rst_n == 1'b0)
                                     ld_en |-> ready)
    else $error("ldc_top: load while an inference is running");

endmodule
