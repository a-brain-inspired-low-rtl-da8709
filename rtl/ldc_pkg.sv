// ldc_pkg: constants and types shared by the low-dimensional computing (LDC)
// classifier accelerator.
//
// The default sizes are those of the MNIST model, the design's main
// configuration: N = 784 features, K = 10 classes, value vectors of D_V = 4
// bits, feature/class vectors of D_F = 64 bits, and 8-bit feature values
// (256 possible values, so the value table has 256 entries). Another model,
// such as the 21-feature, 3-class cardiotocography model, is obtained by
// overriding the parameters of ldc_top.
//
// Bipolar elements are stored as bits: +1 is 0 and -1 is 1, so a bipolar
// product is an XOR. The load-target encoding and the controller states
// are choices of this design.
package ldc_pkg;

  localparam int unsigned LDC_N        = 784;  // features per sample
  localparam int unsigned LDC_K        = 10;   // classes
  localparam int unsigned LDC_DV       = 4;    // value vector dimension
  localparam int unsigned LDC_DF       = 64;   // feature / class vector dimension
  localparam int unsigned LDC_VAL_BITS = 8;    // quantized feature value width

  // Target of a host load word.
  typedef enum logic [1:0] {
    LD_SAMPLE  = 2'd0,   // sample buffer: one 8-bit feature value f_i
    LD_VALUE   = 2'd1,   // item memory, value table: V_f for value f
    LD_FEATURE = 2'd2,   // item memory, feature vectors: F_i
    LD_CLASS   = 2'd3    // associative memory: C_k
  } ld_sel_e;

  // Global-counter controller states.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,   // waiting for start
    ST_ENC   = 3'd1,   // counting i over the N features
    ST_DRAIN = 3'd2,   // one cycle while the last feature reaches the IM
    ST_CLS   = 3'd3,   // counting k over the K classes
    ST_FLUSH = 3'd4    // similarity pipeline drains
  } ctrl_state_e;

  // Address width that also works for a depth of 1.
  function automatic int unsigned addr_w(input int unsigned depth);
    return (depth <= 1) ? 1 : $clog2(depth);
  endfunction

endpackage
