// sti_pkg: types and constants shared by the STI-SNN accelerator.
//
// The accelerator is a streaming SNN inference engine that runs every layer for a
// single timestep. Weights are 8-bit integers, as in the paper. Convolution layers
// support three PE modes: standard, depthwise and pointwise convolution. The
// accumulator width and the threshold width are this design's choice (the paper
// gives no width): ACC_W = 24 bits holds the sum of up to 2^16 int8 weights.
package sti_pkg;

  localparam int unsigned WGT_W = 8;   // weight precision (Table V: Int8)
  localparam int unsigned ACC_W = 24;  // membrane potential / psum width (assumed)

  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Convolution mode of a layer's PEs (Fig. 8 (b), (c), (d)).
  typedef enum logic [1:0] {
    MODE_STD = 2'd0,   // standard convolution: accumulate over input channels
    MODE_DW  = 2'd1,   // depthwise: one input channel per filter, no accumulation
    MODE_PW  = 2'd2    // pointwise 1x1: accumulate, neuron compares psum directly
  } conv_mode_e;

  // Width of a spike event {last, row, col, spike vector} for a C x H x W map
  // (Sec. IV-E1: log2(H) + log2(W) + C bits, plus an end-of-frame flag).
  function automatic int unsigned ev_w(input int unsigned c, input int unsigned h,
                                       input int unsigned w);
    return 1 + clog2_min1(h) + clog2_min1(w) + c;
  endfunction

  function automatic int unsigned clog2_min1(input int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
