// qnn_pkg: types and constants shared by the quantized-network accelerator.
//
// The accelerator computes the hidden layers of a W1A3 network: weights are
// binary (+1/-1, stored as one bit, 1 = +1) and feature-map values are 3-bit
// unsigned integers (the layers use ReLU, so no value is negative). The dot
// products are accumulated in a 16-bit signed accumulator and turned back into
// a 3-bit value by comparing against 2^3-1 = 7 per-channel thresholds, which
// fold bias, batch normalisation, ReLU and requantisation into one step.
//
// The 1-bit weight, 3-bit activation and 16-bit accumulator widths follow the
// paper; the threshold encoding is this design's choice.
package qnn_pkg;

  localparam int unsigned ACT_BITS = 3;                    // feature-map precision
  localparam int unsigned ACC_BITS = 16;                   // accumulator / threshold width
  localparam int unsigned N_THRES  = (1 << ACT_BITS) - 1;  // thresholds per output channel

  typedef logic [ACT_BITS-1:0]        act_t;
  typedef logic signed [ACC_BITS-1:0] acc_t;
  typedef acc_t [N_THRES-1:0]         thres_t;             // ascending thresholds of one channel

  // Runtime description of the layer the accelerator is to run.
  // The convolution has stride 1 and "same" zero padding of (k-1)/2.
  typedef struct packed {
    logic [1:0]  k;        // kernel size, 1 or 3
    logic [8:0]  ifm_dim;  // input feature map height = width
    logic [9:0]  ifm_ch;   // input channels  (multiple of SIMD)
    logic [9:0]  ofm_ch;   // output channels (multiple of PE)
    logic        pool_en;  // apply 2x2 max pooling to the output
    logic        pool_s1;  // pooling stride: 0 = 2 (map halves), 1 = 1 (map size kept)
  } layer_cfg_t;

  // Multi-threshold activation: number of thresholds the sum reaches.
  function automatic act_t threshold(acc_t acc, thres_t t);
    act_t r = '0;
    for (int i = 0; i < N_THRES; i++)
      if (acc >= t[i]) r = r + act_t'(1);
    return r;
  endfunction

endpackage
