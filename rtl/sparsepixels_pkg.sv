// sparsepixels_pkg: constants and arithmetic helpers shared by the sparse CNN layers.
//
// All feature maps, weights and biases are signed fixed-point numbers of DATA_W bits with
// FRAC_W fractional bits (two's complement, ap_fixed<DATA_W, DATA_W-FRAC_W> style). The
// defaults describe the headline configuration: an 8-bit model on 63x63 single-channel
// images with a pixel budget of N_ACTIVE_MAX = 20 (the "sparse-large" model). The network
// shape (channel counts, kernel and pool sizes, hidden width of the MLP) is this design's own
// choice, sized to a model of roughly 4k parameters; see each constant.
package sparsepixels_pkg;

  // Number format
  localparam int DATA_W = 8;          // total bit-width of every stored value (8-bit model)
  localparam int FRAC_W = 5;          // fractional bits (own choice)

  // Input image and pixel budget
  localparam int IMG_H        = 63;   // MicroBooNE window after downsampling
  localparam int IMG_W        = 63;
  localparam int IMG_C        = 1;    // single-channel amplitude image
  localparam int N_ACTIVE_MAX = 20;   // sparse-large

  // Network shape (own choice where marked)
  localparam int K1     = 3;          // conv1 kernel size (own choice)
  localparam int C1     = 3;          // conv1 filters: three output channels shown for one sparse conv
  localparam int POOL1  = 4;          // pool size after conv block 1 (own choice)
  localparam int K2     = 3;          // conv2 kernel size (own choice)
  localparam int C2     = 3;          // conv2 filters (own choice)
  localparam int POOL2  = 4;          // pool size after conv block 2 (own choice)
  localparam int HIDDEN = 64;         // hidden width of the 2-layer MLP (own choice)
  localparam int N_OUT  = 1;          // binary classification: one logit

  // Width of a 1-based coordinate able to hold 0 (the invalid flag) up to n
  function automatic int coord_width(input int n);
    return $clog2(n + 1);
  endfunction

  // Pooled size: coordinates 1..n map to 1..ceil(n/p)
  function automatic int pooled(input int n, input int p);
    return (n + p - 1) / p;
  endfunction

  // Saturate a wide signed accumulator that is already aligned to FRAC_W fractional bits
  // into DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat(input logic signed [47:0] v);
    logic signed [47:0] hi, lo;
    hi = 48'sd1 <<< (DATA_W - 1);
    hi = hi - 48'sd1;
    lo = -(48'sd1 <<< (DATA_W - 1));
    if (v > hi)      return hi[DATA_W-1:0];
    else if (v < lo) return lo[DATA_W-1:0];
    else             return v[DATA_W-1:0];
  endfunction

endpackage
