// pbdcae_pkg: shared constants and types of the partially binarized
// convolutional auto-encoder (PB-DCAE) encoder.
//
// The layer sizes are the ones of the network table of the design
// (142x142x3 RGB input, 3x3 convolutions with 32/64/128/256 output maps,
// 2x2 max pooling, FC1 12544->1024, FC2 1024->64). Binary activations and
// weights are encoded as one bit per value: 1 stands for +1, 0 for -1.
// Widths of thresholds, accumulators and the parameter load port are this
// implementation's own choices.
package pbdcae_pkg;

  // ---- network dimensions (paper's network table) ----
  localparam int unsigned IMG_SIZE   = 142;  // input image is IMG_SIZE x IMG_SIZE
  localparam int unsigned IMG_CH     = 3;    // RGB
  localparam int unsigned PIX_BITS   = 8;    // bits per colour channel
  localparam int unsigned CONV1_OUT  = 32;
  localparam int unsigned CONV2_OUT  = 64;
  localparam int unsigned CONV3_OUT  = 128;
  localparam int unsigned CONV4_OUT  = 256;
  localparam int unsigned FC1_OUT    = 1024;
  localparam int unsigned FC2_OUT    = 64;   // low-dimensional image feature
  localparam int unsigned KSIZE      = 3;    // convolution kernel size
  localparam int unsigned FC2_CHUNK  = 256;  // FC1 outputs packed per FC2 input beat

  // ---- arithmetic widths ----
  localparam int unsigned THR_W      = 16;   // integer threshold ("integer bias")
  localparam int unsigned ACC_W      = 18;   // signed dot products
  localparam int unsigned FEAT_W     = 16;   // feature word on the output stream

  // ---- parameter load port ----
  localparam int unsigned PRM_DW     = 32;   // data width of one parameter write
  localparam int unsigned PRM_AW     = 24;   // address width of one parameter write

  typedef logic signed [THR_W-1:0] thr_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Which on-chip parameter memory a parameter write goes to.
  typedef enum logic [3:0] {
    PRM_CONV1_W = 4'h0, PRM_CONV2_W = 4'h1, PRM_CONV3_W = 4'h2, PRM_CONV4_W = 4'h3,
    PRM_FC1_W   = 4'h4, PRM_FC2_W   = 4'h5,
    PRM_CONV1_T = 4'h8, PRM_CONV2_T = 4'h9, PRM_CONV3_T = 4'hA, PRM_CONV4_T = 4'hB,
    PRM_FC1_T   = 4'hC, PRM_FC2_T   = 4'hD
  } prm_sel_e;

  // Output size of a valid (unpadded) KSIZE x KSIZE convolution followed by
  // 2x2, stride-2 max pooling (a trailing odd row/column is dropped).
  function automatic int unsigned conv_pool_out(int unsigned n);
    return (n - (KSIZE - 1)) / 2;
  endfunction

  // Number of 32-bit slices that make up a memory word of `width` bits.
  function automatic int unsigned n_slices(int unsigned width);
    return (width + PRM_DW - 1) / PRM_DW;
  endfunction

  // Bits needed to number `n` things (at least 1).
  function automatic int unsigned bits_for(int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
