// Shared types of the sparse streaming convolution layer.
//
// All feature-map, weight and bias values are 16-bit signed integers (the
// W16A16 quantisation used throughout). Partial sums and outputs are kept at
// full precision in a 48-bit signed accumulator type; the width of the
// accumulator is this design's choice, wide enough for a 3x3 kernel over
// several thousand input channels without overflow.
package pass_pkg;
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 48;

  typedef logic signed [DATA_W-1:0]   data_t;  // feature, weight or bias value
  typedef logic signed [2*DATA_W-1:0] prod_t;  // one 16x16 product
  typedef logic signed [ACC_W-1:0]    acc_t;   // partial sum / layer output
endpackage
