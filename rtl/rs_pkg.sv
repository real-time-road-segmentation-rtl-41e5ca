// rs_pkg: constants and types shared by the LiDAR road-segmentation CNN engine.
//
// The engine runs an 11-layer fully convolutional network on a spherical-view
// LiDAR map of 256 columns x 64 rows. The first layer reads 16 input feature
// channels, the nine middle layers 64, and the last layer produces 2 score maps.
// Every layer uses 5x5 kernels, stride 1 and zero padding 2, so every internal
// map keeps the 256x64 size. These numbers follow the paper. Pixels are 16-bit
// (the paper's 256 kbit per 256x64 map); the Q8.8 fixed-point format and the
// 16-bit weight width are this design's own choice.
package rs_pkg;
  localparam int IMG_W     = 256; // map columns (azimuth bins of 0.4 degree)
  localparam int IMG_H     = 64;  // map rows (one per laser)
  localparam int NCH       = 64;  // feature channels = parallel 2D convolution units
  localparam int IN_CH     = 16;  // channels of the input map
  localparam int OUT_CH    = 2;   // channels of the score map
  localparam int NLAYERS   = 11;  // convolution layers
  localparam int K         = 5;   // kernel size
  localparam int PAD       = 2;   // zero padding on every side
  localparam int NF        = 2;   // filters computed together by one 2D unit
  localparam int PIX_W     = 16;  // pixel width
  localparam int WGT_W     = 16;  // weight width
  localparam int FRAC_BITS = 8;   // fractional bits of pixels and weights

  typedef logic signed [PIX_W-1:0] pix_t;
  typedef logic signed [WGT_W-1:0] wgt_t;

  // Number of 2D-convolution loops of a layer: each loop makes NF output maps.
  function automatic int loops_of_layer(int layer, int nlayers, int nch, int out_ch);
    return (layer == nlayers - 1) ? (out_ch + NF - 1) / NF : nch / NF;
  endfunction
endpackage
