// smartpix_pkg -- sizes, types and codes shared by the pixel-matrix readout
// and the on-chip pT-filter network.
//
// One superpixel is 256 pixels. Each pixel's flash ADC gives three
// thermometric bits, which become a 2-bit count. The 256 counts are summed
// into 16 buses of 6 bits (the cluster's y-profile), and a two-layer dense
// network (16x58, ReLU, 58x3, argmax) turns the profile into a 2-bit class.
// The pixel count, bus count, bus width, layer sizes and the output code
// follow the paper; the weight and bias widths are this design's choice,
// since the paper does not give the network's quantisation.
package smartpix_pkg;

  // Pixel matrix of one superpixel
  localparam int unsigned N_PIX       = 256;  // pixels per superpixel
  localparam int unsigned ADC_BITS    = 3;    // thermometric comparator bits per pixel
  localparam int unsigned BIN_BITS    = 2;    // binary pixel code after the encoder
  localparam int unsigned CFG_BITS    = 2;    // injection-capacitor select per pixel
  localparam int unsigned N_BUS       = 16;   // y-profile buses
  localparam int unsigned PIX_PER_BUS = N_PIX / N_BUS;
  localparam int unsigned SUM_W       = 6;    // width of one y-profile bus

  // pT-filter network
  localparam int unsigned N_IN  = N_BUS;      // Dense L1 inputs
  localparam int unsigned N_HID = 58;         // Dense L1 outputs / ReLU width
  localparam int unsigned N_OUT = 3;          // Dense L2 outputs / argmax inputs
  localparam int unsigned W_W   = 4;          // signed weight width (chosen)
  localparam int unsigned B_W   = 8;          // signed bias width (chosen)

  // Two-bit classifier output
  typedef enum logic [1:0] {
    DNN_HIGH_PT   = 2'b00,  // high pT
    DNN_LOW_PT_NEG = 2'b01, // low pT, negative charge
    DNN_LOW_PT_POS = 2'b10, // low pT, positive charge
    DNN_INVALID   = 2'b11
  } dnn_out_t;

endpackage
