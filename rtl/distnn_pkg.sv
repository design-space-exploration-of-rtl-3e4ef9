// distnn_pkg -- number formats and helpers shared by the wearable-node
// convolution datapath.
//
// Weights are 10-bit sign-magnitude fixed point: bit 9 is the sign, bit 8 the
// single integer bit and bits 7..0 the fraction, so a weight covers roughly
// -2..+2 in steps of 1/256 and is meant for values in -1..1. Feature-map values
// are 8-bit unsigned integers (an RGB pixel for the first layer). A MAC product
// is a signed 10-bit integer (9-bit magnitude plus sign) and convolution sums
// grow to signed 16 bits. These widths follow the paper; the 10-bit product
// width, the saturating 16-bit channel sum and the ReLU-and-clip back to 8 bits
// between layers are this design's choices.
package distnn_pkg;

  localparam int W_BITS    = 10;  // weight: sign + 1 integer + 8 fraction bits
  localparam int W_FRAC    = 8;
  localparam int IN_BITS   = 8;   // feature map, unsigned integer
  localparam int PROD_BITS = 10;  // signed product after integer conversion
  localparam int ACC_BITS  = 16;  // convolution sums
  localparam int KMAX      = 5;   // largest kernel the node supports

  typedef logic        [W_BITS-1:0]    weight_t;
  typedef logic        [IN_BITS-1:0]   fmap_t;
  typedef logic signed [PROD_BITS-1:0] prod_t;
  typedef logic signed [ACC_BITS-1:0]  acc_t;

  localparam acc_t ACC_MAX = acc_t'(16'sh7FFF);
  localparam acc_t ACC_MIN = acc_t'(16'sh8000);

  // One convolution window operation issued by the node controller: which
  // layer, output filter f, input channel c, convolution output position
  // (oy, ox) and, in serial mode, which kernel column (col).
  typedef logic [15:0] idx_t;
  typedef struct packed {
    logic       valid;
    logic [1:0] layer;
    idx_t       f;
    idx_t       c;
    idx_t       oy;
    idx_t       ox;
    logic [2:0] col;
    logic       first_col;  // first column of a window (serial mode)
    logic       last_col;   // last column of a window (always 1 in parallel mode)
    logic       first_ch;   // first input channel of an output value
    logic       last_ch;    // last input channel of an output value
  } op_t;

  // Signed 16-bit addition that clips at the ends of the range.
  function automatic acc_t sat_add(acc_t a, acc_t b);
    logic signed [ACC_BITS:0] s;
    s = {a[ACC_BITS-1], a} + {b[ACC_BITS-1], b};
    if (s > 17'sd32767)       return ACC_MAX;
    else if (s < -17'sd32768) return ACC_MIN;
    else                      return s[ACC_BITS-1:0];
  endfunction

  // Activation between layers: negative sums become 0, sums above 255 clip.
  function automatic fmap_t relu_clip8(acc_t v);
    if (v < 0)             return '0;
    else if (v > 16'sd255) return 8'hFF;
    else                   return v[IN_BITS-1:0];
  endfunction

endpackage
