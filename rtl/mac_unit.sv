// mac_unit -- the node's fixed-point multiplier (the "custom MAC unit").
//
// Multiplies one weight by one feature-map value. The weight is sign-magnitude:
// its 9-bit magnitude (1 integer + 8 fraction bits) is multiplied by the 8-bit
// unsigned feature value, giving a 17-bit magnitude. Dropping the 8 fraction
// bits converts it to a 9-bit integer; if the weight's sign bit is set, the
// two's complement ~(W*In)+1 is selected, otherwise the magnitude itself.
// That structure, and the 9/8/17/9-bit widths, are the paper's. The
// accumulation belongs to the convolution blocks that instantiate this unit.
//
// This design's choices: the 9-bit integer is zero-extended to 10 bits before
// the complement so that -511 is representable, and the integer conversion
// truncates (rounds the magnitude down, i.e. towards zero for the signed
// result).
//
// Interface: w (10-bit sign-magnitude weight), in (8-bit feature), prod
// (signed 10-bit product). Purely combinational.
module mac_unit
  import distnn_pkg::*;
(
  input  weight_t w,
  input  fmap_t   in,
  output prod_t   prod
);

  logic                      sign;
  logic [W_BITS-2:0]         w_mag;      // W, 9 bits
  logic [W_BITS+IN_BITS-2:0] magnitude;  // 17 bits
  logic [W_BITS-2:0]         int_part;   // W*In, 9 bits
  prod_t                     pos;

  always_comb begin
    sign      = w[W_BITS-1];
    w_mag     = w[W_BITS-2:0];
    magnitude = w_mag * in;
    int_part  = magnitude[W_BITS+IN_BITS-2:W_FRAC];   // convert to integer
    pos       = prod_t'({1'b0, int_part});
    prod      = sign ? prod_t'(~pos + 1'b1) : pos;     // sign bit selects input 1
  end

endmodule
