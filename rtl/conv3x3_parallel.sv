// conv3x3_parallel -- one 3x3 convolution window per cycle.
//
// Nine mac_unit multipliers work side by side, one per kernel tap, and an
// adder tree sums their products. Tap i multiplies weight W[i] by input IN[i];
// as drawn for this block in the paper, taps are laid out column by column, so
// row r of the array holds taps r, r+3 and r+6. Each row is summed first and
// the three row sums are then added into out_conv. The nine products are at
// most 9 x 511 in magnitude, so a 16-bit sum cannot overflow.
//
// Interface: weight[0..8] (10-bit sign-magnitude), in_data[0..8] (8-bit
// unsigned), out_conv (signed 16-bit). Purely combinational; the paper gives
// no register inside the parallel blocks and the caller registers the result.
module conv3x3_parallel
  import distnn_pkg::*;
(
  input  weight_t weight  [9],
  input  fmap_t   in_data [9],
  output acc_t    out_conv
);

  prod_t prod    [9];
  acc_t  row_sum [3];

  for (genvar i = 0; i < 9; i++) begin : g_mac
    mac_unit u_mac (.w(weight[i]), .in(in_data[i]), .prod(prod[i]));
  end

  always_comb begin
    for (int r = 0; r < 3; r++)
      row_sum[r] = acc_t'(prod[r]) + acc_t'(prod[r+3]) + acc_t'(prod[r+6]);
    out_conv = row_sum[0] + row_sum[1] + row_sum[2];
  end

endmodule
