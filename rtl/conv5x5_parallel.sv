// conv5x5_parallel -- one 5x5 convolution window per cycle (one "MAC block").
//
// Twenty-five mac_unit multipliers, one per kernel tap, feed an adder tree.
// Tap i multiplies W[i] by IN[i]; taps are laid out column by column as in the
// paper's drawing, so row r holds taps r, r+5, r+10, r+15 and r+20. Each row
// is summed along the row and the five row sums are then added down the last
// column into out_conv. The products are at most 25 x 511 in magnitude, so a
// 16-bit sum cannot overflow.
//
// Interface: weight[0..24] (10-bit sign-magnitude), in_data[0..24] (8-bit
// unsigned), out_conv (signed 16-bit). Purely combinational, as in the paper;
// the caller registers the result. One instance produces one window sum per
// clock, which is the rate the paper's latency figures for the parallel case
// assume.
module conv5x5_parallel
  import distnn_pkg::*;
(
  input  weight_t weight  [25],
  input  fmap_t   in_data [25],
  output acc_t    out_conv
);

  prod_t prod    [25];
  acc_t  row_sum [5];

  for (genvar i = 0; i < 25; i++) begin : g_mac
    mac_unit u_mac (.w(weight[i]), .in(in_data[i]), .prod(prod[i]));
  end

  always_comb begin
    for (int r = 0; r < 5; r++) begin
      row_sum[r] = acc_t'(prod[r]);
      for (int c = 1; c < 5; c++)
        row_sum[r] = row_sum[r] + acc_t'(prod[r + 5*c]);
    end
    out_conv = row_sum[0];
    for (int r = 1; r < 5; r++)
      out_conv = out_conv + row_sum[r];
  end

endmodule
