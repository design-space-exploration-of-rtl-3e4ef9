// conv_serial -- k-lane sequential convolution: one kernel column per cycle.
//
// LANES mac_unit multipliers work in parallel on one column of the kernel
// window; their products are summed and added to the accumulator register
// accm, whose output is out_conv. A k x k window therefore takes k cycles.
// The paper draws the block with a single multiplier, adder and register and
// states in its text that the sequential implementation runs k (5) MAC units
// in parallel; this module follows the text, with LANES = 5 by default. For a
// 3x3 kernel the caller drives zero into the two unused lanes.
//
// This design's choices: a synchronous clear input clr makes the current
// column the first of a new window (accm <= column sum instead of accm + column
// sum); en gates the update; an active-low reset clears accm. The sum of 5
// columns of 5 products fits 16 bits, so accm cannot overflow for k <= 5.
//
// Timing: out_conv holds the complete window sum in the cycle after the
// window's last column was presented with en high.
module conv_serial
  import distnn_pkg::*;
#(
  parameter int unsigned LANES = 5
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    clr,
  input  weight_t w       [LANES],
  input  fmap_t   in_data [LANES],
  output acc_t    out_conv
);

  prod_t prod [LANES];
  acc_t  col_sum;
  acc_t  accm;

  for (genvar i = 0; i < LANES; i++) begin : g_mac
    mac_unit u_mac (.w(w[i]), .in(in_data[i]), .prod(prod[i]));
  end

  always_comb begin
    col_sum = '0;
    for (int i = 0; i < LANES; i++)
      col_sum = col_sum + acc_t'(prod[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  accm <= '0;
    else if (en) accm <= (clr ? acc_t'(0) : accm) + col_sum;
  end

  assign out_conv = accm;

endmodule
