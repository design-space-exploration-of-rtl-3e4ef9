// tb_distnn_node_full -- one complete operation of the node at its default
// size (128x128x3 image; 128 5x5, 64 3x3 and 32 3x3 kernels; 2x2x32 output):
// load image and weights, run in parallel mode with output stalls, and compare
// the streamed output and both intermediate feature maps with the reference
// model, plus the compute cycle count (3,702,784 + 12 cycles).
module tb_distnn_node_full;
  import distnn_pkg::*;

  localparam int IMG = 128, C_IN = 3, K1 = 5, F1 = 128, K2 = 3, F2 = 64, K3 = 3, F3 = 32;

`include "tb_distnn_node_body.svh"

  distnn_node dut (
    .clk, .rst_n, .ld_img_we, .ld_img_addr, .ld_img_data, .ld_w_we, .ld_w_addr,
    .ld_w_data, .start, .serial_mode, .busy, .done, .tx_valid, .tx_data,
    .tx_last, .tx_ready
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    make_data(0);
    load();
    run(1'b0, 30);
    report();
    checks++;
    if (n_par5 == 0 || n_par3 == 0 || n_pad == 0 || n_relu0 == 0 || n_clip == 0 || n_stall == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
