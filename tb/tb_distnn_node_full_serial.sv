// tb_distnn_node_full_serial -- the same full-size frame as
// tb_distnn_node_full, run on the serial engine: 5 clocks per 5x5 window and
// 3 per 3x3 window, 14,254,080 + 12 compute clocks. Output, intermediate
// feature maps and cycle count are checked against the reference model.
module tb_distnn_node_full_serial;
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
    run(1'b1, 30);
    report();
    checks++;
    if (n_ser5 == 0 || n_ser3 == 0 || n_pad == 0 || n_relu0 == 0 || n_clip == 0 || n_stall == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
