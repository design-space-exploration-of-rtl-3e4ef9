// tb_distnn_node -- end-to-end test of the node at a reduced size
// (64x64x3 image, 4/4/3 filters of 5x5/3x3/3x3, output 1x1x3). Runs random
// data in parallel mode, the same data in serial mode (results must agree
// with the reference in both), then a saturating data set in parallel mode,
// and checks that every mechanism listed in tb_distnn_node_body.svh occurred.
// Load and start attempts made during the first frame must be ignored.
module tb_distnn_node;
  import distnn_pkg::*;

  localparam int IMG = 64, C_IN = 3, K1 = 5, F1 = 4, K2 = 3, F2 = 4, K3 = 3, F3 = 3;

`include "tb_distnn_node_body.svh"

  distnn_node #(.IMG(IMG), .C_IN(C_IN), .K1(K1), .F1(F1), .K2(K2), .F2(F2),
                .K3(K3), .F3(F3)) dut (
    .clk, .rst_n, .ld_img_we, .ld_img_addr, .ld_img_data, .ld_w_we, .ld_w_addr,
    .ld_w_data, .start, .serial_mode, .busy, .done, .tx_valid, .tx_data,
    .tx_last, .tx_ready
  );

  // During the first frame, try to overwrite the image, the weights and to
  // restart the node: all of it must be ignored while busy.
  int n_busy_ignored = 0;
  initial begin
    wait (busy);
    repeat (100) @(posedge clk);
    ld_img_we <= 1; ld_img_addr <= '0; ld_img_data <= 8'hA5;
    ld_w_we   <= 1; ld_w_addr   <= '0; ld_w_data   <= 10'h3FF;
    start     <= 1;
    @(posedge clk);
    if (busy) n_busy_ignored++;
    ld_img_we <= 0; ld_w_we <= 0; start <= 0;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    make_data(0);
    load();
    run(1'b0, 40);
    load();                 // layer 1 overwrote the image in buffer A
    run(1'b1, 40);
    n_mode_switch++;
    // back to parallel mode with data that saturates the channel sums
    make_data(1);
    load();
    run(1'b0, 0);
    n_mode_switch++;
    report();
    checks++;
    if (n_par5 == 0 || n_par3 == 0 || n_ser5 == 0 || n_ser3 == 0 || n_pad == 0 ||
        n_sat == 0 || n_relu0 == 0 || n_clip == 0 || n_stall == 0 || n_mode_switch == 0 ||
        n_busy_ignored == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
