// tb_maxpool -- random signed values in groups of four, with random gaps,
// and now and then an abandoned partial group followed by clear. Every output
// must be the group maximum and must be registered by the same clock edge
// that takes the group's last input (visible in the following cycle); in every other cycle out_valid must be low.
module tb_maxpool;
  import distnn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  acc_t in_data = '0;
  logic out_valid;
  acc_t out_data;
  int   checks = 0, failures = 0;

  maxpool #(.WIN(4)) dut (.clk, .rst_n, .clear, .in_valid, .in_data, .out_valid, .out_data);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one clock: drive, wait for the edge, then look at the outputs
  task automatic step(input logic v, input int d, input bit expect_out, input int exp_max);
    in_valid <= v;
    in_data  <= acc_t'(d);
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== expect_out || (expect_out && int'(out_data) != exp_max)) begin
      failures++;
      if (failures < 10)
        $display("out_valid=%0b out=%0d, expected valid=%0b max=%0d", out_valid, out_data, expect_out, exp_max);
    end
  endtask

  initial begin
    int best, n, v;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < 20000; g++) begin
      n = 0;
      best = 0;
      while (n < 4) begin
        if ($urandom_range(0, 3) == 0) begin
          step(1'b0, 0, 1'b0, 0);
        end else begin
          v = (g % 3 == 0) ? -int'($urandom_range(0, 32768)) : int'($urandom_range(0, 65535)) - 32768;
          if (n == 0 || v > best) best = v;
          n++;
          // the edge that takes the 4th value also registers the maximum
          step(1'b1, v, n == 4, best);
        end
      end
      if (g % 50 == 25) begin                  // abandoned partial group + clear
        step(1'b1, 32767, 1'b0, 0);
        in_valid <= 0; clear <= 1;
        @(posedge clk);
        clear <= 0;
      end
    end
    step(1'b0, 0, 1'b0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
