// tb_conv5x5_parallel -- random and extreme 5x5 windows; the sum must equal
// the integer sum of the 25 reference products, in the same cycle.
module tb_conv5x5_parallel;
  import distnn_pkg::*;
  import distnn_ref_pkg::*;

  weight_t weight  [25];
  fmap_t   in_data [25];
  acc_t    out_conv;
  int      checks = 0, failures = 0;

  conv5x5_parallel dut (.weight(weight), .in_data(in_data), .out_conv(out_conv));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_sum;
    for (int t = 0; t < 20000; t++) begin
      exp_sum = 0;
      for (int i = 0; i < 25; i++) begin
        case (t)
          0:       begin weight[i] = 10'h1FF; in_data[i] = 8'hFF; end  // max positive
          1:       begin weight[i] = 10'h3FF; in_data[i] = 8'hFF; end  // max negative
          2:       begin weight[i] = weight_t'(i * 100); in_data[i] = fmap_t'(i * 28); end
          default: begin weight[i] = weight_t'($urandom); in_data[i] = fmap_t'($urandom); end
        endcase
        exp_sum += mac_ref(int'(weight[i]), int'(in_data[i]));
      end
      #1;
      checks++;
      if (int'(out_conv) != exp_sum) begin
        failures++;
        if (failures < 10) $display("t=%0d out=%0d expected %0d", t, out_conv, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
