// tb_conv_serial -- drives random 5x5 and 3x3 windows column by column (3x3
// windows with two lanes held at zero, as the node does), sometimes with idle
// cycles between columns, and checks that out_conv holds the exact window sum
// in the cycle after the last column, i.e. a k x k window takes k cycles.
module tb_conv_serial;
  import distnn_pkg::*;
  import distnn_ref_pkg::*;

  logic    clk = 0, rst_n = 0, en = 0, clr = 0;
  weight_t w       [5];
  fmap_t   in_data [5];
  acc_t    out_conv;
  int      checks = 0, failures = 0;
  int      cycles = 0;

  conv_serial #(.LANES(5)) dut (.clk, .rst_n, .en, .clr, .w, .in_data, .out_conv);

  always #5 clk = ~clk;
  always @(negedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, exp_sum, t0;
    for (int i = 0; i < 5; i++) begin w[i] = '0; in_data[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    checks++;
    if (out_conv != 0) failures++;   // reset value
    for (int t = 0; t < 3000; t++) begin
      k = (t % 2 == 0) ? 5 : 3;
      exp_sum = 0;
      t0 = cycles;
      for (int col = 0; col < k; col++) begin
        if (t % 7 == 3) begin          // idle cycle: accumulator must hold
          en <= 0;
          @(posedge clk);
        end
        for (int j = 0; j < 5; j++) begin
          weight_t wv;
          fmap_t   iv;
          if (j < k) begin
            wv = (t == 0) ? 10'h1FF : weight_t'($urandom);
            iv = (t == 0) ? 8'hFF   : fmap_t'($urandom);
          end else begin
            wv = '0; iv = '0;
          end
          w[j]       <= wv;
          in_data[j] <= iv;
          exp_sum += mac_ref(int'(wv), int'(iv));
        end
        en  <= 1;
        clr <= (col == 0);
        @(posedge clk);
      end
      en <= 0;
      #1;
      checks++;
      if (int'(out_conv) != exp_sum) begin
        failures++;
        if (failures < 10) $display("t=%0d k=%0d out=%0d expected %0d", t, k, out_conv, exp_sum);
      end
      checks++;
      if (t % 7 != 3 && cycles - t0 != k) begin
        failures++;
        $display("window took %0d cycles, expected %0d", cycles - t0, k);
      end
      @(posedge clk);                  // accumulator holds with en low
      #1;
      checks++;
      if (int'(out_conv) != exp_sum) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
