// tb_mac_unit -- exhaustive check of the fixed-point multiplier: every
// 10-bit weight against every 8-bit feature value (262,144 cases) is compared
// with an integer computation of sign * floor(|w| * in / 256).
module tb_mac_unit;
  import distnn_pkg::*;
  import distnn_ref_pkg::*;

  weight_t w;
  fmap_t   in;
  prod_t   prod;
  int      checks = 0, failures = 0;

  mac_unit dut (.w(w), .in(in), .prod(prod));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 1024; a++)
      for (int b = 0; b < 256; b++) begin
        w  = weight_t'(a);
        in = fmap_t'(b);
        #1;
        checks++;
        if (int'(prod) != mac_ref(a, b)) begin
          failures++;
          if (failures < 10)
            $display("mismatch w=%03h in=%0d prod=%0d expected %0d", a, b, prod, mac_ref(a, b));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
