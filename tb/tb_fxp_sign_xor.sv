// tb_fxp_sign_xor -- exhaustive check of the product-sign block against the
// sign rule of multiplication: the product is negative exactly when one
// operand is negative.
module tb_fxp_sign_xor;
  logic sa, sb, sc;
  int checks = 0, failures = 0;

  fxp_sign_xor dut (.sa(sa), .sb(sb), .sc(sc));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      bit neg_a, neg_b, exp_neg;
      neg_a = i[1];
      neg_b = i[0];
      sa = neg_a; sb = neg_b;
      exp_neg = (neg_a && !neg_b) || (!neg_a && neg_b);
      #1;
      checks++;
      if (sc !== exp_neg) begin
        failures++;
        $display("FAIL sa=%b sb=%b sc=%b", sa, sb, sc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
