// tb_fxp_frac_mult -- checks the fraction multiplier and normaliser at the
// default 23 fraction bits and at 9 bits. Expected values come from the real
// product (1 + fa/2^FS) * (1 + fb/2^FS), computed exactly in double precision:
// carry is set when the product is at least 2, and fc is the truncated
// fraction of the product after dividing by 2 in that case.
module tb_fxp_frac_mult;
  int checks = 0, failures = 0;

  logic [22:0] fa, fb, fc;  logic carry;
  logic [8:0]  ga, gb, gc;  logic gcarry;

  fxp_frac_mult              dut   (.fa(fa), .fb(fb), .fc(fc), .carry(carry));
  fxp_frac_mult #(.FS(9))    dut9  (.fa(ga), .fb(gb), .fc(gc), .carry(gcarry));

  function automatic void expect_frac(input longint xa, input longint xb, input int fs,
                                      output bit ec, output longint ef);
    real one = 1.0, scl = 1.0, p;
    for (int i = 0; i < fs; i++) scl = scl * 2.0;
    p  = (one + real'(xa) / scl) * (one + real'(xb) / scl);
    ec = (p >= 2.0);
    if (ec) p = p / 2.0;
    ef = longint'($floor((p - 1.0) * scl));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ncarry = 0;
    for (int t = 0; t < 20000; t++) begin
      bit ec; longint ef;
      case (t)
        0: begin fa = '0; fb = '0; end
        1: begin fa = '1; fb = '1; end
        2: begin fa = 23'h400000; fb = 23'h400000; end  // 1.5 * 1.5 = 2.25
        default: begin fa = 23'($urandom); fb = 23'($urandom); end
      endcase
      ga = fa[8:0]; gb = fb[22:14];
      #1;
      expect_frac(longint'(fa), longint'(fb), 23, ec, ef);
      checks++;
      if (carry !== ec || longint'(fc) != ef) begin
        failures++;
        if (failures < 10) $display("FAIL fa=%h fb=%h fc=%h c=%b exp %h %b", fa, fb, fc, carry, ef, ec);
      end
      if (ec) ncarry++;
      expect_frac(longint'(ga), longint'(gb), 9, ec, ef);
      checks++;
      if (gcarry !== ec || longint'(gc) != ef) begin
        failures++;
        if (failures < 10) $display("FAIL9 fa=%h fb=%h fc=%h c=%b exp %h %b", ga, gb, gc, gcarry, ef, ec);
      end
    end
    checks++;
    if (ncarry == 0 || ncarry == 20000) begin
      failures++;
      $display("FAIL carry never or always set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
