// tb_fxp_exp_adder -- checks the scale adder in the (6, 2) and (3, 16)
// configurations. Random k values, exponents and carries are drawn; the
// expected scale ka*2^ES + ea + kb*2^ES + eb + carry is formed in integer
// arithmetic and split by floor division into the result k and exponent.
module tb_fxp_exp_adder;
  int checks = 0, failures = 0;

  // (ES, RS) = (6, 2): shifted k is 8 bits, k out 4 bits
  logic signed [7:0] ska, skb;  logic [5:0] ea, eb, ec;  logic carry;  logic signed [3:0] kc;
  // (ES, RS) = (3, 16): shifted k is 8 bits, k out 7 bits
  logic signed [7:0] tka, tkb;  logic [2:0] ta, tb, tc;  logic tcarry;  logic signed [6:0] tkc;

  fxp_exp_adder                     dut  (.ska(ska), .skb(skb), .ea(ea), .eb(eb), .carry(carry), .ec(ec), .kc(kc));
  fxp_exp_adder #(.ES(3), .RS(16))  dut3 (.ska(tka), .skb(tkb), .ea(ta), .eb(tb), .carry(tcarry), .ec(tc), .kc(tkc));

  task automatic check(string tag, int ka, int kb, int xa, int xb, int cy, int es,
                       int got_e, int got_k);
    int s  = ka * (1 << es) + xa + kb * (1 << es) + xb + cy;
    int ek = $floor(real'(s) / real'(1 << es));
    int ee = s - ek * (1 << es);
    checks++;
    if (got_e != ee || got_k != ek) begin
      failures++;
      if (failures < 10) $display("FAIL %s sum=%0d got k=%0d e=%0d exp k=%0d e=%0d", tag, s, got_k, got_e, ek, ee);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int ka = int'($urandom_range(3)) - 2;
      int kb = int'($urandom_range(3)) - 2;
      int la = int'($urandom_range(31)) - 16;
      int lb = int'($urandom_range(31)) - 16;
      ska = 8'(ka * 64); skb = 8'(kb * 64);
      ea = 6'($urandom); eb = 6'($urandom); carry = 1'($urandom);
      tka = 8'(la * 8); tkb = 8'(lb * 8);
      ta = 3'($urandom); tb = 3'($urandom); tcarry = 1'($urandom);
      if (t == 0) begin ka = 1; kb = 1; ska = 64; skb = 64; ea = '1; eb = '1; carry = 1; end
      if (t == 1) begin ka = -2; kb = -2; ska = -128; skb = -128; ea = '0; eb = '0; carry = 0; end
      #1;
      check("es6", ka, kb, int'(ea), int'(eb), int'(carry), 6, int'(ec), int'(kc));
      check("es3", la, lb, int'(ta), int'(tb), int'(tcarry), 3, int'(tc), int'(tkc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
