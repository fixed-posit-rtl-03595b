// tb_fxp_regime_encoder -- checks the regime encoder for RS = 2, 16 and 1
// over every k in range and a few beyond it on both sides. The expected
// regime is written out as a thermometer string (k+1 ones then zeros, or -k
// zeros then ones), and out-of-range k must raise ovf or unf.
module tb_fxp_regime_encoder;
  int checks = 0, failures = 0;

  logic signed [3:0] k2;   logic [1:0]  r2;  logic o2, u2;
  logic signed [6:0] k16;  logic [15:0] r16; logic o16, u16;
  logic signed [2:0] k1;   logic [0:0]  r1;  logic o1, u1;

  fxp_regime_encoder                           dut2  (.kc(k2),  .rc(r2),  .ovf(o2),  .unf(u2));
  fxp_regime_encoder #(.RS(16), .KCW(7))       dut16 (.kc(k16), .rc(r16), .ovf(o16), .unf(u16));
  fxp_regime_encoder #(.RS(1),  .KCW(3))       dut1  (.kc(k1),  .rc(r1),  .ovf(o1),  .unf(u1));

  function automatic string therm(int k, int rs);
    string s = "";
    for (int j = 0; j < rs; j++)
      s = {s, (k >= 0) ? ((j <= k) ? "1" : "0") : ((j < -k) ? "0" : "1")};
    return s;
  endfunction

  function automatic string bits(logic [15:0] v, int rs);
    string s = "";
    for (int j = rs - 1; j >= 0; j--) s = {s, v[j] ? "1" : "0"};
    return s;
  endfunction

  task automatic check(string tag, int k, int rs, logic [15:0] got, bit o, bit u);
    bit eo = k > rs - 1, eu = k < -rs;
    checks++;
    if (o !== eo || u !== eu || (!eo && !eu && bits(got, rs) != therm(k, rs))) begin
      failures++;
      $display("FAIL %s k=%0d got %s o=%b u=%b exp %s", tag, k, bits(got, rs), o, u, therm(k, rs));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = -8; k <= 7; k++) begin
      k2 = 4'(k); #1; check("rs2", k, 2, 16'(r2), o2, u2);
    end
    for (int k = -20; k <= 19; k++) begin
      k16 = 7'(k); #1; check("rs16", k, 16, r16, o16, u16);
    end
    for (int k = -4; k <= 3; k++) begin
      k1 = 3'(k); #1; check("rs1", k, 1, 16'(r1), o1, u1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
