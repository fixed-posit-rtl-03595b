// tb_fxp_regime_decoder -- checks the regime decoder in three configurations
// of the format table, (ES, RS) = (6, 2), (3, 16) and (7, 1). Every legal
// regime pattern (a thermometer code) is generated from its k value, and the
// decoded k and k * 2^ES are compared with it. Patterns with stray bits after
// the first complement bit are also checked: only the leading run counts.
module tb_fxp_regime_decoder;
  import fxp_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [1:0]  r2;  logic signed [1:0] k2;  logic signed [7:0]  sk2;
  logic [15:0] r16; logic signed [4:0] k16; logic signed [7:0]  sk16;
  logic [0:0]  r1;  logic signed [0:0] k1;  logic signed [7:0]  sk1;

  fxp_regime_decoder                  dut2  (.r(r2),  .k(k2),  .sk(sk2));
  fxp_regime_decoder #(.ES(3), .RS(16)) dut16 (.r(r16), .k(k16), .sk(sk16));
  fxp_regime_decoder #(.ES(7), .RS(1))  dut1  (.r(r1),  .k(k1),  .sk(sk1));

  task automatic check(string tag, int got_k, int got_sk, int exp_k, int es);
    checks++;
    if (got_k != exp_k || got_sk != exp_k * (1 << es)) begin
      failures++;
      $display("FAIL %s k=%0d sk=%0d expected k=%0d", tag, got_k, got_sk, exp_k);
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
    for (int k = -2; k <= 1; k++) begin
      r2 = 2'(regime_bits(k, 2)); #1;
      check("rs2", int'(k2), int'(sk2), k, 6);
    end
    for (int k = -16; k <= 15; k++) begin
      r16 = 16'(regime_bits(k, 16)); #1;
      check("rs16", int'(k16), int'(sk16), k, 3);
    end
    for (int k = -1; k <= 0; k++) begin
      r1 = 1'(regime_bits(k, 1)); #1;
      check("rs1", int'(k1), int'(sk1), k, 7);
    end
    // non-thermometer patterns: run of three ones, then 0, then noise
    r16 = 16'b1110_1010_0110_1001; #1; check("rs16 ones+noise", int'(k16), int'(sk16), 2, 3);
    r16 = 16'b0000_0101_1001_0110; #1; check("rs16 zeros+noise", int'(k16), int'(sk16), -5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
