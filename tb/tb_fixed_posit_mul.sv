// tb_fixed_posit_mul -- end-to-end test of the multiplier in its default
// (32, 6, 2) configuration (no parameter overrides).
//
// Operands are applied one pair per cycle of a testbench clock; since the
// multiplier is combinational, the product is compared in the same cycle with
// the reference model in fxp_ref_pkg, which works through double-precision
// arithmetic. Stimulus mixes directed corner cases, fully random words and
// words with scales near zero (so that products stay in range). Each
// mechanism of the datapath is counted and must occur at least once:
// normalising carry, negative and non-negative result k, negative result,
// overflow saturation, underflow saturation, zero operand, NaR operand.
module tb_fixed_posit_mul;
  import fxp_ref_pkg::*;

  localparam int N = 32, ES = 6, RS = 2;
  localparam int NTEST = 200000;

  logic clk = 1'b0;
  logic [N-1:0] a, b, c;
  logic         ovf, unf;
  int checks = 0, failures = 0, cycles = 0;

  fixed_posit_mul dut (.a(a), .b(b), .c(c), .ovf(ovf), .unf(unf));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (NTEST + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word with scale in [-lim, lim] and random sign and fraction
  function automatic logic [N-1:0] near_one(int lim);
    int sat;
    int sc = int'($urandom_range(2 * lim)) - lim;
    logic [63:0] d = {1'($urandom), 11'(sc + 1023), 52'({$urandom, $urandom})};
    return N'(from_real($bitstoreal(d), N, ES, RS, sat));
  endfunction

  int n_carry = 0, n_kneg = 0, n_kpos = 0, n_neg = 0, n_ovf = 0, n_unf = 0,
      n_zero = 0, n_nar = 0;

  initial begin : stimulus
    @(negedge clk);
    for (int t = 0; t < NTEST; t++) begin
      logic [63:0] exp_c;
      int sat;
      case (t)
        0: begin a = 32'h4000_0000; b = 32'h4000_0000; end  // 1.0 * 1.0
        1: begin a = 32'h0000_0000; b = 32'h4123_4567; end  // zero
        2: begin a = 32'h8000_0000; b = 32'h4123_4567; end  // NaR
        3: begin a = 32'h7FFF_FFFF; b = 32'h7FFF_FFFF; end  // largest * largest: overflow
        4: begin a = 32'h0000_0001; b = 32'h0000_0001; end  // smallest * smallest: underflow
        5: begin a = 32'h4040_0000; b = 32'hC040_0000; end  // 1.5 * -1.5
        6: begin a = 32'h4040_0000; b = 32'h8000_0000; end  // NaR operand B
        7: begin a = 32'h403F_FFFF; b = 32'h0000_0000; end  // zero
        default:
          case (t % 3)
            0: begin a = $urandom; b = $urandom; end
            1: begin a = near_one(60); b = near_one(60); end
            default: begin a = near_one(140); b = near_one(20); end
          endcase
      endcase
      @(posedge clk);
      exp_c = mul(64'(a), 64'(b), N, ES, RS, sat);
      checks++;
      if (c !== exp_c[N-1:0] || ovf !== (sat == 1) || unf !== (sat == 2)) begin
        failures++;
        if (failures < 10)
          $display("FAIL a=%h b=%h c=%h ovf=%b unf=%b expected %h sat=%0d",
                   a, b, c, ovf, unf, exp_c[N-1:0], sat);
      end
      // mechanism counters, from the reference side
      if (a == 0 || b == 0) n_zero++;
      if (a == 32'h8000_0000 || b == 32'h8000_0000) n_nar++;
      if (sat == 1) n_ovf++;
      if (sat == 2) n_unf++;
      if (a != 0 && b != 0 && a != 32'h8000_0000 && b != 32'h8000_0000 && sat == 0) begin
        real ma, mb;
        ma = to_real(64'(a), N, ES, RS);
        mb = to_real(64'(b), N, ES, RS);
        if (ma < 0.0) ma = -ma;
        if (mb < 0.0) mb = -mb;
        // significands in [1,2): carry when their product reaches 2
        while (ma >= 2.0) ma = ma / 2.0;
        while (ma < 1.0) ma = ma * 2.0;
        while (mb >= 2.0) mb = mb / 2.0;
        while (mb < 1.0) mb = mb * 2.0;
        if (ma * mb >= 2.0) n_carry++;
        if (c[N-2] == 1'b0) n_kneg++; else n_kpos++;
        if (c[N-1]) n_neg++;
      end
      @(negedge clk);
    end
    $display("mechanisms: carry=%0d k<0=%0d k>=0=%0d negative=%0d overflow=%0d underflow=%0d zero=%0d NaR=%0d",
             n_carry, n_kneg, n_kpos, n_neg, n_ovf, n_unf, n_zero, n_nar);
    checks++; if (n_carry == 0) begin failures++; $display("FAIL no carry"); end
    checks++; if (n_kneg  == 0) begin failures++; $display("FAIL no k<0 result"); end
    checks++; if (n_kpos  == 0) begin failures++; $display("FAIL no k>=0 result"); end
    checks++; if (n_neg   == 0) begin failures++; $display("FAIL no negative result"); end
    checks++; if (n_ovf   == 0) begin failures++; $display("FAIL no overflow"); end
    checks++; if (n_unf   == 0) begin failures++; $display("FAIL no underflow"); end
    checks++; if (n_zero  == 0) begin failures++; $display("FAIL no zero operand"); end
    checks++; if (n_nar   == 0) begin failures++; $display("FAIL no NaR operand"); end
    $display("cycles=%0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
