// tb_fxp_configs -- checks the multiplier in every (N, ES, RS) format whose
// scale range covers that of IEEE-754 single precision (-126 .. +127): the
// 38 formats with N = 18 .. 32, ES = 3 .. 7 and RS = 2^(7-ES)
// (RS = 16, 8, 4, 2, 1; ES = 3 only for N >= 22).
//
// One multiplier per format is instantiated in a generate loop. Each is fed
// NPER operand pairs (random words and words with moderate scales), one pair
// per cycle of a testbench clock, and its product and saturation flags are
// compared with the double-precision reference model. The test also checks
// that each format's scale range is at least -126 .. +127 and counts the
// overflow and underflow saturations seen over all formats.
module tb_fxp_configs;
  import fxp_ref_pkg::*;

  localparam int NCFG = 38;
  localparam int NPER = 4000;
  localparam int CFG_N  [NCFG] = '{32,32,32,32,32, 30,30,30,30,30, 28,28,28,28,28, 26,26,26,26,26,
                                   24,24,24,24,24, 22,22,22,22,22, 20,20,20,20, 18,18,18,18};
  localparam int CFG_ES [NCFG] = '{3,4,5,6,7, 3,4,5,6,7, 3,4,5,6,7, 3,4,5,6,7,
                                   3,4,5,6,7, 3,4,5,6,7, 4,5,6,7, 4,5,6,7};

  function automatic int rs_of(int es);
    return 1 << (7 - es);
  endfunction

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int cycles = 0;
  always @(posedge clk) cycles++;

  int checks = 0, failures = 0, n_ovf = 0, n_unf = 0;
  logic [31:0] a [NCFG];
  logic [31:0] b [NCFG];
  logic [31:0] c [NCFG];
  logic        ovf [NCFG];
  logic        unf [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int N = CFG_N[g], ES = CFG_ES[g], RS = 1 << (7 - CFG_ES[g]);
    logic [N-1:0] cn;
    fixed_posit_mul #(.N(N), .ES(ES), .RS(RS)) dut (
      .a(a[g][N-1:0]), .b(b[g][N-1:0]), .c(cn), .ovf(ovf[g]), .unf(unf[g]));
    assign c[g] = 32'(cn);
  end

  initial begin
    repeat (NPER + 100) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    // every format covers the IEEE-754 single-precision scale range
    for (int i = 0; i < NCFG; i++) begin
      checks++;
      if (max_scale(CFG_ES[i], rs_of(CFG_ES[i])) < 127 || min_scale(CFG_ES[i], rs_of(CFG_ES[i])) > -126) begin
        failures++;
        $display("FAIL range of (%0d,%0d,%0d)", CFG_N[i], CFG_ES[i], rs_of(CFG_ES[i]));
      end
    end
    @(negedge clk);
    for (int t = 0; t < NPER; t++) begin
      for (int i = 0; i < NCFG; i++) begin
        int n, es, rs, sat;
        n = CFG_N[i]; es = CFG_ES[i]; rs = rs_of(es);
        if (t % 2 == 0) begin
          a[i] = $urandom & ((32'd1 << n) - 1) | (n == 32 ? $urandom : 0);
          b[i] = $urandom & ((32'd1 << n) - 1) | (n == 32 ? $urandom : 0);
        end else begin
          logic [63:0] da, db;
          da = {1'($urandom), 11'(int'($urandom_range(120)) - 60 + 1023), 52'({$urandom, $urandom})};
          db = {1'($urandom), 11'(int'($urandom_range(120)) - 60 + 1023), 52'({$urandom, $urandom})};
          a[i] = 32'(from_real($bitstoreal(da), n, es, rs, sat));
          b[i] = 32'(from_real($bitstoreal(db), n, es, rs, sat));
        end
      end
      @(posedge clk);
      for (int i = 0; i < NCFG; i++) begin
        int n, es, rs, sat;
        logic [63:0] e;
        n = CFG_N[i]; es = CFG_ES[i]; rs = rs_of(es);
        e = mul(64'(a[i]), 64'(b[i]), n, es, rs, sat);
        checks++;
        if (c[i] !== 32'(e) || ovf[i] !== (sat == 1) || unf[i] !== (sat == 2)) begin
          failures++;
          if (failures < 10)
            $display("FAIL (%0d,%0d,%0d) a=%h b=%h c=%h expected %h", n, es, rs, a[i], b[i], c[i], e);
        end
        if (sat == 1) n_ovf++;
        if (sat == 2) n_unf++;
      end
      @(negedge clk);
    end
    $display("formats=%0d pairs per format=%0d overflow=%0d underflow=%0d", NCFG, NPER, n_ovf, n_unf);
    checks++; if (n_ovf == 0) begin failures++; $display("FAIL no overflow"); end
    checks++; if (n_unf == 0) begin failures++; $display("FAIL no underflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
