// tb_fxp_random_floats -- random single-precision workload on the (N, 6, 2)
// multipliers, N = 32, 30, ..., 18.
//
// NPAIR pairs of IEEE-754 single-precision numbers are drawn with random
// sign, a random exponent in -126 .. +127 and a random 23-bit mantissa
// (uniform over the binades of the normal range). Each number is converted to
// every (N, 6, 2) format by truncation and the pair is multiplied by the
// multiplier of that width. The testbench checks:
//   * every product against the double-precision reference model;
//   * that (32, 6, 2) holds every single-precision normal number exactly
//     (zero conversion error), since it has the same 23 fraction bits and a
//     wider scale range;
//   * that the mean relative error of the product against the exact product
//     of the original singles does not decrease as N shrinks.
// The mean relative error per width is printed. One pair per cycle of a
// testbench clock.
module tb_fxp_random_floats;
  import fxp_ref_pkg::*;

  localparam int NW    = 8;
  localparam int NPAIR = 100000;
  localparam int W [NW] = '{32, 30, 28, 26, 24, 22, 20, 18};

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int cycles = 0;
  always @(posedge clk) cycles++;

  int checks = 0, failures = 0;
  logic [31:0] a [NW];
  logic [31:0] b [NW];
  logic [31:0] c [NW];
  logic        ovf [NW];
  logic        unf [NW];

  for (genvar g = 0; g < NW; g++) begin : g_w
    localparam int N = W[g];
    logic [N-1:0] cn;
    fixed_posit_mul #(.N(N), .ES(6), .RS(2)) dut (
      .a(a[g][N-1:0]), .b(b[g][N-1:0]), .c(cn), .ovf(ovf[g]), .unf(unf[g]));
    assign c[g] = 32'(cn);
  end

  initial begin
    repeat (NPAIR + 100) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rand_single();
    // a single-precision normal number, written in double-precision form
    int e;
    e = int'($urandom_range(253)) - 126;
    return $bitstoreal({1'($urandom), 11'(e + 1023), 23'($urandom), 29'd0});
  endfunction

  real relerr [NW];
  int  nerr   [NW];

  initial begin : stimulus
    int conv_bad = 0;
    for (int i = 0; i < NW; i++) begin relerr[i] = 0.0; nerr[i] = 0; end
    @(negedge clk);
    for (int t = 0; t < NPAIR; t++) begin
      real x, y;
      int sat;
      x = rand_single();
      y = rand_single();
      for (int i = 0; i < NW; i++) begin
        a[i] = 32'(from_real(x, W[i], 6, 2, sat));
        b[i] = 32'(from_real(y, W[i], 6, 2, sat));
      end
      if (to_real(64'(a[0]), 32, 6, 2) != x || to_real(64'(b[0]), 32, 6, 2) != y) conv_bad++;
      @(posedge clk);
      for (int i = 0; i < NW; i++) begin
        logic [63:0] e;
        real p, q;
        e = mul(64'(a[i]), 64'(b[i]), W[i], 6, 2, sat);
        checks++;
        if (c[i] !== 32'(e) || ovf[i] !== (sat == 1) || unf[i] !== (sat == 2)) begin
          failures++;
          if (failures < 10)
            $display("FAIL (%0d,6,2) a=%h b=%h c=%h expected %h", W[i], a[i], b[i], c[i], e);
        end
        if (sat == 0) begin
          p = x * y;
          q = to_real(64'(c[i]), W[i], 6, 2);
          relerr[i] += (p > q ? p - q : q - p) / (p < 0.0 ? -p : p);
          nerr[i]++;
        end
      end
      @(negedge clk);
    end
    checks++;
    if (conv_bad != 0) begin
      failures++;
      $display("FAIL %0d singles not held exactly by (32,6,2)", conv_bad);
    end
    for (int i = 0; i < NW; i++) begin
      relerr[i] = (nerr[i] > 0) ? 100.0 * relerr[i] / nerr[i] : 0.0;
      $display("(%0d,6,2): %0d in-range products, mean relative error %e %%", W[i], nerr[i], relerr[i]);
      if (i > 0) begin
        checks++;
        if (relerr[i] < relerr[i-1]) begin
          failures++;
          $display("FAIL error of (%0d,6,2) below that of (%0d,6,2)", W[i], W[i-1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
