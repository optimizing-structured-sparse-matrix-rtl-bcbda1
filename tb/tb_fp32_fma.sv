// tb_fp32_fma: self-checking test of the fp32 fused multiply-add.
//
// Directed cases cover exact small-integer arithmetic, cancellation to zero,
// signed zeros, infinities, NaN, overflow and flush-to-zero underflow. Then
// random normal operands with nearby exponents (so that additions and
// cancellations both happen) and with wide exponent spreads (so that the
// alignment shifter and sticky logic are exercised) are compared bit for bit
// against the double-precision reference in tb_fp_pkg. A last set forces
// exact round-half cases, where ties-to-even decides the result.
module tb_fp32_fma;
  import tb_fp_pkg::*;

  logic [31:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp32_fma dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(input logic [31:0] ta, tb_, tc, exp_y);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL fma(%h,%h,%h) = %h, expected %h", ta, tb_, tc, y, exp_y);
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
    // 2*3+1 = 7, 1.5*2 - 3 = 0, 1*1 + 0 = 1
    check(32'h4000_0000, 32'h4040_0000, 32'h3f80_0000, 32'h40e0_0000);
    check(32'h3fc0_0000, 32'h4000_0000, 32'hc040_0000, 32'h0000_0000);
    check(32'h3f80_0000, 32'h3f80_0000, 32'h0000_0000, 32'h3f80_0000);
    // 0 * x + c = c; (-0)*1 + (-0) = -0
    check(32'h0000_0000, 32'h4120_0000, 32'hc2c8_0000, 32'hc2c8_0000);
    check(32'h8000_0000, 32'h3f80_0000, 32'h8000_0000, 32'h8000_0000);
    // inf cases and NaN
    check(32'h7f80_0000, 32'h4000_0000, 32'h3f80_0000, 32'h7f80_0000);
    check(32'h7f80_0000, 32'h0000_0000, 32'h3f80_0000, 32'h7fc0_0000);
    check(32'h7f80_0000, 32'h3f80_0000, 32'hff80_0000, 32'h7fc0_0000);
    check(32'h3f80_0000, 32'h3f80_0000, 32'hff80_0000, 32'hff80_0000);
    check(32'h7fc0_1234, 32'h3f80_0000, 32'h3f80_0000, 32'h7fc0_0000);
    // overflow and underflow
    check(32'h7f00_0000, 32'h7f00_0000, 32'h0000_0000, 32'h7f80_0000);
    check(32'h0080_0000, 32'h3f00_0000, 32'h0000_0000, 32'h0000_0000);
    // ties: 1 + 2^-24 rounds to 1 (even), 1 + 3*2^-24 rounds up
    check(32'h3f80_0000, 32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);
    check(32'h3f80_0000, 32'h3f80_0000, 32'h3440_0000, 32'h3f80_0002);

    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb, rc;
      ra = rand_f(120, 134);
      rb = rand_f(120, 134);
      rc = (i % 2 == 0) ? rand_f(115, 140) : rand_f(60, 200);
      check(ra, rb, rc, fma_ref(ra, rb, rc));
    end
    // exact halfway cases: 1.0 * b + c with c 1..3 binades above b, same
    // or opposite sign, so the bits of b below the result's last place are
    // often exactly one half
    for (int i = 0; i < 4000; i++) begin
      logic [31:0] rb, rc;
      int k;
      k  = 1 + (i % 3);
      rb = rand_f(110, 140);
      rc = $urandom;
      rc[30:23] = rb[30:23] + 8'(k);
      if (i % 4 == 3) rc[31] = ~rb[31];
      else            rc[31] = rb[31];
      check(32'h3f80_0000, rb, rc, fma_ref(32'h3f80_0000, rb, rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
