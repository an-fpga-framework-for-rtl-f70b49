// tb_ivn_fp_pkg -- self-checking test of the single-precision subset used by
// the matrix inverter and of the fixed<->float converters at its ports.
//
// Random normal operands are combined with f32_mul, f32_add, f32_sub and
// f32_div; each result is compared with the same operation done in double
// precision on the decoded operands. Because the unit truncates, a result
// must have the reference's sign, must not exceed it in magnitude by more
// than rounding noise, and must lie within a few units in the last place of
// it. Fixed-point words are converted to float and back and checked the same
// way. Fixed cases cover overflow to infinity, division by zero, flush to
// zero and exact cancellation. The functions are combinational, so there is
// no cycle count to check; a watchdog still bounds the run.
module tb_ivn_fp_pkg;
  import ivn_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Decode a normal single-precision word (zero exponent reads as zero).
  function automatic real f2r(input f32_t f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    for (int i = 0; i < e; i++) m = m * 2.0;
    for (int i = 0; i > e; i--) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  // Random normal operand with exponent in 2^-20 .. 2^20.
  function automatic f32_t rnd_f32();
    logic [7:0] e;
    e = 8'(107 + ($urandom % 41));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  function automatic real absr(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  // Truncating result 'got' against exact 'ref_v': same sign, no larger in
  // magnitude beyond 1e-12 relative, within 'ulps' units of 2^-23 relative.
  task automatic check_trunc(input string what, input f32_t a, input f32_t b,
                             input f32_t got, input real ref_v, input real ulps);
    real g, err;
    checks++;
    g   = f2r(got);
    err = absr(g - ref_v);
    if ((ref_v != 0.0 && (g < 0.0) != (ref_v < 0.0) && g != 0.0) ||
        absr(g) > absr(ref_v) * (1.0 + 1e-12) ||
        err > ulps * absr(ref_v) / 8388608.0) begin
      failures++;
      if (failures < 10)
        $display("%s %h %h -> %h (%g), expected %g", what, a, b, got, g, ref_v);
    end
  endtask

  task automatic check_eq(input string what, input logic [31:0] got,
                          input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h, expected %h", what, got, exp);
    end
  endtask

  initial begin
    f32_t a, b;
    logic signed [31:0] x, back;
    real ref_v, diff;

    for (int n = 0; n < 2000; n++) begin
      a = rnd_f32();
      b = rnd_f32();
      check_trunc("mul", a, b, f32_mul(a, b), f2r(a) * f2r(b), 2.0);
      check_trunc("div", a, b, f32_div(a, b), f2r(a) / f2r(b), 2.0);
      // Sums: compare against the larger operand's magnitude, since
      // truncating the aligned smaller operand can cost one of its ulps.
      ref_v = f2r(a) + f2r(b);
      checks++;
      diff = absr(f2r(f32_add(a, b)) - ref_v);
      if (diff > 2.0 * (absr(f2r(a)) + absr(f2r(b))) / 8388608.0) begin
        failures++;
        if (failures < 10) $display("add %h %h -> %h, expected %g", a, b, f32_add(a, b), ref_v);
      end
      ref_v = f2r(a) - f2r(b);
      checks++;
      diff = absr(f2r(f32_sub(a, b)) - ref_v);
      if (diff > 2.0 * (absr(f2r(a)) + absr(f2r(b))) / 8388608.0) begin
        failures++;
        if (failures < 10) $display("sub %h %h -> %h, expected %g", a, b, f32_sub(a, b), ref_v);
      end
      // Operands of equal magnitude: the sum is exact.
      check_eq("add same", f32_add(a, a) & 32'h7fff_ffff,
               {1'b0, a[30:23] + 8'd1, a[22:0]});
      check_eq("cancel", f32_sub(a, a) & 32'h7fff_ffff, 32'h0);
    end

    // Fixed point (Q16.16) to float and back.
    for (int n = 0; n < 2000; n++) begin
      x = $signed($urandom);
      if (n % 3 == 1) x = x >>> ($urandom % 28);
      a = fx_to_f32(x, 16);
      check_trunc("fx_to_f32", 32'(x), 32'h0, a, real'(x) / 65536.0, 1.0);
      back = f32_to_fx(a, 16);
      checks++;
      // Only the bits below the 24-bit significand may be lost, toward zero.
      if ((x >= 0 && (back > x || x - back > (x >>> 23) + 1)) ||
          (x <  0 && (back < x || back - x > ((-x) >>> 23) + 1))) begin
        failures++;
        if (failures < 10) $display("round trip %h -> %h -> %h", x, a, back);
      end
    end

    // Fixed cases.
    check_eq("1 * 1",      f32_mul(32'h3f80_0000, 32'h3f80_0000), 32'h3f80_0000);
    check_eq("1 / 4",      f32_div(32'h3f80_0000, 32'h4080_0000), 32'h3e80_0000);
    check_eq("1 + 1",      f32_add(32'h3f80_0000, 32'h3f80_0000), 32'h4000_0000);
    check_eq("3 - 1",      f32_sub(32'h4040_0000, 32'h3f80_0000), 32'h4000_0000);
    check_eq("-1 * 2",     f32_mul(32'hbf80_0000, 32'h4000_0000), 32'hc000_0000);
    check_eq("overflow",   f32_mul(32'h7f00_0000, 32'h7f00_0000), 32'h7f80_0000);
    check_eq("div by 0",   f32_div(32'hbf80_0000, 32'h0000_0000), 32'hff80_0000);
    check_eq("underflow",  f32_mul(32'h0080_0000, 32'h0080_0000) & 32'h7fff_ffff, 32'h0);
    check_eq("x * 0",      f32_mul(32'h4120_0000, 32'h0000_0000) & 32'h7fff_ffff, 32'h0);
    check_eq("x + 0",      f32_add(32'h4120_0000, 32'h0000_0000), 32'h4120_0000);
    check_eq("neg",        f32_neg(32'h4120_0000), 32'hc120_0000);
    check_eq("fx 1.0",     fx_to_f32(32'sh0001_0000, 16), 32'h3f80_0000);
    check_eq("fx -0.5",    fx_to_f32(-32'sh0000_8000, 16), 32'hbf00_0000);
    check_eq("fx 0",       fx_to_f32(32'sh0, 16), 32'h0);
    check_eq("to fx 2.5",  f32_to_fx(32'h4020_0000, 16), 32'h0002_8000);
    check_eq("to fx big",  f32_to_fx(32'h4f00_0000, 16), 32'h7fff_ffff);
    check_eq("to fx -big", f32_to_fx(32'hcf00_0000, 16), 32'h8000_0000);
    check_eq("to fx tiny", f32_to_fx(32'h3000_0000, 16), 32'h0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
