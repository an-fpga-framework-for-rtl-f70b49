// tb_ivn_pkg -- self-checking test of the shared fixed-point helpers.
//
// fx_prod must give the exact 64-bit product of two signed words;
// acc_to_fx must shift a 64-bit accumulator right by FRAC with floor
// rounding and clamp the result to the 32-bit range; sat32 must clamp at
// exactly the 32-bit limits. Random and boundary values are compared with
// 64-bit integer arithmetic done here. The helpers are combinational, so
// there is no cycle count to check; a watchdog still bounds the run.
module tb_ivn_pkg;
  import ivn_pkg::*;

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

  function automatic longint clamp(input longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d, expected %0d", what, got, exp);
    end
  endtask

  initial begin
    fx_t    a, b;
    acc_t   p, s;
    longint q;

    for (int n = 0; n < 3000; n++) begin
      a = $signed($urandom);
      b = $signed($urandom);
      if (n % 4 == 1) a = a >>> ($urandom % 31);
      if (n % 4 == 2) b = b >>> ($urandom % 31);
      p = fx_prod(a, b);
      check("fx_prod", p, longint'(a) * longint'(b));
      // floor division by 2^FRAC, done with integer division and a fix-up
      q = longint'(p) / (64'sd1 << FRAC);
      if (longint'(p) < 0 && q * (64'sd1 << FRAC) != longint'(p)) q = q - 1;
      check("acc_to_fx", longint'(acc_to_fx(p)), clamp(q));
      s = {$urandom, $urandom};
      s = s >>> ($urandom % 40);
      check("sat32", longint'(sat32(s)), clamp(longint'(s)));
    end

    // Boundaries.
    check("sat max",     longint'(sat32(64'sd2147483647)),  64'sd2147483647);
    check("sat max+1",   longint'(sat32(64'sd2147483648)),  64'sd2147483647);
    check("sat min",     longint'(sat32(-64'sd2147483648)), -64'sd2147483648);
    check("sat min-1",   longint'(sat32(-64'sd2147483649)), -64'sd2147483648);
    check("floor -1/2",  longint'(acc_to_fx(-64'sd32768)),  -64'sd1);
    check("floor +1/2",  longint'(acc_to_fx(64'sd32768)),   64'sd0);
    check("one * one",   longint'(acc_to_fx(fx_prod(32'sh0001_0000, 32'sh0001_0000))), 64'sd65536);
    check("-1.5 * 2",    longint'(acc_to_fx(fx_prod(-32'sh0001_8000, 32'sh0002_0000))), -64'sd196608);
    check("big * big",   longint'(acc_to_fx(fx_prod(32'sh7fff_ffff, 32'sh7fff_ffff))), 64'sd2147483647);
    check("big * -big",  longint'(acc_to_fx(fx_prod(32'sh7fff_ffff, -32'sh7fff_ffff))), -64'sd2147483648);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
