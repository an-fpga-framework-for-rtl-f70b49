// ivn_fp_pkg -- IEEE 754 single-precision arithmetic used inside the matrix
// inverter, plus the fixed<->float converters placed at its ports.
//
// The paper evaluates the inverse in single-precision floating point "for
// extended dynamic range" and converts fixed to float at the inverter's input
// and float to fixed at its output. The arithmetic here is this design's own
// simplified IEEE 754 subset: normal numbers only (subnormal results flush to
// zero, subnormal inputs read as zero), truncation (round toward zero) instead
// of round-to-nearest, overflow and division by zero give a signed infinity,
// no NaN is ever produced. Each function is combinational; the inverter
// evaluates one multiply-add (or one divide) per clock. Truncation drops the
// low product and quotient bits and the converters keep only the bits that
// fit, so lint sees those bits of the wide intermediates as unread.
package ivn_fp_pkg;

  typedef logic [31:0] f32_t;

  localparam f32_t F32_ZERO = 32'h0000_0000;
  localparam f32_t F32_ONE  = 32'h3f80_0000;

  function automatic f32_t f32_pack(input logic s, input int e, input logic [22:0] m);
    if (e <= 0)        return {s, 31'd0};            // underflow: flush to zero
    else if (e >= 255) return {s, 8'hff, 23'd0};     // overflow: infinity
    else               return {s, e[7:0], m};
  endfunction

  function automatic f32_t f32_neg(input f32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic f32_t f32_mul(input f32_t a, input f32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return f32_pack(s, e + 1, p[46:24]);
    else       return f32_pack(s, e,     p[45:23]);
  endfunction

  function automatic f32_t f32_add(input f32_t a, input f32_t b);
    f32_t        fbig, fsml;
    logic [26:0] mb, ms;      // 1.23 mantissa plus 3 guard bits
    logic [27:0] sum;
    int          d, e, lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? F32_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin fbig = a; fsml = b; end
    else                    begin fbig = b; fsml = a; end
    d  = int'(fbig[30:23]) - int'(fsml[30:23]);
    mb = {1'b1, fbig[22:0], 3'b000};
    ms = (d > 26) ? 27'd0 : ({1'b1, fsml[22:0], 3'b000} >> d);
    e  = int'(fbig[30:23]);
    if (fbig[31] == fsml[31]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[27]) return f32_pack(fbig[31], e + 1, sum[26:4]);
      else         return f32_pack(fbig[31], e,     sum[25:3]);
    end else begin
      sum = {1'b0, mb} - {1'b0, ms};
      if (sum == 28'd0) return F32_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      return f32_pack(fbig[31], e - lz, sum[25:3]);
    end
  endfunction

  function automatic f32_t f32_sub(input f32_t a, input f32_t b);
    return f32_add(a, f32_neg(b));
  endfunction

  function automatic f32_t f32_div(input f32_t a, input f32_t b);
    logic        s;
    logic [47:0] q;
    int          e;
    s = a[31] ^ b[31];
    if (b[30:23] == 8'd0) return {s, 8'hff, 23'd0};   // x / 0 -> infinity
    if (a[30:23] == 8'd0) return {s, 31'd0};
    q = {1'b1, a[22:0], 24'd0} / {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[24]) return f32_pack(s, e,     q[23:1]);
    else       return f32_pack(s, e - 1, q[22:0]);
  endfunction

  // Signed fixed point with 'frac' fraction bits -> float (truncating).
  function automatic f32_t fx_to_f32(input logic signed [31:0] x, input int frac);
    logic        s;
    logic [31:0] mag, nm;
    int          p;
    if (x == 32'sd0) return F32_ZERO;
    s   = x[31];
    mag = s ? (~x + 32'd1) : x;            // -2^31 maps to 2^31, still correct
    p   = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    nm  = mag << (31 - p);
    return f32_pack(s, p - frac + 127, nm[30:8]);
  endfunction

  // Float -> signed fixed point with 'frac' fraction bits (truncating,
  // saturating at the 32-bit limits).
  function automatic logic signed [31:0] f32_to_fx(input f32_t f, input int frac);
    logic [31:0] mag;
    int          sh;
    if (f[30:23] == 8'd0) return 32'sd0;
    sh = int'(f[30:23]) - 150 + frac;      // shift applied to the 24-bit 1.m
    if (sh > 7) return f[31] ? 32'sh8000_0000 : 32'sh7fff_ffff;
    if (sh >= 0)       mag = {8'd0, 1'b1, f[22:0]} << sh;
    else if (sh > -24) mag = {8'd0, 1'b1, f[22:0]} >> (-sh);
    else               mag = 32'd0;
    return f[31] ? -$signed(mag) : $signed(mag);
  endfunction

endpackage
