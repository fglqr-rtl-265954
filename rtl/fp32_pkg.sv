// fp32_pkg: single-precision (IEEE 754 binary32) arithmetic shared by every
// datapath unit of the accelerator.
//
// The accelerator works in single-precision floating point throughout, as
// the reference design does. The functions here are combinational and are
// called from always_comb / always_ff blocks of the units; each call is one
// arithmetic operator in hardware (adder, multiplier, divider, square root).
// Simplifications chosen for this design: subnormal inputs and results are
// flushed to signed zero, infinities and NaNs are not produced except that
// an exponent overflow saturates to infinity, division by zero returns a
// signed infinity and the square root of a negative number returns zero.
// Rounding is round-to-nearest-even in all operators.
//
// fp_scale2 multiplies by a power of two by adding to the exponent field;
// this is the "exponent addition instead of multiplication" the whitening
// unit relies on for the large dynamics weight P = 2^e * I.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_TWO  = 32'h4000_0000;

  function automatic logic fp_is_zero(input fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return fp_is_zero(a) ? FP_ZERO : {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_abs(input fp32_t a);
    return {1'b0, a[30:0]};
  endfunction

  // Round to nearest even and pack. mant holds the 23 fraction bits below the
  // hidden one, e the biased exponent before rounding.
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [22:0] mant,
                                    input logic guard, input logic sticky);
    logic [24:0] m;
    int          eo;
    m  = {2'b01, mant};
    eo = e;
    if (guard && (sticky || mant[0])) m = m + 25'd1;
    if (m[24]) eo = eo + 1;
    if (eo >= 255) return {s, 8'hFF, 23'd0};
    if (eo <= 0) return {s, 31'd0};
    return {s, eo[7:0], m[24] ? 23'd0 : m[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(s, e + 1, p[46:24], p[23], |p[22:0]);
    return fp_pack(s, e, p[45:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    int          d, e, lead, sh;
    logic [50:0] mx, my, sum, n;
    logic        lost;
    if (fp_is_zero(b)) return fp_is_zero(a) ? FP_ZERO : a;
    if (fp_is_zero(a)) return b;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d = int'(x[30:23]) - int'(y[30:23]);
    if (d > 26) return x;
    mx = {2'b01, x[22:0], 26'd0};
    my = {2'b01, y[22:0], 26'd0} >> d;
    sum = (x[31] == y[31]) ? mx + my : mx - my;
    if (sum == 51'd0) return FP_ZERO;
    e = int'(x[30:23]);
    lead = 0;
    for (int i = 0; i < 51; i++) if (sum[i]) lead = i;
    lost = 1'b0;
    if (lead == 50) begin
      lost = sum[0];
      n = sum >> 1;
      e = e + 1;
    end else begin
      sh = 49 - lead;
      n = sum << sh;
      e = e - sh;
    end
    return fp_pack(x[31], e, n[48:26], n[25], (|n[24:0]) | lost);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic        s;
    logic [49:0] num, q, r;
    int          e;
    s = a[31] ^ b[31];
    if (fp_is_zero(a)) return {s, 31'd0};
    if (fp_is_zero(b)) return {s, 8'hFF, 23'd0};
    num = {1'b1, a[22:0], 26'd0};
    q = num / {26'd0, 1'b1, b[22:0]};
    r = num % {26'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[26]) return fp_pack(s, e, q[25:3], q[2], (|q[1:0]) | (r != 50'd0));
    return fp_pack(s, e - 1, q[24:2], q[1], q[0] | (r != 50'd0));
  endfunction

  function automatic fp32_t fp_sqrt(input fp32_t a);
    logic [51:0] rad, rem, trial;
    logic [25:0] root;
    int          e;
    if (fp_is_zero(a) || a[31]) return FP_ZERO;
    e = int'(a[30:23]) - 127;
    if (e[0]) begin
      rad = {28'd0, 1'b1, a[22:0]} << 28;
      e = e - 1;
    end else begin
      rad = {28'd0, 1'b1, a[22:0]} << 27;
    end
    // bitwise integer square root, 26 result bits
    root = '0;
    rem  = '0;
    for (int i = 25; i >= 0; i--) begin
      rem   = (rem << 2) | 52'(rad[2*i+:2]);
      trial = (52'(root) << 2) | 52'd1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root << 1) | 26'd1;
      end else begin
        root = root << 1;
      end
    end
    return fp_pack(1'b0, (e >>> 1) + 127, root[24:2], root[1], root[0] | (rem != 52'd0));
  endfunction

  // a * 2^k by exponent addition
  function automatic fp32_t fp_scale2(input fp32_t a, input int k);
    int e;
    if (fp_is_zero(a)) return FP_ZERO;
    e = int'(a[30:23]) + k;
    if (e >= 255) return {a[31], 8'hFF, 23'd0};
    if (e <= 0) return {a[31], 31'd0};
    return {a[31], e[7:0], a[22:0]};
  endfunction

  // 2^k as a float
  function automatic fp32_t fp_pow2(input int k);
    return fp_scale2(FP_ONE, k);
  endfunction

  function automatic fp32_t fp_mac(input fp32_t acc, input fp32_t a, input fp32_t b);
    return fp_add(acc, fp_mul(a, b));
  endfunction

endpackage
