// tb_fp_util_pkg: conversions between binary32 bit patterns and `real`,
// written independently of the RTL arithmetic so that testbenches can
// compute reference results in double precision and compare with a
// relative tolerance.
package tb_fp_util_pkg;

  function automatic real fp2real(input logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * (2.0 ** e);
    return b[31] ? -m : m;
  endfunction

  // double -> binary32 with round-to-nearest-even on the 52-bit fraction
  function automatic logic [31:0] real2fp(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    int          e;
    if (r == 0.0) return 32'd0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin
        m = 24'h800000;
        e = e + 1;
      end
    end
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic real rabs(input real r);
    return r < 0.0 ? -r : r;
  endfunction

  // true when got is within rel relative (or abs absolute) of want
  function automatic bit close(input real got, input real want, input real rel, input real abs_tol);
    return rabs(got - want) <= rel * rabs(want) + abs_tol;
  endfunction

endpackage
