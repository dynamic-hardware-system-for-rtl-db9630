// fp_ref_pkg -- reference single-precision arithmetic for the testbenches.
//
// Works independently of the RTL: operands are widened to double precision,
// the operation is carried out in double (exact for an fp32 product, and
// exact or harmless for an fp32 sum), and the double result is rounded once
// to single precision with round-to-nearest-even. Results below the normal
// single-precision range are flushed to zero and subnormal inputs are read as
// zero, matching the convention of the floating-point units under test.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    if (f[30:23] == 8'hFF) d = {f[31], 11'h7FF, f[22:0], 29'd0};
    else                   d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] mr;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) begin
      if (d[51:0] != 0) return 32'h7FC0_0000;
      return {s, 8'hFF, 23'd0};
    end
    if (d[62:52] == 0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m} + 25'(g & (st | m[0]));
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic logic is_nan(input logic [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    if (is_nan(a) || is_nan(b)) return 32'h7FC0_0000;
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    real ra, rb;
    if (is_nan(a) || is_nan(b)) return 32'h7FC0_0000;
    ra = f2r(a);
    rb = f2r(b);
    return r2f(ra + rb);
  endfunction

  function automatic logic [31:0] fsub(input logic [31:0] a, input logic [31:0] b);
    return fadd(a, {~b[31], b[30:0]});
  endfunction

  // random normal float with exponent in [127-erange, 127+erange]
  function automatic logic [31:0] rand_float(input int erange);
    int e;
    e = 127 - erange + int'($urandom_range(0, 2 * erange));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
