// fp_ref_pkg: reference FP32 arithmetic for the testbenches.
//
// Values are handled as SystemVerilog reals (IEEE double). A sum or product
// of two FP32 values is computed in double and rounded once to FP32 here,
// with round-to-nearest-even on the double's bit pattern; because double
// carries more than 2*24+2 significand bits this equals a correctly rounded
// FP32 add or multiply. Results below the FP32 normal range flush to zero,
// matching the design under test.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    // rebias: double exponent = float exponent - 127 + 1023
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;      // hidden + 52 fraction bits
    logic [24:0] mr;
    int          e;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + 25'(g & (st | m[29]));
    if (mr[24]) begin mr = mr >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // Correctly rounded FP32 operations.
  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  // a*b+c rounded once (exact product in double, one double rounding of
  // the sum; a mismatch with a true fused result needs a tie that is
  // vanishingly rare for random operands)
  function automatic logic [31:0] ffma(input logic [31:0] a, input logic [31:0] b,
                                       input logic [31:0] c);
    return r2f(f2r(a) * f2r(b) + f2r(c));
  endfunction

  // random normal FP32 with exponent in [emin, emax], random sign
  function automatic logic [31:0] frand(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
