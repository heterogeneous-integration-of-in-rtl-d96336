// tb_fp_pkg: reference arithmetic for the testbenches, independent of the RTL.
//
// FP32 values are converted to and from the simulator's double-precision real type.
// A product of two FP32 numbers is exact in double precision; r2f then rounds it to
// FP32 with round-to-nearest-even and flush-to-zero, which is the rounding the
// design specifies for each of its multiply and add steps.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [23:0] m;
    int          e;
    logic        g, st;
    d  = $realtobits(x);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // reference multiply-accumulate: round(acc + round(a*b))
  function automatic logic [31:0] ref_mac(input logic [31:0] acc, input logic [31:0] a,
                                          input logic [31:0] b);
    return r2f(f2r(acc) + f2r(r2f(f2r(a) * f2r(b))));
  endfunction

  // random FP32 with a moderate exponent range (no subnormal or overflow results)
  function automatic logic [31:0] rand_f();
    logic [31:0] r;
    r = $urandom;
    return {r[31], 8'(120 + ($urandom % 14)), r[22:0]};
  endfunction

endpackage
