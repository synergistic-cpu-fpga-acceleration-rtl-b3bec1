// tb_fp_pkg: reference conversions between IEEE-754 single-precision bit
// patterns and SystemVerilog real (double) values, used by the testbenches
// to compute expected results independently of the RTL arithmetic.
// f2r is exact. r2f rounds a double to single precision to nearest-even,
// flushing results below the normal range to zero like the RTL does.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    // rebias exponent: e8 - 127 + 1023 = e8 + 896
    d = {f[31], 11'({3'b0, f[30:23]}) + 11'd896, f[22:0], 29'h0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [10:0] e11;
    logic [52:0] m;
    logic [23:0] mant;
    logic [24:0] mr;
    logic        g, stk;
    int          e;
    d   = $realtobits(r);
    e11 = d[62:52];
    if (e11 == 11'h000) return {d[63], 31'h0};
    e   = int'(e11) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    mant = m[52:29];
    g    = m[28];
    stk  = |m[27:0];
    mr   = {1'b0, mant} + 25'(g & (stk | mant[0]));
    if (mr[24]) begin mr = mr >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'h0};
    if (e <= 0) return {d[63], 31'h0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // distance in units of the last place between two finite floats of equal sign
  function automatic int unsigned ulp_diff(logic [31:0] x, logic [31:0] y);
    int signed xi, yi;
    xi = x[31] ? -int'({1'b0, x[30:0]}) : int'({1'b0, x[30:0]});
    yi = y[31] ? -int'({1'b0, y[30:0]}) : int'({1'b0, y[30:0]});
    return (xi > yi) ? int'(xi - yi) : int'(yi - xi);
  endfunction

  // random normal float with exponent in [127-erange, 127+erange]
  function automatic logic [31:0] rand_f(int erange);
    logic [31:0] f;
    int e;
    e = 127 - erange + int'($urandom_range(2 * erange));
    f = {1'($urandom), 8'(e), 23'($urandom)};
    return f;
  endfunction

endpackage
