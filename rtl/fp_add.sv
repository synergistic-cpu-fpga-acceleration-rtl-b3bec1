// fp_add: IEEE-754 single-precision adder / subtractor.
//
// Serves the merge unit's accumulation of equal-column partial products,
// the dot-product accumulators, and the A(r,k) - dot subtraction of the
// Cholesky Div/SqRoot PE. The paper uses the FPGA's hard floating-point
// blocks; this is a combinational equivalent. The smaller operand is
// aligned with guard, round and sticky bits, the significands are added or
// subtracted, the result is renormalised with a leading-zero count and
// rounded to nearest-even. Subnormals are flushed to zero, exact
// cancellation gives +0, NaN/Inf operands give NaN/Inf. y = a + b, or
// a - b when sub is 1, in the same cycle.
module fp_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  output logic [31:0] y
);
  logic        sa, sb, sx, sy_s;
  logic [7:0]  ea, eb, ex, ey_s;
  logic [22:0] fa, fb, fx, fy_s;
  logic [7:0]  d;
  logic [26:0] mx, my, my_sh;
  logic [27:0] sum;
  logic        stk;
  logic signed [9:0] e_res;
  logic [4:0]  lz;
  logic        found;
  logic [23:0] mant;
  logic        g, rs, rnd;
  logic [24:0] mant_r;

  always_comb begin
    sa = a[31]; ea = a[30:23]; fa = a[22:0];
    sb = b[31] ^ sub; eb = b[30:23]; fb = b[22:0];
    // order operands so that x has the larger magnitude
    if ({ea, fa} >= {eb, fb}) begin
      sx = sa; ex = ea; fx = fa; sy_s = sb; ey_s = eb; fy_s = fb;
    end else begin
      sx = sb; ex = eb; fx = fb; sy_s = sa; ey_s = ea; fy_s = fa;
    end
    d  = ex - ey_s;
    mx = {1'b1, fx, 3'b000};
    my = (ey_s == 8'h00) ? 27'h0 : {1'b1, fy_s, 3'b000};
    if (d >= 8'd27) begin
      my_sh = 27'h0;
      stk   = |my;
    end else begin
      my_sh = my >> d;
      stk   = |(my & ((27'h1 << d) - 27'h1));
    end
    my_sh[0] = my_sh[0] | stk;
    if (sx == sy_s) sum = {1'b0, mx} + {1'b0, my_sh};
    else            sum = {1'b0, mx} - {1'b0, my_sh};
    e_res = $signed({2'b0, ex});
    lz = '0;
    found = 1'b0;
    if (sum[27]) begin
      sum   = {1'b0, sum[27:2], sum[1] | sum[0]};
      e_res = e_res + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz = 5'(26 - i);
        end
      end
      sum   = sum << lz;
      e_res = e_res - $signed({5'b0, lz});
    end
    mant   = sum[26:3];
    g      = sum[2];
    rs     = sum[1] | sum[0];
    rnd    = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 10'sd1;
    end
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && fa != 0) || (eb == 8'hFF && fb != 0) ||
          (ea == 8'hFF && eb == 8'hFF && sa != sb))
        y = 32'h7FC0_0000;
      else
        y = {(ea == 8'hFF) ? sa : sb, 8'hFF, 23'h0};
    end else if (ex == 8'h00) begin
      y = {sa & sb, 31'h0};              // both operands zero
    end else if (sum == 28'h0) begin
      y = 32'h0;                         // exact cancellation
    end else if (e_res >= 10'sd255) begin
      y = {sx, 8'hFF, 23'h0};
    end else if (e_res <= 10'sd0) begin
      y = {sx, 31'h0};
    end else begin
      y = {sx, e_res[7:0], mant_r[22:0]};
    end
  end
endmodule
