// fp_div: IEEE-754 single-precision divider, y = a / b.
//
// Computes the off-diagonal elements L(r,k) = DOT(r) / L(k,k) in the
// Cholesky Div/SqRoot PE. The paper takes this from the FPGA's hard
// floating-point blocks; here the significands are divided as integers
// ((ma << 25) / mb) which leaves one guard bit, the remainder gives the
// sticky bit, and the quotient is rounded to nearest-even. Subnormals are
// flushed to zero; x/0 gives infinity, 0/0 and NaN operands give NaN.
// Combinational.
module fp_div (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sy;
  logic [7:0]  ea, eb;
  logic [48:0] num;
  logic [23:0] den;
  logic [48:0] q, r;
  logic [23:0] mant;
  logic        g, stk, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] e_res;

  always_comb begin
    sy  = a[31] ^ b[31];
    ea  = a[30:23]; eb = b[30:23];
    num = {1'b1, a[22:0], 25'h0};
    den = {1'b1, b[22:0]};
    q   = num / {25'h0, den};
    r   = num % {25'h0, den};
    e_res = $signed({3'b0, ea}) - $signed({3'b0, eb});
    if (q[25]) begin
      mant  = q[25:2];
      g     = q[1];
      stk   = q[0] | (r != 0);
      e_res = e_res + 11'sd127;
    end else begin
      mant  = q[24:1];
      g     = q[0];
      stk   = (r != 0);
      e_res = e_res + 11'sd126;
    end
    rnd    = g & (stk | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 11'sd1;
    end
    if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0) ||
        (ea == 8'hFF && eb == 8'hFF) || (ea == 8'h00 && eb == 8'h00))
      y = 32'h7FC0_0000;
    else if (ea == 8'hFF || eb == 8'h00)
      y = {sy, 8'hFF, 23'h0};
    else if (ea == 8'h00 || eb == 8'hFF)
      y = {sy, 31'h0};
    else if (e_res >= 11'sd255)
      y = {sy, 8'hFF, 23'h0};
    else if (e_res <= 11'sd0)
      y = {sy, 31'h0};
    else
      y = {sy, e_res[7:0], mant_r[22:0]};
  end
endmodule
