// fp_sqrt: IEEE-754 single-precision square root.
//
// Computes the diagonal element L(k,k) = sqrt(DOT(k)) in the Cholesky
// Div/SqRoot PE. The paper takes this from the FPGA's hard floating-point
// blocks; here the significand (doubled when the unbiased exponent is odd)
// is shifted left by 25 and its integer square root is taken digit by
// digit, one result bit per unrolled step. The 25-bit root gives 24
// significand bits and a guard bit, the remainder gives the sticky bit;
// rounding is to nearest-even. Negative non-zero input gives NaN, -0/+0
// give themselves, subnormals are flushed to zero. Combinational.
module fp_sqrt (
  input  logic [31:0] a,
  output logic [31:0] y
);
  logic [7:0]  ea;
  logic signed [9:0] e_unb, e_half;
  logic [49:0] rad;
  logic [24:0] root;
  logic [51:0] rem_acc, trial;
  logic [23:0] mant;
  logic        g, stk, rnd;
  logic [24:0] mant_r;
  logic signed [9:0] e_res;

  always_comb begin
    ea    = a[30:23];
    e_unb = $signed({2'b0, ea}) - 10'sd127;
    if (e_unb[0]) begin
      rad    = {1'b1, a[22:0], 26'h0};      // significand * 2, then << 25
      e_half = (e_unb - 10'sd1) >>> 1;
    end else begin
      rad    = {1'b0, 1'b1, a[22:0], 25'h0};
      e_half = e_unb >>> 1;
    end
    // digit-by-digit (restoring) integer square root, two radicand bits per step
    root    = '0;
    rem_acc = '0;
    for (int i = 24; i >= 0; i--) begin
      rem_acc = {rem_acc[49:0], rad[2*i+1], rad[2*i]};
      trial   = {25'h0, root, 2'b01};
      if (rem_acc >= trial) begin
        rem_acc = rem_acc - trial;
        root    = {root[23:0], 1'b1};
      end else begin
        root    = {root[23:0], 1'b0};
      end
    end
    mant   = root[24:1];
    g      = root[0];
    stk    = (rem_acc != 0);
    rnd    = g & (stk | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, rnd};
    e_res  = e_half + 10'sd127;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 10'sd1;
    end
    if (ea == 8'h00)
      y = {a[31], 31'h0};
    else if (a[31] || (ea == 8'hFF && a[22:0] != 0))
      y = 32'h7FC0_0000;
    else if (ea == 8'hFF)
      y = 32'h7F80_0000;
    else
      y = {1'b0, e_res[7:0], mant_r[22:0]};
  end
endmodule
