// fp_mul: IEEE-754 single-precision multiplier.
//
// Used for every product in both accelerators (A*B partial products in the
// SpGEMM match-multiply unit, L-row products in the Cholesky dot-product
// PE). The paper maps these onto the FPGA's hard floating-point DSP blocks;
// this is a plain combinational equivalent of such a unit. The 24x24-bit
// significand product is normalised and rounded to nearest-even.
// Subnormal operands and results are flushed to signed zero; an infinite or
// NaN operand (exponent 255) gives a quiet NaN or infinity; overflow gives
// infinity. Purely combinational: y follows a and b in the same cycle.
module fp_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_y;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]}; mb = {1'b1, b[22:0]};
    prod = ma * mb;
    exp_y = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_y  = exp_y + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_y  = exp_y + 11'sd1;
    end
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0) ||
          ea == 8'h00 || eb == 8'h00)
        y = 32'h7FC0_0000;
      else
        y = {sy, 8'hFF, 23'h0};
    end else if (ea == 8'h00 || eb == 8'h00) begin
      y = {sy, 31'h0};
    end else if (exp_y >= 11'sd255) begin
      y = {sy, 8'hFF, 23'h0};
    end else if (exp_y <= 11'sd0) begin
      y = {sy, 31'h0};
    end else begin
      y = {sy, exp_y[7:0], mant_r[22:0]};
    end
  end
endmodule
