// tb_fp_sqrt: self-checking testbench for fp_sqrt.
// Drives directed and random single-precision operands and compares the
// result with the same operation done in double precision and rounded to
// single precision (tb_fp_pkg). Tolerance: 1 ulp (division and square
// root are rounded twice by the reference). The unit is combinational, so
// each result is checked one time step after the operands change.
`timescale 1ns/1ps
module tb_fp_sqrt;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  logic        sub;
  int checks = 0, failures = 0;

  fp_sqrt dut (.a(a), .y(y));

  task automatic check(string what);
    real r;
    #1;
    r = $sqrt(f2r(a));
    exp_y = r2f(r);
    checks++;
    if (ulp_diff(y, exp_y) > 1 && !(y[30:0] == 0 && exp_y[30:0] == 0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: a=%h b=%h sub=%0d got %h exp %h", what, a, b, sub, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sub = 1'b0; b = 32'h3F80_0000;
    // directed cases
    a = 32'h3F80_0000; b = 32'h4000_0000; check("1,2");
    a = 32'h4040_0000; b = 32'h4040_0000; check("3,3");
    a = 32'h3FC0_0000; b = 32'hBF40_0000; check("1.5,-0.75");
    a = 32'h4120_0000; b = 32'h3DCC_CCCD; check("10,0.1");
    a = 32'h4B80_0001; b = 32'h3F80_0000; sub = 1'b1; check("big-1");
    sub = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      a = rand_f(20);
      b = 0 ? rand_f(20) : 32'h0;
      sub = 1'($urandom);
      if ("sqrt" == "sqrt") a[31] = 1'b0;
      if ("sqrt" == "add" && i % 4 == 0) b = {1'($urandom), a[30:23] - 8'($urandom_range(3)), 23'($urandom)};
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
