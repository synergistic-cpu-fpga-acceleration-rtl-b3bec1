// tb_chol_div_sqrt: self-checking testbench of the Div/SqRoot PE, default
// CAM size 32.
//
// For each of 1000 random cases: broadcast a random column k of A
// (acol_clear, then acol_wr for the diagonal and 0..30 off-diagonal rows),
// assign a row r (the diagonal itself one time in four, otherwise a row
// that is in the column or, for fill-in, one that is not), present random
// dot products {dot_rk, dot_kk} with dot_kk < A(k,k), and take the result
// with random out_ready delay. The reference is
//   L(k,k) = sqrt(A(k,k) - dot_kk),  L(r,k) = (A(r,k) - dot_rk) / L(k,k)
// in double precision (A(r,k) = 0 for fill-in); the check allows a
// relative error of 4e-7 of |A(r,k)| + |dot_rk| + |result|, plus exact row,
// column and address. Fill-ins are counted and required.
`timescale 1ns/1ps
module tb_chol_div_sqrt;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic acol_clear = 1'b0, acol_wr = 1'b0, assign_en = 1'b0, dot_valid = 1'b0, dot_ready;
  idx_t acol_row = '0, assign_row = '0, assign_col = '0;
  fp32_t acol_val = '0, dot_rk = '0, dot_kk = '0;
  addr_t assign_addr = '0;
  logic out_valid, out_ready = 1'b0, busy, ev_fill;
  idx_t out_row, out_col;
  addr_t out_addr;
  fp32_t out_val;
  int checks = 0, failures = 0, n_fill = 0, n_diag = 0;

  chol_div_sqrt dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (ev_fill) n_fill++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      int k, r, nrow, pick;
      int rows [$];
      fp32_t vals [$], akk, ark, lkk_f;
      real lkk, exp_v, mag, d;
      addr_t addr;
      rows.delete(); vals.delete();
      k = $urandom_range(0, 500);
      akk = r2f(f2r(rand_f(3)) + 40.0);
      if (akk[31]) akk[31] = 1'b0;
      nrow = $urandom_range(0, 30);
      for (int i = 0; i < nrow; i++) begin rows.push_back(k + 1 + 2 * i); vals.push_back(rand_f(3)); end
      @(negedge clk); acol_clear = 1'b1; @(negedge clk); acol_clear = 1'b0;
      acol_wr = 1'b1; acol_row = idx_t'(k); acol_val = akk; @(negedge clk);
      foreach (rows[i]) begin acol_row = idx_t'(rows[i]); acol_val = vals[i]; @(negedge clk); end
      acol_wr = 1'b0;
      pick = $urandom_range(0, 3);
      if (pick == 0) begin r = k; ark = akk; n_diag++; end
      else if (pick == 1 || nrow == 0) begin r = k + 2 + 2 * $urandom_range(0, 40); ark = '0; end
      else begin int i; i = $urandom_range(0, nrow - 1); r = rows[i]; ark = vals[i]; end
      addr = $urandom;
      assign_en = 1'b1; assign_row = idx_t'(r); assign_col = idx_t'(k); assign_addr = addr;
      @(negedge clk); assign_en = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      dot_kk = r2f(f2r(akk) * 0.001 * $urandom_range(0, 900));
      dot_rk = rand_f(3);
      lkk_f = r2f($sqrt(f2r(akk) - f2r(dot_kk)));
      dot_valid = 1'b1;
      #1; while (!dot_ready) begin @(negedge clk); #1; end
      @(negedge clk); dot_valid = 1'b0;
      while (!out_valid) @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      lkk = $sqrt(f2r(akk) - f2r(dot_kk));
      if (r == k) begin exp_v = lkk; mag = lkk; end
      else begin
        exp_v = (f2r(ark) - f2r(dot_rk)) / f2r(lkk_f);
        mag = (f2r(ark) < 0 ? -f2r(ark) : f2r(ark)) + (f2r(dot_rk) < 0 ? -f2r(dot_rk) : f2r(dot_rk));
        mag = mag / f2r(lkk_f) + (exp_v < 0 ? -exp_v : exp_v);
      end
      d = f2r(out_val) - exp_v; if (d < 0) d = -d;
      checks++;
      if (d > 4e-7 * mag || out_row != idx_t'(r) || out_col != idx_t'(k) || out_addr != addr) begin
        failures++;
        if (failures < 10) $display("FAIL case %0d r=%0d k=%0d: got %0d/%0d @%h %f exp %f @%h", t, r, k, out_row, out_col, out_addr, f2r(out_val), exp_v, addr);
      end
      out_ready = 1'b1; @(negedge clk); out_ready = 1'b0;
    end
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("fill-ins=%0d diagonals=%0d", n_fill, n_diag);
    checks++; if (n_fill == 0 || n_diag == 0) begin failures++; $display("FAIL fill-in or diagonal never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
