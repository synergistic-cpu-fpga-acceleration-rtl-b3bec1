// tb_chol_dot_product: self-checking testbench of the Cholesky dot-product
// PE, default parameters (8 multipliers, CAM size 32).
//
// For each of 200 random cases it builds a sparse row k and a sparse row r
// (columns below 80, in ascending order, 0..70 non-zeros each). Row k is
// loaded in CAM segments of 32 (cam_clear, then cam_wr per element,
// honouring cam_ready); after each segment row r is streamed in full
// (honouring in_ready), so rows longer than the CAM are exercised. Then
// `fin` is pulsed and the result is taken with random res_ready delay.
// The reference computes both dot products in double precision; the check
// allows a relative error of 1e-5 of the sum of absolute terms (lane
// accumulation reorders the single-precision additions). CAM hits and
// multi-segment rows are counted and required.
`timescale 1ns/1ps
module tb_chol_dot_product;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  localparam int CAMS = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cam_clear = 1'b0, cam_wr = 1'b0, cam_ready, in_valid = 1'b0, in_ready, fin = 1'b0;
  idx_t cam_col = '0, in_col = '0;
  fp32_t cam_val = '0, in_val = '0, dot_rk, dot_kk;
  logic res_valid, res_ready = 1'b0, busy, ev_hit;
  int checks = 0, failures = 0, n_hit = 0, n_seg = 0;

  chol_dot_product dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (ev_hit) n_hit++;

  function automatic bit close(fp32_t got, real exp, real mag);
    real d;
    d = f2r(got) - exp; if (d < 0) d = -d;
    return d <= 1e-5 * mag + 1e-30;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      fp32_t rk [80], rr [80];
      bit    nk [80], nr [80];
      int    kc [$], rc [$];
      real   erk, ekk, mrk, mkk;
      int    dk, dr;
      kc.delete(); rc.delete();
      dk = $urandom_range(0, 90); dr = $urandom_range(0, 90);
      erk = 0; ekk = 0; mrk = 0; mkk = 0;
      for (int c = 0; c < 80; c++) begin
        nk[c] = $urandom_range(0, 99) < dk; nr[c] = $urandom_range(0, 99) < dr;
        rk[c] = rand_f(4); rr[c] = rand_f(4);
        if (nk[c]) begin kc.push_back(c); ekk += f2r(rk[c]) * f2r(rk[c]); mkk += f2r(rk[c]) * f2r(rk[c]); end
        if (nr[c]) rc.push_back(c);
        if (nk[c] && nr[c]) begin
          real p; p = f2r(rk[c]) * f2r(rr[c]);
          erk += p; mrk += (p < 0) ? -p : p;
        end
      end
      for (int s = 0; s == 0 || s < kc.size(); s += CAMS) begin
        if (s > 0) n_seg++;
        @(negedge clk); cam_clear = 1'b1; @(negedge clk); cam_clear = 1'b0;
        for (int q = s; q < s + CAMS && q < kc.size(); q++) begin
          cam_wr = 1'b1; cam_col = idx_t'(kc[q]); cam_val = rk[kc[q]];
          #1; while (!cam_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        cam_wr = 1'b0;
        foreach (rc[q]) begin
          in_valid = 1'b0;
          while ($urandom_range(0, 4) == 0) @(negedge clk);
          in_valid = 1'b1; in_col = idx_t'(rc[q]); in_val = rr[rc[q]];
          #1; while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        in_valid = 1'b0;
      end
      fin = 1'b1; @(negedge clk); fin = 1'b0;
      while (!res_valid) @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks += 2;
      if (!close(dot_rk, erk, mrk)) begin failures++; if (failures < 10) $display("FAIL case %0d dot_rk %f exp %f", t, f2r(dot_rk), erk); end
      if (!close(dot_kk, ekk, mkk)) begin failures++; if (failures < 10) $display("FAIL case %0d dot_kk %f exp %f", t, f2r(dot_kk), ekk); end
      res_ready = 1'b1; @(negedge clk); res_ready = 1'b0;
      checks++;
      if (res_valid) begin failures++; $display("FAIL result still valid after res_ready"); end
    end
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("hits=%0d extra segments=%0d", n_hit, n_seg);
    checks++; if (n_hit == 0 || n_seg == 0) begin failures++; $display("FAIL hit or segment never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
