// tb_spgemm_match_mul: self-checking testbench of the match-multiply unit
// (PE-1), default CAM size 32.
//
// Plays the pipeline's bundle stream the way the RIR FIFO read side
// presents it (header beat with in_first, then elements, header held during
// the elements) with random gaps: per batch one A-row bundle of 0..32
// distinct columns, 1..12 B-row bundles whose shared feature (row of B) is
// either one of A's columns (hit) or not (miss), then END_BATCH. The
// reference produces, for every hit, (row of A, colB, valA*valB) per B
// element in order, and an end token carrying A's row and end-of-row flag
// per batch. The partial-product output is drained with random
// back-pressure and compared beat by beat (products to 0 ulp). Hits and
// misses are both counted and required.
`timescale 1ns/1ps
module tb_spgemm_match_mul;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, in_ready;
  rir_hdr_t in_hdr = '0;
  rir_elem_t in_elem = '0;
  logic pp_valid, pp_end, pp_eor, pp_ready = 1'b0, busy, match_hit;
  idx_t pp_row, pp_col;
  fp32_t pp_val;
  typedef struct packed { logic e; logic eor; idx_t row; idx_t col; fp32_t val; } beat_t;
  beat_t exp_q [$];
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;
  bit sent_all = 0;

  spgemm_match_mul dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (in_valid && in_first && in_ready && in_hdr.kind == K_B_ROW) begin
    if (match_hit) n_hit++; else n_miss++;
  end

  task automatic beat(logic first, rir_hdr_t h, rir_elem_t e);
    @(negedge clk);
    while ($urandom_range(0, 5) == 0) @(negedge clk);
    in_valid = 1'b1; in_first = first; in_hdr = h; in_elem = e;
    #2;
    while (!in_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic bundle(kind_e k, idx_t sh, logic eor, rir_elem_t el [$]);
    rir_hdr_t h;
    h = rir_hdr_t'(hdr_word(sh, k, eor, cnt_t'(el.size())));
    beat(1'b1, h, '0);
    foreach (el[i]) beat(1'b0, h, el[i]);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 150; b++) begin
      rir_elem_t a [$];
      idx_t row; logic eor; int na, nb;
      row = $urandom_range(0, 1000); eor = $urandom_range(0, 1);
      na = (b % 10 == 0) ? 0 : $urandom_range(1, 32);
      a.delete();
      for (int i = 0; i < na; i++) a.push_back('{idx_t'(3 * i + (b % 3)), rand_f(8)});
      a.shuffle();
      bundle(K_A_ROW, row, eor, a);
      nb = $urandom_range(1, 12);
      for (int j = 0; j < nb; j++) begin
        rir_elem_t bl [$];
        idx_t k; int hit;
        bl.delete();
        hit = -1;
        if (na > 0 && $urandom_range(0, 2) != 0) begin
          hit = $urandom_range(0, na - 1); k = a[hit].idx;
        end else k = 3 * $urandom_range(0, 40) + ((b + 1) % 3);
        for (int i = 0; i < $urandom_range(0, 10); i++) bl.push_back('{idx_t'($urandom_range(0, 200)), rand_f(8)});
        if (hit >= 0) foreach (bl[i]) exp_q.push_back('{1'b0, 1'b0, row, bl[i].idx, r2f(f2r(a[hit].val) * f2r(bl[i].val))});
        bundle(K_B_ROW, k, 1'b0, bl);
      end
      exp_q.push_back('{1'b1, eor, row, '0, '0});
      a.delete();
      bundle(K_END_BATCH, '0, 1'b0, a);
    end
    sent_all = 1;
  end

  initial begin
    @(posedge rst_n);
    while (!(sent_all && exp_q.size() == 0)) begin
      @(negedge clk);
      pp_ready = $urandom_range(0, 3) != 0;
      #3;
      if (pp_valid && pp_ready) begin
        beat_t e;
        checks++;
        e = exp_q.pop_front();
        if (pp_end != e.e || pp_row != e.row || (e.e && pp_eor != e.eor) ||
            (!e.e && (pp_col != e.col || pp_val != e.val))) begin
          failures++;
          if (failures < 10) $display("FAIL got end=%b eor=%b row=%0d col=%0d val=%h exp end=%b eor=%b row=%0d col=%0d val=%h",
                                      pp_end, pp_eor, pp_row, pp_col, pp_val, e.e, e.eor, e.row, e.col, e.val);
        end
      end
      @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("B bundles: hit=%0d miss=%0d", n_hit, n_miss);
    checks++; if (n_hit == 0 || n_miss == 0) begin failures++; $display("FAIL hit or miss never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
