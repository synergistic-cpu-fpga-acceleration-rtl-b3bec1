// tb_spgemm_sort: self-checking testbench of the partial-product sorter
// (PE-2), default depth 32.
//
// Sends rows of random partial products (random columns with many
// duplicates, random values) each closed by an end token, with random
// input gaps and random output back-pressure. Row sizes range from empty
// to three times the depth, so the overflow path is taken. The reference
// cuts each row into runs of DEPTH products in arrival order, sorts each
// run stably by column and closes it with an end token; only the last run
// of a row keeps the row's end-of-row flag. Every output beat (row, column,
// value, end flag, end-of-row flag) is compared in order.
`timescale 1ns/1ps
module tb_spgemm_sort;
  import reap_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_end = 1'b0, in_eor = 1'b0, in_ready;
  idx_t in_row = '0, in_col = '0;
  fp32_t in_val = '0;
  logic out_valid, out_end, out_eor, out_ready = 1'b0, busy, overflow;
  idx_t out_row, out_col;
  fp32_t out_val;
  typedef struct packed { logic e; logic eor; idx_t row; idx_t col; fp32_t val; } beat_t;
  beat_t exp_q [$];
  int checks = 0, failures = 0, n_ovf = 0, rows_done = 0;
  bit sent_all = 0;
  localparam int NROWS = 300;

  spgemm_sort #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (overflow) n_ovf++;

  function automatic void stable_sort(ref beat_t q [$]);
    for (int i = 1; i < q.size(); i++) begin
      beat_t x; int j;
      x = q[i]; j = i - 1;
      while (j >= 0 && q[j].col > x.col) begin q[j+1] = q[j]; j--; end
      q[j+1] = x;
    end
  endfunction

  task automatic send(beat_t b);
    @(negedge clk);
    while ($urandom_range(0, 4) == 0) @(negedge clk);
    in_valid = 1'b1; in_end = b.e; in_eor = b.eor; in_row = b.row; in_col = b.col; in_val = b.val;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NROWS; r++) begin
      beat_t run [$];
      int n; logic eor;
      run.delete();
      n = (r % 10 == 0) ? 0 : $urandom_range(1, 3 * DEPTH);
      eor = $urandom_range(0, 3) != 0;
      for (int i = 0; i < n; i++) begin
        beat_t b;
        b.e = 0; b.eor = 0; b.row = idx_t'(r); b.col = $urandom_range(0, 40); b.val = $urandom;
        if (run.size() == DEPTH) begin
          // overflow: the full register leaves as a non-final run
          stable_sort(run);
          foreach (run[q]) exp_q.push_back(run[q]);
          exp_q.push_back('{1'b1, 1'b0, idx_t'(r), '0, '0});
          run.delete();
        end
        run.push_back(b);
        send(b);
      end
      stable_sort(run);
      foreach (run[q]) exp_q.push_back(run[q]);
      exp_q.push_back('{1'b1, eor, idx_t'(r), '0, '0});
      send('{1'b1, eor, idx_t'(r), '0, '0});
    end
    sent_all = 1;
  end

  initial begin
    @(posedge rst_n);
    while (!(sent_all && exp_q.size() == 0)) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        beat_t e;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); continue; end
        e = exp_q.pop_front();
        if (out_end != e.e || out_row != e.row || (e.e && out_eor != e.eor) ||
            (!e.e && (out_col != e.col || out_val != e.val))) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d: got end=%b eor=%b col=%0d val=%h exp end=%b eor=%b col=%0d val=%h",
                                      e.row, out_end, out_eor, out_col, out_val, e.e, e.eor, e.col, e.val);
        end
        if (e.e && e.row != idx_t'(rows_done)) rows_done++;
      end
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++; if (busy || exp_q.size() != 0) begin failures++; $display("FAIL not idle at end"); end
    $display("rows=%0d forced drains=%0d", rows_done, n_ovf);
    checks++; if (n_ovf == 0) begin failures++; $display("FAIL overflow never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
