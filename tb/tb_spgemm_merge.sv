// tb_spgemm_merge: self-checking testbench of the merge unit (PE-3).
//
// Feeds sorted runs of partial products (columns ascending with random
// repeats, so adjacent equal columns must be summed), each closed by an end
// token with a random end-of-row flag, with random input gaps and random
// output back-pressure (out_ready is the output FIFO's write-ready; the
// unit's outputs are pushes). The reference sums equal columns in arrival
// order in single precision. The monitor checks every pushed element
// (column exact, value within 1 ulp), and every close (row index,
// end-of-row flag, number of elements in the bundle). Counts merges.
`timescale 1ns/1ps
module tb_spgemm_merge;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_end = 1'b0, in_eor = 1'b0, in_ready;
  idx_t in_row = '0, in_col = '0;
  fp32_t in_val = '0;
  logic out_elem_valid, out_close, out_eor, out_ready = 1'b0, busy, merged;
  rir_elem_t out_elem;
  idx_t out_row;
  typedef struct packed { logic close; logic eor; idx_t idx; fp32_t val; } ev_t;
  ev_t exp_q [$];
  int checks = 0, failures = 0, n_merged = 0, bundle_elems = 0;
  bit sent_all = 0;

  spgemm_merge dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (merged && in_valid && in_ready) n_merged++;

  task automatic send(logic e, logic eor, idx_t row, idx_t col, fp32_t val);
    @(negedge clk);
    while ($urandom_range(0, 4) == 0) @(negedge clk);
    in_valid = 1'b1; in_end = e; in_eor = eor; in_row = row; in_col = col; in_val = val;
    #2;
    while (!in_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 400; r++) begin
      int n, c, cnt; logic eor; fp32_t acc;
      n = (r % 9 == 0) ? 0 : $urandom_range(1, 40);
      eor = $urandom_range(0, 1);
      c = $urandom_range(0, 5); cnt = 0; acc = '0;
      for (int i = 0; i < n; i++) begin
        fp32_t v;
        v = rand_f(6);
        if (i > 0 && $urandom_range(0, 2) != 0) c += $urandom_range(1, 4);
        if (i > 0 && c == exp_q[$].idx && !exp_q[$].close) exp_q[$].val = r2f(f2r(exp_q[$].val) + f2r(v));
        else begin exp_q.push_back('{1'b0, 1'b0, idx_t'(c), v}); cnt++; end
        send(1'b0, 1'b0, idx_t'(r), idx_t'(c), v);
      end
      exp_q.push_back('{1'b1, eor, idx_t'(r), fp32_t'(cnt)});
      send(1'b1, eor, idx_t'(r), '0, '0);
    end
    sent_all = 1;
  end

  // output side: sample the pushes just before each clock edge
  initial begin
    @(posedge rst_n);
    while (!(sent_all && exp_q.size() == 0)) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      #3;
      if (out_elem_valid) begin
        ev_t e;
        checks++;
        e = exp_q.pop_front();
        if (e.close || out_elem.idx != e.idx || ulp_diff(out_elem.val, e.val) > 1) begin
          failures++;
          if (failures < 10) $display("FAIL element: got col %0d val %h, exp close=%b col %0d val %h", out_elem.idx, out_elem.val, e.close, e.idx, e.val);
        end
        bundle_elems++;
      end
      if (out_close) begin
        ev_t e;
        checks++;
        e = exp_q.pop_front();
        if (!e.close || out_row != e.idx || out_eor != e.eor || bundle_elems != int'(e.val)) begin
          failures++;
          if (failures < 10) $display("FAIL close: got row %0d eor %b n %0d, exp close=%b row %0d eor %b n %0d", out_row, out_eor, bundle_elems, e.close, e.idx, e.eor, e.val);
        end
        bundle_elems = 0;
      end
      @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("merges=%0d", n_merged);
    checks++; if (n_merged == 0) begin failures++; $display("FAIL no merge happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
