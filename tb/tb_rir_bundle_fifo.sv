// tb_rir_bundle_fifo: self-checking testbench of the RIR bundle buffer.
//
// A random write controller model sends bundles of 0 to 20 elements (the
// close may come with the last element or on a later clock) and random
// shared feature, kind and end-of-row flag, writing only when wr_ready is
// high. A random read side pulls with rd_ready. Every bundle is recorded in
// a scoreboard; the reader checks the header beat (shared, kind, eor,
// count), rd_first/rd_last and every element in order. Default sizes;
// the random stalls fill the buffer so that back-pressure (wr_ready low)
// is exercised and counted.
`timescale 1ns/1ps
module tb_rir_bundle_fifo;
  import reap_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_elem_valid = 1'b0, wr_close = 1'b0, wr_eor = 1'b0, wr_ready;
  rir_elem_t wr_elem = '0;
  idx_t  wr_shared = '0;
  kind_e wr_kind = K_A_ROW;
  logic rd_valid, rd_first, rd_last, rd_ready = 1'b0, empty;
  rir_hdr_t rd_hdr;
  rir_elem_t rd_elem;
  word_t exp_q [$];           // header word, then elements, per bundle
  int checks = 0, failures = 0, n_full = 0, bundles_rd = 0;
  localparam int NB = 600;

  rir_bundle_fifo dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge clk) if (rst_n && !wr_ready) n_full++;

  // writer
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int b = 0; b < NB; b++) begin
      int n; idx_t sh; kind_e kd; logic eo;
      n = $urandom_range(0, 20);
      sh = $urandom; kd = kind_e'($urandom_range(0, 6)); eo = $urandom_range(0, 1);
      exp_q.push_back(hdr_word(sh, kd, eo, cnt_t'(n)));
      for (int i = 0; i < n; i++) begin
        rir_elem_t e;
        e.idx = $urandom; e.val = $urandom;
        do @(negedge clk); while (!wr_ready || $urandom_range(0, 3) == 0);
        wr_elem_valid = 1'b1; wr_elem = e;
        exp_q.push_back(word_t'(e));
        if (i == n - 1 && $urandom_range(0, 1) == 0) begin
          wr_close = 1'b1; wr_shared = sh; wr_kind = kd; wr_eor = eo;
        end
        @(posedge clk); #1;
        wr_elem_valid = 1'b0;
        if (wr_close) begin wr_close = 1'b0; n = -1; end
      end
      if (n >= 0) begin
        do @(negedge clk); while (!wr_ready);
        wr_close = 1'b1; wr_shared = sh; wr_kind = kd; wr_eor = eo;
        @(posedge clk); #1;
        wr_close = 1'b0;
      end
    end
  end

  // reader
  initial begin
    int left;
    left = 0;
    @(posedge rst_n);
    while (bundles_rd < NB) begin
      @(negedge clk);
      // long read stalls every so often so the buffer fills up
      rd_ready = ((bundles_rd / 50) % 2 == 0) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 2) != 0);
      #1;
      if (rd_valid && rd_ready) begin
        word_t e;
        e = exp_q.pop_front();
        checks++;
        if (rd_first) begin
          rir_hdr_t h; h = rir_hdr_t'(e);
          if (left != 0 || rd_hdr.shared != h.shared || rd_hdr.kind != h.kind || rd_hdr.eor != h.eor ||
              rd_hdr.count != h.count || rd_last != (h.count == 0)) begin
            failures++;
            if (failures < 10) $display("FAIL header %0d: got %h exp %h", bundles_rd, rd_hdr, h);
          end
          left = h.count;
          if (left == 0) bundles_rd++;
        end else begin
          if (left == 0 || word_t'(rd_elem) != e || rd_last != (left == 1)) begin
            failures++;
            if (failures < 10) $display("FAIL element of bundle %0d: got %h exp %h", bundles_rd, rd_elem, e);
          end
          left--;
          if (left == 0) bundles_rd++;
        end
      end
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++; if (!empty || exp_q.size() != 0) begin failures++; $display("FAIL not empty at end"); end
    $display("bundles=%0d cycles with wr_ready low=%0d", bundles_rd, n_full);
    checks++; if (n_full == 0) begin failures++; $display("FAIL back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
