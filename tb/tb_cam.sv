// tb_cam: self-checking testbench of the content-addressable memory.
//
// Drives random writes (slot, key), occasional clears and a random lookup
// key every clock, with keys drawn from a small range so that duplicate
// keys and misses both occur. A reference model (key and valid per slot)
// predicts hit and the lowest matching slot; the combinational outputs are
// compared before every clock edge. Default parameters (32 entries, 32-bit
// keys). Counts lookups that hit, miss and hit several slots.
`timescale 1ns/1ps
module tb_cam;
  localparam int DEPTH = 32;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr_en = 1'b0;
  logic [4:0]  wr_idx = '0, lk_idx;
  logic [31:0] wr_key = '0, lk_key = '0;
  logic        lk_hit;
  logic [31:0] mkey [DEPTH];
  bit          mval [DEPTH];
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0, n_multi = 0;

  cam #(.DEPTH(DEPTH), .KEY_W(32)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    foreach (mval[i]) begin mval[i] = 0; mkey[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      int hits, first;
      @(negedge clk);
      clear  = ($urandom_range(0, 199) == 0);
      wr_en  = ($urandom_range(0, 2) == 0);
      wr_idx = 5'($urandom_range(0, DEPTH - 1));
      wr_key = $urandom_range(0, 47);
      lk_key = (t % 7 == 0) ? $urandom : $urandom_range(0, 47);
      #1;
      hits = 0; first = -1;
      for (int i = 0; i < DEPTH; i++) if (mval[i] && mkey[i] == lk_key) begin
        hits++; if (first < 0) first = i;
      end
      checks++;
      if (lk_hit !== (hits > 0) || (hits > 0 && lk_idx !== 5'(first))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d key=%0d hit=%b idx=%0d exp hits=%0d first=%0d", t, lk_key, lk_hit, lk_idx, hits, first);
      end
      if (hits == 0) n_miss++; else n_hit++;
      if (hits > 1) n_multi++;
      @(posedge clk);
      if (clear) foreach (mval[i]) mval[i] = 0;
      else if (wr_en) begin mval[wr_idx] = 1; mkey[wr_idx] = wr_key; end
    end
    $display("lookups: hit=%0d miss=%0d multi=%0d", n_hit, n_miss, n_multi);
    checks++; if (n_hit == 0 || n_miss == 0 || n_multi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
