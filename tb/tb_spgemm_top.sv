// tb_spgemm_top: end-to-end testbench of the SpGEMM accelerator
// (spgemm_top with its input controller, pipelines and output controller).
//
// A host routine builds a random sparse A with one dense row (so that a row
// of A is split into several bundles and a row of C overflows the sorter),
// schedules C = A*A into memory, starts the accelerator and waits for
// done. The result bundles are decoded and compared with C computed in
// double precision (relative tolerance 1e-4). The run is repeated for
// several sizes and densities. The testbench counts how often each
// mechanism happened (CAM match, broadcast, sorter overflow, merge
// accumulation, input stall, split A row) and counts a failure for any
// that never happened. A watchdog ends the run after a fixed number of
// cycles.
`timescale 1ns/1ps
module tb_spgemm_top;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  import tb_spgemm_host_pkg::*;

  localparam int PIPES = 4;
  localparam int OUT_BASE = 32768;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  addr_t out_bundles;
  logic  rd_req, rd_gnt, rd_valid, wr_req, wr_gnt, rd1_gnt, rd1_valid;
  addr_t rd_addr, wr_addr;
  word_t rd_data, wr_data, rd1_data;
  logic  ev_match, ev_overflow, ev_merge, ev_stall, ev_broadcast;
  int checks = 0, failures = 0;
  int n_match = 0, n_ovf = 0, n_merge = 0, n_stall = 0, n_bcast = 0, n_split = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  spgemm_top #(.NUM_PIPES(PIPES)) dut (
    .clk, .rst_n, .start, .in_base('0), .out_base(addr_t'(OUT_BASE)), .busy, .done, .out_bundles,
    .mem_rd_req(rd_req), .mem_rd_addr(rd_addr), .mem_rd_gnt(rd_gnt), .mem_rd_valid(rd_valid),
    .mem_rd_data(rd_data), .mem_wr_req(wr_req), .mem_wr_addr(wr_addr), .mem_wr_data(wr_data),
    .mem_wr_gnt(wr_gnt), .ev_match, .ev_overflow, .ev_merge, .ev_stall, .ev_broadcast);

  mem_model #(.WORDS(65536), .LAT(4), .GNT_PCT(70)) u_mem (
    .clk, .rd0_req(rd_req), .rd0_addr(rd_addr), .rd0_gnt(rd_gnt), .rd0_valid(rd_valid),
    .rd0_data(rd_data), .rd1_req(1'b0), .rd1_addr('0), .rd1_gnt(rd1_gnt), .rd1_valid(rd1_valid),
    .rd1_data(rd1_data), .wr_req, .wr_addr, .wr_data, .wr_gnt);

  always @(posedge clk) begin
    if (ev_match) n_match++;
    if (ev_overflow) n_ovf++;
    if (ev_merge) n_merge++;
    if (ev_stall) n_stall++;
    if (ev_broadcast) n_bcast++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int size, int pct, int dense_row);
    word_t res [$];
    int f, multi;
    longint t0;
    gen(size, pct, dense_row);
    build(PIPES, 32);
    n_split += n_pieces_split;
    for (int i = 0; i < img.size(); i++) u_mem.mem[i] = img[i];
    @(posedge clk);
    start <= 1'b1;
    t0 = cycles;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    res.delete();
    for (int i = 0; i < 16384; i++) res.push_back(u_mem.mem[OUT_BASE + i]);
    f = check(res, int'(out_bundles), checks, multi);
    failures += f;
    $display("n=%0d density=%0d%%: %0d words in, %0d result bundles, %0d rows in several runs, %0d cycles, %0d failures",
             size, pct, img.size(), out_bundles, multi, cycles - t0, f);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    run(12, 30, -1);
    run(40, 10, 3);
    run(48, 25, 7);
    checks += 6;
    if (n_match == 0)   begin failures++; $display("FAIL never matched"); end
    if (n_bcast == 0)   begin failures++; $display("FAIL never broadcast"); end
    if (n_ovf == 0)     begin failures++; $display("FAIL sorter never overflowed"); end
    if (n_merge == 0)   begin failures++; $display("FAIL merge never accumulated"); end
    if (n_stall == 0)   begin failures++; $display("FAIL input never stalled"); end
    if (n_split == 0)   begin failures++; $display("FAIL no split A row"); end
    $display("events: match=%0d broadcast=%0d overflow=%0d merge=%0d stall=%0d split=%0d",
             n_match, n_bcast, n_ovf, n_merge, n_stall, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
