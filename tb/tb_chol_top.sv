// tb_chol_top: end-to-end testbench of the sparse Cholesky accelerator
// (chol_top with its input controller, pipelines and output controller).
//
// A host routine generates a random sparse SPD matrix, runs the symbolic
// analysis, lays out L and the RA|RL job list in memory and starts the
// accelerator; when done, every row of L in memory is compared with a
// double-precision factorisation (tolerance 1e-4 relative). Small
// parameters (4 pipelines, CAM of 8) make columns split into several jobs
// and long rows of L pass the CAM in several segments. The testbench counts
// dependency stalls, extra segments, CAM hits, fill-in elements and split
// columns, and fails if any never happened. A watchdog bounds the run.
`timescale 1ns/1ps
module tb_chol_top;
  import reap_pkg::*;
  import tb_fp_pkg::*;
  import tb_chol_host_pkg::*;

  localparam int PIPES = 4;
  localparam int CAMS  = 8;
  localparam int LBASE = 16384;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic  rd_req, rd_gnt, rd_valid, lrd_req, lrd_gnt, lrd_valid, wr_req, wr_gnt;
  addr_t rd_addr, lrd_addr, wr_addr;
  word_t rd_data, lrd_data, wr_data;
  logic  ev_dep, ev_seg, ev_hit, ev_fill;
  int checks = 0, failures = 0;
  int n_dep = 0, n_seg = 0, n_hit = 0, n_fill_ev = 0, n_split = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  chol_top #(.NUM_PIPES(PIPES), .CAM_SIZE(CAMS)) dut (
    .clk, .rst_n, .start, .in_base('0), .busy, .done,
    .mem_rd_req(rd_req), .mem_rd_addr(rd_addr), .mem_rd_gnt(rd_gnt), .mem_rd_valid(rd_valid),
    .mem_rd_data(rd_data), .lrd_req, .lrd_addr, .lrd_gnt, .lrd_valid, .lrd_data,
    .mem_wr_req(wr_req), .mem_wr_addr(wr_addr), .mem_wr_data(wr_data), .mem_wr_gnt(wr_gnt),
    .ev_dep_stall(ev_dep), .ev_segment(ev_seg), .ev_hit, .ev_fill);

  mem_model #(.WORDS(65536), .LAT(4), .GNT_PCT(75)) u_mem (
    .clk, .rd0_req(rd_req), .rd0_addr(rd_addr), .rd0_gnt(rd_gnt), .rd0_valid(rd_valid),
    .rd0_data(rd_data), .rd1_req(lrd_req), .rd1_addr(lrd_addr), .rd1_gnt(lrd_gnt),
    .rd1_valid(lrd_valid), .rd1_data(lrd_data), .wr_req, .wr_addr, .wr_data, .wr_gnt);

  always @(posedge clk) begin
    if (ev_dep) n_dep++;
    if (ev_seg) n_seg++;
    if (ev_hit) n_hit++;
    if (ev_fill) n_fill_ev++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int size, int pct);
    int f;
    longint t0;
    gen(size, pct);
    build(LBASE, (PIPES < CAMS) ? PIPES : CAMS);
    n_split += n_split_cols;
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = '0;
    for (int i = 0; i < img.size(); i++) u_mem.mem[i] = img[i];
    @(posedge clk);
    start <= 1'b1;
    t0 = cycles;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    f = 0;
    for (int r = 0; r < n; r++) begin
      word_t w [$];
      for (int q = 0; q < cap[r]; q++) w.push_back(u_mem.mem[base[r] + q]);
      f += check_row(r, w, checks);
    end
    failures += f;
    $display("n=%0d density=%0d%%: %0d jobs, %0d fill-ins, %0d cycles, %0d failures",
             size, pct, n_jobs, n_fill, cycles - t0, f);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    run(6, 40);
    run(24, 15);
    run(40, 10);
    checks += 5;
    if (n_dep == 0)     begin failures++; $display("FAIL no dependency stall"); end
    if (n_seg == 0)     begin failures++; $display("FAIL row k never needed a second segment"); end
    if (n_hit == 0)     begin failures++; $display("FAIL no CAM hit"); end
    if (n_fill_ev == 0) begin failures++; $display("FAIL no fill-in element"); end
    if (n_split == 0)   begin failures++; $display("FAIL no column split into several jobs"); end
    $display("events: dep_stall=%0d segments=%0d hits=%0d fill=%0d split_cols=%0d",
             n_dep, n_seg, n_hit, n_fill_ev, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
