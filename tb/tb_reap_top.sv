// tb_reap_top: full-size end-to-end testbench of reap_top, every parameter
// at its default (32 SpGEMM pipelines, 32 Cholesky pipelines with 8
// multipliers, bundle/CAM size 32).
//
// Both engines run at the same time, each on its own memory model. SpGEMM
// computes C = A*A for a random 64x64 sparse A with one dense row (so one
// row of A needs two bundles and rows of C overflow the 32-entry sorter);
// Cholesky factorises a random 64x64 sparse SPD matrix whose fill-in gives
// columns longer than 32 pipelines and rows of L longer than the CAM.
// Results are checked against double-precision references. Every
// mechanism of both engines is counted and must occur at least once.
`timescale 1ns/1ps
module tb_reap_top;
  import reap_pkg::*;
  import tb_fp_pkg::*;

  localparam int SP_OUT = 32768;
  localparam int LBASE  = 16384;

  logic clk = 1'b0, rst_n = 1'b0, sp_start = 1'b0, ch_start = 1'b0;
  logic sp_busy, sp_done, ch_busy, ch_done;
  addr_t sp_out_bundles;
  logic  sp_rd_req, sp_rd_gnt, sp_rd_valid, sp_wr_req, sp_wr_gnt, u_gnt, u_valid;
  addr_t sp_rd_addr, sp_wr_addr;
  word_t sp_rd_data, sp_wr_data, u_data;
  logic  ch_rd_req, ch_rd_gnt, ch_rd_valid, ch_lrd_req, ch_lrd_gnt, ch_lrd_valid, ch_wr_req, ch_wr_gnt;
  addr_t ch_rd_addr, ch_lrd_addr, ch_wr_addr;
  word_t ch_rd_data, ch_lrd_data, ch_wr_data;
  logic [4:0] sp_ev;
  logic [3:0] ch_ev;
  int sp_cnt [5], ch_cnt [4];
  int checks = 0, failures = 0;
  longint cycles = 0;
  bit sp_fin = 0, ch_fin = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  reap_top dut (
    .clk, .rst_n,
    .sp_start, .sp_in_base('0), .sp_out_base(addr_t'(SP_OUT)), .sp_busy, .sp_done, .sp_out_bundles,
    .sp_rd_req, .sp_rd_addr, .sp_rd_gnt, .sp_rd_valid, .sp_rd_data,
    .sp_wr_req, .sp_wr_addr, .sp_wr_data, .sp_wr_gnt, .sp_events(sp_ev),
    .ch_start, .ch_in_base('0), .ch_busy, .ch_done,
    .ch_rd_req, .ch_rd_addr, .ch_rd_gnt, .ch_rd_valid, .ch_rd_data,
    .ch_lrd_req, .ch_lrd_addr, .ch_lrd_gnt, .ch_lrd_valid, .ch_lrd_data,
    .ch_wr_req, .ch_wr_addr, .ch_wr_data, .ch_wr_gnt, .ch_events(ch_ev));

  mem_model #(.WORDS(65536), .LAT(6), .GNT_PCT(85)) u_sp_mem (
    .clk, .rd0_req(sp_rd_req), .rd0_addr(sp_rd_addr), .rd0_gnt(sp_rd_gnt), .rd0_valid(sp_rd_valid),
    .rd0_data(sp_rd_data), .rd1_req(1'b0), .rd1_addr('0), .rd1_gnt(u_gnt), .rd1_valid(u_valid),
    .rd1_data(u_data), .wr_req(sp_wr_req), .wr_addr(sp_wr_addr), .wr_data(sp_wr_data), .wr_gnt(sp_wr_gnt));

  mem_model #(.WORDS(65536), .LAT(6), .GNT_PCT(85)) u_ch_mem (
    .clk, .rd0_req(ch_rd_req), .rd0_addr(ch_rd_addr), .rd0_gnt(ch_rd_gnt), .rd0_valid(ch_rd_valid),
    .rd0_data(ch_rd_data), .rd1_req(ch_lrd_req), .rd1_addr(ch_lrd_addr), .rd1_gnt(ch_lrd_gnt),
    .rd1_valid(ch_lrd_valid), .rd1_data(ch_lrd_data), .wr_req(ch_wr_req), .wr_addr(ch_wr_addr),
    .wr_data(ch_wr_data), .wr_gnt(ch_wr_gnt));

  initial begin
    foreach (sp_cnt[i]) sp_cnt[i] = 0;
    foreach (ch_cnt[i]) ch_cnt[i] = 0;
  end
  always @(posedge clk) begin
    for (int i = 0; i < 5; i++) if (sp_ev[i]) sp_cnt[i]++;
    for (int i = 0; i < 4; i++) if (ch_ev[i]) ch_cnt[i]++;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t res [$];
    int f, multi, sp_split, ch_split;
    longint t_sp, t_ch;
    // host preprocessing for both kernels
    tb_spgemm_host_pkg::gen(64, 12, 5);
    tb_spgemm_host_pkg::build(32, 32);
    sp_split = tb_spgemm_host_pkg::n_pieces_split;
    for (int i = 0; i < 65536; i++) u_sp_mem.mem[i] = '0;
    foreach (tb_spgemm_host_pkg::img[i]) u_sp_mem.mem[i] = tb_spgemm_host_pkg::img[i];
    tb_chol_host_pkg::gen(64, 12);
    tb_chol_host_pkg::build(LBASE, 32);
    ch_split = tb_chol_host_pkg::n_split_cols;
    for (int i = 0; i < 65536; i++) u_ch_mem.mem[i] = '0;
    foreach (tb_chol_host_pkg::img[i]) u_ch_mem.mem[i] = tb_chol_host_pkg::img[i];

    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    sp_start <= 1'b1; ch_start <= 1'b1;
    @(posedge clk);
    sp_start <= 1'b0; ch_start <= 1'b0;
    t_sp = cycles; t_ch = cycles;
    while (!(sp_fin && ch_fin)) begin
      @(posedge clk);
      if (sp_done) begin sp_fin = 1; t_sp = cycles - t_sp; end
      if (ch_done) begin ch_fin = 1; t_ch = cycles - t_ch; end
    end

    // SpGEMM result
    for (int i = 0; i < 30000; i++) res.push_back(u_sp_mem.mem[SP_OUT + i]);
    f = tb_spgemm_host_pkg::check(res, int'(sp_out_bundles), checks, multi);
    failures += f;
    $display("SpGEMM 64x64: %0d words in, %0d result bundles, %0d rows in several runs, %0d cycles, %0d failures",
             tb_spgemm_host_pkg::img.size(), sp_out_bundles, multi, t_sp, f);
    // Cholesky result
    f = 0;
    for (int r = 0; r < tb_chol_host_pkg::n; r++) begin
      word_t w [$];
      w.delete();
      for (int q = 0; q < tb_chol_host_pkg::cap[r]; q++) w.push_back(u_ch_mem.mem[tb_chol_host_pkg::base[r] + q]);
      f += tb_chol_host_pkg::check_row(r, w, checks);
    end
    failures += f;
    $display("Cholesky 64x64: %0d jobs, %0d fill-ins, %0d split columns, %0d cycles, %0d failures",
             tb_chol_host_pkg::n_jobs, tb_chol_host_pkg::n_fill, ch_split, t_ch, f);

    $display("SpGEMM events: match=%0d overflow=%0d merge=%0d stall=%0d broadcast=%0d split_rows=%0d",
             sp_cnt[0], sp_cnt[1], sp_cnt[2], sp_cnt[3], sp_cnt[4], sp_split);
    $display("Cholesky events: dep_stall=%0d segment=%0d hit=%0d fill=%0d split_cols=%0d",
             ch_cnt[0], ch_cnt[1], ch_cnt[2], ch_cnt[3], ch_split);
    for (int i = 0; i < 5; i++) begin checks++; if (sp_cnt[i] == 0) begin failures++; $display("FAIL SpGEMM event %0d never happened", i); end end
    for (int i = 0; i < 4; i++) begin checks++; if (ch_cnt[i] == 0) begin failures++; $display("FAIL Cholesky event %0d never happened", i); end end
    checks += 2;
    if (sp_split == 0) begin failures++; $display("FAIL no split A row"); end
    if (ch_split == 0) begin failures++; $display("FAIL no split column"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
