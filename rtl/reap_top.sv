// reap_top: the two REAP accelerators, sparse matrix-matrix multiplication
// and sparse Cholesky factorisation, side by side.
//
// Each engine keeps its own control and memory ports (prefix sp_ for
// SpGEMM, ch_ for Cholesky); they share only clock and reset and can run
// at the same time. The board memory that holds the RIR bundles, the
// results and L is outside this module. In the main configuration each
// engine has 32 pipelines with bundle/CAM size 32, and every Cholesky
// dot-product PE has 8 multipliers.
module reap_top
  import reap_pkg::*;
#(
  parameter int unsigned SP_PIPES      = 32,
  parameter int unsigned SP_CAM_SIZE   = 32,
  parameter int unsigned SP_SORT_DEPTH = 32,
  parameter int unsigned CH_PIPES      = 32,
  parameter int unsigned CH_MULS       = 8,
  parameter int unsigned CH_CAM_SIZE   = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  // SpGEMM engine
  input  logic  sp_start,
  input  addr_t sp_in_base,
  input  addr_t sp_out_base,
  output logic  sp_busy,
  output logic  sp_done,
  output addr_t sp_out_bundles,
  output logic  sp_rd_req,
  output addr_t sp_rd_addr,
  input  logic  sp_rd_gnt,
  input  logic  sp_rd_valid,
  input  word_t sp_rd_data,
  output logic  sp_wr_req,
  output addr_t sp_wr_addr,
  output word_t sp_wr_data,
  input  logic  sp_wr_gnt,
  output logic  [4:0] sp_events,   // match, overflow, merge, stall, broadcast
  // Cholesky engine
  input  logic  ch_start,
  input  addr_t ch_in_base,
  output logic  ch_busy,
  output logic  ch_done,
  output logic  ch_rd_req,
  output addr_t ch_rd_addr,
  input  logic  ch_rd_gnt,
  input  logic  ch_rd_valid,
  input  word_t ch_rd_data,
  output logic  ch_lrd_req,
  output addr_t ch_lrd_addr,
  input  logic  ch_lrd_gnt,
  input  logic  ch_lrd_valid,
  input  word_t ch_lrd_data,
  output logic  ch_wr_req,
  output addr_t ch_wr_addr,
  output word_t ch_wr_data,
  input  logic  ch_wr_gnt,
  output logic  [3:0] ch_events    // dependency stall, segment, CAM hit, fill-in
);
  spgemm_top #(.NUM_PIPES(SP_PIPES), .CAM_SIZE(SP_CAM_SIZE), .SORT_DEPTH(SP_SORT_DEPTH)) u_spgemm (
    .clk, .rst_n, .start(sp_start), .in_base(sp_in_base), .out_base(sp_out_base),
    .busy(sp_busy), .done(sp_done), .out_bundles(sp_out_bundles),
    .mem_rd_req(sp_rd_req), .mem_rd_addr(sp_rd_addr), .mem_rd_gnt(sp_rd_gnt),
    .mem_rd_valid(sp_rd_valid), .mem_rd_data(sp_rd_data),
    .mem_wr_req(sp_wr_req), .mem_wr_addr(sp_wr_addr), .mem_wr_data(sp_wr_data),
    .mem_wr_gnt(sp_wr_gnt),
    .ev_match(sp_events[0]), .ev_overflow(sp_events[1]), .ev_merge(sp_events[2]),
    .ev_stall(sp_events[3]), .ev_broadcast(sp_events[4]));

  chol_top #(.NUM_PIPES(CH_PIPES), .NUM_MULS(CH_MULS), .CAM_SIZE(CH_CAM_SIZE)) u_chol (
    .clk, .rst_n, .start(ch_start), .in_base(ch_in_base), .busy(ch_busy), .done(ch_done),
    .mem_rd_req(ch_rd_req), .mem_rd_addr(ch_rd_addr), .mem_rd_gnt(ch_rd_gnt),
    .mem_rd_valid(ch_rd_valid), .mem_rd_data(ch_rd_data),
    .lrd_req(ch_lrd_req), .lrd_addr(ch_lrd_addr), .lrd_gnt(ch_lrd_gnt),
    .lrd_valid(ch_lrd_valid), .lrd_data(ch_lrd_data),
    .mem_wr_req(ch_wr_req), .mem_wr_addr(ch_wr_addr), .mem_wr_data(ch_wr_data),
    .mem_wr_gnt(ch_wr_gnt),
    .ev_dep_stall(ch_events[0]), .ev_segment(ch_events[1]), .ev_hit(ch_events[2]),
    .ev_fill(ch_events[3]));
endmodule
