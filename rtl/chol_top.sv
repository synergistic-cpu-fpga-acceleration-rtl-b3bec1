// chol_top: REAP accelerator for sparse Cholesky factorisation A = L*L^T,
// left-looking, one column of L at a time.
//
// The host CPU has run the symbolic analysis (which rows of each column of
// L are non-zero), reserved space for every row of L in FPGA memory and
// written one RA|RL job per column (or several for a column with more
// non-zero rows than pipelines). L lives only in FPGA memory: the
// accelerator reads earlier columns from there and appends each new
// element to its row. The input controller broadcasts column k of A and
// row k of L and hands each pipeline its own row r of L; each pipeline
// computes one element L(r,k) (dot product, then square root for the
// diagonal or division off it); the output controller writes the elements
// back. A new column only starts once the previous one is in memory.
//
// Interface: pulse `start` with in_base (start of the job list); `done`
// pulses after END_ALL when all results are written. Memory: a read port
// for the job list, a read port for rows of L, and a write port (same
// protocol as spgemm_top). Event outputs pulse for dependency-stall
// cycles, extra segments of row k, CAM hits and fill-in elements.
module chol_top
  import reap_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 32,
  parameter int unsigned NUM_MULS  = 8,
  parameter int unsigned CAM_SIZE  = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t in_base,
  output logic  busy,
  output logic  done,
  output logic  mem_rd_req,
  output addr_t mem_rd_addr,
  input  logic  mem_rd_gnt,
  input  logic  mem_rd_valid,
  input  word_t mem_rd_data,
  output logic  lrd_req,
  output addr_t lrd_addr,
  input  logic  lrd_gnt,
  input  logic  lrd_valid,
  input  word_t lrd_data,
  output logic  mem_wr_req,
  output addr_t mem_wr_addr,
  output word_t mem_wr_data,
  input  logic  mem_wr_gnt,
  output logic  ev_dep_stall,
  output logic  ev_segment,
  output logic  ev_hit,
  output logic  ev_fill
);
  logic                 acol_clear, acol_wr;
  idx_t                 acol_row, cam_col, assign_row, assign_col, st_col;
  fp32_t                acol_val, cam_val, st_val;
  addr_t                assign_addr;
  logic [NUM_PIPES-1:0] cam_clear, cam_wr, cam_ready, assign_en, st_valid, st_ready, fin;
  logic [NUM_PIPES-1:0] r_valid, r_ready, p_idle, p_hit, p_fill;
  idx_t                 r_row  [NUM_PIPES];
  idx_t                 r_col  [NUM_PIPES];
  addr_t                r_addr [NUM_PIPES];
  fp32_t                r_val  [NUM_PIPES];
  logic                 wr_done;

  chol_input_ctrl #(.NUM_PIPES(NUM_PIPES), .CAM_SIZE(CAM_SIZE)) u_in (
    .clk, .rst_n, .start, .in_base, .busy, .done, .pipes_idle(&p_idle), .wr_done,
    .mem_rd_req, .mem_rd_addr, .mem_rd_gnt, .mem_rd_valid, .mem_rd_data,
    .lrd_req, .lrd_addr, .lrd_gnt, .lrd_valid, .lrd_data,
    .acol_clear, .acol_wr, .acol_row, .acol_val,
    .cam_clear, .cam_wr, .cam_col, .cam_val, .cam_ready,
    .assign_en, .assign_row, .assign_col, .assign_addr,
    .st_valid, .st_col, .st_val, .st_ready, .fin, .ev_dep_stall, .ev_segment);

  for (genvar p = 0; p < NUM_PIPES; p++) begin : g_pipe
    chol_pipeline #(.NUM_MULS(NUM_MULS), .CAM_SIZE(CAM_SIZE)) u_pipe (
      .clk, .rst_n,
      .cam_clear(cam_clear[p]), .cam_wr(cam_wr[p]), .cam_col, .cam_val, .cam_ready(cam_ready[p]),
      .acol_clear, .acol_wr, .acol_row, .acol_val,
      .assign_en(assign_en[p]), .assign_row, .assign_col, .assign_addr,
      .in_valid(st_valid[p]), .in_col(st_col), .in_val(st_val), .in_ready(st_ready[p]),
      .fin(fin[p]),
      .out_valid(r_valid[p]), .out_row(r_row[p]), .out_col(r_col[p]), .out_addr(r_addr[p]),
      .out_val(r_val[p]), .out_ready(r_ready[p]),
      .idle(p_idle[p]), .ev_hit(p_hit[p]), .ev_fill(p_fill[p]));
  end

  chol_output_ctrl #(.NUM_PIPES(NUM_PIPES)) u_out (
    .clk, .rst_n, .res_valid(r_valid), .res_col(r_col), .res_addr(r_addr), .res_val(r_val),
    .res_ready(r_ready), .mem_wr_req, .mem_wr_addr, .mem_wr_data, .mem_wr_gnt, .wr_done);

  assign ev_hit  = |p_hit;
  assign ev_fill = |p_fill;
endmodule
