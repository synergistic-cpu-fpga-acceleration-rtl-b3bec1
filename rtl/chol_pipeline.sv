// chol_pipeline: one REAP Cholesky pipeline, producing one element L(r,k)
// of the column being computed.
//
// Dot-product PE followed by the Div/SqRoot PE; the dot results pass
// between them through a valid/ready handshake. Row k of L and column k of
// A arrive on broadcast inputs shared by all pipelines, the pipeline's own
// row r of L on a private stream, and the result leaves towards the output
// controller. `idle` is high when neither PE holds work.
module chol_pipeline
  import reap_pkg::*;
#(
  parameter int unsigned NUM_MULS = 8,
  parameter int unsigned CAM_SIZE = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cam_clear,
  input  logic  cam_wr,
  input  idx_t  cam_col,
  input  fp32_t cam_val,
  output logic  cam_ready,
  input  logic  acol_clear,
  input  logic  acol_wr,
  input  idx_t  acol_row,
  input  fp32_t acol_val,
  input  logic  assign_en,
  input  idx_t  assign_row,
  input  idx_t  assign_col,
  input  addr_t assign_addr,
  input  logic  in_valid,
  input  idx_t  in_col,
  input  fp32_t in_val,
  output logic  in_ready,
  input  logic  fin,
  output logic  out_valid,
  output idx_t  out_row,
  output idx_t  out_col,
  output addr_t out_addr,
  output fp32_t out_val,
  input  logic  out_ready,
  output logic  idle,
  output logic  ev_hit,
  output logic  ev_fill
);
  logic  d_valid, d_ready, dp_busy, ds_busy;
  fp32_t d_rk, d_kk;

  chol_dot_product #(.NUM_MULS(NUM_MULS), .CAM_SIZE(CAM_SIZE)) u_dot (
    .clk, .rst_n, .cam_clear, .cam_wr, .cam_col, .cam_val, .cam_ready,
    .in_valid, .in_col, .in_val, .in_ready, .fin,
    .res_valid(d_valid), .dot_rk(d_rk), .dot_kk(d_kk), .res_ready(d_ready),
    .busy(dp_busy), .ev_hit);

  chol_div_sqrt #(.CAM_SIZE(CAM_SIZE)) u_div (
    .clk, .rst_n, .acol_clear, .acol_wr, .acol_row, .acol_val,
    .assign_en, .assign_row, .assign_col, .assign_addr,
    .dot_valid(d_valid), .dot_rk(d_rk), .dot_kk(d_kk), .dot_ready(d_ready),
    .out_valid, .out_row, .out_col, .out_addr, .out_val, .out_ready,
    .busy(ds_busy), .ev_fill);

  assign idle = !dp_busy && !ds_busy;
endmodule
