// spgemm_pipeline: one REAP SpGEMM pipeline, computing one row of C = A*B
// per batch.
//
// input RIR FIFO -> PE-1 match/multiply -> PE-2 sort -> PE-3 merge ->
// output RIR FIFO. The input FIFO is written by the input controller with
// this pipeline's A-row bundle, the broadcast B-row bundles and the
// end-of-batch marker; the output FIFO holds result bundles (one or more
// sorted runs of a row of C) for the output controller. Every stage hands
// on through a valid/ready handshake, so a full stage stalls the ones
// before it. `idle` is high when no bundle, product or result is held.
// Event outputs pulse for matched B rows, forced sorter drains and merged
// products.
module spgemm_pipeline
  import reap_pkg::*;
#(
  parameter int unsigned CAM_SIZE   = 32,
  parameter int unsigned SORT_DEPTH = 32,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // write side of the input RIR FIFO
  input  logic      in_elem_valid,
  input  rir_elem_t in_elem,
  input  logic      in_close,
  input  idx_t      in_shared,
  input  kind_e     in_kind,
  input  logic      in_eor,
  output logic      in_ready,
  // read side of the output RIR FIFO
  output logic      out_valid,
  output logic      out_first,
  output logic      out_last,
  output rir_hdr_t  out_hdr,
  output rir_elem_t out_elem,
  input  logic      out_ready,
  output logic      idle,
  output logic      ev_match,
  output logic      ev_overflow,
  output logic      ev_merge
);
  logic      b_valid, b_first, b_last, b_ready, b_empty;
  rir_hdr_t  b_hdr;
  rir_elem_t b_elem;
  logic      pp_valid, pp_end, pp_eor, pp_ready;
  idx_t      pp_row, pp_col;
  fp32_t     pp_val;
  logic      s_valid, s_end, s_eor, s_ready;
  idx_t      s_row, s_col;
  fp32_t     s_val;
  logic      m_elem_valid, m_close, m_eor, m_ready;
  rir_elem_t m_elem;
  idx_t      m_row;
  logic      mm_busy, so_busy, me_busy, o_empty;

  rir_bundle_fifo #(.ELEM_DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .wr_elem_valid(in_elem_valid), .wr_elem(in_elem), .wr_close(in_close),
    .wr_shared(in_shared), .wr_kind(in_kind), .wr_eor(in_eor), .wr_ready(in_ready),
    .rd_valid(b_valid), .rd_first(b_first), .rd_last(b_last), .rd_hdr(b_hdr),
    .rd_elem(b_elem), .rd_ready(b_ready), .empty(b_empty));

  spgemm_match_mul #(.CAM_SIZE(CAM_SIZE)) u_pe1 (
    .clk, .rst_n,
    .in_valid(b_valid), .in_first(b_first), .in_hdr(b_hdr), .in_elem(b_elem), .in_ready(b_ready),
    .pp_valid, .pp_end, .pp_eor, .pp_row, .pp_col, .pp_val, .pp_ready,
    .busy(mm_busy), .match_hit(ev_match));

  spgemm_sort #(.DEPTH(SORT_DEPTH)) u_pe2 (
    .clk, .rst_n,
    .in_valid(pp_valid), .in_end(pp_end), .in_eor(pp_eor), .in_row(pp_row),
    .in_col(pp_col), .in_val(pp_val), .in_ready(pp_ready),
    .out_valid(s_valid), .out_end(s_end), .out_eor(s_eor), .out_row(s_row),
    .out_col(s_col), .out_val(s_val), .out_ready(s_ready),
    .busy(so_busy), .overflow(ev_overflow));

  spgemm_merge u_pe3 (
    .clk, .rst_n,
    .in_valid(s_valid), .in_end(s_end), .in_eor(s_eor), .in_row(s_row),
    .in_col(s_col), .in_val(s_val), .in_ready(s_ready),
    .out_elem_valid(m_elem_valid), .out_elem(m_elem), .out_close(m_close),
    .out_row(m_row), .out_eor(m_eor), .out_ready(m_ready),
    .busy(me_busy), .merged(ev_merge));

  rir_bundle_fifo #(.ELEM_DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .wr_elem_valid(m_elem_valid), .wr_elem(m_elem), .wr_close(m_close),
    .wr_shared(m_row), .wr_kind(K_C_ROW), .wr_eor(m_eor), .wr_ready(m_ready),
    .rd_valid(out_valid), .rd_first(out_first), .rd_last(out_last), .rd_hdr(out_hdr),
    .rd_elem(out_elem), .rd_ready(out_ready), .empty(o_empty));

  assign idle = b_empty && !mm_busy && !so_busy && !me_busy && o_empty;
endmodule
