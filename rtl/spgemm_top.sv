// spgemm_top: REAP accelerator for sparse general matrix multiplication,
// C = A * B, row by row.
//
// The host CPU has already turned A and B into RIR bundles (one bundle per
// row or per piece of a row, holding <column,value> pairs) and scheduled
// them in FPGA memory as batches: NUM_PIPES rows of A followed by only
// those rows of B whose index appears as a column in one of those A rows.
// The input controller streams this area and routes each A row to its own
// pipeline and every B row to all of them; each pipeline matches,
// multiplies, sorts and merges, producing one row of C; the output
// controller writes the rows of C back to memory as RIR bundles from
// out_base. A row of C may come out as several sorted runs (see
// spgemm_sort), the last one flagged end-of-row; the host adds equal
// columns across runs when it converts the result back to CSR.
//
// Interface: pulse `start` with in_base/out_base; `done` pulses when the
// END_ALL bundle has been consumed and everything has drained; `busy` is
// high in between; `out_bundles` counts result bundles written. Memory
// ports: one read port (req/addr/gnt, in-order valid/data, no
// back-pressure on data) and one write port (req/addr/data/gnt). Event
// outputs pulse for B rows matched, forced sort drains, merged products
// and input stalls, for observation.
module spgemm_top
  import reap_pkg::*;
#(
  parameter int unsigned NUM_PIPES  = 32,
  parameter int unsigned CAM_SIZE   = 32,
  parameter int unsigned SORT_DEPTH = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t in_base,
  input  addr_t out_base,
  output logic  busy,
  output logic  done,
  output addr_t out_bundles,
  output logic  mem_rd_req,
  output addr_t mem_rd_addr,
  input  logic  mem_rd_gnt,
  input  logic  mem_rd_valid,
  input  word_t mem_rd_data,
  output logic  mem_wr_req,
  output addr_t mem_wr_addr,
  output word_t mem_wr_data,
  input  logic  mem_wr_gnt,
  output logic  ev_match,
  output logic  ev_overflow,
  output logic  ev_merge,
  output logic  ev_stall,
  output logic  ev_broadcast
);
  logic [NUM_PIPES-1:0] pw_elem_valid, pw_close, pw_ready;
  rir_elem_t            pw_elem;
  idx_t                 pw_shared;
  kind_e                pw_kind;
  logic                 pw_eor;
  logic      [NUM_PIPES-1:0] pr_valid, pr_first, pr_last, pr_ready, p_idle;
  rir_hdr_t  pr_hdr  [NUM_PIPES];
  rir_elem_t pr_elem [NUM_PIPES];
  logic      [NUM_PIPES-1:0] p_match, p_ovf, p_merge;
  logic      oc_idle, ic_busy;

  spgemm_input_ctrl #(.NUM_PIPES(NUM_PIPES), .CAM_SIZE(CAM_SIZE)) u_in (
    .clk, .rst_n, .start, .in_base, .busy(ic_busy), .done,
    .all_idle((&p_idle) && oc_idle),
    .mem_rd_req, .mem_rd_addr, .mem_rd_gnt, .mem_rd_valid, .mem_rd_data,
    .pw_elem_valid, .pw_close, .pw_elem, .pw_shared, .pw_kind, .pw_eor, .pw_ready,
    .ev_stall, .ev_broadcast);

  for (genvar p = 0; p < NUM_PIPES; p++) begin : g_pipe
    spgemm_pipeline #(.CAM_SIZE(CAM_SIZE), .SORT_DEPTH(SORT_DEPTH)) u_pipe (
      .clk, .rst_n,
      .in_elem_valid(pw_elem_valid[p]), .in_elem(pw_elem), .in_close(pw_close[p]),
      .in_shared(pw_shared), .in_kind(pw_kind), .in_eor(pw_eor), .in_ready(pw_ready[p]),
      .out_valid(pr_valid[p]), .out_first(pr_first[p]), .out_last(pr_last[p]),
      .out_hdr(pr_hdr[p]), .out_elem(pr_elem[p]), .out_ready(pr_ready[p]),
      .idle(p_idle[p]), .ev_match(p_match[p]), .ev_overflow(p_ovf[p]), .ev_merge(p_merge[p]));
  end

  spgemm_output_ctrl #(.NUM_PIPES(NUM_PIPES)) u_out (
    .clk, .rst_n, .start, .out_base,
    .pr_valid, .pr_first, .pr_last, .pr_hdr, .pr_elem, .pr_ready,
    .mem_wr_req, .mem_wr_addr, .mem_wr_data, .mem_wr_gnt,
    .idle(oc_idle), .bundles(out_bundles));

  assign busy        = ic_busy;
  assign ev_match    = |p_match;
  assign ev_overflow = |p_ovf;
  assign ev_merge    = |p_merge;
endmodule
