// rir_bundle_fifo: buffer for RIR bundles with a write controller and a
// read controller.
//
// A RIR bundle is a shared feature plus metadata (kind, end-of-row flag,
// element count) followed by its distinct <index,value> elements. The write
// controller stores each element into an element FIFO as it arrives and
// counts them; when the writer closes the bundle it pushes the shared
// feature and metadata, with the count it kept, into a separate header
// FIFO. The read controller works in the opposite order: it waits for a
// header, delivers it first (metadata and shared feature), then delivers
// exactly `count` elements. Because a header is only pushed after all of
// its elements, a reader never waits on a half-written bundle.
//
// Write side: wr_elem_valid pushes wr_elem; wr_close pushes the header
// {wr_shared, wr_kind, wr_eor, count}. Both may be asserted together (the
// element is then the last of the bundle). The writer must only assert
// either when wr_ready (neither FIFO almost full) is high.
// Read side: a valid/ready stream; the beat with rd_first carries the
// header in rd_hdr, later beats carry elements in rd_elem; rd_last marks
// the final beat of the bundle (the header itself for an empty bundle).
//
// The paper describes the element-then-header write order, header-first
// read order and almost-full/empty flow control; the two-FIFO split and
// the depths are this design's choices. ELEM_DEPTH must be at least the
// largest bundle, since elements are only read after their header.
module rir_bundle_fifo
  import reap_pkg::*;
#(
  parameter int unsigned ELEM_DEPTH = 64,
  parameter int unsigned HDR_DEPTH  = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  // write controller
  input  logic      wr_elem_valid,
  input  rir_elem_t wr_elem,
  input  logic      wr_close,
  input  idx_t      wr_shared,
  input  kind_e     wr_kind,
  input  logic      wr_eor,
  output logic      wr_ready,
  // read controller
  output logic      rd_valid,
  output logic      rd_first,
  output logic      rd_last,
  output rir_hdr_t  rd_hdr,
  output rir_elem_t rd_elem,
  input  logic      rd_ready,
  output logic      empty
);
  cnt_t      wcount;                 // elements written in the open bundle
  rir_hdr_t  hdr_in, hdr_out;
  logic      e_empty, e_afull, e_pop, e_full;
  logic      h_empty, h_afull, h_pop, h_full;
  rir_elem_t e_out;
  logic [$clog2(ELEM_DEPTH+1)-1:0] e_count;
  logic [$clog2(HDR_DEPTH+1)-1:0]  h_count;

  // ---------------- write controller
  always_comb begin
    hdr_in.shared = wr_shared;
    hdr_in.kind   = wr_kind;
    hdr_in.eor    = wr_eor;
    hdr_in.rsvd   = '0;
    hdr_in.count  = wcount + (wr_elem_valid ? cnt_t'(1) : cnt_t'(0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wcount <= '0;
    else if (wr_close) wcount <= '0;
    else if (wr_elem_valid) wcount <= wcount + 1'b1;
  end

  assign wr_ready = !e_afull && !h_afull;

  sync_fifo #(.WIDTH($bits(rir_elem_t)), .DEPTH(ELEM_DEPTH), .AF_SLACK(2)) u_elem (
    .clk, .rst_n, .push(wr_elem_valid), .wr_data(wr_elem), .pop(e_pop),
    .rd_data(e_out), .empty(e_empty), .full(e_full), .almost_full(e_afull), .count(e_count));

  sync_fifo #(.WIDTH($bits(rir_hdr_t)), .DEPTH(HDR_DEPTH), .AF_SLACK(2)) u_hdr (
    .clk, .rst_n, .push(wr_close), .wr_data(hdr_in), .pop(h_pop),
    .rd_data(hdr_out), .empty(h_empty), .full(h_full), .almost_full(h_afull), .count(h_count));

  // ---------------- read controller
  typedef enum logic {R_HDR, R_ELEM} rstate_e;
  rstate_e rstate;
  cnt_t    rleft;                    // elements still to deliver
  rir_hdr_t cur_hdr;

  always_comb begin
    rd_hdr   = (rstate == R_HDR) ? hdr_out : cur_hdr;
    rd_elem  = e_out;
    rd_first = (rstate == R_HDR);
    if (rstate == R_HDR) begin
      rd_valid = !h_empty;
      rd_last  = (hdr_out.count == 0);
    end else begin
      rd_valid = !e_empty;
      rd_last  = (rleft == 1);
    end
    h_pop = (rstate == R_HDR) && !h_empty && rd_ready;
    e_pop = (rstate == R_ELEM) && !e_empty && rd_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate  <= R_HDR;
      rleft   <= '0;
      cur_hdr <= '0;
    end else if (rstate == R_HDR) begin
      if (h_pop) begin
        cur_hdr <= hdr_out;
        rleft   <= hdr_out.count;
        if (hdr_out.count != 0) rstate <= R_ELEM;
      end
    end else if (e_pop) begin
      rleft <= rleft - 1'b1;
      if (rleft == 1) rstate <= R_HDR;
    end
  end

  assign empty = h_empty && e_empty && (rstate == R_HDR) && (wcount == 0);

  a_write_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_elem_valid || wr_close) |-> !e_full && !h_full);
endmodule
