// spgemm_merge: PE-3 of a REAP SpGEMM pipeline, the merge unit.
//
// Partial products arrive sorted by column, so equal columns are adjacent
// and each new product only needs comparing with the one held element
// (the top of the merge queue). Equal column: the value is added into the
// top with a single-precision adder. Different column: the top leaves as a
// finished element of the result row and the new product becomes the top.
// An end token flushes the top and closes the output bundle with the row
// index and the end-of-row flag; the output goes straight into the
// pipeline's output RIR FIFO (out_ready is that FIFO's write-ready). An
// element and the close may leave in the same cycle.
//
// Follows the paper's description of the merge; the one-element queue and
// the combinational adder (one product per clock) are this design's.
module spgemm_merge
  import reap_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_end,
  input  logic      in_eor,
  input  idx_t      in_row,
  input  idx_t      in_col,
  input  fp32_t     in_val,
  output logic      in_ready,
  output logic      out_elem_valid,
  output rir_elem_t out_elem,
  output logic      out_close,
  output idx_t      out_row,
  output logic      out_eor,
  input  logic      out_ready,
  output logic      busy,
  output logic      merged         // pulses when a product is accumulated
);
  logic  top_valid;
  idx_t  top_col;
  fp32_t top_val, sum;

  fp_add u_add (.a(top_val), .b(in_val), .sub(1'b0), .y(sum));

  logic same;
  assign same = top_valid && (in_col == top_col);

  always_comb begin
    out_elem_valid = 1'b0;
    out_close      = 1'b0;
    out_elem.idx   = top_col;
    out_elem.val   = top_val;
    out_row        = in_row;
    out_eor        = in_eor;
    in_ready       = 1'b1;
    merged         = 1'b0;
    if (in_valid && in_end) begin
      in_ready       = out_ready;
      out_elem_valid = top_valid && out_ready;
      out_close      = out_ready;
    end else if (in_valid && same) begin
      merged = 1'b1;
    end else if (in_valid && top_valid) begin
      in_ready       = out_ready;
      out_elem_valid = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top_valid <= 1'b0;
      top_col   <= '0;
      top_val   <= '0;
    end else if (in_valid && in_ready) begin
      if (in_end) begin
        top_valid <= 1'b0;
      end else if (same) begin
        top_val <= sum;
      end else begin
        top_valid <= 1'b1;
        top_col   <= in_col;
        top_val   <= in_val;
      end
    end
  end

  assign busy = top_valid;
endmodule
