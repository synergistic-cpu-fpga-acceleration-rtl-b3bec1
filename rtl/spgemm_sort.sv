// spgemm_sort: PE-2 of a REAP SpGEMM pipeline, the partial-product sorter.
//
// A shift register of DEPTH entries kept in ascending column order, with a
// comparator on every entry. When a partial product arrives, each entry
// compares its column with the new one; entries with a column less than or
// equal to it stay, the first entry above it takes the new product and the
// rest shift up one place. One insertion per clock. When the end token of a
// row arrives (all B rows of the batch have been streamed), the register
// drains from entry 0, smallest column first, one product per clock, and
// the end token follows the last product.
//
// Overflow: if the register is full and another product arrives, the
// current contents are drained as a sorted run followed by a non-final end
// token (out_eor = 0), and insertion restarts empty. The row then leaves the
// pipeline as several sorted runs; only the last carries the row's
// end-of-row flag. The paper describes the shift register with comparators
// and the insert-and-shift operation; its depth and this overflow rule are
// this design's own. The `overflow` output pulses once per forced drain.
module spgemm_sort
  import reap_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_end,
  input  logic  in_eor,
  input  idx_t  in_row,
  input  idx_t  in_col,
  input  fp32_t in_val,
  output logic  in_ready,
  output logic  out_valid,
  output logic  out_end,
  output logic  out_eor,
  output idx_t  out_row,
  output idx_t  out_col,
  output fp32_t out_val,
  input  logic  out_ready,
  output logic  busy,
  output logic  overflow
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  idx_t         col_q [DEPTH];
  fp32_t        val_q [DEPTH];
  logic [CW-1:0] n;
  logic         draining, final_run, eor_q;
  idx_t         row_q;
  logic [DEPTH-1:0] le;            // entry i holds a column <= in_col

  always_comb begin
    for (int i = 0; i < DEPTH; i++) le[i] = (CW'(i) < n) && (col_q[i] <= in_col);
  end

  assign in_ready  = !draining && (in_end || n != CW'(DEPTH));
  assign overflow  = !draining && in_valid && !in_end && n == CW'(DEPTH);
  assign out_valid = draining;
  assign out_end   = draining && (n == 0);
  assign out_eor   = final_run && eor_q;
  assign out_row   = row_q;
  assign out_col   = col_q[0];
  assign out_val   = val_q[0];
  assign busy      = draining || (n != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n         <= '0;
      draining  <= 1'b0;
      final_run <= 1'b0;
      eor_q     <= 1'b0;
      row_q     <= '0;
    end else if (!draining) begin
      if (in_valid && in_end) begin
        draining  <= 1'b1;
        final_run <= 1'b1;
        eor_q     <= in_eor;
        row_q     <= in_row;
      end else if (in_valid && n == CW'(DEPTH)) begin
        draining  <= 1'b1;          // overflow: flush a partial sorted run
        final_run <= 1'b0;
      end else if (in_valid) begin
        n     <= n + 1'b1;
        row_q <= in_row;
      end
    end else if (out_ready) begin
      if (n == 0) draining <= 1'b0;
      else        n <= n - 1'b1;
    end
  end

  // insert-and-shift / drain-and-shift datapath
  always_ff @(posedge clk) begin
    if (!draining && in_valid && !in_end && n != CW'(DEPTH)) begin
      for (int i = 0; i < DEPTH; i++) begin
        if (!le[i]) begin
          if (i == 0 || le[i-1]) begin
            col_q[i] <= in_col;
            val_q[i] <= in_val;
          end else begin
            col_q[i] <= col_q[i-1];
            val_q[i] <= val_q[i-1];
          end
        end
      end
    end else if (draining && out_ready && n != 0) begin
      for (int i = 0; i < DEPTH - 1; i++) begin
        col_q[i] <= col_q[i+1];
        val_q[i] <= val_q[i+1];
      end
    end
  end
endmodule
