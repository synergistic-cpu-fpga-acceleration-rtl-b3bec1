// reap_pkg: types and constants shared by the REAP SpGEMM and Cholesky
// accelerators.
//
// Memory is organised in 64-bit words. A RIR bundle (shared feature,
// metadata, distinct features) is stored as one header word followed by
// `count` element words:
//   header  [63:32] shared feature (row of A/B/C, or column k for Cholesky)
//           [31:28] bundle kind, [27] end-of-row flag, [15:0] element count
//   element [63:32] index (column for CSR bundles, row for CSC bundles)
//           [31:0]  IEEE-754 single-precision value
// An RL (Cholesky L-metadata) bundle carries two words per triple <R,S,E>:
//   {R, S} then {E, 32'h0}.
// The paper names the fields (shared feature, metadata/count, distinct
// features) and the end-of-row metadata; the bit layout and the kind codes
// are this design's own.
package reap_pkg;

  localparam int unsigned WORD_W = 64;
  localparam int unsigned IDX_W  = 32;
  localparam int unsigned VAL_W  = 32;
  localparam int unsigned CNT_W  = 16;
  localparam int unsigned ADDR_W = 32;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [VAL_W-1:0]  fp32_t;
  typedef logic [CNT_W-1:0]  cnt_t;
  typedef logic [ADDR_W-1:0] addr_t;

  typedef enum logic [3:0] {
    K_A_ROW     = 4'd0,  // SpGEMM: one row (or piece of a row) of A
    K_B_ROW     = 4'd1,  // SpGEMM: one row of B, broadcast
    K_END_BATCH = 4'd2,  // SpGEMM: closes a batch of A rows
    K_END_ALL   = 4'd3,  // both: end of the command stream
    K_CHOL_RA   = 4'd4,  // Cholesky: column k of A, <row,value>
    K_CHOL_RL   = 4'd5,  // Cholesky: metadata bundle, triples <R,S,E>
    K_C_ROW     = 4'd6   // SpGEMM result: one sorted run of a row of C
  } kind_e;

  typedef struct packed {
    idx_t  shared;
    kind_e kind;
    logic  eor;
    logic [10:0] rsvd;
    cnt_t  count;
  } rir_hdr_t;

  typedef struct packed {
    idx_t  idx;
    fp32_t val;
  } rir_elem_t;

  function automatic word_t hdr_word(idx_t shared, kind_e kind, logic eor, cnt_t count);
    rir_hdr_t h;
    h.shared = shared; h.kind = kind; h.eor = eor; h.rsvd = '0; h.count = count;
    return word_t'(h);
  endfunction

endpackage
