// spgemm_match_mul: PE-1 of a REAP SpGEMM pipeline, the match and
// multiply unit.
//
// The unit consumes the pipeline's bundle stream (header beat first, then
// elements). An A-row bundle clears the CAM and loads it: each element's
// column index becomes a CAM key whose slot addresses a value store holding
// A's value; the row index of A is kept for the results. For a B-row
// bundle, the CAM is searched once with the bundle's shared feature (the
// row index of B): on a hit the matching A value is latched and every
// element <colB, valB> of the bundle is pushed into the multiplier work
// queue as (valA, valB, colB); on a miss the bundle is dropped. An
// end-of-batch bundle enters the work queue as an end token. The
// multiplier stage pops the queue, multiplies in single precision and
// registers the partial product (colB, valA*valB) for the sorter, behind a
// valid/ready handshake.
//
// Follows the paper: CAM of columns of A pointing at a value store, a
// buffer acting as the multiplier's work queue, single-precision multiply.
// This design's choices: matching on the B bundle's shared feature (one
// lookup per B row), the queue depth, and one register after the
// multiplier.
module spgemm_match_mul
  import reap_pkg::*;
#(
  parameter int unsigned CAM_SIZE = 32,
  parameter int unsigned WQ_DEPTH = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  // bundle stream from the pipeline's input RIR FIFO
  input  logic      in_valid,
  input  logic      in_first,
  input  rir_hdr_t  in_hdr,
  input  rir_elem_t in_elem,
  output logic      in_ready,
  // partial products / end token to the sorter
  output logic      pp_valid,
  output logic      pp_end,
  output logic      pp_eor,
  output idx_t      pp_row,
  output idx_t      pp_col,
  output fp32_t     pp_val,
  input  logic      pp_ready,
  output logic      busy,
  output logic      match_hit      // pulses on every B bundle that matched
);
  localparam int unsigned SW = $clog2(CAM_SIZE);

  typedef enum logic [1:0] {M_IDLE, M_LOAD_A, M_STREAM_B, M_SKIP} mstate_e;
  mstate_e mstate;

  typedef struct packed {
    logic  is_end;
    logic  eor;
    idx_t  row;
    idx_t  col;
    fp32_t va;
    fp32_t vb;
  } wq_t;

  fp32_t        a_val [CAM_SIZE];  // value store addressed by the CAM slot
  idx_t         row_a;
  logic         eor_a;
  logic [SW:0]  slot;
  fp32_t        va_hit;
  logic         cam_clear, cam_wr, lk_hit;
  logic [SW-1:0] lk_idx;

  wq_t          wq_in, wq_out;
  logic         wq_push, wq_pop, wq_empty, wq_full, wq_afull;
  logic [$clog2(WQ_DEPTH+1)-1:0] wq_count;

  cam #(.DEPTH(CAM_SIZE), .KEY_W(IDX_W)) u_cam (
    .clk, .rst_n, .clear(cam_clear), .wr_en(cam_wr), .wr_idx(slot[SW-1:0]),
    .wr_key(in_elem.idx), .lk_key(in_hdr.shared), .lk_hit, .lk_idx);

  sync_fifo #(.WIDTH($bits(wq_t)), .DEPTH(WQ_DEPTH), .AF_SLACK(1)) u_wq (
    .clk, .rst_n, .push(wq_push), .wr_data(wq_in), .pop(wq_pop), .rd_data(wq_out),
    .empty(wq_empty), .full(wq_full), .almost_full(wq_afull), .count(wq_count));

  // ------------------------------------------------------------ match
  always_comb begin
    in_ready  = 1'b1;
    wq_push   = 1'b0;
    wq_in     = '0;
    cam_clear = 1'b0;
    cam_wr    = 1'b0;
    match_hit = 1'b0;
    if (in_valid && in_first) begin
      unique case (in_hdr.kind)
        K_A_ROW: cam_clear = 1'b1;
        K_B_ROW: match_hit = lk_hit;
        K_END_BATCH: begin
          in_ready     = !wq_full;
          wq_push      = !wq_full;
          wq_in.is_end = 1'b1;
          wq_in.eor    = eor_a;
          wq_in.row    = row_a;
        end
        default: ;
      endcase
    end else if (in_valid) begin
      if (mstate == M_LOAD_A) begin
        cam_wr = 1'b1;
      end else if (mstate == M_STREAM_B) begin
        in_ready = !wq_full;
        wq_push  = !wq_full;
        wq_in.row = row_a;
        wq_in.col = in_elem.idx;
        wq_in.va  = va_hit;
        wq_in.vb  = in_elem.val;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate <= M_IDLE;
      row_a  <= '0;
      eor_a  <= 1'b0;
      slot   <= '0;
      va_hit <= '0;
    end else if (in_valid && in_ready) begin
      if (in_first) begin
        unique case (in_hdr.kind)
          K_A_ROW: begin
            row_a  <= in_hdr.shared;
            eor_a  <= in_hdr.eor;
            slot   <= '0;
            mstate <= (in_hdr.count != 0) ? M_LOAD_A : M_IDLE;
          end
          K_B_ROW: begin
            va_hit <= a_val[lk_idx];
            mstate <= (in_hdr.count == 0) ? M_IDLE : (lk_hit ? M_STREAM_B : M_SKIP);
          end
          default: mstate <= M_IDLE;
        endcase
      end else if (mstate == M_LOAD_A) begin
        slot <= slot + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !in_first && mstate == M_LOAD_A) a_val[slot[SW-1:0]] <= in_elem.val;
  end

  // ------------------------------------------------------------ multiply
  fp32_t prod;
  fp_mul u_mul (.a(wq_out.va), .b(wq_out.vb), .y(prod));

  assign wq_pop = !wq_empty && (!pp_valid || pp_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pp_valid <= 1'b0;
      pp_end   <= 1'b0;
      pp_eor   <= 1'b0;
      pp_row   <= '0;
      pp_col   <= '0;
      pp_val   <= '0;
    end else if (!pp_valid || pp_ready) begin
      pp_valid <= !wq_empty;
      pp_end   <= wq_out.is_end;
      pp_eor   <= wq_out.eor;
      pp_row   <= wq_out.row;
      pp_col   <= wq_out.col;
      pp_val   <= wq_out.is_end ? '0 : prod;
    end
  end

  assign busy = !wq_empty || pp_valid;

  a_bundle_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_first && in_hdr.kind == K_A_ROW) |-> in_hdr.count <= cnt_t'(CAM_SIZE));
endmodule
