// chol_dot_product: dot-product PE of a REAP Cholesky pipeline.
//
// For column k of L, this PE computes for its own row r
//   dot_rk = L(r,0:k-1) . L(k,0:k-1)   and   dot_kk = L(k,0:k-1) . L(k,0:k-1)
// (the second one redundantly in every pipeline, so that pipelines never
// wait on each other for the diagonal).
//
// Row k of L is broadcast in segments of at most CAM_SIZE elements: each
// element <col,val> is written into the CAM (key = column) and its value
// store, and the pair (val,val) is sent to a multiplier lane to add val^2
// into the diagonal sum. Then the pipeline's own row r streams in
// (in_valid/in_col/in_val): each element looks its column up in the CAM
// and, on a hit, the pair (L(r,c), L(k,c)) goes into the next lane's queue
// (round-robin over NUM_MULS lanes). Each lane multiplies its pairs in
// single precision and keeps two running sums (dot and diagonal). After
// `fin`, once all lanes have drained, the lane sums are added up one lane
// per clock and {dot_rk, dot_kk} is offered on res_valid until res_ready;
// the PE then clears itself for the next column.
//
// From the paper: CAM-based match feeding several multipliers through
// buffers, then accumulation, 8 multipliers per PE in the main
// configuration. This design's choices: per-lane accumulators with a final
// sequential reduction, segmenting row k through the CAM, and folding the
// diagonal sum of squares into the CAM load.
module chol_dot_product
  import reap_pkg::*;
#(
  parameter int unsigned NUM_MULS = 8,
  parameter int unsigned CAM_SIZE = 32,
  parameter int unsigned LQ_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // LRow_k segment broadcast
  input  logic  cam_clear,
  input  logic  cam_wr,
  input  idx_t  cam_col,
  input  fp32_t cam_val,
  output logic  cam_ready,
  // own LRow_r stream
  input  logic  in_valid,
  input  idx_t  in_col,
  input  fp32_t in_val,
  output logic  in_ready,
  input  logic  fin,
  // results
  output logic  res_valid,
  output fp32_t dot_rk,
  output fp32_t dot_kk,
  input  logic  res_ready,
  output logic  busy,
  output logic  ev_hit
);
  localparam int unsigned SW = $clog2(CAM_SIZE);
  localparam int unsigned LW = (NUM_MULS > 1) ? $clog2(NUM_MULS) : 1;

  typedef struct packed {
    logic  diag;
    fp32_t x;
    fp32_t y;
  } pair_t;

  // ---------------------------------------------------------- match
  fp32_t        kval [CAM_SIZE];
  logic [SW:0]  slot;
  logic         lk_hit;
  logic [SW-1:0] lk_idx;
  logic [LW-1:0] rr;

  cam #(.DEPTH(CAM_SIZE), .KEY_W(IDX_W)) u_cam (
    .clk, .rst_n, .clear(cam_clear), .wr_en(cam_wr), .wr_idx(slot[SW-1:0]), .wr_key(cam_col),
    .lk_key(in_col), .lk_hit, .lk_idx);

  logic [NUM_MULS-1:0] q_push, q_pop, q_empty, q_full, q_afull;
  pair_t               q_in;
  pair_t               q_out [NUM_MULS];
  logic                tgt_full;

  assign tgt_full  = q_full[rr];
  assign cam_ready = !tgt_full;
  assign in_ready  = !cam_wr && (!lk_hit || !tgt_full);
  assign ev_hit    = in_valid && in_ready && lk_hit;

  always_comb begin
    q_push = '0;
    q_in   = '0;
    if (cam_wr && !tgt_full) begin
      q_push[rr] = 1'b1;
      q_in       = '{diag: 1'b1, x: cam_val, y: cam_val};
    end else if (in_valid && in_ready && lk_hit) begin
      q_push[rr] = 1'b1;
      q_in       = '{diag: 1'b0, x: in_val, y: kval[lk_idx]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      rr   <= '0;
    end else begin
      if (cam_clear) slot <= '0;
      else if (cam_wr && !tgt_full) slot <= slot + 1'b1;
      if (|q_push) rr <= (rr == LW'(NUM_MULS - 1)) ? '0 : rr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cam_wr && !tgt_full && !cam_clear) kval[slot[SW-1:0]] <= cam_val;
  end

  // ---------------------------------------------------------- lanes
  logic  [NUM_MULS-1:0] p_valid, p_diag;
  fp32_t p_val    [NUM_MULS];
  fp32_t acc_dot  [NUM_MULS];
  fp32_t acc_diag [NUM_MULS];
  fp32_t prod     [NUM_MULS];
  fp32_t sum_l    [NUM_MULS];
  logic  clear_acc;

  for (genvar l = 0; l < NUM_MULS; l++) begin : g_lane
    logic [$clog2(LQ_DEPTH+1)-1:0] q_cnt;
    sync_fifo #(.WIDTH($bits(pair_t)), .DEPTH(LQ_DEPTH), .AF_SLACK(1)) u_q (
      .clk, .rst_n, .push(q_push[l]), .wr_data(q_in), .pop(q_pop[l]), .rd_data(q_out[l]),
      .empty(q_empty[l]), .full(q_full[l]), .almost_full(q_afull[l]), .count(q_cnt));
    assign q_pop[l] = !q_empty[l];

    fp_mul u_mul (.a(q_out[l].x), .b(q_out[l].y), .y(prod[l]));
    fp_add u_acc (.a(p_diag[l] ? acc_diag[l] : acc_dot[l]), .b(p_val[l]), .sub(1'b0), .y(sum_l[l]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        p_valid[l]  <= 1'b0;
        p_diag[l]   <= 1'b0;
        p_val[l]    <= '0;
        acc_dot[l]  <= '0;
        acc_diag[l] <= '0;
      end else begin
        p_valid[l] <= q_pop[l];
        p_diag[l]  <= q_out[l].diag;
        p_val[l]   <= prod[l];
        if (clear_acc) begin
          acc_dot[l]  <= '0;
          acc_diag[l] <= '0;
        end else if (p_valid[l]) begin
          if (p_diag[l]) acc_diag[l] <= sum_l[l];
          else           acc_dot[l]  <= sum_l[l];
        end
      end
    end
  end

  // ---------------------------------------------------------- reduction
  typedef enum logic [1:0] {D_RUN, D_RED, D_OUT} dstate_e;
  dstate_e      dstate;
  logic         fin_seen;
  logic [LW:0]  ridx;
  fp32_t        red_dot, red_diag, red_dot_n, red_diag_n;

  fp_add u_red_dot  (.a(red_dot),  .b(acc_dot[ridx[LW-1:0]]),  .sub(1'b0), .y(red_dot_n));
  fp_add u_red_diag (.a(red_diag), .b(acc_diag[ridx[LW-1:0]]), .sub(1'b0), .y(red_diag_n));

  assign clear_acc = (dstate == D_OUT) && res_ready;
  assign res_valid = (dstate == D_OUT);
  assign dot_rk    = red_dot;
  assign dot_kk    = red_diag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate   <= D_RUN;
      fin_seen <= 1'b0;
      ridx     <= '0;
      red_dot  <= '0;
      red_diag <= '0;
    end else begin
      unique case (dstate)
        D_RUN: begin
          if (fin) fin_seen <= 1'b1;
          if (fin_seen && (&q_empty) && !(|p_valid)) begin
            dstate   <= D_RED;
            ridx     <= '0;
            red_dot  <= '0;
            red_diag <= '0;
          end
        end
        D_RED: begin
          red_dot  <= red_dot_n;
          red_diag <= red_diag_n;
          ridx     <= ridx + 1'b1;
          if (ridx == (LW+1)'(NUM_MULS - 1)) dstate <= D_OUT;
        end
        D_OUT: if (res_ready) begin
          dstate   <= D_RUN;
          fin_seen <= 1'b0;
        end
        default: dstate <= D_RUN;
      endcase
    end
  end

  assign busy = fin_seen || (dstate != D_RUN) || !(&q_empty) || (|p_valid);

  a_no_stream_during_load: assert property (@(posedge clk) disable iff (!rst_n) !(cam_wr && in_valid));
endmodule
