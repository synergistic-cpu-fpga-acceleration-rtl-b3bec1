// chol_input_ctrl: input controller of the REAP Cholesky accelerator.
//
// The host CPU has done the symbolic analysis and written, for every
// column k of L (left to right), a job of two bundles: RA, the non-zeros
// of column k of A as <row,value>, and RL, a metadata bundle of triples
// <r, S, E>, one per non-zero row r of column k of L (the diagonal r = k
// included), where row r of L currently occupies words [S, E) of FPGA
// memory. For each job the controller:
//   1. waits until every pipeline is idle and every result of the previous
//      job has been written (column k needs the columns before it: this is
//      the data-dependency stall, counted by ev_dep_stall);
//   2. broadcasts RA into every pipeline's Div/SqRoot CAM;
//   3. assigns triple j to pipeline j (row r, column k, result address E);
//   4. for each CAM_SIZE-long segment of row k of L (taken from the
//      diagonal triple): reads the segment from memory and broadcasts it
//      into the dot-product CAMs of the assigned pipelines, then reads each
//      assigned pipeline's row r from memory and streams it to that
//      pipeline alone;
//   5. signals `fin` to the assigned pipelines.
// END_ALL ends the job list; `done` pulses when the last results are
// written. The command stream and the rows of L use two memory read ports.
//
// Broadcasting row k and column k, one private row of L per pipeline and
// the dependency on earlier columns follow the paper; the RL word layout,
// the segmenting of long rows of L and the sequential row reads are this
// design's.
module chol_input_ctrl
  import reap_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 32,
  parameter int unsigned CAM_SIZE  = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t in_base,
  output logic  busy,
  output logic  done,
  input  logic  pipes_idle,
  input  logic  wr_done,            // one result written to memory
  // command stream read port
  output logic  mem_rd_req,
  output addr_t mem_rd_addr,
  input  logic  mem_rd_gnt,
  input  logic  mem_rd_valid,
  input  word_t mem_rd_data,
  // L row read port
  output logic  lrd_req,
  output addr_t lrd_addr,
  input  logic  lrd_gnt,
  input  logic  lrd_valid,
  input  word_t lrd_data,
  // to the pipelines
  output logic                 acol_clear,
  output logic                 acol_wr,
  output idx_t                 acol_row,
  output fp32_t                acol_val,
  output logic [NUM_PIPES-1:0] cam_clear,
  output logic [NUM_PIPES-1:0] cam_wr,
  output idx_t                 cam_col,
  output fp32_t                cam_val,
  input  logic [NUM_PIPES-1:0] cam_ready,
  output logic [NUM_PIPES-1:0] assign_en,
  output idx_t                 assign_row,
  output idx_t                 assign_col,
  output addr_t                assign_addr,
  output logic [NUM_PIPES-1:0] st_valid,
  output idx_t                 st_col,
  output fp32_t                st_val,
  input  logic [NUM_PIPES-1:0] st_ready,
  output logic [NUM_PIPES-1:0] fin,
  output logic                 ev_dep_stall,
  output logic                 ev_segment
);
  localparam int unsigned PW = (NUM_PIPES > 1) ? $clog2(NUM_PIPES) : 1;

  typedef enum logic [3:0] {
    C_IDLE, C_WAIT, C_HDR, C_RA, C_RLH, C_RL0, C_RL1, C_SEG, C_SEGLD,
    C_ROWSTART, C_ROW, C_FIN, C_FINISH
  } cstate_e;
  cstate_e state;

  logic     s_valid, s_pop, s_stop;
  word_t    s_data;
  rir_hdr_t s_hdr;
  logic     l_start, l_valid, l_pop;
  addr_t    l_addr, l_len;
  word_t    l_data;

  idx_t   k;
  cnt_t   left;
  logic [PW:0] j, ntrip;
  idx_t   tr_r [NUM_PIPES];
  addr_t  tr_s [NUM_PIPES];
  addr_t  tr_e [NUM_PIPES];
  logic [NUM_PIPES-1:0] active;
  addr_t  diag_s, diag_e, seg_start, seg_len, rleft;
  logic [31:0] outstanding;
  logic   first_job;

  mem_stream_reader #(.DEPTH(16)) u_cmd (
    .clk, .rst_n, .start, .start_addr(in_base), .len('0), .stop(s_stop),
    .mem_rd_req, .mem_rd_addr, .mem_rd_gnt, .mem_rd_valid, .mem_rd_data,
    .out_valid(s_valid), .out_data(s_data), .out_pop(s_pop));

  mem_stream_reader #(.DEPTH(16)) u_lrow (
    .clk, .rst_n, .start(l_start), .start_addr(l_addr), .len(l_len), .stop(1'b0),
    .mem_rd_req(lrd_req), .mem_rd_addr(lrd_addr), .mem_rd_gnt(lrd_gnt),
    .mem_rd_valid(lrd_valid), .mem_rd_data(lrd_data),
    .out_valid(l_valid), .out_data(l_data), .out_pop(l_pop));

  rir_elem_t s_elem, l_elem;
  assign s_hdr  = rir_hdr_t'(s_data);
  assign s_elem = rir_elem_t'(s_data);
  assign l_elem = rir_elem_t'(l_data);

  logic   act_ready;
  assign  act_ready = &(cam_ready | ~active);
  addr_t  seg_rem;
  assign  seg_rem = diag_e - seg_start;

  always_comb begin
    s_pop      = 1'b0;
    s_stop     = 1'b0;
    l_start    = 1'b0;
    l_addr     = '0;
    l_len      = '0;
    l_pop      = 1'b0;
    acol_clear = 1'b0;
    acol_wr    = 1'b0;
    acol_row   = s_elem.idx;
    acol_val   = s_elem.val;
    cam_clear  = '0;
    cam_wr     = '0;
    cam_col    = l_elem.idx;
    cam_val    = l_elem.val;
    assign_en  = '0;
    assign_row = tr_r[j[PW-1:0]];
    assign_col = k;
    assign_addr = s_data[63:32];
    st_valid   = '0;
    st_col     = l_elem.idx;
    st_val     = l_elem.val;
    fin        = '0;
    ev_dep_stall = 1'b0;
    ev_segment = 1'b0;
    unique case (state)
      C_WAIT: ev_dep_stall = !first_job && !(pipes_idle && outstanding == 0);
      C_HDR: begin
        s_pop  = s_valid;
        s_stop = s_valid && s_hdr.kind == K_END_ALL;
        acol_clear = s_valid && s_hdr.kind == K_CHOL_RA;
      end
      C_RA: if (s_valid) begin
        s_pop   = 1'b1;
        acol_wr = 1'b1;
      end
      C_RLH: s_pop = s_valid;
      C_RL0: s_pop = s_valid;
      C_RL1: if (s_valid) begin
        s_pop = 1'b1;
        assign_en[j[PW-1:0]] = 1'b1;
      end
      C_SEG: if (seg_start < diag_e) begin
        l_start   = 1'b1;
        l_addr    = seg_start;
        l_len     = (seg_rem > addr_t'(CAM_SIZE)) ? addr_t'(CAM_SIZE) : seg_rem;
        cam_clear = active;
        ev_segment = (seg_start != diag_s);
      end
      C_SEGLD: if (l_valid && act_ready) begin
        l_pop  = 1'b1;
        cam_wr = active;
      end
      C_ROWSTART: if (j < ntrip && tr_e[j[PW-1:0]] != tr_s[j[PW-1:0]]) begin
        l_start = 1'b1;
        l_addr  = tr_s[j[PW-1:0]];
        l_len   = tr_e[j[PW-1:0]] - tr_s[j[PW-1:0]];
      end
      C_ROW: if (l_valid) begin
        st_valid[j[PW-1:0]] = 1'b1;
        l_pop = st_ready[j[PW-1:0]];
      end
      C_FIN: fin = active;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      k <= '0; left <= '0; j <= '0; ntrip <= '0; active <= '0;
      diag_s <= '0; diag_e <= '0; seg_start <= '0; seg_len <= '0; rleft <= '0;
      outstanding <= '0; first_job <= 1'b1; done <= 1'b0;
      for (int p = 0; p < NUM_PIPES; p++) begin tr_r[p] <= '0; tr_s[p] <= '0; tr_e[p] <= '0; end
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + ((state == C_FIN) ? 32'(ntrip) : 32'd0) - (wr_done ? 32'd1 : 32'd0);
      unique case (state)
        C_IDLE: if (start) begin
          state     <= C_WAIT;
          first_job <= 1'b1;
        end
        C_WAIT: if (pipes_idle && outstanding == 0) state <= C_HDR;
        C_HDR: if (s_valid) begin
          k      <= s_hdr.shared;
          left   <= s_hdr.count;
          active <= '0;
          diag_s <= '0;
          diag_e <= '0;
          if (s_hdr.kind == K_END_ALL) state <= C_FINISH;
          else if (s_hdr.kind == K_CHOL_RA) state <= (s_hdr.count == 0) ? C_RLH : C_RA;
        end
        C_RA: if (s_valid) begin
          left <= left - 1'b1;
          if (left == 1) state <= C_RLH;
        end
        C_RLH: if (s_valid) begin
          ntrip <= (PW+1)'(s_hdr.count);
          j     <= '0;
          state <= (s_hdr.count == 0) ? C_WAIT : C_RL0;
        end
        C_RL0: if (s_valid) begin
          tr_r[j[PW-1:0]] <= s_data[63:32];
          tr_s[j[PW-1:0]] <= s_data[31:0];
          state <= C_RL1;
        end
        C_RL1: if (s_valid) begin
          tr_e[j[PW-1:0]] <= s_data[63:32];
          active[j[PW-1:0]] <= 1'b1;
          if (tr_r[j[PW-1:0]] == k) begin
            diag_s <= tr_s[j[PW-1:0]];
            diag_e <= s_data[63:32];
          end
          if (j + 1'b1 == ntrip) begin
            state     <= C_SEG;
            first_job <= 1'b0;
          end else begin
            state <= C_RL0;
          end
          j <= j + 1'b1;
        end
        C_SEG: begin
          if (seg_start < diag_e) begin
            seg_len <= l_len;
            rleft   <= l_len;
            state   <= C_SEGLD;
          end else begin
            state <= C_FIN;
          end
        end
        C_SEGLD: if (l_valid && act_ready) begin
          rleft <= rleft - 1'b1;
          if (rleft == 1) begin
            j     <= '0;
            state <= C_ROWSTART;
          end
        end
        C_ROWSTART: begin
          if (j == ntrip) begin
            seg_start <= seg_start + seg_len;
            state     <= C_SEG;
          end else if (tr_e[j[PW-1:0]] == tr_s[j[PW-1:0]]) begin
            j <= j + 1'b1;
          end else begin
            rleft <= l_len;
            state <= C_ROW;
          end
        end
        C_ROW: if (l_valid && st_ready[j[PW-1:0]]) begin
          rleft <= rleft - 1'b1;
          if (rleft == 1) begin
            j     <= j + 1'b1;
            state <= C_ROWSTART;
          end
        end
        C_FIN: state <= C_WAIT;
        C_FINISH: if (pipes_idle && outstanding == 0) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
      // the first segment of row k starts at the diagonal triple's S
      if (state == C_RL1 && s_valid && j + 1'b1 == ntrip)
        seg_start <= (tr_r[j[PW-1:0]] == k) ? tr_s[j[PW-1:0]] : diag_s;
    end
  end

  assign busy = (state != C_IDLE);

  a_rl_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_RLH && s_valid) |-> s_hdr.count <= cnt_t'(NUM_PIPES));
  a_ra_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_HDR && s_valid && s_hdr.kind == K_CHOL_RA) |-> s_hdr.count <= cnt_t'(CAM_SIZE));
endmodule
