// spgemm_input_ctrl: input controller of the REAP SpGEMM accelerator.
//
// Streams the command area of FPGA memory, which the host CPU has filled
// with scheduled RIR bundles: for each batch, up to NUM_PIPES A-row
// bundles, then every B-row bundle those rows need, then an END_BATCH
// bundle; END_ALL ends the job. The controller keeps no matrix state of
// its own; it only routes: the i-th A bundle of a batch goes to pipeline
// i, while B bundles and END_BATCH are broadcast to the pipelines that
// received an A bundle in this batch. A bundle is forwarded word by word
// into the targets' input RIR FIFOs (element writes, then a close that
// pushes the header); a word moves only when every target FIFO is below
// almost-full, otherwise the controller stalls (`ev_stall` pulses for
// each stalled cycle). After END_ALL, `done` pulses once every pipeline
// and the output controller are idle.
//
// The routing of A rows to pipelines and broadcast of B rows follow the
// paper; the explicit batch markers are this design's framing.
module spgemm_input_ctrl
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
  input  logic  all_idle,          // pipelines and output controller idle
  // memory read port
  output logic  mem_rd_req,
  output addr_t mem_rd_addr,
  input  logic  mem_rd_gnt,
  input  logic  mem_rd_valid,
  input  word_t mem_rd_data,
  // to the pipelines' input RIR FIFOs
  output logic [NUM_PIPES-1:0] pw_elem_valid,
  output logic [NUM_PIPES-1:0] pw_close,
  output rir_elem_t            pw_elem,
  output idx_t                 pw_shared,
  output kind_e                pw_kind,
  output logic                 pw_eor,
  input  logic [NUM_PIPES-1:0] pw_ready,
  output logic                 ev_stall,
  output logic                 ev_broadcast
);
  localparam int unsigned PW = (NUM_PIPES > 1) ? $clog2(NUM_PIPES) : 1;
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_BODY, S_FINISH} state_e;
  state_e state;

  logic     s_valid, s_pop, rd_stop;
  word_t    s_data;
  rir_hdr_t s_hdr, cur;
  cnt_t     left;
  logic [NUM_PIPES-1:0] mask, targets;
  logic [PW:0] a_idx;
  logic     tgt_ready, move;

  mem_stream_reader #(.DEPTH(16)) u_rd (
    .clk, .rst_n, .start, .start_addr(in_base), .len('0), .stop(rd_stop),
    .mem_rd_req, .mem_rd_addr, .mem_rd_gnt, .mem_rd_valid, .mem_rd_data,
    .out_valid(s_valid), .out_data(s_data), .out_pop(s_pop));

  assign s_hdr     = rir_hdr_t'(s_data);
  assign tgt_ready = &(pw_ready | ~targets);
  assign pw_elem   = rir_elem_t'(s_data);
  assign pw_shared = cur.shared;
  assign pw_kind   = cur.kind;
  assign pw_eor    = cur.eor;

  always_comb begin
    s_pop         = 1'b0;
    rd_stop       = 1'b0;
    move          = 1'b0;
    pw_elem_valid = '0;
    pw_close      = '0;
    ev_stall      = 1'b0;
    unique case (state)
      S_HDR: begin
        s_pop   = s_valid;
        rd_stop = s_valid && (s_hdr.kind == K_END_ALL);
      end
      S_BODY: begin
        if (left == 0) begin
          move     = tgt_ready;
          pw_close = tgt_ready ? targets : '0;
          ev_stall = !tgt_ready;
        end else if (s_valid) begin
          move          = tgt_ready;
          s_pop         = tgt_ready;
          pw_elem_valid = tgt_ready ? targets : '0;
          pw_close      = (tgt_ready && left == 1) ? targets : '0;
          ev_stall      = !tgt_ready;
        end
      end
      default: ;
    endcase
  end

  assign ev_broadcast = (state == S_BODY) && move && (cur.kind == K_B_ROW) && (left <= 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur     <= '0;
      left    <= '0;
      mask    <= '0;
      targets <= '0;
      a_idx   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_HDR;
          mask  <= '0;
          a_idx <= '0;
        end
        S_HDR: if (s_valid) begin
          cur  <= s_hdr;
          left <= s_hdr.count;
          unique case (s_hdr.kind)
            K_A_ROW: begin
              targets <= NUM_PIPES'(1) << a_idx[PW-1:0];
              mask    <= mask | (NUM_PIPES'(1) << a_idx[PW-1:0]);
              a_idx   <= a_idx + 1'b1;
              state   <= S_BODY;
            end
            K_B_ROW: begin
              targets <= mask;
              state   <= S_BODY;
            end
            K_END_BATCH: begin
              targets <= mask;
              mask    <= '0;
              a_idx   <= '0;
              state   <= S_BODY;
            end
            K_END_ALL: state <= S_FINISH;
            default: ;                    // unknown bundle kinds are skipped
          endcase
        end
        S_BODY: if (move) begin
          if (left != 0) left <= left - 1'b1;
          if (left <= 1) state <= S_HDR;
        end
        S_FINISH: if (all_idle) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_pipe_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR && s_valid && s_hdr.kind == K_A_ROW) |-> a_idx < (PW+1)'(NUM_PIPES));
  a_a_fits_cam: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR && s_valid && s_hdr.kind == K_A_ROW) |-> s_hdr.count <= cnt_t'(CAM_SIZE));
endmodule
