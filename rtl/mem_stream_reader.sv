// mem_stream_reader: reads consecutive words of FPGA memory into a small
// prefetch buffer.
//
// Both accelerators consume their RIR bundles as a linear stream, which is
// the point of the CPU-side reorganisation: the FPGA never chases
// pointers, it only streams. `start` sets the first address and the word
// count (`len` = 0 streams until `stop`). Requests (mem_rd_req/addr, taken
// on mem_rd_gnt) are issued only while the words in flight plus the words
// buffered fit in DEPTH, so the in-order responses (mem_rd_valid/data,
// no back-pressure) always have room. Words leave through a
// first-word-fall-through port (out_valid/out_data/out_pop). A new `start`
// empties the buffer and discards responses still in flight from before.
module mem_stream_reader
  import reap_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t start_addr,
  input  addr_t len,
  input  logic  stop,
  output logic  mem_rd_req,
  output addr_t mem_rd_addr,
  input  logic  mem_rd_gnt,
  input  logic  mem_rd_valid,
  input  word_t mem_rd_data,
  output logic  out_valid,
  output word_t out_data,
  input  logic  out_pop
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  word_t         buf_q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [CW-1:0] cnt, inflight, discard;
  logic          active, bounded;
  addr_t         addr, left;
  logic          issue, accept;

  assign mem_rd_req  = active && ((cnt + inflight) < CW'(DEPTH));
  assign mem_rd_addr = addr;
  assign issue       = mem_rd_req && mem_rd_gnt;
  assign accept      = mem_rd_valid && (discard == 0);
  assign out_valid   = (cnt != 0);
  assign out_data    = buf_q[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; inflight <= '0; discard <= '0;
      active <= 1'b0; bounded <= 1'b0; addr <= '0; left <= '0;
    end else begin
      // responses in flight
      inflight <= inflight + (issue ? 1'b1 : 1'b0) - (mem_rd_valid ? 1'b1 : 1'b0);
      if (start) begin
        wp <= '0; rp <= '0; cnt <= '0;
        // everything still in flight after this cycle belongs to the old stream
        discard <= inflight + (issue ? 1'b1 : 1'b0) - (mem_rd_valid ? 1'b1 : 1'b0);
        addr    <= start_addr;
        left    <= len;
        bounded <= (len != 0);
        active  <= 1'b1;
      end else begin
        if (mem_rd_valid && discard != 0) discard <= discard - 1'b1;
        if (accept) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
        if (out_pop && cnt != 0) rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
        case ({accept, out_pop && cnt != 0})
          2'b10:   cnt <= cnt + 1'b1;
          2'b01:   cnt <= cnt - 1'b1;
          default: cnt <= cnt;
        endcase
        if (issue) begin
          addr <= addr + 1'b1;
          if (bounded) begin
            left <= left - 1'b1;
            if (left == 1) active <= 1'b0;
          end
        end
        if (stop) active <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (accept && !start) buf_q[wp] <= mem_rd_data;
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n) accept |-> cnt < CW'(DEPTH));
endmodule
