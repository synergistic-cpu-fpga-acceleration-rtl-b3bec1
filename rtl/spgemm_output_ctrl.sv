// spgemm_output_ctrl: output controller of the REAP SpGEMM accelerator.
//
// Picks, round-robin, a pipeline whose output RIR FIFO holds a finished
// result bundle, and copies that whole bundle to FPGA memory: the header
// word (row of C, kind, end-of-row flag, element count) and then the
// <column,value> element words, at consecutive addresses from out_base.
// One word per cycle when the memory grants the write. The pipeline stays
// selected until the last word of its bundle, so bundles never interleave.
// `bundles` counts the bundles written since start.
module spgemm_output_ctrl
  import reap_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t out_base,
  input  logic      [NUM_PIPES-1:0] pr_valid,
  input  logic      [NUM_PIPES-1:0] pr_first,
  input  logic      [NUM_PIPES-1:0] pr_last,
  input  rir_hdr_t  pr_hdr  [NUM_PIPES],
  input  rir_elem_t pr_elem [NUM_PIPES],
  output logic      [NUM_PIPES-1:0] pr_ready,
  output logic  mem_wr_req,
  output addr_t mem_wr_addr,
  output word_t mem_wr_data,
  input  logic  mem_wr_gnt,
  output logic  idle,
  output addr_t bundles
);
  localparam int unsigned PW = (NUM_PIPES > 1) ? $clog2(NUM_PIPES) : 1;
  logic          locked;
  logic [PW-1:0] sel, rr, pick;
  logic          found;
  addr_t         wptr;

  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int k = 0; k < NUM_PIPES; k++) begin
      logic [PW-1:0] j;
      j = PW'((int'(rr) + k) % NUM_PIPES);
      if (!found && pr_valid[j]) begin
        found = 1'b1;
        pick  = j;
      end
    end
  end

  logic [PW-1:0] cur;
  assign cur = locked ? sel : pick;

  always_comb begin
    mem_wr_req  = (locked || found) && pr_valid[cur];
    mem_wr_addr = wptr;
    mem_wr_data = pr_first[cur] ? word_t'(pr_hdr[cur]) : word_t'(pr_elem[cur]);
    pr_ready    = '0;
    pr_ready[cur] = mem_wr_req && mem_wr_gnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      sel     <= '0;
      rr      <= '0;
      wptr    <= '0;
      bundles <= '0;
    end else begin
      if (start) begin
        wptr    <= out_base;
        bundles <= '0;
      end else if (mem_wr_req && mem_wr_gnt) begin
        wptr <= wptr + 1'b1;
        if (pr_last[cur]) begin
          locked  <= 1'b0;
          rr      <= (cur == PW'(NUM_PIPES - 1)) ? '0 : cur + 1'b1;
          bundles <= bundles + 1'b1;
        end else begin
          locked <= 1'b1;
          sel    <= cur;
        end
      end
    end
  end

  assign idle = !locked;
endmodule
