// chol_output_ctrl: output controller of the REAP Cholesky accelerator.
//
// Takes finished elements L(r,k) from the pipelines, round-robin, and
// writes each as one <k, value> word at the address the input controller
// assigned (the end of row r of L, which is stored row by row in FPGA
// memory). One word per cycle when the memory grants the write; wr_done
// pulses for every completed write so that the input controller knows
// when a column is complete in memory and the next may read it.
module chol_output_ctrl
  import reap_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  [NUM_PIPES-1:0] res_valid,
  input  idx_t  res_col  [NUM_PIPES],
  input  addr_t res_addr [NUM_PIPES],
  input  fp32_t res_val  [NUM_PIPES],
  output logic  [NUM_PIPES-1:0] res_ready,
  output logic  mem_wr_req,
  output addr_t mem_wr_addr,
  output word_t mem_wr_data,
  input  logic  mem_wr_gnt,
  output logic  wr_done
);
  localparam int unsigned PW = (NUM_PIPES > 1) ? $clog2(NUM_PIPES) : 1;
  logic [PW-1:0] rr, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int i = 0; i < NUM_PIPES; i++) begin
      logic [PW-1:0] p;
      p = PW'((int'(rr) + i) % NUM_PIPES);
      if (!found && res_valid[p]) begin
        found = 1'b1;
        pick  = p;
      end
    end
    mem_wr_req  = found;
    mem_wr_addr = res_addr[pick];
    mem_wr_data = {res_col[pick], res_val[pick]};
    res_ready   = '0;
    res_ready[pick] = found && mem_wr_gnt;
    wr_done     = found && mem_wr_gnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (wr_done) rr <= (pick == PW'(NUM_PIPES - 1)) ? '0 : pick + 1'b1;
  end
endmodule
