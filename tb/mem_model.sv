// mem_model: behavioural model of the accelerator's board memory (DRAM
// and its controller), for simulation only.
//
// WORDS 64-bit words in a plain array that the testbench fills and reads
// directly. Two read ports and one write port. A request is granted on a
// pseudo-random GNT_PCT percent of cycles (to exercise back-pressure);
// a granted read returns its data LAT cycles later, in order, with no
// back-pressure. Reads see every write granted in an earlier cycle.
// Addresses wrap modulo WORDS.
module mem_model
  import reap_pkg::*;
#(
  parameter int unsigned WORDS   = 65536,
  parameter int unsigned LAT     = 4,
  parameter int unsigned GNT_PCT = 80
) (
  input  logic  clk,
  input  logic  rd0_req,
  input  addr_t rd0_addr,
  output logic  rd0_gnt,
  output logic  rd0_valid,
  output word_t rd0_data,
  input  logic  rd1_req,
  input  addr_t rd1_addr,
  output logic  rd1_gnt,
  output logic  rd1_valid,
  output word_t rd1_data,
  input  logic  wr_req,
  input  addr_t wr_addr,
  input  word_t wr_data,
  output logic  wr_gnt
);
  word_t mem [WORDS];
  logic  v0 [LAT], v1 [LAT];
  word_t d0 [LAT], d1 [LAT];
  logic  g0, g1, gw;
  int unsigned reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin v0[i] = 1'b0; v1[i] = 1'b0; d0[i] = '0; d1[i] = '0; end
    g0 = 1'b0; g1 = 1'b0; gw = 1'b0;
  end

  assign rd0_gnt   = g0;
  assign rd1_gnt   = g1;
  assign wr_gnt    = gw;
  assign rd0_valid = v0[LAT-1];
  assign rd0_data  = d0[LAT-1];
  assign rd1_valid = v1[LAT-1];
  assign rd1_data  = d1[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      v0[i] <= v0[i-1]; d0[i] <= d0[i-1];
      v1[i] <= v1[i-1]; d1[i] <= d1[i-1];
    end
    v0[0] <= rd0_req && g0;
    d0[0] <= mem[rd0_addr % WORDS];
    v1[0] <= rd1_req && g1;
    d1[0] <= mem[rd1_addr % WORDS];
    if (rd0_req && g0) reads++;
    if (rd1_req && g1) reads++;
    if (wr_req && gw) begin
      mem[wr_addr % WORDS] <= wr_data;
      writes++;
    end
    g0 <= ($urandom_range(99) < GNT_PCT);
    g1 <= ($urandom_range(99) < GNT_PCT);
    gw <= ($urandom_range(99) < GNT_PCT);
  end
endmodule
