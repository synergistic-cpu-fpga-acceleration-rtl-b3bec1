// sync_fifo: single-clock first-in first-out buffer.
//
// Stands in for the vendor FIFO block the RIR read/write controllers are
// built on ("dual-ported FIFOs, but the read and write signals synchronized
// to the same clock"). Storage is a DEPTH-entry array with read and write
// pointers; `count` tracks occupancy. `almost_full` rises when no more than
// AF_SLACK free entries remain, `empty` when nothing is stored. A push and
// a pop in the same cycle are both performed. rd_data shows the oldest
// entry (first-word fall-through). Pushing when full or popping when empty
// is a protocol error and is flagged by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH    = 64,
  parameter int unsigned DEPTH    = 16,
  parameter int unsigned AF_SLACK = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic             almost_full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  assign empty       = (count == 0);
  assign full        = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign almost_full = (count + ($clog2(DEPTH+1))'(AF_SLACK) >= ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data     = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
