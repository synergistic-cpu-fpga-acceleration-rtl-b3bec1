// cam: content-addressable memory used by the match units.
//
// DEPTH entries, each a valid bit and a KEY_W-bit key. A lookup compares
// lk_key with every valid entry in parallel (one comparator per entry)
// and returns whether any matched and the lowest matching slot index; the
// caller keeps the data belonging to each slot in its own store, as in the
// paper's match unit where the CAM maps a column index to "the address of
// another location where A's row and value are stored". Writes go to an
// explicit slot and take effect at the next clock edge; `clear` invalidates
// all entries. The lookup is combinational.
module cam #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned KEY_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_idx,
  input  logic [KEY_W-1:0]         wr_key,
  input  logic [KEY_W-1:0]         lk_key,
  output logic                     lk_hit,
  output logic [$clog2(DEPTH)-1:0] lk_idx
);
  logic [KEY_W-1:0] keys [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [DEPTH-1:0] match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (clear) valid <= '0;
    else if (wr_en) valid[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear) keys[wr_idx] <= wr_key;
  end

  always_comb begin
    for (int i = 0; i < DEPTH; i++) match[i] = valid[i] && (keys[i] == lk_key);
    lk_hit = |match;
    lk_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) if (match[i]) lk_idx = ($clog2(DEPTH))'(i);
  end
endmodule
