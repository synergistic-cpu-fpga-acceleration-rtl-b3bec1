// chol_div_sqrt: Div/SqRoot PE of a REAP Cholesky pipeline.
//
// Finishes one element of column k of L for the pipeline's row r:
//   L(k,k) = sqrt(A(k,k) - dot_kk)
//   L(r,k) = (A(r,k) - dot_rk) / L(k,k)      for r != k
// Column k of A is broadcast at the start of each column (acol_clear, then
// acol_wr per <row,value>) into a small CAM keyed by row index with a value
// store beside it. The input controller then assigns the pipeline its row
// r, the column k and the memory address the result goes to. When the
// dot-product PE delivers {dot_rk, dot_kk}, the PE looks up A(k,k) and
// A(r,k) in the CAM (a row absent from column k of A is a fill-in element
// and reads as 0, pulsing ev_fill), subtracts, takes the square root and,
// off the diagonal, divides; one step per clock. The result
// {row, col, addr, value} is offered on out_valid until out_ready.
//
// From the paper: a match stage followed by a square-root unit (diagonal)
// or a divider (off-diagonal), and every pipeline computing the diagonal
// itself. The step-per-clock sequencing and the fill-in rule are this
// design's.
module chol_div_sqrt
  import reap_pkg::*;
#(
  parameter int unsigned CAM_SIZE = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  acol_clear,
  input  logic  acol_wr,
  input  idx_t  acol_row,
  input  fp32_t acol_val,
  input  logic  assign_en,
  input  idx_t  assign_row,
  input  idx_t  assign_col,
  input  addr_t assign_addr,
  input  logic  dot_valid,
  input  fp32_t dot_rk,
  input  fp32_t dot_kk,
  output logic  dot_ready,
  output logic  out_valid,
  output idx_t  out_row,
  output idx_t  out_col,
  output addr_t out_addr,
  output fp32_t out_val,
  input  logic  out_ready,
  output logic  busy,
  output logic  ev_fill
);
  localparam int unsigned SW = $clog2(CAM_SIZE);

  typedef enum logic [2:0] {V_IDLE, V_LKK, V_LKR, V_SUB, V_SQRT, V_DIV, V_OUT} vstate_e;
  vstate_e vstate;

  fp32_t        aval [CAM_SIZE];
  logic [SW:0]  slot;
  idx_t         lk_key;
  logic         lk_hit;
  logic [SW-1:0] lk_idx;
  idx_t         my_row, my_col;
  addr_t        my_addr;
  fp32_t        d_rk, d_kk, a_rk, a_kk, l_kk, res;
  fp32_t        s_kk, s_rk, sq, q;

  cam #(.DEPTH(CAM_SIZE), .KEY_W(IDX_W)) u_cam (
    .clk, .rst_n, .clear(acol_clear), .wr_en(acol_wr), .wr_idx(slot[SW-1:0]), .wr_key(acol_row),
    .lk_key, .lk_hit, .lk_idx);

  fp_add  u_sub_kk (.a(a_kk), .b(d_kk), .sub(1'b1), .y(s_kk));
  fp_add  u_sub_rk (.a(a_rk), .b(d_rk), .sub(1'b1), .y(s_rk));
  fp_sqrt u_sqrt   (.a(a_kk), .y(sq));
  fp_div  u_div    (.a(a_rk), .b(l_kk), .y(q));

  assign lk_key    = (vstate == V_LKK) ? my_col : my_row;
  assign dot_ready = (vstate == V_IDLE);
  assign out_valid = (vstate == V_OUT);
  assign out_row   = my_row;
  assign out_col   = my_col;
  assign out_addr  = my_addr;
  assign out_val   = res;
  assign busy      = (vstate != V_IDLE);
  assign ev_fill   = (vstate == V_LKR) && !lk_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
    end else if (acol_clear) begin
      slot <= '0;
    end else if (acol_wr) begin
      slot <= slot + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (acol_wr && !acol_clear) aval[slot[SW-1:0]] <= acol_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vstate  <= V_IDLE;
      my_row  <= '0;
      my_col  <= '0;
      my_addr <= '0;
      d_rk <= '0; d_kk <= '0; a_rk <= '0; a_kk <= '0; l_kk <= '0; res <= '0;
    end else begin
      if (assign_en) begin
        my_row  <= assign_row;
        my_col  <= assign_col;
        my_addr <= assign_addr;
      end
      unique case (vstate)
        V_IDLE: if (dot_valid) begin
          d_rk   <= dot_rk;
          d_kk   <= dot_kk;
          vstate <= V_LKK;
        end
        V_LKK: begin
          a_kk   <= lk_hit ? aval[lk_idx] : '0;
          vstate <= V_LKR;
        end
        V_LKR: begin
          a_rk   <= lk_hit ? aval[lk_idx] : '0;
          vstate <= V_SUB;
        end
        V_SUB: begin                     // DOT = A - L.L
          a_kk   <= s_kk;
          a_rk   <= s_rk;
          vstate <= V_SQRT;
        end
        V_SQRT: begin                    // diagonal
          l_kk   <= sq;
          vstate <= V_DIV;
        end
        V_DIV: begin                     // off-diagonal
          res    <= (my_row == my_col) ? l_kk : q;
          vstate <= V_OUT;
        end
        V_OUT: if (out_ready) vstate <= V_IDLE;
        default: vstate <= V_IDLE;
      endcase
    end
  end

  a_acol_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (acol_wr && !acol_clear) |-> slot < (SW+1)'(CAM_SIZE));
endmodule
