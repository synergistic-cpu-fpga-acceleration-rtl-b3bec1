// tb_chol_host_pkg: the host-CPU side of REAP sparse Cholesky, for
// testbenches.
//
// Generates a random sparse symmetric positive-definite matrix A
// (diagonally dominant, single-precision values), runs the symbolic
// analysis (the non-zero pattern of L, fill-in included, by eliminating
// the pattern column by column), reserves space for each row of L in FPGA
// memory, and writes one RA|RL job per column of L: RA holds A(k,k) and
// the non-zeros A(r,k) of the job's rows, RL the triples <r, S, E> with
// the diagonal triple first. A column with more rows than fit one job is
// split into several jobs, each repeating the diagonal. It also computes L
// in double precision and checks the L the accelerator left in memory.
package tb_chol_host_pkg;
  import reap_pkg::*;
  import tb_fp_pkg::*;

  localparam int MAXN = 64;
  logic [31:0] A [MAXN][MAXN];
  bit          nz [MAXN][MAXN];
  real         L [MAXN][MAXN];
  int          base [MAXN], cap [MAXN];
  int          n, n_jobs, n_split_cols, n_fill;
  word_t       img [$];

  function automatic void gen(int size, int pct);
    n = size;
    for (int i = 0; i < MAXN; i++) for (int j = 0; j < MAXN; j++) begin A[i][j] = 0; nz[i][j] = 0; end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < i; j++)
        if ($urandom_range(99) < pct) begin
          A[i][j] = rand_f(1);
          A[j][i] = A[i][j];
        end
    for (int i = 0; i < n; i++) begin
      real s;
      s = 1.0;
      for (int j = 0; j < n; j++) if (j != i) s += (f2r(A[i][j]) < 0) ? -f2r(A[i][j]) : f2r(A[i][j]);
      A[i][i] = r2f(s);
    end
    // symbolic factorisation: pattern of L
    n_fill = 0;
    for (int i = 0; i < n; i++) for (int j = 0; j <= i; j++) nz[i][j] = (A[i][j] != 0);
    for (int k = 0; k < n; k++)
      for (int i = k + 1; i < n; i++) if (nz[i][k])
        for (int j = k + 1; j <= i; j++) if (nz[j][k] && !nz[i][j]) begin nz[i][j] = 1; n_fill++; end
    // numeric reference
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) L[i][j] = 0.0;
    for (int k = 0; k < n; k++) begin
      real d;
      d = f2r(A[k][k]);
      for (int c = 0; c < k; c++) d -= L[k][c] * L[k][c];
      L[k][k] = $sqrt(d);
      for (int i = k + 1; i < n; i++) begin
        real s;
        s = f2r(A[i][k]);
        for (int c = 0; c < k; c++) s -= L[i][c] * L[k][c];
        L[i][k] = s / L[k][k];
      end
    end
  endfunction

  // job list at address 0, rows of L from lbase; maxrows = rows per job
  function automatic void build(int lbase, int maxrows);
    int cur_end [MAXN];
    int p;
    img.delete();
    n_jobs = 0; n_split_cols = 0;
    p = lbase;
    for (int r = 0; r < n; r++) begin
      cap[r] = 0;
      for (int c = 0; c <= r; c++) if (nz[r][c]) cap[r]++;
      base[r] = p; cur_end[r] = p; p += cap[r];
    end
    for (int k = 0; k < n; k++) begin
      int rows [$];
      for (int r = k + 1; r < n; r++) if (nz[r][k]) rows.push_back(r);
      if (rows.size() > maxrows - 1) n_split_cols++;
      for (int s = 0; s == 0 || s < rows.size(); s += maxrows - 1) begin
        int cnt_a, cnt_l;
        cnt_a = 1; cnt_l = 1;
        for (int q = s; q < s + maxrows - 1 && q < rows.size(); q++) begin
          cnt_l++;
          if (A[rows[q]][k] != 0) cnt_a++;
        end
        img.push_back(hdr_word(idx_t'(k), K_CHOL_RA, 1'b1, cnt_t'(cnt_a)));
        img.push_back({idx_t'(k), A[k][k]});
        for (int q = s; q < s + maxrows - 1 && q < rows.size(); q++)
          if (A[rows[q]][k] != 0) img.push_back({idx_t'(rows[q]), A[rows[q]][k]});
        img.push_back(hdr_word(idx_t'(k), K_CHOL_RL, 1'b1, cnt_t'(cnt_l)));
        img.push_back({idx_t'(k), 32'(base[k])});
        img.push_back({32'(cur_end[k]), 32'h0});
        for (int q = s; q < s + maxrows - 1 && q < rows.size(); q++) begin
          img.push_back({idx_t'(rows[q]), 32'(base[rows[q]])});
          img.push_back({32'(cur_end[rows[q]]), 32'h0});
        end
        n_jobs++;
      end
      cur_end[k]++;
      foreach (rows[q]) cur_end[rows[q]]++;
    end
    img.push_back(hdr_word('0, K_END_ALL, 1'b0, '0));
  endfunction

  // compare row r of L in memory (words mem_row) with the reference
  function automatic int check_row(int r, const ref word_t w [$], ref int checks);
    int fails, q;
    fails = 0; q = 0;
    for (int c = 0; c <= r; c++) if (nz[r][c]) begin
      rir_elem_t e;
      real got, d, m;
      e = rir_elem_t'(w[q++]);
      got = f2r(e.val);
      d = got - L[r][c]; if (d < 0) d = -d;
      m = (L[r][c] < 0) ? -L[r][c] : L[r][c];
      checks++;
      if (e.idx != idx_t'(c) || d > 1e-4 * (m + 1.0)) begin
        fails++;
        if (fails < 6) $display("FAIL L[%0d][%0d]: got col %0d val %f, exp %f", r, c, e.idx, got, L[r][c]);
      end
    end
    return fails;
  endfunction
endpackage
