// tb_spgemm_host_pkg: the host-CPU side of REAP SpGEMM, for testbenches.
//
// Generates a random sparse matrix A (single-precision values on a dense
// MAXN x MAXN grid), schedules C = A*A into the RIR command stream the
// accelerator reads (batches of up to `pipes` A-row bundles, each followed
// by the B-row bundles it needs and an END_BATCH bundle; rows longer than
// `bsize` split into several bundles, the last flagged end-of-row), and
// checks the result bundles the accelerator wrote against C computed in
// double precision.
package tb_spgemm_host_pkg;
  import reap_pkg::*;
  import tb_fp_pkg::*;

  localparam int MAXN = 64;
  logic [31:0] A [MAXN][MAXN];
  real         C [MAXN][MAXN];
  real         G [MAXN][MAXN];
  int          n;
  word_t       img [$];
  int          n_pieces_split;      // A rows that needed more than one bundle
  int          n_bundles_b;

  function automatic void gen(int size, int pct, int dense_row);
    n = size;
    for (int i = 0; i < MAXN; i++)
      for (int j = 0; j < MAXN; j++) begin
        A[i][j] = 32'h0;
        if (i < n && j < n && ($urandom_range(99) < pct || i == dense_row))
          A[i][j] = rand_f(3);
      end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        C[i][j] = 0.0;
        for (int k = 0; k < n; k++) C[i][j] += f2r(A[i][k]) * f2r(A[k][j]);
      end
  endfunction

  // emit one row (A or B) as bundles of at most bsize elements
  function automatic void emit_row(kind_e kind, int r, int bsize, int lo, int hi);
    int cnt;
    cnt = 0;
    for (int j = lo; j < hi; j++) if (A[r][j] != 0) cnt++;
    img.push_back(hdr_word(idx_t'(r), kind, 1'b1, cnt_t'(cnt)));
    for (int j = lo; j < hi; j++)
      if (A[r][j] != 0) img.push_back({idx_t'(j), A[r][j]});
  endfunction

  // A row pieces: list of (row, lo, hi, eor)
  function automatic void build(int pipes, int bsize);
    int prow[$], plo[$], phi[$];
    bit peor[$];
    img.delete();
    n_pieces_split = 0;
    n_bundles_b = 0;
    for (int i = 0; i < n; i++) begin
      int cnt, lo;
      cnt = 0; lo = 0;
      for (int j = 0; j < n; j++) begin
        if (A[i][j] != 0) cnt++;
        if (cnt == bsize) begin
          prow.push_back(i); plo.push_back(lo); phi.push_back(j + 1); peor.push_back(1'b0);
          lo = j + 1; cnt = 0;
          n_pieces_split++;
        end
      end
      if (cnt != 0 || lo == 0) begin
        prow.push_back(i); plo.push_back(lo); phi.push_back(n); peor.push_back(1'b1);
      end else begin
        peor[peor.size()-1] = 1'b1;
        n_pieces_split--;
      end
    end
    for (int s = 0; s < prow.size(); s += pipes) begin
      bit need [MAXN];
      for (int k = 0; k < MAXN; k++) need[k] = 1'b0;
      for (int p = s; p < s + pipes && p < prow.size(); p++) begin
        int cnt;
        cnt = 0;
        for (int j = plo[p]; j < phi[p]; j++) if (A[prow[p]][j] != 0) begin cnt++; need[j] = 1'b1; end
        img.push_back(hdr_word(idx_t'(prow[p]), K_A_ROW, peor[p], cnt_t'(cnt)));
        for (int j = plo[p]; j < phi[p]; j++)
          if (A[prow[p]][j] != 0) img.push_back({idx_t'(j), A[prow[p]][j]});
      end
      for (int k = 0; k < n; k++) if (need[k]) begin
        // B row k, split into bundles of at most bsize
        int cnt, lo;
        cnt = 0; lo = 0;
        for (int j = 0; j < n; j++) begin
          if (A[k][j] != 0) cnt++;
          if (cnt == bsize || j == n - 1) begin
            if (cnt != 0) begin emit_row(K_B_ROW, k, bsize, lo, j + 1); n_bundles_b++; end
            lo = j + 1; cnt = 0;
          end
        end
      end
      img.push_back(hdr_word('0, K_END_BATCH, 1'b0, '0));
    end
    img.push_back(hdr_word('0, K_END_ALL, 1'b0, '0));
  endfunction

  // decode result bundles; returns number of mismatches, counts checks
  function automatic int check(const ref word_t res [$], input int nbundles,
                               ref int checks, output int runs_multi);
    int fails, p, eor_cnt [MAXN], nruns [MAXN];
    fails = 0; p = 0; runs_multi = 0;
    for (int i = 0; i < MAXN; i++) begin
      eor_cnt[i] = 0; nruns[i] = 0;
      for (int j = 0; j < MAXN; j++) G[i][j] = 0.0;
    end
    for (int b = 0; b < nbundles; b++) begin
      rir_hdr_t h;
      int last;
      h = rir_hdr_t'(res[p++]);
      checks++;
      if (h.kind != K_C_ROW || h.shared >= idx_t'(n)) begin fails++; continue; end
      if (h.eor) eor_cnt[h.shared]++;
      nruns[h.shared]++;
      last = -1;
      for (int e = 0; e < int'(h.count); e++) begin
        rir_elem_t el;
        el = rir_elem_t'(res[p++]);
        checks++;
        if (int'(el.idx) <= last || el.idx >= idx_t'(n)) begin
          fails++;
          $display("FAIL run of row %0d not strictly sorted (col %0d after %0d)", h.shared, el.idx, last);
        end else begin
          G[h.shared][el.idx] += f2r(el.val);
        end
        last = int'(el.idx);
      end
    end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (eor_cnt[i] != 1) begin fails++; $display("FAIL row %0d has %0d end-of-row bundles", i, eor_cnt[i]); end
      if (nruns[i] > 1) runs_multi++;
      for (int j = 0; j < n; j++) begin
        real d, m;
        checks++;
        d = G[i][j] - C[i][j];
        if (d < 0) d = -d;
        m = (C[i][j] < 0) ? -C[i][j] : C[i][j];
        if (d > 1e-4 * m + 1e-6) begin
          fails++;
          if (fails < 10) $display("FAIL C[%0d][%0d] got %f exp %f", i, j, G[i][j], C[i][j]);
        end
      end
    end
    return fails;
  endfunction
endpackage
