// tb_computing_module: self-checking test of one search engine (distance calculator,
// index and distance FIFOs, distance comparator with its visited, candidate and final
// lists) without the memory access module.
//
// The testbench builds a random 300-point, 5-layer HNSW graph (each point linked to
// its nearest points on every layer it belongs to) and plays the memory side: an
// entering-point request returns that point's vector on the data stream; a
// next-index request (point, layer) returns the point's neighbour list on the index
// stream (a nil element for an empty list) and the neighbours' vectors on the data
// stream, both with random gaps. For 10 queries the K results must match, index and
// distance, a reference HNSW search written here (greedy upper layers, best-first
// layer 0 with ef = 40 and the same tie rules). The comparator's event counters must
// show upper-layer moves, layer drops, visited hits, evictions, rejections and both
// end conditions.
module tb_computing_module;
  import hnsw_pkg::*;
  localparam int K = 10, EFV = 40, CANDV = 64, NQ = 10, NP = 300, MAXL = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_valid, q_valid, q_ready, data_valid, data_ready, nbr_in_valid, nbr_in_ready;
  config_t cfg;
  query_t q;
  logic [VEC_W-1:0] data;
  nbr_t nbr_in;
  logic ep_valid, ep_ready, nxt_valid, nxt_ready, res_valid, res_ready, res_last, busy;
  idx_t ep_idx, nxt_idx;
  layer_t nxt_layer;
  logic [QID_W-1:0] res_qid;
  result_t res;
  cmp_stats_t stats;
  int checks = 0, failures = 0;

  computing_module #(.EF(EFV), .CAND(CANDV), .K(K), .POINTS(4 * 512)) dut (.*);

  always #5 clk = ~clk;

  byte unsigned vec [NP][DIM];
  byte unsigned qv  [NQ][DIM];
  int lvl [NP];
  int nbn [MAXL+1][NP];
  int nb  [MAXL+1][NP][32];

  function automatic logic [VEC_W-1:0] pvec(int p);
    logic [VEC_W-1:0] v;
    for (int i = 0; i < DIM; i++) v[8*i +: 8] = vec[p][i];
    return v;
  endfunction

  function automatic int unsigned vdist(int p, int qq);
    int unsigned s;
    int d;
    s = 0;
    for (int i = 0; i < DIM; i++) begin
      d = int'(vec[p][i]) - int'(qv[qq][i]);
      s += d * d;
    end
    return s;
  endfunction

  function automatic int unsigned pdist(int a, int b);
    int unsigned s;
    int d;
    s = 0;
    for (int i = 0; i < DIM; i++) begin
      d = int'(vec[a][i]) - int'(vec[b][i]);
      s += d * d;
    end
    return s;
  endfunction

  function automatic void ins(ref int li [], ref int unsigned ld [], ref int cnt,
                              input int lim, input int i, input int unsigned d);
    int pos;
    pos = 0;
    while (pos < cnt && ld[pos] <= d) pos++;
    if (pos >= lim) return;
    for (int j = ((cnt < lim) ? cnt : lim - 1); j > pos; j--) begin
      li[j] = li[j-1]; ld[j] = ld[j-1];
    end
    li[pos] = i; ld[pos] = d;
    if (cnt < lim) cnt++;
  endfunction

  // ---------------- memory side ----------------
  logic [VEC_W-1:0] dq [$];
  nbr_t nq [$];

  always @(posedge clk) if (rst_n) begin
    if (ep_valid && ep_ready) dq.push_back(pvec(int'(ep_idx)));
    if (nxt_valid && nxt_ready) begin
      int p, l;
      nbr_t e;
      p = int'(nxt_idx); l = int'(nxt_layer);
      if (nbn[l][p] == 0) begin
        e.nil = 1; e.last = 1; e.idx = '0; nq.push_back(e);
      end else
        for (int j = 0; j < nbn[l][p]; j++) begin
          e.nil = 0; e.last = (j == nbn[l][p] - 1); e.idx = nb[l][p][j];
          nq.push_back(e);
          dq.push_back(pvec(nb[l][p][j]));
        end
    end
    if (data_valid && data_ready) void'(dq.pop_front());
    if (nbr_in_valid && nbr_in_ready) void'(nq.pop_front());
  end

  // present the queue heads on the falling edge, with random gaps
  logic gap_d, gap_n;
  always @(negedge clk) begin
    gap_d = ($urandom_range(0, 3) == 0);
    gap_n = ($urandom_range(0, 3) == 0);
    ep_ready  = ($urandom_range(0, 1) == 1);
    nxt_ready = ($urandom_range(0, 1) == 1);
    res_ready = ($urandom_range(0, 3) != 0);
    data_valid   = rst_n && dq.size() != 0 && !gap_d;
    data         = (dq.size() != 0) ? dq[0] : '0;
    nbr_in_valid = rst_n && nq.size() != 0 && !gap_n;
    nbr_in       = (nq.size() != 0) ? nq[0] : '0;
  end

  // ---------------- results ----------------
  int unsigned exp_d [NQ][K];
  int          exp_i [NQ][K];
  int          exp_n [NQ];
  int          got_n [NQ];
  int          qdone;

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int qq, n;
    qq = int'(res_qid); n = got_n[qq];
    checks++;
    if (n >= exp_n[qq] || res.idx != idx_t'(exp_i[qq][n]) || res.dval != exp_d[qq][n]) begin
      failures++;
      $display("query %0d result %0d: %0d/%0d expected %0d/%0d", qq, n, res.idx, res.dval,
               exp_i[qq][n], exp_d[qq][n]);
    end
    got_n[qq]++;
    if (res_last) begin
      checks++;
      if (got_n[qq] != exp_n[qq]) begin failures++; $display("query %0d: %0d results", qq, got_n[qq]); end
      qdone++;
    end
  end

  task automatic ref_search(int qq);
    int cur, c0, e;
    int unsigned cd, d;
    bit changed;
    bit vis [NP];
    int ci [] = new[CANDV]; int unsigned cdd [] = new[CANDV]; int cc;
    int fi [] = new[EFV];   int unsigned fd  [] = new[EFV];   int fc;
    cc = 0; fc = 0;
    cur = 0; cd = vdist(0, qq);
    for (int l = MAXL; l >= 1; l--) begin
      changed = 1;
      while (changed) begin
        c0 = cur;
        changed = 0;
        for (int j = 0; j < nbn[l][c0]; j++) begin
          e = nb[l][c0][j];
          if (vdist(e, qq) < cd) begin cur = e; cd = vdist(e, qq); changed = 1; end
        end
      end
    end
    for (int p = 0; p < NP; p++) vis[p] = 0;
    vis[cur] = 1;
    ins(ci, cdd, cc, CANDV, cur, cd);
    ins(fi, fd, fc, EFV, cur, cd);
    while (cc > 0) begin
      if (cdd[0] > fd[fc-1]) break;
      c0 = ci[0];
      for (int j = 0; j < cc - 1; j++) begin ci[j] = ci[j+1]; cdd[j] = cdd[j+1]; end
      cc--;
      for (int j = 0; j < nbn[0][c0]; j++) begin
        e = nb[0][c0][j];
        d = vdist(e, qq);
        if (vis[e]) continue;
        vis[e] = 1;
        if (d < fd[fc-1] || fc < EFV) begin
          ins(ci, cdd, cc, CANDV, e, d);
          ins(fi, fd, fc, EFV, e, d);
        end
      end
    end
    exp_n[qq] = (fc < K) ? fc : K;
    for (int j = 0; j < exp_n[qq]; j++) begin exp_i[qq][j] = fi[j]; exp_d[qq][j] = fd[j]; end
  endtask

  task automatic build_graph();
    int m, cnt, pos;
    int unsigned dd;
    int bi [32];
    int unsigned bd [32];
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < DIM; i++) vec[p][i] = byte'($urandom_range(0, 255));
      lvl[p] = 0;
      while ($urandom_range(0, 3) == 0 && lvl[p] < MAXL - 1) lvl[p]++;
    end
    lvl[0] = MAXL;
    for (int p = 1; p < 4; p++) lvl[p] = MAXL - 1;
    for (int l = 0; l <= MAXL; l++) begin
      m = (l == 0) ? MAXM0 : MAXM;
      for (int p = 0; p < NP; p++) begin
        cnt = 0;
        nbn[l][p] = 0;
        if (lvl[p] < l) continue;
        for (int o = 0; o < NP; o++) begin
          if (o == p || lvl[o] < l) continue;
          dd = pdist(p, o);
          pos = cnt;
          while (pos > 0 && bd[pos-1] > dd) pos--;
          if (pos >= m) continue;
          for (int j = ((cnt < m) ? cnt : m - 1); j > pos; j--) begin
            bi[j] = bi[j-1]; bd[j] = bd[j-1];
          end
          bi[pos] = o; bd[pos] = dd;
          if (cnt < m) cnt++;
        end
        nbn[l][p] = cnt;
        for (int j = 0; j < cnt; j++) nb[l][p][j] = bi[j];
      end
    end
  endtask

  initial begin
    cfg = '0; cfg_valid = 0; q_valid = 0; q = '0; qdone = 0;
    build_graph();
    for (int qq = 0; qq < NQ; qq++) begin
      int b;
      b = $urandom_range(0, NP - 1);
      for (int i = 0; i < DIM; i++)
        qv[qq][i] = byte'(int'(vec[b][i]) + (($urandom_range(0, 1) == 1) ? 3 : 0));
      got_n[qq] = 0;
      ref_search(qq);
    end
    cfg.max_layer = 4'(MAXL); cfg.enter_point = 0; cfg.ef = 8'(EFV); cfg.num_queries = NQ;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_valid = 1;
    for (int qq = 0; qq < NQ; qq++) begin
      q_valid = 1; q.qid = QID_W'(qq);
      for (int i = 0; i < DIM; i++) q.vec[8*i +: 8] = qv[qq][i];
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      @(negedge clk);
      q_valid = 0;
    end
    while (qdone < NQ) @(negedge clk);
    checks++;
    if (stats.queries != NQ) begin failures++; $display("queries counted %0d", stats.queries); end
    $display("moves %0d drops %0d visited %0d inserts %0d evictions %0d rejects %0d end-empty %0d end-dist %0d",
             stats.up_moves, stats.layer_drops, stats.visited_hits, stats.inserts, stats.evictions,
             stats.rejects, stats.end_empty, stats.end_dist);
    checks++;
    if (stats.up_moves == 0 || stats.layer_drops == 0 || stats.visited_hits == 0 ||
        stats.evictions == 0 || stats.rejects == 0 || stats.end_dist == 0) begin
      failures++; $display("a search mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
