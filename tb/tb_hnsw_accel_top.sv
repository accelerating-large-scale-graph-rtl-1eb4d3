// tb_hnsw_accel_top: end-to-end test of the HNSW accelerator at its default sizes.
//
// The testbench builds two small layered proximity graphs in the shared test memory,
// laid out in the restructured format the accelerator reads (index table of 64-byte
// rows with one {size, pointer} word per layer, 128-byte layer-0 list rows, 64-byte
// upper-layer list rows with the top layer first, 128-byte raw vectors):
//   graph A: 400 points, up to layer 5, entering point alone on the top layer (empty
//            list), layers 3 and up cached on chip;
//   graph B: 30 points, fewer than ef, so its layer-0 searches end on an empty
//            candidate list.
// Eight queries are searched in graph A (first graph) and then in graph B, whose
// results must be merged with A's in DRAM. A reference model in the testbench runs
// the same search (greedy upper layers, Algorithm 1 on layer 0 with the same list
// depths and insertion order) and the K results written by the accelerator are
// compared with it, index and distance, after each graph. Every memory port has
// random back-pressure. Each mechanism (upper-layer move, layer drop, visited hit,
// insertion, eviction, rejection, both search-end conditions, cache hit, empty list,
// merge with earlier results, both computing modules) is counted and must occur.
module tb_hnsw_accel_top;
  import hnsw_pkg::*;

  localparam int NUM_CM = 2;
  localparam int K      = 10;
  localparam int EFV    = 40;
  localparam int CANDV  = 64;
  localparam int NQ     = 8;
  localparam int NPMAX  = 400;
  localparam int NPA    = 400;
  localparam int NPB    = 30;

  localparam int PARAM_A = 'h00000, PARAM_B = 'h00040;
  localparam int QBASE   = 'h01000, RBASE   = 'h02000;
  localparam int IDX_A = 'h10000, L0_A = 'h20000, UP_A = 'h30000, RAW_A = 'h40000;
  localparam int IDX_B = 'h50000, L0_B = 'h58000, UP_B = 'h60000, RAW_B = 'h68000;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  addr_t param_addr;
  logic done;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- DUT and memory ports ----------------
  logic par_arvalid, par_arready, par_rvalid, par_rready, par_rlast;
  addr_t par_araddr; logic [7:0] par_arlen; logic [255:0] par_rdata;
  logic qry_arvalid, qry_arready, qry_rvalid, qry_rready, qry_rlast;
  addr_t qry_araddr; logic [7:0] qry_arlen; logic [VEC_W-1:0] qry_rdata;
  logic idx_arvalid [NUM_CM], idx_arready [NUM_CM], idx_rvalid [NUM_CM], idx_rready [NUM_CM], idx_rlast [NUM_CM];
  addr_t idx_araddr [NUM_CM]; logic [7:0] idx_arlen [NUM_CM]; logic [31:0] idx_rdata [NUM_CM];
  logic lst_arvalid [NUM_CM], lst_arready [NUM_CM], lst_rvalid [NUM_CM], lst_rready [NUM_CM], lst_rlast [NUM_CM];
  addr_t lst_araddr [NUM_CM]; logic [7:0] lst_arlen [NUM_CM]; logic [LIST_W-1:0] lst_rdata [NUM_CM];
  logic raw_arvalid [NUM_CM], raw_arready [NUM_CM], raw_rvalid [NUM_CM], raw_rready [NUM_CM], raw_rlast [NUM_CM];
  addr_t raw_araddr [NUM_CM]; logic [7:0] raw_arlen [NUM_CM]; logic [VEC_W-1:0] raw_rdata [NUM_CM];
  logic out_arvalid, out_arready, out_rvalid, out_rready, out_rlast;
  addr_t out_araddr; logic [7:0] out_arlen; logic [63:0] out_rdata;
  logic out_awvalid, out_awready, out_wvalid, out_wready, out_wlast, out_bvalid, out_bready;
  addr_t out_awaddr; logic [7:0] out_awlen; logic [63:0] out_wdata;
  cmp_stats_t stats [NUM_CM];
  logic [31:0] cache_hits [NUM_CM];

  hnsw_accel_top dut (.*);

  axi_rd_slave #(.DW(256)) m_par (.clk, .rst_n, .arvalid(par_arvalid), .arready(par_arready),
    .araddr(par_araddr), .arlen(par_arlen), .rvalid(par_rvalid), .rready(par_rready),
    .rdata(par_rdata), .rlast(par_rlast));
  axi_rd_slave #(.DW(VEC_W)) m_qry (.clk, .rst_n, .arvalid(qry_arvalid), .arready(qry_arready),
    .araddr(qry_araddr), .arlen(qry_arlen), .rvalid(qry_rvalid), .rready(qry_rready),
    .rdata(qry_rdata), .rlast(qry_rlast));
  for (genvar c = 0; c < NUM_CM; c++) begin : g_mem
    axi_rd_slave #(.DW(32)) m_idx (.clk, .rst_n, .arvalid(idx_arvalid[c]), .arready(idx_arready[c]),
      .araddr(idx_araddr[c]), .arlen(idx_arlen[c]), .rvalid(idx_rvalid[c]), .rready(idx_rready[c]),
      .rdata(idx_rdata[c]), .rlast(idx_rlast[c]));
    axi_rd_slave #(.DW(LIST_W)) m_lst (.clk, .rst_n, .arvalid(lst_arvalid[c]), .arready(lst_arready[c]),
      .araddr(lst_araddr[c]), .arlen(lst_arlen[c]), .rvalid(lst_rvalid[c]), .rready(lst_rready[c]),
      .rdata(lst_rdata[c]), .rlast(lst_rlast[c]));
    axi_rd_slave #(.DW(VEC_W)) m_raw (.clk, .rst_n, .arvalid(raw_arvalid[c]), .arready(raw_arready[c]),
      .araddr(raw_araddr[c]), .arlen(raw_arlen[c]), .rvalid(raw_rvalid[c]), .rready(raw_rready[c]),
      .rdata(raw_rdata[c]), .rlast(raw_rlast[c]));
  end
  axi_rd_slave #(.DW(64)) m_out_r (.clk, .rst_n, .arvalid(out_arvalid), .arready(out_arready),
    .araddr(out_araddr), .arlen(out_arlen), .rvalid(out_rvalid), .rready(out_rready),
    .rdata(out_rdata), .rlast(out_rlast));
  axi_wr_slave #(.DW(64)) m_out_w (.clk, .rst_n, .awvalid(out_awvalid), .awready(out_awready),
    .awaddr(out_awaddr), .awlen(out_awlen), .wvalid(out_wvalid), .wready(out_wready),
    .wdata(out_wdata), .wlast(out_wlast), .bvalid(out_bvalid), .bready(out_bready));

  // empty neighbour lists seen by the list table DMAs
  int nil_lists = 0;
  always @(posedge clk) begin
    if (dut.g_cm[0].nbr_valid && dut.g_cm[0].nbr_ready && dut.g_cm[0].nbr.nil) nil_lists++;
    if (dut.g_cm[1].nbr_valid && dut.g_cm[1].nbr_ready && dut.g_cm[1].nbr.nil) nil_lists++;
  end

  // ---------------- test graphs ----------------
  byte unsigned vec [2][NPMAX][DIM];
  byte unsigned qv  [NQ][DIM];
  int lvl [2][NPMAX];
  int nbn [2][7][NPMAX];
  int nb  [2][7][NPMAX][32];
  int np  [2];
  int toplvl [2];

  function automatic int unsigned vdist(int g, int p, int q);
    int unsigned s = 0;
    for (int i = 0; i < DIM; i++) begin
      int d = int'(vec[g][p][i]) - int'(qv[q][i]);
      s += d * d;
    end
    return s;
  endfunction

  function automatic int unsigned pdist(int g, int a, int b);
    int unsigned s = 0;
    for (int i = 0; i < DIM; i++) begin
      int d = int'(vec[g][a][i]) - int'(vec[g][b][i]);
      s += d * d;
    end
    return s;
  endfunction

  task automatic build_graph(int g, int n, int maxl, int ib, int l0b, int upb, int rb,
                             output int cached);
    int row;
    int uprow [7][NPMAX];
    np[g] = n;
    toplvl[g] = maxl;
    for (int p = 0; p < n; p++) begin
      for (int i = 0; i < DIM; i++) vec[g][p][i] = byte'($urandom_range(0, 255));
      lvl[g][p] = 0;
      while ($urandom_range(0, 3) == 0 && lvl[g][p] < maxl - 1) lvl[g][p]++;
    end
    lvl[g][0] = maxl;                     // entering point, alone on the top layer
    if (maxl >= 4) for (int p = 1; p < 4; p++) lvl[g][p] = maxl - 1;
    // neighbour lists: nearest points of the same layer
    for (int l = 0; l <= maxl; l++) begin
      int m = (l == 0) ? MAXM0 : MAXM;
      for (int p = 0; p < n; p++) begin
        int      bi [32];
        int unsigned bd [32];
        int cnt = 0;
        nbn[g][l][p] = 0;
        if (lvl[g][p] < l) continue;
        for (int o = 0; o < n; o++) begin
          int unsigned d;
          int pos;
          if (o == p || lvl[g][o] < l) continue;
          d = pdist(g, p, o);
          pos = cnt;
          while (pos > 0 && bd[pos-1] > d) pos--;
          if (pos >= m) continue;
          for (int j = ((cnt < m) ? cnt : m - 1); j > pos; j--) begin
            bi[j] = bi[j-1]; bd[j] = bd[j-1];
          end
          bi[pos] = o; bd[pos] = d;
          if (cnt < m) cnt++;
        end
        nbn[g][l][p] = cnt;
        for (int j = 0; j < cnt; j++) nb[g][l][p][j] = bi[j];
      end
    end
    // upper list rows, top layer first
    row = 0;
    cached = 0;
    for (int l = maxl; l >= 1; l--) begin
      for (int p = 0; p < n; p++) if (lvl[g][p] >= l) begin
        uprow[l][p] = row;
        row++;
      end
      if (l == CACHE_MIN_LAYER) cached = row;
    end
    // memory image
    for (int p = 0; p < n; p++) begin
      for (int i = 0; i < DIM; i++) tb_mem_pkg::mem[rb + p*128 + i] = vec[g][p][i];
      for (int l = 0; l <= maxl; l++) begin
        if (lvl[g][p] < l) continue;
        tb_mem_pkg::wr32(ib + p*64 + l*4,
          {6'(nbn[g][l][p]), 26'((l == 0) ? p : uprow[l][p])});
        for (int j = 0; j < nbn[g][l][p]; j++)
          if (l == 0) tb_mem_pkg::wr32(l0b + p*128 + j*4, nb[g][l][p][j]);
          else        tb_mem_pkg::wr32(upb + uprow[l][p]*64 + j*4, nb[g][l][p][j]);
      end
    end
  endtask

  task automatic write_params(int pa, int g, int first, int base_id, int ib, int l0b,
                              int upb, int rb, int cached);
    config_t c;
    c = '0;
    c.max_layer     = 4'(toplvl[g]);
    c.enter_point   = 0;
    c.ef            = 8'(EFV);
    c.num_queries   = QID_W'(NQ);
    c.cached_rows   = 16'(cached);
    c.graph_base_id = base_id;
    c.first_graph   = first[0];
    c.query_base    = QBASE;
    c.raw_base      = rb;
    c.index_base    = ib;
    c.list0_base    = l0b;
    c.list_up_base  = upb;
    c.result_base   = RBASE;
    for (int i = 0; i < 64; i++) tb_mem_pkg::mem[pa + i] = c[8*i +: 8];
  endtask

  // ---------------- reference search ----------------
  int unsigned exp_d [NQ][K];
  int          exp_i [NQ][K];
  int          exp_n [NQ];

  // sorted insert, equal distances after the stored ones; limit entries kept
  function automatic void ins(ref int li [], ref int unsigned ld [], ref int cnt,
                              input int lim, input int i, input int unsigned d);
    int pos = 0;
    while (pos < cnt && ld[pos] <= d) pos++;
    if (pos >= lim) return;
    for (int j = ((cnt < lim) ? cnt : lim - 1); j > pos; j--) begin
      li[j] = li[j-1]; ld[j] = ld[j-1];
    end
    li[pos] = i; ld[pos] = d;
    if (cnt < lim) cnt++;
  endfunction

  task automatic ref_search(int g, int q, int base_id, int first);
    int cur; int unsigned cd;
    bit vis [NPMAX];
    int ci [] = new[CANDV]; int unsigned cdd [] = new[CANDV]; int cc = 0;
    int fi [] = new[EFV];   int unsigned fd  [] = new[EFV];   int fc = 0;
    int bi [] = new[K];     int unsigned bd  [] = new[K];     int bc = 0;
    cur = 0; cd = vdist(g, 0, q);
    for (int l = toplvl[g]; l >= 1; l--) begin
      bit changed = 1;
      while (changed) begin
        int c0 = cur;
        changed = 0;
        for (int j = 0; j < nbn[g][l][c0]; j++) begin
          int e = nb[g][l][c0][j];
          if (vdist(g, e, q) < cd) begin cur = e; cd = vdist(g, e, q); changed = 1; end
        end
      end
    end
    for (int p = 0; p < NPMAX; p++) vis[p] = 0;
    vis[cur] = 1;
    ins(ci, cdd, cc, CANDV, cur, cd);
    ins(fi, fd, fc, EFV, cur, cd);
    while (cc > 0) begin
      int c0;
      if (cdd[0] > fd[fc-1]) break;
      c0 = ci[0];
      for (int j = 0; j < cc - 1; j++) begin ci[j] = ci[j+1]; cdd[j] = cdd[j+1]; end
      cc--;
      for (int j = 0; j < nbn[g][0][c0]; j++) begin
        int e = nb[g][0][c0][j];
        int unsigned d = vdist(g, e, q);
        if (vis[e]) continue;
        vis[e] = 1;
        if (d < fd[fc-1] || fc < EFV) begin
          ins(ci, cdd, cc, CANDV, e, d);
          ins(fi, fd, fc, EFV, e, d);
        end
      end
    end
    // merge with the earlier best K
    if (!first) for (int j = 0; j < exp_n[q]; j++) ins(bi, bd, bc, K, exp_i[q][j], exp_d[q][j]);
    for (int j = 0; j < ((fc < K) ? fc : K); j++) ins(bi, bd, bc, K, fi[j] + base_id, fd[j]);
    exp_n[q] = bc;
    for (int j = 0; j < bc; j++) begin exp_i[q][j] = bi[j]; exp_d[q][j] = bd[j]; end
  endtask

  task automatic check_results(string tag);
    for (int q = 0; q < NQ; q++)
      for (int j = 0; j < K; j++) begin
        logic [31:0] gi = tb_mem_pkg::rd32(RBASE + q*K*8 + j*8);
        logic [31:0] gd = tb_mem_pkg::rd32(RBASE + q*K*8 + j*8 + 4);
        int unsigned ed = (j < exp_n[q]) ? exp_d[q][j] : 32'hffff_ffff;
        int          ei = (j < exp_n[q]) ? exp_i[q][j] : 32'hffff_ffff;
        checks++;
        if (gd != ed || gi != 32'(ei)) begin
          failures++;
          if (failures < 10)
            $display("%s q%0d rank %0d: got idx %0d dist %0d, expected idx %0d dist %0d",
                     tag, q, j, gi, gd, ei, ed);
        end
      end
  endtask

  task automatic run(int pa);
    longint t0;
    @(negedge clk); param_addr = pa; start = 1'b1;
    @(negedge clk); start = 1'b0;
    repeat (3) @(negedge clk);
    t0 = cycles;
    while (!done) @(negedge clk);
    $display("graph at param 0x%0h searched in %0d cycles", pa, cycles - t0);
  endtask

  // ---------------- stimulus ----------------
  initial begin
    int cached_a, cached_b;
    param_addr = '0;
    for (int i = 0; i < 'h70000; i++) tb_mem_pkg::mem[i] = '0;
    build_graph(0, NPA, 5, IDX_A, L0_A, UP_A, RAW_A, cached_a);
    build_graph(1, NPB, 2, IDX_B, L0_B, UP_B, RAW_B, cached_b);
    for (int q = 0; q < NQ; q++) begin
      int src = $urandom_range(0, NPA - 1);
      for (int i = 0; i < DIM; i++) begin
        int v = int'(vec[0][src][i]) + $urandom_range(0, 40) - 20;
        qv[q][i] = byte'((v < 0) ? 0 : (v > 255) ? 255 : v);
        tb_mem_pkg::mem[QBASE + q*128 + i] = qv[q][i];
      end
    end
    write_params(PARAM_A, 0, 1, 0,   IDX_A, L0_A, UP_A, RAW_A, cached_a);
    write_params(PARAM_B, 1, 0, NPA, IDX_B, L0_B, UP_B, RAW_B, cached_b);
    $display("graph A: %0d points, %0d cached upper rows; graph B: %0d points",
             NPA, cached_a, NPB);
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    for (int q = 0; q < NQ; q++) ref_search(0, q, 0, 1);
    run(PARAM_A);
    check_results("graph A");
    for (int q = 0; q < NQ; q++) ref_search(1, q, NPA, 0);
    run(PARAM_B);
    check_results("graph A+B");

    begin
      int up = 0, drops = 0, vh = 0, insn = 0, ev = 0, rej = 0, ee = 0, ed = 0, hits = 0;
      for (int c = 0; c < NUM_CM; c++) begin
        up += stats[c].up_moves; drops += stats[c].layer_drops;
        vh += stats[c].visited_hits; insn += stats[c].inserts;
        ev += stats[c].evictions; rej += stats[c].rejects;
        ee += stats[c].end_empty; ed += stats[c].end_dist; hits += cache_hits[c];
        checks++;
        if (stats[c].queries != 2 * NQ / NUM_CM) begin
          failures++;
          $display("computing module %0d finished %0d queries", c, stats[c].queries);
        end
      end
      $display("upper moves %0d, layer drops %0d, visited hits %0d, inserts %0d, evictions %0d",
               up, drops, vh, insn, ev);
      $display("rejects %0d, end on empty list %0d, end on distance %0d, cache hits %0d, empty lists %0d",
               rej, ee, ed, hits, nil_lists);
      checks += 9;
      if (up == 0)   begin failures++; $display("no upper-layer move"); end
      if (drops == 0) begin failures++; $display("no layer drop"); end
      if (vh == 0)   begin failures++; $display("no visited hit"); end
      if (insn == 0) begin failures++; $display("no insertion"); end
      if (ev == 0)   begin failures++; $display("no eviction"); end
      if (rej == 0)  begin failures++; $display("no rejection"); end
      if (ee == 0)   begin failures++; $display("no end on empty candidate list"); end
      if (ed == 0)   begin failures++; $display("no end on distance"); end
      if (hits == 0 || nil_lists == 0) begin failures++; $display("no cache hit or empty list"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
