// tb_bruteforce_searcher: self-checking test of the per-query K-best merge.
//
// Three graph databases are searched in turn for 6 queries. For each query this
// testbench plays the computing module (a sorted stream of 1 to K {local index,
// distance} results) and the output DMA (a result area per query, served with
// random stalls on every handshake). After each merge the K entries written back
// must equal a model merge done here: old entries, then the new ones with the
// graph's base index added, kept sorted (a new entry goes after equal distances) and
// cut to K, empty slots written as all ones. The first graph must not read the
// result area; the others must read it exactly once per query.
module tb_bruteforce_searcher;
  import hnsw_pkg::*;
  localparam int K = 10;
  localparam int NQ = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  config_t cfg;
  logic in_valid, in_ready, in_last;
  logic [QID_W-1:0] in_qid, rd_qid, wr_qid;
  result_t in_res, rd_data, wr_data;
  logic rd_cmd_valid, rd_cmd_ready, rd_valid, rd_ready;
  logic wr_cmd_valid, wr_cmd_ready, wr_valid, wr_ready, wr_last, wr_done, query_done;
  int checks = 0, failures = 0;
  result_t area [NQ][K];
  result_t expect_area [NQ][K];
  int reads, dones;

  bruteforce_searcher #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  // output DMA model
  initial begin
    rd_cmd_ready = 0; rd_valid = 0; rd_data = '0; wr_cmd_ready = 0; wr_ready = 0; wr_done = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      rd_cmd_ready = ($urandom_range(0, 1) == 1);
      wr_cmd_ready = ($urandom_range(0, 1) == 1);
      if (rd_cmd_valid && rd_cmd_ready) begin
        int q;
        q = int'(rd_qid);
        reads++;
        @(negedge clk);
        rd_cmd_ready = 0;
        for (int i = 0; i < K; i++) begin
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          rd_valid = 1; rd_data = area[q][i];
          @(posedge clk);
          while (!rd_ready) @(posedge clk);
          @(negedge clk);
          rd_valid = 0;
        end
      end else if (wr_cmd_valid && wr_cmd_ready) begin
        int q, n;
        q = int'(wr_qid); n = 0;
        @(negedge clk);
        wr_cmd_ready = 0;
        while (n < K) begin
          wr_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (wr_valid && wr_ready) begin
            area[q][n] = wr_data;
            checks++;
            if (wr_last != (n == K - 1)) begin failures++; $display("wr_last wrong at %0d", n); end
            n++;
          end
          @(negedge clk);
        end
        wr_ready = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        wr_done = 1;
        @(negedge clk);
        wr_done = 0;
      end
    end
  end

  always @(posedge clk) if (query_done) dones++;

  task automatic merge_model(int q, result_t nw [$], logic [31:0] base, bit first);
    result_t l [$];
    result_t e;
    int p;
    l.delete();
    if (!first)
      for (int i = 0; i < K; i++) if (expect_area[q][i].dval != '1) l.push_back(expect_area[q][i]);
    foreach (nw[j]) begin
      e = nw[j];
      e.idx = e.idx + base;
      p = 0;
      while (p < l.size() && l[p].dval <= e.dval) p++;
      if (p < K) begin
        l.insert(p, e);
        if (l.size() > K) void'(l.pop_back());
      end
    end
    for (int i = 0; i < K; i++) expect_area[q][i] = (i < l.size()) ? l[i] : '1;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_last = 0; in_qid = 0; in_res = '0; reads = 0; dones = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 3; g++) begin
      cfg.first_graph   = (g == 0);
      cfg.graph_base_id = 32'(g * 1000);
      for (int q = 0; q < NQ; q++) begin
        result_t nw [$];
        result_t r;
        int n, d, reads0, dones0;
        nw.delete();
        reads0 = reads; dones0 = dones;
        n = $urandom_range(1, K);
        d = $urandom_range(0, 20);
        for (int i = 0; i < n; i++) begin
          d += $urandom_range(0, 30);
          r.idx = $urandom_range(0, 999); r.dval = 32'(d);
          nw.push_back(r);
        end
        merge_model(q, nw, cfg.graph_base_id, g == 0);
        @(negedge clk);
        for (int i = 0; i < n; i++) begin
          in_valid = 1; in_qid = QID_W'(q); in_res = nw[i]; in_last = (i == n - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
          in_valid = 0;
        end
        while (dones == dones0) @(negedge clk);
        checks++;
        if (reads - reads0 != ((g == 0) ? 0 : 1)) begin
          failures++; $display("graph %0d query %0d: %0d reads", g, q, reads - reads0);
        end
        for (int i = 0; i < K; i++) begin
          checks++;
          if (area[q][i] != expect_area[q][i]) begin
            failures++;
            $display("graph %0d query %0d slot %0d: %0d/%0d expected %0d/%0d", g, q, i,
                     area[q][i].idx, area[q][i].dval, expect_area[q][i].idx, expect_area[q][i].dval);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
