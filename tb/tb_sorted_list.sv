// tb_sorted_list: self-checking test of the sorted candidate/final list.
//
// Drives 3000 random operations (push with small random distances so that ties
// happen, pop of the minimum, an occasional clear) into a 16-entry list whose limit
// changes between runs, and compares count, min, max and every entry after each
// operation with a queue model kept here: a new entry goes after all entries of
// equal or smaller distance, and when the list holds limit entries the largest
// entry, or the new one if it would be last, is dropped.
module tb_sorted_list;
  import hnsw_pkg::*;
  localparam int D = 16;
  localparam int CW = $clog2(D + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [CW-1:0] limit, count;
  logic clear, pop_min, push;
  idx_t push_idx, min_idx, max_idx;
  dist_t push_dist, min_dist, max_dist;
  idx_t ent_idx [D];
  dist_t ent_dist [D];
  int checks = 0, failures = 0;
  idx_t  m_idx [$];
  dist_t m_dist [$];
  int lim, drops, fulls;

  sorted_list #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic model_push(idx_t i, dist_t d);
    int p;
    p = 0;
    while (p < m_dist.size() && m_dist[p] <= d) p++;
    if (m_dist.size() >= lim) begin
      fulls++;
      if (p >= lim) begin drops++; return; end
      void'(m_idx.pop_back()); void'(m_dist.pop_back());
    end
    m_idx.insert(p, i); m_dist.insert(p, d);
  endtask

  task automatic compare();
    checks++;
    if (int'(count) != m_dist.size()) begin
      failures++; $display("count %0d model %0d", count, m_dist.size());
      return;
    end
    for (int i = 0; i < m_dist.size(); i++) begin
      checks++;
      if (ent_idx[i] != m_idx[i] || ent_dist[i] != m_dist[i]) begin
        failures++;
        $display("entry %0d: %0d/%0d model %0d/%0d", i, ent_idx[i], ent_dist[i], m_idx[i], m_dist[i]);
      end
    end
    if (m_dist.size() > 0) begin
      checks++;
      if (min_dist != m_dist[0] || min_idx != m_idx[0] ||
          max_dist != m_dist[$] || max_idx != m_idx[$]) begin
        failures++; $display("min/max mismatch");
      end
    end
  endtask

  initial begin
    clear = 0; pop_min = 0; push = 0; push_idx = 0; push_dist = 0; limit = CW'(D);
    lim = D; drops = 0; fulls = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      int r;
      r = $urandom_range(0, 99);
      @(negedge clk);
      clear = 0; pop_min = 0; push = 0;
      if (r < 1) begin
        clear = 1;
        lim = $urandom_range(1, D);
        limit = CW'(lim);
        m_idx.delete(); m_dist.delete();
      end else if (r < 30 && m_dist.size() > 0) begin
        pop_min = 1;
        void'(m_idx.pop_front()); void'(m_dist.pop_front());
      end else begin
        push = 1;
        push_idx = $urandom;
        push_dist = $urandom_range(0, 40);
        model_push(push_idx, push_dist);
      end
      @(negedge clk);
      clear = 0; pop_min = 0; push = 0;
      compare();
    end
    checks++;
    if (drops == 0 || fulls == 0) begin failures++; $display("overflow never exercised"); end
    $display("pushes on a full list %0d, of which dropped %0d", fulls, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
