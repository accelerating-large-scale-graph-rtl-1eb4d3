// tb_list_table_dma: self-checking test of the neighbour-list fetcher and its cache.
//
// The memory model holds an upper-layer list table of 64 rows and a layer-0 table of
// 64 rows with random indices. After the cache fill (first 8 upper rows) the cached
// rows are overwritten in memory, so a list served from the cache can be told from
// one read from memory. 300 random {size, pointer, layer} entries are then sent;
// the index FIFO stream must carry each list in order with last on its final index
// (a single nil element for an empty list), the raw data stream must carry the same
// indices, and the cache-hit counter must count exactly the upper-layer (>= 3) entries
// with a pointer below 8. Memory and both output streams stall at random.
module tb_list_table_dma;
  import hnsw_pkg::*;
  localparam int CROWS = 8;
  localparam int UPB = 32'h8000, L0B = 32'h10000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, cfg_valid, fill_done;
  config_t cfg;
  logic ent_valid, ent_ready;
  idx_entry_t ent;
  layer_t ent_layer;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr;
  logic [7:0] m_arlen;
  logic [LIST_W-1:0] m_rdata;
  logic raw_valid, raw_ready, nbr_valid, nbr_ready;
  idx_t raw_idx;
  nbr_t nbr;
  logic [31:0] cache_hits;
  int checks = 0, failures = 0;
  idx_t up_orig [64][16];
  nbr_t exp_nbr [$];
  idx_t exp_raw [$];
  int exp_hits, nil_seen;

  list_table_dma #(.CACHE_ROWS(16)) dut (.*);
  axi_rd_slave #(.DW(LIST_W)) u_mem (.clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready),
    .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rlast(m_rlast));

  always #5 clk = ~clk;

  always @(negedge clk) begin
    raw_ready <= ($urandom_range(0, 3) != 0);
    nbr_ready <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (nbr_valid && nbr_ready) begin
      checks++;
      if (exp_nbr.size() == 0) begin failures++; $display("unexpected list element"); end
      else begin
        nbr_t e;
        e = exp_nbr.pop_front();
        if (e != nbr) begin
          failures++; $display("element %0d/%0d/%0d expected %0d/%0d/%0d",
                               nbr.idx, nbr.last, nbr.nil, e.idx, e.last, e.nil);
        end
        if (e.nil) nil_seen++;
      end
    end
    if (raw_valid && raw_ready) begin
      checks++;
      if (exp_raw.size() == 0) begin failures++; $display("unexpected raw index"); end
      else begin
        idx_t e;
        e = exp_raw.pop_front();
        if (e != raw_idx) begin failures++; $display("raw %0d expected %0d", raw_idx, e); end
      end
    end
  end

  initial begin
    start = 0; cfg_valid = 0; cfg = '0; ent_valid = 0; ent = '0; ent_layer = '0;
    exp_hits = 0; nil_seen = 0;
    for (int r = 0; r < 64; r++)
      for (int i = 0; i < 16; i++) begin
        up_orig[r][i] = $urandom_range(0, 99999);
        tb_mem_pkg::wr32(UPB + r*64 + i*4, up_orig[r][i]);
      end
    for (int r = 0; r < 64; r++)
      for (int i = 0; i < 32; i++) tb_mem_pkg::wr32(L0B + r*128 + i*4, $urandom_range(0, 99999));
    cfg.list_up_base = UPB; cfg.list0_base = L0B; cfg.cached_rows = CROWS;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_valid = 1;
    while (!fill_done) @(negedge clk);
    // overwrite the cached rows in memory: hits must still return the old lists
    for (int r = 0; r < CROWS; r++)
      for (int i = 0; i < 16; i++) tb_mem_pkg::wr32(UPB + r*64 + i*4, 32'hdead0000 + i);
    for (int n = 0; n < 300; n++) begin
      int lay, ptr, size, maxm;
      nbr_t e;
      lay  = (n % 2 == 0) ? 0 : $urandom_range(1, 6);
      ptr  = (lay >= 3 && $urandom_range(0, 1) == 1) ? $urandom_range(0, CROWS - 1)
                                                     : $urandom_range(0, 63);
      maxm = (lay == 0) ? 32 : 16;
      size = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(1, maxm);
      if (lay >= 3 && ptr < CROWS && size != 0) exp_hits++;
      if (size == 0) begin
        e.idx = '0; e.nil = 1; e.last = 1; exp_nbr.push_back(e);
      end else
        for (int i = 0; i < size; i++) begin
          if (lay == 0)                     e.idx = tb_mem_pkg::rd32(L0B + ptr*128 + i*4);
          else if (lay >= 3 && ptr < CROWS) e.idx = up_orig[ptr][i];
          else                              e.idx = tb_mem_pkg::rd32(UPB + ptr*64 + i*4);
          e.nil = 0; e.last = (i == size - 1);
          exp_nbr.push_back(e); exp_raw.push_back(e.idx);
        end
      ent_valid = 1; ent.size = 6'(size); ent.ptr = 26'(ptr); ent_layer = layer_t'(lay);
      @(posedge clk);
      while (!ent_ready) @(posedge clk);
      @(negedge clk);
      ent_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    while (exp_nbr.size() != 0 || exp_raw.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (cache_hits != 32'(exp_hits)) begin
      failures++; $display("cache hits %0d expected %0d", cache_hits, exp_hits);
    end
    checks++;
    if (exp_hits == 0 || nil_seen == 0) begin failures++; $display("hit or nil never exercised"); end
    $display("cache hits %0d, empty lists %0d", cache_hits, nil_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
