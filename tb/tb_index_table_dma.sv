// tb_index_table_dma: self-checking test of the index table reader.
//
// Fills a 200-point index table (64-byte rows, one 32-bit {size, pointer} word per
// layer) with random words, sends 300 random (index, layer) requests and checks that
// each returned word is the one at index_base + index*64 + layer*4 and carries the
// requested layer, in order, with random memory and consumer stalls.
module tb_index_table_dma;
  import hnsw_pkg::*;
  localparam int IB = 32'h4000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, ent_valid, ent_ready;
  idx_t req_idx;
  layer_t req_layer, ent_layer;
  idx_entry_t ent;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr;
  logic [7:0] m_arlen;
  logic [31:0] m_rdata;
  addr_t index_base;
  int checks = 0, failures = 0;
  logic [31:0] exp_w [$];
  layer_t exp_l [$];

  index_table_dma dut (.*);
  axi_rd_slave #(.DW(32)) u_mem (.clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready),
    .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rlast(m_rlast));

  always #5 clk = ~clk;
  always @(negedge clk) ent_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && ent_valid && ent_ready) begin
    checks++;
    if (exp_w.size() == 0) begin failures++; $display("unexpected entry"); end
    else begin
      logic [31:0] w;
      layer_t l;
      w = exp_w.pop_front(); l = exp_l.pop_front();
      if (32'(ent) != w || ent_layer != l) begin
        failures++; $display("entry %h/%0d expected %h/%0d", ent, ent_layer, w, l);
      end
    end
  end

  initial begin
    index_base = IB; req_valid = 0; req_idx = 0; req_layer = 0;
    for (int i = 0; i < 200 * 16; i++) tb_mem_pkg::wr32(IB + 4*i, $urandom);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      int i, l;
      i = $urandom_range(0, 199); l = $urandom_range(0, 6);
      exp_w.push_back(tb_mem_pkg::rd32(IB + i*64 + l*4));
      exp_l.push_back(layer_t'(l));
      @(negedge clk);
      req_valid = 1; req_idx = i; req_layer = layer_t'(l);
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 0;
    end
    while (exp_w.size() != 0) @(negedge clk);
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
