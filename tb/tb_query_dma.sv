// tb_query_dma: self-checking test of the query reader.
//
// Writes 20 random 128-byte query vectors at query_base and checks that, after the
// configuration becomes valid, exactly num_queries vectors leave in order with ids
// 0, 1, 2, ..., under random memory and consumer stalls, and that a start pulse
// begins a new batch from id 0.
module tb_query_dma;
  import hnsw_pkg::*;
  localparam int QB = 32'h2000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, cfg_valid, q_valid, q_ready;
  config_t cfg;
  query_t q;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr;
  logic [7:0] m_arlen;
  logic [VEC_W-1:0] m_rdata;
  int checks = 0, failures = 0;
  int got;

  query_dma dut (.*);
  axi_rd_slave #(.DW(VEC_W)) u_mem (.clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready),
    .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rlast(m_rlast));

  always #5 clk = ~clk;
  always @(negedge clk) q_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && q_valid && q_ready) begin
    logic [VEC_W-1:0] v;
    for (int b = 0; b < VEC_W/8; b++) v[8*b +: 8] = tb_mem_pkg::mem[QB + got*128 + b];
    checks++;
    if (int'(q.qid) != got || q.vec != v) begin
      failures++; $display("query id %0d expected %0d, or vector wrong", q.qid, got);
    end
    got++;
  end

  initial begin
    start = 0; cfg_valid = 0; cfg = '0; got = 0;
    for (int i = 0; i < 20 * 128; i++) tb_mem_pkg::mem[QB + i] = 8'($urandom);
    cfg.query_base = QB;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      cfg.num_queries = (run == 0) ? 16'd13 : 16'd20;
      got = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0; cfg_valid = 1;
      repeat (600) @(negedge clk);
      checks++;
      if (got != int'(cfg.num_queries)) begin
        failures++; $display("run %0d: %0d queries, expected %0d", run, got, cfg.num_queries);
      end
      cfg_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
