// tb_output_dma: self-checking test of the result-list reader/writer.
//
// Writes random K-entry result lists for 12 queries through the write side, with
// random stalls on the write data stream and on the memory, and checks that each
// write completes with one wr_done and lands at result_base + qid*K*8; then reads
// every list back through the read side and compares it, entry by entry, with what
// was written.
module tb_output_dma;
  import hnsw_pkg::*;
  localparam int K = 10;
  localparam int OB = 32'h3000;
  localparam int NQ = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  addr_t result_base;
  logic rd_cmd_valid, rd_cmd_ready, rd_valid, rd_ready;
  logic [QID_W-1:0] rd_qid, wr_qid;
  result_t rd_data, wr_data;
  logic wr_cmd_valid, wr_cmd_ready, wr_valid, wr_ready, wr_last, wr_done;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr, m_awaddr;
  logic [7:0] m_arlen, m_awlen;
  logic [63:0] m_rdata, m_wdata;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  int checks = 0, failures = 0;
  result_t lists [NQ][K];
  int dones;

  output_dma #(.K(K)) dut (.*);
  axi_rd_slave #(.DW(64)) u_rmem (.clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready),
    .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rlast(m_rlast));
  axi_wr_slave #(.DW(64)) u_wmem (.clk, .rst_n, .awvalid(m_awvalid), .awready(m_awready),
    .awaddr(m_awaddr), .awlen(m_awlen), .wvalid(m_wvalid), .wready(m_wready),
    .wdata(m_wdata), .wlast(m_wlast), .bvalid(m_bvalid), .bready(m_bready));

  always #5 clk = ~clk;
  always @(posedge clk) if (wr_done) dones++;

  initial begin
    result_base = OB; dones = 0;
    rd_cmd_valid = 0; rd_qid = 0; rd_ready = 0; wr_cmd_valid = 0; wr_qid = 0;
    wr_valid = 0; wr_data = '0; wr_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < NQ; q++) begin
      int d0;
      for (int i = 0; i < K; i++) begin
        lists[q][i].idx = $urandom; lists[q][i].dval = $urandom;
      end
      d0 = dones;
      @(negedge clk);
      wr_cmd_valid = 1; wr_qid = QID_W'(q);
      @(posedge clk);
      while (!wr_cmd_ready) @(posedge clk);
      @(negedge clk);
      wr_cmd_valid = 0;
      for (int i = 0; i < K; i++) begin
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        wr_valid = 1; wr_data = lists[q][i]; wr_last = (i == K - 1);
        @(posedge clk);
        while (!wr_ready) @(posedge clk);
        @(negedge clk);
        wr_valid = 0;
      end
      while (dones == d0) @(negedge clk);
      @(negedge clk);
      checks++;
      if (dones != d0 + 1) begin failures++; $display("query %0d: %0d write completions", q, dones - d0); end
      for (int i = 0; i < K; i++) begin
        logic [63:0] w;
        w = {tb_mem_pkg::rd32(OB + q*K*8 + i*8 + 4), tb_mem_pkg::rd32(OB + q*K*8 + i*8)};
        checks++;
        if (w != 64'(lists[q][i])) begin failures++; $display("query %0d entry %0d not in memory", q, i); end
      end
    end
    for (int q = NQ - 1; q >= 0; q--) begin
      @(negedge clk);
      rd_cmd_valid = 1; rd_qid = QID_W'(q);
      @(posedge clk);
      while (!rd_cmd_ready) @(posedge clk);
      @(negedge clk);
      rd_cmd_valid = 0;
      for (int i = 0; i < K; i++) begin
        rd_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk);
        while (!(rd_valid && rd_ready)) begin
          @(negedge clk);
          rd_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
        end
        checks++;
        if (rd_data != lists[q][i]) begin failures++; $display("read query %0d entry %0d wrong", q, i); end
        @(negedge clk);
        rd_ready = 0;
      end
    end
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
