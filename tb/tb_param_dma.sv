// tb_param_dma: self-checking test of the parameter DMA.
//
// Writes two random 512-bit parameter records in memory, starts the DMA on each in
// turn and checks that cfg_valid drops on start, rises once both 256-bit beats are
// in, and that cfg then equals the record bit for bit.
module tb_param_dma;
  import hnsw_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, cfg_valid;
  addr_t param_addr;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr;
  logic [7:0] m_arlen;
  logic [255:0] m_rdata;
  config_t cfg;
  int checks = 0, failures = 0;

  param_dma dut (.*);
  axi_rd_slave #(.DW(256)) u_mem (.clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready),
    .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready),
    .rdata(m_rdata), .rlast(m_rlast));

  always #5 clk = ~clk;

  initial begin
    logic [511:0] rec [2];
    start = 0; param_addr = 0;
    for (int r = 0; r < 2; r++)
      for (int b = 0; b < 64; b++) begin
        rec[r][8*b +: 8] = 8'($urandom);
        tb_mem_pkg::mem[r*256 + b] = rec[r][8*b +: 8];
      end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4; n++) begin
      @(negedge clk);
      param_addr = (n % 2) * 256; start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (cfg_valid) begin failures++; $display("cfg_valid high right after start"); end
      while (!cfg_valid) @(negedge clk);
      checks++;
      if (cfg != rec[n % 2]) begin failures++; $display("record %0d read wrong", n % 2); end
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
