// tb_raw_data_dma: self-checking test of the raw vector reader.
//
// Writes 100 random 128-byte vectors at raw_base, streams 400 random indices and
// checks that the vectors come back whole and in request order under random memory
// and consumer stalls. With the memory and the consumer always ready it also checks
// that the reader keeps several reads in flight, so that a burst of 64 indices takes
// well under 64 times the memory latency.
module tb_raw_data_dma;
  import hnsw_pkg::*;
  localparam int RB = 32'h8000;
  logic clk = 1'b0, rst_n = 1'b0;
  addr_t raw_base;
  logic idx_valid, idx_ready, out_valid, out_ready;
  idx_t idx;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  addr_t m_araddr;
  logic [7:0] m_arlen;
  logic [VEC_W-1:0] m_rdata, out_data;
  int checks = 0, failures = 0;
  int exp_i [$];
  logic stall;
  int t0, t1, cyc;

  raw_data_dma dut (.*);
  axi_rd_slave #(.DW(VEC_W), .LAT(8)) u_mem (.clk, .rst_n, .arvalid(m_arvalid),
    .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid),
    .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) out_ready <= !stall || ($urandom_range(0, 2) != 0);

  function automatic logic [VEC_W-1:0] vec(int i);
    logic [VEC_W-1:0] v;
    for (int b = 0; b < VEC_W/8; b++) v[8*b +: 8] = tb_mem_pkg::mem[RB + i*128 + b];
    return v;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_i.size() == 0) begin failures++; $display("unexpected vector"); end
    else begin
      int i;
      i = exp_i.pop_front();
      if (out_data != vec(i)) begin failures++; $display("vector %0d wrong", i); end
    end
  end

  task automatic send(int n, bit gaps);
    for (int k = 0; k < n; k++) begin
      int i;
      i = $urandom_range(0, 99);
      exp_i.push_back(i);
      @(negedge clk);
      idx_valid = 1; idx = i;
      @(posedge clk);
      while (!idx_ready) @(posedge clk);
      @(negedge clk);
      idx_valid = 0;
      if (gaps) repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  initial begin
    raw_base = RB; idx_valid = 0; idx = 0; stall = 1; cyc = 0;
    for (int i = 0; i < 100 * 128; i++) tb_mem_pkg::mem[RB + i] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    send(400, 1'b1);
    while (exp_i.size() != 0) @(negedge clk);
    // throughput: no consumer stalls (memory still stalls at random)
    stall = 0;
    @(negedge clk);
    t0 = cyc;
    send(64, 1'b0);
    while (exp_i.size() != 0) @(negedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 > 64 * 4) begin failures++; $display("64 reads took %0d cycles", t1 - t0); end
    $display("64 back-to-back reads took %0d cycles", t1 - t0);
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
