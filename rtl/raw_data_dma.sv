// raw_data_dma: fetches raw vectors by point index.
//
// Each index accepted on the input stream becomes one AXI read of a single
// 1024-bit beat at raw_base + index*128 (rows of the raw data table are 128 bytes,
// 64-byte aligned). Address issue and data return are decoupled, so several reads
// can be in flight and the data leave in request order (AXI, one ID); beats go to
// the data FIFO through out_*. The 1024-bit port and the aligned raw data table are
// the paper's; the pipelined request scheme is this design's choice.
module raw_data_dma
  import hnsw_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  addr_t            raw_base,
  input  logic             idx_valid,
  output logic             idx_ready,
  input  idx_t             idx,
  output logic             m_arvalid,
  input  logic             m_arready,
  output addr_t            m_araddr,
  output logic [7:0]       m_arlen,
  input  logic             m_rvalid,
  output logic             m_rready,
  input  logic [VEC_W-1:0] m_rdata,
  input  logic             m_rlast,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [VEC_W-1:0] out_data
);
  // address generator: registered AR channel
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_arvalid <= 1'b0;
      m_araddr  <= '0;
    end else if (idx_ready) begin
      m_arvalid <= idx_valid;
      m_araddr  <= raw_base + (addr_t'(idx) << 7);
    end
  end
  assign idx_ready = !m_arvalid || m_arready;
  assign m_arlen   = 8'd0;

  assign out_valid = m_rvalid;
  assign m_rready  = out_ready;
  assign out_data  = m_rdata;

  logic unused;
  assign unused = m_rlast;
endmodule
