// output_dma: reads and writes the per-query result lists in DRAM.
//
// Results are kept in DRAM as K words of 64 bits per query ({distance, global
// index}, hnsw_pkg::result_t) at result_base + qid*K*8. A read command fetches the K
// words of one query as one burst; a write command writes K words, taken from the
// write-data stream, as one burst and completes on the write response. The 64-bit
// port is the paper's; keeping the running best results of every query in DRAM so
// that they survive from one graph database to the next is this design's reading of
// Fig. 6 (output DMA and brute-force searcher connected both ways).
module output_dma
  import hnsw_pkg::*;
#(
  parameter int unsigned K = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  addr_t            result_base,
  // read side
  input  logic             rd_cmd_valid,
  output logic             rd_cmd_ready,
  input  logic [QID_W-1:0] rd_qid,
  output logic             rd_valid,
  input  logic             rd_ready,
  output result_t          rd_data,
  // write side
  input  logic             wr_cmd_valid,
  output logic             wr_cmd_ready,
  input  logic [QID_W-1:0] wr_qid,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  result_t          wr_data,
  input  logic             wr_last,
  output logic             wr_done,
  // AXI4 read
  output logic             m_arvalid,
  input  logic             m_arready,
  output addr_t            m_araddr,
  output logic [7:0]       m_arlen,
  input  logic             m_rvalid,
  output logic             m_rready,
  input  logic [63:0]      m_rdata,
  input  logic             m_rlast,
  // AXI4 write
  output logic             m_awvalid,
  input  logic             m_awready,
  output addr_t            m_awaddr,
  output logic [7:0]       m_awlen,
  output logic             m_wvalid,
  input  logic             m_wready,
  output logic [63:0]      m_wdata,
  output logic             m_wlast,
  input  logic             m_bvalid,
  output logic             m_bready
);
  localparam int unsigned RB = K * 8;   // bytes per query
  logic rd_last;

  axi_rd_master #(.DW(64)) u_rd (
    .clk, .rst_n,
    .cmd_valid(rd_cmd_valid), .cmd_ready(rd_cmd_ready),
    .cmd_addr(result_base + addr_t'(rd_qid) * addr_t'(RB)), .cmd_len(8'(K - 1)),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data), .out_last(rd_last));

  typedef enum logic [1:0] {W_IDLE, W_AW, W_DATA, W_RESP} wstate_t;
  wstate_t wst;

  assign wr_cmd_ready = (wst == W_IDLE);
  assign m_awvalid    = (wst == W_AW);
  assign m_awlen      = 8'(K - 1);
  assign m_wvalid     = (wst == W_DATA) && wr_valid;
  assign wr_ready     = (wst == W_DATA) && m_wready;
  assign m_wdata      = wr_data;
  assign m_wlast      = wr_last;
  assign m_bready     = (wst == W_RESP);
  assign wr_done      = (wst == W_RESP) && m_bvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst      <= W_IDLE;
      m_awaddr <= '0;
    end else begin
      unique case (wst)
        W_IDLE: if (wr_cmd_valid) begin
          m_awaddr <= result_base + addr_t'(wr_qid) * addr_t'(RB);
          wst      <= W_AW;
        end
        W_AW:   if (m_awready) wst <= W_DATA;
        W_DATA: if (m_wvalid && m_wready && wr_last) wst <= W_RESP;
        W_RESP: if (m_bvalid) wst <= W_IDLE;
        default: wst <= W_IDLE;
      endcase
    end
  end
endmodule
