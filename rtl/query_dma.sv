// query_dma: reads the batch of query vectors into the query FIFOs.
//
// When the configuration becomes valid it reads num_queries vectors of 1024 bits
// from query_base, one beat per query, and emits each with its query id. The id's
// low bits select which computing module's query FIFO takes it (done outside). The
// 1024-bit port is the paper's; one-beat bursts are this design's choice.
module query_dma
  import hnsw_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,       // clears the state for a new run
  input  logic             cfg_valid,
  input  config_t          cfg,
  output logic             m_arvalid,
  input  logic             m_arready,
  output addr_t            m_araddr,
  output logic [7:0]       m_arlen,
  input  logic             m_rvalid,
  output logic             m_rready,
  input  logic [VEC_W-1:0] m_rdata,
  input  logic             m_rlast,
  output logic             q_valid,
  input  logic             q_ready,
  output query_t           q
);
  logic [QID_W-1:0] issued, received;
  logic             cmd_valid, cmd_ready, b_last;

  assign cmd_valid = cfg_valid && (issued != cfg.num_queries) && (issued == received);

  axi_rd_master #(.DW(VEC_W)) u_rd (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready,
    .cmd_addr(cfg.query_base + (addr_t'(issued) << 7)), .cmd_len(8'd0),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q.vec), .out_last(b_last));

  assign q.qid = received;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued   <= '0;
      received <= '0;
    end else if (start) begin
      issued   <= '0;
      received <= '0;
    end else begin
      if (cmd_valid && cmd_ready) issued <= issued + 1'b1;
      if (q_valid && q_ready)     received <= received + 1'b1;
    end
  end
endmodule
