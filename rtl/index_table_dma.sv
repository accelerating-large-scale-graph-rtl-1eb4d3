// index_table_dma: reads the {size, pointer} word of one point for one layer.
//
// The comparator's next-index request (point index, layer) becomes one 32-bit AXI
// read at index_base + index*64 + layer*4: each index-table row is 64 bytes and holds
// one 32-bit {size, pointer} word per layer, so a point's row is read at most once
// per visit. The word goes to the list table DMA with the layer. One request is in
// flight at a time. The 32-bit port and the row of per-layer {size, pointer} are the
// paper's; the bit layout (hnsw_pkg::idx_entry_t) is this design's.
module index_table_dma
  import hnsw_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  addr_t      index_base,
  input  logic       req_valid,
  output logic       req_ready,
  input  idx_t       req_idx,
  input  layer_t     req_layer,
  output logic       m_arvalid,
  input  logic       m_arready,
  output addr_t      m_araddr,
  output logic [7:0] m_arlen,
  input  logic       m_rvalid,
  output logic       m_rready,
  input  logic [31:0] m_rdata,
  input  logic       m_rlast,
  output logic       ent_valid,
  input  logic       ent_ready,
  output idx_entry_t ent,
  output layer_t     ent_layer
);
  logic b_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      ent_layer <= '0;
    else if (req_valid && req_ready) ent_layer <= req_layer;
  end

  axi_rd_master #(.DW(32)) u_rd (
    .clk, .rst_n,
    .cmd_valid(req_valid), .cmd_ready(req_ready),
    .cmd_addr(index_base + (addr_t'(req_idx) << 6) + (addr_t'(req_layer) << 2)),
    .cmd_len(8'd0),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid(ent_valid), .out_ready(ent_ready), .out_data(ent), .out_last(b_last));
endmodule
