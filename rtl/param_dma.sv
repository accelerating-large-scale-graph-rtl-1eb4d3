// param_dma: parameter DMA and configuration registers.
//
// On a start pulse it reads two 256-bit beats from param_addr over its own AXI read
// port and packs them into the configuration register (max layer, entering point,
// ef, number of queries, table base addresses, ...; layout in hnsw_pkg::config_t).
// cfg_valid rises when both beats are in and stays high until the next start. The
// 256-bit port and the contents (max layer, entering point, ef) are the paper's; the
// record layout is this design's.
module param_dma
  import hnsw_pkg::*;
#(
  parameter int unsigned DW = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         param_addr,
  output logic          m_arvalid,
  input  logic          m_arready,
  output addr_t         m_araddr,
  output logic [7:0]    m_arlen,
  input  logic          m_rvalid,
  output logic          m_rready,
  input  logic [DW-1:0] m_rdata,
  input  logic          m_rlast,
  output config_t       cfg,
  output logic          cfg_valid
);
  logic          cmd_valid, cmd_ready, b_valid, b_last;
  logic [DW-1:0] b_data;
  logic          pending, beat;

  assign cmd_valid = pending;

  axi_rd_master #(.DW(DW)) u_rd (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_addr(param_addr), .cmd_len(8'd1),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid(b_valid), .out_ready(1'b1), .out_data(b_data), .out_last(b_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      beat      <= 1'b0;
      cfg_valid <= 1'b0;
      cfg       <= '0;
    end else begin
      if (start) begin
        pending   <= 1'b1;
        beat      <= 1'b0;
        cfg_valid <= 1'b0;
      end else if (pending && cmd_ready) begin
        pending <= 1'b0;
      end
      if (b_valid) begin
        if (!beat) cfg[255:0]   <= b_data;
        else       cfg[511:256] <= b_data;
        beat <= ~beat;
        if (b_last) cfg_valid <= 1'b1;
      end
    end
  end
endmodule
