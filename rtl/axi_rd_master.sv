// axi_rd_master: AXI4 read master for one burst at a time.
//
// A command (start address, burst length minus one) is accepted when no burst is in
// flight; it is put on the AR channel, and the R beats are handed on unchanged to a
// valid/ready output stream with a last flag. A new command is accepted once the
// last beat has left. Only the AR and R channels of AXI4 are used (INCR bursts, one
// ID). The paper says each DMA holds an address generator and an AXI master; this
// single-outstanding-burst master is this design's simplest form of it.
module axi_rd_master
  import hnsw_pkg::*;
#(
  parameter int unsigned DW = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  addr_t         cmd_addr,
  input  logic [7:0]    cmd_len,
  // AXI4 AR / R
  output logic          m_arvalid,
  input  logic          m_arready,
  output addr_t         m_araddr,
  output logic [7:0]    m_arlen,
  input  logic          m_rvalid,
  output logic          m_rready,
  input  logic [DW-1:0] m_rdata,
  input  logic          m_rlast,
  // beats out
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  output logic          out_last
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_t;
  state_t st;

  assign cmd_ready = (st == S_IDLE);
  assign m_arvalid = (st == S_AR);
  assign out_valid = (st == S_R) && m_rvalid;
  assign m_rready  = (st == S_R) && out_ready;
  assign out_data  = m_rdata;
  assign out_last  = m_rlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      m_araddr <= '0;
      m_arlen  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          m_araddr <= cmd_addr;
          m_arlen  <= cmd_len;
          st       <= S_AR;
        end
        S_AR:   if (m_arready) st <= S_R;
        S_R:    if (m_rvalid && out_ready && m_rlast) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr));
endmodule
