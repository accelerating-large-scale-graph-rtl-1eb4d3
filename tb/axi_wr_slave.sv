// axi_wr_slave: behavioural AXI4 write slave over tb_mem_pkg::mem (not synthesizable).
//
// One burst at a time: takes the AW address, writes each W beat of DW bits to
// consecutive addresses and answers with a write response after the last beat.
module axi_wr_slave #(
  parameter int unsigned DW = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          awvalid,
  output logic          awready,
  input  logic [31:0]   awaddr,
  input  logic [7:0]    awlen,
  input  logic          wvalid,
  output logic          wready,
  input  logic [DW-1:0] wdata,
  input  logic          wlast,
  output logic          bvalid,
  input  logic          bready
);
  logic        busy;
  logic [31:0] addr;
  logic [7:0]  len_seen;

  assign awready = rst_n && !busy && !bvalid;
  assign wready  = rst_n && busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      bvalid <= 1'b0;
      addr <= 0;
      len_seen <= '0;
    end else begin
      if (bvalid && bready) bvalid <= 1'b0;
      if (wvalid && wready) begin
        for (int i = 0; i < DW/8; i++) tb_mem_pkg::mem[addr+i] <= wdata[8*i +: 8];
        addr <= addr + DW/8;
        if (wlast) begin
          busy <= 1'b0;
          bvalid <= 1'b1;
        end
      end
      if (awvalid && awready) begin
        busy <= 1'b1;
        addr <= awaddr;
        len_seen <= awlen;
      end
    end
  end
endmodule
