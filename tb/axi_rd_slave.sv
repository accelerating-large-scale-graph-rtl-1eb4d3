// axi_rd_slave: behavioural AXI4 read slave over tb_mem_pkg::mem (not synthesizable).
//
// Accepts up to 8 outstanding bursts, answers each after LAT cycles with len+1 beats
// of DW bits read little-endian from consecutive addresses, in request order. With
// STALL set, arready drops at random and rvalid is delayed at random (but, as AXI
// requires, never withdrawn before rready) to exercise back-pressure.
module axi_rd_slave #(
  parameter int unsigned DW    = 64,
  parameter int unsigned LAT   = 8,
  parameter bit          STALL = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arvalid,
  output logic          arready,
  input  logic [31:0]   araddr,
  input  logic [7:0]    arlen,
  output logic          rvalid,
  input  logic          rready,
  output logic [DW-1:0] rdata,
  output logic          rlast
);
  logic [31:0] f_addr [8];
  logic [7:0]  f_len  [8];
  logic [31:0] f_t    [8];
  logic [3:0]  wp, rp;
  logic [31:0] cyc;
  logic [7:0]  beat;
  logic        stall_ar, stall_r;
  logic        nonempty;

  assign nonempty = (wp != rp);
  assign arready  = rst_n && ((wp - rp) < 4'd8) && !stall_ar;

  always_comb begin
    rvalid = 1'b0;
    rdata  = '0;
    rlast  = 1'b0;
    if (rst_n && nonempty && cyc >= f_t[rp[2:0]] && !stall_r) begin
      rvalid = 1'b1;
      for (int i = 0; i < DW/8; i++)
        rdata[8*i +: 8] = tb_mem_pkg::mem[(f_addr[rp[2:0]] + 32'(beat)*(DW/8) + i)
                                          % tb_mem_pkg::MEM_BYTES];
      rlast = (beat == f_len[rp[2:0]]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0;
      beat <= 0;
      wp <= 0;
      rp <= 0;
      stall_ar <= 1'b0;
      stall_r <= 1'b0;
      for (int i = 0; i < 8; i++) begin
        f_addr[i] <= '0; f_len[i] <= '0; f_t[i] <= '0;
      end
    end else begin
      cyc <= cyc + 1;
      stall_ar <= STALL && ($urandom_range(0, 3) == 0);
      stall_r  <= STALL && ($urandom_range(0, 3) == 0) && !(rvalid && !rready);
      if (rvalid && rready) begin
        if (rlast) begin
          beat <= 0;
          rp <= rp + 1'b1;
        end else beat <= beat + 1'b1;
      end
      if (arvalid && arready) begin
        f_addr[wp[2:0]] <= araddr;
        f_len[wp[2:0]]  <= arlen;
        f_t[wp[2:0]]    <= cyc + LAT;
        wp <= wp + 1'b1;
      end
    end
  end
endmodule
