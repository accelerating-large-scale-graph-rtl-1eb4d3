// sync_fifo: single-clock FIFO used for the query, data, index and distance FIFOs.
//
// A register array with read and write pointers; valid/ready on both sides. A word
// written is visible on the read side the next cycle. Writing when full and reading
// when empty are refused by the ready/valid handshake (asserted below). Depth must be a
// power of two. The paper names these FIFOs; their depth and handshake are this
// design's choice.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign count     = wptr - rptr;
  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
