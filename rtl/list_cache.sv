// list_cache: on-chip copy of the upper-layer list tables (the "List $").
//
// A ROWS x 512-bit memory, one neighbour list of up to maxM 32-bit indices per row.
// It is filled once per graph database with the first rows of the upper-layer list
// table, which holds the top layer first, so the rows of layers 6 to 3 are the ones
// held. One write port (fill) and one read port with a registered output: data
// appear the cycle after rd_en. The paper gives the cached layers (6 to 3); the
// depth (2048 rows, enough for the about 1,300 points above layer 2 that a 5M-point
// graph with M = 16 has) is this design's estimate.
module list_cache
  import hnsw_pkg::*;
#(
  parameter int unsigned ROWS = 2048,
  parameter int unsigned W    = LIST_W
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [W-1:0]            wr_data,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [W-1:0]            rd_data
);
  logic [W-1:0] mem [ROWS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
