// distance_calculator: squared Euclidean distance between a query and a vector.
//
// The 1024-bit query and data words are cut into 8 slices of 16 bytes; each slice
// goes to one dist_unit (16 PEs + adder tree), and a final adder tree sums the 8
// unit results. Both trees are registered, so a distance leaves two cycles after its
// vector enters, and one vector can enter every cycle (in_valid/out_valid pipeline;
// the whole pipeline stalls while out_ready is low). The square root is not taken:
// squared distances order the same way. Unit count, PE count and element width are
// the paper's; the two-stage pipeline and the stall scheme are this design's choice.
module distance_calculator
  import hnsw_pkg::*;
#(
  parameter int unsigned UNITS = NUM_UNITS,
  parameter int unsigned PES   = PE_PER_UNIT,
  parameter int unsigned EW    = ELEM_W,
  localparam int unsigned VW   = UNITS * PES * EW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [VW-1:0] query,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [VW-1:0] data,
  output logic          out_valid,
  input  logic          out_ready,
  output dist_t         dval
);
  localparam int unsigned UW = 2*EW + $clog2(PES);
  logic [UW-1:0] usum [UNITS];
  logic [UW+$clog2(UNITS)-1:0] total;
  logic [1:0] vld;
  logic en;

  assign en       = out_ready || !vld[1];
  assign in_ready = en;

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    dist_unit #(.N(PES), .EW(EW)) u_unit (
      .clk, .en,
      .q(query[u*PES*EW +: PES*EW]),
      .d(data [u*PES*EW +: PES*EW]),
      .sum(usum[u]));
  end

  adder_tree #(.N(UNITS), .IW(UW), .OW(UW+$clog2(UNITS))) u_tree (.in(usum), .sum(total));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (en) vld <= {vld[0], in_valid};
  end

  always_ff @(posedge clk)
    if (en) dval <= DIST_W'(total);

  assign out_valid = vld[1];
endmodule
