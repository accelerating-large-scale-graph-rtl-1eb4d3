// dist_unit: one distance calculation unit, 16 PEs and an adder tree.
//
// Takes 16 element pairs (128 bits of query, 128 bits of data), squares each
// difference in a dist_pe and sums the 16 squares in a binary adder tree. The sum is
// registered: latency one cycle, one new input per cycle when en is high. The
// structure (16 PEs + adder tree) is the paper's; the single pipeline register is
// this design's choice.
module dist_unit #(
  parameter int unsigned N  = 16,
  parameter int unsigned EW = 8,
  localparam int unsigned SW = 2*EW + $clog2(N)
) (
  input  logic            clk,
  input  logic            en,
  input  logic [N*EW-1:0] q,
  input  logic [N*EW-1:0] d,
  output logic [SW-1:0]   sum
);
  logic [2*EW-1:0] sq [N];
  logic [SW-1:0]   tree_sum;

  for (genvar i = 0; i < N; i++) begin : g_pe
    dist_pe #(.EW(EW)) u_pe (.a(q[i*EW +: EW]), .b(d[i*EW +: EW]), .sq(sq[i]));
  end

  adder_tree #(.N(N), .IW(2*EW), .OW(SW)) u_tree (.in(sq), .sum(tree_sum));

  always_ff @(posedge clk)
    if (en) sum <= tree_sum;
endmodule
