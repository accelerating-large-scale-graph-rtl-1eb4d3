// dist_pe: processing element of the distance calculator.
//
// Combinational: squares the difference of two unsigned 8-bit vector elements,
// (a-b)^2, a 16-bit result. The function is the paper's; making it purely
// combinational (the register sits after the unit's adder tree) is this design's.
module dist_pe #(
  parameter int unsigned EW = 8
) (
  input  logic [EW-1:0]   a,
  input  logic [EW-1:0]   b,
  output logic [2*EW-1:0] sq
);
  logic [EW-1:0] diff;
  always_comb begin
    diff = (a >= b) ? (a - b) : (b - a);
    sq   = diff * diff;
  end
endmodule
