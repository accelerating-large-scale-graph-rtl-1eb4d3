// adder_tree: combinational binary adder tree summing N unsigned operands.
//
// Pairwise reduction: at stride 1 operand i+1 is added into operand i for every even
// i, at stride 2 operand i+2 into i for every multiple of 4, and so on, so the sum
// is formed in ceil(log2 N) adder levels. Used inside each distance unit (16
// squares) and at the bottom of the distance calculator (8 unit sums).
module adder_tree #(
  parameter int unsigned N  = 16,
  parameter int unsigned IW = 16,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic [IW-1:0] in [N],
  output logic [OW-1:0] sum
);
  logic [OW-1:0] t [N];
  always_comb begin
    for (int i = 0; i < N; i++) t[i] = OW'(in[i]);
    for (int s = 1; s < N; s = s * 2)
      for (int i = 0; i + s < N; i = i + 2 * s)
        t[i] = t[i] + t[i+s];
    sum = t[0];
  end
endmodule
