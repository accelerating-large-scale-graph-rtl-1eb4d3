// parallel_sorter: the subtractor array that finds where a new distance goes.
//
// Combinational. Every stored distance of a list sorted from smallest (entry 0) to
// largest is compared with the current distance at once; bit i of ge is 1 when the
// current distance is not smaller than entry i (entry i valid), 0 otherwise. Because
// the list is sorted, the ones form a prefix and their count is the insertion
// position. This is the paper's parallel comparison (Fig. 7); storing the list with
// the smallest distance at entry 0 and placing an equal distance after the stored
// one are this design's choices.
module parallel_sorter
  import hnsw_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  dist_t           dists [DEPTH],
  input  logic [CW-1:0]   count,
  input  dist_t           cur,
  output logic [DEPTH-1:0] ge,
  output logic [CW-1:0]   pos
);
  always_comb begin
    pos = '0;
    for (int i = 0; i < DEPTH; i++) begin
      ge[i] = (CW'(i) < count) && !(cur < dists[i]);
      pos   = pos + CW'(ge[i]);
    end
  end
endmodule
