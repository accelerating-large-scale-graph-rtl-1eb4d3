// sorted_list: register list of {index, distance} kept sorted by distance.
//
// Entry 0 holds the smallest distance, entry count-1 the largest. One operation per
// cycle, in priority order:
//   clear    empties the list;
//   pop_min  removes entry 0, shifting all entries down by one;
//   push     inserts {push_idx, push_dist} at the position found by the
//            parallel_sorter, shifting the larger entries up by one. When the list
//            already holds limit entries the largest one falls out (or the new one
//            is dropped if it would be last).
// min_* and max_* show entries 0 and count-1. Used for the candidate list, the final
// list (limit = ef) and the brute-force merge. The sorted lists and the parallel
// insertion are the paper's; the register implementation is this design's.
module sorted_list
  import hnsw_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] limit,
  input  logic          clear,
  input  logic          pop_min,
  input  logic          push,
  input  idx_t          push_idx,
  input  dist_t         push_dist,
  output logic [CW-1:0] count,
  output idx_t          min_idx,
  output dist_t         min_dist,
  output idx_t          max_idx,
  output dist_t         max_dist,
  output idx_t          ent_idx  [DEPTH],
  output dist_t         ent_dist [DEPTH]
);
  logic [DEPTH-1:0] ge;
  logic [CW-1:0]    pos, lim;

  assign lim = (limit > CW'(DEPTH) || limit == '0) ? CW'(DEPTH) : limit;

  parallel_sorter #(.DEPTH(DEPTH)) u_sort (
    .dists(ent_dist), .count, .cur(push_dist), .ge, .pos);

  assign min_idx  = ent_idx[0];
  assign min_dist = ent_dist[0];
  always_comb begin
    max_idx  = ent_idx[0];
    max_dist = ent_dist[0];
    for (int i = 0; i < DEPTH; i++)
      if (CW'(i) == count - 1'b1) begin
        max_idx  = ent_idx[i];
        max_dist = ent_dist[i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent_idx[i]  <= '0;
        ent_dist[i] <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (pop_min) begin
      if (count != '0) begin
        for (int i = 0; i < DEPTH - 1; i++) begin
          ent_idx[i]  <= ent_idx[i+1];
          ent_dist[i] <= ent_dist[i+1];
        end
        count <= count - 1'b1;
      end
    end else if (push && pos < lim) begin
      for (int i = 1; i < DEPTH; i++)
        if (CW'(i) > pos) begin
          ent_idx[i]  <= ent_idx[i-1];
          ent_dist[i] <= ent_dist[i-1];
        end
      for (int i = 0; i < DEPTH; i++)
        if (CW'(i) == pos) begin
          ent_idx[i]  <= push_idx;
          ent_dist[i] <= push_dist;
        end
      if (count < lim) count <= count + 1'b1;
    end
  end
endmodule
