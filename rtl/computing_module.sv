// computing_module: one search engine, distance calculator plus distance comparator.
//
// Vectors from the data FIFO enter the distance calculator together with the query
// held in the comparator; the distances go into the distance FIFO. Neighbour indices
// from the list table DMA go into the index FIFO. The distance comparator pairs the
// two FIFOs in order, runs the upper-layer and layer-0 search and returns the current
// K nearest neighbours of each query. Two instances process two queries at once.
// Structure and FIFO names follow the paper (Fig. 6); FIFO depths are this design's.
module computing_module
  import hnsw_pkg::*;
#(
  parameter int unsigned EF     = 40,
  parameter int unsigned CAND   = 64,
  parameter int unsigned K      = 10,
  parameter int unsigned POINTS = 5_000_000,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  input  config_t          cfg,
  input  logic             q_valid,
  output logic             q_ready,
  input  query_t           q,
  // data FIFO side
  input  logic             data_valid,
  output logic             data_ready,
  input  logic [VEC_W-1:0] data,
  // from the list table DMA (into the index FIFO)
  input  logic             nbr_in_valid,
  output logic             nbr_in_ready,
  input  nbr_t             nbr_in,
  // to the raw data DMA (entering point)
  output logic             ep_valid,
  input  logic             ep_ready,
  output idx_t             ep_idx,
  // to the index table DMA
  output logic             nxt_valid,
  input  logic             nxt_ready,
  output idx_t             nxt_idx,
  output layer_t           nxt_layer,
  // current K nearest neighbours
  output logic             res_valid,
  input  logic             res_ready,
  output logic [QID_W-1:0] res_qid,
  output result_t          res,
  output logic             res_last,
  output logic             busy,
  output cmp_stats_t       stats
);
  logic [VEC_W-1:0] query_vec;
  logic  dc_valid, dc_ready, df_valid, df_ready, nf_valid, nf_ready;
  dist_t dc_dist, df_dist;
  nbr_t  nf_data;
  logic [$clog2(FIFO_DEPTH):0] df_count, nf_count;

  distance_calculator u_calc (
    .clk, .rst_n, .query(query_vec),
    .in_valid(data_valid), .in_ready(data_ready), .data,
    .out_valid(dc_valid), .out_ready(dc_ready), .dval(dc_dist));

  sync_fifo #(.W(DIST_W), .DEPTH(FIFO_DEPTH)) u_dist_fifo (
    .clk, .rst_n, .in_valid(dc_valid), .in_ready(dc_ready), .in_data(dc_dist),
    .out_valid(df_valid), .out_ready(df_ready), .out_data(df_dist), .count(df_count));

  sync_fifo #(.W($bits(nbr_t)), .DEPTH(FIFO_DEPTH)) u_index_fifo (
    .clk, .rst_n, .in_valid(nbr_in_valid), .in_ready(nbr_in_ready), .in_data(nbr_in),
    .out_valid(nf_valid), .out_ready(nf_ready), .out_data(nf_data), .count(nf_count));

  distance_comparator #(.EF(EF), .CAND(CAND), .K(K), .POINTS(POINTS)) u_cmp (
    .clk, .rst_n, .cfg_valid, .cfg,
    .q_valid, .q_ready, .q, .query_vec,
    .ep_valid, .ep_ready, .ep_idx,
    .nxt_valid, .nxt_ready, .nxt_idx, .nxt_layer,
    .nbr_valid(nf_valid), .nbr_ready(nf_ready), .nbr(nf_data),
    .dist_valid(df_valid), .dist_ready(df_ready), .dval(df_dist),
    .res_valid, .res_ready, .res_qid, .res, .res_last, .busy, .stats);
endmodule
