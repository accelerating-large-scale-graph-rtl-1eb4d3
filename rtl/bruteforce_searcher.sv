// bruteforce_searcher: merges each graph database's K nearest neighbours into the
// running best K of the query.
//
// For every query whose current K nearest neighbours arrive from a computing module
// (a stream of {local index, distance}, nearest first), it
//   1. reads the query's best K so far from DRAM through the output DMA (skipped for
//      the first graph database) and inserts them into a K-entry sorted list;
//   2. inserts the new results, their local indices turned into global ones by adding
//      graph_base_id; the sorted list keeps the K smallest distances;
//   3. writes the K entries back through the output DMA, and pulses query_done.
// The distances already computed against the same query are compared again rather
// than recomputed, which gives the same order as an exhaustive distance calculation
// over the intermediate results. The brute-force merge of all per-graph results is
// the paper's (Fig. 3, Fig. 4, Fig. 6); the read-merge-write procedure is this design's.
module bruteforce_searcher
  import hnsw_pkg::*;
#(
  parameter int unsigned K = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  config_t          cfg,
  // current K nearest neighbours
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [QID_W-1:0] in_qid,
  input  result_t          in_res,
  input  logic             in_last,
  // output DMA
  output logic             rd_cmd_valid,
  input  logic             rd_cmd_ready,
  output logic [QID_W-1:0] rd_qid,
  input  logic             rd_valid,
  output logic             rd_ready,
  input  result_t          rd_data,
  output logic             wr_cmd_valid,
  input  logic             wr_cmd_ready,
  output logic [QID_W-1:0] wr_qid,
  output logic             wr_valid,
  input  logic             wr_ready,
  output result_t          wr_data,
  output logic             wr_last,
  input  logic             wr_done,
  output logic             query_done
);
  localparam int unsigned CW = $clog2(K + 1);
  typedef enum logic [2:0] {S_IDLE, S_RD_CMD, S_RD, S_MERGE, S_WR_CMD, S_WR, S_WAIT} state_t;
  state_t st;

  logic [QID_W-1:0] qid;
  logic [CW-1:0]    rd_cnt, wr_pos;
  logic             l_clear, l_push;
  idx_t             l_push_idx;
  dist_t            l_push_dist;
  logic [CW-1:0]    l_count;
  idx_t             l_min_idx, l_max_idx;
  dist_t            l_min_dist, l_max_dist;
  idx_t             l_ent_idx [K];
  dist_t            l_ent_dist [K];

  sorted_list #(.DEPTH(K)) u_best (
    .clk, .rst_n, .limit(CW'(K)), .clear(l_clear), .pop_min(1'b0), .push(l_push),
    .push_idx(l_push_idx), .push_dist(l_push_dist), .count(l_count),
    .min_idx(l_min_idx), .min_dist(l_min_dist), .max_idx(l_max_idx), .max_dist(l_max_dist),
    .ent_idx(l_ent_idx), .ent_dist(l_ent_dist));

  assign in_ready     = (st == S_MERGE);
  assign rd_cmd_valid = (st == S_RD_CMD);
  assign rd_qid       = qid;
  assign rd_ready     = (st == S_RD);
  assign wr_cmd_valid = (st == S_WR_CMD);
  assign wr_qid       = qid;
  assign wr_valid     = (st == S_WR);
  assign wr_last      = (wr_pos == CW'(K - 1));
  assign query_done   = (st == S_WAIT) && wr_done;

  always_comb begin
    wr_data = '0;
    for (int i = 0; i < K; i++)
      if (CW'(i) == wr_pos) begin
        // unused slots (fewer than K results in total) carry the largest distance
        wr_data.idx  = (CW'(i) < l_count) ? l_ent_idx[i]  : '1;
        wr_data.dval = (CW'(i) < l_count) ? l_ent_dist[i] : '1;
      end
  end

  always_comb begin
    l_clear     = (st == S_IDLE) && in_valid;
    l_push      = 1'b0;
    l_push_idx  = in_res.idx + cfg.graph_base_id;
    l_push_dist = in_res.dval;
    if (st == S_RD && rd_valid && rd_data.dval != '1) begin
      l_push      = 1'b1;
      l_push_idx  = rd_data.idx;
      l_push_dist = rd_data.dval;
    end else if (st == S_MERGE && in_valid) begin
      l_push = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      qid    <= '0;
      rd_cnt <= '0;
      wr_pos <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          qid    <= in_qid;
          rd_cnt <= '0;
          st     <= cfg.first_graph ? S_MERGE : S_RD_CMD;
        end
        S_RD_CMD: if (rd_cmd_ready) st <= S_RD;
        S_RD: if (rd_valid) begin
          rd_cnt <= rd_cnt + 1'b1;
          if (rd_cnt == CW'(K - 1)) st <= S_MERGE;
        end
        S_MERGE: if (in_valid && in_last) st <= S_WR_CMD;
        S_WR_CMD: if (wr_cmd_ready) begin
          wr_pos <= '0;
          st     <= S_WR;
        end
        S_WR: if (wr_ready) begin
          wr_pos <= wr_pos + 1'b1;
          if (wr_last) st <= S_WAIT;
        end
        S_WAIT: if (wr_done) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
