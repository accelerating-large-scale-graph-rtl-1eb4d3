// distance_comparator: search control of one computing module.
//
// Holds the query register, the current layer and the next index, and runs the HNSW
// search kernel on the distances that the distance calculator returns in the order
// of the indices in the index FIFO.
//   Entering point: the configured entering point goes straight to the raw data DMA;
//   its distance starts the upper-layer search at the configured max layer.
//   Upper layers (upper layer comparator, ef = 1): the running minimum {index,
//   distance} is kept in registers. Its neighbour list at the current layer is
//   requested from the index table DMA; every neighbour closer than the minimum
//   replaces it. If the list held a closer point the new minimum's list is requested
//   in the same layer, otherwise the layer is lowered by one (layer monitoring) and the
//   minimum becomes the entering point there.
//   Layer 0 (layer-0 comparator): visited list, candidate list (CAND entries) and final
//   list (ef entries) all start with the entering point. The search-end checker stops
//   when the candidate list is empty or its nearest entry is further than the furthest
//   entry of the final list; otherwise the nearest candidate is popped and its list
//   requested. Each neighbour is checked in the visited list (and marked); an
//   unvisited neighbour closer than the furthest of the final list, or any while the
//   final list holds fewer than ef entries, is inserted in both sorted lists, the
//   final list dropping its furthest entry when it already holds ef.
//   Output: the K nearest entries of the final list leave as a stream, nearest first,
//   to the brute-force searcher.
// The algorithm and the block split are the paper's (Alg. 1, Sec. 5.2.2-5.2.6, Fig. 6).
// The FSM, the one-neighbour-at-a-time processing, the candidate list depth and the
// strict comparisons follow Algorithm 1 where stated and are this design's otherwise.
module distance_comparator
  import hnsw_pkg::*;
#(
  parameter int unsigned EF     = 40,        // final list depth (paper: ef = 40)
  parameter int unsigned CAND   = 64,        // candidate list depth, > ef
  parameter int unsigned K      = 10,        // results returned (paper: K = 10)
  parameter int unsigned POINTS = 5_000_000  // visited list size (paper: 5M)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  input  config_t          cfg,
  // query FIFO
  input  logic             q_valid,
  output logic             q_ready,
  input  query_t           q,
  output logic [VEC_W-1:0] query_vec,
  // entering point to the raw data DMA
  output logic             ep_valid,
  input  logic             ep_ready,
  output idx_t             ep_idx,
  // next index to the index table DMA
  output logic             nxt_valid,
  input  logic             nxt_ready,
  output idx_t             nxt_idx,
  output layer_t           nxt_layer,
  // index FIFO and distance FIFO
  input  logic             nbr_valid,
  output logic             nbr_ready,
  input  nbr_t             nbr,
  input  logic             dist_valid,
  output logic             dist_ready,
  input  dist_t            dval,
  // current K nearest neighbours
  output logic             res_valid,
  input  logic             res_ready,
  output logic [QID_W-1:0] res_qid,
  output result_t          res,
  output logic             res_last,
  output logic             busy,
  output cmp_stats_t       stats
);
  localparam int unsigned FW = $clog2(EF + 1);
  localparam int unsigned CW = $clog2(CAND + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_EP_REQ, S_EP_WAIT, S_UP_REQ, S_UP_RUN,
    S_L0_INIT, S_L0_MARK, S_L0_SEL, S_L0_REQ, S_L0_RUN, S_L0_VCHK, S_L0_VWAIT, S_OUT
  } state_t;
  state_t st;

  layer_t cur_layer;
  idx_t   min_idx, nxt_r;
  dist_t  min_dist;
  logic   improved;
  idx_t   e_idx;
  dist_t  e_dist;
  logic   e_last;
  logic [QID_W-1:0] qid;
  logic [FW-1:0] ef_lim;
  logic [$clog2(K+1)-1:0] out_pos;

  // ---- lists ----
  logic          c_clear, c_pop, c_push, f_clear, f_push;
  idx_t          c_push_idx, f_push_idx;
  dist_t         c_push_dist, f_push_dist;
  logic [CW-1:0] c_count;
  logic [FW-1:0] f_count;
  idx_t          c_min_idx, c_max_idx, f_min_idx, f_max_idx;
  dist_t         c_min_dist, c_max_dist, f_min_dist, f_max_dist;
  idx_t          c_ent_idx [CAND];
  dist_t         c_ent_dist [CAND];
  idx_t          f_ent_idx [EF];
  dist_t         f_ent_dist [EF];

  sorted_list #(.DEPTH(CAND)) u_cand (
    .clk, .rst_n, .limit(CW'(CAND)), .clear(c_clear), .pop_min(c_pop), .push(c_push),
    .push_idx(c_push_idx), .push_dist(c_push_dist), .count(c_count),
    .min_idx(c_min_idx), .min_dist(c_min_dist), .max_idx(c_max_idx), .max_dist(c_max_dist),
    .ent_idx(c_ent_idx), .ent_dist(c_ent_dist));

  sorted_list #(.DEPTH(EF)) u_final (
    .clk, .rst_n, .limit(ef_lim), .clear(f_clear), .pop_min(1'b0), .push(f_push),
    .push_idx(f_push_idx), .push_dist(f_push_dist), .count(f_count),
    .min_idx(f_min_idx), .min_dist(f_min_dist), .max_idx(f_max_idx), .max_dist(f_max_dist),
    .ent_idx(f_ent_idx), .ent_dist(f_ent_dist));

  // ---- visited list ----
  logic vl_qstart, vl_qready, vl_chk, vl_chk_ready, vl_rsp, vl_visited;
  idx_t vl_idx;

  visited_list #(.POINTS(POINTS)) u_visited (
    .clk, .rst_n, .query_start(vl_qstart), .query_ready(vl_qready),
    .chk_valid(vl_chk), .chk_ready(vl_chk_ready), .chk_idx(vl_idx),
    .rsp_valid(vl_rsp), .rsp_visited(vl_visited));

  // ---- combinational control ----
  logic accept;   // layer-0 insertion condition
  assign accept = (e_dist < f_max_dist) || (f_count < ef_lim);

  assign q_ready   = (st == S_IDLE) && cfg_valid && vl_qready;
  assign vl_qstart = q_ready && q_valid;
  assign ep_valid  = (st == S_EP_REQ);
  assign ep_idx    = cfg.enter_point;
  assign nxt_valid = (st == S_UP_REQ) || (st == S_L0_REQ);
  assign nxt_idx   = (st == S_UP_REQ) ? min_idx : nxt_r;
  assign nxt_layer = cur_layer;
  assign busy      = (st != S_IDLE);

  always_comb begin
    nbr_ready  = 1'b0;
    dist_ready = 1'b0;
    if (st == S_EP_WAIT) dist_ready = 1'b1;
    if ((st == S_UP_RUN || st == S_L0_RUN) && nbr_valid) begin
      if (nbr.nil) nbr_ready = 1'b1;
      else if (dist_valid) begin
        nbr_ready  = 1'b1;
        dist_ready = 1'b1;
      end
    end
  end

  always_comb begin
    c_clear = 1'b0; c_pop = 1'b0; c_push = 1'b0;
    f_clear = 1'b0; f_push = 1'b0;
    c_push_idx = e_idx; c_push_dist = e_dist;
    f_push_idx = e_idx; f_push_dist = e_dist;
    vl_chk = 1'b0;
    vl_idx = e_idx;
    unique case (st)
      S_L0_INIT: begin
        c_push = 1'b1; f_push = 1'b1;
        c_push_idx = min_idx; c_push_dist = min_dist;
        f_push_idx = min_idx; f_push_dist = min_dist;
        vl_chk = 1'b1; vl_idx = min_idx;
      end
      S_L0_SEL:  c_pop = (c_count != '0) && !(c_min_dist > f_max_dist);
      S_L0_VCHK: vl_chk = 1'b1;
      S_L0_VWAIT: if (vl_rsp && !vl_visited && accept) begin
        c_push = 1'b1; f_push = 1'b1;
      end
      S_IDLE: if (vl_qstart) begin
        c_clear = 1'b1; f_clear = 1'b1;
      end
      default: ;
    endcase
  end

  // ---- outputs of the result stream ----
  logic [FW-1:0] n_out;
  assign n_out     = (f_count < FW'(K)) ? f_count : FW'(K);
  assign res_valid = (st == S_OUT);
  assign res_qid   = qid;
  always_comb begin
    res = '0;
    for (int i = 0; i < EF; i++)
      if (i == int'(out_pos)) res = '{dval: f_ent_dist[i], idx: f_ent_idx[i]};
  end
  assign res_last = (FW'(out_pos) == n_out - 1'b1);

  logic better;   // upper layer: this neighbour is closer than the running minimum
  assign better = !nbr.nil && (dval < min_dist);

  // ---- state machine ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cur_layer <= '0;
      min_idx   <= '0;
      min_dist  <= '0;
      nxt_r     <= '0;
      improved  <= 1'b0;
      e_idx     <= '0;
      e_dist    <= '0;
      e_last    <= 1'b0;
      qid       <= '0;
      ef_lim    <= '0;
      out_pos   <= '0;
      query_vec <= '0;
      stats     <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (vl_qstart) begin
          query_vec <= q.vec;
          qid       <= q.qid;
          ef_lim    <= (cfg.ef == '0 || 32'(cfg.ef) > EF) ? FW'(EF) : FW'(cfg.ef);
          st        <= S_EP_REQ;
        end
        S_EP_REQ: if (ep_ready) st <= S_EP_WAIT;
        S_EP_WAIT: if (dist_valid) begin
          min_idx   <= cfg.enter_point;
          min_dist  <= dval;
          cur_layer <= (cfg.max_layer > 4'(MAX_LAYER)) ? layer_t'(MAX_LAYER)
                                                       : layer_t'(cfg.max_layer);
          st        <= (cfg.max_layer == '0) ? S_L0_INIT : S_UP_REQ;
        end
        S_UP_REQ: if (nxt_ready) begin
          improved <= 1'b0;
          st       <= S_UP_RUN;
        end
        S_UP_RUN: if (nbr_valid && nbr_ready) begin
          if (better) begin
            min_idx  <= nbr.idx;
            min_dist <= dval;
          end
          if (nbr.last) begin
            if (better || improved) begin
              st <= S_UP_REQ;
              stats.up_moves <= stats.up_moves + 32'd1;
            end else begin
              stats.layer_drops <= stats.layer_drops + 32'd1;
              cur_layer <= cur_layer - 1'b1;
              st <= (cur_layer == layer_t'(1)) ? S_L0_INIT : S_UP_REQ;
            end
          end else if (better) begin
            improved <= 1'b1;
          end
        end
        S_L0_INIT: st <= S_L0_MARK;
        S_L0_MARK: if (vl_rsp) st <= S_L0_SEL;
        S_L0_SEL: begin
          if (c_count == '0) begin
            stats.end_empty <= stats.end_empty + 32'd1;
            out_pos <= '0;
            st <= S_OUT;
          end else if (c_min_dist > f_max_dist) begin
            stats.end_dist <= stats.end_dist + 32'd1;
            out_pos <= '0;
            st <= S_OUT;
          end else begin
            nxt_r <= c_min_idx;
            st    <= S_L0_REQ;
          end
        end
        S_L0_REQ: if (nxt_ready) st <= S_L0_RUN;
        S_L0_RUN: if (nbr_valid && nbr_ready) begin
          if (nbr.nil) st <= S_L0_SEL;
          else begin
            e_idx  <= nbr.idx;
            e_dist <= dval;
            e_last <= nbr.last;
            st     <= S_L0_VCHK;
          end
        end
        S_L0_VCHK: if (vl_chk_ready) st <= S_L0_VWAIT;
        S_L0_VWAIT: if (vl_rsp) begin
          if (vl_visited) stats.visited_hits <= stats.visited_hits + 32'd1;
          else if (accept) begin
            stats.inserts <= stats.inserts + 32'd1;
            if (f_count == ef_lim) stats.evictions <= stats.evictions + 32'd1;
          end else stats.rejects <= stats.rejects + 32'd1;
          st <= e_last ? S_L0_SEL : S_L0_RUN;
        end
        S_OUT: if (res_ready) begin
          out_pos <= out_pos + 1'b1;
          if (res_last) begin
            stats.queries <= stats.queries + 32'd1;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_dist_needs_index: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_UP_RUN || st == S_L0_RUN) && dist_ready |-> nbr_ready && !nbr.nil);
endmodule
