// hnsw_accel_top: HNSW search accelerator for one graph database held in DRAM.
//
// The memory access module (parameter, query, index table, list table, raw data and
// output DMAs, each with its own AXI port) feeds NUM_CM computing modules through
// FIFOs. On start the parameter DMA loads the configuration; the query DMA then reads
// the batch of queries and hands query q to computing module q mod NUM_CM. Each
// computing module owns one index table DMA, one list table DMA with its list cache
// (filled with the upper-layer lists of layers 6 to 3 once per start) and one raw data
// DMA with its data FIFO. The results of each query go through one brute-force
// searcher, which merges them with the query's results from earlier graph databases
// held in DRAM and writes them back; done rises when all num_queries queries have been
// written. The host repeats start for every graph database loaded into DRAM.
// The block structure and port widths are the paper's (Fig. 6); giving every
// computing module its own search DMAs, the per-module query FIFOs and the round-robin
// query assignment are this design's choices.
module hnsw_accel_top
  import hnsw_pkg::*;
#(
  parameter int unsigned NUM_CM     = 2,          // paper: two computing modules
  parameter int unsigned EF         = 40,         // paper: ef = 40
  parameter int unsigned CAND       = 64,
  parameter int unsigned K          = 10,         // paper: K = 10
  parameter int unsigned POINTS     = 5_000_000,  // paper: 5M points per graph
  parameter int unsigned CACHE_ROWS = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  addr_t            param_addr,
  output logic             done,
  // parameter DMA, 256 bits
  output logic             par_arvalid,
  input  logic             par_arready,
  output addr_t            par_araddr,
  output logic [7:0]       par_arlen,
  input  logic             par_rvalid,
  output logic             par_rready,
  input  logic [255:0]     par_rdata,
  input  logic             par_rlast,
  // query DMA, 1024 bits
  output logic             qry_arvalid,
  input  logic             qry_arready,
  output addr_t            qry_araddr,
  output logic [7:0]       qry_arlen,
  input  logic             qry_rvalid,
  output logic             qry_rready,
  input  logic [VEC_W-1:0] qry_rdata,
  input  logic             qry_rlast,
  // index table DMAs, 32 bits
  output logic             idx_arvalid [NUM_CM],
  input  logic             idx_arready [NUM_CM],
  output addr_t            idx_araddr  [NUM_CM],
  output logic [7:0]       idx_arlen   [NUM_CM],
  input  logic             idx_rvalid  [NUM_CM],
  output logic             idx_rready  [NUM_CM],
  input  logic [31:0]      idx_rdata   [NUM_CM],
  input  logic             idx_rlast   [NUM_CM],
  // list table DMAs, 512 bits
  output logic             lst_arvalid [NUM_CM],
  input  logic             lst_arready [NUM_CM],
  output addr_t            lst_araddr  [NUM_CM],
  output logic [7:0]       lst_arlen   [NUM_CM],
  input  logic             lst_rvalid  [NUM_CM],
  output logic             lst_rready  [NUM_CM],
  input  logic [LIST_W-1:0] lst_rdata  [NUM_CM],
  input  logic             lst_rlast   [NUM_CM],
  // raw data DMAs, 1024 bits
  output logic             raw_arvalid [NUM_CM],
  input  logic             raw_arready [NUM_CM],
  output addr_t            raw_araddr  [NUM_CM],
  output logic [7:0]       raw_arlen   [NUM_CM],
  input  logic             raw_rvalid  [NUM_CM],
  output logic             raw_rready  [NUM_CM],
  input  logic [VEC_W-1:0] raw_rdata   [NUM_CM],
  input  logic             raw_rlast   [NUM_CM],
  // output DMA, 64 bits
  output logic             out_arvalid,
  input  logic             out_arready,
  output addr_t            out_araddr,
  output logic [7:0]       out_arlen,
  input  logic             out_rvalid,
  output logic             out_rready,
  input  logic [63:0]      out_rdata,
  input  logic             out_rlast,
  output logic             out_awvalid,
  input  logic             out_awready,
  output addr_t            out_awaddr,
  output logic [7:0]       out_awlen,
  output logic             out_wvalid,
  input  logic             out_wready,
  output logic [63:0]      out_wdata,
  output logic             out_wlast,
  input  logic             out_bvalid,
  output logic             out_bready,
  // statistics
  output cmp_stats_t       stats      [NUM_CM],
  output logic [31:0]      cache_hits [NUM_CM]
);
  localparam int unsigned SEL_W = (NUM_CM > 1) ? $clog2(NUM_CM) : 1;

  config_t cfg;
  logic    cfg_valid;

  param_dma u_param (
    .clk, .rst_n, .start, .param_addr,
    .m_arvalid(par_arvalid), .m_arready(par_arready), .m_araddr(par_araddr),
    .m_arlen(par_arlen), .m_rvalid(par_rvalid), .m_rready(par_rready),
    .m_rdata(par_rdata), .m_rlast(par_rlast), .cfg, .cfg_valid);

  // ---- query DMA and per-module query FIFOs ----
  logic   qd_valid, qd_ready;
  query_t qd;
  logic   qf_in_ready [NUM_CM];
  logic   qf_valid [NUM_CM], qf_ready [NUM_CM];
  query_t qf_data  [NUM_CM];
  logic [SEL_W-1:0] qsel;

  // modules that have finished their start-up (list cache filled)
  logic fill_done [NUM_CM];
  logic cm_cfg_valid [NUM_CM];

  query_dma u_query (
    .clk, .rst_n, .start, .cfg_valid, .cfg,
    .m_arvalid(qry_arvalid), .m_arready(qry_arready), .m_araddr(qry_araddr),
    .m_arlen(qry_arlen), .m_rvalid(qry_rvalid), .m_rready(qry_rready),
    .m_rdata(qry_rdata), .m_rlast(qry_rlast),
    .q_valid(qd_valid), .q_ready(qd_ready), .q(qd));

  assign qsel = (NUM_CM > 1) ? SEL_W'(qd.qid % NUM_CM) : '0;
  always_comb begin
    qd_ready = 1'b0;
    for (int i = 0; i < NUM_CM; i++)
      if (SEL_W'(i) == qsel) qd_ready = qf_in_ready[i];
  end

  // ---- per computing module ----
  logic             r_valid [NUM_CM], r_ready [NUM_CM], r_last [NUM_CM];
  logic [QID_W-1:0] r_qid   [NUM_CM];
  result_t          r_res   [NUM_CM];
  logic             busy    [NUM_CM];

  for (genvar c = 0; c < NUM_CM; c++) begin : g_cm
    logic [$clog2(4):0] qf_count;
    sync_fifo #(.W($bits(query_t)), .DEPTH(4)) u_query_fifo (
      .clk, .rst_n, .in_valid(qd_valid && (qsel == SEL_W'(c))), .in_ready(qf_in_ready[c]),
      .in_data(qd), .out_valid(qf_valid[c]), .out_ready(qf_ready[c]),
      .out_data(qf_data[c]), .count(qf_count));

    // index table DMA
    logic       nxt_valid, nxt_ready;
    idx_t       nxt_idx;
    layer_t     nxt_layer;
    logic       ent_valid, ent_ready;
    idx_entry_t ent;
    layer_t     ent_layer;

    index_table_dma u_index_dma (
      .clk, .rst_n, .index_base(cfg.index_base),
      .req_valid(nxt_valid), .req_ready(nxt_ready), .req_idx(nxt_idx), .req_layer(nxt_layer),
      .m_arvalid(idx_arvalid[c]), .m_arready(idx_arready[c]), .m_araddr(idx_araddr[c]),
      .m_arlen(idx_arlen[c]), .m_rvalid(idx_rvalid[c]), .m_rready(idx_rready[c]),
      .m_rdata(idx_rdata[c]), .m_rlast(idx_rlast[c]),
      .ent_valid, .ent_ready, .ent, .ent_layer);

    // list table DMA with list cache
    logic lraw_valid, lraw_ready, nbr_valid, nbr_ready;
    idx_t lraw_idx;
    nbr_t nbr;

    list_table_dma #(.CACHE_ROWS(CACHE_ROWS)) u_list_dma (
      .clk, .rst_n, .start, .cfg_valid, .cfg, .fill_done(fill_done[c]),
      .ent_valid, .ent_ready, .ent, .ent_layer,
      .m_arvalid(lst_arvalid[c]), .m_arready(lst_arready[c]), .m_araddr(lst_araddr[c]),
      .m_arlen(lst_arlen[c]), .m_rvalid(lst_rvalid[c]), .m_rready(lst_rready[c]),
      .m_rdata(lst_rdata[c]), .m_rlast(lst_rlast[c]),
      .raw_valid(lraw_valid), .raw_ready(lraw_ready), .raw_idx(lraw_idx),
      .nbr_valid, .nbr_ready, .nbr, .cache_hits(cache_hits[c]));

    // raw data DMA: entering point or list neighbours
    logic ep_valid, ep_ready, ri_valid, ri_ready;
    idx_t ep_idx, ri_idx;
    assign ri_valid   = ep_valid || lraw_valid;
    assign ri_idx     = ep_valid ? ep_idx : lraw_idx;
    assign ep_ready   = ri_ready;
    assign lraw_ready = ri_ready && !ep_valid;

    logic             rd_valid, rd_ready, df_valid, df_ready;
    logic [VEC_W-1:0] rd_data, df_data;
    logic [$clog2(16):0] df_count;

    raw_data_dma u_raw_dma (
      .clk, .rst_n, .raw_base(cfg.raw_base),
      .idx_valid(ri_valid), .idx_ready(ri_ready), .idx(ri_idx),
      .m_arvalid(raw_arvalid[c]), .m_arready(raw_arready[c]), .m_araddr(raw_araddr[c]),
      .m_arlen(raw_arlen[c]), .m_rvalid(raw_rvalid[c]), .m_rready(raw_rready[c]),
      .m_rdata(raw_rdata[c]), .m_rlast(raw_rlast[c]),
      .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data));

    sync_fifo #(.W(VEC_W), .DEPTH(16)) u_data_fifo (
      .clk, .rst_n, .in_valid(rd_valid), .in_ready(rd_ready), .in_data(rd_data),
      .out_valid(df_valid), .out_ready(df_ready), .out_data(df_data), .count(df_count));

    assign cm_cfg_valid[c] = cfg_valid && fill_done[c];

    computing_module #(.EF(EF), .CAND(CAND), .K(K), .POINTS(POINTS)) u_cm (
      .clk, .rst_n, .cfg_valid(cm_cfg_valid[c]), .cfg,
      .q_valid(qf_valid[c]), .q_ready(qf_ready[c]), .q(qf_data[c]),
      .data_valid(df_valid), .data_ready(df_ready), .data(df_data),
      .nbr_in_valid(nbr_valid), .nbr_in_ready(nbr_ready), .nbr_in(nbr),
      .ep_valid, .ep_ready, .ep_idx,
      .nxt_valid, .nxt_ready, .nxt_idx, .nxt_layer,
      .res_valid(r_valid[c]), .res_ready(r_ready[c]), .res_qid(r_qid[c]),
      .res(r_res[c]), .res_last(r_last[c]), .busy(busy[c]), .stats(stats[c]));
  end

  // ---- result arbitration: one module's stream at a time ----
  logic             a_valid, a_ready, a_last;
  logic [QID_W-1:0] a_qid;
  result_t          a_res;
  logic [SEL_W-1:0] grant;
  logic             locked;

  always_comb begin
    a_valid = 1'b0; a_qid = '0; a_res = '0; a_last = 1'b0;
    for (int i = 0; i < NUM_CM; i++) begin
      r_ready[i] = 1'b0;
      if (SEL_W'(i) == grant) begin
        a_valid    = r_valid[i];
        a_qid      = r_qid[i];
        a_res      = r_res[i];
        a_last     = r_last[i];
        r_ready[i] = a_ready;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grant  <= '0;
      locked <= 1'b0;
    end else if (locked) begin
      if (a_valid && a_ready && a_last) begin
        locked <= 1'b0;
        grant  <= (32'(grant) == NUM_CM - 1) ? '0 : grant + 1'b1;
      end
    end else if (a_valid) begin
      locked <= 1'b1;
    end else begin
      grant <= (32'(grant) == NUM_CM - 1) ? '0 : grant + 1'b1;
    end
  end

  // ---- brute-force searcher and output DMA ----
  logic             rc_valid, rc_ready, o_valid, o_ready, wc_valid, wc_ready;
  logic             w_valid, w_ready, w_last, w_done, q_done;
  logic [QID_W-1:0] rc_qid, wc_qid;
  result_t          o_data, w_data;

  bruteforce_searcher #(.K(K)) u_bf (
    .clk, .rst_n, .cfg,
    .in_valid(a_valid), .in_ready(a_ready), .in_qid(a_qid), .in_res(a_res), .in_last(a_last),
    .rd_cmd_valid(rc_valid), .rd_cmd_ready(rc_ready), .rd_qid(rc_qid),
    .rd_valid(o_valid), .rd_ready(o_ready), .rd_data(o_data),
    .wr_cmd_valid(wc_valid), .wr_cmd_ready(wc_ready), .wr_qid(wc_qid),
    .wr_valid(w_valid), .wr_ready(w_ready), .wr_data(w_data), .wr_last(w_last),
    .wr_done(w_done), .query_done(q_done));

  output_dma #(.K(K)) u_out (
    .clk, .rst_n, .result_base(cfg.result_base),
    .rd_cmd_valid(rc_valid), .rd_cmd_ready(rc_ready), .rd_qid(rc_qid),
    .rd_valid(o_valid), .rd_ready(o_ready), .rd_data(o_data),
    .wr_cmd_valid(wc_valid), .wr_cmd_ready(wc_ready), .wr_qid(wc_qid),
    .wr_valid(w_valid), .wr_ready(w_ready), .wr_data(w_data), .wr_last(w_last),
    .wr_done(w_done),
    .m_arvalid(out_arvalid), .m_arready(out_arready), .m_araddr(out_araddr),
    .m_arlen(out_arlen), .m_rvalid(out_rvalid), .m_rready(out_rready),
    .m_rdata(out_rdata), .m_rlast(out_rlast),
    .m_awvalid(out_awvalid), .m_awready(out_awready), .m_awaddr(out_awaddr),
    .m_awlen(out_awlen), .m_wvalid(out_wvalid), .m_wready(out_wready),
    .m_wdata(out_wdata), .m_wlast(out_wlast), .m_bvalid(out_bvalid), .m_bready(out_bready));

  // ---- completion ----
  logic [QID_W-1:0] n_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      n_done <= '0;
    else if (start)  n_done <= '0;
    else if (q_done) n_done <= n_done + 1'b1;
  end
  assign done = cfg_valid && (n_done == cfg.num_queries);
endmodule
