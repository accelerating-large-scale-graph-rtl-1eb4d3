// list_table_dma: fetches a neighbour list and streams out its indices.
//
// Fill: after a start, once the configuration is valid, the first cached_rows rows
// of the upper-layer list table (layers 6 to 3, top layer first) are copied from
// DRAM into the list cache in bursts of up to 16 beats; fill_done then rises.
// Lookup: for each {size, pointer, layer} from the index table DMA the list is taken
//   * from the list cache when layer >= 3 and pointer < cached_rows,
//   * from DRAM otherwise: upper layers at list_up_base + ptr*64 (one 512-bit beat,
//     maxM = 16 indices), layer 0 at list0_base + ptr*128 (two beats, maxM0 = 32),
//     reading only the beats that the size needs.
// The entry is taken (ent_ready) when the lookup starts and kept in registers.
// The list is then emitted one index per cycle, each index both to the raw data DMA
// (address) and, through the cache/DRAM multiplexer, to the index FIFO with a last
// flag; an empty list emits one nil element to the index FIFO only. The 512-bit
// port, the cache of layers 6 to 3 and the multiplexer are the paper's (Fig. 6); the
// fill procedure and the emission scheme are this design's.
module list_table_dma
  import hnsw_pkg::*;
#(
  parameter int unsigned CACHE_ROWS = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              cfg_valid,
  input  config_t           cfg,
  output logic              fill_done,
  // from the index table DMA
  input  logic              ent_valid,
  output logic              ent_ready,
  input  idx_entry_t        ent,
  input  layer_t            ent_layer,
  // AXI read, 512 bits
  output logic              m_arvalid,
  input  logic              m_arready,
  output addr_t             m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [LIST_W-1:0] m_rdata,
  input  logic              m_rlast,
  // to the raw data DMA
  output logic              raw_valid,
  input  logic              raw_ready,
  output idx_t              raw_idx,
  // to the index FIFO
  output logic              nbr_valid,
  input  logic              nbr_ready,
  output nbr_t              nbr,
  // statistics
  output logic [31:0]       cache_hits
);
  localparam int unsigned CW = $clog2(CACHE_ROWS);

  typedef enum logic [2:0] {S_RESET, S_FILL_CMD, S_FILL_DATA, S_IDLE,
                            S_CACHE_RD, S_MEM_CMD, S_MEM_DATA, S_EMIT} state_t;
  state_t st;

  logic             cmd_valid, cmd_ready, b_valid, b_ready, b_last;
  addr_t            cmd_addr;
  logic [7:0]       cmd_len;
  logic [LIST_W-1:0] b_data;

  logic [15:0]      fill_row, fill_left;
  logic [IDX_W-1:0] lst [MAXM0];
  logic [5:0]       size, pos;
  logic             beat;        // which 512-bit half of a layer-0 list
  logic             cache_rd_en, cache_wr_en;
  logic [LIST_W-1:0] cache_q;
  logic             hit;
  logic [25:0]      l_ptr;       // latched entry
  layer_t           l_layer;

  axi_rd_master #(.DW(LIST_W)) u_rd (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data), .out_last(b_last));

  list_cache #(.ROWS(CACHE_ROWS)) u_cache (
    .clk,
    .wr_en(cache_wr_en), .wr_row(fill_row[CW-1:0]), .wr_data(b_data),
    .rd_en(cache_rd_en), .rd_row(ent.ptr[CW-1:0]), .rd_data(cache_q));

  assign hit = (ent_layer >= layer_t'(CACHE_MIN_LAYER)) &&
               (32'(ent.ptr) < 32'(cfg.cached_rows)) && (32'(ent.ptr) < CACHE_ROWS);

  always_comb begin
    cmd_valid = 1'b0;
    cmd_addr  = '0;
    cmd_len   = '0;
    unique case (st)
      S_FILL_CMD: begin
        cmd_valid = 1'b1;
        cmd_addr  = cfg.list_up_base + (addr_t'(fill_row) << 6);
        cmd_len   = (fill_left > 16'd16) ? 8'd15 : 8'(fill_left - 16'd1);
      end
      S_MEM_CMD: begin
        cmd_valid = 1'b1;
        if (l_layer == '0) begin
          cmd_addr = cfg.list0_base + (addr_t'(l_ptr) << 7);
          cmd_len  = (size > 6'(MAXM)) ? 8'd1 : 8'd0;
        end else begin
          cmd_addr = cfg.list_up_base + (addr_t'(l_ptr) << 6);
          cmd_len  = 8'd0;
        end
      end
      default: ;
    endcase
  end

  assign b_ready     = (st == S_FILL_DATA) || (st == S_MEM_DATA);
  assign cache_wr_en = (st == S_FILL_DATA) && b_valid;
  assign cache_rd_en = (st == S_IDLE) && ent_valid && (ent.size != '0) && hit;
  assign fill_done   = (st != S_RESET) && (st != S_FILL_CMD) && (st != S_FILL_DATA);
  assign ent_ready   = (st == S_IDLE);

  // emission
  logic emit_nil;
  assign emit_nil  = (size == '0);
  assign raw_idx   = lst[pos[4:0]];
  assign nbr.idx   = emit_nil ? '0 : lst[pos[4:0]];
  assign nbr.nil   = emit_nil;
  assign nbr.last  = emit_nil || (pos == size - 6'd1);
  assign nbr_valid = (st == S_EMIT) && (emit_nil ? 1'b1 : raw_ready);
  assign raw_valid = (st == S_EMIT) && !emit_nil && nbr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_RESET;
      fill_row   <= '0;
      fill_left  <= '0;
      size       <= '0;
      pos        <= '0;
      beat       <= 1'b0;
      cache_hits <= '0;
      l_ptr      <= '0;
      l_layer    <= '0;
      for (int i = 0; i < MAXM0; i++) lst[i] <= '0;
    end else if (start) begin
      st <= S_RESET;
    end else begin
      unique case (st)
        S_RESET: if (cfg_valid) begin
          fill_row  <= '0;
          fill_left <= (32'(cfg.cached_rows) > CACHE_ROWS) ? 16'(CACHE_ROWS) : cfg.cached_rows;
          st        <= (cfg.cached_rows == '0) ? S_IDLE : S_FILL_CMD;
        end
        S_FILL_CMD: if (cmd_ready) st <= S_FILL_DATA;
        S_FILL_DATA: if (b_valid) begin
          fill_row  <= fill_row + 16'd1;
          fill_left <= fill_left - 16'd1;
          if (b_last) st <= (fill_left == 16'd1) ? S_IDLE : S_FILL_CMD;
        end
        S_IDLE: if (ent_valid) begin
          l_ptr   <= ent.ptr;
          l_layer <= ent_layer;
          size <= (ent.size > 6'(MAXM0)) ? 6'(MAXM0) : ent.size;
          pos  <= '0;
          beat <= 1'b0;
          if (ent_layer != '0 && ent.size > 6'(MAXM)) size <= 6'(MAXM);
          if (ent.size == '0)  st <= S_EMIT;
          else if (hit) begin
            st         <= S_CACHE_RD;
            cache_hits <= cache_hits + 32'd1;
          end
          else         st <= S_MEM_CMD;
        end
        S_CACHE_RD: begin
          for (int i = 0; i < MAXM; i++) lst[i] <= cache_q[i*IDX_W +: IDX_W];
          st <= S_EMIT;
        end
        S_MEM_CMD: if (cmd_ready) st <= S_MEM_DATA;
        S_MEM_DATA: if (b_valid) begin
          for (int i = 0; i < MAXM; i++)
            lst[(beat ? MAXM : 0) + i] <= b_data[i*IDX_W +: IDX_W];
          beat <= 1'b1;
          if (b_last) st <= S_EMIT;
        end
        S_EMIT: if (nbr_valid && nbr_ready) begin
          pos <= pos + 6'd1;
          if (nbr.last) st <= S_IDLE;
        end
        default: st <= S_RESET;
      endcase
    end
  end
endmodule
