// visited_list: double-buffered single-bit tag visited list.
//
// One bit per point of the graph database tells whether the point has been visited
// in the current query. The bits sit in two banks of 512-bit-wide rows (5M points:
// 9,766 rows per bank, 0.62 MB each). One bank is active for the running query; the
// other is cleared one row per cycle in the background. query_start swaps the banks
// and is accepted only when the idle bank is clean (query_ready), so clearing is
// hidden behind the previous query. After reset both banks are marked dirty: the idle
// bank is cleared first, and the first query_start swaps onto it.
// Check-and-set: chk_valid with chk_idx reads the row (cycle 1), then returns
// rsp_visited, the bit's old value, with rsp_valid and writes the row back with the
// bit set (cycle 2); one check is in flight at a time (chk_ready).
// The single-bit tags, the 512-bit rows, the 5M-point size and the double buffering
// are the paper's (Sec. 5.2.6, Fig. 7); the two-cycle check is this design's choice.
module visited_list #(
  parameter int unsigned POINTS = 5_000_000,
  parameter int unsigned W      = 512,
  localparam int unsigned ROWS  = (POINTS + W - 1) / W,
  localparam int unsigned RW    = $clog2(ROWS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        query_start,
  output logic        query_ready,
  input  logic        chk_valid,
  output logic        chk_ready,
  input  logic [31:0] chk_idx,
  output logic        rsp_valid,
  output logic        rsp_visited
);
  logic [W-1:0] bank0 [ROWS];
  logic [W-1:0] bank1 [ROWS];

  logic          act;          // active bank
  logic [1:0]    dirty;
  logic [RW-1:0] clr_row;
  logic          pend;
  logic [RW-1:0] pend_row;
  logic [$clog2(W)-1:0] pend_bit;
  logic [W-1:0]  rd_q;

  assign query_ready = !dirty[~act] && !pend;
  assign chk_ready   = !pend;

  // row address / bit of the request
  logic [RW-1:0]        req_row;
  logic [$clog2(W)-1:0] req_bit;
  assign req_row = RW'(chk_idx / W);
  assign req_bit = chk_idx[$clog2(W)-1:0];

  // clearing engine on the idle bank
  logic clr_en;
  assign clr_en = dirty[~act];

  // bank 0 port
  always_ff @(posedge clk) begin
    if (!act && chk_valid && chk_ready) rd_q <= bank0[req_row];
    else if (act && chk_valid && chk_ready) rd_q <= bank1[req_row];
  end

  always_ff @(posedge clk) begin
    if (act == 1'b0 && pend)      bank0[pend_row] <= rd_q | (W'(1) << pend_bit);
    else if (act == 1'b1 && clr_en) bank0[clr_row] <= '0;
  end
  always_ff @(posedge clk) begin
    if (act == 1'b1 && pend)      bank1[pend_row] <= rd_q | (W'(1) << pend_bit);
    else if (act == 1'b0 && clr_en) bank1[clr_row] <= '0;
  end

  assign rsp_valid   = pend;
  assign rsp_visited = rd_q[pend_bit];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act      <= 1'b0;
      dirty    <= 2'b11;
      clr_row  <= '0;
      pend     <= 1'b0;
      pend_row <= '0;
      pend_bit <= '0;
    end else begin
      pend <= chk_valid && chk_ready;
      if (chk_valid && chk_ready) begin
        pend_row <= req_row;
        pend_bit <= req_bit;
      end
      if (query_start && query_ready) begin
        act        <= ~act;
        dirty[act] <= 1'b1;
        clr_row    <= '0;
      end else if (clr_en) begin
        if (clr_row == RW'(ROWS - 1)) begin
          dirty[~act] <= 1'b0;
          clr_row     <= '0;
        end else begin
          clr_row <= clr_row + 1'b1;
        end
      end
    end
  end

  a_chk_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    chk_valid |-> chk_idx < POINTS);
endmodule
