// tb_visited_list: self-checking test of the double-buffered visited list.
//
// A 3,000-point list (6 rows of 512 bits) runs 12 queries. In each query random
// indices are checked, one every two cycles (one check is in flight at a time);
// each response must come one cycle after its request and must
// say "visited" exactly when the model bitmap kept here already holds the index.
// Between queries it checks that a new query is refused while the idle bank is
// still being cleared, and accepted after at most one cycle per row, and that no
// bit set in a previous query is seen as visited in the next one.
module tb_visited_list;
  localparam int P = 3000;
  localparam int W = 512;
  localparam int ROWS = (P + W - 1) / W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic query_start, query_ready, chk_valid, chk_ready, rsp_valid, rsp_visited;
  logic [31:0] chk_idx;
  int checks = 0, failures = 0;
  bit model [P];
  int hits, waits;

  visited_list #(.POINTS(P), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    query_start = 0; chk_valid = 0; chk_idx = 0; hits = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 12; q++) begin
      // start the query: wait for the idle bank to be clean
      waits = 0;
      @(negedge clk);
      while (!query_ready) begin waits++; @(negedge clk); end
      checks++;
      if (waits > ROWS + 2) begin failures++; $display("clearing took %0d cycles", waits); end
      query_start = 1;
      @(negedge clk);
      query_start = 0;
      checks++;
      if (query_ready) begin failures++; $display("second query accepted while clearing"); end
      if (q == 0) begin
        // back-to-back start: must wait for the whole idle bank to be cleared
        waits = 0;
        while (!query_ready) begin waits++; @(negedge clk); end
        checks++;
        if (waits < ROWS - 1 || waits > ROWS + 2) begin
          failures++; $display("clearing took %0d cycles for %0d rows", waits, ROWS);
        end
        query_start = 1;
        @(negedge clk);
        query_start = 0;
      end
      foreach (model[i]) model[i] = 0;
      for (int n = 0; n < 400; n++) begin
        int idx;
        idx = (n % 3 == 0) ? $urandom_range(0, 39) : $urandom_range(0, P - 1);
        chk_idx = idx; chk_valid = 1;
        @(negedge clk);
        chk_valid = 0;
        checks++;
        if (!rsp_valid) begin failures++; $display("no response one cycle after check"); end
        else if (rsp_visited != model[idx]) begin
          failures++; $display("query %0d idx %0d visited %0d model %0d", q, idx, rsp_visited, model[idx]);
        end
        if (model[idx]) hits++;
        model[idx] = 1;
        @(negedge clk);
        checks++;
        if (!chk_ready) begin failures++; $display("chk_ready low after response"); end
      end
    end
    checks++;
    if (hits == 0) begin failures++; $display("no repeated visit"); end
    $display("repeated visits %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
