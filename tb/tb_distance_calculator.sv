// tb_distance_calculator: self-checking test of the 128-d squared-distance pipeline.
//
// Phase 1 streams 200 random vectors back to back with the output always ready and
// checks every distance against a sum computed here, that one result leaves per
// cycle and that the first result appears two cycles after its input (the
// two-stage pipeline). Phase 2 repeats with random input gaps and random output
// back-pressure and checks that no result is lost, duplicated or reordered.
// Extreme vectors (all 0 against all 255) check the full-width sum.
module tb_distance_calculator;
  import hnsw_pkg::*;
  localparam int N = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [VEC_W-1:0] query, data;
  logic in_valid, in_ready, out_valid, out_ready;
  dist_t dval;
  int checks = 0, failures = 0;
  dist_t expq [$];
  int sent, got, first_in_cyc, first_out_cyc, cyc, last_out_cyc;

  distance_calculator dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic dist_t ref_dist(logic [VEC_W-1:0] a, logic [VEC_W-1:0] b);
    dist_t s;
    int d;
    s = 0;
    for (int i = 0; i < DIM; i++) begin
      d = int'(a[8*i +: 8]) - int'(b[8*i +: 8]);
      s += dist_t'(d * d);
    end
    return s;
  endfunction

  function automatic logic [VEC_W-1:0] rand_vec();
    logic [VEC_W-1:0] v;
    for (int i = 0; i < VEC_W/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  // first accepted input, sampled on the same edge as the outputs
  always @(posedge clk) if (rst_n && in_valid && in_ready && first_in_cyc < 0) first_in_cyc = cyc;

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output %0d", dval);
    end else begin
      dist_t e;
      e = expq.pop_front();
      if (e !== dval) begin failures++; $display("dist %0d expected %0d", dval, e); end
    end
    if (got == 0) first_out_cyc = cyc;
    last_out_cyc = cyc;
    got++;
  end

  task automatic run(int n, bit random);
    logic [VEC_W-1:0] d;
    for (int k = 0; k < n; k++) begin
      d = (k == 0 && !random) ? {VEC_W{1'b1}} : rand_vec();
      if (k == 0 && !random) query = '0;
      while (random && ($urandom_range(0, 2) == 0)) begin
        in_valid <= 1'b0; @(posedge clk);
      end
      data <= d; in_valid <= 1'b1;
      expq.push_back(ref_dist(query, d));
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent++;
    end
    in_valid <= 1'b0;
  endtask

  initial begin
    query = '0; data = '0; in_valid = 0; out_ready = 1; cyc = 0; sent = 0; got = 0; first_in_cyc = -1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // phase 1: full rate
    run(N, 1'b0);
    repeat (5) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d of %0d", got, N); end
    checks++;
    if (first_out_cyc - first_in_cyc != 2) begin
      failures++; $display("latency %0d, expected 2", first_out_cyc - first_in_cyc);
    end
    checks++;
    if (last_out_cyc - first_out_cyc != N - 1) begin
      failures++; $display("%0d results took %0d cycles", N, last_out_cyc - first_out_cyc + 1);
    end
    // phase 2: random gaps and back-pressure
    query = rand_vec();
    sent = 0; got = 0;
    fork
      run(N, 1'b1);
      repeat (6 * N) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); end
    join
    out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (got != N || expq.size() != 0) begin failures++; $display("phase 2 got %0d", got); end
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
