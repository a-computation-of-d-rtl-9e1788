// tb_pcoeff_pipeline: streams bottoms for several tops through one pipeline (4 cores here) and
// compares every result with the reference sum over the 5040 permutations. Also checks the
// latency of a bottom with no valid permutation (24 groups + drain + 1 = 26 cycles from the
// input transfer to out_valid), output hold under back-pressure, and that the generator stalls
// when a core is offered more candidates than it can take.
module tb_pcoeff_pipeline;
  import tb_ref_pkg::*;
  import dedekind_pkg::bottom_result_t;
  logic clk = 0, rst_n = 0;
  tt_t  alpha = '0, in_bottom = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, idle;
  bottom_result_t out_result;
  int checks = 0, failures = 0, cycle = 0, stalls = 0, backpressure = 0;

  pcoeff_pipeline #(.N_CORES(4), .K_SEQ(4)) dut (
    .clk, .rst_n, .alpha, .in_valid, .in_bottom, .in_ready, .out_valid, .out_ready,
    .out_result, .idle);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (int'(dut.state_q) == 1 && dut.remaining != '0) stalls++;   // 1 = S_RUN

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input tt_t a, input tt_t b, input int exp_latency, input bit slow_out);
    longint unsigned esum;
    int ecnt, t0;
    bottom_result_t held;
    ref_bottom(a, b, esum, ecnt);
    $display("[%0d] bottom: expect sum %0d count %0d", cycle, esum, ecnt);
    // signals are sampled at the falling edge, between two rising edges
    @(negedge clk);
    alpha = a; in_bottom = b; in_valid = 1;
    while (!in_ready) @(negedge clk);
    t0 = cycle;
    @(negedge clk);
    in_valid = 0;
    out_ready = !slow_out;
    while (!out_valid) @(negedge clk);
    if (exp_latency > 0) begin
      checks++;
      if (cycle - t0 != exp_latency) begin
        failures++; $display("FAIL latency %0d exp %0d", cycle - t0, exp_latency);
      end
    end
    if (slow_out) begin
      held = out_result;
      repeat (3) begin
        @(negedge clk);
        backpressure++;
        checks++;
        if (!out_valid || out_result != held) begin failures++; $display("FAIL output not held"); end
      end
      out_ready = 1;
    end
    checks += 2;
    if (out_result.pcoeff_sum != 48'(esum) || out_result.valid_count != 13'(ecnt)) begin
      failures++;
      $display("FAIL sum %0d/%0d count %0d/%0d", out_result.pcoeff_sum, esum,
               out_result.valid_count, ecnt);
    end
    @(negedge clk);
    out_ready = 0;
  endtask

  tt_t lvl [8];
  initial begin
    for (int s = 0; s < 8; s++) begin
      lvl[s] = '0;
      for (int x = 0; x < 128; x++) if ($countones(7'(x)) < s) lvl[s][x] = 1'b1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (!idle || !in_ready || out_valid) begin failures++; $display("FAIL reset state"); end
    // no permutation lies above alpha: pure generator time
    run(lvl[4], lvl[2], 26, 0);
    // beta = alpha, symmetric: every permutation valid with an empty graph, sum = 5040
    run(lvl[3], lvl[3], 0, 1);
    // full graph between levels: all valid
    run(lvl[2], lvl[5], 0, 0);
    for (int n = 0; n < 10; n++) begin
      tt_t a, b;
      a = (n % 3 == 0) ? lvl[1 + n % 3] : rand_monotone(1 + $urandom % 3, 1 + $urandom % 2);
      b = rand_monotone(2 + $urandom % 10, 3 + $urandom % 3) | a;
      run(a, b, 0, n % 4 == 1);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL generator never stalled"); end
    $display("generator stall cycles %0d, output back-pressure cycles %0d", stalls, backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
