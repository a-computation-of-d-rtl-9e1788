// tb_count_connected_core: feeds convex graphs (beta AND NOT alpha of random monotone functions,
// plus the empty graph, a single node and the full cube) to the core, back to back, and checks
// each count against a breadth-first-search model and each latency against 1 + the number of
// flood-fill steps.
module tb_count_connected_core;
  import tb_ref_pkg::*;
  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0, in_ready, out_valid;
  tt_t        in_graph = '0;
  logic [5:0] out_count;
  int checks = 0, failures = 0;
  int cycle = 0;

  count_connected_core dut (.clk, .rst_n, .in_valid, .in_graph, .in_ready, .out_valid, .out_count);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 300;
  tt_t graphs [NG];
  int  exp_count [NG], exp_lat [NG];
  int  total_iter = 0;
  int  max_count = 0;

  initial begin
    graphs[0] = '0;
    graphs[1] = tt_t'(1) << 37;
    graphs[2] = '1;
    graphs[3] = {64{2'b01}} & ~(tt_t'(1));   // odd-weight-free pattern: sets without element 0
    for (int n = 4; n < NG; n++) begin
      tt_t a, b;
      b = rand_monotone(1 + $urandom % 8, 2 + $urandom % 5);
      if (n % 2 == 0) a = rand_monotone($urandom % 6, 1 + $urandom % 3);
      else begin
        // alpha = all sets of at most s elements: beta's sets just above that level separate
        int s = 1 + $urandom % 3;
        a = '0;
        for (int x = 0; x < 128; x++) if ($countones(7'(x)) <= s) a[x] = 1'b1;
        b = rand_monotone(2 + $urandom % 30, s + 1 + $urandom % 2);
      end
      graphs[n] = b & ~a;
    end
    for (int n = 0; n < NG; n++) begin
      exp_count[n] = ref_components(graphs[n]);
      exp_lat[n]   = 1 + ref_iterations(graphs[n]);
      total_iter  += exp_lat[n] - 1;
      if (exp_count[n] > max_count) max_count = exp_count[n];
    end
    $display("mean steps per graph %0d/%0d, most components %0d", total_iter, NG, max_count);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // the core must be ready and silent after reset
    checks++;
    if (!in_ready || out_valid) begin failures++; $display("FAIL reset state"); end
  end

  // driver: offer the next graph whenever the core is ready
  int sent = 0;
  int t_sent [NG];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      t_sent[sent] = cycle;
      sent++;
    end
  end
  always_comb begin
    in_valid = rst_n && (sent < NG);
    in_graph = (sent < NG) ? graphs[sent] : '0;
  end

  // monitor
  int got = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out_count != 6'(exp_count[got])) begin
      failures++;
      $display("FAIL graph %0d count %0d exp %0d", got, out_count, exp_count[got]);
    end
    if (cycle - t_sent[got] != exp_lat[got]) begin
      failures++;
      $display("FAIL graph %0d latency %0d exp %0d", got, cycle - t_sent[got], exp_lat[got]);
    end
    got++;
    if (got == NG) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
