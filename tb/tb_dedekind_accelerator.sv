// tb_dedekind_accelerator: end-to-end test of the accelerator at a reduced size (3 pipelines of
// 6 cores, so that cores run short and stalls are frequent). One top alpha, a stream of bottoms with random gaps on the input and random
// back-pressure on the output; every result is compared, in order, with the reference sum over
// the 5040 permutations. Counts how often each mechanism happened and fails if one never did:
// input back-pressure, output back-pressure, generator stall, bottoms with no valid permutation,
// empty graphs (gamma = alpha), and the round-robin pointers wrapping.
module tb_dedekind_accelerator;
  import tb_ref_pkg::*;
  import dedekind_pkg::bottom_result_t;
  localparam int NB = 7;
  logic clk = 0, rst_n = 0;
  tt_t  alpha = '0, in_bottom = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, idle;
  bottom_result_t out_result;
  int checks = 0, failures = 0;
  int n_in_bp = 0, n_out_bp = 0, n_stall = 0, n_none_valid = 0, n_empty = 0, n_wrap = 0;

  dedekind_accelerator #(.N_PIPELINES(3), .N_CORES(6)) dut (
    .clk, .rst_n, .alpha, .in_valid, .in_bottom, .in_ready, .out_valid, .out_ready,
    .out_result, .idle);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tt_t             bottoms [NB];
  longint unsigned esum [NB];
  int              ecnt [NB];

  // generator stalls in pipeline 0 (state 1 = run, some candidates left waiting)
  always @(posedge clk)
    if (rst_n && int'(dut.g_pipe[0].u_pipe.state_q) == 1 && dut.g_pipe[0].u_pipe.remaining != '0)
      n_stall++;
  // Driver and monitor both act at the falling edge, where every signal is stable: a transfer
  // seen there takes place at the next rising edge.
  int sent = 0, got = 0, bp_budget = 3;
  always @(negedge clk) if (rst_n) begin
    in_valid  = (sent < NB) && ($urandom % 4 != 0);
    in_bottom = (sent < NB) ? bottoms[sent] : '0;
    out_ready = ($urandom % 3 != 0);
    if (out_valid && bp_budget > 0) begin out_ready = 0; bp_budget--; end   // force some back-pressure
    if (in_valid && !in_ready) n_in_bp++;
    if (out_valid && !out_ready) n_out_bp++;
    if (in_valid && in_ready) begin
      if (dut.in_ptr_q == '0 && sent > 0) n_wrap++;
      sent++;
    end
    if (out_valid && out_ready) begin
      checks += 2;
      if (out_result.pcoeff_sum != 48'(esum[got]) || out_result.valid_count != 13'(ecnt[got])) begin
        failures++;
        $display("FAIL bottom %0d: sum %0d exp %0d, count %0d exp %0d", got,
                 out_result.pcoeff_sum, esum[got], out_result.valid_count, ecnt[got]);
      end
      got++;
    end
  end

  tt_t lvl [8];
  initial begin
    for (int s = 0; s < 8; s++) begin
      lvl[s] = '0;
      for (int x = 0; x < 128; x++) if ($countones(7'(x)) < s) lvl[s][x] = 1'b1;
    end
    alpha = lvl[2] | rand_monotone(1, 2);
    for (int n = 0; n < NB; n++) begin
      case (n % 5)
        0: bottoms[n] = lvl[2];                                      // nothing above alpha
        1: bottoms[n] = alpha;                                       // gamma = alpha once
        default: bottoms[n] = rand_monotone(2 + $urandom % 12, 3 + $urandom % 2) | alpha;
      endcase
      ref_bottom(alpha, bottoms[n], esum[n], ecnt[n]);
      if (ecnt[n] == 0) n_none_valid++;
      begin
        int p [7];
        for (int k = 0; k < 5040; k++) begin
          ref_perm(k, p);
          if (ref_apply(bottoms[n], p) == alpha) begin n_empty++; break; end
        end
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got == NB);
    repeat (2) @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL not idle at the end"); end
    $display("input back-pressure %0d, output back-pressure %0d, generator stalls %0d", n_in_bp, n_out_bp, n_stall);
    $display("bottoms without valid permutation %0d, with an empty graph %0d, pointer wraps %0d", n_none_valid, n_empty, n_wrap);
    checks += 6;
    if (n_in_bp == 0)      begin failures++; $display("FAIL no input back-pressure"); end
    if (n_out_bp == 0)     begin failures++; $display("FAIL no output back-pressure"); end
    if (n_stall == 0)      begin failures++; $display("FAIL no generator stall"); end
    if (n_none_valid == 0) begin failures++; $display("FAIL no bottom without valid permutation"); end
    if (n_empty == 0)      begin failures++; $display("FAIL no empty graph"); end
    if (n_wrap == 0)       begin failures++; $display("FAIL round robin never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
