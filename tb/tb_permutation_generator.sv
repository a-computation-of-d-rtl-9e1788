// tb_permutation_generator: loads bottoms, advances one group per cycle and checks that the
// 24 groups of 210 candidates are exactly the 5040 permutations of the bottom (as a multiset,
// against a Lehmer-code enumeration), that each valid flag equals alpha <= gamma, that last is
// high on the 24th group only, and that the generator holds its group while advance is low.
module tb_permutation_generator;
  import tb_ref_pkg::*;
  localparam int K = 4, LANES = 210, GROUPS = 24;
  logic clk = 0, rst_n = 0, load = 0, advance = 0, last;
  tt_t  beta = '0, alpha = '0;
  tt_t  gamma [LANES];
  logic [LANES-1:0] valid;
  int checks = 0, failures = 0;

  permutation_generator #(.K_SEQ(K), .LANES(LANES)) dut (
    .clk, .rst_n, .load, .beta, .alpha, .advance, .gamma, .valid, .last);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tt_t got [5040];
  tt_t expv [5040];
  bit  used [5040];

  task automatic run_bottom(input tt_t b, input tt_t a);
    int n = 0, nvalid_exp, nvalid_got;
    int p [7];
    tt_t hold [LANES];
    beta = b; alpha = a;
    load = 1;
    @(posedge clk); #1;
    load = 0;
    for (int g = 0; g < GROUPS; g++) begin
      checks++;
      if (last !== (g == GROUPS - 1)) begin failures++; $display("FAIL last at group %0d", g); end
      nvalid_got = 0; nvalid_exp = 0;
      for (int l = 0; l < LANES; l++) begin
        got[n++] = gamma[l];
        if (valid[l]) nvalid_got++;
        if ((a & ~gamma[l]) == '0) nvalid_exp++;
        if (valid[l] !== ((a & ~gamma[l]) == '0)) begin
          failures++; $display("FAIL valid flag group %0d lane %0d", g, l);
        end
      end
      checks++;
      // hold for one cycle with advance low on the third group
      if (g == 2) begin
        hold = gamma;
        @(posedge clk); #1;
        checks++;
        if (hold != gamma) begin failures++; $display("FAIL group not held"); end
      end
      advance = 1;
      @(posedge clk); #1;
      advance = 0;
    end
    // multiset comparison with the reference enumeration
    for (int k = 0; k < 5040; k++) begin
      ref_perm(k, p);
      expv[k] = ref_apply(b, p);
      used[k] = 0;
    end
    for (int k = 0; k < 5040; k++) begin
      bit found = 0;
      for (int m = 0; m < 5040 && !found; m++)
        if (!used[m] && expv[m] == got[k]) begin used[m] = 1; found = 1; end
      checks++;
      if (!found) begin failures++; if (failures < 5) $display("FAIL candidate %0d not a permutation", k); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // an asymmetric bottom: all 5040 permutations are distinct
    run_bottom(rand_monotone(1, 5) | rand_monotone(1, 4) | rand_monotone(2, 3) | rand_monotone(2, 2),
               rand_monotone(1, 2));
    run_bottom(rand_monotone(3, 4), rand_monotone(2, 1));
    run_bottom(rand_monotone(4, 3), '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
