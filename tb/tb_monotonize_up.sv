// tb_monotonize_up: compares the up-closure with a direct subset-test model on fixed and random
// 128-bit sets.
module tb_monotonize_up;
  import tb_ref_pkg::*;
  tt_t in_set, out_set;
  int  checks = 0, failures = 0;

  monotonize_up dut (.in_set, .out_set);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input tt_t v);
    in_set = v;
    #1;
    checks++;
    if (out_set !== ref_up(v)) begin
      failures++;
      $display("FAIL in=%h out=%h exp=%h", v, out_set, ref_up(v));
    end
  endtask

  initial begin
    check('0);
    check(tt_t'(1));                      // empty set -> everything
    check(tt_t'(1) << 127);               // full set -> itself
    for (int v = 0; v < 7; v++) check(tt_t'(1) << (1 << v));
    for (int n = 0; n < 200; n++) begin
      tt_t r = '0;
      for (int k = 0; k < 1 + n % 5; k++) r[$urandom % 128] = 1'b1;
      check(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
