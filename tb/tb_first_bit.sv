// tb_first_bit: checks that only the lowest set bit survives, against a loop model.
module tb_first_bit;
  import tb_ref_pkg::*;
  tt_t in_set, out_set;
  int  checks = 0, failures = 0;

  first_bit dut (.in_set, .out_set);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tt_t model(input tt_t v);
    for (int k = 0; k < 128; k++) if (v[k]) return tt_t'(1) << k;
    return '0;
  endfunction

  task automatic check(input tt_t v);
    in_set = v;
    #1;
    checks++;
    if (out_set !== model(v)) begin
      failures++;
      $display("FAIL in=%h out=%h exp=%h", v, out_set, model(v));
    end
  endtask

  initial begin
    check('0);
    check('1);
    for (int k = 0; k < 128; k++) check(tt_t'(1) << k);
    for (int k = 0; k < 128; k++) check((tt_t'(1) << k) | (tt_t'(1) << 127));
    for (int n = 0; n < 200; n++) check({$urandom, $urandom, $urandom, $urandom} & ~(tt_t'({$urandom, $urandom, $urandom}) << ($urandom % 100)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
