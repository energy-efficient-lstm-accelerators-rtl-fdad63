// tb_activation_unit: checks that each gate gets its own activation: HardSigmoid* on i, f, o,
// HardTanh on g and on the returned cell state, with independent random inputs on every port.
module tb_activation_unit;
  logic signed [7:0] pi, pf, pg, po, c, ia, fa, ga, oa, ct;
  int checks = 0, failures = 0;

  activation_unit dut (
    .pre_i(pi), .pre_f(pf), .pre_g(pg), .pre_o(po), .c_in(c),
    .i_act(ia), .f_act(fa), .g_act(ga), .o_act(oa), .c_tanh(ct)
  );

  function automatic int hs(input int v);
    if (v < -48) return 0;
    if (v >= 48) return 16;
    return (v >>> 3) + 8;
  endfunction

  function automatic int ht(input int v);
    return (v > 16) ? 16 : (v < -16) ? -16 : v;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      pi = 8'($urandom); pf = 8'($urandom); pg = 8'($urandom); po = 8'($urandom); c = 8'($urandom);
      #1;
      check("i", int'(ia), hs(int'(pi)));
      check("f", int'(fa), hs(int'(pf)));
      check("o", int'(oa), hs(int'(po)));
      check("g", int'(ga), ht(int'(pg)));
      check("tanh(c)", int'(ct), ht(int'(c)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
